// tb_pam3_swapper: checks the symbol swapper with each of the six
// permutations of {-1, 0, +1} on 500 random line pairs each.
module tb_pam3_swapper;
  import pam3_pkg::*;
  import pam3_ref_pkg::*;

  sym_t [1:0][7:0] lines_i = '0, lines_o;
  sym_t [2:0]      map = {SYM_P1, SYM_Z, SYM_N1};
  int checks = 0, failures = 0;

  pam3_swapper dut (.lines_i(lines_i), .map(map), .lines_o(lines_o));

  initial begin
    line_t r, w;
    for (int p = 0; p < 6; p++) begin
      // row p of the permutation table read as "level k-1 becomes perm_row(p,k)"
      automatic int t0 = perm_row(p, 0), t1 = perm_row(p, 1), t2 = perm_row(p, 2);
      map = {code(t2), code(t1), code(t0)};
      repeat (500) begin
        for (int a = 0; a < 2; a++) for (int i = 0; i < 8; i++) begin
          r[a][i] = int'($urandom_range(2)) - 1;
          lines_i[a][i] = code(r[a][i]);
        end
        w = remap(r, t0, t1, t2);
        #1;
        for (int a = 0; a < 2; a++) for (int i = 0; i < 8; i++) begin
          checks++;
          if (lvl(lines_o[a][i]) != w[a][i]) begin
            failures++;
            if (failures < 10) $display("perm %0d line %0d slot %0d: got %0d want %0d",
                                        p, a, i, lvl(lines_o[a][i]), w[a][i]);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
