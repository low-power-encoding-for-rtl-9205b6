// tb_pam3_sort_encoder: checks PAM3-SORT. Reproduces the paper's worked
// example symbol by symbol (permutation 3), then 4000 random beats against
// the reference. Each result must decode back to the input and must cost
// no more termination power than any of the six possible remappings.
module tb_pam3_sort_encoder;
  import pam3_pkg::*;
  import pam3_ref_pkg::*;

  sym_t [1:0][7:0] lines_i = '0, lines_o;
  logic [2:0] perm;
  int checks = 0, failures = 0;

  pam3_sort_encoder dut (.lines_i(lines_i), .lines_o(lines_o), .perm(perm));

  task automatic run(line_t l);
    line_t w, got;
    int p = sort(l, w);
    for (int a = 0; a < 2; a++) for (int i = 0; i < 8; i++) lines_i[a][i] = code(l[a][i]);
    #1;
    for (int a = 0; a < 2; a++) for (int i = 0; i < 8; i++) got[a][i] = lvl(lines_o[a][i]);
    checks += 4;
    if (int'(perm) != p) begin failures++; if (failures < 10) $display("perm %0d want %0d", perm, p); end
    if (got != w) begin failures++; if (failures < 10) $display("lines differ"); end
    if (perm < 6 && decode(2, int'(perm), got) != l) begin failures++; if (failures < 10) $display("decode failed"); end
    for (int r = 0; r < 6; r++) begin
      line_t alt = remap(l, perm_row(r, 0), perm_row(r, 1), perm_row(r, 2));
      if (power(alt) < power(got)) begin failures++; if (failures < 10) $display("not minimal"); break; end
    end
  endtask

  initial begin
    line_t l;
    automatic line_t ex_in  = '{'{1, -1, 0, 1, -1, 0, -1, 0}, '{-1, 1, -1, 1, 0, -1, -1, 1}};
    automatic line_t ex_out = '{'{0, 1, -1, 0, 1, -1, 1, -1}, '{1, 0, 1, 0, -1, 1, 1, 0}};
    line_t got;
    for (int a = 0; a < 2; a++) for (int i = 0; i < 8; i++) lines_i[a][i] = code(ex_in[a][i]);
    #1;
    for (int a = 0; a < 2; a++) for (int i = 0; i < 8; i++) got[a][i] = lvl(lines_o[a][i]);
    checks++;
    if (got != ex_out || perm != 3'd3) begin failures++; $display("paper example differs, perm %0d", perm); end
    repeat (4000) begin
      for (int a = 0; a < 2; a++) for (int i = 0; i < 8; i++) l[a][i] = int'($urandom_range(2)) - 1;
      run(l);
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
