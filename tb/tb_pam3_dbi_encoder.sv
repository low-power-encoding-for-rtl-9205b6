// tb_pam3_dbi_encoder: checks PAM3-DBI against the reference, which inverts
// the 24 source bits and modulates them again when cnt(-1) > cnt(+1).
// Covers the paper's counting example (7 > 5, so it inverts), ties between
// cnt(-1) and cnt(+1) (no inversion) and 3000 random beats. Also checks that
// the output never costs more termination power than the input.
module tb_pam3_dbi_encoder;
  import pam3_pkg::*;
  import pam3_ref_pkg::*;

  sym_t [1:0][7:0] lines_i = '0, lines_o;
  logic inv_flag;
  int checks = 0, failures = 0, n_inv = 0, n_tie = 0;

  pam3_dbi_encoder dut (.lines_i(lines_i), .lines_o(lines_o), .inv_flag(inv_flag));

  task automatic run(logic [7:0] x, logic [7:0] y, logic [7:0] z);
    line_t l = modulate(x, y, z), w;
    line_t got;
    int f = dbi(x, y, z, w);
    for (int a = 0; a < 2; a++) for (int i = 0; i < 8; i++) lines_i[a][i] = code(l[a][i]);
    #1;
    for (int a = 0; a < 2; a++) for (int i = 0; i < 8; i++) got[a][i] = lvl(lines_o[a][i]);
    if (count(l, -1) == count(l, 1)) n_tie++;
    if (f == 1) n_inv++;
    checks += 3;
    if (int'(inv_flag) != f) begin failures++; $display("flag %0d want %0d", inv_flag, f); end
    if (got != w) begin failures++; if (failures < 10) $display("lines differ x=%h y=%h z=%h", x, y, z); end
    if (power(got) > power(l)) begin failures++; $display("power went up"); end
  endtask

  initial begin
    automatic line_t ex = '{'{1, -1, 0, 1, -1, 0, -1, 0}, '{-1, 1, -1, 1, 0, -1, -1, 1}};
    for (int a = 0; a < 2; a++) for (int i = 0; i < 8; i++) lines_i[a][i] = code(ex[a][i]);
    #1;
    checks++;
    if (inv_flag !== 1'b1 || lvl(lines_o[0][0]) != -1 || lvl(lines_o[1][0]) != 1) begin
      failures++; $display("example not inverted");
    end
    run(8'h00, 8'h00, 8'h00);
    run(8'hff, 8'hff, 8'hff);
    run(8'hf0, 8'hcc, 8'haa);
    repeat (3000) run(8'($urandom), 8'($urandom), 8'($urandom));
    checks += 2;
    if (n_inv == 0) begin failures++; $display("inversion never happened"); end
    if (n_tie == 0) begin failures++; $display("tie never happened"); end
    $display("inverted %0d, ties %0d", n_inv, n_tie);
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
