// tb_pam3_mf_encoder: checks PAM3-MF. Reproduces the paper's worked example
// symbol by symbol (most frequent is -1, so -1 and +1 exchange), then 3000
// random beats and 1000 beats biased towards 0 against the reference, and
// checks that decoding with the flag returns the input.
module tb_pam3_mf_encoder;
  import pam3_pkg::*;
  import pam3_ref_pkg::*;

  sym_t [1:0][7:0] lines_i = '0, lines_o;
  sym_t mf_flag;
  int checks = 0, failures = 0;
  int seen [3] = '{0, 0, 0};

  pam3_mf_encoder dut (.lines_i(lines_i), .lines_o(lines_o), .mf_flag(mf_flag));

  task automatic run(line_t l);
    line_t w, got;
    int best = mf(l, w);
    for (int a = 0; a < 2; a++) for (int i = 0; i < 8; i++) lines_i[a][i] = code(l[a][i]);
    #1;
    for (int a = 0; a < 2; a++) for (int i = 0; i < 8; i++) got[a][i] = lvl(lines_o[a][i]);
    seen[best + 1]++;
    checks += 3;
    if (lvl(mf_flag) != best) begin failures++; if (failures < 10) $display("flag %0d want %0d", lvl(mf_flag), best); end
    if (got != w) begin failures++; if (failures < 10) $display("lines differ"); end
    if (decode(1, int'(mf_flag), got) != l) begin failures++; if (failures < 10) $display("decode failed"); end
  endtask

  initial begin
    line_t l;
    automatic line_t ex_in  = '{'{1, -1, 0, 1, -1, 0, -1, 0}, '{-1, 1, -1, 1, 0, -1, -1, 1}};
    automatic line_t ex_out = '{'{-1, 1, 0, -1, 1, 0, 1, 0}, '{1, -1, 1, -1, 0, 1, 1, -1}};
    line_t got;
    for (int a = 0; a < 2; a++) for (int i = 0; i < 8; i++) lines_i[a][i] = code(ex_in[a][i]);
    #1;
    for (int a = 0; a < 2; a++) for (int i = 0; i < 8; i++) got[a][i] = lvl(lines_o[a][i]);
    checks++;
    if (got != ex_out || lvl(mf_flag) != -1) begin failures++; $display("paper example differs"); end
    repeat (3000) begin
      for (int a = 0; a < 2; a++) for (int i = 0; i < 8; i++) l[a][i] = int'($urandom_range(2)) - 1;
      run(l);
    end
    repeat (1000) begin
      for (int a = 0; a < 2; a++) for (int i = 0; i < 8; i++)
        l[a][i] = ($urandom_range(1) == 1) ? 0 : int'($urandom_range(2)) - 1;
      run(l);
    end
    checks++;
    if (seen[0] == 0 || seen[1] == 0 || seen[2] == 0) begin failures++; $display("a flag value never seen"); end
    $display("most frequent -1/0/+1: %0d %0d %0d", seen[0], seen[1], seen[2]);
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
