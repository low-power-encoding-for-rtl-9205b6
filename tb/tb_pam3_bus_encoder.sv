// tb_pam3_bus_encoder: end-to-end test of the encoder top at its default
// size (three 8-bit words, two 8-symbol lines).
//
// Sends 6000 beats with a random algorithm per beat, random idle cycles and
// two resets in the middle of the stream. Every beat is checked one clock
// after it was sent: valid_o, the flag and both lines against the reference
// model, and a round trip (decode with the flag, demodulate) that must give
// back the three words. The test counts how often each mechanism occurs and
// fails if one never did: DBI inverting and passing, each most-frequent
// symbol in MF, each of the six SORT permutations, a change of algorithm
// between back-to-back beats, idle cycles and a reset.
module tb_pam3_bus_encoder;
  import pam3_pkg::*;
  import pam3_ref_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0, valid_i = 1'b0;
  enc_mode_e mode_i = MODE_DBI;
  logic [7:0] word_x = '0, word_y = '0, word_z = '0;
  logic valid_o;
  sym_t [1:0][7:0] lines_o;
  logic [2:0] flag_o;

  pam3_bus_encoder dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0, cycles = 0;
  int n_dbi_inv = 0, n_dbi_pass = 0, n_switch = 0, n_idle = 0, n_reset = 0;
  int n_mf [3] = '{0, 0, 0};
  int n_sort [6] = '{0, 0, 0, 0, 0, 0};

  // the beat presented before the last rising edge
  logic       prev_valid = 1'b0, prev_rst = 1'b1;
  int         prev_mode = 0, last_mode = -1;
  logic [7:0] px, py, pz;

  always @(posedge clk) cycles <= cycles + 1;

  task automatic fail(string msg);
    failures++;
    if (failures < 20) $display("t=%0t %s", $time, msg);
  endtask

  // Check the outputs just after the rising edge that took the beat in.
  task automatic check_output();
    line_t raw, want, got;
    int want_flag;
    logic [7:0] dx, dy, dz;
    checks++;
    if (valid_o !== (prev_valid && !prev_rst)) fail("valid_o wrong");
    if (prev_rst) begin
      checks++;
      if (lines_o != '0 || flag_o != '0) fail("reset did not clear outputs");
      return;
    end
    if (!prev_valid) return;
    raw = modulate(px, py, pz);
    case (prev_mode)
      0: want_flag = dbi(px, py, pz, want);
      1: want_flag = mf(raw, want) + 1;
      default: want_flag = sort(raw, want);
    endcase
    for (int a = 0; a < 2; a++) for (int i = 0; i < 8; i++) got[a][i] = lvl(lines_o[a][i]);
    checks += 3;
    if (int'(flag_o) != want_flag) fail($sformatf("mode %0d flag %0d want %0d", prev_mode, flag_o, want_flag));
    if (got != want) fail($sformatf("mode %0d lines differ", prev_mode));
    if (!demodulate(decode(prev_mode, int'(flag_o), got), dx, dy, dz) ||
        dx != px || dy != py || dz != pz) fail("round trip failed");
    case (prev_mode)
      0: if (flag_o[0]) n_dbi_inv++; else n_dbi_pass++;
      1: if (flag_o < 3) n_mf[flag_o[1:0]]++;
      default: if (flag_o < 6) n_sort[flag_o]++;
    endcase
  endtask

  task automatic drive(logic v, int m, logic r);
    @(negedge clk);
    rst_n   = r;
    valid_i = v;
    mode_i  = enc_mode_e'(m);
    word_x  = 8'($urandom);
    word_y  = 8'($urandom);
    word_z  = 8'($urandom);
    // bias some beats so that 0 or +1 dominate and every case shows up
    if ($urandom_range(3) == 0) begin word_x = 8'h00; word_y = 8'hff; word_z = 8'($urandom); end
    if ($urandom_range(5) == 0) begin word_x = 8'hff; word_y = 8'($urandom); end
    prev_valid = v; prev_rst = !r; prev_mode = m;
    px = word_x; py = word_y; pz = word_z;
    @(posedge clk);
    #1;
    check_output();
    if (!r) n_reset++;
    else if (!v) n_idle++;
    else begin
      if (last_mode >= 0 && last_mode != m) n_switch++;
      last_mode = m;
    end
  endtask

  initial begin
    drive(1'b0, 0, 1'b0);
    drive(1'b0, 0, 1'b0);
    for (int n = 0; n < 6000; n++) begin
      if (n == 2000 || n == 4000) drive(1'b1, 0, 1'b0);
      if ($urandom_range(7) == 0) drive(1'b0, 0, 1'b1);
      drive(1'b1, int'($urandom_range(2)), 1'b1);
    end
    drive(1'b0, 0, 1'b1);
    checks += 12;
    if (n_dbi_inv == 0)  fail("DBI never inverted");
    if (n_dbi_pass == 0) fail("DBI never passed");
    for (int k = 0; k < 3; k++) if (n_mf[k] == 0) fail($sformatf("MF flag %0d never seen", k));
    for (int k = 0; k < 6; k++) if (n_sort[k] == 0) fail($sformatf("SORT permutation %0d never seen", k));
    if (n_switch == 0) fail("no mode switch");
    checks += 2;
    if (n_idle == 0)  fail("no idle cycle");
    if (n_reset == 0) fail("no reset");
    $display("DBI invert/pass %0d/%0d, MF -1/0/+1 %0d/%0d/%0d, SORT perms %0d %0d %0d %0d %0d %0d",
             n_dbi_inv, n_dbi_pass, n_mf[0], n_mf[1], n_mf[2],
             n_sort[0], n_sort[1], n_sort[2], n_sort[3], n_sort[4], n_sort[5]);
    $display("mode switches %0d, idle cycles %0d, resets %0d, cycles %0d", n_switch, n_idle, n_reset, cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
