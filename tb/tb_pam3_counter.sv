// tb_pam3_counter: checks cnt(-1), cnt(0), cnt(+1) over two lines.
// Uses the paper's counting example (7, 4, 5), all-equal lines, and 3000
// random lines of legal symbols, against counts taken by the reference.
module tb_pam3_counter;
  import pam3_pkg::*;
  import pam3_ref_pkg::*;

  sym_t [1:0][7:0] lines = '0;
  logic [2:0][4:0] cnt;
  int checks = 0, failures = 0;

  pam3_counter dut (.lines(lines), .cnt(cnt));

  task automatic check(line_t r);
    for (int a = 0; a < 2; a++)
      for (int i = 0; i < 8; i++) lines[a][i] = code(r[a][i]);
    #1;
    for (int v = -1; v <= 1; v++) begin
      checks++;
      if (int'(cnt[v+1]) != count(r, v)) begin
        failures++;
        if (failures < 10) $display("cnt(%0d) = %0d, want %0d", v, cnt[v+1], count(r, v));
      end
    end
  endtask

  initial begin
    line_t r;
    // paper's example: line X +1 -1 0 +1 -1 0 -1 0, line Y -1 +1 -1 +1 0 -1 -1 +1
    r = '{'{1, -1, 0, 1, -1, 0, -1, 0}, '{-1, 1, -1, 1, 0, -1, -1, 1}};
    check(r);
    checks++;
    if (cnt[0] != 7 || cnt[1] != 4 || cnt[2] != 5) begin
      failures++; $display("example counts wrong");
    end
    for (int v = -1; v <= 1; v++) begin
      for (int a = 0; a < 2; a++) for (int i = 0; i < 8; i++) r[a][i] = v;
      check(r);
    end
    repeat (3000) begin
      for (int a = 0; a < 2; a++) for (int i = 0; i < 8; i++) r[a][i] = int'($urandom_range(2)) - 1;
      check(r);
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
