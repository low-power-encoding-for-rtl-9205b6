// tb_pam3_mapper: checks the 3-bit to 2-symbol modulation.
// First every 3-bit code in every column position, then 2000 random beats,
// each compared with the reference modulation, which numbers the pairs in
// ternary and skips [0, 0]. Also checks the eight columns of the paper's
// modulation example (000..111 in columns 0..7).
module tb_pam3_mapper;
  import pam3_pkg::*;
  import pam3_ref_pkg::*;

  logic [7:0] x = '0, y = '0, z = '0;
  sym_t [1:0][7:0] lines;
  int checks = 0, failures = 0;

  pam3_mapper dut (.word_x(x), .word_y(y), .word_z(z), .lines(lines));

  task automatic check_beat();
    line_t r = modulate(x, y, z);
    #1;
    for (int a = 0; a < 2; a++)
      for (int i = 0; i < 8; i++) begin
        checks++;
        if (lvl(lines[a][i]) != r[a][i]) begin
          failures++;
          if (failures < 10) $display("mismatch x=%h y=%h z=%h line %0d slot %0d: got %0d want %0d",
                                      x, y, z, a, i, lvl(lines[a][i]), r[a][i]);
        end
      end
  endtask

  initial begin
    // paper's example: column i holds code i
    x = 8'b1111_0000; y = 8'b1100_1100; z = 8'b1010_1010;
    #1;
    begin
      automatic int ex [8][2] = '{'{-1,-1}, '{-1,0}, '{-1,1}, '{0,-1}, '{0,1}, '{1,-1}, '{1,0}, '{1,1}};
      for (int i = 0; i < 8; i++) begin
        checks += 2;
        if (lvl(lines[0][i]) != ex[i][0] || lvl(lines[1][i]) != ex[i][1]) begin
          failures++;
          $display("example column %0d wrong", i);
        end
      end
    end
    for (int pos = 0; pos < 8; pos++)
      for (int c = 0; c < 8; c++) begin
        x = 8'(c[2]) << pos; y = 8'(c[1]) << pos; z = 8'(c[0]) << pos;
        check_beat();
      end
    repeat (2000) begin
      x = 8'($urandom); y = 8'($urandom); z = 8'($urandom);
      check_beat();
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
