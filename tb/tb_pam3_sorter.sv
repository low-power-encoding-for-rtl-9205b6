// tb_pam3_sorter: checks the permutation number and the conversion map for
// every count triple that sums to 16 (all beats of two 8-symbol lines), plus
// the paper's example: counts (7, 4, 5) give permutation 3 and the map
// -1 -> +1, 0 -> -1, +1 -> 0.
module tb_pam3_sorter;
  import pam3_pkg::*;
  import pam3_ref_pkg::*;

  logic [2:0][4:0] cnt = '0;
  logic [2:0] perm;
  sym_t [2:0] map;
  int checks = 0, failures = 0;
  int seen [6] = '{0, 0, 0, 0, 0, 0};

  pam3_sorter dut (.cnt(cnt), .perm(perm), .map(map));

  initial begin
    cnt = {5'd5, 5'd4, 5'd7};
    #1;
    checks++;
    if (perm != 3'd3 || map[0] != SYM_P1 || map[1] != SYM_N1 || map[2] != SYM_Z) begin
      failures++; $display("paper example: perm %0d", perm);
    end
    for (int n1 = 0; n1 <= 16; n1++)
      for (int z = 0; z <= 16 - n1; z++) begin
        automatic int p1 = 16 - n1 - z;
        automatic line_t l, w;
        automatic int p, k = 0;
        // build a beat with these counts and let the reference sort it
        for (int a = 0; a < 2; a++) for (int i = 0; i < 8; i++) begin
          l[a][i] = (k < n1) ? -1 : (k < n1 + z) ? 0 : 1;
          k++;
        end
        p = sort(l, w);
        cnt = {5'(p1), 5'(z), 5'(n1)};
        #1;
        seen[p]++;
        checks += 2;
        if (int'(perm) != p) begin failures++; $display("counts %0d %0d %0d: perm %0d want %0d", n1, z, p1, perm, p); end
        // map must send the least frequent level to -1, the most to +1
        if (lvl(map[perm_row(p, 0) + 1]) != -1 || lvl(map[perm_row(p, 1) + 1]) != 0 ||
            lvl(map[perm_row(p, 2) + 1]) != 1) begin
          failures++; $display("counts %0d %0d %0d: map wrong", n1, z, p1);
        end
      end
    for (int r = 0; r < 6; r++) begin
      checks++;
      if (seen[r] == 0) begin failures++; $display("permutation %0d never seen", r); end
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
