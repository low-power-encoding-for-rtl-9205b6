// pam3_sorter: the signal sorter of PAM3-SORT.
//
// Orders the three symbols by their counts, least frequent first (argsort),
// and numbers the resulting order with the permutation table of the paper:
//   perm  least  middle  most
//     0    -1      0      +1
//     1    -1     +1       0
//     2     0     -1      +1
//     3     0     +1      -1
//     4    +1     -1       0
//     5    +1      0      -1
// The table is the lexicographic order of the six permutations, so the
// number is 2*code(least) + (code(middle) > code(most)). Equal counts keep
// the order -1, 0, +1 (a stable sort); that tie rule is this design's
// choice. It also gives the conversion map: least -> -1, middle -> 0,
// most -> +1. The rank of a symbol (how many symbols sort before it) is
// the code it is converted to, so map[k] = rank(k).
//
// Interface: cnt[k] is the count of the symbol with code k; perm is the
// 3-bit flag value; map feeds pam3_swapper. Combinational.
module pam3_sorter
  import pam3_pkg::*;
#(
  parameter int unsigned CW = 5
) (
  input  logic [2:0][CW-1:0] cnt,
  output logic [2:0]         perm,
  output sym_t [2:0]         map
);

  // ahead[a][b]: symbol a sorts ahead of symbol b
  logic [2:0][2:0] ahead;
  sym_t [2:0]      order;  // order[r]: symbol with rank r

  always_comb begin
    for (int a = 0; a < 3; a++) begin
      for (int b = 0; b < 3; b++) begin
        ahead[a][b] = (cnt[a] < cnt[b]) || (cnt[a] == cnt[b] && a < b);
      end
    end
    order = '0;
    for (int k = 0; k < 3; k++) begin
      map[k] = sym_t'(32'(ahead[0][k]) + 32'(ahead[1][k]) + 32'(ahead[2][k]));
      order[map[k]] = sym_t'(k);
    end
    perm = {order[0], 1'b0} + {2'b00, order[1] > order[2]};
  end

endmodule
