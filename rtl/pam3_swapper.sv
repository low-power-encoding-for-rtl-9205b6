// pam3_swapper: the signal swapper shared by PAM3-MF and PAM3-SORT.
//
// Rewrites every symbol of the two lines through a 3-entry lookup: a symbol
// with code k leaves as map[k]. PAM3-MF drives the lookup with "exchange the
// most frequent symbol and +1", PAM3-SORT with "least frequent -> -1,
// middle -> 0, most frequent -> +1". The paper names one swapper for both
// algorithms; building it as a lookup driven by a mapping is this design's
// choice. map must be a permutation of {-1, 0, +1} (asserted). A symbol code
// of 3 passes unchanged. Combinational.
module pam3_swapper
  import pam3_pkg::*;
#(
  parameter int unsigned SYMS_PER_LINE = 8
) (
  input  sym_t [1:0][SYMS_PER_LINE-1:0] lines_i,
  input  sym_t [2:0]                    map,
  output sym_t [1:0][SYMS_PER_LINE-1:0] lines_o
);

  always_comb begin
    for (int l = 0; l < 2; l++) begin
      for (int i = 0; i < int'(SYMS_PER_LINE); i++) begin
        if (lines_i[l][i] == 2'd3) lines_o[l][i] = lines_i[l][i];
        else                       lines_o[l][i] = map[lines_i[l][i]];
      end
    end
  end

  // The mapping must be a bijection on the three symbols, or the receiver
  // could not undo it.
  always_comb begin
    assert (map[0] != 2'd3 && map[1] != 2'd3 && map[2] != 2'd3 &&
            map[0] != map[1] && map[0] != map[2] && map[1] != map[2])
      else $error("pam3_swapper: mapping is not a permutation");
  end

endmodule
