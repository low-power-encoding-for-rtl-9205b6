// pam3_mf_encoder: PAM3-MF, "most frequent" remapping of a PAM-3 beat.
//
// Counts the three symbols, picks the most frequent one (argmax; on a tie
// the lowest code wins, -1 before 0 before +1) and exchanges it with +1, the
// level that draws no termination current. The other symbol keeps its
// level. The 2-bit flag mf_flag carries the code of the most frequent
// symbol (0: -1, 1: 0, 2: +1), which is all a receiver needs to undo the
// exchange. When +1 is already the most frequent, the beat passes
// unchanged. The algorithm and the 2-bit flag are the paper's; the flag
// coding and the tie rule are this design's choice.
//
// Interface: two lines of SYMS_PER_LINE symbols in and out, 2 flag wires.
// Combinational.
module pam3_mf_encoder
  import pam3_pkg::*;
#(
  parameter int unsigned SYMS_PER_LINE = 8
) (
  input  sym_t [1:0][SYMS_PER_LINE-1:0] lines_i,
  output sym_t [1:0][SYMS_PER_LINE-1:0] lines_o,
  output sym_t                          mf_flag
);

  localparam int unsigned CW = cnt_width(2 * SYMS_PER_LINE);

  logic [2:0][CW-1:0] cnt;
  sym_t [2:0]         map;

  pam3_counter #(.SYMS_PER_LINE(SYMS_PER_LINE)) u_counter (
    .lines (lines_i),
    .cnt   (cnt)
  );

  // argmax with the lowest index winning ties
  always_comb begin
    if (cnt[0] >= cnt[1] && cnt[0] >= cnt[2]) mf_flag = SYM_N1;
    else if (cnt[1] >= cnt[2])                mf_flag = SYM_Z;
    else                                      mf_flag = SYM_P1;
  end

  // exchange mf_flag and +1, keep the third symbol
  always_comb begin
    map         = {SYM_P1, SYM_Z, SYM_N1};
    map[mf_flag] = SYM_P1;
    map[SYM_P1]  = mf_flag;
  end

  pam3_swapper #(.SYMS_PER_LINE(SYMS_PER_LINE)) u_swapper (
    .lines_i (lines_i),
    .map     (map),
    .lines_o (lines_o)
  );

endmodule
