// pam3_sort_encoder: PAM3-SORT, frequency-sorted remapping of a PAM-3 beat.
//
// The three symbols are counted over both lines, sorted by count, and
// remapped so that the most frequent symbol is sent as +1 (no termination
// current), the next as 0 and the least frequent as -1. This is the
// assignment of lowest power for the beat. The 3-bit permutation number of
// the sorted order is sent on the flag wires; the receiver inverts the
// mapping from it. Counters, sorter and swapper are the three parts the
// paper lists for this algorithm; one permutation for both lines follows
// the paper's worked example and its single 3-bit flag.
//
// Interface: two lines of SYMS_PER_LINE symbols in and out, 3 flag wires
// (values 0..5). Combinational.
module pam3_sort_encoder
  import pam3_pkg::*;
#(
  parameter int unsigned SYMS_PER_LINE = 8
) (
  input  sym_t [1:0][SYMS_PER_LINE-1:0] lines_i,
  output sym_t [1:0][SYMS_PER_LINE-1:0] lines_o,
  output logic [2:0]                    perm
);

  localparam int unsigned CW = cnt_width(2 * SYMS_PER_LINE);

  logic [2:0][CW-1:0] cnt;
  sym_t [2:0]         map;

  pam3_counter #(.SYMS_PER_LINE(SYMS_PER_LINE)) u_counter (
    .lines (lines_i),
    .cnt   (cnt)
  );

  pam3_sorter #(.CW(CW)) u_sorter (
    .cnt  (cnt),
    .perm (perm),
    .map  (map)
  );

  pam3_swapper #(.SYMS_PER_LINE(SYMS_PER_LINE)) u_swapper (
    .lines_i (lines_i),
    .map     (map),
    .lines_o (lines_o)
  );

endmodule
