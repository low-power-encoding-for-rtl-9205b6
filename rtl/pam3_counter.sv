// pam3_counter: the three symbol counters cnt(-1), cnt(0), cnt(+1).
//
// Counts how many of the 2*SYMS_PER_LINE symbols on the two lines are -1, 0
// and +1. The paper asks for three counters over the data word; here they
// are combinational population counts, so a whole beat is counted in the
// same cycle. cnt[k] is the count of the symbol whose code is k (0: -1,
// 1: 0, 2: +1). A symbol code of 3 is counted nowhere. The three counts
// always add up to 2*SYMS_PER_LINE for legal input.
module pam3_counter
  import pam3_pkg::*;
#(
  parameter int unsigned SYMS_PER_LINE = 8,
  localparam int unsigned CW = cnt_width(2 * SYMS_PER_LINE)
) (
  input  sym_t [1:0][SYMS_PER_LINE-1:0] lines,
  output logic [2:0][CW-1:0]            cnt
);

  always_comb begin
    cnt = '0;
    for (int l = 0; l < 2; l++) begin
      for (int i = 0; i < int'(SYMS_PER_LINE); i++) begin
        case (lines[l][i])
          SYM_N1:  cnt[0] = cnt[0] + 1'b1;
          SYM_Z:   cnt[1] = cnt[1] + 1'b1;
          SYM_P1:  cnt[2] = cnt[2] + 1'b1;
          default: ;
        endcase
      end
    end
  end

endmodule
