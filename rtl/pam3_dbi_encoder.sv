// pam3_dbi_encoder: PAM3-DBI, data bus inversion for a PAM-3 beat.
//
// The termination power of a beat is proportional to 2*cnt(-1) + cnt(0)
// (units of VDD^2/200). Inverting every symbol swaps cnt(-1) and cnt(+1)
// and leaves cnt(0) alone, so it pays off exactly when cnt(-1) > cnt(+1).
// In that case every symbol is negated (-1 <-> +1, 0 stays) and inv_flag
// is 1; otherwise the lines pass unchanged with inv_flag 0. A tie does not
// invert. The rule, the 1-bit flag, the three counters and the signal
// inverters are the paper's; negating symbols rather than the source bits
// is equivalent under the mapping of pam3_mapper. The count of 0 symbols
// leaves the shared counter unused here, because the cost of 0 is the same
// before and after inversion.
//
// Interface: two lines of SYMS_PER_LINE symbols in and out, 1 flag wire.
// Combinational.
module pam3_dbi_encoder
  import pam3_pkg::*;
#(
  parameter int unsigned SYMS_PER_LINE = 8
) (
  input  sym_t [1:0][SYMS_PER_LINE-1:0] lines_i,
  output sym_t [1:0][SYMS_PER_LINE-1:0] lines_o,
  output logic                          inv_flag
);

  localparam int unsigned CW = cnt_width(2 * SYMS_PER_LINE);

  logic [2:0][CW-1:0] cnt;

  pam3_counter #(.SYMS_PER_LINE(SYMS_PER_LINE)) u_counter (
    .lines (lines_i),
    .cnt   (cnt)
  );

  assign inv_flag = (cnt[0] > cnt[2]);

  // Signal inverters.
  always_comb begin
    for (int l = 0; l < 2; l++) begin
      for (int i = 0; i < int'(SYMS_PER_LINE); i++) begin
        lines_o[l][i] = inv_flag ? sym_negate(lines_i[l][i]) : lines_i[l][i];
      end
    end
  end

endmodule
