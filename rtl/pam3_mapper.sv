// pam3_mapper: binary-to-PAM-3 modulation of one 24-bit beat.
//
// Three words X, Y and Z of WORD_BITS bits are read column by column: bit i
// of X, Y and Z forms the 3-bit code {X[i], Y[i], Z[i]}, and that code becomes
// a pair of PAM-3 symbols. The pairs are those of the paper's modulation
// figure, in ternary counting order with the pair [0, 0] left out:
//   000 [-1,-1]  001 [-1, 0]  010 [-1,+1]  011 [ 0,-1]
//   100 [ 0,+1]  101 [+1,-1]  110 [+1, 0]  111 [+1,+1]
// Leaving out [0, 0] makes the mapping odd-symmetric: the complement of a
// code maps to the negated pair, which is what lets DBI invert symbols.
// The first symbol of column i goes to line X slot i, the second to line Y
// slot i; this placement, and column i being bit i, are this design's choice.
//
// Interface: lines[0] is line X, lines[1] is line Y, each SYMS_PER_LINE
// symbols (one per column, so SYMS_PER_LINE == WORD_BITS). Purely
// combinational, no clock.
module pam3_mapper
  import pam3_pkg::*;
#(
  parameter int unsigned WORD_BITS = 8
) (
  input  logic [WORD_BITS-1:0]            word_x,
  input  logic [WORD_BITS-1:0]            word_y,
  input  logic [WORD_BITS-1:0]            word_z,
  output sym_t [1:0][WORD_BITS-1:0]       lines
);

  always_comb begin
    for (int i = 0; i < int'(WORD_BITS); i++) begin
      case ({word_x[i], word_y[i], word_z[i]})
        3'b000:  begin lines[0][i] = SYM_N1; lines[1][i] = SYM_N1; end
        3'b001:  begin lines[0][i] = SYM_N1; lines[1][i] = SYM_Z;  end
        3'b010:  begin lines[0][i] = SYM_N1; lines[1][i] = SYM_P1; end
        3'b011:  begin lines[0][i] = SYM_Z;  lines[1][i] = SYM_N1; end
        3'b100:  begin lines[0][i] = SYM_Z;  lines[1][i] = SYM_P1; end
        3'b101:  begin lines[0][i] = SYM_P1; lines[1][i] = SYM_N1; end
        3'b110:  begin lines[0][i] = SYM_P1; lines[1][i] = SYM_Z;  end
        default: begin lines[0][i] = SYM_P1; lines[1][i] = SYM_P1; end
      endcase
    end
  end

endmodule
