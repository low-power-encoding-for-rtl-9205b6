// pam3_bus_encoder: low-power PAM-3 encoder for one DRAM bus beat.
//
// Each clock, one beat of three 8-bit words X, Y, Z (24 bits) enters. It is
// modulated onto two PAM-3 lines of 8 symbols each (pam3_mapper) and encoded
// by one of three algorithms chosen per beat with mode_i:
//   MODE_DBI  : PAM3-DBI,  invert all symbols if cnt(-1) > cnt(+1); 1 flag bit
//   MODE_MF   : PAM3-MF,   swap the most frequent symbol with +1;    2 flag bits
//   MODE_SORT : PAM3-SORT, remap least/middle/most to -1/0/+1;       3 flag bits
// The three encoders run in parallel on the same lines and a multiplexer
// picks one. The encoded lines and the flag field are registered, so the
// beat appears on lines_o/flag_o one clock after it was presented
// (valid_o follows valid_i by one clock). flag_o carries the selected
// algorithm's flag, zero-extended to 3 bits. mode_i = 3 is not a legal mode
// (asserted) and encodes like MODE_DBI.
//
// The algorithms and flag widths follow the paper. Holding all three behind
// a mode select, the 1-clock register stage and the reset values are this
// design's choices. rst_n is an active-low synchronous reset that clears
// valid_o, the lines (to code 0) and the flag.
module pam3_bus_encoder
  import pam3_pkg::*;
#(
  parameter int unsigned SYMS_PER_LINE = 8
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          valid_i,
  input  enc_mode_e                     mode_i,
  input  logic [SYMS_PER_LINE-1:0]      word_x,
  input  logic [SYMS_PER_LINE-1:0]      word_y,
  input  logic [SYMS_PER_LINE-1:0]      word_z,
  output logic                          valid_o,
  output sym_t [1:0][SYMS_PER_LINE-1:0] lines_o,
  output logic [2:0]                    flag_o
);

  sym_t [1:0][SYMS_PER_LINE-1:0] lines_raw, lines_dbi, lines_mf, lines_sort;
  logic                          inv_flag;
  sym_t                          mf_flag;
  logic [2:0]                    perm;

  pam3_mapper #(.WORD_BITS(SYMS_PER_LINE)) u_mapper (
    .word_x (word_x),
    .word_y (word_y),
    .word_z (word_z),
    .lines  (lines_raw)
  );

  pam3_dbi_encoder #(.SYMS_PER_LINE(SYMS_PER_LINE)) u_dbi (
    .lines_i  (lines_raw),
    .lines_o  (lines_dbi),
    .inv_flag (inv_flag)
  );

  pam3_mf_encoder #(.SYMS_PER_LINE(SYMS_PER_LINE)) u_mf (
    .lines_i (lines_raw),
    .lines_o (lines_mf),
    .mf_flag (mf_flag)
  );

  pam3_sort_encoder #(.SYMS_PER_LINE(SYMS_PER_LINE)) u_sort (
    .lines_i (lines_raw),
    .lines_o (lines_sort),
    .perm    (perm)
  );

  sym_t [1:0][SYMS_PER_LINE-1:0] lines_sel;
  logic [2:0]                    flag_sel;

  always_comb begin
    case (mode_i)
      MODE_MF: begin
        lines_sel = lines_mf;
        flag_sel  = {1'b0, mf_flag};
      end
      MODE_SORT: begin
        lines_sel = lines_sort;
        flag_sel  = perm;
      end
      default: begin
        lines_sel = lines_dbi;
        flag_sel  = {2'b00, inv_flag};
      end
    endcase
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      valid_o <= 1'b0;
      lines_o <= '0;
      flag_o  <= '0;
    end else begin
      valid_o <= valid_i;
      if (valid_i) begin
        lines_o <= lines_sel;
        flag_o  <= flag_sel;
      end
    end
  end

  a_legal_mode : assert property (@(posedge clk) disable iff (!rst_n)
                                  valid_i |-> mode_i != 2'd3)
    else $error("pam3_bus_encoder: illegal mode");

endmodule
