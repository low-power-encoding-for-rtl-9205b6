// pam3_pkg: types and helpers shared by the PAM-3 bus encoders.
//
// A PAM-3 symbol is carried inside the logic as a 2-bit code. The code of a
// symbol is also its index in the count vector [cnt(-1), cnt(0), cnt(+1)],
// so that an argmax or a sort over the counts yields symbol codes directly:
//   -1 -> 2'd0, 0 -> 2'd1, +1 -> 2'd2, 2'd3 is never produced.
// The three-level alphabet and the per-level termination power (-1 costs
// VDD^2/100, 0 costs VDD^2/200, +1 costs nothing) follow the paper; the
// binary coding of a symbol is this design's own choice.
package pam3_pkg;

  typedef logic [1:0] sym_t;

  localparam sym_t SYM_N1 = 2'd0;  // -1, most expensive level
  localparam sym_t SYM_Z  = 2'd1;  //  0
  localparam sym_t SYM_P1 = 2'd2;  // +1, free level

  // Algorithm selected at the top level.
  typedef enum logic [1:0] {
    MODE_DBI  = 2'd0,
    MODE_MF   = 2'd1,
    MODE_SORT = 2'd2
  } enc_mode_e;

  // Width of a count of up to N symbols.
  function automatic int unsigned cnt_width(int unsigned n);
    return $clog2(n + 1);
  endfunction

  // Signal inversion: -1 <-> +1, 0 stays. Equal to inverting the three
  // source bits of a symbol pair under the 3-bit to 2-symbol mapping.
  function automatic sym_t sym_negate(sym_t s);
    case (s)
      SYM_N1:  return SYM_P1;
      SYM_P1:  return SYM_N1;
      default: return s;
    endcase
  endfunction

endpackage
