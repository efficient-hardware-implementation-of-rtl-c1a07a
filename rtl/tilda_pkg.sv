// tilda_pkg: word width, fixed-point formats and saturating helpers shared by
// the incremental-learning classifier.
//
// Every value is an 18-bit word. What changes from one step to the next is the
// position of the binary point, given as the number of integer bits m:
//   feature / anchor element   m = 5   signed   Q5.13
//   distance                   m = 10  unsigned Q10.8
//   address, counter           m = 18  unsigned integer
//   distance * counter         m = 16  unsigned Q16.2
//   anchor * counter           m = 10  signed   Q10.8
//   anchor + feature           m = 10  signed   Q10.8
// The widths and integer-bit counts follow the paper; the signedness of each
// format and saturation on overflow are this design's choice.
package tilda_pkg;

  localparam int unsigned N = 18;              // word width

  localparam int unsigned FEAT_FRAC = N - 5;   // feature / anchor
  localparam int unsigned DIST_FRAC = N - 10;  // distance
  localparam int unsigned DC_FRAC   = N - 16;  // distance * counter
  localparam int unsigned AC_FRAC   = N - 10;  // anchor * counter, anchor + feature
  localparam int unsigned INV_FRAC  = N - 1;   // 1/n from the inverse table (Q1.17)

  typedef logic        [N-1:0] word_t;   // unsigned word (distance, counter, address)
  typedef logic signed [N-1:0] sword_t;  // signed word (feature, anchor)

  localparam word_t  UMAX = {N{1'b1}};
  localparam sword_t SMAX = sword_t'({1'b0, {(N-1){1'b1}}});
  localparam sword_t SMIN = sword_t'({1'b1, {(N-1){1'b0}}});

  // Clamp a wide signed value to the signed 18-bit range.
  function automatic sword_t sat_s(input logic signed [63:0] v);
    if (v > 64'(signed'(SMAX)))      return SMAX;
    else if (v < 64'(signed'(SMIN))) return SMIN;
    else                             return sword_t'(v);
  endfunction

  // Clamp a wide unsigned value to the unsigned 18-bit range.
  function automatic word_t sat_u(input logic [63:0] v);
    if (v > 64'(UMAX)) return UMAX;
    else               return word_t'(v);
  endfunction

endpackage
