// inverse_lut: table of reciprocals 1/n used to divide an updated anchor by its
// new counter.
//
// Entry n holds round(2^17 / n), i.e. 1/n as unsigned Q1.17, so 1/1 = 1.0 is
// exact; entry 0 holds 0 and is never used. The table is filled at
// initialisation by a loop and read combinationally. Storing the inverses in a
// look-up table is the paper's; the depth (DEPTH, counter values 0..DEPTH-1),
// the Q1.17 format and the rounding are this design's choices.
module inverse_lut
  import tilda_pkg::*;
#(
  parameter int unsigned DEPTH = 1024
) (
  input  word_t n,
  output word_t inv
);

  word_t rom [DEPTH];

  initial begin
    rom[0] = '0;
    for (int unsigned i = 1; i < DEPTH; i++)
      rom[i] = word_t'(((64'd1 << INV_FRAC) + 64'(i / 2)) / 64'(i));
  end

  assign inv = (n < word_t'(DEPTH)) ? rom[n[$clog2(DEPTH)-1:0]] : '0;

endmodule
