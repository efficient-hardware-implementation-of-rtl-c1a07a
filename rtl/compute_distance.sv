// compute_distance: Euclidean distance between a feature subvector and one
// anchor subvector.
//
// d = sqrt( sum_j (x_j - y_j)^2 ). Each element pair is subtracted and squared
// (one multiplier per element, D in parallel), the D squares are summed at full
// precision, the sum is cut to 16 fractional bits and an exact integer square
// root (digit-by-digit, floor) gives the distance with 8 fractional bits:
// unsigned Q10.8, saturated to 18 bits. x and y are signed Q5.13.
//
// Taking the true L2 norm, one distance per clock and the Q10.8 result follow
// the paper; the square-root method, floor rounding and saturation are this
// design's choices. The block is purely combinational, so the distance of the
// anchor read in a cycle is compared in that same cycle.
module compute_distance
  import tilda_pkg::*;
#(
  parameter int unsigned D = 128   // subvector length, T/P
) (
  input  sword_t x [D],
  input  sword_t y [D],
  output word_t  distance
);

  // Squares carry 2*FEAT_FRAC fractional bits; keep 2*DIST_FRAC before the root.
  localparam int unsigned SHIFT = 2 * (FEAT_FRAC - DIST_FRAC);

  // floor(sqrt(v)) for a 64-bit v.
  function automatic logic [31:0] isqrt64(input logic [63:0] v);
    logic [63:0] rem, root, bitv;
    rem  = v;
    root = '0;
    bitv = 64'h4000_0000_0000_0000;
    for (int i = 0; i < 32; i++) begin
      if (rem >= root + bitv) begin
        rem  = rem - (root + bitv);
        root = (root >> 1) + bitv;
      end else begin
        root = root >> 1;
      end
      bitv = bitv >> 2;
    end
    return root[31:0];
  endfunction

  logic [63:0] sumsq;
  logic [31:0] root;

  always_comb begin
    sumsq = '0;
    for (int j = 0; j < D; j++) begin
      logic signed [N:0]   diff;
      logic signed [2*N+1:0] sq;
      diff  = x[j] - y[j];               // signed, N+1 bits: no overflow
      sq    = diff * diff;
      sumsq = sumsq + 64'(unsigned'(sq));
    end
    root = isqrt64(sumsq >> SHIFT);
    distance = sat_u(64'(root));
  end

endmodule
