// distance_register: captures the result of an anchor sweep.
//
// On the clock edge that ends a sweep (load = 1 in its last cycle) it stores the
// winning anchor address and raises val for one cycle. It outputs that index
// and the class of the anchor, one-hot on C bits. Anchors are stored class by
// class, K per class, so the class is index / K. If no anchor was eligible
// (classifying before anything was learned) the class vector is all zeros and
// casts no vote. The outputs (index, one-hot class, val) are the paper's; the
// class-from-index rule and the one-cycle val pulse are this design's choices.
module distance_register
  import tilda_pkg::*;
#(
  parameter int unsigned K = 30,
  parameter int unsigned C = 10
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         load,      // last cycle of a sweep
  input  word_t        indx_in,
  input  logic         found_in,
  output logic         val,       // result valid (one cycle)
  output word_t        indx,
  output logic [C-1:0] class_onehot
);

  logic found_q;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      val     <= 1'b0;
      indx    <= '0;
      found_q <= 1'b0;
    end else begin
      val <= load;
      if (load) begin
        indx    <= indx_in;
        found_q <= found_in;
      end
    end
  end

  always_comb begin
    word_t cls;
    cls          = indx / word_t'(K);
    class_onehot = '0;
    for (int c = 0; c < C; c++)
      class_onehot[c] = found_q && (cls == word_t'(c));
  end

endmodule
