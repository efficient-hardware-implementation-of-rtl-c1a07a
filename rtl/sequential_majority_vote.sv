// sequential_majority_vote: combines the decisions for the R data-augmented
// versions of one input signal.
//
// Each in_valid adds the one-hot class vector bit by bit into C inner vote
// registers. The first vote of a group replaces the registers instead of adding
// to them. After the R-th vote (R = r_count, sampled with the first vote) the
// C registers are compared in one combinational argmax, ties to the lower
// class, and out_valid pulses one cycle later with the global class one-hot.
// R votes therefore give a result R cycles after the first one at the earliest.
// With r_count = 0 or 1 every vote is passed on as its own group. Per-bit
// accumulation and the final comparison are the paper's; the one-cycle argmax,
// the run-time R and the group boundary rule are this design's choices.
module sequential_majority_vote
  import tilda_pkg::*;
#(
  parameter int unsigned C   = 10,
  parameter int unsigned R_W = 8     // width of R
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic [R_W-1:0] r_count,
  input  logic           in_valid,
  input  logic [C-1:0]   class_in,
  output logic           out_valid,
  output logic [C-1:0]   class_out
);

  logic [R_W-1:0] votes [C];
  logic [R_W-1:0] seen, goal;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      class_out <= '0;
      seen      <= '0;
      goal      <= '0;
      for (int c = 0; c < C; c++) votes[c] <= '0;
    end else begin
      out_valid <= 1'b0;
      if (in_valid) begin
        logic [R_W-1:0] g, v [C];
        logic [R_W-1:0] bv;
        logic [C-1:0]   oh;
        g = (seen == '0) ? ((r_count == '0) ? R_W'(1) : r_count) : goal;
        for (int c = 0; c < C; c++)
          v[c] = ((seen == '0) ? '0 : votes[c]) + R_W'(class_in[c]);
        if (seen + 1'b1 == g) begin
          bv = v[0];
          oh = C'(1);
          for (int c = 1; c < C; c++)
            if (v[c] > bv) begin
              bv = v[c];
              oh = C'(1) << c;
            end
          class_out     <= oh;
          out_valid     <= 1'b1;
          seen          <= '0;
        end else begin
          seen <= seen + 1'b1;
        end
        goal <= g;
        for (int c = 0; c < C; c++) votes[c] <= v[c];
      end
    end
  end

endmodule
