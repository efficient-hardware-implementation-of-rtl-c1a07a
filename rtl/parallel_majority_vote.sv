// parallel_majority_vote: combines the P subspace decisions of one feature
// vector.
//
// When in_valid is high the P one-hot class vectors are added bit by bit in one
// cycle, giving C vote counts. The counts are then compared one per clock (C
// cycles), keeping the largest; ties keep the lower class. out_valid pulses
// with the winning class one-hot in the cycle after the last comparison, i.e.
// C+1 cycles after in_valid. A new in_valid while busy is not allowed (the
// processing blocks deliver one result per C*K cycles). Bitwise addition
// followed by a sequential comparison is the paper's; the tie rule and the
// handshake are this design's choices.
module parallel_majority_vote
  import tilda_pkg::*;
#(
  parameter int unsigned P = 16,
  parameter int unsigned C = 10
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  input  logic [C-1:0] class_in [P],
  output logic         out_valid,
  output logic [C-1:0] class_out,
  output logic         busy
);

  localparam int unsigned VW = $clog2(P + 1);
  localparam int unsigned CW = (C > 1) ? $clog2(C) : 1;

  logic [VW-1:0] votes [C];
  logic [VW-1:0] best_v;
  logic [CW-1:0] best_c, ci;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      out_valid <= 1'b0;
      class_out <= '0;
      ci        <= '0;
      best_v    <= '0;
      best_c    <= '0;
      for (int c = 0; c < C; c++) votes[c] <= '0;
    end else begin
      out_valid <= 1'b0;
      if (in_valid) begin
        for (int c = 0; c < C; c++) begin
          logic [VW-1:0] s;
          s = '0;
          for (int p = 0; p < P; p++) s = s + VW'(class_in[p][c]);
          votes[c] <= s;
        end
        busy   <= 1'b1;
        ci     <= '0;
        best_v <= '0;
        best_c <= '0;
      end else if (busy) begin
        if (ci == '0 || votes[ci] > best_v) begin
          best_v <= votes[ci];
          best_c <= ci;
        end
        if (ci == CW'(C - 1)) begin
          busy      <= 1'b0;
          out_valid <= 1'b1;
          class_out <= '0;
          class_out[(ci == '0 || votes[ci] > best_v) ? ci : best_c] <= 1'b1;
        end else begin
          ci <= ci + 1'b1;
        end
      end
    end
  end

  initial assert (C >= 1 && P >= 1);

  // A new result must not arrive while the previous one is being compared.
  assert property (@(posedge clk) disable iff (!rst_n) in_valid |-> !busy)
    else $error("parallel_majority_vote: in_valid while busy");

endmodule
