// tilda_top: incremental nearest-anchor classifier with majority votes.
//
// A feature vector of T elements (Q5.13) enters the input register and is cut
// into P subvectors of D = T/P elements, one per processing block. A shared
// counter sweeps the anchor addresses for all blocks at once:
//   learning (lp = 1): the K anchors of in_class; each block picks the anchor
//     with the smallest distance*counter and moves it to the barycentre of its
//     old value (weight n) and the subvector (weight 1). K+3 cycles per vector;
//     learn_done pulses in the last of them.
//   classifying (lp = 0): all C*K anchors; each block votes for the class of
//     its nearest anchor, the parallel majority vote combines the P votes
//     (pmv_valid/pmv_class, C+1 cycles after the sweep), and the sequential
//     majority vote combines the results of r_count consecutive vectors, the
//     data-augmented versions of one signal (smv_valid/smv_class).
// Vectors are offered with in_valid and taken when in_ready is high (a
// valid/ready handshake). r_count is taken with each vector; the sequential
// vote uses the value given with the first vector of a group. Classification vectors are taken back to back, one
// per C*K cycles. The block structure follows the paper; the handshake is this
// design's choice.
module tilda_top
  import tilda_pkg::*;
#(
  parameter int unsigned T         = 2048,  // feature vector length
  parameter int unsigned P         = 16,    // subspaces / processing blocks
  parameter int unsigned K         = 30,    // anchors per class and subspace
  parameter int unsigned C         = 10,    // classes
  parameter int unsigned INV_DEPTH = 1024,  // counter ceiling + 1 (inverse table)
  parameter int unsigned R_W       = 8      // width of r_count
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           in_valid,
  output logic           in_ready,
  input  logic           lp,           // L-P: 1 learn, 0 classify
  input  word_t          in_class,     // class of a learning vector
  input  sword_t         feature [T],  // feature vector X^m
  input  logic [R_W-1:0] r_count,      // R, versions per signal
  output logic           pmv_valid,
  output logic [C-1:0]   pmv_class,
  output logic           smv_valid,
  output logic [C-1:0]   smv_class,
  output logic           learn_done
);

  localparam int unsigned D = T / P;

  sword_t       xr [T];
  logic         start, active, first, last, lp_q;
  word_t        addr;
  logic         val   [P];
  logic         learn [P];
  logic         busy  [P];
  logic         udone [P];
  logic [C-1:0] cls   [P];

  // All processing blocks run in lock step; block 0 stands for all of them.
  assign in_ready   = (!active && !busy[0]) || (last && !lp_q) || udone[0];
  assign start      = in_valid && in_ready;
  assign learn_done = udone[0];

  input_register #(.T(T)) u_in (.clk, .rst_n, .load(start), .din(feature), .dout(xr));

  counter_lp #(.K(K), .C(C)) u_cnt (
    .clk, .rst_n, .start, .lp, .in_class, .active, .first, .last, .lp_q, .addr);

  for (genvar p = 0; p < P; p++) begin : g_pb
    sword_t xs [D];
    for (genvar j = 0; j < D; j++) begin : g_slice
      assign xs[j] = xr[p*D + j];
    end
    processing_block #(.D(D), .K(K), .C(C), .INV_DEPTH(INV_DEPTH)) u_pb (
      .clk, .rst_n, .lp(lp_q), .x(xs), .addr, .active, .first, .last,
      .val(val[p]), .class_onehot(cls[p]), .indx(), .learn(learn[p]),
      .busy(busy[p]), .upd_done(udone[p]));
  end

  // r_count travels with its vector: taken at the handshake, moved along when
  // the sweep ends, and held there while the parallel vote runs.
  logic [R_W-1:0] r_sweep, r_vote;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      r_sweep <= '0;
      r_vote  <= '0;
    end else begin
      if (start) r_sweep <= r_count;
      if (last)  r_vote  <= r_sweep;
    end
  end

  parallel_majority_vote #(.P(P), .C(C)) u_pmv (
    .clk, .rst_n, .in_valid(val[0] && !learn[0]), .class_in(cls),
    .out_valid(pmv_valid), .class_out(pmv_class), .busy());

  sequential_majority_vote #(.C(C), .R_W(R_W)) u_smv (
    .clk, .rst_n, .r_count(r_vote), .in_valid(pmv_valid), .class_in(pmv_class),
    .out_valid(smv_valid), .class_out(smv_class));

  // The vote takes C+1 cycles and must finish before the next sweep ends.
  initial assert (T % P == 0 && C * K > C + 1)
    else $error("tilda_top: T must be a multiple of P and C*K > C+1");

endmodule
