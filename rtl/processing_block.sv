// processing_block: learns or classifies one feature subvector.
//
// The block sweeps the anchors whose addresses arrive from the shared counter
// (active/first/last mark the sweep). Each cycle the memory returns one anchor
// and its counter, compute_distance measures its Euclidean distance to the
// subvector x, and compare_distance keeps the best score (distance*counter when
// learning, distance when classifying). On the edge ending the sweep the
// distance register captures the winner: val rises for one cycle with the index
// and the one-hot class.
//
// After a learning sweep, val AND L-P is the memory's write request and also
// switches the address multiplexer from the counter to the winning index, so
// the winning anchor is updated over the next three cycles (busy in all three,
// upd_done in the last). A learning step therefore takes K+3 cycles: K to
// sweep, 3 to update. A classification sweep takes C*K cycles, and the next
// one may start while val of the previous is high. x must stay stable from the
// first sweep cycle to the second update cycle. The structure (memory, compute,
// compare, distance register, multiplexer, AND of val with L-P) is the paper's.
// The L-P used by the AND and the multiplexer select is the mode of the sweep
// that produced val (kept in lp_res), and the multiplexer is selected by that
// AND rather than by val alone, so that a classification result arriving while
// the next sweep starts does not steal its first address: this design's choice.
module processing_block
  import tilda_pkg::*;
#(
  parameter int unsigned D         = 128,
  parameter int unsigned K         = 30,
  parameter int unsigned C         = 10,
  parameter int unsigned INV_DEPTH = 1024
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         lp,          // L-P of the running sweep
  input  sword_t       x [D],       // feature subvector
  input  word_t        addr,        // counter (address)
  input  logic         active,
  input  logic         first,
  input  logic         last,
  output logic         val,
  output logic [C-1:0] class_onehot,
  output word_t        indx,
  output logic         learn,       // val belongs to a learning sweep
  output logic         busy,        // anchor update in progress
  output logic         upd_done     // last update cycle
);

  sword_t y [D];
  word_t  count, distance, best, mem_addr;
  logic   found, wr, mem_busy, lp_res;

  // Mode of the sweep whose result the distance register holds: a new sweep
  // may start in the cycle val is high.
  always_ff @(posedge clk) begin
    if (!rst_n)    lp_res <= 1'b0;
    else if (last) lp_res <= lp;
  end

  assign wr       = val & lp_res;        // AND: write request
  assign mem_addr = wr ? indx : addr;    // MUX
  assign learn    = wr;
  assign busy     = wr | mem_busy;

  anchor_memory #(.D(D), .K(K), .C(C), .INV_DEPTH(INV_DEPTH)) u_mem (
    .clk, .rst_n, .addr(mem_addr), .x, .wr, .y, .count, .busy(mem_busy), .done(upd_done));

  compute_distance #(.D(D)) u_dist (.x, .y, .distance);

  compare_distance u_cmp (
    .clk, .rst_n, .lp, .active, .first, .addr, .distance, .count,
    .indx(best), .found);

  distance_register #(.K(K), .C(C)) u_dreg (
    .clk, .rst_n, .load(last), .indx_in(best), .found_in(found),
    .val, .indx, .class_onehot);

endmodule
