// compare_distance: running minimum search over one anchor sweep.
//
// Each cycle of a sweep brings the distance d of one anchor, the anchor's
// counter n and its address. When learning, the score is R = d*n, rescaled to
// Q16.2 and saturated; an unused anchor (n = 0) scores 0 and so is chosen first,
// which fills a class's anchors before any is averaged. When classifying the
// score is d itself (plain nearest-neighbour search over trained anchors), and
// anchors with n = 0 are skipped. The smallest score so far is kept in register
// r_p with its address.
//
// indx/found are combinational: they already include the candidate of the
// current cycle, so in the last cycle of a sweep they give the final winner and
// the distance register can capture it on that clock edge. Ties keep the
// earlier anchor. The distance*counter score and the r_p register follow the
// paper; skipping untrained anchors and the tie rule are this design's choices.
module compare_distance
  import tilda_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  lp,        // L-P of the running sweep
  input  logic  active,    // a candidate is present
  input  logic  first,     // first candidate of the sweep
  input  word_t addr,      // its address
  input  word_t distance,      // its distance, Q10.8
  input  word_t count,     // its counter
  output word_t indx,      // best address including this cycle's candidate
  output logic  found      // some candidate was eligible
);

  word_t r_p, idx_q;
  logic  have_q;

  word_t score;
  logic  eligible, have, take;

  always_comb begin
    if (lp) score = sat_u(64'(distance * 64'(count)) >> (DIST_FRAC - DC_FRAC));
    else    score = distance;
    eligible = active && (lp || count != '0);
    have     = have_q && !first;               // a new sweep forgets the old best
    take     = eligible && (!have || score < r_p);
    indx     = take ? addr : idx_q;
    found    = take || have;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      r_p    <= '0;
      idx_q  <= '0;
      have_q <= 1'b0;
    end else if (active) begin
      have_q <= found;
      if (take) begin
        r_p   <= score;
        idx_q <= addr;
      end
    end
  end

endmodule
