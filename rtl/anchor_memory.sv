// anchor_memory: anchor and counter storage of one subspace, with the
// arithmetic that updates an anchor after a learning sweep.
//
// Two memories of C*K words, one per anchor: the anchor subvectors (D elements,
// signed Q5.13) and their counters (unsigned integers). Both are read
// combinationally at addr, so a sweep reads one anchor per clock. Counters are
// cleared by reset; anchor words are not, because an anchor whose counter is 0
// never contributes its value (see compare_distance and the update below).
//
// A write request (wr, one cycle, with addr pointing at the winning anchor)
// runs the barycentre update y <- (y*n + x) / (n+1) in three clock cycles:
//   cycle 1  y*n for every element, kept as Q10.8          (read at addr)
//   cycle 2  + x (Q5.13 brought to Q10.8), counter n+1 written
//   cycle 3  result times 1/(n+1) from inverse_lut, back to Q5.13, anchor written
// busy is high in cycles 2 and 3, done in cycle 3. x must be held through cycle 2. When a counter
// reaches INV_DEPTH-1 it stops and the update becomes y <- (y*(n-1) + x)/n, a
// running mean over a fixed window. The two memories, the three update cycles
// and their formats follow the paper (which uses UltraRAM, whose read is
// registered); combinational read, the counter ceiling and saturation are this
// design's choices.
module anchor_memory
  import tilda_pkg::*;
#(
  parameter int unsigned D         = 128,
  parameter int unsigned K         = 30,
  parameter int unsigned C         = 10,
  parameter int unsigned INV_DEPTH = 1024
) (
  input  logic   clk,
  input  logic   rst_n,
  input  word_t  addr,        // read address, and update address when wr = 1
  input  sword_t x [D],       // feature subvector
  input  logic   wr,          // start the update of anchor addr
  output sword_t y [D],       // anchor at addr
  output word_t  count,       // counter at addr
  output logic   busy,       // update cycles 2 and 3
  output logic   done        // update cycle 3: the anchor is written on this edge
);

  localparam int unsigned DEPTH = C * K;
  localparam int unsigned AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  localparam word_t       NMAX  = word_t'(INV_DEPTH - 1);

  sword_t av   [DEPTH][D];    // anchor vectors
  word_t  cnt  [DEPTH];       // counters

  logic [AW-1:0] ra;
  assign ra    = addr[AW-1:0];
  assign y     = av[ra];
  assign count = cnt[ra];

  // update pipeline state
  logic          s2, s3;
  logic [AW-1:0] ua;
  word_t         n1, n2;
  sword_t        prod [D];    // y*n, Q10.8
  sword_t        sum  [D];    // y*n + x, Q10.8
  word_t         inv;

  inverse_lut #(.DEPTH(INV_DEPTH)) u_inv (.n(n2), .inv(inv));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      s2 <= 1'b0;
      s3 <= 1'b0;
      ua <= '0;
      n1 <= '0;
      n2 <= '0;
      for (int a = 0; a < DEPTH; a++) cnt[a] <= '0;
    end else begin
      s2 <= wr;
      s3 <= s2;
      // cycle 1: anchor * counter
      if (wr) begin
        word_t nm;
        nm = (cnt[ra] >= NMAX) ? NMAX - 1'b1 : cnt[ra];
        ua <= ra;
        n1 <= cnt[ra];
        for (int j = 0; j < D; j++)
          prod[j] <= sat_s(64'(64'(av[ra][j]) * signed'(64'(nm))) >>> (FEAT_FRAC - AC_FRAC));
      end
      // cycle 2: add the feature, increment the counter
      if (s2) begin
        word_t nn;
        nn = (n1 >= NMAX) ? NMAX : n1 + 1'b1;
        n2      <= nn;
        cnt[ua] <= nn;
        for (int j = 0; j < D; j++)
          sum[j] <= sat_s(64'(prod[j]) + (64'(x[j]) >>> (FEAT_FRAC - AC_FRAC)));
      end
      // cycle 3: divide by the new counter
      if (s3) begin
        for (int j = 0; j < D; j++)
          av[ua][j] <= sat_s((64'(sum[j]) * signed'(64'(inv))) >>> (AC_FRAC + INV_FRAC - FEAT_FRAC));
      end
    end
  end

  assign busy = s2 | s3;
  assign done = s3;

endmodule
