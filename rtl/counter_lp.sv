// counter_lp: anchor address generator (the "Counter/L-P" and "ADD" blocks).
//
// One sweep visits every anchor the current operation needs, one address per
// clock. A start pulse captures the L-P mode and the input class and clears the
// count. While learning (lp = 1) the count runs 0..K-1 and the adder places it
// in the input class's group of K anchors: addr = in_class*K + count. While
// classifying (lp = 0) the count runs 0..C*K-1 and is the address itself, so
// every anchor of every class is read. The modulus (K or C*K) and the sweep
// follow the paper; the start/first/last flags, the multiply of the class by K
// in front of the adder and the captured mode are this design's choices.
//
// Timing: start in cycle t gives active=1 with count 0 in cycle t+1; the sweep
// ends with last=1 in cycle t+M (M = K or C*K). A start in the same cycle as
// last restarts the sweep without a gap; a start during a sweep also
// restarts it.
module counter_lp
  import tilda_pkg::*;
#(
  parameter int unsigned K = 30,   // anchors per class and subspace
  parameter int unsigned C = 10    // classes
) (
  input  logic  clk,
  input  logic  rst_n,      // synchronous, active low
  input  logic  start,      // begin a sweep
  input  logic  lp,         // L-P: 1 learn, 0 classify (sampled at start)
  input  word_t in_class,   // class being learned (sampled at start)
  output logic  active,     // addr is valid
  output logic  first,      // first address of the sweep
  output logic  last,       // last address of the sweep
  output logic  lp_q,       // mode of the running sweep
  output word_t addr        // anchor address
);

  word_t count, modulo, base;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      active <= 1'b0;
      count  <= '0;
      modulo <= word_t'(K);
      base   <= '0;
      lp_q   <= 1'b0;
    end else if (start) begin
      active <= 1'b1;
      count  <= '0;
      lp_q   <= lp;
      modulo <= lp ? word_t'(K) : word_t'(C * K);
      base   <= lp ? word_t'(in_class * K) : '0;
    end else if (active) begin
      if (count == modulo - 1'b1) begin
        active <= 1'b0;
        count  <= '0;
      end else begin
        count <= count + 1'b1;
      end
    end
  end

  assign first = active && (count == '0);
  assign last  = active && (count == modulo - 1'b1);
  assign addr  = base + count;   // the ADD block

endmodule
