// tb_counter_lp: checks the anchor address sequence of both modes.
//
// Learning sweeps must give in_class*K .. in_class*K+K-1 over exactly K cycles,
// classification sweeps 0 .. C*K-1 over C*K cycles, with first/last on the end
// cycles and a back-to-back restart when start coincides with last.
module tb_counter_lp;
  import tilda_pkg::*;
  localparam int unsigned K = 5, C = 3;
  logic clk = 0, rst_n = 0, start = 0, lp = 0;
  word_t in_class = '0, addr;
  logic active, first, last, lp_q;
  int checks = 0, failures = 0;

  counter_lp #(.K(K), .C(C)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // Run one sweep from a start pulse and check every address.
  task automatic sweep(input bit mode, input int cls, input bit chain);
    int m, n;
    m = mode ? K : C*K;
    if (!chain) begin
      @(negedge clk); start = 1; lp = mode; in_class = word_t'(cls);
      @(negedge clk); start = 0;
    end
    n = 0;
    while (active) begin
      check(addr == word_t'((mode ? cls*K : 0) + n), $sformatf("addr %0d at step %0d", addr, n));
      check(first == (n == 0), "first");
      check(last == (n == m-1), "last");
      check(lp_q == mode, "lp_q");
      n++;
      if (last) begin
        if (chain) start = 1;
        lp = 0;
        @(negedge clk); start = 0;
        break;
      end
      @(negedge clk);
      if (n > m) break;
    end
    check(n == m, $sformatf("sweep length %0d, expected %0d", n, m));
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    check(!active, "idle after reset");
    sweep(1, 0, 0);
    sweep(1, 2, 0);
    sweep(0, 0, 0);
    // classification sweep that restarts itself in its last cycle
    @(negedge clk); start = 1; lp = 0;
    @(negedge clk); start = 0;
    sweep(0, 0, 1);
    sweep(0, 0, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
