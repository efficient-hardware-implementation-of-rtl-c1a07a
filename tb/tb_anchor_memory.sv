// tb_anchor_memory: runs random three-cycle updates and compares every anchor
// and counter with the reference barycentre update, including the counter
// ceiling of a small inverse table. Also checks reset clears the counters and
// the busy/done timing of the update.
module tb_anchor_memory;
  import tilda_pkg::*;
  import tb_ref_pkg::*;
  localparam int unsigned D = 8, K = 3, C = 2, INV_DEPTH = 8;
  localparam int unsigned DEPTH = C * K;
  logic   clk = 0, rst_n = 0, wr = 0, busy, done;
  word_t  addr = '0, count;
  sword_t x [D], y [D];
  longint my [DEPTH][], mn [DEPTH];
  int checks = 0, failures = 0, ceil_hits = 0;

  anchor_memory #(.D(D), .K(K), .C(C), .INV_DEPTH(INV_DEPTH)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic compare_all();
    for (int a = 0; a < DEPTH; a++) begin
      addr = word_t'(a);
      #1;
      check(longint'(count) == mn[a], $sformatf("count[%0d] %0d expected %0d", a, count, mn[a]));
      if (mn[a] != 0)
        for (int j = 0; j < D; j++)
          check(longint'(y[j]) == my[a][j], $sformatf("anchor[%0d][%0d] %0d expected %0d", a, j, y[j], my[a][j]));
    end
  endtask

  task automatic update(input int a, input bit narrow);
    longint xr[];
    xr = new[D];
    @(negedge clk);
    foreach (x[j]) begin
      x[j] = narrow ? sword_t'(int'($urandom_range(0, 32767)) - 16384) : sword_t'($urandom);
      xr[j] = longint'(x[j]);
    end
    addr = word_t'(a); wr = 1;
    #1 check(!busy && !done, "idle in update cycle 1");
    @(negedge clk);
    wr = 0; addr = word_t'($urandom_range(0, DEPTH-1));   // address is free after cycle 1
    check(busy && !done, "busy in cycle 2");
    @(negedge clk);
    foreach (x[j]) x[j] = sword_t'($urandom);              // x is free after cycle 2
    check(busy && done, "busy and done in cycle 3");
    @(negedge clk);
    check(!busy && !done, "idle after cycle 3");
    if (mn[a] >= INV_DEPTH - 1) ceil_hits++;
    update_ref(my[a], mn[a], xr, INV_DEPTH - 1);
  endtask

  initial begin
    for (int a = 0; a < DEPTH; a++) begin my[a] = new[D]; mn[a] = 0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    compare_all();
    for (int t = 0; t < 80; t++) begin
      update((t < 30) ? 0 : $urandom_range(0, DEPTH-1), (t % 4) != 3);
      compare_all();
    end
    check(ceil_hits > 0, "counter ceiling reached");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
