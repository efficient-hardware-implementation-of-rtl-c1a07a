// tb_sequential_majority_vote: groups of R one-hot votes, R changing from
// group to group (including R = 1), with gaps between votes; the output must
// follow the R-th vote by one cycle and name the most voted class, ties to the
// lower index.
module tb_sequential_majority_vote;
  localparam int unsigned C = 6, R_W = 4;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  logic [R_W-1:0] r_count = '0;
  logic [C-1:0] class_in = '0, class_out;
  int checks = 0, failures = 0;

  sequential_majority_vote #(.C(C), .R_W(R_W)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int g = 0; g < 150; g++) begin
      int cnt [C];
      int r, best;
      r = (g % 5 == 0) ? 1 : $urandom_range(2, 15);
      foreach (cnt[c]) cnt[c] = 0;
      r_count = R_W'(r);
      for (int v = 0; v < r; v++) begin
        int c;
        c = $urandom_range(0, C-1);
        cnt[c]++;
        class_in = C'(1) << c;
        in_valid = 1;
        @(negedge clk);
        in_valid = 0;
        r_count = R_W'($urandom);                  // R is sampled with the first vote only
        if (v < r - 1) begin
          check(!out_valid, "no result before the R-th vote");
          repeat ($urandom_range(0, 2)) @(negedge clk);
        end
      end
      best = 0;
      for (int c = 1; c < C; c++) if (cnt[c] > cnt[best]) best = c;
      check(out_valid, "result after the R-th vote");
      check(class_out == C'(1) << best, $sformatf("class %b expected %0d (R=%0d)", class_out, best, r));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
