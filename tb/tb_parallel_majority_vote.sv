// tb_parallel_majority_vote: random sets of P one-hot (or empty) class
// vectors; the result must be the most voted class, ties to the lower index,
// and must come C+1 cycles after in_valid.
module tb_parallel_majority_vote;
  localparam int unsigned P = 7, C = 5;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid, busy;
  logic [C-1:0] class_in [P], class_out;
  int checks = 0, failures = 0;

  parallel_majority_vote #(.P(P), .C(C)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      int cnt [C];
      int best, lat;
      foreach (cnt[c]) cnt[c] = 0;
      for (int p = 0; p < P; p++) begin
        int c;
        c = $urandom_range(0, C);           // C means no vote
        class_in[p] = (c == C) ? '0 : C'(1) << c;
        if (c < C) cnt[c]++;
      end
      best = 0;
      for (int c = 1; c < C; c++) if (cnt[c] > cnt[best]) best = c;
      in_valid = 1;
      @(negedge clk);
      in_valid = 0;
      foreach (class_in[p]) class_in[p] = C'($urandom);   // inputs are free now
      lat = 1;
      while (!out_valid && lat < 3 * C) begin @(negedge clk); lat++; end
      check(lat == C + 1, $sformatf("latency %0d expected %0d", lat, C + 1));
      check(class_out == C'(1) << best, $sformatf("class %b expected %0d", class_out, best));
      @(negedge clk);
      check(!out_valid, "one-cycle out_valid");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
