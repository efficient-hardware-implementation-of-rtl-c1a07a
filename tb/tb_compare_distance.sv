// tb_compare_distance: feeds random sweeps of (distance, counter) pairs and
// checks the winner against a reference minimum search: distance*counter in
// Q16.2 when learning, plain distance over anchors with a non-zero counter when
// classifying, ties to the earlier anchor, found = 0 when nothing is eligible.
module tb_compare_distance;
  import tilda_pkg::*;
  import tb_ref_pkg::*;
  logic  clk = 0, rst_n = 0, lp = 0, active = 0, first = 0;
  word_t addr = '0, distance = '0, count = '0, indx;
  logic  found;
  int checks = 0, failures = 0;

  compare_distance dut (.*);

  always #5 clk = ~clk;

  task automatic run_sweep(input bit mode, input int len, input int kind);
    longint best, s;
    int     bi;
    bit     have;
    have = 0; best = 0; bi = 0;
    for (int i = 0; i < len; i++) begin
      @(negedge clk);
      lp = mode; active = 1; first = (i == 0); addr = word_t'(100 + i);
      case (kind)
        0: begin distance = word_t'($urandom_range(0, 262143)); count = word_t'($urandom_range(0, 40)); end
        1: begin distance = word_t'($urandom_range(0, 20));     count = word_t'($urandom_range(0, 3)); end  // many ties
        default: begin distance = word_t'($urandom); count = '0; end                                    // nothing trained
      endcase
      s = mode ? score_ref(longint'(distance), longint'(count)) : longint'(distance);
      if ((mode || count != 0) && (!have || s < best)) begin best = s; bi = 100 + i; have = 1; end
      #1;
      checks++;
      if (found != have || (have && indx != word_t'(bi))) begin
        failures++;
        $display("FAIL mode %0d step %0d: indx %0d found %0d expected %0d %0d", mode, i, indx, found, bi, have);
      end
    end
    @(negedge clk); active = 0; first = 0;
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 40; t++) begin
      run_sweep(t % 2, 1 + (t % 7) * 5, t % 3 == 2 ? 1 : 0);
    end
    run_sweep(0, 10, 2);
    run_sweep(1, 10, 2);
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
