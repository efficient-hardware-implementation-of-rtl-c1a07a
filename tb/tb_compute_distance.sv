// tb_compute_distance: compares the distance unit with an integer reference
// (sum of squares, floor square root) on random, extreme and identical vectors.
module tb_compute_distance;
  import tilda_pkg::*;
  import tb_ref_pkg::*;
  localparam int unsigned D = 16;
  sword_t x [D], y [D];
  word_t  distance;
  int checks = 0, failures = 0;

  compute_distance #(.D(D)) dut (.x, .y, .distance);

  task automatic check_one(input string what);
    longint xr[], yr[], e;
    xr = new[D]; yr = new[D];
    foreach (xr[j]) begin xr[j] = longint'(x[j]); yr[j] = longint'(y[j]); end
    e = dist_ref(xr, yr);
    #1;
    checks++;
    if (longint'(distance) != e) begin
      failures++;
      $display("FAIL %s: distance %0d expected %0d", what, distance, e);
    end
  endtask

  initial begin
    // identical vectors: distance 0
    foreach (x[j]) begin x[j] = sword_t'($urandom); y[j] = x[j]; end
    check_one("identical");
    // one element differs by exactly 1.0 (2^13): distance 1.0 = 2^8
    foreach (x[j]) begin x[j] = '0; y[j] = '0; end
    x[3] = sword_t'(1 << 13);
    check_one("unit");
    #1 checks++;
    if (distance != word_t'(256)) begin failures++; $display("FAIL unit distance %0d", distance); end
    // extremes
    foreach (x[j]) begin x[j] = SMAX; y[j] = SMIN; end
    check_one("extreme");
    // random, full range and small range
    for (int t = 0; t < 300; t++) begin
      foreach (x[j]) begin
        if (t % 2) begin x[j] = sword_t'($urandom); y[j] = sword_t'($urandom); end
        else begin
          x[j] = sword_t'(int'($urandom_range(0, 16383)) - 8192);
          y[j] = sword_t'(int'($urandom_range(0, 16383)) - 8192);
        end
      end
      check_one("random");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
