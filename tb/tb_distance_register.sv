// tb_distance_register: loads indices and checks the one-cycle val pulse, the
// held index and the one-hot class index/K (all zeros when nothing was found).
module tb_distance_register;
  import tilda_pkg::*;
  localparam int unsigned K = 4, C = 5;
  logic clk = 0, rst_n = 0, load = 0, found_in = 0, val;
  word_t indx_in = '0, indx;
  logic [C-1:0] class_onehot;
  int checks = 0, failures = 0;

  distance_register #(.K(K), .C(C)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check(!val, "val low after reset");
    for (int t = 0; t < 60; t++) begin
      int i;
      bit f;
      i = $urandom_range(0, C*K-1);
      f = (t % 9 != 4);
      load = 1; indx_in = word_t'(i); found_in = f;
      @(negedge clk);
      load = 0; indx_in = '0; found_in = 0;
      check(val, "val after load");
      check(indx == word_t'(i), "index held");
      check(class_onehot == (f ? C'(1) << (i / K) : '0), $sformatf("class of %0d: %b", i, class_onehot));
      @(negedge clk);
      check(!val, "val is one cycle");
      check(indx == word_t'(i), "index still held");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
