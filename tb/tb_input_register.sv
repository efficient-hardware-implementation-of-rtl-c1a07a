// tb_input_register: checks that the register captures on load, holds while
// load is low, and clears on reset.
module tb_input_register;
  import tilda_pkg::*;
  localparam int unsigned T = 32;
  logic clk = 0, rst_n = 0, load = 0;
  sword_t din [T], dout [T], want [T];
  int checks = 0, failures = 0;

  input_register #(.T(T)) dut (.*);

  always #5 clk = ~clk;

  task automatic compare(input string what);
    checks++;
    if (dout != want) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    foreach (din[j]) din[j] = sword_t'($urandom);
    repeat (2) @(negedge clk);
    want = '{default: '0};
    compare("reset clears");
    rst_n = 1;
    for (int t = 0; t < 20; t++) begin
      foreach (din[j]) din[j] = sword_t'($urandom);
      load = 1; want = din;
      @(negedge clk);
      load = 0;
      compare("captured");
      foreach (din[j]) din[j] = sword_t'($urandom);
      @(negedge clk);
      compare("held");
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
