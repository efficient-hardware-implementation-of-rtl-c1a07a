// tb_inverse_lut: checks every entry of a small reciprocal table against
// round(2^17/n), and that n = 1 gives exactly 1.0.
module tb_inverse_lut;
  import tilda_pkg::*;
  import tb_ref_pkg::*;
  localparam int unsigned DEPTH = 300;
  word_t n, inv;
  int checks = 0, failures = 0;

  inverse_lut #(.DEPTH(DEPTH)) dut (.n, .inv);

  initial begin
    for (int i = 1; i < DEPTH; i++) begin
      n = word_t'(i);
      #1;
      checks++;
      if (longint'(inv) != inv_ref(i)) begin
        failures++;
        $display("FAIL 1/%0d = %0d expected %0d", i, inv, inv_ref(i));
      end
    end
    n = 1; #1; checks++;
    if (inv != word_t'(1 << 17)) failures++;
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
