// input_register: holds the feature vector X^m while it is processed.
//
// The T-element vector (T words of 18 bits, nT bits in all) is captured when
// load is high and held until the next load, so the external source is free as
// soon as the vector is accepted. The P processing blocks each take a slice of
// T/P consecutive elements from dout. Reset clears it to zero. The register and
// its widths are the paper's; the load strobe and the reset value are this
// design's choice. dout changes on the clock edge after load.
module input_register
  import tilda_pkg::*;
#(
  parameter int unsigned T = 2048   // feature vector length
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   load,
  input  sword_t din  [T],
  output sword_t dout [T]
);

  always_ff @(posedge clk) begin
    if (!rst_n) dout <= '{default: '0};
    else if (load) dout <= din;
  end

endmodule
