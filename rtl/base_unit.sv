// base_unit: the W x W multiplier at the bottom of the modular multiplier.
//
// In the original flow this is a platform primitive (an FPGA DSP block or
// an ASIC multiplier IP) of width W = 16. Here it is a plain unsigned
// product, combinational, which synthesis maps onto such a cell.
// Interface: a, b (W bits) -> p (2W bits), no clock, no latency.
module base_unit #(
  parameter int W = 16
) (
  input  logic [W-1:0]   a,
  input  logic [W-1:0]   b,
  output logic [2*W-1:0] p
);
  assign p = a * b;
endmodule
