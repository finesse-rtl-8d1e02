// mem_block: basic memory block, the unit larger memories are tiled from.
//
// Stands for a vendor primitive (an FPGA BRAM or an ASIC SRAM macro) of
// fixed BW x BD geometry: one write port and one read port, both
// synchronous. A read returns the word in the next cycle; a read of the
// address being written in the same cycle returns the old word.
// The 64 x 256 default is this design's choice; the contents are not reset.
module mem_block #(
  parameter int BW = 64,
  parameter int BD = 256,
  localparam int AW = $clog2(BD)
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [BW-1:0] wdata,
  input  logic          re,
  input  logic [AW-1:0] raddr,
  output logic [BW-1:0] rdata
);
  logic [BW-1:0] mem [BD];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end
endmodule
