// mem_tiled: WIDTH x DEPTH memory assembled from BW x BD basic blocks.
//
// Columns of blocks give the width, rows of blocks the depth. All request
// signals are registered before the blocks and the read word is registered
// after the row multiplexer, so reads and writes pass a three-stage
// pipeline (input register, block, output register) and long wires between
// many blocks never share a cycle with the block access. This is the memory
// structure of the original design; block geometry is a parameter.
//
// Timing: re/raddr in cycle c -> rdata valid in cycle c+3. A write in
// cycle c lands in the block at the end of cycle c+1; a read issued in
// cycle c sees it if c >= (write cycle) + 1. Used for the instruction
// memory and, duplicated, for each core's register bank.
module mem_tiled #(
  parameter int WIDTH = 32,
  parameter int DEPTH = 65536,
  parameter int BW    = 32,
  parameter int BD    = 4096,
  localparam int AW   = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic             re,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata
);
  localparam int NC  = (WIDTH + BW - 1) / BW;
  localparam int NR  = (DEPTH + BD - 1) / BD;
  localparam int BAW = $clog2(BD);
  localparam int RSW = (NR > 1) ? $clog2(NR) : 1;

  // stage 1: request registers
  logic             we_q, re_q;
  logic [AW-1:0]    waddr_q, raddr_q;
  logic [NC*BW-1:0] wdata_q;
  always_ff @(posedge clk) begin
    we_q    <= we;
    re_q    <= re;
    waddr_q <= waddr;
    raddr_q <= raddr;
    wdata_q <= (NC*BW)'(wdata);
  end

  function automatic logic [RSW-1:0] row_of(logic [AW-1:0] ad);
    if (NR > 1) return RSW'(ad >> BAW);
    else        return '0;
  endfunction

  // stage 2: blocks
  logic [NC*BW-1:0] blk_rd [NR];
  for (genvar r = 0; r < NR; r++) begin : g_row
    for (genvar c = 0; c < NC; c++) begin : g_col
      mem_block #(.BW(BW), .BD(BD)) u_blk (
        .clk  (clk),
        .we   (we_q && (row_of(waddr_q) == RSW'(r))),
        .waddr(waddr_q[BAW-1:0]),
        .wdata(wdata_q[c*BW +: BW]),
        .re   (re_q && (row_of(raddr_q) == RSW'(r))),
        .raddr(raddr_q[BAW-1:0]),
        .rdata(blk_rd[r][c*BW +: BW])
      );
    end
  end

  logic [RSW-1:0] rsel_q;
  logic           rv_q;
  always_ff @(posedge clk) begin
    rsel_q <= row_of(raddr_q);
    rv_q   <= re_q;
  end

  // stage 3: output register
  logic [NC*BW-1:0] rdata_q;
  always_ff @(posedge clk) begin
    if (rv_q) rdata_q <= blk_rd[rsel_q];
  end
  assign rdata = rdata_q[WIDTH-1:0];
endmodule
