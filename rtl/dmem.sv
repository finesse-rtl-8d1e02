// dmem: per-core register bank with two read ports and one write port.
//
// Every Fp operand lives here (all instruction operands are registers).
// Two mem_tiled copies are written together, each serving one read port,
// which gives the 2-read/1-write-per-cycle bank of the hardware model from
// 1R1W blocks. While host_mode is high the host owns the bank: its writes
// replace the core's write port and its reads use read port A; while it is
// low the core owns it. Building 2R1W by replication and the host sharing
// are this design's choices.
//
// Timing: read request in cycle c -> data in cycle c+3 (RD_LAT). A write
// in cycle w is visible to reads requested in cycle w+1 or later.
module dmem
  import finesse_pkg::*;
#(
  parameter int BW = 64,
  parameter int BD = 256
) (
  input  logic           clk,
  // core side
  input  logic           ra_re,
  input  logic [RAW-1:0] ra_addr,
  input  logic           rb_re,
  input  logic [RAW-1:0] rb_addr,
  output fp_t            ra_data,
  output fp_t            rb_data,
  input  logic           we,
  input  logic [RAW-1:0] waddr,
  input  fp_t            wdata,
  // host side
  input  logic           host_mode,
  input  logic           h_we,
  input  logic           h_re,
  input  logic [RAW-1:0] h_addr,
  input  fp_t            h_wdata
);
  logic           w_en;
  logic [RAW-1:0] w_ad;
  fp_t            w_d;
  logic           a_re;
  logic [RAW-1:0] a_ad;

  always_comb begin
    if (host_mode) begin
      w_en = h_we;  w_ad = h_addr;  w_d = h_wdata;
      a_re = h_re;  a_ad = h_addr;
    end else begin
      w_en = we;    w_ad = waddr;   w_d = wdata;
      a_re = ra_re; a_ad = ra_addr;
    end
  end

  mem_tiled #(.WIDTH(DW), .DEPTH(NREG), .BW(BW), .BD(BD)) u_bank_a (
    .clk(clk), .we(w_en), .waddr(w_ad), .wdata(w_d),
    .re(a_re), .raddr(a_ad), .rdata(ra_data));

  mem_tiled #(.WIDTH(DW), .DEPTH(NREG), .BW(BW), .BD(BD)) u_bank_b (
    .clk(clk), .we(w_en), .waddr(w_ad), .wdata(w_d),
    .re(rb_re && !host_mode), .raddr(rb_addr), .rdata(rb_data));
endmodule
