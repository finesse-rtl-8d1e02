// core: one processing core.
//
// A core is its register bank (dmem), its operand fetch (dfetch) and its
// ALU (mmul, madd, mlin, minv). It has no control flow of its own: it
// executes the instruction stream broadcast by the shared ifetch, so all
// cores compute the same program on their own data in lockstep, which is
// how throughput is scaled by replicating cores around one instruction
// memory. The host reads and writes the bank while host_mode is high.
// Timing: an instruction issued in cycle i reads its operands in i..i+2,
// enters its unit in i+3 and writes back after the unit's latency.
module core
  import finesse_pkg::*;
#(
  parameter int LONG_LAT  = 38,
  parameter int SHORT_LAT = 8
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           iss_valid,
  input  instr_t         iss_instr,
  output logic           inv_busy,
  input  logic           host_mode,
  input  logic           h_we,
  input  logic           h_re,
  input  logic [RAW-1:0] h_addr,
  input  fp_t            h_wdata,
  output fp_t            h_rdata
);
  logic           ra_re, rb_re, we;
  logic [RAW-1:0] ra_addr, rb_addr, waddr;
  fp_t            ra_data, rb_data, wdata;
  logic           alu_valid, wb_valid;
  logic [7:0]     alu_op;
  logic [RAW-1:0] alu_dst, wb_dst;
  fp_t            alu_a, alu_b, wb_data;

  dfetch u_dfetch (
    .clk(clk), .rst_n(rst_n),
    .iss_valid(iss_valid), .iss_instr(iss_instr),
    .ra_re(ra_re), .ra_addr(ra_addr), .rb_re(rb_re), .rb_addr(rb_addr),
    .ra_data(ra_data), .rb_data(rb_data),
    .alu_valid(alu_valid), .alu_op(alu_op), .alu_dst(alu_dst), .alu_a(alu_a), .alu_b(alu_b),
    .wb_valid(wb_valid), .wb_dst(wb_dst), .wb_data(wb_data),
    .we(we), .waddr(waddr), .wdata(wdata));

  dmem u_dmem (
    .clk(clk),
    .ra_re(ra_re), .ra_addr(ra_addr), .rb_re(rb_re), .rb_addr(rb_addr),
    .ra_data(ra_data), .rb_data(rb_data),
    .we(we), .waddr(waddr), .wdata(wdata),
    .host_mode(host_mode), .h_we(h_we), .h_re(h_re), .h_addr(h_addr), .h_wdata(h_wdata));

  alu #(.LONG_LAT(LONG_LAT), .SHORT_LAT(SHORT_LAT)) u_alu (
    .clk(clk), .rst_n(rst_n),
    .in_valid(alu_valid), .op(alu_op), .dst(alu_dst), .a(alu_a), .b(alu_b),
    .wb_valid(wb_valid), .wb_dst(wb_dst), .wb_data(wb_data), .inv_busy(inv_busy));

  assign h_rdata = ra_data;
endmodule
