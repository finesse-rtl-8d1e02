// finesse_top: multi-core Fp pairing accelerator.
//
// One instruction memory and one fetch/issue unit drive NCORES identical
// processing cores; each core has its own register bank and ALU, so NCORES
// pairings (or any Fp program) run at once on different data. The host
// loads the program into the instruction memory and the inputs into the
// register banks, writes START/END and CTRL, waits for done (also a port),
// and reads the results back. See host_if for the address map and ifetch
// for the issue rules.
// Defaults: 8 cores, Long = 38 and Short = 8 cycles, a 64K-word
// instruction memory (room for a compiled BN254N optimal-Ate pairing),
// 256 registers of 256 bits per core, BN254N curve constants.
//
// Lint note: every core's ALU reports its inverter busy flag, but all cores
// run the same instruction stream in lockstep, so only core 0's flag is
// used by the shared issue logic; the other flags are left unread.
module finesse_top
  import finesse_pkg::*;
#(
  parameter int NCORES     = 8,
  parameter int LONG_LAT   = 38,
  parameter int SHORT_LAT  = 8,
  parameter int IMEM_DEPTH = 65536
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        h_req,
  input  logic        h_we,
  input  logic [31:0] h_addr,
  input  fp_t         h_wdata,
  output logic        h_rvalid,
  output fp_t         h_rdata,
  output logic        busy,
  output logic        done
);
  localparam int IMEM_AW = $clog2(IMEM_DEPTH);

  logic               im_we, im_re;
  logic [IMEM_AW-1:0] im_waddr, im_raddr;
  logic [IW-1:0]      im_wdata, im_rdata;
  logic               host_mode;
  logic [NCORES-1:0]  dm_we, dm_re;
  logic [RAW-1:0]     dm_addr;
  fp_t                dm_wdata;
  fp_t                dm_rdata [NCORES];
  logic               start;
  logic [IMEM_AW-1:0] start_pc;
  logic [IMEM_AW:0]   end_pc;
  logic [31:0]        stats [5];
  logic               iss_valid;
  instr_t             iss_instr;
  logic [NCORES-1:0]  inv_busy;

  host_if #(.NCORES(NCORES), .IMEM_AW(IMEM_AW)) u_host (
    .clk(clk), .rst_n(rst_n),
    .h_req(h_req), .h_we(h_we), .h_addr(h_addr), .h_wdata(h_wdata),
    .h_rvalid(h_rvalid), .h_rdata(h_rdata),
    .im_we(im_we), .im_waddr(im_waddr), .im_wdata(im_wdata),
    .host_mode(host_mode), .dm_we(dm_we), .dm_re(dm_re), .dm_addr(dm_addr),
    .dm_wdata(dm_wdata), .dm_rdata(dm_rdata),
    .start(start), .start_pc(start_pc), .end_pc(end_pc),
    .busy(busy), .done(done), .stats(stats));

  mem_tiled #(.WIDTH(IW), .DEPTH(IMEM_DEPTH), .BW(32), .BD(4096)) u_imem (
    .clk(clk), .we(im_we), .waddr(im_waddr), .wdata(im_wdata),
    .re(im_re), .raddr(im_raddr), .rdata(im_rdata));

  ifetch #(.LONG_LAT(LONG_LAT), .SHORT_LAT(SHORT_LAT), .IMEM_AW(IMEM_AW)) u_ifetch (
    .clk(clk), .rst_n(rst_n),
    .start(start), .start_pc(start_pc), .end_pc(end_pc),
    .imem_re(im_re), .imem_raddr(im_raddr), .imem_rdata(im_rdata),
    .inv_busy(inv_busy[0]),
    .iss_valid(iss_valid), .iss_instr(iss_instr),
    .busy(busy), .done(done),
    .cnt_cycles(stats[0]), .cnt_issued(stats[1]), .cnt_stall_dep(stats[2]),
    .cnt_stall_wb(stats[3]), .cnt_stall_inv(stats[4]));

  for (genvar c = 0; c < NCORES; c++) begin : g_core
    core #(.LONG_LAT(LONG_LAT), .SHORT_LAT(SHORT_LAT)) u_core (
      .clk(clk), .rst_n(rst_n),
      .iss_valid(iss_valid), .iss_instr(iss_instr),
      .inv_busy(inv_busy[c]),
      .host_mode(host_mode), .h_we(dm_we[c]), .h_re(dm_re[c]),
      .h_addr(dm_addr), .h_wdata(dm_wdata), .h_rdata(dm_rdata[c]));
  end
endmodule
