// host_if: the accelerator's host-side interface.
//
// A simple memory-mapped request port. Address map (word addresses):
//   addr[31:28] = 0: control/status registers, index addr[3:0]
//       0 CTRL    write bit 0 = 1 starts the program (ignored while busy)
//       1 START   first instruction address
//       2 END     one past the last instruction address
//       3 STATUS  read: bit 0 busy, bit 1 done
//       4..8      read: cycles, issued, dependence stalls,
//                 write-back stalls, inverter stalls of the last run
//   addr[31:28] = 1: instruction memory, word addr[IMEM_AW-1:0] (write only)
//   addr[31:28] = 2: register bank of core addr[23:16], register addr[7:0]
// Register banks can only be accessed while the accelerator is idle;
// accesses while busy are dropped (a write) or return 0 (a read).
// Timing: a read request in cycle c returns h_rvalid/h_rdata in c+3 for
// every region, so responses stay in order; writes take effect as the
// target memory's write timing says. The map is this design's choice.
//
// Lint note: address bits 27:24 are not decoded (the region field is
// 31:28 and the core index 23:16); they are reserved.
//
// Note on structure: write data, register index and instruction words go
// to the memories unchanged (only the enables are decoded), so those outputs
// are wired straight from the request port.
module host_if
  import finesse_pkg::*;
#(
  parameter int NCORES  = 8,
  parameter int IMEM_AW = 16
) (
  input  logic               clk,
  input  logic               rst_n,
  // host bus
  input  logic               h_req,
  input  logic               h_we,
  input  logic [31:0]        h_addr,
  input  fp_t                h_wdata,
  output logic               h_rvalid,
  output fp_t                h_rdata,
  // instruction memory write port
  output logic               im_we,
  output logic [IMEM_AW-1:0] im_waddr,
  output logic [IW-1:0]      im_wdata,
  // register banks
  output logic               host_mode,
  output logic [NCORES-1:0]  dm_we,
  output logic [NCORES-1:0]  dm_re,
  output logic [RAW-1:0]     dm_addr,
  output fp_t                dm_wdata,
  input  fp_t                dm_rdata [NCORES],
  // control
  output logic               start,
  output logic [IMEM_AW-1:0] start_pc,
  output logic [IMEM_AW:0]   end_pc,
  input  logic               busy,
  input  logic               done,
  input  logic [31:0]        stats [5]
);
  localparam int CW = (NCORES > 1) ? $clog2(NCORES) : 1;

  logic [3:0]   region;
  logic [7:0]   cid;
  assign region = h_addr[31:28];
  assign cid    = h_addr[23:16];

  logic core_ok;
  assign core_ok = (cid < 8'(NCORES));

  assign host_mode = !busy;
  assign im_we     = h_req && h_we && (region == 4'd1);
  assign im_waddr  = h_addr[IMEM_AW-1:0];
  assign im_wdata  = h_wdata[IW-1:0];
  assign dm_addr   = h_addr[RAW-1:0];
  assign dm_wdata  = h_wdata;

  always_comb begin
    dm_we = '0;
    dm_re = '0;
    if (h_req && region == 4'd2 && core_ok && !busy) begin
      dm_we[cid[CW-1:0]] = h_we;
      dm_re[cid[CW-1:0]] = !h_we;
    end
  end

  // control registers
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      start    <= 1'b0;
      start_pc <= '0;
      end_pc   <= '0;
    end else begin
      start <= 1'b0;
      if (h_req && h_we && region == 4'd0) begin
        unique case (h_addr[3:0])
          4'd0:    start    <= h_wdata[0] && !busy;
          4'd1:    start_pc <= h_wdata[IMEM_AW-1:0];
          4'd2:    end_pc   <= h_wdata[IMEM_AW:0];
          default: ;
        endcase
      end
    end
  end

  // read response pipeline (3 cycles for every region)
  typedef enum logic [1:0] {RD_NONE, RD_CSR, RD_DMEM, RD_ZERO} rd_kind_e;
  rd_kind_e      k0, k1, k2;
  logic [CW-1:0] c0, c1, c2;
  fp_t           csr0, csr1, csr2;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      k0 <= RD_NONE; k1 <= RD_NONE; k2 <= RD_NONE;
      c0 <= '0; c1 <= '0; c2 <= '0;
      csr0 <= '0; csr1 <= '0; csr2 <= '0;
    end else begin
      k0 <= RD_NONE;
      if (h_req && !h_we) begin
        if (region == 4'd0)                          k0 <= RD_CSR;
        else if (region == 4'd2 && core_ok && !busy) k0 <= RD_DMEM;
        else                                         k0 <= RD_ZERO;
      end
      c0 <= cid[CW-1:0];
      unique case (h_addr[3:0])
        4'd1:    csr0 <= fp_t'(start_pc);
        4'd2:    csr0 <= fp_t'(end_pc);
        4'd3:    csr0 <= fp_t'({done, busy});
        4'd4:    csr0 <= fp_t'(stats[0]);
        4'd5:    csr0 <= fp_t'(stats[1]);
        4'd6:    csr0 <= fp_t'(stats[2]);
        4'd7:    csr0 <= fp_t'(stats[3]);
        4'd8:    csr0 <= fp_t'(stats[4]);
        default: csr0 <= '0;
      endcase
      k1 <= k0; c1 <= c0; csr1 <= csr0;
      k2 <= k1; c2 <= c1; csr2 <= csr1;
    end
  end

  assign h_rvalid = (k2 != RD_NONE);
  always_comb begin
    unique case (k2)
      RD_CSR:  h_rdata = csr2;
      RD_DMEM: h_rdata = dm_rdata[c2];
      default: h_rdata = '0;
    endcase
  end
endmodule
