// ifetch: shared instruction fetch and single-issue control.
//
// One ifetch serves all cores. Since every core runs the same program and
// no instruction's timing depends on data, hazards are identical in every
// core and are resolved once, here; the chosen instruction is broadcast.
//
// Fetch: from start_pc up to (not including) end_pc, reading the
// instruction memory (3-cycle latency) into an FQ-entry queue; requests
// stop when queue plus in-flight reads would overflow it.
// Issue: the queue head is issued in order, at most one per cycle, unless
//  - dependence: a source or the destination register still waits for the
//    result of an earlier instruction (per-register countdown);
//  - write-back conflict: the cycle in which its result would reach the
//    register bank's single write port is already taken by an earlier
//    instruction of a different latency (a reservation shift register;
//    this is the Long/Short collision behind the issue-slot affinity
//    scheduling of the compiler);
//  - INV while the iterative inverter is busy.
// A held instruction stays at the head; later ones wait (no reordering).
//
// Timing, for an instruction decided in cycle d: iss_valid in d+1,
// operands at the ALU in d+4, result written in d+4+LAT (LAT = LONG_LAT,
// SHORT_LAT or INV_LAT); a dependent instruction may be decided in
// d+LAT+4 at the earliest (no bypass). done rises once the last
// instruction has written back and stays high until the next start.
// The stall rules follow the pipeline model of the original design; the
// queue, the countdown form of the scoreboard and the lack of forwarding
// are this design's choices. Counters report cycles, issues and stalls.
//
// Lint note: rst_n is the asynchronous reset of all registers and is also
// the disable condition of the assertions, which a linter reports as a
// signal used both synchronously and asynchronously; no logic reads it
// synchronously.
module ifetch
  import finesse_pkg::*;
#(
  parameter int LONG_LAT  = 38,
  parameter int SHORT_LAT = 8,
  parameter int IMEM_AW   = 16,
  parameter int FQ        = 8
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  logic [IMEM_AW-1:0] start_pc,
  input  logic [IMEM_AW:0]   end_pc,
  output logic               imem_re,
  output logic [IMEM_AW-1:0] imem_raddr,
  input  logic [IW-1:0]      imem_rdata,
  input  logic               inv_busy,
  output logic               iss_valid,
  output instr_t             iss_instr,
  output logic               busy,
  output logic               done,
  output logic [31:0]        cnt_cycles,
  output logic [31:0]        cnt_issued,
  output logic [31:0]        cnt_stall_dep,
  output logic [31:0]        cnt_stall_wb,
  output logic [31:0]        cnt_stall_inv
);
  localparam int INV_LAT = 2 * DW + 2;
  localparam int RES_N   = INV_LAT + RD_LAT + 2;
  localparam int SBW     = $clog2(INV_LAT + RD_LAT + 1);
  localparam int QAW     = $clog2(FQ);

  function automatic int lat_of(unit_e u);
    case (u)
      U_MMUL:  return LONG_LAT;
      U_MADD,
      U_MLIN:  return SHORT_LAT;
      U_MINV:  return INV_LAT;
      default: return 0;
    endcase
  endfunction

  logic               running;
  logic [IMEM_AW:0]   pc;
  logic [RD_LAT-1:0]  rv;            // fetches in flight
  instr_t             fq [FQ];
  logic [QAW-1:0]     q_wr, q_rd;
  logic [QAW:0]       q_cnt;
  logic [SBW-1:0]     sb [NREG];
  logic [RES_N-1:0]   res;
  logic [SBW-1:0]     inv_cnt;

  // ---------------- fetch ----------------
  logic [QAW+1:0] occ;
  always_comb begin
    occ = (QAW+2)'(q_cnt);
    for (int i = 0; i < RD_LAT; i++) occ = occ + (QAW+2)'(rv[i]);
  end
  assign imem_re    = running && (pc < end_pc) && (occ < (QAW+2)'(FQ));
  assign imem_raddr = pc[IMEM_AW-1:0];

  // ---------------- issue decision ----------------
  instr_t head;
  unit_e  hu;
  int     hlat;
  logic   head_v, haz_dep, haz_wb, haz_inv, issue;
  assign head   = fq[q_rd];
  assign head_v = (q_cnt != '0);
  assign hu     = unit_of(head.op);
  assign hlat   = lat_of(hu);

  always_comb begin
    haz_dep = 1'b0;
    haz_wb  = 1'b0;
    haz_inv = 1'b0;
    if (hu != U_NONE) begin
      if (sb[head.src1] != '0) haz_dep = 1'b1;
      if (uses_src2(head.op) && sb[head.src2] != '0) haz_dep = 1'b1;
      if (sb[head.dst] != '0) haz_dep = 1'b1;
      if (res[hlat + RD_LAT + 1]) haz_wb = 1'b1;
      if (hu == U_MINV && (inv_cnt != '0 || inv_busy)) haz_inv = 1'b1;
    end
  end
  assign issue = running && head_v && !haz_dep && !haz_wb && !haz_inv;

  logic pushing;
  assign pushing = rv[RD_LAT-1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running   <= 1'b0;
      done      <= 1'b0;
      pc        <= '0;
      rv        <= '0;
      q_wr      <= '0;
      q_rd      <= '0;
      q_cnt     <= '0;
      res       <= '0;
      inv_cnt   <= '0;
      iss_valid <= 1'b0;
      iss_instr <= '0;
      for (int i = 0; i < NREG; i++) sb[i] <= '0;
      for (int i = 0; i < FQ; i++)   fq[i] <= '0;
      cnt_cycles    <= '0;
      cnt_issued    <= '0;
      cnt_stall_dep <= '0;
      cnt_stall_wb  <= '0;
      cnt_stall_inv <= '0;
    end else if (start && !running) begin
      running       <= 1'b1;
      done          <= 1'b0;
      pc            <= {1'b0, start_pc};
      rv            <= '0;
      q_wr          <= '0;
      q_rd          <= '0;
      q_cnt         <= '0;
      iss_valid     <= 1'b0;
      cnt_cycles    <= '0;
      cnt_issued    <= '0;
      cnt_stall_dep <= '0;
      cnt_stall_wb  <= '0;
      cnt_stall_inv <= '0;
    end else begin
      // fetch pipeline
      rv <= {rv[RD_LAT-2:0], imem_re};
      if (imem_re) pc <= pc + 1'b1;
      if (pushing) begin
        fq[q_wr] <= instr_t'(imem_rdata);
        q_wr     <= q_wr + 1'b1;
      end
      if (issue) q_rd <= q_rd + 1'b1;
      q_cnt <= q_cnt + (QAW+1)'(pushing) - (QAW+1)'(issue);

      // scoreboard countdown
      for (int i = 0; i < NREG; i++)
        if (sb[i] != '0) sb[i] <= sb[i] - 1'b1;
      if (inv_cnt != '0) inv_cnt <= inv_cnt - 1'b1;
      res <= (res >> 1);

      iss_valid <= issue;
      if (issue) begin
        iss_instr <= head;
        if (hu != U_NONE) begin
          sb[head.dst] <= SBW'(hlat + RD_LAT);
          res          <= (res >> 1) | (RES_N'(1) << (hlat + RD_LAT));
        end
        if (hu == U_MINV) inv_cnt <= SBW'(INV_LAT - 1);
      end

      if (running) begin
        cnt_cycles <= cnt_cycles + 1'b1;
        if (issue) cnt_issued <= cnt_issued + 1'b1;
        if (head_v && haz_dep) cnt_stall_dep <= cnt_stall_dep + 1'b1;
        else if (head_v && haz_wb) cnt_stall_wb <= cnt_stall_wb + 1'b1;
        else if (head_v && haz_inv) cnt_stall_inv <= cnt_stall_inv + 1'b1;
      end

      if (running && pc == end_pc && q_cnt == '0 && rv == '0 &&
          res == '0 && inv_cnt == '0 && !issue) begin
        running <= 1'b0;
        done    <= 1'b1;
      end
    end
  end

  assign busy = running;

  a_q_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    pushing |-> (q_cnt < (QAW+1)'(FQ)) || issue)
    else $error("ifetch: instruction queue overflow");
endmodule
