// tb_ifetch: the shared fetch/issue unit against a 3-cycle instruction
// memory model. Three programs are run:
//  1. a MUL followed by 40 independent ADDs: the 30th ADD would write back
//     in the MUL's write-back cycle (30 + 8 = 38) and must slip one cycle;
//  2. dependent chains of MUL/ADD plus two INVs (inverter busy stall);
//  3. 300 random instructions over 6 registers, NOPs included.
// An independent reference computes, for every instruction, the earliest
// cycle allowed by the rules (one issue per cycle in order; a source or
// destination written by an earlier instruction j is usable LAT_j + 4
// cycles after j; no two results in one write-back cycle; INVs at least
// INV_LAT apart). Every issue must happen exactly at that cycle, with the
// right instruction; done must follow the last write-back; the issue and
// stall counters must match.
module tb_ifetch;
  import finesse_pkg::*;
  localparam int LL = 38, SL = 8, IL = 2 * DW + 2, AW = 10;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0;
  logic [AW-1:0] start_pc;
  logic [AW:0] end_pc;
  logic imem_re, iss_valid, busy, done;
  logic [AW-1:0] imem_raddr;
  logic [IW-1:0] imem_rdata;
  instr_t iss_instr;
  logic [31:0] c_cyc, c_iss, c_dep, c_wb, c_inv;
  int checks = 0, failures = 0;
  int cyc = 0;
  instr_t prog [1 << AW];

  ifetch #(.LONG_LAT(LL), .SHORT_LAT(SL), .IMEM_AW(AW)) dut (
    .clk(clk), .rst_n(rst_n), .start(start), .start_pc(start_pc), .end_pc(end_pc),
    .imem_re(imem_re), .imem_raddr(imem_raddr), .imem_rdata(imem_rdata), .inv_busy(1'b0),
    .iss_valid(iss_valid), .iss_instr(iss_instr), .busy(busy), .done(done),
    .cnt_cycles(c_cyc), .cnt_issued(c_iss), .cnt_stall_dep(c_dep), .cnt_stall_wb(c_wb), .cnt_stall_inv(c_inv));

  // instruction memory model, 3-cycle read
  logic [IW-1:0] m1, m2;
  always @(posedge clk) begin
    if (imem_re) m1 <= prog[imem_raddr];
    m2 <= m1;
    imem_rdata <= m2;
    cyc <= cyc + 1;
  end

  int iss_t [$];
  instr_t iss_i [$];
  always @(negedge clk) if (rst_n && iss_valid) begin
    iss_t.push_back(cyc);
    iss_i.push_back(iss_instr);
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int lat(logic [7:0] op);
    case (unit_of(op))
      U_MMUL: return LL;
      U_MADD, U_MLIN: return SL;
      U_MINV: return IL;
      default: return 0;
    endcase
  endfunction

  function automatic instr_t mk(logic [7:0] op, int d, int s1, int s2);
    instr_t r;
    r.op = op; r.dst = RAW'(d); r.src1 = RAW'(s1); r.src2 = RAW'(s2);
    return r;
  endfunction

  int n_wb_slips;
  int n_dep_waits;

  task automatic run(int n);
    int t [];
    int done_t;
    t = new[n];
    iss_t.delete(); iss_i.delete();
    @(negedge clk);
    start = 1; start_pc = '0; end_pc = (AW+1)'(n);
    @(negedge clk);
    start = 0;
    while (!done && cyc < 1000000) @(negedge clk);
    done_t = cyc;
    checks++;
    if (iss_t.size() != n) begin failures++; $display("FAIL issued %0d of %0d", iss_t.size(), n); return; end
    // reference timing
    n_wb_slips = 0; n_dep_waits = 0;
    for (int k = 0; k < n; k++) begin
      int e, e0;
      bit ok;
      instr_t in = prog[k];
      checks++;
      if (iss_i[k] !== in) begin failures++; $display("FAIL order at %0d", k); end
      if (k == 0) begin t[k] = iss_t[0]; continue; end
      e = t[k-1] + 1;
      if (unit_of(in.op) != U_NONE) begin
        for (int j = 0; j < k; j++) begin
          instr_t pj = prog[j];
          if (unit_of(pj.op) == U_NONE) continue;
          if (pj.dst == in.src1 || pj.dst == in.dst || (uses_src2(in.op) && pj.dst == in.src2))
            if (t[j] + lat(pj.op) + 4 > e) e = t[j] + lat(pj.op) + 4;
          if (unit_of(in.op) == U_MINV && unit_of(pj.op) == U_MINV && t[j] + IL > e) e = t[j] + IL;
        end
        if (e > t[k-1] + 1) n_dep_waits++;
        e0 = e;
        do begin
          ok = 1;
          for (int j = 0; j < k; j++)
            if (unit_of(prog[j].op) != U_NONE && t[j] + lat(prog[j].op) == e + lat(in.op)) ok = 0;
          if (!ok) e++;
        end while (!ok);
        if (e != e0) n_wb_slips++;
      end
      t[k] = e;
      checks++;
      if (iss_t[k] != e) begin
        failures++;
        if (failures < 8) $display("FAIL instr %0d op %h issued at %0d, reference %0d", k, in.op, iss_t[k] - iss_t[0], e - iss_t[0]);
      end
    end
    // done after the last write-back
    begin
      int last_wb = 0;
      for (int j = 0; j < n; j++) if (unit_of(prog[j].op) != U_NONE && t[j] + lat(prog[j].op) + 3 > last_wb) last_wb = t[j] + lat(prog[j].op) + 3;
      checks++;
      if (done_t < last_wb) begin failures++; $display("FAIL done at %0d before last write-back %0d", done_t, last_wb); end
    end
    checks++;
    if (c_iss != 32'(n)) begin failures++; $display("FAIL issue counter %0d", c_iss); end
    $display("program of %0d: %0d cycles, dep waits %0d, wb slips %0d; counters dep %0d wb %0d inv %0d",
             n, c_cyc, n_dep_waits, n_wb_slips, c_dep, c_wb, c_inv);
  endtask

  initial begin
    int n;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // 1. write-back collision
    prog[0] = mk(OP_MUL, 1, 2, 3);
    for (int i = 0; i < 40; i++) prog[1+i] = mk(OP_ADD, 10 + i, 4, 5);
    run(41);
    checks++;
    if (iss_t[30] - iss_t[29] != 2 || c_wb != 1) begin failures++; $display("FAIL expected one write-back slip at ADD 30"); end
    // 2. chains and inverter
    n = 0;
    prog[n++] = mk(OP_MUL, 1, 2, 3);
    prog[n++] = mk(OP_MUL, 4, 1, 1);
    prog[n++] = mk(OP_ADD, 5, 4, 2);
    prog[n++] = mk(OP_INV, 6, 5, 0);
    prog[n++] = mk(OP_INV, 7, 2, 0);
    prog[n++] = mk(OP_SQR, 8, 7, 0);
    prog[n++] = mk(OP_NOP, 0, 0, 0);
    prog[n++] = mk(OP_TPL, 9, 8, 0);
    run(n);
    checks++;
    if (iss_t[1] - iss_t[0] != LL + 4 || iss_t[2] - iss_t[1] != LL + 4 || iss_t[4] - iss_t[3] != IL || c_inv == 0) begin
      failures++; $display("FAIL chain spacing");
    end
    // 3. random
    begin
      logic [7:0] ops [11] = '{OP_NOP, OP_NEG, OP_DBL, OP_TPL, OP_ADD, OP_SUB, OP_SQR, OP_MUL, OP_CVT, OP_ICV, OP_INV};
      for (int i = 0; i < 300; i++) begin
        logic [7:0] o;
        o = ops[$urandom % 11];
        if (o == OP_INV && (i % 100) != 50) o = OP_ADD;
        prog[i] = mk(o, $urandom % 6, $urandom % 6, $urandom % 6);
      end
      run(300);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
