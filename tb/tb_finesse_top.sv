// tb_finesse_top: end-to-end run of the accelerator at its default size
// (8 cores, 64K-word instruction memory) through the host port only.
//
// The host writes a program into the instruction memory and different
// random field elements into all 256 registers of every core (registers
// 0..15 are the program's inputs), sets START/END and starts it.
// The program converts the inputs into Montgomery form (CVT), runs a body
// of random operations of every kind on them (two INVs among them), has a
// MUL followed by 40 independent ADDs (one lands on the MUL's write-back
// cycle), and converts results back (ICV). While it runs the host tries to
// overwrite a register, which must be refused. After done, all used
// registers of all cores are read back and compared with a reference
// interpreter, and the counters are read through the status registers.
// Each mechanism must have happened at least once: dependence stalls,
// write-back conflict stalls, inverter-busy stalls, every opcode, the
// refused host write, and multi-core execution (each core's own results).
module tb_finesse_top;
  import finesse_pkg::*;
  import tb_ref_pkg::*;
  localparam int NC = 8, NIN = 16, NBODY = 160;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic h_req = 0, h_we = 0, h_rvalid, busy, done;
  logic [31:0] h_addr;
  fp_t h_wdata, h_rdata;
  int checks = 0, failures = 0;
  fp_t model [NC][NREG];
  fp_t init  [NC][NREG];
  bit  used [NREG];
  instr_t prog [$];
  int op_count [logic [7:0]];
  fp_t rinv;

  finesse_top dut (.clk(clk), .rst_n(rst_n), .h_req(h_req), .h_we(h_we), .h_addr(h_addr),
                   .h_wdata(h_wdata), .h_rvalid(h_rvalid), .h_rdata(h_rdata), .busy(busy), .done(done));

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string s);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", s); end
  endtask

  task automatic wr(logic [31:0] ad, fp_t d);
    @(negedge clk);
    h_req = 1; h_we = 1; h_addr = ad; h_wdata = d;
    @(negedge clk);
    h_req = 0; h_we = 0;
  endtask

  task automatic rd(logic [31:0] ad, output fp_t d);
    @(negedge clk);
    h_req = 1; h_we = 0; h_addr = ad;
    @(negedge clk);
    h_req = 0;
    while (!h_rvalid) @(negedge clk);
    d = h_rdata;
  endtask

  function automatic fp_t exec(logic [7:0] op, fp_t x, fp_t y);
    case (op)
      OP_NEG: return submod('0, x);
      OP_DBL: return addmod(x, x);
      OP_TPL: return addmod(addmod(x, x), x);
      OP_ADD: return addmod(x, y);
      OP_SUB: return submod(x, y);
      OP_SQR: return mont(x, x, rinv);
      OP_MUL: return mont(x, y, rinv);
      OP_CVT: return mont(x, R2_MOD, rinv);
      OP_ICV: return mont(x, fp_t'(1), rinv);
      OP_INV: return inv_mont(x, R2_MOD);
      default: return '0;
    endcase
  endfunction

  function automatic instr_t mk(logic [7:0] op, int d, int s1, int s2);
    instr_t r;
    r.op = op; r.dst = RAW'(d); r.src1 = RAW'(s1); r.src2 = RAW'(s2);
    return r;
  endfunction

  initial begin
    logic [7:0] ops [11] = '{OP_NOP, OP_NEG, OP_DBL, OP_TPL, OP_ADD, OP_SUB, OP_SQR, OP_MUL, OP_CVT, OP_ICV, OP_INV};
    fp_t d;
    fp_t st [9];
    rinv = rinv_mod();
    // ---- program ----
    for (int i = 0; i < NIN; i++) prog.push_back(mk(OP_CVT, 16 + i, i, 0));
    for (int i = 0; i < NBODY; i++) begin
      logic [7:0] o;
      o = ops[$urandom % 10];
      if (i == 40 || i == 41) o = OP_INV;
      prog.push_back(mk(o, 16 + $urandom % 32, 16 + $urandom % 32, 16 + $urandom % 32));
    end
    prog.push_back(mk(OP_MUL, 60, 16, 17));
    for (int i = 0; i < 40; i++) prog.push_back(mk(OP_ADD, 64 + i, 18, 19));
    for (int i = 0; i < 32; i++) prog.push_back(mk(OP_ICV, 110 + i, 16 + i, 0));
    foreach (prog[k]) begin
      if (!op_count.exists(prog[k].op)) op_count[prog[k].op] = 0;
      op_count[prog[k].op]++;
    end
    // ---- reference ----
    for (int c = 0; c < NC; c++) begin
      for (int r = 0; r < NREG; r++) init[c][r] = rand_fp();
      for (int r = 0; r < NREG; r++) model[c][r] = init[c][r];
    end
    for (int r = 0; r < NIN; r++) used[r] = 1;
    foreach (prog[k]) begin
      instr_t in;
      in = prog[k];
      if (unit_of(in.op) == U_NONE) continue;
      used[in.dst] = 1;
      for (int c = 0; c < NC; c++) model[c][in.dst] = exec(in.op, model[c][in.src1], model[c][in.src2]);
    end
    // ---- load ----
    repeat (3) @(posedge clk);
    rst_n = 1;
    foreach (prog[k]) wr(32'h1000_0000 | 32'(k), fp_t'(prog[k]));
    for (int c = 0; c < NC; c++)
      for (int r = 0; r < NREG; r++)
        wr(32'h2000_0000 | (32'(c) << 16) | 32'(r), init[c][r]);
    // ---- run ----
    wr(32'h0000_0001, '0);
    wr(32'h0000_0002, fp_t'(prog.size()));
    wr(32'h0000_0000, fp_t'(1));
    @(negedge clk);
    chk(busy, "busy after start");
    wr(32'h2005_0000, fp_t'(12345));          // refused while busy
    while (!done) @(negedge clk);
    // ---- read back ----
    for (int c = 0; c < NC; c++)
      for (int r = 0; r < NREG; r++)
        if (used[r]) begin
          rd(32'h2000_0000 | (32'(c) << 16) | 32'(r), d);
          checks++;
          if (d !== model[c][r]) begin
            failures++;
            if (failures < 6) $display("FAIL core %0d r%0d = %h exp %h", c, r, d, model[c][r]);
          end
        end
    rd(32'h2005_0000, d);
    chk(d != fp_t'(12345) && d == model[5][0], "mechanism: host write refused while busy");
    for (int i = 0; i < 9; i++) rd(32'(i), st[i]);
    chk(st[3][1:0] == 2'b10, "status done, not busy");
    chk(st[5] == 32'(prog.size()), "issued count");
    $display("run: %0d instructions in %0d cycles (IPC %0.3f); stalls: dependence %0d, write-back %0d, inverter %0d",
             st[5][31:0], st[4][31:0], real'(st[5][31:0]) / real'(st[4][31:0]), st[6][31:0], st[7][31:0], st[8][31:0]);
    chk(st[6] != 0, "mechanism: dependence stall");
    chk(st[7] != 0, "mechanism: write-back conflict stall");
    chk(st[8] != 0, "mechanism: inverter busy stall");
    chk(st[4] >= st[5], "cycles >= instructions");
    foreach (ops[i]) chk(op_count.exists(ops[i]), $sformatf("mechanism: opcode %h used", ops[i]));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
