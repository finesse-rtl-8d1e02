// tb_core: one processing core (register bank + operand fetch + ALU).
// The host port loads 32 registers; the testbench then plays the issue
// unit, sending 300 random instructions of every kind over those
// registers, each as early as the pipeline rules allow (sources and
// destination written LAT+4 cycles after their producer issued, one
// write-back per cycle, INVs 514 cycles apart), so many operations are in
// flight at once. A reference interpreter executes the same program;
// afterwards every register is read back through the host port and
// compared.
module tb_core;
  import finesse_pkg::*;
  import tb_ref_pkg::*;
  localparam int LL = 38, SL = 8, IL = 2 * DW + 2, NR = 32;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic iss_valid = 0, host_mode = 1, h_we = 0, h_re = 0;
  instr_t iss_instr;
  logic inv_busy;
  logic [RAW-1:0] h_addr;
  fp_t h_wdata, h_rdata;
  int checks = 0, failures = 0;
  int cyc = 0;
  fp_t model [NR];
  fp_t rinv;

  core dut (.clk(clk), .rst_n(rst_n), .iss_valid(iss_valid), .iss_instr(iss_instr), .inv_busy(inv_busy),
            .host_mode(host_mode), .h_we(h_we), .h_re(h_re), .h_addr(h_addr), .h_wdata(h_wdata), .h_rdata(h_rdata));

  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int lat(logic [7:0] op);
    case (unit_of(op))
      U_MMUL: return LL;
      U_MINV: return IL;
      default: return SL;
    endcase
  endfunction

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

  initial begin
    logic [7:0] ops [10] = '{OP_NEG, OP_DBL, OP_TPL, OP_ADD, OP_SUB, OP_SQR, OP_MUL, OP_CVT, OP_ICV, OP_INV};
    int ready [NR];
    bit slot [int];
    int inv_ok = 0, t = 0;
    rinv = rinv_mod();
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < NR; i++) begin
      @(negedge clk);
      h_we = 1; h_addr = RAW'(i); h_wdata = rand_fp(); model[i] = h_wdata; ready[i] = 0;
    end
    @(negedge clk) h_we = 0;
    @(negedge clk) host_mode = 0;
    t = cyc + 1;
    for (int k = 0; k < 300; k++) begin
      instr_t in;
      int e;
      in.op = (k % 120 == 7) ? OP_INV : ops[$urandom % 9];
      in.dst = RAW'($urandom % NR); in.src1 = RAW'($urandom % NR); in.src2 = RAW'($urandom % NR);
      e = t;
      if (ready[in.src1] > e) e = ready[in.src1];
      if (uses_src2(in.op) && ready[in.src2] > e) e = ready[in.src2];
      if (ready[in.dst] > e) e = ready[in.dst];
      if (in.op == OP_INV && inv_ok > e) e = inv_ok;
      while (slot.exists(e + lat(in.op))) e++;
      slot[e + lat(in.op)] = 1;
      ready[in.dst] = e + lat(in.op) + 4;
      if (in.op == OP_INV) inv_ok = e + IL;
      model[in.dst] = exec(in.op, model[in.src1], model[in.src2]);
      while (cyc < e) @(negedge clk);
      iss_valid = 1; iss_instr = in;
      @(negedge clk);
      iss_valid = 0;
      t = e + 1;
    end
    repeat (IL + 20) @(negedge clk);
    host_mode = 1;
    for (int i = 0; i < NR; i++) begin
      @(negedge clk);
      h_re = 1; h_addr = RAW'(i);
      @(negedge clk);
      h_re = 0;
      repeat (2) @(negedge clk);
      checks++;
      if (h_rdata !== model[i]) begin failures++; if (failures < 5) $display("FAIL r%0d = %h exp %h", i, h_rdata, model[i]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
