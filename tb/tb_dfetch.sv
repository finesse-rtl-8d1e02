// tb_dfetch: dfetch between a behavioural 3-cycle register bank and a
// checker in place of the ALU. Random instructions (NOPs included) are
// issued every cycle; 3 cycles later the ALU side must show the same
// opcode and destination with operand a = src1 and operand b = src2, src1
// (SQR), R^2 mod p (CVT) or 1 (ICV) (b is not checked for unary ops); NOPs must not reach the ALU. Results
// fed in on the write-back side must come out unchanged on the bank's
// write port in the same cycle.
module tb_dfetch;
  import finesse_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic iss_valid = 0;
  instr_t iss_instr;
  logic ra_re, rb_re, alu_valid, we;
  logic [RAW-1:0] ra_addr, rb_addr, alu_dst, waddr;
  fp_t ra_data, rb_data, alu_a, alu_b, wdata;
  logic [7:0] alu_op;
  logic wb_valid = 0;
  logic [RAW-1:0] wb_dst;
  fp_t wb_data;
  fp_t regs [NREG];
  int checks = 0, failures = 0;
  int cyc = 0;
  typedef struct { int t; logic v; logic [7:0] op; logic [RAW-1:0] d; fp_t ea; fp_t eb; logic cb; } e_t;
  e_t q [$];

  dfetch dut (.clk(clk), .rst_n(rst_n), .iss_valid(iss_valid), .iss_instr(iss_instr),
              .ra_re(ra_re), .ra_addr(ra_addr), .rb_re(rb_re), .rb_addr(rb_addr),
              .ra_data(ra_data), .rb_data(rb_data),
              .alu_valid(alu_valid), .alu_op(alu_op), .alu_dst(alu_dst), .alu_a(alu_a), .alu_b(alu_b),
              .wb_valid(wb_valid), .wb_dst(wb_dst), .wb_data(wb_data),
              .we(we), .waddr(waddr), .wdata(wdata));

  // behavioural bank: 3-cycle read, data held when not read
  fp_t a1, a2, b1, b2;
  logic ra1, ra2, rb1, rb2;
  always @(posedge clk) begin
    ra1 <= ra_re; ra2 <= ra1; rb1 <= rb_re; rb2 <= rb1;
    if (ra_re) a1 <= regs[ra_addr];
    a2 <= a1;
    if (ra2) ra_data <= a2;
    if (rb_re) b1 <= regs[rb_addr];
    b2 <= b1;
    if (rb2) rb_data <= b2;
    cyc <= cyc + 1;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) if (rst_n) begin
    if (q.size() != 0 && cyc - q[0].t == RD_LAT) begin
      e_t e;
      e = q.pop_front();
      checks++;
      if (alu_valid !== e.v) begin failures++; $display("FAIL valid at %0d", cyc); end
      else if (e.v) begin
        checks++;
        if (alu_op !== e.op || alu_dst !== e.d || alu_a !== e.ea || (e.cb && alu_b !== e.eb)) begin
          failures++; if (failures < 5) $display("FAIL op %h", e.op);
        end
      end
    end
    checks++;
    if (we !== wb_valid || (wb_valid && (waddr !== wb_dst || wdata !== wb_data))) begin
      failures++; $display("FAIL write-back path");
    end
  end

  initial begin
    logic [7:0] ops [11] = '{OP_NOP, OP_NEG, OP_DBL, OP_TPL, OP_ADD, OP_SUB, OP_SQR, OP_MUL, OP_CVT, OP_ICV, OP_INV};
    for (int i = 0; i < NREG; i++) regs[i] = rand_fp();
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 1000; i++) begin
      instr_t in;
      fp_t eb;
      @(negedge clk);
      in.op = ops[$urandom % 11]; in.dst = RAW'($urandom); in.src1 = RAW'($urandom); in.src2 = RAW'($urandom);
      iss_valid = ($urandom % 5 != 0);
      iss_instr = in;
      wb_valid = $urandom % 2; wb_dst = RAW'($urandom); wb_data = rand_fp();
      case (in.op)
        OP_SQR: eb = regs[in.src1];
        OP_CVT: eb = R2_MOD;
        OP_ICV: eb = fp_t'(1);
        default: eb = regs[in.src2];
      endcase
      q.push_back('{cyc, iss_valid && in.op != OP_NOP, in.op, in.dst, regs[in.src1], eb,
                  uses_src2(in.op) || in.op == OP_SQR || in.op == OP_CVT || in.op == OP_ICV});
    end
    @(negedge clk) begin iss_valid = 0; wb_valid = 0; end
    repeat (5) @(negedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
