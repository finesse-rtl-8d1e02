// tb_alu: a random stream of every ALU operation. The testbench places
// each operation so that no two results share a write-back cycle and no
// INV starts while the inverter is busy (the rules the issue logic keeps),
// then checks that each result leaves with the right destination tag, the
// right value and exactly its unit's latency (38 Long, 8 Short, 514 INV).
module tb_alu;
  import finesse_pkg::*;
  import tb_ref_pkg::*;
  localparam int LL = 38, SL = 8, IL = 2 * DW + 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0;
  logic [7:0] op;
  logic [RAW-1:0] dst;
  fp_t a, b;
  logic wb_valid, inv_busy;
  logic [RAW-1:0] wb_dst;
  fp_t wb_data;
  int checks = 0, failures = 0;
  int cyc = 0;
  bit taken [int];
  typedef struct { int t; logic [RAW-1:0] d; fp_t e; } exp_t;
  exp_t pend [int];
  fp_t rinv;

  alu dut (.clk(clk), .rst_n(rst_n), .in_valid(in_valid), .op(op), .dst(dst), .a(a), .b(b),
           .wb_valid(wb_valid), .wb_dst(wb_dst), .wb_data(wb_data), .inv_busy(inv_busy));

  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) if (rst_n) begin
    if (pend.exists(cyc)) begin
      checks++;
      if (!wb_valid || wb_dst !== pend[cyc].d || wb_data !== pend[cyc].e) begin
        failures++;
        if (failures < 6) $display("FAIL cyc %0d v=%b dst %0d/%0d data %h exp %h", cyc, wb_valid, wb_dst, pend[cyc].d, wb_data, pend[cyc].e);
      end
      pend.delete(cyc);
    end else if (wb_valid) begin
      checks++; failures++; $display("FAIL spurious result at %0d", cyc);
    end
  end

  function automatic int lat_of(logic [7:0] o);
    case (unit_of(o))
      U_MMUL: return LL;
      U_MINV: return IL;
      default: return SL;
    endcase
  endfunction

  initial begin
    logic [7:0] ops [10] = '{OP_NEG, OP_DBL, OP_TPL, OP_ADD, OP_SUB, OP_SQR, OP_MUL, OP_CVT, OP_ICV, OP_INV};
    int inv_free = 0, n = 0, nmm = 0, nsh = 0, ninv = 0;
    rinv = rinv_mod();
    repeat (3) @(posedge clk);
    rst_n = 1;
    while (n < 400) begin
      logic [7:0] o;
      fp_t x, y, e;
      @(negedge clk);
      in_valid = 0;
      o = (n % 150 == 0) ? OP_INV : ops[$urandom % 9];
      if (taken.exists(cyc + lat_of(o))) continue;
      if (o == OP_INV && cyc < inv_free) continue;
      x = rand_fp(); y = rand_fp();
      case (o)
        OP_SQR: y = x;
        OP_CVT: y = R2_MOD;
        OP_ICV: y = fp_t'(1);
        default: ;
      endcase
      case (o)
        OP_NEG: e = submod('0, x);
        OP_DBL: e = addmod(x, x);
        OP_TPL: e = addmod(addmod(x, x), x);
        OP_ADD: e = addmod(x, y);
        OP_SUB: e = submod(x, y);
        OP_INV: e = inv_mont(x, R2_MOD);
        default: e = mont(x, y, rinv);
      endcase
      in_valid = 1; op = o; dst = RAW'($urandom); a = x; b = y;
      taken[cyc + lat_of(o)] = 1;
      pend[cyc + lat_of(o)] = '{cyc + lat_of(o), dst, e};
      if (o == OP_INV) begin inv_free = cyc + IL; ninv++; end
      else if (unit_of(o) == U_MMUL) nmm++; else nsh++;
      n++;
    end
    @(negedge clk) in_valid = 0;
    while (pend.size() != 0 && cyc < 30000) @(negedge clk);
    checks++;
    if (ninv < 2 || nmm < 50 || nsh < 50) begin failures++; $display("FAIL mix %0d %0d %0d", ninv, nmm, nsh); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
