// tb_mlin: random and boundary NEG/DBL/TPL mod p, back-to-back; each result
// exactly SHORT_LAT = 8 cycles after the operand.
module tb_mlin;
  import finesse_pkg::*;
  import tb_ref_pkg::*;
  localparam int LAT = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0;
  lin_op_e op;
  fp_t a, y;
  logic out_valid;
  int checks = 0, failures = 0;
  int cyc = 0;
  typedef struct { int t; fp_t e; } job_t;
  job_t q [$];

  mlin dut (.clk(clk), .rst_n(rst_n), .in_valid(in_valid), .op(op), .a(a), .out_valid(out_valid), .y(y));

  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) if (rst_n && out_valid) begin
    job_t j;
    if (q.size() == 0) begin failures++; $display("FAIL unexpected output"); end
    else begin
      j = q.pop_front();
      checks++;
      if (cyc - j.t != LAT) begin failures++; $display("FAIL latency %0d", cyc - j.t); end
      checks++;
      if (y !== j.e) begin failures++; if (failures < 5) $display("FAIL got %h exp %h", y, j.e); end
    end
  end

  initial begin
    fp_t e;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 450; i++) begin
      @(negedge clk);
      in_valid = (i % 7 != 4);
      op = lin_op_e'(i % 3);
      case (i % 60)
        0, 1, 2:  a = P_MOD - 1;
        3, 4, 5:  a = '0;
        6, 7, 8:  a = P_MOD >> 1;
        default:  a = rand_fp();
      endcase
      unique case (op)
        LIN_NEG: e = submod('0, a);
        LIN_DBL: e = addmod(a, a);
        default: e = addmod(addmod(a, a), a);
      endcase
      if (in_valid) q.push_back('{cyc, e});
    end
    @(negedge clk) in_valid = 0;
    repeat (LAT + 4) @(posedge clk);
    checks++;
    if (q.size() != 0) begin failures++; $display("FAIL %0d results missing", q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
