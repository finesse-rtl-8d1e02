// tb_madd: random and boundary additions/subtractions mod p, back-to-back;
// each result exactly SHORT_LAT = 8 cycles after the operands.
module tb_madd;
  import finesse_pkg::*;
  import tb_ref_pkg::*;
  localparam int LAT = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, sub = 0;
  fp_t a, b, y;
  logic out_valid;
  int checks = 0, failures = 0;
  int cyc = 0;
  typedef struct { int t; fp_t e; } job_t;
  job_t q [$];

  madd dut (.clk(clk), .rst_n(rst_n), .in_valid(in_valid), .sub(sub), .a(a), .b(b), .out_valid(out_valid), .y(y));

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
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 400; i++) begin
      @(negedge clk);
      in_valid = (i % 5 != 2);
      sub = i[0];
      case (i % 50)
        0: begin a = P_MOD - 1; b = P_MOD - 1; end
        1: begin a = '0; b = P_MOD - 1; end
        3: begin a = fp_t'(5); b = fp_t'(5); end
        default: begin a = rand_fp(); b = rand_fp(); end
      endcase
      if (in_valid) q.push_back('{cyc, sub ? submod(a, b) : addmod(a, b)});
    end
    @(negedge clk) in_valid = 0;
    repeat (LAT + 4) @(posedge clk);
    checks++;
    if (q.size() != 0) begin failures++; $display("FAIL %0d results missing", q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
