// tb_mmul: random Montgomery products, issued back-to-back and with gaps.
// Each result must appear exactly LONG_LAT = 38 cycles after its operands,
// satisfy y*R = a*b (mod p) and be fully reduced (y < p).
module tb_mmul;
  import finesse_pkg::*;
  import tb_ref_pkg::*;
  localparam int LAT = 38;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0;
  fp_t a, b, y;
  logic out_valid;
  int checks = 0, failures = 0;
  int cyc = 0;
  typedef struct { int t; fp_t a; fp_t b; } job_t;
  job_t q [$];

  mmul dut (.clk(clk), .rst_n(rst_n), .in_valid(in_valid), .a(a), .b(b), .out_valid(out_valid), .y(y));

  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // checker
  always @(negedge clk) if (rst_n) begin
    if (out_valid) begin
      job_t j;
      if (q.size() == 0) begin failures++; $display("FAIL unexpected output"); end
      else begin
        j = q.pop_front();
        checks++;
        if (cyc - j.t != LAT) begin failures++; $display("FAIL latency %0d", cyc - j.t); end
        checks++;
        if (y >= P_MOD || mulmod(y, r_mod()) != mulmod(j.a, j.b)) begin
          failures++; if (failures < 5) $display("FAIL %h * %h -> %h", j.a, j.b, y);
        end
      end
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 300; i++) begin
      @(negedge clk);
      if (i % 7 == 3) begin
        in_valid = 0;
      end else begin
        in_valid = 1;
        case (i)
          0: begin a = P_MOD - 1; b = P_MOD - 1; end
          1: begin a = '0; b = rand_fp(); end
          2: begin a = fp_t'(1); b = fp_t'(1); end
          default: begin a = rand_fp(); b = rand_fp(); end
        endcase
        q.push_back('{cyc, a, b});
      end
    end
    @(negedge clk) in_valid = 0;
    repeat (LAT + 5) @(posedge clk);
    checks++;
    if (q.size() != 0) begin failures++; $display("FAIL %0d results missing", q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
