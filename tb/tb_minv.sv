// tb_minv: Montgomery-domain inverses of random and boundary values.
// y must equal x^-1 * R^2 mod p (so x*y = R^2), checked with Fermat
// exponentiation; latency must be exactly 2*256+2 = 514 cycles for every
// input and busy must hold for the whole computation.
module tb_minv;
  import finesse_pkg::*;
  import tb_ref_pkg::*;
  localparam int LAT = 2 * DW + 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0;
  fp_t a, y;
  logic out_valid, busy;
  int checks = 0, failures = 0;

  minv dut (.clk(clk), .rst_n(rst_n), .in_valid(in_valid), .a(a), .busy(busy), .out_valid(out_valid), .y(y));

  initial begin
    repeat (20 * (LAT + 10)) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    fp_t x, e;
    int n;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 12; i++) begin
      case (i)
        0: x = fp_t'(1);
        1: x = P_MOD - 1;
        2: x = '0;
        3: x = r_mod();
        4: x = fp_t'(2);
        default: x = rand_fp();
      endcase
      @(negedge clk);
      in_valid = 1; a = x;
      @(negedge clk);
      in_valid = 0; a = rand_fp();
      n = 1;
      while (!out_valid && n < LAT + 20) begin
        checks++;
        if (!busy) begin failures++; $display("FAIL busy dropped at %0d", n); end
        @(negedge clk); n++;
      end
      e = inv_mont(x, R2_MOD);
      checks++;
      if (n != LAT) begin failures++; $display("FAIL latency %0d", n); end
      checks++;
      if (y !== e) begin failures++; $display("FAIL inv(%h) = %h exp %h", x, y, e); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
