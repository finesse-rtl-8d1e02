// tb_wallace_mul: streams random 34-bit pairs (one per cycle) through the
// Wallace-tree multiplier and checks every product exactly 2 cycles later.
module tb_wallace_mul;
  localparam int N = 34, LAT = 2;
  logic clk = 0;
  always #5 clk = ~clk;
  logic [N-1:0] a, b;
  logic [2*N-1:0] p;
  logic [2*N-1:0] expq [$];
  int checks = 0, failures = 0;

  wallace_mul #(.N(N), .W(16)) dut (.clk(clk), .a(a), .b(b), .p(p));

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [2*N-1:0] e;
    for (int i = 0; i < 500 + LAT; i++) begin
      if (i < 3) begin a = '1; b = '1; end
      else begin a = {N'($urandom), 32'($urandom)}; b = {N'($urandom), 32'($urandom)}; end
      expq.push_back((2*N)'(a) * (2*N)'(b));
      @(posedge clk); #1;
      if (i >= LAT - 1) begin
        e = expq.pop_front();
        checks++;
        if (p !== e) begin failures++; if (failures < 5) $display("FAIL got %h exp %h", p, e); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
