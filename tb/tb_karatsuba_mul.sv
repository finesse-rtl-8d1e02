// tb_karatsuba_mul: streams random 256-bit pairs, one per cycle, through the
// three-level Karatsuba multiplier and checks each product exactly
// 2 + 3*3 = 11 cycles later against the full-width '*' product.
module tb_karatsuba_mul;
  localparam int N = 256, LEVELS = 3, LAT = 2 + 3 * LEVELS;
  logic clk = 0;
  always #5 clk = ~clk;
  logic [N-1:0] a, b;
  logic [2*N-1:0] p;
  logic [2*N-1:0] expq [$];
  int checks = 0, failures = 0;

  karatsuba_mul #(.N(N), .LEVELS(LEVELS), .W(16)) dut (.clk(clk), .a(a), .b(b), .p(p));

  function automatic logic [N-1:0] rnd();
    logic [N-1:0] v;
    for (int i = 0; i < N / 32; i++) v[i*32 +: 32] = $urandom;
    return v;
  endfunction

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [2*N-1:0] e;
    for (int i = 0; i < 400 + LAT; i++) begin
      case (i)
        0: begin a = '1; b = '1; end
        1: begin a = '1; b = '0; end
        2: begin a = {1'b1, {(N-1){1'b0}}}; b = '1; end
        default: begin a = rnd(); b = rnd(); end
      endcase
      expq.push_back((2*N)'(a) * (2*N)'(b));
      @(posedge clk); #1;
      if (i >= LAT - 1) begin
        e = expq.pop_front();
        checks++;
        if (p !== e) begin failures++; if (failures < 5) $display("FAIL i=%0d got %h exp %h", i, p, e); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
