// tb_base_unit: random and corner operands of the 16x16 base multiplier,
// checked against a shift-and-add product.
module tb_base_unit;
  localparam int W = 16;
  logic [W-1:0] a, b;
  logic [2*W-1:0] p;
  int checks = 0, failures = 0;

  base_unit #(.W(W)) dut (.a(a), .b(b), .p(p));

  function automatic logic [2*W-1:0] ref_mul(logic [W-1:0] x, logic [W-1:0] y);
    logic [2*W-1:0] acc = '0;
    for (int i = 0; i < W; i++) if (y[i]) acc += {{W{1'b0}}, x} << i;
    return acc;
  endfunction

  initial begin
    for (int i = 0; i < 2000; i++) begin
      case (i)
        0: begin a = '1; b = '1; end
        1: begin a = '0; b = '1; end
        2: begin a = 16'h8000; b = 16'h8000; end
        default: begin a = W'($urandom); b = W'($urandom); end
      endcase
      #1;
      checks++;
      if (p !== ref_mul(a, b)) begin
        failures++;
        if (failures < 5) $display("FAIL %h*%h = %h", a, b, p);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
