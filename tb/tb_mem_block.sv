// tb_mem_block: writes a random image into the block, reads it back with
// one-cycle read latency, checks read-during-write returns the old word and
// that rdata holds while re is low.
module tb_mem_block;
  localparam int BW = 64, BD = 256;
  logic clk = 0;
  always #5 clk = ~clk;
  logic we = 0, re = 0;
  logic [7:0] waddr, raddr;
  logic [BW-1:0] wdata, rdata;
  logic [BW-1:0] model [BD];
  int checks = 0, failures = 0;

  mem_block #(.BW(BW), .BD(BD)) dut (.clk(clk), .we(we), .waddr(waddr), .wdata(wdata), .re(re), .raddr(raddr), .rdata(rdata));

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [BW-1:0] held;
    for (int i = 0; i < BD; i++) begin
      @(negedge clk);
      we = 1; waddr = 8'(i); wdata = {32'($urandom), 32'($urandom)};
      model[i] = wdata;
    end
    @(negedge clk) we = 0;
    for (int i = 0; i < BD; i++) begin
      @(negedge clk);
      re = 1; raddr = 8'(BD - 1 - i);
      @(negedge clk);
      re = 0;
      checks++;
      if (rdata !== model[BD-1-i]) begin failures++; if (failures < 5) $display("FAIL rd %0d", BD-1-i); end
    end
    // read during write: old word
    @(negedge clk);
    we = 1; waddr = 8'd7; wdata = ~model[7]; re = 1; raddr = 8'd7;
    @(negedge clk);
    we = 0; re = 0;
    checks++;
    if (rdata !== model[7]) begin failures++; $display("FAIL read-during-write"); end
    held = rdata;
    model[7] = ~model[7];
    @(negedge clk);
    checks++;
    if (rdata !== held) begin failures++; $display("FAIL rdata not held"); end
    re = 1; raddr = 8'd7;
    @(negedge clk);
    re = 0;
    checks++;
    if (rdata !== model[7]) begin failures++; $display("FAIL write after rdw"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
