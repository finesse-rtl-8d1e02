// tb_mem_tiled: a 40 x 1000 memory tiled from 16 x 128 blocks (3 columns,
// 8 rows, both ragged). Random writes and reads, one request per cycle,
// checked against a model; read data must arrive exactly 3 cycles after
// the request, and a write is visible to a read issued one cycle later.
module tb_mem_tiled;
  localparam int WIDTH = 40, DEPTH = 1000, AW = $clog2(DEPTH);
  logic clk = 0;
  always #5 clk = ~clk;
  logic we = 0, re = 0;
  logic [AW-1:0] waddr, raddr;
  logic [WIDTH-1:0] wdata, rdata;
  logic [WIDTH-1:0] model [DEPTH];
  int checks = 0, failures = 0;
  logic [WIDTH-1:0] expq [$];
  int tq [$];
  int cyc = 0;

  mem_tiled #(.WIDTH(WIDTH), .DEPTH(DEPTH), .BW(16), .BD(128)) dut (
    .clk(clk), .we(we), .waddr(waddr), .wdata(wdata), .re(re), .raddr(raddr), .rdata(rdata));

  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // compare 3 cycles after each read request
  always @(negedge clk) begin
    if (tq.size() != 0 && cyc - tq[0] == 3) begin
      logic [WIDTH-1:0] e;
      void'(tq.pop_front());
      e = expq.pop_front();
      checks++;
      if (rdata !== e) begin failures++; if (failures < 5) $display("FAIL got %h exp %h", rdata, e); end
    end
  end

  initial begin
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk);
      we = 1; waddr = AW'(i); wdata = {8'($urandom), 32'($urandom)};
      model[i] = wdata;
    end
    @(negedge clk) we = 0;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      we = ($urandom % 3 == 0);
      re = ($urandom % 2 == 0);
      waddr = AW'($urandom % DEPTH);
      wdata = {8'($urandom), 32'($urandom)};
      raddr = (i % 10 == 0) ? waddr : AW'($urandom % DEPTH);
      if (re) begin
        // write requested in this same cycle is not yet visible
        expq.push_back(model[raddr]);
        tq.push_back(cyc);
      end
      if (we) model[waddr] = wdata;
    end
    @(negedge clk) begin we = 0; re = 0; end
    repeat (6) @(negedge clk);
    checks++;
    if (tq.size() != 0) begin failures++; $display("FAIL reads lost"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
