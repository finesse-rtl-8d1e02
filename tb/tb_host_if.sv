// tb_host_if: address decoding and read timing of the host interface.
// Checks: instruction-memory writes reach the Imem port; register-bank
// writes and reads select exactly the addressed core, and only while idle;
// START/END read back; CTRL starts a run only while idle (one-cycle
// pulse); STATUS and counters read back; every read answers exactly 3
// cycles after its request, in order.
module tb_host_if;
  import finesse_pkg::*;
  localparam int NC = 4, AW = 12;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic h_req = 0, h_we = 0;
  logic [31:0] h_addr;
  fp_t h_wdata, h_rdata;
  logic h_rvalid;
  logic im_we, host_mode, start;
  logic [AW-1:0] im_waddr, start_pc;
  logic [IW-1:0] im_wdata;
  logic [NC-1:0] dm_we, dm_re;
  logic [RAW-1:0] dm_addr;
  fp_t dm_wdata;
  fp_t dm_rdata [NC];
  logic [AW:0] end_pc;
  logic busy = 0, done = 0;
  logic [31:0] stats [5];
  int checks = 0, failures = 0;
  int cyc = 0;
  typedef struct { int t; fp_t e; } rd_t;
  rd_t q [$];
  int starts = 0;

  host_if #(.NCORES(NC), .IMEM_AW(AW)) dut (
    .clk(clk), .rst_n(rst_n), .h_req(h_req), .h_we(h_we), .h_addr(h_addr), .h_wdata(h_wdata),
    .h_rvalid(h_rvalid), .h_rdata(h_rdata), .im_we(im_we), .im_waddr(im_waddr), .im_wdata(im_wdata),
    .host_mode(host_mode), .dm_we(dm_we), .dm_re(dm_re), .dm_addr(dm_addr), .dm_wdata(dm_wdata),
    .dm_rdata(dm_rdata), .start(start), .start_pc(start_pc), .end_pc(end_pc),
    .busy(busy), .done(done), .stats(stats));

  always @(posedge clk) cyc <= cyc + 1;
  always @(posedge clk) if (start) starts++;
  for (genvar c = 0; c < NC; c++) begin : g_rd
    assign dm_rdata[c] = fp_t'(32'hC0DE0000 + c);
  end
  assign stats = '{32'd11, 32'd22, 32'd33, 32'd44, 32'd55};

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string s);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", s); end
  endtask

  always @(negedge clk) if (rst_n) begin
    if (h_rvalid) begin
      if (q.size() == 0) chk(0, "unexpected rvalid");
      else begin
        rd_t r;
        r = q.pop_front();
        chk(cyc - r.t == 3, "read latency");
        chk(h_rdata === r.e, $sformatf("read data %h exp %h", h_rdata, r.e));
      end
    end
  end

  task automatic wr(logic [31:0] ad, fp_t d);
    @(negedge clk);
    h_req = 1; h_we = 1; h_addr = ad; h_wdata = d;
    #1;
    if (ad[31:28] == 4'd1) chk(im_we && im_waddr == ad[AW-1:0] && im_wdata == d[IW-1:0], "imem write");
    else chk(!im_we, "no imem write");
    if (ad[31:28] == 4'd2) chk(dm_we == (busy ? '0 : NC'(1) << ad[23:16]) && dm_re == '0 && dm_addr == ad[RAW-1:0], "dmem write select");
    else chk(dm_we == '0, "no dmem write");
    @(negedge clk);
    h_req = 0; h_we = 0;
  endtask

  task automatic rd(logic [31:0] ad, fp_t e);
    @(negedge clk);
    h_req = 1; h_we = 0; h_addr = ad;
    q.push_back('{cyc, e});
    #1;
    if (ad[31:28] == 4'd2) chk(dm_re == (busy ? '0 : NC'(1) << ad[23:16]) && dm_we == '0, "dmem read select");
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    wr(32'h1000_0005, fp_t'(32'h0723232a));
    wr(32'h2002_0011, fp_t'(123));
    wr(32'h0000_0001, fp_t'(12));
    wr(32'h0000_0002, fp_t'(345));
    chk(start_pc == AW'(12) && end_pc == (AW+1)'(345), "start/end registers");
    // back-to-back reads of every kind
    rd(32'h0000_0001, fp_t'(12));
    rd(32'h0000_0002, fp_t'(345));
    rd(32'h2003_0007, fp_t'(32'hC0DE0003));
    rd(32'h2000_0007, fp_t'(32'hC0DE0000));
    rd(32'h0000_0004, fp_t'(11));
    rd(32'h0000_0008, fp_t'(55));
    rd(32'h1000_0005, '0);
    @(negedge clk) h_req = 0;
    repeat (5) @(negedge clk);
    chk(starts == 0, "no start yet");
    wr(32'h0000_0000, fp_t'(1));
    @(negedge clk);
    chk(starts == 1, "start pulse");
    busy = 1;
    rd(32'h0000_0003, fp_t'(1));
    rd(32'h2001_0000, '0);                 // bank locked while busy
    @(negedge clk) h_req = 0;
    wr(32'h2001_0003, fp_t'(9));           // dropped while busy
    wr(32'h0000_0000, fp_t'(1));           // ignored while busy
    repeat (3) @(negedge clk);
    chk(starts == 1, "no start while busy");
    chk(!host_mode, "host_mode low while busy");
    busy = 0; done = 1;
    rd(32'h0000_0003, fp_t'(2));
    @(negedge clk) h_req = 0;
    repeat (5) @(negedge clk);
    chk(q.size() == 0, "all reads answered");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
