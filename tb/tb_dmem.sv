// tb_dmem: the 2-read/1-write register bank. The host loads all 256
// registers, then in core mode both read ports and the write port run at
// once every cycle; both ports' data are checked 3 cycles after the
// request against a model. Host writes while in core mode must be ignored.
module tb_dmem;
  import finesse_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic ra_re = 0, rb_re = 0, we = 0, host_mode = 1, h_we = 0, h_re = 0;
  logic [RAW-1:0] ra_addr, rb_addr, waddr, h_addr;
  fp_t ra_data, rb_data, wdata, h_wdata;
  fp_t model [NREG];
  int checks = 0, failures = 0;
  int cyc = 0;
  typedef struct { int t; fp_t ea; fp_t eb; logic ca; logic cb; } rd_t;
  rd_t q [$];

  dmem dut (.clk(clk), .ra_re(ra_re), .ra_addr(ra_addr), .rb_re(rb_re), .rb_addr(rb_addr),
            .ra_data(ra_data), .rb_data(rb_data), .we(we), .waddr(waddr), .wdata(wdata),
            .host_mode(host_mode), .h_we(h_we), .h_re(h_re), .h_addr(h_addr), .h_wdata(h_wdata));

  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) begin
    if (q.size() != 0 && cyc - q[0].t == RD_LAT) begin
      rd_t r;
      r = q.pop_front();
      if (r.ca) begin checks++; if (ra_data !== r.ea) begin failures++; if (failures < 5) $display("FAIL port A"); end end
      if (r.cb) begin checks++; if (rb_data !== r.eb) begin failures++; if (failures < 5) $display("FAIL port B"); end end
    end
  end

  initial begin
    for (int i = 0; i < NREG; i++) begin
      @(negedge clk);
      h_we = 1; h_addr = RAW'(i); h_wdata = rand_fp();
      model[i] = h_wdata;
    end
    @(negedge clk) h_we = 0;
    // host read-back through port A
    for (int i = 0; i < 16; i++) begin
      @(negedge clk);
      h_re = 1; h_addr = RAW'(i * 13);
      q.push_back('{cyc, model[i*13], '0, 1'b1, 1'b0});
    end
    @(negedge clk) h_re = 0;
    repeat (4) @(negedge clk);
    host_mode = 0;
    for (int i = 0; i < 1500; i++) begin
      @(negedge clk);
      ra_re = ($urandom % 4 != 0); rb_re = ($urandom % 4 != 0); we = ($urandom % 2 == 0);
      ra_addr = RAW'($urandom); rb_addr = RAW'($urandom);
      waddr = (i % 8 == 0) ? ra_addr : RAW'($urandom);
      wdata = rand_fp();
      h_we = (i % 16 == 5); h_addr = RAW'($urandom); h_wdata = rand_fp();
      q.push_back('{cyc, model[ra_addr], model[rb_addr], ra_re, rb_re});
      if (we) model[waddr] = wdata;
    end
    @(negedge clk) begin ra_re = 0; rb_re = 0; we = 0; h_we = 0; end
    repeat (6) @(negedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
