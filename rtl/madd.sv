// madd: pipelined modular adder / subtractor (a Short unit).
//
// sub = 0: y = a + b mod p; sub = 1: y = a - b mod p, operands < p.
// Stage 1 forms a+b and a-b with its borrow, stage 2 applies the single
// correction by p; a delay line pads the unit to SHORT_LAT cycles
// (default 8, the Short latency of the evaluated hardware model).
// Timing: y/out_valid exactly SHORT_LAT cycles after in_valid; one operation
// per cycle. That SUB shares this unit with ADD is this design's choice.
module madd
  import finesse_pkg::*;
#(
  parameter int SHORT_LAT = 8
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  input  logic sub,
  input  fp_t  a,
  input  fp_t  b,
  output logic out_valid,
  output fp_t  y
);
  logic [DW:0] sum_q, dif_q;
  logic        sub_q;
  fp_t         y_core;

  always_ff @(posedge clk) begin
    sum_q  <= {1'b0, a} + {1'b0, b};
    dif_q  <= {1'b0, a} - {1'b0, b};
    sub_q  <= sub;
    if (sub_q)
      y_core <= dif_q[DW] ? DW'(dif_q + {1'b0, P_MOD}) : dif_q[DW-1:0];
    else
      y_core <= (sum_q >= {1'b0, P_MOD}) ? DW'(sum_q - {1'b0, P_MOD}) : sum_q[DW-1:0];
  end

  pipe_delay #(.W(DW), .N(SHORT_LAT - 2)) u_dly (.clk(clk), .d(y_core), .q(y));

  logic [SHORT_LAT-1:0] vld;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) vld <= '0;
    else        vld <= {vld[SHORT_LAT-2:0], in_valid};
  end
  assign out_valid = vld[SHORT_LAT-1];
endmodule
