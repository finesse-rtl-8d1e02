// mlin: pipelined unary linear unit (a Short unit): NEG, DBL, TPL mod p.
//
// op = LIN_NEG: y = -a mod p; LIN_DBL: y = 2a mod p; LIN_TPL: y = 3a mod p,
// for a < p. Stage 1 forms p-a, 2a or 3a; stage 2 subtracts p up to twice;
// a delay line pads to SHORT_LAT cycles (default 8).
// Timing: y/out_valid exactly SHORT_LAT cycles after in_valid, one per cycle.
// Doubling lives here as in the original ALU; placing NEG and TPL here too is
// this design's choice.
module mlin
  import finesse_pkg::*;
#(
  parameter int SHORT_LAT = 8
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    in_valid,
  input  lin_op_e op,
  input  fp_t     a,
  output logic    out_valid,
  output fp_t     y
);
  logic [DW+1:0] t_q;
  fp_t           y_core;
  localparam logic [DW+1:0] P2 = {2'b0, P_MOD};

  always_ff @(posedge clk) begin
    unique case (op)
      LIN_NEG: t_q <= (a == '0) ? '0 : P2 - {2'b0, a};
      LIN_DBL: t_q <= {1'b0, a, 1'b0};
      LIN_TPL: t_q <= {1'b0, a, 1'b0} + {2'b0, a};
      default: t_q <= '0;
    endcase
    if (t_q >= (P2 << 1))  y_core <= DW'(t_q - (P2 << 1));
    else if (t_q >= P2)    y_core <= DW'(t_q - P2);
    else                   y_core <= t_q[DW-1:0];
  end

  pipe_delay #(.W(DW), .N(SHORT_LAT - 2)) u_dly (.clk(clk), .d(y_core), .q(y));

  logic [SHORT_LAT-1:0] vld;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) vld <= '0;
    else        vld <= {vld[SHORT_LAT-2:0], in_valid};
  end
  assign out_valid = vld[SHORT_LAT-1];
endmodule
