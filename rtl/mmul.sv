// mmul: fully pipelined Montgomery modular multiplier (the Long unit).
//
// Computes y = a*b*R^-1 mod p with R = 2^DW for a, b < p in Montgomery form:
//   T = a*b                      (karatsuba_mul, 11 cycles)
//   m = (T mod R) * P_INV mod R  (karatsuba_mul, 11 cycles)
//   U = m*p                      (karatsuba_mul, 11 cycles)
//   t = (T + U) / R, y = t - p if t >= p  ("add", 2 cycles)
// after one input register. The chain of three multipliers and one adder is
// the structure of the original unit; the Montgomery equations are the
// textbook ones. Because 4p < R one conditional subtraction suffices.
//
// Timing: y/out_valid appear exactly LONG_LAT cycles after a/b/in_valid
// (default 38, the Long latency of the evaluated hardware model). The datapath
// above takes 36 cycles; the remaining LONG_LAT-36 cycles are an output
// delay line, a placement this design chose. A new operation every cycle.
//
// Lint notes: only the low DW bits of the second product (m mod R) and the
// high bits of the final sum ((T+U)/R) are used, so the remaining product
// bits are left unread on purpose; synthesis removes their logic.
module mmul
  import finesse_pkg::*;
#(
  parameter int LONG_LAT = 38,
  parameter int LEVELS   = 3,
  parameter int W        = 16
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   in_valid,
  input  fp_t    a,
  input  fp_t    b,
  output logic   out_valid,
  output fp_t    y
);
  localparam int KLAT = 2 + 3 * LEVELS;
  localparam int CORE_LAT = 1 + 3 * KLAT + 2;
  localparam int PAD = LONG_LAT - CORE_LAT;

  if (PAD < 0) begin : g_bad
    $error("mmul: LONG_LAT shorter than the datapath");
  end

  fp_t a_q, b_q;
  always_ff @(posedge clk) begin
    a_q <= a;
    b_q <= b;
  end

  logic [2*DW-1:0] t_full, m_full, u_full, t_dly;
  karatsuba_mul #(.N(DW), .LEVELS(LEVELS), .W(W)) u_mul1 (.clk(clk), .a(a_q), .b(b_q), .p(t_full));
  karatsuba_mul #(.N(DW), .LEVELS(LEVELS), .W(W)) u_mul2 (.clk(clk), .a(t_full[DW-1:0]), .b(P_INV), .p(m_full));
  karatsuba_mul #(.N(DW), .LEVELS(LEVELS), .W(W)) u_mul3 (.clk(clk), .a(m_full[DW-1:0]), .b(P_MOD), .p(u_full));

  // T waits for m*p
  pipe_delay #(.W(2*DW), .N(2*KLAT)) u_tdly (.clk(clk), .d(t_full), .q(t_dly));

  logic [DW:0] t_sum_q;
  fp_t         y_core;
  always_ff @(posedge clk) begin
    logic [2*DW:0] s;
    s       = {1'b0, t_dly} + {1'b0, u_full};
    t_sum_q <= s[2*DW:DW];
    y_core  <= (t_sum_q >= {1'b0, P_MOD}) ? DW'(t_sum_q - {1'b0, P_MOD}) : t_sum_q[DW-1:0];
  end

  pipe_delay #(.W(DW), .N(PAD)) u_ydly (.clk(clk), .d(y_core), .q(y));

  logic [LONG_LAT-1:0] vld;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) vld <= '0;
    else        vld <= {vld[LONG_LAT-2:0], in_valid};
  end
  assign out_valid = vld[LONG_LAT-1];
endmodule
