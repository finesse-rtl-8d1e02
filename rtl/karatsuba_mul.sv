// karatsuba_mul: pipelined N x N multiplier, Karatsuba applied LEVELS times.
//
// Each level splits a = a1*2^LO + a0 (LO = ceil(N/2)) and likewise b, and
// forms z0 = a0*b0, z2 = a1*b1 and z1 = (a0+a1)*(b0+b1) - z0 - z2 with three
// sub-multipliers of width LO+1, which are instances of this module one
// level down. Level 0 is a wallace_mul. With N = 256, W = 16 and three
// levels the widths run 256 -> 129 -> 66 -> 34: 27 Wallace multipliers of
// 3 x 3 limbs, 243 base-unit products where a schoolbook product of 16-bit
// limbs would need 256.
//
// Pipeline per level: "pre" (1 stage: operand sums), the sub-multiplier,
// "acc" (2 stages: middle-term subtraction, then shifted recombination).
// Latency LAT = 2 + 3*LEVELS cycles (11 for three levels), fully pipelined.
// The level structure and stage names follow the hierarchical multiplier of
// the original design; the stage counts are the largest printed for each
// stage and the split widths are this design's choice.
//
// Lint note: the module instantiates itself one level down. When it is
// linted as a top of its own, the linter reports the sub-products z0, z2
// and z1f as undriven; they are driven by the three sub-multiplier outputs,
// which the exhaustive product checks in simulation confirm.
module karatsuba_mul #(
  parameter int N      = 256,
  parameter int LEVELS = 3,
  parameter int W      = 16
) (
  input  logic           clk,
  input  logic [N-1:0]   a,
  input  logic [N-1:0]   b,
  output logic [2*N-1:0] p
);
  if (LEVELS == 0) begin : g_base
    wallace_mul #(.N(N), .W(W)) u_wal (.clk(clk), .a(a), .b(b), .p(p));
  end else begin : g_kara
    localparam int LO = (N + 1) / 2;
    localparam int HI = N - LO;
    localparam int NS = LO + 1;

    // pre
    logic [NS-1:0] a0_q, a1_q, b0_q, b1_q, sa_q, sb_q;
    always_ff @(posedge clk) begin
      a0_q <= NS'(a[LO-1:0]);
      b0_q <= NS'(b[LO-1:0]);
      a1_q <= NS'(a[N-1:LO]);
      b1_q <= NS'(b[N-1:LO]);
      sa_q <= NS'(a[LO-1:0]) + NS'(a[N-1:LO]);
      sb_q <= NS'(b[LO-1:0]) + NS'(b[N-1:LO]);
    end

    // mul
    logic [2*NS-1:0] z0, z2, z1f;
    karatsuba_mul #(.N(NS), .LEVELS(LEVELS-1), .W(W)) u_z0 (.clk(clk), .a(a0_q), .b(b0_q), .p(z0));
    karatsuba_mul #(.N(NS), .LEVELS(LEVELS-1), .W(W)) u_z2 (.clk(clk), .a(a1_q), .b(b1_q), .p(z2));
    karatsuba_mul #(.N(NS), .LEVELS(LEVELS-1), .W(W)) u_z1 (.clk(clk), .a(sa_q), .b(sb_q), .p(z1f));

    // acc
    logic [2*NS-1:0] z0_q, z2_q, mid_q;
    logic [2*N-1:0]  p_q;
    always_ff @(posedge clk) begin
      z0_q  <= z0;
      z2_q  <= z2;
      mid_q <= z1f - z0 - z2;
      p_q   <= (2*N)'(z0_q) + ((2*N)'(mid_q) << LO) + ((2*N)'(z2_q) << (2*LO));
    end
    assign p = p_q;

    if (HI > LO) begin : g_bad
      $error("karatsuba_mul: split assumes HI <= LO");
    end
  end
endmodule
