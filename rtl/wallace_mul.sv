// wallace_mul: N x N multiplier from W x W base units and a Wallace tree.
//
// The operands are cut into L = ceil(N/W) limbs. The L*L limb products come
// from base_unit instances; each is placed at its weight (i+j)*W in a row of
// the partial-product matrix. Rows are reduced in parallel groups of three by
// 3:2 carry-save adders, level by level, until two rows remain (a Wallace
// tree). Those two rows are registered, then added by one carry-propagate
// adder and registered again.
//
// Timing: p is valid 2 cycles after a and b (stage 1 = tree, stage 2 = final
// add), which is this design's reading of the "acc (0~1)" stage printed under
// the Wallace block. Fully pipelined, a new pair every cycle.
// The paper gives the idea (2W..5W multipliers from base units with a
// Wallace tree); the limb split and the stage placement are choices here.
//
// Lint notes: the partial-product rows live in one array indexed by tree
// level; a linter that treats the array as one signal sees a false
// combinational loop between levels (each level reads only the one before).
// The final sum is kept at the width the carry-save rows need, which can be
// wider than 2N bits; the top bits are always zero and are not read.
module wallace_mul #(
  parameter int N = 34,
  parameter int W = 16
) (
  input  logic           clk,
  input  logic [N-1:0]   a,
  input  logic [N-1:0]   b,
  output logic [2*N-1:0] p
);
  localparam int L   = (N + W - 1) / W;
  localparam int PW  = 2 * L * W;          // partial-product row width
  localparam int NPP = L * L;
  localparam int NR  = (NPP < 2) ? 2 : NPP;

  function automatic int rows_at(int lv);
    int n = NPP;
    for (int i = 0; i < lv; i++) n = 2 * (n / 3) + (n % 3);
    return n;
  endfunction

  function automatic int num_levels();
    int n = NPP;
    int c = 0;
    while (n > 2) begin
      n = 2 * (n / 3) + (n % 3);
      c++;
    end
    return c;
  endfunction

  localparam int NLEV = num_levels();

  logic [L*W-1:0] ax, bx;
  assign ax = {{(L*W-N){1'b0}}, a};
  assign bx = {{(L*W-N){1'b0}}, b};

  logic [PW-1:0] rows [NLEV+1][NR];

  // Partial products
  for (genvar i = 0; i < L; i++) begin : g_i
    for (genvar j = 0; j < L; j++) begin : g_j
      logic [2*W-1:0] pp;
      base_unit #(.W(W)) u_bu (.a(ax[i*W +: W]), .b(bx[j*W +: W]), .p(pp));
      assign rows[0][i*L+j] = PW'(pp) << ((i + j) * W);
    end
  end
  for (genvar k = NPP; k < NR; k++) begin : g_pad0
    assign rows[0][k] = '0;
  end

  // Wallace reduction levels
  for (genvar lv = 0; lv < NLEV; lv++) begin : g_lv
    localparam int NIN  = rows_at(lv);
    localparam int NG   = NIN / 3;
    localparam int NOUT = 2 * NG + NIN % 3;
    for (genvar g = 0; g < NG; g++) begin : g_csa
      logic [PW-1:0] x, y, z;
      assign x = rows[lv][3*g];
      assign y = rows[lv][3*g+1];
      assign z = rows[lv][3*g+2];
      assign rows[lv+1][2*g]   = x ^ y ^ z;
      assign rows[lv+1][2*g+1] = ((x & y) | (x & z) | (y & z)) << 1;
    end
    for (genvar r = 0; r < NIN % 3; r++) begin : g_pass
      assign rows[lv+1][2*NG+r] = rows[lv][3*NG+r];
    end
    for (genvar k = NOUT; k < NR; k++) begin : g_pad
      assign rows[lv+1][k] = '0;
    end
  end

  logic [PW-1:0] s_q, c_q;
  logic [PW-1:0] sum_q;
  always_ff @(posedge clk) begin
    s_q   <= rows[NLEV][0];
    c_q   <= rows[NLEV][1];
    sum_q <= s_q + c_q;
  end
  assign p = sum_q[2*N-1:0];
endmodule
