// minv: iterative modular inverter for Montgomery-form values.
//
// Input x = a*R mod p, output y = a^-1*R mod p (R = 2^DW); x = 0 gives 0.
// Phase 1 is Kaliski's binary Montgomery inverse: with u = p, v = x,
// r = 0, s = 1 it halves u or v each step, tracking r and s, until v = 0
// after k steps, leaving r with -r = x^-1 * 2^k mod p. In the remaining
// 2*DW - k steps r is doubled mod p, so after exactly 2*DW steps
// -r = x^-1 * 2^(2*DW) = a^-1*R. One final cycle negates r.
// The step count never depends on the data, so the latency is fixed.
//
// Timing: in_valid in cycle c -> out_valid/y in cycle c + INV_LAT, with
// INV_LAT = 2*DW + 2 (514). Not pipelined: in_valid is taken only while
// busy is low. The paper states only that this unit is iterative; the
// algorithm is this design's choice.
module minv
  import finesse_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  input  fp_t  a,
  output logic busy,
  output logic out_valid,
  output fp_t  y
);
  localparam int CW = $clog2(2 * DW + 1);
  localparam logic [DW+1:0] P2 = {2'b0, P_MOD};

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_FIN} state_e;
  state_e          state;
  fp_t             u, v;
  logic [DW+1:0]   r, s;
  logic [CW-1:0]   cnt;

  function automatic logic [DW+1:0] red(logic [DW+1:0] x);
    return (x >= P2) ? x - P2 : x;
  endfunction

  logic [DW+1:0] r_red;
  assign r_red = red(r);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      out_valid <= 1'b0;
      u <= '0; v <= '0; r <= '0; s <= '0; cnt <= '0;
      y <= '0;
    end else begin
      out_valid <= 1'b0;
      unique case (state)
        S_IDLE: if (in_valid) begin
          u     <= P_MOD;
          v     <= a;
          r     <= '0;
          s     <= (DW+2)'(1);
          cnt   <= '0;
          state <= S_RUN;
        end
        S_RUN: begin
          if (v != '0) begin
            if (!u[0]) begin
              u <= u >> 1;
              s <= s << 1;
            end else if (!v[0]) begin
              v <= v >> 1;
              r <= r << 1;
            end else if (u > v) begin
              u <= (u - v) >> 1;
              r <= r + s;
              s <= s << 1;
            end else begin
              v <= (v - u) >> 1;
              s <= s + r;
              r <= r << 1;
            end
          end else begin
            r <= red(r_red << 1);
          end
          cnt <= cnt + 1'b1;
          if (cnt == CW'(2 * DW - 1)) state <= S_FIN;
        end
        S_FIN: begin
          y         <= (r_red == '0) ? '0 : DW'(P2 - r_red);
          out_valid <= 1'b1;
          state     <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);
endmodule
