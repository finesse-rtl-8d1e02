// alu: the Fp arithmetic of one core.
//
// Holds one Long unit (mmul) and the Short units (madd, mlin), all fully
// pipelined, plus the iterative minv. A decoded operation with both
// operands arrives on in_valid; the opcode selects the unit, and the
// destination register travels beside the data in a delay line matching
// that unit's latency. Results leave on one write-back port.
//
// Operation map: MUL, SQR, CVT, ICV -> mmul (operand b already chosen by
// dfetch); ADD, SUB -> madd; NEG, DBL, TPL -> mlin; INV -> minv.
// Timing: the result of an operation accepted in cycle c appears on
// wb_valid in cycle c + LONG_LAT (mmul), c + SHORT_LAT (madd, mlin) or
// c + INV_LAT (minv). The issue logic never lets two results fall in the
// same cycle and never starts an INV while minv is busy; both rules are
// asserted here.
//
// Lint note: rst_n is the asynchronous reset and also the disable condition
// of the assertions below, which a linter reports as a signal used both
// synchronously and asynchronously; no logic reads it synchronously.
module alu
  import finesse_pkg::*;
#(
  parameter int LONG_LAT  = 38,
  parameter int SHORT_LAT = 8
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           in_valid,
  input  logic [7:0]     op,
  input  logic [RAW-1:0] dst,
  input  fp_t            a,
  input  fp_t            b,
  output logic           wb_valid,
  output logic [RAW-1:0] wb_dst,
  output fp_t            wb_data,
  output logic           inv_busy
);
  unit_e u;
  assign u = unit_of(op);

  logic    mm_v, ad_v, ln_v, iv_v;
  assign mm_v = in_valid && (u == U_MMUL);
  assign ad_v = in_valid && (u == U_MADD);
  assign ln_v = in_valid && (u == U_MLIN);
  assign iv_v = in_valid && (u == U_MINV);

  lin_op_e lop;
  always_comb begin
    unique case (op)
      OP_NEG:  lop = LIN_NEG;
      OP_TPL:  lop = LIN_TPL;
      default: lop = LIN_DBL;
    endcase
  end

  logic mm_ov, ad_ov, ln_ov, iv_ov;
  fp_t  mm_y, ad_y, ln_y, iv_y;

  mmul #(.LONG_LAT(LONG_LAT)) u_mmul (
    .clk(clk), .rst_n(rst_n), .in_valid(mm_v), .a(a), .b(b), .out_valid(mm_ov), .y(mm_y));
  madd #(.SHORT_LAT(SHORT_LAT)) u_madd (
    .clk(clk), .rst_n(rst_n), .in_valid(ad_v), .sub(op == OP_SUB), .a(a), .b(b),
    .out_valid(ad_ov), .y(ad_y));
  mlin #(.SHORT_LAT(SHORT_LAT)) u_mlin (
    .clk(clk), .rst_n(rst_n), .in_valid(ln_v), .op(lop), .a(a), .out_valid(ln_ov), .y(ln_y));
  minv u_minv (
    .clk(clk), .rst_n(rst_n), .in_valid(iv_v), .a(a), .busy(inv_busy), .out_valid(iv_ov), .y(iv_y));

  // destination tags
  logic [RAW-1:0] mm_d, ad_d, ln_d;
  logic [RAW-1:0] iv_d;
  pipe_delay #(.W(RAW), .N(LONG_LAT))  u_mm_tag (.clk(clk), .d(dst), .q(mm_d));
  pipe_delay #(.W(RAW), .N(SHORT_LAT)) u_ad_tag (.clk(clk), .d(dst), .q(ad_d));
  pipe_delay #(.W(RAW), .N(SHORT_LAT)) u_ln_tag (.clk(clk), .d(dst), .q(ln_d));
  always_ff @(posedge clk) begin
    if (iv_v && !inv_busy) iv_d <= dst;
  end

  always_comb begin
    wb_valid = mm_ov | ad_ov | ln_ov | iv_ov;
    wb_dst   = ({RAW{mm_ov}} & mm_d) | ({RAW{ad_ov}} & ad_d) |
               ({RAW{ln_ov}} & ln_d) | ({RAW{iv_ov}} & iv_d);
    wb_data  = ({DW{mm_ov}} & mm_y) | ({DW{ad_ov}} & ad_y) |
               ({DW{ln_ov}} & ln_y) | ({DW{iv_ov}} & iv_y);
  end

  a_one_wb: assert property (@(posedge clk) disable iff (!rst_n)
    $onehot0({mm_ov, ad_ov, ln_ov, iv_ov}))
    else $error("alu: two results in one cycle");
  a_inv_free: assert property (@(posedge clk) disable iff (!rst_n)
    iv_v |-> !inv_busy)
    else $error("alu: INV issued while minv busy");
endmodule
