// dfetch: operand fetch and result return of one core.
//
// In the cycle an instruction is issued, dfetch sends its two source
// register numbers to the register bank and starts the decoded operation
// down a RD_LAT-stage shift register, so that operation, destination and
// both operands meet at the ALU RD_LAT (3) cycles later. On the way it
// picks operand b: the second source for ADD/SUB/MUL, the first source
// again for SQR, the constant R^2 mod p for CVT (into Montgomery form)
// and 1 for ICV (out of it). NOPs are dropped. Results from the ALU go
// back to the bank's write port unchanged.
// The constants come from the curve parameters; the operand choices for
// SQR/CVT/ICV are this design's reading of the ISA.
//
// Note on structure: the write-back path (we/waddr/wdata) and operand a are
// wired straight from the ALU result and bank port A; this block only adds
// the pipeline alignment, operand-b selection and NOP removal around them.
module dfetch
  import finesse_pkg::*;
(
  input  logic           clk,
  input  logic           rst_n,
  // issued instruction (broadcast)
  input  logic           iss_valid,
  input  instr_t         iss_instr,
  // register bank read side
  output logic           ra_re,
  output logic [RAW-1:0] ra_addr,
  output logic           rb_re,
  output logic [RAW-1:0] rb_addr,
  input  fp_t            ra_data,
  input  fp_t            rb_data,
  // ALU side
  output logic           alu_valid,
  output logic [7:0]     alu_op,
  output logic [RAW-1:0] alu_dst,
  output fp_t            alu_a,
  output fp_t            alu_b,
  input  logic           wb_valid,
  input  logic [RAW-1:0] wb_dst,
  input  fp_t            wb_data,
  // register bank write side
  output logic           we,
  output logic [RAW-1:0] waddr,
  output fp_t            wdata
);
  logic live;
  assign live    = iss_valid && (unit_of(iss_instr.op) != U_NONE);
  assign ra_re   = live;
  assign ra_addr = iss_instr.src1;
  assign rb_re   = live && uses_src2(iss_instr.op);
  assign rb_addr = iss_instr.src2;

  typedef enum logic [1:0] {B_SRC2, B_SRC1, B_R2, B_ONE} bsel_e;

  typedef struct packed {
    logic           v;
    logic [7:0]     op;
    logic [RAW-1:0] dst;
    bsel_e          bsel;
  } slot_t;

  slot_t s_in;
  slot_t pipe [RD_LAT];

  always_comb begin
    s_in.v   = live;
    s_in.op  = iss_instr.op;
    s_in.dst = iss_instr.dst;
    unique case (iss_instr.op)
      OP_SQR:  s_in.bsel = B_SRC1;
      OP_CVT:  s_in.bsel = B_R2;
      OP_ICV:  s_in.bsel = B_ONE;
      default: s_in.bsel = B_SRC2;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < RD_LAT; i++) pipe[i] <= '0;
    end else begin
      pipe[0] <= s_in;
      for (int i = 1; i < RD_LAT; i++) pipe[i] <= pipe[i-1];
    end
  end

  slot_t s_out;
  assign s_out = pipe[RD_LAT-1];

  // The bank holds the last word read, so port A still carries the first
  // source of an operation that did not read port B.
  assign alu_valid = s_out.v;
  assign alu_op    = s_out.op;
  assign alu_dst   = s_out.dst;
  assign alu_a     = ra_data;
  always_comb begin
    unique case (s_out.bsel)
      B_SRC1:  alu_b = ra_data;
      B_R2:    alu_b = R2_MOD;
      B_ONE:   alu_b = fp_t'(1);
      default: alu_b = rb_data;
    endcase
  end

  assign we    = wb_valid;
  assign waddr = wb_dst;
  assign wdata = wb_data;
endmodule
