// finesse_pkg: types and constants shared by the whole accelerator.
//
// Holds the Fp-level instruction format, the opcode map, the pipeline
// latencies of the hardware model and the curve constants of BN254N
// (the "params." block of each core). Values live in Montgomery form
// with R = 2^DW inside the cores.
//
// Instruction word (32 bits): [31:24] opcode, [23:16] dst, [15:8] src1,
// [7:0] src2. Field layout and the codes DBL=02, ADD=04, SQR=06, MUL=07 and
// INV=0a are read off assembled program words of the original framework;
// the remaining codes follow the order in which the ISA lists its
// operations and are this design's choice.
//
// BN254N: u = -(2^62 + 2^55 + 1), p = 36u^4 + 36u^3 + 24u^2 + 6u + 1
// (254 bits). P_INV = -p^-1 mod 2^256, R2 = 2^512 mod p.
package finesse_pkg;

  localparam int DW       = 256;          // datapath width, R = 2^DW
  localparam int RAW      = 8;            // register address width
  localparam int NREG     = 1 << RAW;     // registers per core
  localparam int IW       = 32;           // instruction width
  localparam int RD_LAT   = 3;            // register-bank read latency

  typedef logic [DW-1:0] fp_t;

  typedef enum logic [7:0] {
    OP_NOP = 8'h00,
    OP_NEG = 8'h01,
    OP_DBL = 8'h02,
    OP_TPL = 8'h03,
    OP_ADD = 8'h04,
    OP_SUB = 8'h05,
    OP_SQR = 8'h06,
    OP_MUL = 8'h07,
    OP_CVT = 8'h08,
    OP_ICV = 8'h09,
    OP_INV = 8'h0a
  } opcode_e;

  typedef struct packed {
    logic [7:0]     op;
    logic [RAW-1:0] dst;
    logic [RAW-1:0] src1;
    logic [RAW-1:0] src2;
  } instr_t;

  // Functional-unit class of an opcode.
  typedef enum logic [2:0] {
    U_NONE = 3'd0,
    U_MMUL = 3'd1,   // Long
    U_MADD = 3'd2,   // Short
    U_MLIN = 3'd3,   // Short
    U_MINV = 3'd4    // iterative
  } unit_e;

  // mlin sub-operations
  typedef enum logic [1:0] {
    LIN_NEG = 2'd0,
    LIN_DBL = 2'd1,
    LIN_TPL = 2'd2
  } lin_op_e;

  localparam fp_t P_MOD =
    256'h2523648240000001ba344d80000000086121000000000013a700000000000013;
  localparam fp_t P_INV =
    256'hb65373ccba60808c92022379c45b843c6e371ba81104f6c808435e50d79435e5;
  localparam fp_t R2_MOD =
    256'h1b0a32fdf6403a3d281e3a1b7f86954f55efbf6e8c1cc3f1b3e886745370473d;

  function automatic unit_e unit_of(logic [7:0] op);
    case (op)
      OP_NEG, OP_DBL, OP_TPL:         return U_MLIN;
      OP_ADD, OP_SUB:                 return U_MADD;
      OP_SQR, OP_MUL, OP_CVT, OP_ICV: return U_MMUL;
      OP_INV:                         return U_MINV;
      default:                        return U_NONE;
    endcase
  endfunction

  // Which source fields an opcode reads.
  function automatic logic uses_src2(logic [7:0] op);
    return (op == OP_ADD) || (op == OP_SUB) || (op == OP_MUL);
  endfunction

  function automatic logic uses_src1(logic [7:0] op);
    return unit_of(op) != U_NONE;
  endfunction

endpackage
