// nlpe_pkg: types and constants shared by the NLP engine (NLPE) blocks.
//
// It holds the precision modes of the SIMD multiply-accumulate unit, the
// activation-function selector of the FASST non-linear unit, the instruction
// format of the control unit and the floating-point format constants.  The
// precisions (INT4, FP4, FP8, BF16) follow the design; the numeric encodings of
// the enums and the instruction layout are choices of this implementation.
package nlpe_pkg;

  // Precision mode of the SIMD MAC (2-bit "mode" input).
  typedef enum logic [1:0] {
    MODE_INT4 = 2'd0,   // 6 lanes of 4-bit two's complement
    MODE_FP4  = 2'd1,   // 6 lanes of E2M1
    MODE_FP8  = 2'd2,   // 3 lanes of E4M3
    MODE_BF16 = 2'd3    // 1 lane of BF16 in bits [15:0]
  } mac_mode_e;

  // Activation-function selector of FASST (3-bit AF_sel).
  typedef enum logic [2:0] {
    AF_RELU    = 3'd0,
    AF_SIGMOID = 3'd1,
    AF_TANH    = 3'd2,
    AF_EXP     = 3'd3,
    AF_SMAX_ACC  = 3'd4,  // softmax pass 1: store e^x in C1..Cn, add to sum
    AF_SMAX_NORM = 3'd5,  // softmax pass 2: output C_i / sum
    AF_SWISH   = 3'd6,    // x * sigmoid(x)
    AF_GELU    = 3'd7     // x * sigmoid(1.702 x)
  } af_sel_e;

  // Precision selector of FASST (2-bit Prec_sel).
  typedef enum logic [1:0] {
    PREC_FP8  = 2'd0,   // two FP8 (E4M3) values in [15:8] and [7:0]
    PREC_BF16 = 2'd1    // one BF16 value
  } prec_sel_e;

  // Control that travels with the weight operand through the systolic array.
  typedef struct packed {
    logic valid;
    logic first;
    logic last;
  } npe_ctl_t;

  // Floating-point format constants.
  localparam int BF16_BIAS = 127;
  localparam int FP8_BIAS  = 7;     // E4M3
  localparam int FP4_BIAS  = 1;     // E2M1

  // Instruction set of the control unit (32-bit words).
  typedef enum logic [3:0] {
    OP_NOP     = 4'd0,
    OP_LOAD    = 4'd1,  // off-chip -> input memory buffer
    OP_REORDER = 4'd2,  // input buffer -> MME WT or IN banks
    OP_MATMUL  = 4'd3,  // run the systolic array, quantise into shared buffer
    OP_NAF     = 4'd4,  // shared buffer -> NMV -> NMV memory buffer
    OP_STORE   = 4'd5,  // NMV or shared buffer -> off-chip
    OP_BASE    = 4'd6   // set the off-chip base word address
  } opcode_e;

  // Instruction word: {op[31:28], f1[27:24], f2[23:16], a[15:8], b[7:0]}
  //   LOAD    : a = buffer address, b = word count, f2 = off-chip word address
  //   REORDER : f1[0] = 0 WT / 1 IN, a = buffer address, b = element count
  //   MATMUL  : f1[1:0] = mac mode, f1[2] = quantise, f1[3] = quantise as FP,
  //             b = inner length K, a[3:0] = integer quantise shift
  //   NAF     : f1[2:0] = AF_sel, f2[0] = Prec_sel, b = element count
  //   STORE   : f1[0] = 0 shared / 1 NMV buffer, a = buffer address,
  //             b = word count, f2 = off-chip word address
  //   BASE    : {f1, f2, a, b} = 28-bit off-chip base word address; LOAD and
  //             STORE use base + f2
  typedef struct packed {
    opcode_e     op;
    logic [3:0]  f1;
    logic [7:0]  f2;
    logic [7:0]  a;
    logic [7:0]  b;
  } instr_t;

endpackage
