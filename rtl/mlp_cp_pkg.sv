// mlp_cp_pkg: shared constants and types of the bespoke MLP co-processor.
//
// The co-processor is reached through R-type instructions (opcode 0110011)
// whose bit 25 (the LSB of funct7) is set, i.e. funct7 = 0000001. The funct3
// field tells the two operations apart: 000 starts a new weighted sum
// (MLP_First), 001 continues the current one (MLP_Comp). Those encodings are
// the ones printed in the paper's assembly example. The default multiplier
// configuration is sixteen bespoke multipliers with 4-bit inputs, the main
// configuration of the paper; the constants themselves are produced per model
// by an offline solver, so the default set below (every non-zero value of
// [-8, 7] once, plus a second +1) is this design's own generic choice.
package mlp_cp_pkg;

  // RV32 word and the result register width
  localparam int unsigned XLEN = 32;

  // Instruction fields
  localparam logic [6:0] OPCODE_OP = 7'b0110011;  // R-type ALU opcode
  localparam int unsigned CP_BIT   = 25;          // funct7[0] flags a co-processor op

  typedef enum logic [2:0] {
    CP_FIRST = 3'b000,  // MLP_First: partial sum starts at 0
    CP_COMP  = 3'b001   // MLP_Comp : partial sum continues from cur_sum
  } cp_op_e;

  // Main configuration: 4-bit inputs, sixteen bespoke multipliers,
  // constants taken from the 4-bit weight range [-8, 7].
  localparam int unsigned DEF_L  = 4;
  localparam int unsigned DEF_K  = 16;
  localparam int unsigned DEF_CW = 4;

  typedef int coefs16_t [16];
  localparam coefs16_t DEF_COEFS = '{-8, -7, -6, -5, -4, -3, -2, -1,
                                      1,  2,  3,  4,  5,  6,  7,  1};

  // Second configuration of the paper: 5-bit inputs, twelve multipliers.
  localparam int unsigned SPD_L = 5;
  localparam int unsigned SPD_K = 12;
  typedef int coefs12_t [12];
  localparam coefs12_t SPD_COEFS = '{-8, -6, -4, -3, -2, -1,
                                      1,  2,  3,  4,  5,  7};

endpackage
