// ftealu_pkg -- types and constants shared by the FT-EALU modules.
//
// The FT-EALU runs every ALU operation three times on one shared ALU, each
// time on a differently encoded copy of the operands (raw, shifted left, and
// halved-shifted-swapped), and votes bit by bit with per-bit weights.
// This package holds the operation encoding, the step encoding of the
// sequencer, the number of execution versions and the fixed-point formats of
// weights and learning scores.  The operation set (and, or, xor, not, add,
// subtract) is the paper's; the encodings and number formats are this
// design's own choices.
package ftealu_pkg;

  // Number of execution versions that are voted on.
  localparam int unsigned NVER = 3;

  // ALU operations.
  typedef enum logic [2:0] {
    OP_AND = 3'd0,
    OP_OR  = 3'd1,
    OP_XOR = 3'd2,
    OP_NOT = 3'd3,   // ~A, B ignored
    OP_ADD = 3'd4,   // A + B + cin
    OP_SUB = 3'd5    // A - B - cin
  } alu_op_e;

  // Steps of one fault-tolerant operation on the shared ALU.
  //   V1  : raw operands
  //   V2  : operands shifted left by one
  //   V3L : low operand halves, each shifted left by one
  //   V3H : high operand halves, each shifted left by one, low-half carry in
  typedef enum logic [1:0] {
    STEP_V1  = 2'd0,
    STEP_V2  = 2'd1,
    STEP_V3L = 2'd2,
    STEP_V3H = 2'd3
  } step_e;

  // Bus of the shared ALU that a stored fault scenario acts on.
  typedef enum logic [1:0] {
    SITE_A = 2'd0,   // operand A input
    SITE_B = 2'd1,   // operand B input
    SITE_Y = 2'd2    // result output
  } fault_site_e;

  // Weights: unsigned fixed point, WFRAC fraction bits (1.0 = 2**WFRAC).
  localparam int unsigned WW_DEF    = 8;
  localparam int unsigned WFRAC_DEF = 4;

  // Learning scores are integers in units of 1/6, so that the shares
  // +-1/3, +-1/2 and +-1 of the reward/punishment rule are exact.
  localparam int unsigned SW_DEF = 24;
  localparam int SCORE_THIRD = 2;  // 1/3
  localparam int SCORE_HALF  = 3;  // 1/2
  localparam int SCORE_ONE   = 6;  // 1

  function automatic bit is_arith(alu_op_e op);
    return (op == OP_ADD) || (op == OP_SUB);
  endfunction

endpackage
