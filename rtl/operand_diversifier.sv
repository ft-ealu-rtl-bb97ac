// operand_diversifier -- builds the ALU operands of each execution version.
//
// The FT-EALU hides a permanent ALU fault by running the operation on three
// encodings of the operands, so that the faulty ALU bit lands on a different
// data bit each time:
//   V1  : raw operands                  alu_a = {0, A}
//   V2  : operands shifted left by one  alu_a = {A, 0}
//   V3L : low halves shifted left       alu_a = {0.., A[H-1:0], c0}
//   V3H : high halves shifted left      alu_a = {0.., A[W-1:H], c0}
// with H = WIDTH/2.  The two halves of V3 run as separate half-width
// operations on the low H+1 ALU bits, low half first (the paper's swapped
// version computes each half separately and swaps the halves back).  For add
// and subtract the carry/borrow of the low half ('chain') must reach the high
// half.  In the shifted encoding the carry has weight two, so it enters both
// through operand bit 0 and through the ALU carry input:
//   add: A bit0 = c, cin = c  ->  (2a+c) + 2b + c = 2(a+b+c)
//   sub: B bit0 = c, cin = c  ->  2a - (2b+c) - c = 2(a-b-c)
// The three encodings are the paper's; the carry folding and the order of
// the halves are this design's own.  Combinational; WIDTH must be even.
module operand_diversifier
  import ftealu_pkg::*;
#(
  parameter int unsigned WIDTH = 16
) (
  input  step_e            step,
  input  alu_op_e          op,
  input  logic [WIDTH-1:0] a,
  input  logic [WIDTH-1:0] b,
  input  logic             chain,   // carry/borrow out of step V3L
  output logic [WIDTH:0]   alu_a,
  output logic [WIDTH:0]   alu_b,
  output logic             alu_cin
);

  localparam int unsigned H = WIDTH / 2;

  logic c;  // carry folded into the V3H step

  always_comb begin
    c       = 1'b0;
    alu_a   = '0;
    alu_b   = '0;
    alu_cin = 1'b0;
    unique case (step)
      STEP_V1: begin
        alu_a = {1'b0, a};
        alu_b = {1'b0, b};
      end
      STEP_V2: begin
        alu_a = {a, 1'b0};
        alu_b = {b, 1'b0};
      end
      STEP_V3L: begin
        alu_a[H:0] = {a[H-1:0], 1'b0};
        alu_b[H:0] = {b[H-1:0], 1'b0};
      end
      STEP_V3H: begin
        c          = chain & is_arith(op);
        alu_a[H:0] = {a[WIDTH-1:H], (op == OP_ADD) & c};
        alu_b[H:0] = {b[WIDTH-1:H], (op == OP_SUB) & c};
        alu_cin    = c;
      end
      default: ;
    endcase
  end

endmodule
