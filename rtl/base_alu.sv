// base_alu -- the single shared ALU of the FT-EALU.
//
// All execution versions of an operation run on this one unit, one after
// another, so a permanent defect in it touches every version, but at a
// different bit of the data in each.  It implements and, or, xor, not, add
// and subtract (the operation set the paper evaluates) on WIDTH+1 bits: one
// bit more than the data, so the operands shifted left by one still fit.
// Add computes a + b + cin and subtract a - b - cin; the carry/borrow input
// is used to chain the two half-width operations of the third version.  The
// result is taken modulo 2**(WIDTH+1).  Purely combinational.
module base_alu
  import ftealu_pkg::*;
#(
  parameter int unsigned WIDTH = 16
) (
  input  alu_op_e          op,
  input  logic [WIDTH:0]   a,
  input  logic [WIDTH:0]   b,
  input  logic             cin,
  output logic [WIDTH:0]   y
);

  always_comb begin
    unique case (op)
      OP_AND:  y = a & b;
      OP_OR:   y = a | b;
      OP_XOR:  y = a ^ b;
      OP_NOT:  y = ~a;
      OP_ADD:  y = a + b + {{WIDTH{1'b0}}, cin};
      OP_SUB:  y = a - b - {{WIDTH{1'b0}}, cin};
      default: y = '0;
    endcase
  end

endmodule
