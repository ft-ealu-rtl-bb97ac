// result_adapter -- undoes the operand encoding on the ALU result.
//
// Each execution version leaves its result in a different place of the
// WIDTH+1 bit ALU output; this block brings it back to the data's own bit
// positions (the paper's "shift back" and "swap again"):
//   V1       : res  = y[WIDTH-1:0]            (carry out dropped)
//   V2       : res  = y[WIDTH:1]              (shift right by one)
//   V3L, V3H : half = y[H:1]                  (half result shifted right)
//              carry = y[H+1]  for add/sub    (carry/borrow of the half)
// H = WIDTH/2.  The sequencer places the V3L half in the low and the V3H
// half in the high part of R_V3.  The half's carry is read from the ALU's
// own output bit, so a fault there is seen as the hardware would see it.
// Combinational.
module result_adapter
  import ftealu_pkg::*;
#(
  parameter int unsigned WIDTH = 16
) (
  input  step_e              step,
  input  alu_op_e            op,
  input  logic [WIDTH:0]     y,
  output logic [WIDTH-1:0]   res,
  output logic [WIDTH/2-1:0] half,
  output logic               carry
);

  localparam int unsigned H = WIDTH / 2;

  always_comb begin
    res   = (step == STEP_V2) ? y[WIDTH:1] : y[WIDTH-1:0];
    half  = y[H:1];
    carry = is_arith(op) && (step inside {STEP_V3L, STEP_V3H}) && y[H+1];
  end

endmodule
