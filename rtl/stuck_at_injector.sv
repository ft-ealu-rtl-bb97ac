// stuck_at_injector -- permanent stuck-at fault model for one bus.
//
// Forces the bits selected by sa0 to 0 and those selected by sa1 to 1
// (stuck-at-1 wins if both are set).  The FT-EALU places one instance on
// each ALU operand bus and one on the ALU result bus, so that a fault sits
// at a fixed physical bit of the shared ALU and hits every execution version
// there, as in the paper's worked example.  In a product the masks are tied
// to zero; they exist to apply the single and double stuck-at faults the
// paper studies.  Combinational.
module stuck_at_injector #(
  parameter int unsigned W = 17
) (
  input  logic [W-1:0] d,
  input  logic [W-1:0] sa0,
  input  logic [W-1:0] sa1,
  output logic [W-1:0] q
);

  assign q = (d & ~sa0) | sa1;

endmodule
