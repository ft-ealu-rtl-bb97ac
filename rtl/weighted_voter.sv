// weighted_voter -- bit by bit weighted vote over the execution versions.
//
// For every result bit i the voter forms the weighted average of the three
// versions' bits, sum_j W_ij*R_ij / sum_j W_ij, and outputs 1 when it is at
// least 0.5.  The comparison is done exactly in integers as
//   2 * sum_j W_ij*R_ij  >=  sum_j W_ij
// so no divider is needed.  Threshold 0.5, the ">=" and the division by the
// total weight of the bit follow the paper; with all weights equal it is a
// majority vote.  A bit whose three weights are all zero votes 1.
// Combinational.
module weighted_voter
  import ftealu_pkg::*;
#(
  parameter int unsigned WIDTH = 16,
  parameter int unsigned WW    = WW_DEF
) (
  input  logic [WIDTH-1:0] r [NVER],
  input  logic [WW-1:0]    w [NVER][WIDTH],
  output logic [WIDTH-1:0] y
);

  localparam int unsigned SUMW = WW + $clog2(NVER) + 1;

  logic [SUMW-1:0] num [WIDTH];
  logic [SUMW-1:0] den [WIDTH];

  always_comb begin
    for (int i = 0; i < WIDTH; i++) begin
      num[i] = '0;
      den[i] = '0;
      for (int v = 0; v < NVER; v++) begin
        den[i] = den[i] + SUMW'(w[v][i]);
        if (r[v][i]) num[i] = num[i] + SUMW'(w[v][i]);
      end
      y[i] = (num[i] << 1) >= den[i];
    end
  end

endmodule
