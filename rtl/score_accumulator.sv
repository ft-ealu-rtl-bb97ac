// score_accumulator -- reward/punishment learning of the per-bit weights.
//
// During learning, each operation is run with a known correct result
// ('golden') while a stuck-at fault is applied to the ALU.  For every bit,
// the versions whose adapted result bit is right share a reward of +1 and
// the versions that are wrong share a punishment of -1:
//   3 right          : +1/3 each
//   2 right, 1 wrong : +1/2, +1/2, -1
//   1 right, 2 wrong : +1,   -1/2, -1/2
//   3 wrong          : -1/3 each
// With 'punish_only' set, the paper's first, punitive scheme is used
// instead: right versions score 0 and only the -1 is shared among the wrong
// ones (-1, -1/2, -1/3).
// The shares are summed per bit and per version over all scenarios, in
// integers of 1/6 (+2, +3, +6, -2, -3, -6), and the number of scenarios is
// counted.  Dividing by the count and normalizing the sums into weights is
// left to the offline flow that then writes weight_store.  The rule is the
// paper's (its second, reward/punishment scheme); building it as hardware
// is this design's choice.  The reward/punishment scheme is the one the
// paper prefers.  One scenario per cycle when 'valid'; 'clr' has
// priority and zeroes everything.  Sums wrap at SW bits.
module score_accumulator
  import ftealu_pkg::*;
#(
  parameter int unsigned WIDTH = 16,
  parameter int unsigned SW    = SW_DEF
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 clr,
  input  logic                 valid,
  input  logic                 punish_only,  // 1: punitive scheme, 0: reward/punishment
  input  logic [WIDTH-1:0]     r [NVER],
  input  logic [WIDTH-1:0]     golden,
  output logic signed [SW-1:0] score [NVER][WIDTH],
  output logic [SW-1:0]        count
);

  logic signed [SW-1:0] delta [NVER][WIDTH];

  always_comb begin
    for (int i = 0; i < WIDTH; i++) begin
      logic [NVER-1:0] ok;
      int unsigned     n_ok;
      int              rew, pun;
      n_ok = 0;
      for (int v = 0; v < NVER; v++) begin
        ok[v] = (r[v][i] == golden[i]);
        n_ok  = n_ok + 32'(ok[v]);
      end
      unique case (n_ok)
        3:       begin rew = SCORE_THIRD; pun = 0;            end
        2:       begin rew = SCORE_HALF;  pun = -SCORE_ONE;   end
        1:       begin rew = SCORE_ONE;   pun = -SCORE_HALF;  end
        default: begin rew = 0;           pun = -SCORE_THIRD; end
      endcase
      if (punish_only) begin
        rew = 0;
        unique case (n_ok)
          2:       pun = -SCORE_ONE;
          1:       pun = -SCORE_HALF;
          default: pun = -SCORE_THIRD;
        endcase
      end
      for (int v = 0; v < NVER; v++)
        delta[v][i] = ok[v] ? SW'(rew) : SW'(pun);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      count <= '0;
      for (int v = 0; v < NVER; v++)
        for (int i = 0; i < WIDTH; i++)
          score[v][i] <= '0;
    end else if (clr) begin
      count <= '0;
      for (int v = 0; v < NVER; v++)
        for (int i = 0; i < WIDTH; i++)
          score[v][i] <= '0;
    end else if (valid) begin
      count <= count + 1'b1;
      for (int v = 0; v < NVER; v++)
        for (int i = 0; i < WIDTH; i++)
          score[v][i] <= score[v][i] + delta[v][i];
    end
  end

endmodule
