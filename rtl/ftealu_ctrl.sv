// ftealu_ctrl -- sequencer and result registers of the FT-EALU.
//
// On 'start' (accepted while idle) it samples the operation, the operands,
// the learning flag and the correct result, then walks the shared ALU
// through four one-cycle steps:
//   V1  -> R_V1 = adapted result of the raw operands
//   V2  -> R_V2 = adapted result of the shifted operands
//   V3L -> low half of R_V3, and the low half's carry/borrow is kept
//   V3H -> high half of R_V3 (the kept carry is fed back as 'chain')
// In the following VOTE cycle the weighted vote of R_V1..R_V3 is registered
// into 'result' and, in learning mode, 'score_valid' strobes the score
// accumulator.  'done' is a one-cycle pulse in the cycle after VOTE, when
// 'result' is valid; it stays valid until the next operation ends.
// Timing: start sampled at edge 0, done high after edge 5; 'busy' is high
// from edge 0 to edge 5, and a new start may be given while 'done' is high.
// The serial order of the three versions is the paper's; the split of the
// third version into two cycles, the handshake and the latency are this
// design's own.
module ftealu_ctrl
  import ftealu_pkg::*;
#(
  parameter int unsigned WIDTH = 16
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // request
  input  logic                 start,
  input  alu_op_e              op_i,
  input  logic [WIDTH-1:0]     a_i,
  input  logic [WIDTH-1:0]     b_i,
  input  logic                 train_i,
  input  logic [WIDTH-1:0]     golden_i,
  // to the diversifier / ALU
  output step_e                step,
  output alu_op_e              op,
  output logic [WIDTH-1:0]     a,
  output logic [WIDTH-1:0]     b,
  output logic                 chain,
  // from the result adapter
  input  logic [WIDTH-1:0]     res,
  input  logic [WIDTH/2-1:0]   half,
  input  logic                 carry,
  // to / from the voter and the score accumulator
  output logic [WIDTH-1:0]     r [NVER],
  input  logic [WIDTH-1:0]     vote,
  output logic                 score_valid,
  output logic [WIDTH-1:0]     golden,
  // status
  output logic                 busy,
  output logic                 done,
  output logic [WIDTH-1:0]     result
);

  localparam int unsigned H = WIDTH / 2;

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_VOTE} state_e;

  state_e state;
  logic   train;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      step   <= STEP_V1;
      op     <= OP_AND;
      a      <= '0;
      b      <= '0;
      train  <= 1'b0;
      golden <= '0;
      chain  <= 1'b0;
      done   <= 1'b0;
      result <= '0;
      for (int v = 0; v < NVER; v++) r[v] <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: begin
          if (start) begin
            state  <= S_RUN;
            step   <= STEP_V1;
            op     <= op_i;
            a      <= a_i;
            b      <= b_i;
            train  <= train_i;
            golden <= golden_i;
            chain  <= 1'b0;
          end
        end
        S_RUN: begin
          unique case (step)
            STEP_V1: begin
              r[0] <= res;
              step <= STEP_V2;
            end
            STEP_V2: begin
              r[1] <= res;
              step <= STEP_V3L;
            end
            STEP_V3L: begin
              r[2][H-1:0] <= half;
              chain       <= carry;
              step        <= STEP_V3H;
            end
            STEP_V3H: begin
              r[2][WIDTH-1:H] <= half;
              state           <= S_VOTE;
            end
            default: ;
          endcase
        end
        S_VOTE: begin
          result <= vote;
          done   <= 1'b1;
          state  <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy        = (state != S_IDLE);
  assign score_valid = (state == S_VOTE) && train;

  // An operation always takes exactly four ALU steps and one vote cycle.
  a_v3h_then_vote : assert property (@(posedge clk) disable iff (!rst_n)
    (state == S_RUN && step == STEP_V3H) |=> (state == S_VOTE));
  a_vote_then_done : assert property (@(posedge clk) disable iff (!rst_n)
    (state == S_VOTE) |=> (done && state == S_IDLE));

endmodule
