// ftealu_top -- FT-EALU: fault-tolerant ALU by diversified time redundancy
// and per-bit weighted voting.
//
// Every requested operation is executed three times, serially, on one
// shared ALU: on the raw operands (V1), on the operands shifted left by one
// (V2), and on the operand halves, each shifted left by one and computed as
// two half-width operations (V3, two cycles).  The result of each version is
// brought back to normal bit order and the three are combined by a bit by
// bit weighted vote whose weights (one per bit and per version) come from
// design-time learning.  Because the encodings move the data relative to the
// ALU's physical bits, a permanent stuck-at fault of the ALU corrupts
// different data bits in different versions and can be voted out.
//
// Datapath per cycle:
//   ftealu_ctrl -> operand_diversifier -> stuck_at_injector (A, B)
//     -> base_alu -> stuck_at_injector (Y) -> result_adapter -> ftealu_ctrl
//   ftealu_ctrl.r -> weighted_voter (weights from weight_store) -> result
//   fault_injection_storage (learning) -> fault masks of the injectors
//   learning mode: ftealu_ctrl.r + golden -> score_accumulator
//     -> weight_normalizer (on request) -> weight_store
//
// Interface: start/op/a/b request an operation when busy is low; done
// pulses with 'result' valid 5 cycles after start (see ftealu_ctrl).
// r_v1..r_v3 expose the adapted per-version results so software can vote
// too, as the paper does.  train/golden enable learning (punish_only
// selects the punitive instead of the reward/punishment scoring); the score sums
// and scenario count come out; norm_start has the on-chip min-max
// normalizer turn them into weights (2*3*WIDTH cycles, norm_busy/norm_done),
// or weights normalized off chip are written through w_we/w_ver/w_idx/w_data
// (ignored while norm_busy).  The six fault
// masks force ALU operand and result bits to 0 or 1; tie them to zero in
// normal use.  For learning, fault scenarios can also be stored in
// fault_injection_storage (fs_we/fs_waddr/fs_site/fs_sa0/fs_sa1, one per
// cycle) and one applied per operation with fs_apply/fs_sel; its masks are
// ORed with the port masks.  Keep fs_apply low in normal use.
module ftealu_top
  import ftealu_pkg::*;
#(
  parameter int unsigned WIDTH = 16,
  parameter int unsigned WW    = WW_DEF,
  parameter int unsigned WFRAC = WFRAC_DEF,
  parameter int unsigned SW    = SW_DEF,
  parameter int unsigned FDEPTH = 512
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // operation request and result
  input  logic                     start,
  input  alu_op_e                  op,
  input  logic [WIDTH-1:0]         a,
  input  logic [WIDTH-1:0]         b,
  output logic                     busy,
  output logic                     done,
  output logic [WIDTH-1:0]         result,
  output logic [WIDTH-1:0]         r_v1,
  output logic [WIDTH-1:0]         r_v2,
  output logic [WIDTH-1:0]         r_v3,
  // design-time learning
  input  logic                     train,
  input  logic [WIDTH-1:0]         golden,
  input  logic                     score_clr,
  input  logic                     punish_only,
  output logic signed [SW-1:0]     score [NVER][WIDTH],
  output logic [SW-1:0]            score_count,
  input  logic                     norm_start,
  output logic                     norm_busy,
  output logic                     norm_done,
  // weight loading
  input  logic                     w_we,
  input  logic [1:0]               w_ver,
  input  logic [$clog2(WIDTH)-1:0] w_idx,
  input  logic [WW-1:0]            w_data,
  // stored fault scenarios for learning
  input  logic                      fs_we,
  input  logic [$clog2(FDEPTH)-1:0] fs_waddr,
  input  fault_site_e               fs_site,
  input  logic [WIDTH:0]            fs_sa0,
  input  logic [WIDTH:0]            fs_sa1,
  input  logic                      fs_apply,
  input  logic [$clog2(FDEPTH)-1:0] fs_sel,
  // permanent fault masks of the shared ALU (stuck-at-0 / stuck-at-1)
  input  logic [WIDTH:0]           fa_sa0,
  input  logic [WIDTH:0]           fa_sa1,
  input  logic [WIDTH:0]           fb_sa0,
  input  logic [WIDTH:0]           fb_sa1,
  input  logic [WIDTH:0]           fy_sa0,
  input  logic [WIDTH:0]           fy_sa1
);

  step_e              step;
  alu_op_e            op_q;
  logic [WIDTH-1:0]   a_q, b_q, golden_q;
  logic               chain;
  logic [WIDTH:0]     div_a, div_b, alu_a, alu_b, alu_y, alu_y_f;
  logic               alu_cin;
  logic [WIDTH-1:0]   res;
  logic [WIDTH/2-1:0] half;
  logic               carry;
  logic [WIDTH-1:0]   r [NVER];
  logic [WIDTH-1:0]   vote;
  logic               score_valid;
  logic [WW-1:0]      w [NVER][WIDTH];
  logic                     n_we, ws_we;
  logic [1:0]               n_ver, ws_ver;
  logic [$clog2(WIDTH)-1:0] n_idx, ws_idx;
  logic [WW-1:0]            n_data, ws_data;
  logic [WIDTH:0]           s_fa_sa0, s_fa_sa1, s_fb_sa0, s_fb_sa1, s_fy_sa0, s_fy_sa1;

  ftealu_ctrl #(.WIDTH(WIDTH)) u_ctrl (
    .clk, .rst_n,
    .start, .op_i(op), .a_i(a), .b_i(b), .train_i(train), .golden_i(golden),
    .step, .op(op_q), .a(a_q), .b(b_q), .chain,
    .res, .half, .carry,
    .r, .vote, .score_valid, .golden(golden_q),
    .busy, .done, .result
  );

  operand_diversifier #(.WIDTH(WIDTH)) u_div (
    .step, .op(op_q), .a(a_q), .b(b_q), .chain,
    .alu_a(div_a), .alu_b(div_b), .alu_cin
  );

  // A stored scenario, while applied, adds its faults to the port masks.
  fault_injection_storage #(.WIDTH(WIDTH), .DEPTH(FDEPTH)) u_fstore (
    .clk, .we(fs_we), .waddr(fs_waddr), .wsite(fs_site), .wsa0(fs_sa0), .wsa1(fs_sa1),
    .apply(fs_apply), .sel(fs_sel),
    .fa_sa0(s_fa_sa0), .fa_sa1(s_fa_sa1), .fb_sa0(s_fb_sa0), .fb_sa1(s_fb_sa1),
    .fy_sa0(s_fy_sa0), .fy_sa1(s_fy_sa1)
  );
  stuck_at_injector #(.W(WIDTH + 1)) u_fault_a (
    .d(div_a), .sa0(fa_sa0 | s_fa_sa0), .sa1(fa_sa1 | s_fa_sa1), .q(alu_a)
  );
  stuck_at_injector #(.W(WIDTH + 1)) u_fault_b (
    .d(div_b), .sa0(fb_sa0 | s_fb_sa0), .sa1(fb_sa1 | s_fb_sa1), .q(alu_b)
  );

  base_alu #(.WIDTH(WIDTH)) u_alu (
    .op(op_q), .a(alu_a), .b(alu_b), .cin(alu_cin), .y(alu_y)
  );

  stuck_at_injector #(.W(WIDTH + 1)) u_fault_y (
    .d(alu_y), .sa0(fy_sa0 | s_fy_sa0), .sa1(fy_sa1 | s_fy_sa1), .q(alu_y_f)
  );

  result_adapter #(.WIDTH(WIDTH)) u_adapt (
    .step, .op(op_q), .y(alu_y_f), .res, .half, .carry
  );

  weight_store #(.WIDTH(WIDTH), .WW(WW), .WFRAC(WFRAC)) u_wstore (
    .clk, .rst_n, .we(ws_we), .wver(ws_ver), .widx(ws_idx), .wdata(ws_data), .w
  );

  // The on-chip normalizer owns the weight write port while it runs.
  always_comb begin
    if (norm_busy) begin
      ws_we = n_we;  ws_ver = n_ver;  ws_idx = n_idx;  ws_data = n_data;
    end else begin
      ws_we = w_we;  ws_ver = w_ver;  ws_idx = w_idx;  ws_data = w_data;
    end
  end

  weight_normalizer #(.WIDTH(WIDTH), .SW(SW), .WW(WW), .WFRAC(WFRAC)) u_norm (
    .clk, .rst_n, .start(norm_start), .score,
    .busy(norm_busy), .done(norm_done),
    .we(n_we), .wver(n_ver), .widx(n_idx), .wdata(n_data)
  );

  weighted_voter #(.WIDTH(WIDTH), .WW(WW)) u_voter (
    .r, .w, .y(vote)
  );

  score_accumulator #(.WIDTH(WIDTH), .SW(SW)) u_score (
    .clk, .rst_n, .clr(score_clr), .valid(score_valid), .punish_only, .r, .golden(golden_q),
    .score, .count(score_count)
  );

  assign r_v1 = r[0];
  assign r_v2 = r[1];
  assign r_v3 = r[2];

endmodule
