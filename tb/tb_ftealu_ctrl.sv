// tb_ftealu_ctrl -- self-checking test of the FT-EALU sequencer.
// The datapath around the controller is replaced by testbench logic that
// answers each step with a known random value (full result in V1/V2, half
// result and carry in V3L/V3H) and votes by XOR of the three registers.
// Checks: step order V1, V2, V3L, V3H; sampled op/a/b/golden; the stored
// R_V1..R_V3 including the joined V3 halves; the carry fed back in V3H;
// busy; done exactly 5 cycles after start; the registered result;
// score_valid once per operation, only in learning mode; back-to-back
// starts given in the done cycle.
module tb_ftealu_ctrl;
  import ftealu_pkg::*;

  localparam int unsigned WIDTH = 16;
  localparam int unsigned H = WIDTH / 2;

  logic clk = 0, rst_n = 0;
  logic start = 0, train_i = 0;
  alu_op_e op_i = OP_ADD;
  logic [WIDTH-1:0] a_i = 0, b_i = 0, golden_i = 0;
  step_e step;
  alu_op_e op;
  logic [WIDTH-1:0] a, b, golden, result;
  logic chain, score_valid, busy, done;
  logic [WIDTH-1:0] res;
  logic [H-1:0] half;
  logic carry;
  logic [WIDTH-1:0] r [NVER];
  logic [WIDTH-1:0] vote;

  // values the fake datapath returns for the current operation
  logic [WIDTH-1:0] v1, v2;
  logic [H-1:0] lo, hi;
  logic c_lo, c_hi;

  int checks = 0, failures = 0;
  int n_train = 0, n_sv = 0;

  ftealu_ctrl #(.WIDTH(WIDTH)) dut (
    .clk, .rst_n, .start, .op_i, .a_i, .b_i, .train_i, .golden_i,
    .step, .op, .a, .b, .chain, .res, .half, .carry,
    .r, .vote, .score_valid, .golden, .busy, .done, .result);

  always #5 clk = ~clk;

  always_comb begin
    res = (step == STEP_V1) ? v1 : v2;
    half = (step == STEP_V3L) ? lo : hi;
    carry = (step == STEP_V3L) ? c_lo : c_hi;
    vote = r[0] ^ r[1] ^ r[2];
  end

  task automatic expect_eq(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s got=%h exp=%h at %0t", what, got, exp, $time);
    end
  endtask

  always @(posedge clk) if (rst_n && score_valid) n_sv++;

  initial begin
    #100000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    expect_eq("idle busy", busy, 0);
    for (int n = 0; n < 100; n++) begin
      logic [WIDTH-1:0] ea, eb, eg;
      alu_op_e eop;
      logic etrain;
      int cyc;
      @(negedge clk);
      ea = WIDTH'($urandom); eb = WIDTH'($urandom); eg = WIDTH'($urandom);
      eop = alu_op_e'($urandom_range(0, 5)); etrain = 1'($urandom);
      v1 = WIDTH'($urandom); v2 = WIDTH'($urandom); lo = H'($urandom); hi = H'($urandom);
      c_lo = 1'($urandom); c_hi = ~c_lo;
      a_i = ea; b_i = eb; golden_i = eg; op_i = eop; train_i = etrain; start = 1;
      if (etrain) n_train++;
      @(negedge clk);
      start = 0;
      a_i = ~ea; b_i = ~eb; golden_i = ~eg;   // must not be sampled again
      cyc = 0;
      expect_eq("busy", busy, 1);
      expect_eq("step V1", step, STEP_V1);
      expect_eq("op", op, eop);
      expect_eq("a", a, ea);
      expect_eq("b", b, eb);
      expect_eq("golden", golden, eg);
      @(negedge clk); cyc++;
      expect_eq("step V2", step, STEP_V2);
      @(negedge clk); cyc++;
      expect_eq("step V3L", step, STEP_V3L);
      @(negedge clk); cyc++;
      expect_eq("step V3H", step, STEP_V3H);
      expect_eq("chain", chain, c_lo);
      @(negedge clk); cyc++;
      expect_eq("score_valid", score_valid, etrain);
      expect_eq("r_v1", r[0], v1);
      expect_eq("r_v2", r[1], v2);
      expect_eq("r_v3", r[2], {hi, lo});
      expect_eq("not done yet", done, 0);
      @(negedge clk); cyc++;
      expect_eq("done", done, 1);
      expect_eq("latency", cyc, 5);
      expect_eq("busy at done", busy, 0);
      expect_eq("result", result, v1 ^ v2 ^ {hi, lo});
      if (n % 2 == 1) begin
        // idle gap: done must fall and result must hold
        @(negedge clk);
        expect_eq("done pulse", done, 0);
        expect_eq("result hold", result, v1 ^ v2 ^ {hi, lo});
      end
    end
    @(negedge clk);
    expect_eq("score_valid count", n_sv, n_train);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
