// tb_result_adapter -- self-checking test of the result shift-back.
// Random ALU results for every step and operation; checks the full-width
// result (V1 low bits, V2 shifted right), the half result and the carry
// taken from bit WIDTH/2+1 for add/sub in the V3 steps only.
module tb_result_adapter;
  import ftealu_pkg::*;

  localparam int unsigned WIDTH = 16;
  localparam int unsigned H = WIDTH / 2;

  step_e            step;
  alu_op_e          op;
  logic [WIDTH:0]   y;
  logic [WIDTH-1:0] res;
  logic [H-1:0]     half;
  logic             carry;
  int checks = 0, failures = 0;

  result_adapter #(.WIDTH(WIDTH)) dut (.step, .op, .y, .res, .half, .carry);

  task automatic expect_eq(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20)
        $display("FAIL %s step=%s op=%s y=%h got=%h exp=%h", what, step.name(), op.name(), y, got, exp);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    alu_op_e ops[6] = '{OP_AND, OP_OR, OP_XOR, OP_NOT, OP_ADD, OP_SUB};
    step_e   steps[4] = '{STEP_V1, STEP_V2, STEP_V3L, STEP_V3H};
    for (int n = 0; n < 400; n++) begin
      y = (WIDTH+1)'($urandom);
      foreach (ops[k]) foreach (steps[s]) begin
        longint yy;
        op = ops[k]; step = steps[s];
        #1;
        yy = longint'(y);
        if (step == STEP_V1) expect_eq("res", res, yy % (longint'(1) << WIDTH));
        if (step == STEP_V2) expect_eq("res", res, yy / 2);
        if (step inside {STEP_V3L, STEP_V3H}) expect_eq("half", half, (yy / 2) % (longint'(1) << H));
        expect_eq("carry", carry,
                  ((op == OP_ADD || op == OP_SUB) && (step inside {STEP_V3L, STEP_V3H}))
                    ? (yy >> (H + 1)) % 2 : 0);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
