// tb_operand_diversifier -- self-checking test of the operand encodings.
// For random operands, every operation, every step and both chain values it
// checks the exact ALU operands (V1 raw, V2 shifted, V3L/V3H halves shifted)
// and, for add/sub in step V3H, that the folded carry gives
// (alu result >> 1) == high-half result including the low-half carry.
module tb_operand_diversifier;
  import ftealu_pkg::*;

  localparam int unsigned WIDTH = 16;
  localparam int unsigned H = WIDTH / 2;
  localparam longint MH = (longint'(1) << H) - 1;

  step_e            step;
  alu_op_e          op;
  logic [WIDTH-1:0] a, b;
  logic             chain;
  logic [WIDTH:0]   alu_a, alu_b;
  logic             alu_cin;
  int checks = 0, failures = 0;

  operand_diversifier #(.WIDTH(WIDTH)) dut (.step, .op, .a, .b, .chain, .alu_a, .alu_b, .alu_cin);

  task automatic expect_eq(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20)
        $display("FAIL %s step=%s op=%s a=%h b=%h chain=%0d got=%h exp=%h",
                 what, step.name(), op.name(), a, b, chain, got, exp);
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
    for (int n = 0; n < 300; n++) begin
      a = WIDTH'($urandom); b = WIDTH'($urandom);
      foreach (ops[k]) foreach (steps[s]) for (int c = 0; c < 2; c++) begin
        longint ea, eb, ec, ah, bh, cc, y, ey;
        op = ops[k]; step = steps[s]; chain = 1'(c);
        #1;
        ah = longint'(a) >> H; bh = longint'(b) >> H;
        cc = (step == STEP_V3H && (op == OP_ADD || op == OP_SUB)) ? c : 0;
        case (step)
          STEP_V1:  begin ea = a;                  eb = b;                  end
          STEP_V2:  begin ea = longint'(a) << 1;   eb = longint'(b) << 1;   end
          STEP_V3L: begin ea = (a & MH) << 1;      eb = (b & MH) << 1;      end
          default:  begin ea = (ah << 1) | ((op == OP_ADD) ? cc : 0);
                          eb = (bh << 1) | ((op == OP_SUB) ? cc : 0);       end
        endcase
        ec = cc;
        expect_eq("alu_a", longint'(alu_a), ea);
        expect_eq("alu_b", longint'(alu_b), eb);
        expect_eq("alu_cin", longint'(alu_cin), ec);
        if (step == STEP_V3H && op == OP_ADD) begin
          y  = (longint'(alu_a) + longint'(alu_b) + longint'(alu_cin)) >> 1;
          ey = ah + bh + c;
          expect_eq("chained add", y & MH, ey & MH);
        end
        if (step == STEP_V3H && op == OP_SUB) begin
          y  = (longint'(alu_a) - longint'(alu_b) - longint'(alu_cin)) >>> 1;
          ey = ah - bh - c;
          expect_eq("chained sub", y & MH, ey & MH);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
