// tb_base_alu -- self-checking test of the shared ALU at WIDTH = 16.
// Drives every operation with random 17-bit operands and carry-in, plus
// corner values, and compares with integer arithmetic on longint.
module tb_base_alu;
  import ftealu_pkg::*;

  localparam int unsigned WIDTH = 16;
  localparam longint M = (longint'(1) << (WIDTH + 1)) - 1;

  alu_op_e        op;
  logic [WIDTH:0] a, b, y;
  logic           cin;
  int             checks = 0, failures = 0;

  base_alu #(.WIDTH(WIDTH)) dut (.op, .a, .b, .cin, .y);

  function automatic longint model(alu_op_e o, longint x, longint z, longint c);
    case (o)
      OP_AND: return x & z;
      OP_OR:  return x | z;
      OP_XOR: return x ^ z;
      OP_NOT: return ~x & M;
      OP_ADD: return (x + z + c) & M;
      OP_SUB: return (x - z - c) & M;
      default: return 0;
    endcase
  endfunction

  task automatic check_one(alu_op_e o, longint x, longint z, logic c);
    op = o; a = (WIDTH+1)'(x); b = (WIDTH+1)'(z); cin = c;
    #1;
    checks++;
    if (longint'(y) != model(o, x, z, longint'(c))) begin
      failures++;
      $display("FAIL op=%s a=%h b=%h cin=%0d y=%h exp=%h", o.name(), a, b, c, y,
               model(o, x, z, longint'(c)));
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    alu_op_e ops[6] = '{OP_AND, OP_OR, OP_XOR, OP_NOT, OP_ADD, OP_SUB};
    foreach (ops[k]) begin
      check_one(ops[k], M, 1, 1'b1);
      check_one(ops[k], 0, M, 1'b1);
      check_one(ops[k], 0, 0, 1'b0);
      for (int n = 0; n < 500; n++)
        check_one(ops[k], longint'($urandom) & M, longint'($urandom) & M, 1'($urandom));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
