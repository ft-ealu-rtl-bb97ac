// tb_stuck_at_injector -- self-checking test of the stuck-at fault model.
// Random buses and masks; each output bit is checked against the rule
// "stuck-at-1 wins, then stuck-at-0, else pass".
module tb_stuck_at_injector;
  localparam int unsigned W = 17;
  logic [W-1:0] d, sa0, sa1, q;
  int checks = 0, failures = 0;

  stuck_at_injector #(.W(W)) dut (.d, .sa0, .sa1, .q);

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 2000; n++) begin
      d   = W'($urandom);
      sa0 = (n % 4 == 0) ? W'(1) << (n % W) : W'($urandom) & W'($urandom);
      sa1 = (n % 4 == 1) ? W'(1) << (n % W) : W'($urandom) & W'($urandom);
      #1;
      for (int i = 0; i < W; i++) begin
        logic e;
        e = sa1[i] ? 1'b1 : (sa0[i] ? 1'b0 : d[i]);
        checks++;
        if (q[i] !== e) begin
          failures++;
          if (failures < 10) $display("FAIL bit %0d d=%h sa0=%h sa1=%h q=%h", i, d, sa0, sa1, q);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
