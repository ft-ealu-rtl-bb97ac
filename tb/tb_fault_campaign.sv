// tb_fault_campaign -- the stuck-at fault campaigns, on two FT-EALU sizes.
//
//  4-bit : all 256 operand pairs, all 8 single and 24 double stuck-at
//          faults, six operations; learning on the same pairs.
// 16-bit : 100 random operand pairs, all 32 single and 480 double stuck-at
//          faults, six operations; learning on 400 other random pairs.
//          Once with the faults on the ALU result bus, once on operand A.
// Faults on the 4-bit unit sit on the ALU result bus, as in the worked
// example.
// Every run is checked bit-exactly against the reference model; the
// correction coverage with equal and with learned weights is printed.
module tb_fault_campaign;
  int  c4, f4, c16, f16, ca, fa;
  bit  d4, d16, da;

  fault_campaign_runner #(.WIDTH(4),  .NEVAL(0),   .NTRAIN(0),   .SEED(4))  u4  (.finished(d4),  .checks(c4),  .failures(f4));
  fault_campaign_runner #(.WIDTH(16), .NEVAL(100), .NTRAIN(400), .SEED(16)) u16 (.finished(d16), .checks(c16), .failures(f16));
  fault_campaign_runner #(.WIDTH(16), .NEVAL(100), .NTRAIN(400), .SEED(17), .SITE(1)) u16a (.finished(da), .checks(ca), .failures(fa));

  initial begin
    #100s;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", c4 + c16 + ca, f4 + f16 + fa + 1);
    $finish;
  end

  initial begin
    wait (d4 && d16 && da);
    $display("TB_RESULT checks=%0d failures=%0d", c4 + c16 + ca, f4 + f16 + fa);
    $finish;
  end
endmodule
