// tb_weighted_voter -- self-checking test of the per-bit weighted vote.
// 1) The 4-bit worked example: results 0110, 0111, 0111 with weights
//    V1 = (1.3, 1.3, 1.3, 2), V2 = V3 = (1.3, 1.3, 1.3, 0.5) (MSB first)
//    must vote 0110, where a majority vote would give 0111.
// 2) 16 bits, random weights and results, against a real-valued weighted
//    average compared with 0.5; equal weights against a majority vote.
module tb_weighted_voter;
  import ftealu_pkg::*;

  localparam int unsigned WW = 8;

  logic [3:0]  r4 [NVER];
  logic [WW-1:0] w4 [NVER][4];
  logic [3:0]  y4;
  logic [15:0] r16 [NVER];
  logic [WW-1:0] w16 [NVER][16];
  logic [15:0] y16;
  int checks = 0, failures = 0;

  weighted_voter #(.WIDTH(4),  .WW(WW)) dut4  (.r(r4),  .w(w4),  .y(y4));
  weighted_voter #(.WIDTH(16), .WW(WW)) dut16 (.r(r16), .w(w16), .y(y16));

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // worked example, weights in units of 1/16: 1.3 -> 21, 2 -> 32, 0.5 -> 8
    r4 = '{4'b0110, 4'b0111, 4'b0111};
    for (int i = 1; i < 4; i++) begin w4[0][i] = 21; w4[1][i] = 21; w4[2][i] = 21; end
    w4[0][0] = 32; w4[1][0] = 8; w4[2][0] = 8;
    #1;
    checks++;
    if (y4 !== 4'b0110) begin failures++; $display("FAIL worked example y=%b", y4); end

    for (int n = 0; n < 3000; n++) begin
      logic [15:0] e;
      bit equal_w;
      equal_w = (n % 5 == 0);
      for (int v = 0; v < NVER; v++) begin
        r16[v] = 16'($urandom);
        for (int i = 0; i < 16; i++) w16[v][i] = equal_w ? 8'd16 : 8'($urandom_range(0, 48));
      end
      #1;
      for (int i = 0; i < 16; i++) begin
        real num, den;
        num = 0; den = 0;
        for (int v = 0; v < NVER; v++) begin
          den += real'(w16[v][i]) / 16.0;
          if (r16[v][i]) num += real'(w16[v][i]) / 16.0;
        end
        e[i] = (den == 0.0) ? 1'b1 : (num / den >= 0.5);
        if (equal_w) e[i] = (int'(r16[0][i]) + int'(r16[1][i]) + int'(r16[2][i])) >= 2;
      end
      checks++;
      if (y16 !== e) begin
        failures++;
        if (failures < 10) $display("FAIL n=%0d y=%h exp=%h", n, y16, e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
