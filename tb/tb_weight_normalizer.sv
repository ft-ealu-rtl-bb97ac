// tb_weight_normalizer -- self-checking test of the on-chip min-max scaling.
// Loads random signed score sums (narrow, wide and equal ranges), pulses
// start and records every weight write.  Each (version, bit) must be written
// exactly once with round(16*(s-min)/(max-min)) computed in the testbench
// (16 for all when the sums are equal); busy must stay high and done must
// pulse exactly 2*3*WIDTH cycles after start.
module tb_weight_normalizer;
  import ftealu_pkg::*;

  localparam int unsigned WIDTH = 16;
  localparam int unsigned SW = 24;
  localparam int unsigned WW = 8;

  logic clk = 0, rst_n = 0, start = 0;
  logic signed [SW-1:0] score [NVER][WIDTH];
  logic busy, done, we;
  logic [1:0] wver;
  logic [3:0] widx;
  logic [WW-1:0] wdata;
  int checks = 0, failures = 0;
  int got [NVER][WIDTH];
  int nwr [NVER][WIDTH];

  weight_normalizer #(.WIDTH(WIDTH), .SW(SW), .WW(WW), .WFRAC(4)) dut (
    .clk, .rst_n, .start, .score, .busy, .done, .we, .wver, .widx, .wdata);

  always #5 clk = ~clk;

  always @(posedge clk) if (rst_n && we) begin
    nwr[wver][widx]++;
    got[wver][widx] = int'(wdata);
  end

  task automatic expect_eq(string what, longint g, longint e);
    checks++;
    if (g != e) begin
      failures++;
      if (failures < 20) $display("FAIL %s got=%0d exp=%0d", what, g, e);
    end
  endtask

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
    for (int t = 0; t < 40; t++) begin
      longint mn, mx, s, e;
      int cyc, range;
      range = (t % 4 == 0) ? 0 : (t % 4 == 1) ? 50 : (t % 4 == 2) ? 100000 : 4000000;
      for (int v = 0; v < NVER; v++) for (int i = 0; i < WIDTH; i++) begin
        score[v][i] = (range == 0) ? SW'(-77) : SW'($urandom_range(0, 2 * range) - range);
        nwr[v][i] = 0; got[v][i] = -1;
      end
      mn = 1 << 30; mx = -(1 << 30);
      for (int v = 0; v < NVER; v++) for (int i = 0; i < WIDTH; i++) begin
        s = longint'(score[v][i]);
        if (s < mn) mn = s;
        if (s > mx) mx = s;
      end
      @(negedge clk);
      start = 1;
      @(negedge clk);
      start = 0;
      cyc = 1;
      while (!done && cyc < 1000) begin
        expect_eq("busy", busy, 1);
        @(negedge clk);
        cyc++;
      end
      expect_eq("cycles", cyc, 2 * NVER * WIDTH + 1);
      expect_eq("busy after done", busy, 0);
      for (int v = 0; v < NVER; v++) for (int i = 0; i < WIDTH; i++) begin
        s = longint'(score[v][i]);
        e = (mx == mn) ? 16 : ((s - mn) * 16 + (mx - mn) / 2) / (mx - mn);
        expect_eq("writes", nwr[v][i], 1);
        expect_eq("weight", got[v][i], e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
