// tb_score_accumulator -- self-checking test of the reward/punishment scores.
// Feeds random (results, correct result) scenarios, including ones where
// 3, 2, 1 and 0 versions are right, and keeps real-valued score sums in the
// testbench (+1 shared by the right versions, -1 shared by the wrong ones;
// in the punitive mode the right versions get 0), in both modes.
// The RTL's sums, in units of 1/6, must equal 6x the real sums; the scenario
// count must match; 'clr' must zero everything.
module tb_score_accumulator;
  import ftealu_pkg::*;

  localparam int unsigned WIDTH = 16;
  localparam int unsigned SW = 24;

  logic clk = 0, rst_n = 0, clr = 0, valid = 0, punish_only = 0;
  logic [WIDTH-1:0] r [NVER];
  logic [WIDTH-1:0] golden;
  logic signed [SW-1:0] score [NVER][WIDTH];
  logic [SW-1:0] count;
  real  ref_s [NVER][WIDTH];
  int   ref_n;
  int   checks = 0, failures = 0;
  int   seen [4];

  score_accumulator #(.WIDTH(WIDTH), .SW(SW)) dut (.clk, .rst_n, .clr, .valid, .punish_only, .r, .golden, .score, .count);

  always #5 clk = ~clk;

  task automatic compare_all(string tag);
    for (int v = 0; v < NVER; v++)
      for (int i = 0; i < WIDTH; i++) begin
        checks++;
        if (real'(score[v][i]) != ref_s[v][i] * 6.0 &&
            (real'(score[v][i]) - ref_s[v][i] * 6.0 > 1e-6 || ref_s[v][i] * 6.0 - real'(score[v][i]) > 1e-6)) begin
          failures++;
          if (failures < 20) $display("FAIL %s score[%0d][%0d]=%0d exp %f", tag, v, i, score[v][i], ref_s[v][i] * 6.0);
        end
      end
    checks++;
    if (count !== SW'(ref_n)) begin failures++; $display("FAIL %s count=%0d exp %0d", tag, count, ref_n); end
  endtask

  task automatic clear_ref();
    for (int v = 0; v < NVER; v++) for (int i = 0; i < WIDTH; i++) ref_s[v][i] = 0.0;
    ref_n = 0;
  endtask

  initial begin
    #100000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    clear_ref();
    for (int v = 0; v < NVER; v++) r[v] = '0;
    golden = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    compare_all("reset");
    for (int pass = 0; pass < 4; pass++) begin
      punish_only = pass[0];
      for (int n = 0; n < 300; n++) begin
        @(negedge clk);
        golden = WIDTH'($urandom);
        // flip a sparse random set of bits per version
        for (int v = 0; v < NVER; v++) r[v] = golden ^ (WIDTH'($urandom) & WIDTH'($urandom) & WIDTH'($urandom));
        valid = ($urandom_range(0, 3) != 0);
        if (valid) begin
          ref_n++;
          for (int i = 0; i < WIDTH; i++) begin
            int nok;
            nok = 0;
            for (int v = 0; v < NVER; v++) nok += (r[v][i] == golden[i]);
            seen[nok]++;
            for (int v = 0; v < NVER; v++)
              if (r[v][i] == golden[i]) ref_s[v][i] += punish_only ? 0.0 : 1.0 / real'(nok);
              else                      ref_s[v][i] -= 1.0 / real'(3 - nok);
          end
        end
        @(negedge clk);
        valid = 0;
        compare_all("accumulate");
      end
      @(negedge clk);
      clr = 1;
      @(negedge clk);
      clr = 0;
      clear_ref();
      compare_all("clear");
    end
    for (int k = 0; k < 4; k++) begin
      checks++;
      if (seen[k] == 0) begin failures++; $display("FAIL no scenario with %0d right versions", k); end
    end
    $display("scenarios with 0/1/2/3 right bits: %0d %0d %0d %0d", seen[0], seen[1], seen[2], seen[3]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
