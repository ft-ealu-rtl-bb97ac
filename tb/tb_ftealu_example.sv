// tb_ftealu_example -- the 4-bit worked example, end to end.
//
// A 4-bit FT-EALU adds 1010 + 1100 while ALU result bit 1 is stuck at 1.
// The three versions must deliver 0110 (raw), 0111 (shifted) and 0111
// (halved and shifted: 100+110 -> 01 high, 100+000 with the fault -> 11
// low).  With equal weights the vote is the majority 0111 (wrong); after
// loading the example weights V1 = (1.3, 1.3, 1.3, 2), V2 = V3 =
// (1.3, 1.3, 1.3, 0.5), listed MSB first, the vote is the correct 0110.
// Also checks the fault-free result and the 5-cycle latency.
module tb_ftealu_example;
  import ftealu_pkg::*;

  localparam int WIDTH = 4;
  localparam int SW = SW_DEF;

  logic clk = 0, rst_n = 0;
  logic start = 0, train = 0, score_clr = 0, w_we = 0, punish_only = 0, norm_start = 0;
  logic fs_we = 0, fs_apply = 0;
  logic [8:0] fs_waddr = 0, fs_sel = 0;
  fault_site_e fs_site = SITE_Y;
  logic [WIDTH:0] fs_sa0 = 0, fs_sa1 = 0;
  logic norm_busy, norm_done;
  alu_op_e op = OP_ADD;
  logic [WIDTH-1:0] a = 0, b = 0, golden = 0;
  logic busy, done;
  logic [WIDTH-1:0] result, r_v1, r_v2, r_v3;
  logic signed [SW-1:0] score [NVER][WIDTH];
  logic [SW-1:0] score_count;
  logic [1:0] w_ver = 0;
  logic [1:0] w_idx = 0;
  logic [7:0] w_data = 0;
  logic [WIDTH:0] fa_sa0 = 0, fa_sa1 = 0, fb_sa0 = 0, fb_sa1 = 0, fy_sa0 = 0, fy_sa1 = 0;
  int checks = 0, failures = 0;

  ftealu_top #(.WIDTH(WIDTH)) dut (.*);

  always #5 clk = ~clk;

  task automatic expect_eq(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s got=%b exp=%b", what, got, exp);
    end
  endtask

  task automatic run_add();
    int cyc;
    @(negedge clk);
    op = OP_ADD; a = 4'b1010; b = 4'b1100; start = 1;
    @(negedge clk);
    start = 0; cyc = 0;
    while (!done && cyc < 20) begin @(negedge clk); cyc++; end
    expect_eq("latency", cyc, 5);
  endtask

  initial begin
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    run_add();
    expect_eq("fault free", result, 4'b0110);
    fy_sa1 = 5'b00010;
    run_add();
    expect_eq("first execution", r_v1, 4'b0110);
    expect_eq("second execution", r_v2, 4'b0111);
    expect_eq("third execution", r_v3, 4'b0111);
    expect_eq("equal weights = majority", result, 4'b0111);
    // weights in units of 1/16: 1.3 -> 21, 2 -> 32, 0.5 -> 8
    for (int v = 0; v < 3; v++)
      for (int i = 0; i < WIDTH; i++) begin
        @(negedge clk);
        w_we = 1; w_ver = 2'(v); w_idx = 2'(i);
        w_data = (i == 0) ? ((v == 0) ? 8'd32 : 8'd8) : 8'd21;
      end
    @(negedge clk);
    w_we = 0;
    run_add();
    expect_eq("weighted vote", result, 4'b0110);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
