// tb_weight_store -- self-checking test of the weight register file.
// Checks the reset value (1.0 everywhere), writes every weight with a known
// pattern in random order, reads all back every few writes, and checks that
// a write to the invalid version index 3 changes nothing.
module tb_weight_store;
  import ftealu_pkg::*;

  localparam int unsigned WIDTH = 16;
  localparam int unsigned WW = 8;

  logic clk = 0, rst_n = 0, we = 0;
  logic [1:0]               wver = 0;
  logic [$clog2(WIDTH)-1:0] widx = 0;
  logic [WW-1:0]            wdata = 0;
  logic [WW-1:0]            w [NVER][WIDTH];
  logic [WW-1:0]            exp_w [NVER][WIDTH];
  int checks = 0, failures = 0;

  weight_store #(.WIDTH(WIDTH), .WW(WW), .WFRAC(4)) dut (.clk, .rst_n, .we, .wver, .widx, .wdata, .w);

  always #5 clk = ~clk;

  task automatic compare_all(string tag);
    for (int v = 0; v < NVER; v++)
      for (int i = 0; i < WIDTH; i++) begin
        checks++;
        if (w[v][i] !== exp_w[v][i]) begin
          failures++;
          if (failures < 20) $display("FAIL %s w[%0d][%0d]=%0d exp %0d", tag, v, i, w[v][i], exp_w[v][i]);
        end
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
    for (int v = 0; v < NVER; v++) for (int i = 0; i < WIDTH; i++) exp_w[v][i] = 8'd16;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    compare_all("reset");
    for (int n = 0; n < 200; n++) begin
      @(negedge clk);
      we = 1; wver = 2'($urandom_range(0, 3)); widx = 4'($urandom); wdata = 8'($urandom);
      if (wver < 3) exp_w[wver][widx] = wdata;
      @(negedge clk);
      we = 0;
      compare_all("write");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
