// tb_fault_injection_storage -- self-checking test of the fault scenario
// store.
//
// A 16-bit store of 512 entries is filled with random scenarios (random
// site, random stuck-at-0 and stuck-at-1 masks) while a shadow copy is kept
// in the testbench.  Random entries are then selected, with 'apply' high and
// low, and all six output masks are compared with the masks expected from
// the shadow copy: the named bus gets the stored masks, the other buses
// zero, and all buses zero when 'apply' is low.  Entries are rewritten in
// between to check that a write takes effect at the next clock edge.
module tb_fault_injection_storage;
  import ftealu_pkg::*;

  localparam int WIDTH = 16;
  localparam int DEPTH = 512;
  localparam int AW = $clog2(DEPTH);

  logic clk = 0;
  logic we = 0, apply = 0;
  logic [AW-1:0] waddr = 0, sel = 0;
  fault_site_e wsite = SITE_A;
  logic [WIDTH:0] wsa0 = 0, wsa1 = 0;
  logic [WIDTH:0] fa_sa0, fa_sa1, fb_sa0, fb_sa1, fy_sa0, fy_sa1;

  fault_injection_storage #(.WIDTH(WIDTH), .DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  fault_site_e    m_site [DEPTH];
  logic [WIDTH:0] m_sa0 [DEPTH], m_sa1 [DEPTH];

  task automatic expect_eq(string what, longint got, longint exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s got=%h exp=%h at %0t", what, got, exp, $time);
    end
  endtask

  task automatic write_entry(int idx);
    @(negedge clk);
    we = 1; waddr = AW'(idx);
    wsite = fault_site_e'($urandom_range(0, 2));
    wsa0 = (WIDTH+1)'($urandom); wsa1 = (WIDTH+1)'($urandom);
    m_site[idx] = wsite; m_sa0[idx] = wsa0; m_sa1[idx] = wsa1;
    @(negedge clk);
    we = 0;
  endtask

  task automatic check_entry(int idx, bit ap);
    logic [WIDTH:0] e [6];
    @(negedge clk);
    sel = AW'(idx); apply = ap;
    #1;
    for (int k = 0; k < 6; k++) e[k] = '0;
    if (ap) begin
      e[2 * int'(m_site[idx])]     = m_sa0[idx];
      e[2 * int'(m_site[idx]) + 1] = m_sa1[idx];
    end
    expect_eq("fa_sa0", fa_sa0, e[0]);
    expect_eq("fa_sa1", fa_sa1, e[1]);
    expect_eq("fb_sa0", fb_sa0, e[2]);
    expect_eq("fb_sa1", fb_sa1, e[3]);
    expect_eq("fy_sa0", fy_sa0, e[4]);
    expect_eq("fy_sa1", fy_sa1, e[5]);
  endtask

  initial begin
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int sites [3];
    for (int i = 0; i < DEPTH; i++) write_entry(i);
    for (int n = 0; n < 3000; n++) begin
      int idx;
      idx = $urandom_range(0, DEPTH - 1);
      check_entry(idx, $urandom_range(0, 3) != 0);
      if (apply) sites[int'(m_site[idx])]++;
      if ((n % 10) == 0) write_entry($urandom_range(0, DEPTH - 1));
    end
    // a rewritten entry is seen right after the write
    for (int n = 0; n < 50; n++) begin
      int idx;
      idx = $urandom_range(0, DEPTH - 1);
      write_entry(idx);
      check_entry(idx, 1);
    end
    expect_eq("operand A scenarios applied", sites[0] > 0, 1);
    expect_eq("operand B scenarios applied", sites[1] > 0, 1);
    expect_eq("result scenarios applied", sites[2] > 0, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
