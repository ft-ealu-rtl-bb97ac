// weight_store -- the static per-bit trust-factor weights of the voter.
//
// Holds one weight for every result bit of every execution version
// (NVER x WIDTH), as unsigned fixed point with WFRAC fraction bits
// (1.0 = 2**WFRAC).  The paper learns these weights once, at design time,
// and then keeps them fixed; because it publishes weights only for its
// 4-bit example, this design keeps them in a small register file that is
// written once after reset through a single write port (one weight per
// cycle, taking effect the next cycle) instead of a ROM.  Reset sets every
// weight to INIT, by default 1.0, which makes the weighted voter a plain
// bitwise majority voter until learned weights are loaded.
module weight_store
  import ftealu_pkg::*;
#(
  parameter int unsigned WIDTH = 16,
  parameter int unsigned WW    = WW_DEF,
  parameter int unsigned WFRAC = WFRAC_DEF,
  parameter logic [WW-1:0] INIT = WW'(1) << WFRAC
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     we,
  input  logic [1:0]               wver,
  input  logic [$clog2(WIDTH)-1:0] widx,
  input  logic [WW-1:0]            wdata,
  output logic [WW-1:0]            w [NVER][WIDTH]
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int v = 0; v < NVER; v++)
        for (int i = 0; i < WIDTH; i++)
          w[v][i] <= INIT;
    end else if (we && (wver < 2'(NVER)) && (32'(widx) < WIDTH)) begin
      w[wver][widx] <= wdata;
    end
  end

endmodule
