// fault_injection_storage -- the stored stuck-at fault scenarios that are
// applied to the shared ALU while the voter weights are being learned.
//
// Each of the DEPTH entries holds one fault scenario: the ALU bus it acts on
// (operand A, operand B or result, see fault_site_e) and a stuck-at-0 and a
// stuck-at-1 mask over the WIDTH+1 bits of that bus, so one entry can hold a
// single fault or any number of simultaneous ones.  Entries are written one
// per clock through we/waddr/wsite/wsa0/wsa1.  While 'apply' is high, the
// entry selected by 'sel' is read combinationally and decoded onto the
// stuck-at masks of the bus it names; the masks of the other two buses, and
// all six masks while 'apply' is low, are zero.  The selection is meant to
// stay constant for the five cycles of one operation.
// The contents are not reset: select only entries that have been written.
// The paper has the training scenarios kept in a fault injection storage
// and applied during learning; the entry format, the write port and the
// default depth (every single and double stuck-at fault on one 16-bit bus,
// 2*16 + 4*120 = 512) are this design's own choices.
module fault_injection_storage
  import ftealu_pkg::*;
#(
  parameter int unsigned WIDTH = 16,
  parameter int unsigned DEPTH = 512
) (
  input  logic                     clk,
  // scenario write port
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] waddr,
  input  fault_site_e              wsite,
  input  logic [WIDTH:0]           wsa0,
  input  logic [WIDTH:0]           wsa1,
  // scenario application
  input  logic                     apply,
  input  logic [$clog2(DEPTH)-1:0] sel,
  output logic [WIDTH:0]           fa_sa0,
  output logic [WIDTH:0]           fa_sa1,
  output logic [WIDTH:0]           fb_sa0,
  output logic [WIDTH:0]           fb_sa1,
  output logic [WIDTH:0]           fy_sa0,
  output logic [WIDTH:0]           fy_sa1
);

  typedef struct packed {
    fault_site_e    site;
    logic [WIDTH:0] sa0;
    logic [WIDTH:0] sa1;
  } scenario_t;

  scenario_t mem [DEPTH];
  scenario_t cur;

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= '{site: wsite, sa0: wsa0, sa1: wsa1};
  end

  always_comb begin
    cur    = mem[sel];
    fa_sa0 = '0;  fa_sa1 = '0;
    fb_sa0 = '0;  fb_sa1 = '0;
    fy_sa0 = '0;  fy_sa1 = '0;
    if (apply) begin
      unique case (cur.site)
        SITE_A:  begin fa_sa0 = cur.sa0;  fa_sa1 = cur.sa1; end
        SITE_B:  begin fb_sa0 = cur.sa0;  fb_sa1 = cur.sa1; end
        SITE_Y:  begin fy_sa0 = cur.sa0;  fy_sa1 = cur.sa1; end
        default: ;
      endcase
    end
  end

endmodule
