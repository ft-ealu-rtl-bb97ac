// weight_normalizer -- turns learned score sums into voter weights on chip.
//
// After learning, the score sums of all NVER x WIDTH (version, bit) pairs are
// scaled by min-max normalization, the first of the normalizations the
// paper compares:
//   w = round( 2**WFRAC * (s - min) / (max - min) )      in 0 .. 1.0
// where min and max are taken over all the sums.  The division of the sums
// by the scenario count N is left out because min-max scaling cancels it.
// If all sums are equal every weight becomes 1.0 (plain majority).
// Operation: a 'start' pulse while idle begins a scan of one score per cycle
// to find min and max (NVER*WIDTH cycles), then one weight per cycle is
// computed and written through the we/wver/widx/wdata port, which connects
// to weight_store (NVER*WIDTH cycles).  'busy' is high throughout and 'done'
// pulses once after the last write.  The scores must not change meanwhile.
// The paper's preferred z-score standardization is not built: the paper
// does not say over which values mean and deviation are taken or how
// signed results become weights.  The sequential scan and the single
// combinational divider are this design's own choices.
module weight_normalizer
  import ftealu_pkg::*;
#(
  parameter int unsigned WIDTH = 16,
  parameter int unsigned SW    = SW_DEF,
  parameter int unsigned WW    = WW_DEF,
  parameter int unsigned WFRAC = WFRAC_DEF
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start,
  input  logic signed [SW-1:0]     score [NVER][WIDTH],
  output logic                     busy,
  output logic                     done,
  output logic                     we,
  output logic [1:0]               wver,
  output logic [$clog2(WIDTH)-1:0] widx,
  output logic [WW-1:0]            wdata
);

  localparam int unsigned IW = $clog2(WIDTH);
  localparam int unsigned DW = SW + WFRAC + 2;   // numerator / quotient width

  typedef enum logic [1:0] {N_IDLE, N_SCAN, N_WRITE} nstate_e;

  nstate_e              state;
  logic [1:0]           ver;
  logic [IW-1:0]        idx;
  logic signed [SW-1:0] mn, mx, cur;
  logic [DW-1:0]        num, den, quo;
  logic                 last;

  assign cur  = score[ver][idx];
  assign last = (ver == 2'(NVER - 1)) && (32'(idx) == WIDTH - 1);

  // (s - min) * 2**WFRAC / (max - min), rounded to nearest
  always_comb begin
    den = DW'(unsigned'(SW'(mx - mn)));
    num = (DW'(unsigned'(SW'(cur - mn))) << WFRAC) + (den >> 1);
    quo = (den == '0) ? (DW'(1) << WFRAC) : num / den;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= N_IDLE;
      ver   <= '0;
      idx   <= '0;
      mn    <= '0;
      mx    <= '0;
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        N_IDLE: if (start) begin
          state <= N_SCAN;
          ver   <= '0;
          idx   <= '0;
          mn    <= score[0][0];
          mx    <= score[0][0];
        end
        N_SCAN: begin
          if (cur < mn) mn <= cur;
          if (cur > mx) mx <= cur;
          if (last) begin
            state <= N_WRITE;
            ver   <= '0;
            idx   <= '0;
          end else if (32'(idx) == WIDTH - 1) begin
            ver <= ver + 1'b1;
            idx <= '0;
          end else begin
            idx <= idx + 1'b1;
          end
        end
        N_WRITE: begin
          if (last) begin
            state <= N_IDLE;
            done  <= 1'b1;
          end else if (32'(idx) == WIDTH - 1) begin
            ver <= ver + 1'b1;
            idx <= '0;
          end else begin
            idx <= idx + 1'b1;
          end
        end
        default: state <= N_IDLE;
      endcase
    end
  end

  assign busy  = (state != N_IDLE);
  assign we    = (state == N_WRITE);
  assign wver  = ver;
  assign widx  = idx;
  assign wdata = WW'(quo);

endmodule
