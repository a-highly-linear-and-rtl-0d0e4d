// timestamp_calc: Timestamp = Coarse Code + Fine Code, as a histogram bin.
//
// Input is one encoded Stop event: the fine code (the configured group of the
// sampled TDL state, 0..n_groups-1), whether the encoder knew the state
// (fine_hit), and the Low and High Scale counts sampled by the same Stop.
//
// Choosing the stable coarse count.  The Low Scale steps a quarter Start
// period after the Start edge, the High Scale three quarters after it.  Fine
// codes below n_groups/2 lie in the first half of the Start period, where the
// Low Scale may be changing but the High Scale is stable and still holds the
// previous count, so coarse = high + 1.  Fine codes in the second half use
// coarse = low.  Each choice keeps a quarter period of margin.
//
// The bin is (coarse - 1) * n_groups + fine, so coarse codes 1..coarse_limit
// (5 by default, 5 x 1.667 ns = 8.33 ns) are laid end to end in the
// histogram.  An event is dropped and flagged when the state was unknown
// (missing code), when the coarse code is 0 or above coarse_limit, or when the
// bin would not fit in the 1200-bin histogram.
//
// The paper gives the sum of coarse and fine code and the race-avoiding pair of
// counters; the selection rule, the 1-based coarse numbering and the drop
// rules are this design's.  Latency: one clock.
module timestamp_calc
  import tdc_pkg::*;
#(
  parameter int unsigned FW     = FINE_W,
  parameter int unsigned CW     = COARSE_W,
  parameter int unsigned BW     = BIN_W,
  parameter int unsigned PERIOD = COARSE_PERIOD,
  parameter int unsigned BINS   = HIST_BINS
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [FW-1:0] n_groups,
  input  logic [CW-1:0] coarse_limit,
  input  logic          in_valid,
  input  logic          fine_hit,
  input  logic [FW-1:0] fine,
  input  logic [CW-1:0] low,
  input  logic [CW-1:0] high,
  output logic          bin_valid,
  output logic [BW-1:0] bin,
  output logic [CW-1:0] coarse,     // coarse code of the last event
  output logic          miss,       // state not in the encoder
  output logic          out_of_range
);
  timeunit 1ps;
  timeprecision 1fs;

  localparam int unsigned PW = FW + CW + 1;

  logic          first_half;
  logic [CW-1:0] high_next, coarse_c;
  logic [PW-1:0] bin_wide;
  logic          range_ok;

  always_comb begin
    first_half = fine < (n_groups >> 1);
    high_next  = (high == CW'(PERIOD - 1)) ? '0 : high + 1'b1;
    coarse_c   = first_half ? high_next : low;
    bin_wide   = PW'(coarse_c - 1'b1) * PW'(n_groups) + PW'(fine);
    range_ok   = (coarse_c != '0) && (coarse_c <= coarse_limit)
                 && (bin_wide < PW'(BINS));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bin_valid    <= 1'b0;
      bin          <= '0;
      coarse       <= '0;
      miss         <= 1'b0;
      out_of_range <= 1'b0;
    end else begin
      bin_valid    <= in_valid && fine_hit && range_ok;
      miss         <= in_valid && !fine_hit;
      out_of_range <= in_valid && fine_hit && !range_ok;
      if (in_valid) begin
        bin    <= BW'(bin_wide);
        coarse <= coarse_c;
      end
    end
  end
endmodule
