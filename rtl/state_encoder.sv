// state_encoder: the states-based Encoder.
//
// The encoder holds a table of real TDL states, each with the group number
// (fine code) it belongs to.  A sampled state is compared with every valid
// entry at once; the code of the matching entry is the fine code.  A state
// that is in no entry is a missing code: it is reported with hit = 0 and is
// not recorded.  Several entries may carry the same code, which is how the
// bin configuration merges neighbouring states into one group.
//
// The table is filled by the processor after the states have been collected
// and configured (write port: cfg_we with an entry address, the state
// pattern, its code and a valid bit).  In the paper the configuration is
// compiled into the FPGA; a writable table is this design's choice so that a
// new time resolution needs no rebuild.  ENTRIES (1024) is also this design's
// choice: the paper gives the 448-bit state and the 10-bit code but not how
// many states it keeps.  If two entries match, the lowest address wins.
//
// Pipeline: stage 1 registers the match vector, stage 2 the code, so out_*
// follows in_valid by two clocks.  SIDE_W bits of side data (the coarse
// counts) travel along.  Reset clears the valid bits only.
module state_encoder
  import tdc_pkg::*;
#(
  parameter int unsigned SW      = STATE_W,
  parameter int unsigned ENTRIES = ENC_ENTRIES,
  parameter int unsigned CODE_W  = FINE_W,
  parameter int unsigned SIDE_W  = 2 * COARSE_W,
  parameter int unsigned AW      = $clog2(ENTRIES)
) (
  input  logic              clk,
  input  logic              rst_n,
  // table write port
  input  logic              cfg_we,
  input  logic [AW-1:0]     cfg_addr,
  input  logic [SW-1:0]     cfg_state,
  input  logic [CODE_W-1:0] cfg_code,
  input  logic              cfg_valid,
  // lookup
  input  logic              in_valid,
  input  logic [SW-1:0]     in_state,
  input  logic [SIDE_W-1:0] in_side,
  output logic              out_valid,
  output logic              out_hit,
  output logic [CODE_W-1:0] out_code,
  output logic [SIDE_W-1:0] out_side
);
  timeunit 1ps;
  timeprecision 1fs;

  logic [SW-1:0]     tab_state [ENTRIES];
  logic [CODE_W-1:0] tab_code  [ENTRIES];
  logic [ENTRIES-1:0] tab_valid;

  logic               s1_valid;
  logic [ENTRIES-1:0] s1_match;
  logic [SIDE_W-1:0]  s1_side;

  // Table contents (no reset: only the valid bits need one).
  always_ff @(posedge clk) begin
    if (cfg_we) begin
      tab_state[cfg_addr] <= cfg_state;
      tab_code[cfg_addr]  <= cfg_code;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      tab_valid <= '0;
    else if (cfg_we) tab_valid[cfg_addr] <= cfg_valid;
  end

  // Stage 1: compare against every entry.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid <= 1'b0;
      s1_match <= '0;
      s1_side  <= '0;
    end else begin
      s1_valid <= in_valid;
      if (in_valid) begin
        s1_side <= in_side;
        for (int e = 0; e < ENTRIES; e++)
          s1_match[e] <= tab_valid[e] && (tab_state[e] == in_state);
      end
    end
  end

  // Stage 2: lowest matching entry gives the code.
  logic              hit_c;
  logic [CODE_W-1:0] code_c;
  always_comb begin
    hit_c  = 1'b0;
    code_c = '0;
    for (int e = ENTRIES - 1; e >= 0; e--) begin
      if (s1_match[e]) begin
        hit_c  = 1'b1;
        code_c = tab_code[e];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_hit   <= 1'b0;
      out_code  <= '0;
      out_side  <= '0;
    end else begin
      out_valid <= s1_valid;
      if (s1_valid) begin
        out_hit  <= hit_c;
        out_code <= code_c;
        out_side <= s1_side;
      end
    end
  end
endmodule
