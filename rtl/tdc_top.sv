// tdc_top: programmable-logic part of the states-based time-to-digital
// converter (coarse/fine code, histograms and output stream).
//
// Clocks, all from the clock manager outside this module: 'start' is the
// 600 MHz Start clock that runs into the tapped delay line, 'clk' is the same
// clock shifted by 90 degrees and clocks everything else.  The Stop edge comes
// either from the Stop pin (stop_ext, e.g. a single-photon detector) or from
// the clock manager's phase-shifted 100 MHz output (stop_int, for time
// interval tests), chosen by stop_sel (the switch in front of the coarse
// counters; on an FPGA a clock multiplexer).
//
// Data path: the TDL samples Start at each Stop edge; stop_capture moves the
// state and the Low/High Scale counts into the clk domain.  In step 1
// (step = STEP_STATES) the raw states go to state_collector and out on the
// stream, for the processor and PC to order and configure.  In step 2
// (STEP_HISTOGRAM) the state_encoder turns each state into a fine code,
// timestamp_calc adds the coarse code and gives a bin, and histogram_pingpong
// counts it in histogram A or B and streams the finished one out.  The Sync
// output is a trigger derived from the Low Scale counter.
//
// The output stream is AXI4-Stream style (valid/ready, tuser = first word,
// tlast = last word), meant for a video DMA.  Change 'step' only while the
// stream is idle.  Each converted event (evt_bin with its bin number and
// coarse code, plus miss and out_of_range pulses) and histogram status are
// brought out for the processor.
//
// The block structure follows the paper's block diagram; clocking of the back
// end by the Start-90 clock, the clock crossing and the stream format are this
// design's choices.
module tdc_top
  import tdc_pkg::*;
#(
  parameter int unsigned P_N_CLB       = N_CLB,
  parameter int unsigned P_ENC_ENTRIES = ENC_ENTRIES,
  parameter int unsigned P_HIST_BINS   = HIST_BINS,
  parameter int unsigned P_PERIOD      = COARSE_PERIOD,
  parameter real         P_CHAIN_PS    = TDL_LENGTH_PS,
  parameter int unsigned P_SEED        = 7,
  parameter int unsigned SW            = P_N_CLB * BITS_PER_CLB,
  parameter int unsigned EAW           = $clog2(P_ENC_ENTRIES),
  parameter int unsigned HBW           = $clog2(P_HIST_BINS)
) (
  input  logic              start,
  input  logic              clk,
  input  logic              rst_n,
  input  logic              stop_ext,
  input  logic              stop_int,
  input  logic              stop_sel,    // 1: internal phase-shifted Stop
  input  logic              step,        // tdc_step_e
  input  logic              sync_en,
  input  tdc_cfg_t          cfg,
  // encoder table write port
  input  logic              enc_we,
  input  logic [EAW-1:0]    enc_addr,
  input  logic [SW-1:0]     enc_state,
  input  logic [FINE_W-1:0] enc_code,
  input  logic              enc_valid,
  // outputs
  output logic              sync,
  output logic              m_valid,
  input  logic              m_ready,
  output logic [DATA_W-1:0] m_data,
  output logic              m_user,
  output logic              m_last,
  output logic              m_hist_b,
  // status
  output logic              evt_capture,
  output logic              evt_bin,
  output logic [HBW-1:0]    evt_bin_index,   // bin of the event flagged by evt_bin
  output logic [COARSE_W-1:0] evt_coarse,    // its selected coarse code
  output logic              evt_miss,
  output logic              evt_out_of_range,
  output logic              states_dropped,
  output logic              hist_active_b,
  output logic              hist_ready,
  output logic              hist_swap,
  output logic              hist_overrun
);
  timeunit 1ps;
  timeprecision 1fs;

  logic                stop;
  logic [SW-1:0]       tdl_d;
  logic [COARSE_W-1:0] low, high;

  assign stop = stop_sel ? stop_int : stop_ext;

  tdl_carry_chain #(
    .N_CLB(P_N_CLB), .BITS_PER_CLB(BITS_PER_CLB),
    .CHAIN_PS(P_CHAIN_PS), .SEED(P_SEED)
  ) u_tdl (
    .start, .stop, .d(tdl_d)
  );

  coarse_counter #(.PERIOD(P_PERIOD), .W(COARSE_W)) u_coarse (
    .clk, .rst_n, .low, .high
  );

  sync_generator #(.W(COARSE_W), .HIGH_SLOTS(P_PERIOD / 2)) u_sync (
    .clk, .rst_n, .en(sync_en), .low, .sync
  );

  logic                cap_valid;
  logic [SW-1:0]       cap_state;
  logic [COARSE_W-1:0] cap_low, cap_high;

  stop_capture #(.SW(SW), .CW(COARSE_W)) u_cap (
    .clk, .rst_n, .stop, .tdl_state(tdl_d), .low, .high,
    .out_valid(cap_valid), .out_state(cap_state),
    .out_low(cap_low), .out_high(cap_high)
  );

  assign evt_capture = cap_valid;

  // ---- step 1: raw states ----
  logic              st_valid, st_user, st_last;
  logic [DATA_W-1:0] st_data;

  state_collector #(.SW(SW), .OUT_W(DATA_W)) u_states (
    .clk, .rst_n,
    .in_valid(cap_valid && step == STEP_STATES), .in_state(cap_state),
    .m_valid(st_valid), .m_ready(m_ready && step == STEP_STATES),
    .m_data(st_data), .m_user(st_user), .m_last(st_last),
    .dropped(states_dropped)
  );

  // ---- step 2: encode, timestamp, histogram ----
  logic                  enc_out_valid, enc_hit;
  logic [FINE_W-1:0]     enc_fine;
  logic [2*COARSE_W-1:0] enc_side;

  state_encoder #(
    .SW(SW), .ENTRIES(P_ENC_ENTRIES), .CODE_W(FINE_W), .SIDE_W(2*COARSE_W)
  ) u_enc (
    .clk, .rst_n,
    .cfg_we(enc_we), .cfg_addr(enc_addr), .cfg_state(enc_state),
    .cfg_code(enc_code), .cfg_valid(enc_valid),
    .in_valid(cap_valid && step == STEP_HISTOGRAM), .in_state(cap_state),
    .in_side({cap_high, cap_low}),
    .out_valid(enc_out_valid), .out_hit(enc_hit), .out_code(enc_fine),
    .out_side(enc_side)
  );

  logic [HBW-1:0]      ts_bin;
  logic [COARSE_W-1:0] ts_coarse;

  assign evt_bin_index = ts_bin;
  assign evt_coarse    = ts_coarse;

  timestamp_calc #(
    .FW(FINE_W), .CW(COARSE_W), .BW(HBW), .PERIOD(P_PERIOD), .BINS(P_HIST_BINS)
  ) u_ts (
    .clk, .rst_n, .n_groups(cfg.n_groups), .coarse_limit(cfg.coarse_limit),
    .in_valid(enc_out_valid), .fine_hit(enc_hit), .fine(enc_fine),
    .low(enc_side[COARSE_W-1:0]), .high(enc_side[2*COARSE_W-1:COARSE_W]),
    .bin_valid(evt_bin), .bin(ts_bin), .coarse(ts_coarse),
    .miss(evt_miss), .out_of_range(evt_out_of_range)
  );

  logic              h_valid, h_user, h_last, h_b;
  logic [DATA_W-1:0] h_data;

  histogram_pingpong #(.BINS(P_HIST_BINS), .W(HIST_W), .AW(HBW), .OUT_W(DATA_W)) u_hist (
    .clk, .rst_n, .integ_cycles(cfg.integ_cycles),
    .in_valid(evt_bin), .in_bin(ts_bin),
    .m_valid(h_valid), .m_ready(m_ready && step == STEP_HISTOGRAM),
    .m_data(h_data), .m_user(h_user), .m_last(h_last), .m_hist_b(h_b),
    .active_b(hist_active_b), .ready(hist_ready), .swap(hist_swap),
    .overrun(hist_overrun)
  );

  // ---- output stream ----
  always_comb begin
    if (step == STEP_HISTOGRAM) begin
      m_valid = h_valid; m_data = h_data; m_user = h_user; m_last = h_last;
      m_hist_b = h_b;
    end else begin
      m_valid = st_valid; m_data = st_data; m_user = st_user; m_last = st_last;
      m_hist_b = 1'b0;
    end
  end
endmodule
