// tdc_pkg: sizes and shared types of the states-based FPGA time-to-digital
// converter.
//
// The converter samples a 600 MHz Start clock in a half-period tapped delay
// line (28 carry-chain blocks, 16 sampled bits each = 448 bits) when a Stop
// edge arrives.  The sampled "real state" is looked up in a programmable
// encoder that returns a 10-bit fine code (the configured bin of that state),
// a coarse count of Start cycles is added, and the resulting bin is counted in
// one of two interleaved 1200 x 16-bit histograms.
//
// Numbers taken from the paper: 28 CLBs, 16 bits per CLB, 10-bit fine code,
// 1200 bins of 16 bits, 600 MHz Start and 100 MHz Stop (6 Start cycles per
// Stop period).  The 32-bit output stream width and the encoder depth are
// choices of this design.
package tdc_pkg;
  timeunit 1ps;
  timeprecision 1fs;

  localparam int unsigned N_CLB         = 28;    // CLBs in the half-sized TDL
  localparam int unsigned BITS_PER_CLB  = 16;    // 8 O + 8 CO taps per CARRY8
  localparam int unsigned STATE_W       = N_CLB * BITS_PER_CLB;  // 448
  localparam int unsigned FINE_W        = 10;    // encoder output width
  localparam int unsigned ENC_ENTRIES   = 1024;  // states the encoder can hold
  localparam int unsigned HIST_BINS     = 1200;  // bins per histogram
  localparam int unsigned HIST_W        = 16;    // bits per bin
  localparam int unsigned BIN_W         = 11;    // $clog2(HIST_BINS)
  localparam int unsigned COARSE_PERIOD = 6;     // Start cycles per 100 MHz period
  localparam int unsigned COARSE_W      = 3;     // $clog2(COARSE_PERIOD)
  localparam int unsigned DATA_W        = 32;    // output stream word

  // Start clock: 600 MHz; the TDL covers half a period (833.5 ps).
  localparam real START_PERIOD_PS = 1666.667;
  localparam real TDL_LENGTH_PS   = 833.5;

  // Two operating steps of the converter.
  typedef enum logic {
    STEP_STATES    = 1'b0,  // step 1: stream raw TDL states out
    STEP_HISTOGRAM = 1'b1   // step 2: encode, histogram, stream histograms
  } tdc_step_e;

  // Run-time settings written by the processor.
  typedef struct packed {
    logic [FINE_W-1:0]   n_groups;      // groups (bins) per Start period, N
    logic [COARSE_W-1:0] coarse_limit;  // highest coarse code recorded (1..5)
    logic [31:0]         integ_cycles;  // histogram integration time, clk cycles
  } tdc_cfg_t;

  // One word of an AXI4-Stream style output (tuser = start of frame).
  typedef struct packed {
    logic [DATA_W-1:0] tdata;
    logic              tuser;
    logic              tlast;
  } stream_word_t;
endpackage
