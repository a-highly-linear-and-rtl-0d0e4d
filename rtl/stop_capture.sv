// stop_capture: hands a Stop event from the Stop clock domain to the
// converter clock.
//
// The TDL flip-flops are clocked by Stop; in the same edge this block samples
// the Low and High Scale coarse counts and toggles an event flag.  The flag
// crosses into the clk domain through two flip-flops; when its change is
// seen, the held TDL state and the counts are copied into clk-domain
// registers and out_valid pulses for one clock.  The TDL outputs and the
// sampled counts stay unchanged until the next Stop, so they are stable when
// copied.
//
// Timing: out_valid follows the Stop edge by three to four clk cycles.  Stop
// edges must be at least four clk cycles (6.7 ns at 600 MHz) apart; the
// paper's 100 MHz Stop gives six.  The paper does not describe this clock
// crossing; it is this design's own.
module stop_capture #(
  parameter int unsigned SW = 448,
  parameter int unsigned CW = 3
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          stop,
  input  logic [SW-1:0] tdl_state,   // held by the TDL flip-flops
  input  logic [CW-1:0] low,
  input  logic [CW-1:0] high,
  output logic          out_valid,
  output logic [SW-1:0] out_state,
  output logic [CW-1:0] out_low,
  output logic [CW-1:0] out_high
);
  timeunit 1ps;
  timeprecision 1fs;

  logic          flag;
  logic [CW-1:0] stop_low, stop_high;
  logic [2:0]    flag_sync;

  always_ff @(posedge stop or negedge rst_n) begin
    if (!rst_n) begin
      flag      <= 1'b0;
      stop_low  <= '0;
      stop_high <= '0;
    end else begin
      flag      <= !flag;
      stop_low  <= low;
      stop_high <= high;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      flag_sync <= '0;
      out_valid <= 1'b0;
      out_state <= '0;
      out_low   <= '0;
      out_high  <= '0;
    end else begin
      flag_sync <= {flag_sync[1:0], flag};
      out_valid <= flag_sync[2] ^ flag_sync[1];
      if (flag_sync[2] ^ flag_sync[1]) begin
        out_state <= tdl_state;
        out_low   <= stop_low;
        out_high  <= stop_high;
      end
    end
  end
endmodule
