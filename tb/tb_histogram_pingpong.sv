// tb_histogram_pingpong: a 40-bin, 4-bit histogram pair with random events
// (including runs on one bin, to exercise the read-modify-write forwarding
// and saturation) and a randomly stalling stream consumer.  Every event is
// also counted in a reference histogram tagged with the integration frame it
// fell in; each frame read back must equal its reference exactly, frames must
// alternate between A and B, and holding the consumer off must raise overrun
// without losing events.
module tb_histogram_pingpong;
  timeunit 1ps;
  timeprecision 1fs;

  localparam int BINS = 40, W = 4, AW = 6, INTEG = 200, NFR = 12;

  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid = 1'b0;
  logic [AW-1:0] in_bin = '0;
  logic m_valid, m_ready = 1'b0, m_user, m_last, m_hist_b;
  logic [31:0] m_data;
  logic active_b, ready, swap, overrun;
  logic [31:0] integ_cycles = INTEG;
  int checks = 0, failures = 0;

  int ref_h [NFR][BINS];
  int frame = 0;          // frame being accumulated
  int rx_frame = 0, rx_bin = 0, n_sat = 0, n_b2b = 0;
  bit last_b, stall_done = 0;

  histogram_pingpong #(.BINS(BINS), .W(W), .AW(AW), .OUT_W(32)) dut (
    .clk, .rst_n, .integ_cycles, .in_valid, .in_bin, .m_valid, .m_ready,
    .m_data, .m_user, .m_last, .m_hist_b, .active_b, .ready, .swap, .overrun);

  always #833.333 clk = ~clk;

  // Reference: an event presented in a clock counts in the frame that is
  // active in that clock (a swap pulse marks the first clock of a new frame).
  always @(posedge clk) begin
    if (rst_n && ready) begin
      if (swap) frame++;
      if (in_valid && frame < NFR) ref_h[frame][in_bin]++;
    end
  end

  // Stimulus
  initial begin
    for (int f = 0; f < NFR; f++) for (int b = 0; b < BINS; b++) ref_h[f][b] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    wait (ready);
    while (frame < NFR - 2) begin
      @(negedge clk);
      if ($urandom_range(0, 3) == 0) begin
        in_valid = 1'b1;
        if (frame == 2) begin in_bin = 6'd7; n_b2b++; end   // saturate bin 7
        else if ($urandom_range(0, 2) == 0) n_b2b++;         // repeat bin
        else in_bin = AW'($urandom_range(0, BINS - 1));
      end else in_valid = 1'b0;
    end
    @(negedge clk) in_valid = 1'b0;
  end

  // Consumer with random stalls; stops completely for 600 clocks in frame 6.
  int stall_cnt = 0;
  always @(negedge clk) m_ready <= (frame == 6 && !stall_done) ? 1'b0 : ($urandom_range(0, 3) != 0);
  always @(posedge clk) if (frame == 6 && ++stall_cnt > 600) stall_done <= 1;

  always @(posedge clk) begin
    if (m_valid && m_ready && rst_n) begin
      int exp;
      exp = ref_h[rx_frame][rx_bin] > 15 ? 15 : ref_h[rx_frame][rx_bin];
      if (rx_frame == 2 && rx_bin == 7 && exp == 15) n_sat++;
      checks++;
      if (m_data !== 32'(exp) || m_user !== (rx_bin == 0) || m_last !== (rx_bin == BINS - 1)) begin
        failures++;
        $display("FAIL frame %0d bin %0d: got %0d exp %0d user=%0d last=%0d",
                 rx_frame, rx_bin, m_data, exp, m_user, m_last);
      end
      if (rx_bin == 0) begin
        checks++;
        if (rx_frame > 0 && m_hist_b == last_b) begin
          failures++; $display("FAIL frames do not alternate between A and B");
        end
        last_b = m_hist_b;
      end
      if (rx_bin == BINS - 1) begin rx_bin = 0; rx_frame++; end
      else rx_bin++;
      if (rx_frame == NFR - 3) begin
        checks++;
        if (!overrun) begin failures++; $display("FAIL overrun never flagged"); end
        checks++;
        if (n_sat == 0 || n_b2b == 0) begin failures++; $display("FAIL saturation not reached"); end
        $display("frames=%0d saturated=%0d repeats=%0d", rx_frame, n_sat, n_b2b);
        $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
        $finish;
      end
    end
  end

  initial begin
    #20us;
    failures++;
    $display("watchdog expired at frame %0d", rx_frame);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
