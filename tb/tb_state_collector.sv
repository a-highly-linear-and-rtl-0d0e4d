// tb_state_collector: sends random 448-bit states, some in bursts that
// overflow the 4-state FIFO, and reads them back with a stalling consumer.
// Each state must come out as 14 words, low word first, tuser on the first
// and tlast on the last; states that were accepted must come out in order,
// and every state offered while the FIFO was full must be flagged dropped.
module tb_state_collector;
  timeunit 1ps;
  timeprecision 1fs;

  logic clk = 1'b0, rst_n = 1'b0, in_valid = 1'b0;
  logic [447:0] in_state;
  logic m_valid, m_ready = 1'b0, m_user, m_last, dropped;
  logic [31:0] m_data;
  int checks = 0, failures = 0, n_drop = 0, n_sent = 0, n_rx = 0, word = 0;
  logic [447:0] q [$];
  logic [447:0] cur;

  state_collector #(.SW(448), .OUT_W(32), .DEPTH(4)) dut (
    .clk, .rst_n, .in_valid, .in_state, .m_valid, .m_ready, .m_data, .m_user,
    .m_last, .dropped);

  always #833.333 clk = ~clk;

  int fifo_model = 0;   // states held by the DUT (reference occupancy)
  bit drop_prev = 0;

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 120; i++) begin
      @(negedge clk);
      if ($urandom_range(0, (i < 40) ? 1 : 12) == 0) begin
        in_valid = 1'b1;
        for (int w = 0; w < 14; w++) in_state[w*32 +: 32] = $urandom;
      end else in_valid = 1'b0;
    end
    @(negedge clk) in_valid = 1'b0;
    repeat (400) @(negedge clk);
    checks++;
    if (n_rx != n_sent || n_drop == 0) begin
      failures++;
      $display("FAIL sent %0d received %0d dropped %0d", n_sent, n_rx, n_drop);
    end
    $display("accepted=%0d received=%0d dropped=%0d", n_sent, n_rx, n_drop);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) m_ready <= ($urandom_range(0, 2) != 0);

  always @(posedge clk) begin
    if (rst_n) begin
      // the dropped flag follows a refused state by one clock
      checks++;
      if (dropped !== drop_prev) begin failures++; $display("FAIL dropped flag"); end
      drop_prev = in_valid && fifo_model >= 4;
      if (in_valid) begin
        if (fifo_model < 4) begin
          q.push_back(in_state); fifo_model++; n_sent++;
        end else n_drop++;
      end
      if (m_valid && m_ready) begin
        if (word == 0) cur = q[0];
        checks++;
        if (m_data !== cur[word*32 +: 32] || m_user !== (word == 0) || m_last !== (word == 13)) begin
          failures++;
          $display("FAIL state %0d word %0d", n_rx, word);
        end
        if (word == 13) begin word = 0; void'(q.pop_front()); fifo_model--; n_rx++; end
        else word++;
      end
    end
  end

  initial begin
    #5us;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
