// tb_tdl_carry_chain: samples the delay-line model at Stop phases swept
// across whole Start periods and checks what a half-period carry chain must
// show: every tap set shortly after the rising edge has passed the whole line,
// every tap clear after the falling edge has, exactly one of the two edges in
// the line otherwise, Seq (the number of set taps) never decreasing while the
// rising edge runs down the line and never increasing while the falling edge
// does, and at least some states that are not clean thermometer codes
// (bubbles).
module tb_tdl_carry_chain;
  timeunit 1ps;
  timeprecision 1fs;

  localparam real T = 1666.667;
  localparam int NT = 448;

  logic start = 1'b0, stop = 1'b0;
  logic [NT-1:0] d;
  int checks = 0, failures = 0, n_bubble = 0, n_states = 0;

  tdl_carry_chain dut (.start, .stop, .d);

  always #(T / 2) start = ~start;

  function automatic bit is_thermo(input logic [NT-1:0] s);
    int changes = 0;
    for (int j = 1; j < NT; j++) if (s[j] != s[j-1]) changes++;
    return changes <= 1;
  endfunction

  initial begin
    int prev_seq;
    logic [NT-1:0] prev_d;
    realtime t0;
    prev_d = '0;
    // align to a rising edge of Start after a few cycles
    repeat (4) @(posedge start);
    for (int p = 0; p < 2; p++) begin
      prev_seq = -1;
      for (int s = 0; s < 400; s++) begin
        real phi_ps;
        int seq;
        @(posedge start);
        t0 = $realtime;
        phi_ps = (s * T) / 400.0;
        #(phi_ps);
        stop = 1'b1;
        #10 stop = 1'b0;
        #1;
        seq = $countones(d);
        if (d != prev_d) n_states++;
        prev_d = d;
        if (!is_thermo(d)) n_bubble++;
        checks++;
        if (phi_ps > 850.0 && phi_ps < T / 2 - 1.0 && d != '1) begin
          failures++; $display("FAIL phase %f: expected all ones", phi_ps);
        end
        if (phi_ps > T / 2 + 850.0 && d != '0) begin
          failures++; $display("FAIL phase %f: expected all zeros", phi_ps);
        end
        checks++;
        if (phi_ps > 20.0 && phi_ps < 800.0 && (d[0] != 1'b1 || d[NT-1] != 1'b0)) begin
          failures++; $display("FAIL phase %f: rising edge not inside the line", phi_ps);
        end
        if (phi_ps > T / 2 + 20.0 && phi_ps < T / 2 + 800.0 && (d[0] != 1'b0 || d[NT-1] != 1'b1)) begin
          failures++; $display("FAIL phase %f: falling edge not inside the line", phi_ps);
        end
        checks++;
        if (prev_seq >= 0) begin
          if (phi_ps < T / 2 && phi_ps > 0.0 && seq < prev_seq) begin
            failures++; $display("FAIL Seq fell from %0d to %0d at %f", prev_seq, seq, phi_ps);
          end
          if (phi_ps > T / 2 + 1.0 && seq > prev_seq) begin
            failures++; $display("FAIL Seq rose from %0d to %0d at %f", prev_seq, seq, phi_ps);
          end
        end
        prev_seq = seq;
      end
    end
    checks++;
    if (n_bubble == 0) begin failures++; $display("FAIL no bubbles produced"); end
    $display("distinct consecutive states=%0d bubble states=%0d", n_states, n_bubble);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #5us;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
