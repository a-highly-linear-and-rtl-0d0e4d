// coarse_counter: the Low Scale and High Scale coarse counters.
//
// Both count Start cycles modulo PERIOD (6 cycles of 600 MHz = one 100 MHz
// period).  The module is clocked by the Start-90-degree clock: the Low
// Scale steps on its rising edge (a quarter Start period after the Start
// edge) and the High Scale takes the Low value on the falling edge, half a
// Start period later.  A Stop edge therefore always finds at least one of the
// two counters far from its own transition, and timestamp_calc uses that one,
// which avoids the sampling race between Stop and the coarse count.
//
// The paper gives the two interleaved counters and their 90-degree offset;
// making the High Scale a half-cycle delayed copy of the Low Scale (rather
// than an independent counter) is this design's choice, so both can never
// drift apart.  Value 0 is the slot that precedes the recorded range (the
// unlabelled slot in front of counts 1..5 in the paper's timing diagram).
//
// Timing: low changes on posedge clk, high on negedge clk; asynchronous
// active-low reset clears both.
module coarse_counter #(
  parameter int unsigned PERIOD = 6,
  parameter int unsigned W      = 3
) (
  input  logic         clk,      // Start shifted by 90 degrees
  input  logic         rst_n,
  output logic [W-1:0] low,
  output logic [W-1:0] high
);
  timeunit 1ps;
  timeprecision 1fs;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                  low <= '0;
    else if (low == W'(PERIOD - 1)) low <= '0;
    else                         low <= low + 1'b1;
  end

  always_ff @(negedge clk or negedge rst_n) begin
    if (!rst_n) high <= '0;
    else        high <= low;
  end
endmodule
