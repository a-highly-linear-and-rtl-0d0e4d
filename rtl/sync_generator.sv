// sync_generator: the Sync output trigger.
//
// Sync is a periodic pulse, one per coarse-counter period (100 MHz with the
// default 6 Start cycles), meant to fire an external device such as a laser
// driver so that photon arrivals are timed from it.  It is derived from the
// Low Scale counter: Sync is high while the counter is below HIGH_SLOTS and
// is registered, so it rises one clock after the counter wraps to 0 and stays
// high for HIGH_SLOTS Start cycles.
//
// The paper gives Sync's purpose and that it is made from the coarse counter
// and Start; the duty cycle (half a period) and the register are this
// design's choice.  The enable input holds Sync low.
module sync_generator #(
  parameter int unsigned W          = 3,
  parameter int unsigned HIGH_SLOTS = 3
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         en,
  input  logic [W-1:0] low,     // Low Scale coarse count
  output logic         sync
);
  timeunit 1ps;
  timeprecision 1fs;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) sync <= 1'b0;
    else        sync <= en && (low < W'(HIGH_SLOTS));
  end
endmodule
