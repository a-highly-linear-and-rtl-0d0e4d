// tb_sync_generator: drives the Low Scale count through several periods and
// checks that Sync is high for exactly the first three counts of each period,
// one clock late, and that the enable forces it low.
module tb_sync_generator;
  timeunit 1ps;
  timeprecision 1fs;

  logic clk = 1'b0, rst_n = 1'b0, en = 1'b1, sync;
  logic [2:0] low = '0;
  int checks = 0, failures = 0, rises = 0;
  logic prev_sync = 1'b0;

  sync_generator #(.W(3), .HIGH_SLOTS(3)) dut (.clk, .rst_n, .en, .low, .sync);

  always #833.333 clk = ~clk;

  initial begin
    logic [2:0] last_low;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 60; i++) begin
      last_low = low;
      if (i == 40) en = 1'b0;
      @(posedge clk);
      #1;
      checks++;
      if (sync !== ((i < 40) && (last_low < 3))) begin
        failures++;
        $display("FAIL cycle %0d low=%0d sync=%0d", i, last_low, sync);
      end
      if (sync && !prev_sync) rises++;
      prev_sync = sync;
      low = (low == 5) ? 3'd0 : low + 1'b1;
    end
    checks++;
    if (rises != 7) begin
      failures++;
      $display("FAIL expected 7 Sync pulses, saw %0d", rises);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1us;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
