// tb_coarse_counter: checks that the Low Scale counts clock cycles modulo 6
// on the rising edge and that the High Scale holds the same count, taken on
// the falling edge half a cycle later.  A reference counter in the testbench
// gives the expected values.
module tb_coarse_counter;
  timeunit 1ps;
  timeprecision 1fs;

  logic clk = 1'b0, rst_n = 1'b0;
  logic [2:0] low, high;
  int checks = 0, failures = 0;
  int ref_cnt;

  coarse_counter #(.PERIOD(6), .W(3)) dut (.clk, .rst_n, .low, .high);

  always #833.333 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s (low=%0d high=%0d ref=%0d)", what, low, high, ref_cnt);
    end
  endtask

  initial begin
    #5000;
    check(low == 0 && high == 0, "reset value");
    @(negedge clk) rst_n = 1'b1;
    ref_cnt = 0;
    for (int i = 0; i < 40; i++) begin
      @(posedge clk);
      #1;
      ref_cnt = (ref_cnt + 1) % 6;
      check(low == 3'(ref_cnt), "low after rising edge");
      check(high == 3'((ref_cnt + 5) % 6), "high still old value mid-cycle");
      @(negedge clk);
      #1;
      check(high == 3'(ref_cnt), "high after falling edge");
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
