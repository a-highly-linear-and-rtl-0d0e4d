// tb_timestamp_calc: feeds encoded events with known Stop phase and coarse
// period and checks the histogram bin, the drop flags and the one-clock
// latency.  The Low and High Scale values are generated from the Stop phase
// the way the hardware samples them (Low steps at a quarter period, High at
// three quarters); within 5% of a period of a counter's own step, that counter
// is given a random value, as a metastable sample might be.  The result must
// not depend on it.
module tb_timestamp_calc;
  timeunit 1ps;
  timeprecision 1fs;
  import tdc_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic [9:0] n_groups;
  logic [2:0] coarse_limit;
  logic in_valid = 1'b0, fine_hit;
  logic [9:0] fine;
  logic [2:0] low, high;
  logic bin_valid, miss, out_of_range;
  logic [10:0] bin;
  logic [2:0] coarse;
  int checks = 0, failures = 0;
  int n_race = 0, n_miss = 0, n_oor = 0, n_ok = 0;

  timestamp_calc dut (.clk, .rst_n, .n_groups, .coarse_limit, .in_valid,
    .fine_hit, .fine, .low, .high, .bin_valid, .bin, .coarse, .miss,
    .out_of_range);

  always #833.333 clk = ~clk;

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 4000; i++) begin
      int k, ng, lim, f, exp_bin;
      real phi;
      bit hit, exp_ok;
      ng  = (i % 3 == 0) ? 333 : ((i % 3 == 1) ? 38 : 166);
      lim = (ng == 333) ? 3 : 5;
      k   = $urandom_range(0, 5);            // true coarse code
      phi = real'($urandom_range(0, 9999)) / 10000.0;
      f   = int'($floor(phi * ng));
      hit = ($urandom_range(0, 19) != 0);
      // Low reads k once past 0.25, else k-1; High reads k once past 0.75.
      low  = 3'(phi >= 0.25 ? k : (k + 5) % 6);
      high = 3'(phi >= 0.75 ? k : (k + 5) % 6);
      if (phi > 0.20 && phi < 0.30) begin low  = 3'($urandom_range(0, 7)); n_race++; end
      if (phi > 0.70 && phi < 0.80) begin high = 3'($urandom_range(0, 7)); n_race++; end
      @(negedge clk);
      n_groups = 10'(ng); coarse_limit = 3'(lim);
      fine = 10'(f); fine_hit = hit; in_valid = 1'b1;
      @(negedge clk);
      in_valid = 1'b0;
      exp_bin = (k - 1) * ng + f;
      exp_ok  = hit && k >= 1 && k <= lim && exp_bin < 1200;
      checks++;
      if (bin_valid !== exp_ok || miss !== !hit || out_of_range !== (hit && !exp_ok)
          || (exp_ok && bin !== 11'(exp_bin))) begin
        failures++;
        $display("FAIL k=%0d phi=%f ng=%0d f=%0d hit=%0d: valid=%0d bin=%0d (exp %0d) miss=%0d oor=%0d",
                 k, phi, ng, f, hit, bin_valid, bin, exp_bin, miss, out_of_range);
      end
      if (!hit) n_miss++; else if (!exp_ok) n_oor++; else n_ok++;
      @(negedge clk);
      checks++;
      if (bin_valid || miss || out_of_range) begin
        failures++;
        $display("FAIL flags held longer than one clock");
      end
    end
    checks++;
    if (n_race == 0 || n_miss == 0 || n_oor == 0 || n_ok == 0) failures++;
    $display("race-window samples=%0d misses=%0d out-of-range=%0d recorded=%0d",
             n_race, n_miss, n_oor, n_ok);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100us;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
