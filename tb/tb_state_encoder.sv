// tb_state_encoder: programs a reduced encoder (64-bit states, 32 entries)
// with random states, several sharing a code, and looks up known, unknown and
// duplicated states.  A reference table in the testbench gives the expected
// hit and code (lowest matching entry wins); the result must appear exactly
// two clocks after the lookup, with its side data.
module tb_state_encoder;
  timeunit 1ps;
  timeprecision 1fs;

  localparam int SW = 64, ENTRIES = 32, AW = 5;

  logic clk = 1'b0, rst_n = 1'b0;
  logic cfg_we = 1'b0, cfg_valid = 1'b0, in_valid = 1'b0;
  logic [AW-1:0] cfg_addr;
  logic [SW-1:0] cfg_state, in_state;
  logic [9:0] cfg_code;
  logic [5:0] in_side;
  logic out_valid, out_hit;
  logic [9:0] out_code;
  logic [5:0] out_side;
  int checks = 0, failures = 0, n_hit = 0, n_miss = 0;

  logic [SW-1:0] ref_state [ENTRIES];
  logic [9:0]    ref_code  [ENTRIES];
  bit            ref_valid [ENTRIES];

  state_encoder #(.SW(SW), .ENTRIES(ENTRIES), .CODE_W(10), .SIDE_W(6)) dut (
    .clk, .rst_n, .cfg_we, .cfg_addr, .cfg_state, .cfg_code, .cfg_valid,
    .in_valid, .in_state, .in_side, .out_valid, .out_hit, .out_code, .out_side);

  always #833.333 clk = ~clk;

  task automatic write_entry(input int a, input logic [SW-1:0] s,
                             input logic [9:0] c, input bit v);
    @(negedge clk);
    cfg_we = 1'b1; cfg_addr = AW'(a); cfg_state = s; cfg_code = c; cfg_valid = v;
    ref_state[a] = s; ref_code[a] = c; ref_valid[a] = v;
    @(negedge clk);
    cfg_we = 1'b0;
  endtask

  initial begin
    for (int e = 0; e < ENTRIES; e++) ref_valid[e] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    // lookup with an empty table: must miss
    for (int e = 0; e < ENTRIES; e++) begin
      logic [SW-1:0] s;
      s = {$urandom, $urandom};
      write_entry(e, s, 10'(e / 3), (e % 7) != 6);
    end
    // a duplicate of entry 20 at entry 25 with another code: entry 20 wins
    write_entry(25, ref_state[20], 10'd999, 1'b1);
    for (int i = 0; i < 400; i++) begin
      logic [SW-1:0] q;
      logic [5:0] side;
      bit exp_hit;
      logic [9:0] exp_code;
      int pick;
      pick = $urandom_range(0, ENTRIES + 8);
      q = (pick < ENTRIES) ? ref_state[pick] : {$urandom, $urandom};
      side = 6'($urandom);
      exp_hit = 0; exp_code = '0;
      for (int e = ENTRIES - 1; e >= 0; e--)
        if (ref_valid[e] && ref_state[e] == q) begin exp_hit = 1; exp_code = ref_code[e]; end
      @(negedge clk);
      in_valid = 1'b1; in_state = q; in_side = side;
      @(negedge clk);
      in_valid = 1'b0; in_state = '0;
      checks++;
      if (out_valid) begin failures++; $display("FAIL result after one clock"); end
      @(negedge clk);
      checks++;
      if (!out_valid || out_hit !== exp_hit || (exp_hit && out_code !== exp_code)
          || out_side !== side) begin
        failures++;
        $display("FAIL lookup %0d: valid=%0d hit=%0d code=%0d exp hit=%0d code=%0d",
                 i, out_valid, out_hit, out_code, exp_hit, exp_code);
      end
      if (exp_hit) n_hit++; else n_miss++;
    end
    checks++;
    if (n_hit < 100 || n_miss < 20) failures++;
    $display("hits=%0d misses=%0d", n_hit, n_miss);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10us;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
