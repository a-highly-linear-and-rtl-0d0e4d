// tb_tdc_top: end-to-end run of the converter at its default sizes
// (28-CLB / 448-bit delay line, 1024-entry encoder, two 1200 x 16-bit
// histograms).
//
// The testbench plays the parts outside the programmable logic: the clock
// manager (600 MHz Start, Start + 90 degrees, and a Stop it can place at any
// delay), a random photon source, and the host software.
//
//  1. Step 1, state collection: random Stop edges, uniformly spread over the
//     Start period; every raw state streamed out is compared with the state
//     the delay line actually captured.
//  2. Host-side configuration: the collected states are ordered by Seq (the
//     number of set taps) and by which Start edge is inside the line; states
//     of equal order are merged; their widths (hit count x period / hits)
//     are grouped by the two-pass method (first pass: close a group when
//     adding the next state moves its width away from the reference width;
//     second pass: move the first state of the next group into the current
//     one when that makes the two group widths closer).  Every state is then
//     written into the encoder with its group number.  One state is left out
//     on purpose, so the missing-code path is exercised.
//  3. Step 2, code density: random Stop edges at random coarse periods.  For
//     each one the testbench works out the expected bin from its own copy of
//     the configuration and its own coarse-count reference; the sum of all
//     histogram frames streamed out must equal the expected histogram bin by
//     bin, and the miss and out-of-range counts must match.  DNL over the
//     groups is printed and no bin in the recorded range may be empty.
//  4. Time interval test: the internal Stop is stepped in 14.8 ps steps over
//     two Start periods after a fixed coarse period; the bin must never go
//     backwards and must match the expected bin.  The left-out state's phase
//     is then hit and must give missing codes.
//  5. The stream consumer is held off past an integration period: overrun.
//
// Each mechanism (state stream, both histograms, swap, miss, out-of-range,
// overrun, internal Stop, Sync) is counted and a failure is counted for any
// that never happened.
module tb_tdc_top;
  timeunit 1ps;
  timeprecision 1fs;
  import tdc_pkg::*;

  localparam real T    = 1666.667;   // Start period, ps
  localparam real REF  = 43.87;      // requested bin width, ps
  localparam int  NT   = STATE_W;
  localparam int  N1   = 5000;       // step-1 events
  localparam int  N2   = 6000;       // step-2 events

  logic start = 1'b0, clk = 1'b0, rst_n = 1'b0;
  logic stop_ext = 1'b0, stop_int = 1'b0, stop_sel = 1'b0, step = 1'b0, sync_en = 1'b1;
  tdc_cfg_t cfg;
  logic enc_we = 1'b0, enc_valid = 1'b0;
  logic [9:0] enc_addr = '0;
  logic [NT-1:0] enc_state = '0;
  logic [9:0] enc_code = '0;
  logic sync, m_valid, m_ready = 1'b1, m_user, m_last, m_hist_b;
  logic [31:0] m_data;
  logic evt_capture, evt_bin, evt_miss, evt_out_of_range, states_dropped;
  logic [BIN_W-1:0] evt_bin_index;
  logic [COARSE_W-1:0] evt_coarse;
  logic hist_active_b, hist_ready, hist_swap, hist_overrun;

  tdc_top dut (
    .start, .clk, .rst_n, .stop_ext, .stop_int, .stop_sel, .step, .sync_en, .cfg,
    .enc_we, .enc_addr, .enc_state, .enc_code, .enc_valid,
    .sync, .m_valid, .m_ready, .m_data, .m_user, .m_last, .m_hist_b,
    .evt_capture, .evt_bin, .evt_bin_index, .evt_coarse, .evt_miss, .evt_out_of_range, .states_dropped,
    .hist_active_b, .hist_ready, .hist_swap, .hist_overrun);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  // ---------------- clocks (the clock manager) ----------------
  always #(T / 2) start = ~start;
  initial begin
    #(T / 4);
    forever #(T / 2) clk = ~clk;
  end

  // Reference coarse count: the Low Scale value that holds from a quarter
  // period after each Start rising edge.
  int ref_low = 0, per_coarse = 0;
  always @(posedge clk or negedge rst_n)
    if (!rst_n) ref_low <= 0; else ref_low <= (ref_low + 1) % COARSE_PERIOD;
  always @(posedge start) per_coarse = (ref_low + 1) % COARSE_PERIOD;  // for gap planning

  // ---------------- mechanism counters ----------------
  int n_ti = 0, n_miss = 0, n_oor = 0, n_bin = 0, n_swap = 0, n_sync = 0, n_drop = 0;
  logic sync_q = 1'b0;
  always @(posedge clk) if (rst_n) begin
    if (evt_miss) n_miss++;
    if (evt_out_of_range) n_oor++;
    if (evt_bin) begin
      n_bin++;
      check(evt_coarse >= 1 && evt_coarse <= cfg.coarse_limit &&
            int'(evt_bin_index) / int'(cfg.n_groups) == int'(evt_coarse) - 1,
            "event bin lies in the period of its coarse code");
    end
    if (hist_swap) n_swap++;
    if (states_dropped) n_drop++;
    if (sync && !sync_q) n_sync++;
    sync_q <= sync;
  end

  // ---------------- Stop generation ----------------
  logic [NT-1:0] last_state;
  int            last_coarse;

  // Wait gap Start periods, then put a Stop edge phi_ps after a Start edge.
  task automatic fire(input int gap, input real phi_ps, input bit internal);
    repeat (gap) @(posedge start);
    last_coarse = (ref_low + 1) % COARSE_PERIOD;
    #(phi_ps);
    if (internal) stop_int = 1'b1; else stop_ext = 1'b1;
    #1;
    last_state = dut.u_tdl.d;
    #(T);
    stop_int = 1'b0;
    stop_ext = 1'b0;
  endtask

  // ---------------- stream receiver ----------------
  logic [NT-1:0] exp_states [$];
  logic [NT-1:0] rx_state;
  int  rx_word = 0, n_rx_states = 0;
  int  rx_hist [HIST_BINS];
  int  rx_bin = 0, n_frames = 0, n_frames_a = 0, n_frames_b = 0;
  logic prev_b = 1'b1;
  always @(posedge clk) begin
    if (rst_n && m_valid && m_ready) begin   // outputs are undefined until reset has acted
      if (step == STEP_STATES) begin
        rx_state[rx_word*32 +: 32] = m_data;
        check(m_user == (rx_word == 0) && m_last == (rx_word == 13), "state framing");
        if (rx_word == 13) begin
          rx_word = 0;
          check(exp_states.size() > 0 && rx_state == exp_states[0], "streamed state equals captured state");
          if (exp_states.size() > 0) void'(exp_states.pop_front());
          n_rx_states++;
        end else rx_word++;
      end else begin
        if (m_user) begin
          check(rx_bin == 0, "frame starts at bin 0");
          rx_bin = 0;
          check(n_frames == 0 || m_hist_b != prev_b, "frames alternate A/B");
          prev_b = m_hist_b;
          if (m_hist_b) n_frames_b++; else n_frames_a++;
        end
        rx_hist[rx_bin] += int'(m_data);
        check(m_last == (rx_bin == HIST_BINS - 1), "frame ends at bin 1199");
        if (m_last) begin rx_bin = 0; n_frames++; end
        else rx_bin++;
      end
    end
  end

  // ---------------- host software model ----------------
  int    st_idx [string];          // state -> index into the lists below
  logic [NT-1:0] st_pat [$];
  int    st_cnt [$];
  real   st_phi [$];               // sum of phases, ps
  int    st_ord [$];
  int    ord_cnt [int];            // order value -> hits
  int    grp_of_ord [int];
  int    code_of [string];         // configured table
  int    n_groups;

  // Order of a state along the Start period: the rising edge sweeps the line
  // first (set taps at the low end, Seq 0..448), then the falling edge
  // (Seq 448..0).  Which edge is inside is told by where the set taps lie.
  function automatic int order_of(input logic [NT-1:0] s);
    int seq; longint sum1, sum0; int n1, n0;
    seq = $countones(s);
    sum1 = 0; sum0 = 0; n1 = 0; n0 = 0;
    for (int j = 0; j < NT; j++)
      if (s[j]) begin sum1 += j; n1++; end else begin sum0 += j; n0++; end
    if (n1 == 0) return 0;
    if (n0 == 0) return NT;
    if (sum1 * n0 < sum0 * n1) return seq;     // ones at the start of the line
    return 2 * NT - seq;
  endfunction

  task automatic configure();
    real s [$];
    int  ords [$];
    int  gstart [$];
    int  total, key, g;
    real sum, nxt;
    total = 0;
    foreach (st_cnt[i]) total += st_cnt[i];
    foreach (st_pat[i]) begin
      st_ord.push_back(order_of(st_pat[i]));
      if (ord_cnt.exists(st_ord[i])) ord_cnt[st_ord[i]] += st_cnt[i];
      else ord_cnt[st_ord[i]] = st_cnt[i];
    end
    if (ord_cnt.first(key)) do begin
      ords.push_back(key);
      s.push_back(real'(ord_cnt[key]) * T / real'(total));
    end while (ord_cnt.next(key));
    // first pass
    gstart.push_back(0);
    sum = s[0];
    for (int n = 0; n + 1 < s.size(); n++) begin
      real fp;
      fp = ((REF - (sum + s[n+1])) < 0 ? -(REF - (sum + s[n+1])) : (REF - (sum + s[n+1])))
         - ((REF - sum) < 0 ? -(REF - sum) : (REF - sum));
      if (fp > 0) begin gstart.push_back(n + 1); sum = s[n+1]; end
      else sum += s[n+1];
    end
    // second pass
    for (int i = 0; i + 1 < gstart.size(); i++) begin
      int a, b, c;
      real cur, nx, sp;
      a = gstart[i]; b = gstart[i+1];
      c = (i + 2 < gstart.size()) ? gstart[i+2] : s.size();
      if (c - b < 2) continue;
      cur = 0; nx = 0;
      for (int j = a; j < b; j++) cur += s[j];
      for (int j = b; j < c; j++) nx += s[j];
      sp = ((cur - nx) < 0 ? nx - cur : cur - nx)
         - ((cur + s[b] - (nx - s[b])) < 0 ? -(cur + s[b] - (nx - s[b])) : (cur + s[b] - (nx - s[b])));
      if (sp > 0) gstart[i+1] = b + 1;
    end
    // a remainder at the end of the period narrower than half the reference
    // is joined to the group before it rather than left as a sliver bin
    begin
      real tail;
      tail = 0;
      for (int j = gstart[gstart.size()-1]; j < s.size(); j++) tail += s[j];
      if (gstart.size() > 1 && tail < REF / 2) void'(gstart.pop_back());
    end
    n_groups = gstart.size();
    g = 0;
    foreach (ords[j]) begin
      if (g + 1 < gstart.size() && j >= gstart[g+1]) g++;
      grp_of_ord[ords[j]] = g;
    end
    begin
      real wsum, wsq, wbar, w;
      wsum = 0; wsq = 0;
      for (int i = 0; i < gstart.size(); i++) begin
        int e;
        e = (i + 1 < gstart.size()) ? gstart[i+1] : s.size();
        w = 0;
        for (int j = gstart[i]; j < e; j++) w += s[j];
        wsum += w; wsq += w * w;
      end
      wbar = wsum / n_groups;
      $display("host: %0d states, %0d orders, N=%0d groups, LSB=%.2f ps, RSE=%.4f",
               st_pat.size(), ords.size(), n_groups, wbar,
               $sqrt((wsq - n_groups * wbar * wbar) / (n_groups - 1)) / wbar);
    end
  endtask

  int left_out = -1;

  task automatic write_encoder();
    int best;
    // leave out the state hit most often in the middle of the rising half
    best = -1;
    foreach (st_pat[i])
      if (st_ord[i] > 100 && st_ord[i] < 300 && (best < 0 || st_cnt[i] > st_cnt[best])) best = i;
    left_out = best;
    foreach (st_pat[i]) begin
      string k;
      k = $sformatf("%h", st_pat[i]);
      @(negedge clk);
      enc_we = 1'b1; enc_addr = 10'(i); enc_state = st_pat[i];
      enc_code = 10'(grp_of_ord[st_ord[i]]); enc_valid = (i != left_out);
      if (i != left_out) code_of[k] = grp_of_ord[st_ord[i]];
    end
    @(negedge clk) enc_we = 1'b0;
  endtask

  int exp_hist [HIST_BINS];
  int exp_miss = 0, exp_oor = 0;

  // A state's code places it in the Start period.  Near the period boundary
  // a state ordered at the end of the period may be caught just after the
  // next Start edge, or one ordered at the start just before it; it then
  // belongs to the neighbouring period (the time is the same within a few
  // ps).
  function automatic int expected_bin(input logic [NT-1:0] s, input int coarse,
                                      input real phi_ps);
    string k;
    int b, c;
    k = $sformatf("%h", s);
    if (!code_of.exists(k)) return -1;                       // missing code
    c = coarse;
    if (code_of[k] >= n_groups / 2 && phi_ps < T / 4) c = coarse - 1;
    if (code_of[k] < n_groups / 2 && phi_ps > 3 * T / 4) c = coarse + 1;
    c = (c + COARSE_PERIOD) % COARSE_PERIOD;
    b = (c - 1) * n_groups + code_of[k];
    if (c < 1 || c > int'(cfg.coarse_limit) || b >= HIST_BINS) return -2;
    return b;
  endfunction

  task automatic account(input int b);
    if (b == -1) exp_miss++;
    else if (b == -2) exp_oor++;
    else exp_hist[b]++;
  endtask

  // ---------------- the run ----------------
  initial begin
    // a real falling edge on rst_n, so the Stop-domain flip-flops (which see
    // no clock until the first Stop) are reset as well
    rst_n = 1'b1;
    #1 rst_n = 1'b0;
    cfg.n_groups = '0;
    cfg.coarse_limit = 3'd5;
    cfg.integ_cycles = 32'd6000;
    for (int b = 0; b < HIST_BINS; b++) begin rx_hist[b] = 0; exp_hist[b] = 0; end
    repeat (4) @(negedge clk);
    rst_n = 1'b1;
    wait (hist_ready);

    // 1. step 1: collect states
    step = STEP_STATES;
    for (int i = 0; i < N1; i++) begin
      real phi;
      string k;
      phi = real'($urandom_range(1, 99999)) * T / 100000.0;
      fire($urandom_range(18, 24), phi, 1'b0);
      exp_states.push_back(last_state);
      k = $sformatf("%h", last_state);
      if (!st_idx.exists(k)) begin
        st_idx[k] = st_pat.size();
        st_pat.push_back(last_state); st_cnt.push_back(0); st_phi.push_back(0.0);
      end
      st_cnt[st_idx[k]]++;
      st_phi[st_idx[k]] += phi;
    end
    repeat (60) @(posedge clk);
    check(n_rx_states == N1 && n_drop == 0, "every collected state streamed out");
    $display("step 1: %0d states received, %0d distinct", n_rx_states, st_pat.size());

    // 2. host configuration
    configure();
    check(st_pat.size() <= ENC_ENTRIES, "states fit the encoder");
    write_encoder();
    cfg.n_groups = 10'(n_groups);

    // 3. step 2: code density
    @(negedge clk);
    step = STEP_HISTOGRAM;
    for (int i = 0; i < N2; i++) begin
      real phi;
      phi = real'($urandom_range(1, 99999)) * T / 100000.0;
      fire($urandom_range(6, 10), phi, 1'b0);
      account(expected_bin(last_state, last_coarse, phi));
    end
    // let two more integration periods pass so all counts are read out
    repeat (3 * 6000 + 2000) @(posedge clk);
    check(n_miss == exp_miss, $sformatf("miss count %0d vs %0d", n_miss, exp_miss));
    check(n_oor == exp_oor, $sformatf("out-of-range count %0d vs %0d", n_oor, exp_oor));
    begin
      int bad, empty, cmin, cmax, csum;
      real dmin, dmax;
      bad = 0; empty = 0;
      for (int b = 0; b < HIST_BINS; b++) begin
        checks++;
        if (rx_hist[b] != exp_hist[b]) begin
          bad++; failures++;
          if (bad < 5) $display("FAIL bin %0d: %0d counted, %0d expected", b, rx_hist[b], exp_hist[b]);
        end
        if (b < 5 * n_groups && rx_hist[b] == 0) empty++;
      end
      // DNL of the groups, all coarse periods folded together
      csum = 0; dmin = 1e9; dmax = -1e9;
      for (int g = 0; g < n_groups; g++) for (int c = 0; c < 5; c++) csum += rx_hist[c * n_groups + g];
      for (int g = 0; g < n_groups; g++) begin
        int cg;
        real dnl;
        cg = 0;
        for (int c = 0; c < 5; c++) cg += rx_hist[c * n_groups + g];
        dnl = real'(cg) * n_groups / csum - 1.0;
        if (dnl < dmin) dmin = dnl;
        if (dnl > dmax) dmax = dnl;
      end
      $display("step 2: %0d events, %0d binned, %0d missing codes, %0d out of range, %0d frames (A %0d, B %0d)",
               N2, n_bin, n_miss, n_oor, n_frames, n_frames_a, n_frames_b);
      $display("step 2: DNL over %0d groups [%.3f, %.3f], empty bins in range %0d", n_groups, dmin, dmax, empty);
      check(empty == 0, "no empty bins in the recorded range");
    end

    // 4. time interval test with the internal Stop
    stop_sel = 1'b1;
    cfg.integ_cycles = 32'd2000;
    begin
      int prev, nbad;
      real d;
      prev = -1; nbad = 0;
      // wait for a period whose coarse code will be 1
      for (d = 7.4; d < 2.0 * T - 20.0; d += 14.8) begin
        int gap, b, got, target;
        // delay d after the Start edge of the period with coarse code 1
        target = (d < T) ? 1 : 2;
        gap = 6;                  // keep Stop edges well apart
        while (((per_coarse + gap) % COARSE_PERIOD) != target) gap++;
        got = -1;
        fork
          fire(gap, d < T ? d : d - T, 1'b1);
          @(posedge evt_capture);
        join
        repeat (8) begin
          @(posedge clk);
          if (evt_bin && got < 0) got = int'(evt_bin_index);
        end
        b = expected_bin(last_state, last_coarse, d < T ? d : d - T);
        check(got == b, $sformatf("time interval %.1f ps: bin %0d expected %0d", d, got, b));
        if (b >= 0 && prev >= 0 && b < prev) nbad++;
        if (b >= 0) prev = b;
        n_ti++;
      end
      check(nbad == 0, "time interval output never goes backwards");
    end
    // the state that was left out of the encoder gives missing codes
    begin
      int m0;
      m0 = n_miss;
      for (int i = 0; i < 20; i++) fire(8, st_phi[left_out] / st_cnt[left_out], 1'b1);
      repeat (10) @(posedge clk);
      check(n_miss > m0, "left-out state reported as missing code");
    end
    stop_sel = 1'b0;

    // 5. hold the consumer off past an integration period
    @(negedge clk) m_ready = 1'b0;     // change the handshake away from the sampling edge
    repeat (3 * 2000 + 2500) @(posedge clk);
    check(hist_overrun, "overrun flagged when frames are not taken");
    @(negedge clk) m_ready = 1'b1;
    repeat (4000) @(posedge clk);

    // mechanisms
    check(n_rx_states > 0, "state stream used");
    check(n_frames_a > 0 && n_frames_b > 0, "both histograms sent");
    check(n_swap > 2, "histograms swapped");
    check(n_miss > 0, "missing code seen");
    check(n_oor > 0, "out-of-range event seen");
    check(n_sync > 10, "Sync pulses");
    check(n_ti > 100, "time interval sweep with the internal Stop");
    $display("mechanisms: states=%0d framesA=%0d framesB=%0d swaps=%0d miss=%0d out_of_range=%0d overrun=%0d sync=%0d",
             n_rx_states, n_frames_a, n_frames_b, n_swap, n_miss, n_oor, hist_overrun, n_sync);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #5ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
