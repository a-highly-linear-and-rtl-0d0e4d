// tb_tdc_resolutions: the paper's six time resolutions on the full-size
// converter.  One state collection (step 1, 20000 random Stops) is followed,
// for each requested bin width (5.00, 10.04, 21.65, 43.87, 64.11 and
// 87.73 ps), by a host configuration (Seq ordering, first and second pass
// for every reference width within 20 % of the request; among those giving the
// group count nearest T/REF the grouping with the lowest RSE is kept), a
// rewrite of the encoder table and a code density run (step 2) whose
// histograms must equal the testbench's own expectation bin by bin.  The
// 5 ps setting records 3 coarse periods (5 ns), the others 5 (8.33 ns).  The
// achieved LSB, RSE, DNL range and empty bins are printed for each.
module tb_tdc_resolutions;
  timeunit 1ps;
  timeprecision 1fs;
  import tdc_pkg::*;

  localparam real T    = 1666.667;   // Start period, ps
  real REF;                          // requested bin width, ps
  localparam int  NT   = STATE_W;
  localparam int  N1   = 20000;       // step-1 events
  localparam int  N2   = 8000;        // step-2 events

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
  int n_cfg = 0, n_ti = 0, n_miss = 0, n_oor = 0, n_bin = 0, n_swap = 0, n_sync = 0, n_drop = 0;
  logic sync_q = 1'b0;
  always @(posedge clk) if (rst_n) begin
    if (evt_miss) n_miss++;
    if (evt_out_of_range) n_oor++;
    if (evt_bin) n_bin++;
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

  // Two-pass grouping of the ordered widths sw[] for one reference width;
  // returns the first index of each group and the RSE of the group widths.
  real sw [$];
  int  sord [$];

  function automatic real absr(input real x);
    return x < 0 ? -x : x;
  endfunction

  task automatic two_pass(input real rw, output int gs [$], output real rse);
    real sum, w, wsum, wsq, wbar;
    int n;
    gs.delete();
    gs.push_back(0);
    sum = sw[0];
    // first pass
    for (int i = 0; i + 1 < sw.size(); i++) begin
      if (absr(rw - (sum + sw[i+1])) - absr(rw - sum) > 0) begin
        gs.push_back(i + 1); sum = sw[i+1];
      end else sum += sw[i+1];
    end
    // second pass
    for (int g = 0; g + 1 < gs.size(); g++) begin
      int a0, b0, c0;
      real cur, nx;
      a0 = gs[g]; b0 = gs[g+1];
      c0 = (g + 2 < gs.size()) ? gs[g+2] : sw.size();
      if (c0 - b0 < 2) continue;
      cur = 0; nx = 0;
      for (int j = a0; j < b0; j++) cur += sw[j];
      for (int j = b0; j < c0; j++) nx += sw[j];
      if (absr(cur - nx) - absr(cur + sw[b0] - (nx - sw[b0])) > 0) gs[g+1] = b0 + 1;
    end
    n = gs.size();
    wsum = 0; wsq = 0;
    for (int g = 0; g < n; g++) begin
      int e;
      e = (g + 1 < n) ? gs[g+1] : sw.size();
      w = 0;
      for (int j = gs[g]; j < e; j++) w += sw[j];
      wsum += w; wsq += w * w;
    end
    wbar = wsum / n;
    rse = (n > 1) ? $sqrt((wsq - n * wbar * wbar) / (n - 1)) / wbar : 1.0;
  endtask

  // Host configuration for the requested width REF: the reference is swept
  // over +-10 % in 0.01 ps steps and the grouping with the lowest RSE kept.
  task automatic configure();
    int  gstart [$], gtry [$];
    int  total, key, g, n_target, best_dn;
    real rse, best_rse, best_ref;
    st_ord.delete(); ord_cnt.delete(); grp_of_ord.delete(); code_of.delete();
    sw.delete(); sord.delete();
    total = 0;
    foreach (st_cnt[i]) total += st_cnt[i];
    foreach (st_pat[i]) begin
      st_ord.push_back(order_of(st_pat[i]));
      if (ord_cnt.exists(st_ord[i])) ord_cnt[st_ord[i]] += st_cnt[i];
      else ord_cnt[st_ord[i]] = st_cnt[i];
    end
    if (ord_cnt.first(key)) do begin
      sord.push_back(key);
      sw.push_back(real'(ord_cnt[key]) * T / real'(total));
    end while (ord_cnt.next(key));
    // The group count fixes the resolution: among all reference widths that
    // give the group count closest to T / REF keep the one with lowest RSE.
    best_rse = 1e9; best_ref = REF; best_dn = 1 << 30;
    n_target = $rtoi(T / REF + 0.5);
    for (real rw = 0.8 * REF; rw <= 1.2 * REF; rw += 0.01) begin
      int dn;
      two_pass(rw, gtry, rse);
      dn = (gtry.size() > n_target) ? gtry.size() - n_target : n_target - gtry.size();
      if (dn < best_dn || (dn == best_dn && rse < best_rse)) begin
        best_dn = dn; best_rse = rse; best_ref = rw; gstart = gtry;
      end
    end
    n_groups = gstart.size();
    g = 0;
    foreach (sord[j]) begin
      if (g + 1 < gstart.size() && j >= gstart[g+1]) g++;
      grp_of_ord[sord[j]] = g;
    end
    $display("host: %0d states, ref %.2f ps -> N=%0d groups, LSB=%.2f ps, RSE=%.4f",
             st_pat.size(), best_ref, n_groups, T / n_groups, best_rse);
  endtask

  int left_out = -1;

  task automatic write_encoder();
    int best;
    left_out = -1;
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

    for (int r = 0; r < 6; r++) begin
      real refs [6];
      refs = '{5.00, 10.04, 21.65, 43.87, 64.11, 87.73};
      REF = refs[r];
      configure();
      check(st_pat.size() <= ENC_ENTRIES, "states fit the encoder");
      check(n_groups < 1024, "groups fit the 10-bit fine code");
      write_encoder();
      cfg.n_groups = 10'(n_groups);
      cfg.coarse_limit = (REF < 7.0) ? 3'd3 : 3'd5;
      check(int'(cfg.coarse_limit) * n_groups <= HIST_BINS, "recorded range fits 1200 bins");
      for (int b = 0; b < HIST_BINS; b++) begin rx_hist[b] = 0; exp_hist[b] = 0; end
      exp_miss = 0; exp_oor = 0; n_miss = 0; n_oor = 0;
      @(negedge clk);
      step = STEP_HISTOGRAM;    // stays in step 2 while the table is rewritten
      for (int i = 0; i < N2; i++) begin
        real phi;
        phi = real'($urandom_range(1, 99999)) * T / 100000.0;
        fire($urandom_range(6, 10), phi, 1'b0);
        account(expected_bin(last_state, last_coarse, phi));
      end
      repeat (3 * 6000 + 2000) @(posedge clk);
      check(n_miss == exp_miss && n_oor == exp_oor, "miss and out-of-range counts");
      begin
        int bad, empty, csum, nrec;
        real dmin, dmax;
        bad = 0; empty = 0; csum = 0; dmin = 1e9; dmax = -1e9;
        nrec = int'(cfg.coarse_limit);
        for (int b = 0; b < HIST_BINS; b++) begin
          checks++;
          if (rx_hist[b] != exp_hist[b]) begin
            bad++; failures++;
            if (bad < 5) $display("FAIL ref %.2f bin %0d: %0d counted, %0d expected", REF, b, rx_hist[b], exp_hist[b]);
          end
          if (b < nrec * n_groups && rx_hist[b] == 0) empty++;
        end
        for (int g = 0; g < n_groups; g++) for (int c = 0; c < nrec; c++) csum += rx_hist[c * n_groups + g];
        for (int g = 0; g < n_groups; g++) begin
          int cg;
          real dnl;
          cg = 0;
          for (int c = 0; c < nrec; c++) cg += rx_hist[c * n_groups + g];
          dnl = real'(cg) * n_groups / csum - 1.0;
          if (dnl < dmin) dmin = dnl;
          if (dnl > dmax) dmax = dnl;
        end
        $display("ref %.2f ps: N=%0d, range %0d coarse periods = %0d bins, %0d counts, DNL [%.3f, %.3f], empty bins %0d, missing codes %0d",
                 REF, n_groups, nrec, nrec * n_groups, csum, dmin, dmax, empty, n_miss);
        n_cfg++;
      end
    end
    check(n_cfg == 6, "all six resolutions run");
    check(n_frames_a > 0 && n_frames_b > 0, "both histograms sent");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #20ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
