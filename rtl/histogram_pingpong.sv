// histogram_pingpong: Histogram A and Histogram B, interleaved.
//
// One histogram accumulates events while the other is streamed out and
// cleared, so counting never pauses (no dead time).  After integ_cycles
// clocks of integration the roles swap: the histogram that was counting is
// sent out bin 0 first, one 16-bit bin per stream word, with tuser on bin 0
// and tlast on the last bin, and each bin is cleared as it is read.
//
// Counting is a read-modify-write on the active memory: the bin is read in
// the event's clock, incremented and written back in the next.  A write-back
// register forwards the value when the next event hits the same bin, so
// events may arrive on every clock.  Bins saturate at all ones.  Each event
// keeps the memory it was read from, so an event in flight at a swap still
// lands in the histogram it belongs to.
//
// If the integration time ends before the other histogram has been streamed
// out, the swap waits until it has (the counting histogram keeps counting, so
// no event is lost) and the overrun flag is set until reset.  After reset both
// memories are cleared, which takes BINS clocks, before counting starts.
//
// The paper gives two interleaved histograms of 1200 bins x 16 bits and a
// user-set integration time; the stream format, saturation, the overrun rule
// and the clearing method are this design's choices.
module histogram_pingpong
  import tdc_pkg::*;
#(
  parameter int unsigned BINS  = HIST_BINS,
  parameter int unsigned W     = HIST_W,
  parameter int unsigned AW    = $clog2(BINS),
  parameter int unsigned OUT_W = DATA_W
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [31:0]      integ_cycles,
  // events
  input  logic             in_valid,
  input  logic [AW-1:0]    in_bin,
  // histogram stream out
  output logic             m_valid,
  input  logic             m_ready,
  output logic [OUT_W-1:0] m_data,
  output logic             m_user,       // first bin of a frame
  output logic             m_last,       // last bin of a frame
  output logic             m_hist_b,     // frame comes from histogram B
  // status
  output logic             active_b,     // histogram B is counting
  output logic             ready,        // memories cleared, counting
  output logic             swap,         // pulse: roles swapped
  output logic             overrun
);
  timeunit 1ps;
  timeprecision 1fs;

  typedef enum logic [1:0] {S_INIT, S_IDLE, S_DRAIN, S_READ} rd_state_e;

  // Memory ports
  logic          re   [2];
  logic [AW-1:0] ra   [2];
  logic [W-1:0]  rd   [2];
  logic          we   [2];
  logic [AW-1:0] wa   [2];
  logic [W-1:0]  wd   [2];

  for (genvar m = 0; m < 2; m++) begin : g_mem
    histogram_ram #(.BINS(BINS), .W(W), .AW(AW)) u_ram (
      .clk, .re(re[m]), .raddr(ra[m]), .rdata(rd[m]),
      .we(we[m]), .waddr(wa[m]), .wdata(wd[m])
    );
  end

  rd_state_e     rstate;
  logic [AW-1:0] init_addr;
  logic [31:0]   integ_cnt;
  logic          swap_due;

  // ---------------- accumulate pipeline ----------------
  logic          s1_valid, s1_mem;
  logic [AW-1:0] s1_addr;
  logic          wb_valid, wb_mem;
  logic [AW-1:0] wb_addr;
  logic [W-1:0]  wb_data;
  logic [W-1:0]  base, incr;

  always_comb begin
    base = rd[s1_mem];
    if (wb_valid && wb_mem == s1_mem && wb_addr == s1_addr) base = wb_data;
    incr = (base == '1) ? base : base + 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid <= 1'b0;
      s1_mem   <= 1'b0;
      s1_addr  <= '0;
      wb_valid <= 1'b0;
      wb_mem   <= 1'b0;
      wb_addr  <= '0;
      wb_data  <= '0;
    end else begin
      s1_valid <= in_valid && ready && (in_bin < AW'(BINS));
      s1_mem   <= active_b;
      s1_addr  <= in_bin;
      wb_valid <= s1_valid;
      wb_mem   <= s1_mem;
      wb_addr  <= s1_addr;
      wb_data  <= incr;
    end
  end

  // ---------------- readout ----------------
  localparam int unsigned FD = 4;
  logic [W-1:0]  fifo_d [FD];
  logic          fifo_first [FD];
  logic          fifo_last  [FD];
  logic [1:0]    f_wr, f_rd;
  logic [2:0]    f_cnt;
  logic          inflight, inflight_first, inflight_last;
  logic [AW-1:0] rd_addr;
  logic          rd_mem;        // memory being read out
  logic          issue, push, pop;

  assign pop  = m_valid && m_ready;
  assign push = inflight;
  assign issue = (rstate == S_READ) && (32'(f_cnt) + 32'(inflight) < 3);

  // Port multiplexing: the active memory counts, the other is read/cleared.
  always_comb begin
    for (int m = 0; m < 2; m++) begin
      re[m] = 1'b0; ra[m] = '0; we[m] = 1'b0; wa[m] = '0; wd[m] = '0;
    end
    if (rstate == S_INIT) begin
      for (int m = 0; m < 2; m++) begin
        we[m] = 1'b1; wa[m] = init_addr; wd[m] = '0;
      end
    end else begin
      // counting: read on arrival, write back one clock later
      re[active_b] = in_valid && ready;
      ra[active_b] = in_bin;
      if (s1_valid) begin
        we[s1_mem] = 1'b1; wa[s1_mem] = s1_addr; wd[s1_mem] = incr;
      end
      // readout: read a bin and clear it in the same clock
      if (issue) begin
        re[rd_mem] = 1'b1; ra[rd_mem] = rd_addr;
        we[rd_mem] = 1'b1; wa[rd_mem] = rd_addr; wd[rd_mem] = '0;
      end
    end
  end

  assign ready = (rstate != S_INIT);
  assign swap_due = (integ_cnt + 1 >= integ_cycles);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rstate         <= S_INIT;
      init_addr      <= '0;
      integ_cnt      <= '0;
      active_b       <= 1'b0;
      rd_mem         <= 1'b0;
      rd_addr        <= '0;
      inflight       <= 1'b0;
      inflight_first <= 1'b0;
      inflight_last  <= 1'b0;
      f_wr           <= '0;
      f_rd           <= '0;
      f_cnt          <= '0;
      swap           <= 1'b0;
      overrun        <= 1'b0;
    end else begin
      swap <= 1'b0;
      // read data arrives one clock after issue
      inflight       <= issue;
      inflight_first <= issue && (rd_addr == '0);
      inflight_last  <= issue && (rd_addr == AW'(BINS - 1));
      if (issue) rd_addr <= rd_addr + 1'b1;
      if (push) begin
        fifo_d[f_wr]     <= rd[rd_mem];
        fifo_first[f_wr] <= inflight_first;
        fifo_last[f_wr]  <= inflight_last;
        f_wr             <= f_wr + 1'b1;
      end
      if (pop) f_rd <= f_rd + 1'b1;
      f_cnt <= f_cnt + 3'(push) - 3'(pop);

      case (rstate)
        S_INIT: begin
          init_addr <= init_addr + 1'b1;
          if (init_addr == AW'(BINS - 1)) rstate <= S_IDLE;
        end
        S_IDLE, S_DRAIN, S_READ: begin
          if (rstate == S_DRAIN) rstate <= S_READ;
          if (rstate == S_READ && issue && rd_addr == AW'(BINS - 1))
            rstate <= S_IDLE;
          if (swap_due) begin
            if (rstate == S_IDLE && f_cnt == '0 && !inflight) begin
              // swap roles: the counting memory goes out, the cleared one counts
              active_b  <= !active_b;
              rd_mem    <= active_b;
              rd_addr   <= '0;
              rstate    <= S_DRAIN;  // let the last write-back land first
              integ_cnt <= '0;
              swap      <= 1'b1;
            end else begin
              overrun   <= 1'b1;
            end
          end else begin
            integ_cnt <= integ_cnt + 1;
          end
        end
        default: rstate <= S_IDLE;
      endcase
    end
  end

  // A swap also waits for the stream FIFO to drain, so that a frame is
  // complete before rd_mem changes.
  assign m_valid  = (f_cnt != '0);
  assign m_data   = OUT_W'(fifo_d[f_rd]);
  assign m_user   = fifo_first[f_rd];
  assign m_last   = fifo_last[f_rd];
  assign m_hist_b = rd_mem;
endmodule
