// state_collector: the "States" path of step 1.
//
// In step 1 the raw TDL states are not encoded but sent to the processor
// (and from there to the PC), which orders them by their Seq value and works
// out the bin configuration.  This block buffers whole states in a small FIFO
// and sends each one as STATE_W/OUT_W words (14 words of 32 bits for 448
// bits), least significant word first, tuser on the first word and tlast on
// the last.  A state that arrives while the FIFO is full is dropped and
// flagged by the 'dropped' pulse.
//
// The paper gives only that states are collected and transferred; the FIFO,
// its depth and the word order are this design's choices.
module state_collector
  import tdc_pkg::*;
#(
  parameter int unsigned SW    = STATE_W,
  parameter int unsigned OUT_W = DATA_W,
  parameter int unsigned DEPTH = 4
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic [SW-1:0]    in_state,
  output logic             m_valid,
  input  logic             m_ready,
  output logic [OUT_W-1:0] m_data,
  output logic             m_user,
  output logic             m_last,
  output logic             dropped
);
  timeunit 1ps;
  timeprecision 1fs;

  localparam int unsigned NWORDS = (SW + OUT_W - 1) / OUT_W;
  localparam int unsigned PW     = $clog2(DEPTH);
  localparam int unsigned WW     = $clog2(NWORDS);

  logic [NWORDS*OUT_W-1:0] fifo [DEPTH];
  logic [PW-1:0]           wr_ptr, rd_ptr;
  logic [PW:0]             count;
  logic [WW-1:0]           word;
  logic                    push, pop;

  assign push    = in_valid && (count != (PW+1)'(DEPTH));
  assign m_valid = (count != '0);
  assign m_data  = fifo[rd_ptr][word*OUT_W +: OUT_W];
  assign m_user  = (word == '0);
  assign m_last  = (word == WW'(NWORDS - 1));
  assign pop     = m_valid && m_ready && m_last;

  always_ff @(posedge clk) begin
    if (push) fifo[wr_ptr] <= (NWORDS*OUT_W)'(in_state);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr  <= '0;
      rd_ptr  <= '0;
      count   <= '0;
      word    <= '0;
      dropped <= 1'b0;
    end else begin
      dropped <= in_valid && !push;
      if (push) wr_ptr <= (wr_ptr == PW'(DEPTH - 1)) ? '0 : wr_ptr + 1'b1;
      if (pop)  rd_ptr <= (rd_ptr == PW'(DEPTH - 1)) ? '0 : rd_ptr + 1'b1;
      count <= count + (PW+1)'(push) - (PW+1)'(pop);
      if (m_valid && m_ready) word <= m_last ? '0 : word + 1'b1;
    end
  end
endmodule
