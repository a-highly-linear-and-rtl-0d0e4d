// histogram_ram: one histogram memory, BINS words of W bits, with one
// synchronous read port and one write port (a simple dual-port block RAM).
// A read returns the word one clock later and sees the contents before a
// write made on the same clock edge (read-first).  No reset: the owner
// clears the memory by writing zeros.
module histogram_ram #(
  parameter int unsigned BINS = 1200,
  parameter int unsigned W    = 16,
  parameter int unsigned AW   = $clog2(BINS)
) (
  input  logic          clk,
  input  logic          re,
  input  logic [AW-1:0] raddr,
  output logic [W-1:0]  rdata,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [W-1:0]  wdata
);
  timeunit 1ps;
  timeprecision 1fs;

  logic [W-1:0] mem [BINS];

  always_ff @(posedge clk) begin
    if (re) rdata <= mem[raddr];
    if (we) mem[waddr] <= wdata;
  end
endmodule
