// tdl_carry_chain: BEHAVIOURAL MODEL (not synthesizable) of the half-sized
// tapped delay line, i.e. N_CLB CARRY8 carry-chain blocks with their sampling
// flip-flops.
//
// On the FPGA the Start clock enters the carry input of CLB 0 and ripples
// through 8 multiplexer stages per CLB.  Each stage has two taps, the XOR
// output O_k and the carry output CO_k, and each tap is captured by a D
// flip-flop clocked by Stop.  Bit b of CLB c is d[b + 16*c] (D_{c,b}), with
// the taps ordered O0, CO0, O1, CO1, ... O7, CO7 inside a CLB.
//
// The model gives every tap an arrival time: the sum of uneven carry stage
// delays, plus a separate routing delay for the XOR and carry branches, plus a
// per-flip-flop Stop clock skew.  The spreads are chosen so that tap arrival
// times are not monotonic in tap index, which produces the "bubbles" (real
// states that are not thermometer codes) that the states-based encoder is
// designed to accept.  When Stop rises, d[j] is set to the value Start had at
// (now - arrival time of tap j), read back from a short history of Start
// edges.  This equals sampling the delayed copies of Start, without scheduling
// one event per tap per Start edge.
//
// The total chain length defaults to 833.5 ps, half a 600 MHz Start period,
// as in the paper.  The XOR output is modelled non-inverting; the encoder
// treats states as opaque patterns, so the polarity of any tap does not
// matter.  The delay figures are this model's own; real ones come from the
// code density test of a placed design.
//
// Ports: start (the delayed clock), stop (sampling clock), d (the sampled
// state, valid after each rising Stop edge and held until the next one).
module tdl_carry_chain #(
  parameter int unsigned N_CLB        = 28,
  parameter int unsigned BITS_PER_CLB = 16,
  parameter real         CHAIN_PS     = 833.5,  // total carry propagation
  parameter real         ROUTE_PS     = 6.0,    // spread of tap routing delays
  parameter real         SKEW_PS      = 3.0,    // spread of Stop clock skew
  parameter int unsigned SEED         = 7
) (
  input  logic                          start,
  input  logic                          stop,
  output logic [N_CLB*BITS_PER_CLB-1:0] d
);
  timeunit 1ps;
  timeprecision 1fs;

  localparam int unsigned NTAP   = N_CLB * BITS_PER_CLB;
  localparam int unsigned NSTAGE = NTAP / 2;     // one MUX stage per O/CO pair
  localparam int unsigned HIST   = 4;            // Start edges remembered

  real      tap_ps [NTAP];
  realtime  edge_t [HIST];
  logic     edge_v [HIST];

  // Deterministic hash in [0,1) used in place of process variation.
  function automatic real frac_hash(input int unsigned i, input int unsigned salt);
    int unsigned h;
    h = (i + 1) * 32'd2654435761 ^ (salt * 32'd40503 + SEED * 32'd97);
    h = h ^ (h >> 13);
    h = h * 32'd1274126177;
    h = h ^ (h >> 16);
    return real'(h % 10000) / 10000.0;
  endfunction

  initial begin
    real stage_w [NSTAGE];
    real wsum, cum;
    wsum = 0.0;
    // Uneven stage delays (0.4..1.6 of the mean), scaled to CHAIN_PS in total.
    for (int k = 0; k < NSTAGE; k++) begin
      stage_w[k] = 0.4 + 1.2 * frac_hash(k, 1);
      wsum += stage_w[k];
    end
    cum = 0.0;
    for (int k = 0; k < NSTAGE; k++) begin
      int unsigned c;
      real skew_clb;
      c = (2 * k) / BITS_PER_CLB;
      skew_clb = SKEW_PS * (frac_hash(c, 5) - 0.5);
      // O_k branches off the carry input of stage k, CO_k follows the stage.
      tap_ps[2*k]   = cum + ROUTE_PS * frac_hash(k, 2) + skew_clb
                      + SKEW_PS * frac_hash(2*k, 4);
      cum += stage_w[k] * CHAIN_PS / wsum;
      tap_ps[2*k+1] = cum + 0.3 * ROUTE_PS * frac_hash(k, 3) + skew_clb
                      + SKEW_PS * frac_hash(2*k+1, 4);
    end
    for (int i = 0; i < HIST; i++) begin
      edge_t[i] = 0;
      edge_v[i] = 1'b0;
    end
    d = '0;
  end

  // History of Start edges, most recent first.
  always @(start) begin
    for (int i = HIST - 1; i > 0; i--) begin
      edge_t[i] = edge_t[i-1];
      edge_v[i] = edge_v[i-1];
    end
    edge_t[0] = $realtime;
    edge_v[0] = start;
  end

  function automatic logic start_at(input realtime t);
    for (int i = 0; i < HIST; i++)
      if (edge_t[i] <= t) return edge_v[i];
    return edge_v[HIST-1];
  endfunction

  // The flip-flops: every tap samples the Start level that reached it.
  always @(posedge stop) begin
    for (int j = 0; j < NTAP; j++)
      d[j] <= start_at($realtime - tap_ps[j]);
  end
endmodule
