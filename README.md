# States-based tapped-delay-line TDC

A tapped-delay-line (TDL) time-to-digital converter on an FPGA measures where
a Stop edge falls inside one period of a fast Start clock. Start runs down a
carry chain, and at the Stop edge flip-flops on the chain's taps take a
snapshot of it. The usual decoder treats that snapshot as a thermometer code
and counts ones or finds the edge. On a real device the taps are neither
evenly spaced nor sampled at the same moment: clock skew between slices and
mismatch between stages make the snapshot bubbly and the bins very uneven,
and many thermometer codes never appear at all.

This design does not assume any code. Every snapshot the chain actually
produces (a *real state*) is collected first. The states are put in time
order offline and grouped into bins of the wanted width. A look-up table then
maps each real state straight to its bin number, the fine code. Since every
state that can occur belongs to some group, no bin is empty. The bin width
can be changed by reloading the table, without touching the chain. A
coarse counter extends the range beyond one Start period. Two histograms used
in turn give code-density and time-interval histograms continuously, with
no dead time.

The RTL here covers the logic from the chain outputs to the histogram stream.
The delay line is given as a behavioural model, because its function comes
from the physical carry chain. The clock manager, the DMA, the network and the
host software that orders and groups the states are outside the RTL. The
testbenches model the host side.

## Numbers

| Quantity | Value |
|---|---|
| Start clock | 600 MHz, 50 % duty, period T = 1.667 ns |
| Delay line | 28 carry slices x 16 taps = 448 state bits, about 833.5 ps long (half a period) |
| Fine code | 10 bits, up to 1024 table entries |
| Coarse counters | Low Scale and High Scale, modulo 6 (`COARSE_PERIOD`) |
| Histograms | two (A, B) of 1200 bins x 16 bits |
| Stop sources | external pin (e.g. a single-photon detector) or the clock manager's 100 MHz output |

## Why half a period of chain is enough

The chain is half as long as the Start period. Start has a 50 % duty cycle,
so during the first half period a rising edge travels along the chain and
the snapshot is a run of ones from the input end (`1..10..0` in tap order).
During the second half a falling edge travels and the snapshot is a run of
zeros (`0..01..1`). The same number of ones therefore occurs twice per
period, once in each half, and the two cases are told apart by *where* the
ones are. The sequence number used to order states (`Seq`, the count of ones)
is thus combined with the polarity: states with ones at the input end come
first, in rising order of Seq, and states with ones at the far end follow in
falling order of Seq. The chain can stay half-length because of this. Bubbles
(isolated wrong bits) do not upset the ordering, because Seq counts bits
rather than searching for an edge. The host model in `tb/tb_tdc_top.sv`
(`order_of`) works exactly this way.

Each carry slice gives 8 carry outputs (CO) and 8 sum outputs (O). The O and
CO of a stage take different routes to their flip-flops. In this design's
bit order, O_k sits at bit 2k and CO_k at bit 2k+1 of a slice.

## From states to bins (host side)

The host receives a large number of states in step 1. For each distinct state
it counts how often it occurred. Under random Stops that count is
proportional to the state's time width, `w = count * T / total`. The states
are sorted by the order above and cut into N groups whose widths are as close
as possible to a reference width `ref`:

* **First pass.** Walk the sorted states and add each width to the current
  group. Start a new group when adding the next state would take the sum
  further from `ref` than leaving it out.
* **Second pass.** For each group boundary, move one state across if that
  makes the two neighbouring groups more equal.
* **Quality.** The relative standard error (RSE) of the group widths, which is
  their standard deviation over their mean, measures how even the bins are.

States with the same order key (same Seq and polarity) are merged into one
width in the testbench host model at every resolution. At the finest setting
(5 ps) the original keeps such states apart and orders them by the position
of their last transition; the model does not, which costs some evenness at
5 ps. `tb_tdc_top` also joins a last group narrower than half of `ref` to
the group before it, so that no sliver bin is left at the end of the period.

The resolution is `T / N`. Many values of `ref` give the same N with
different groupings. `tb_tdc_resolutions` tries `ref` over +-20 % of the target in
0.01 ps steps and keeps the grouping with the lowest RSE among those giving
the wanted N. The group index of each state is its fine code, and these
(state, code) pairs are written into the encoder table.

## The hardware path

```
 start ──> tdl_carry_chain ──d[447:0]──> stop_capture ──> step 1: state_collector ─┐
 stop_ext ┐  ^ stop                        ^   │                                   ├─> m_* stream
 stop_int ┴─mux─────────────────────────────┘   └─> step 2: state_encoder          │
 stop_sel ┘                                          -> timestamp_calc             │
 clk (Start-90) ─> coarse_counter (Low, High) ─┘        -> histogram_pingpong ─────┘
                       └─> sync_generator ─> sync
```

### Coarse code and the race it avoids (`coarse_counter`, `timestamp_calc`)

The fine code says where in the Start period the Stop fell. The coarse code
says which period it was. The coarse counter runs on a clock 90 degrees
behind Start, so its count changes a quarter period after each Start rising
edge. A Stop that lands near the moment the count changes could see either
count. To avoid that, there are two counters:

* **Low Scale** increments on the rising edge of the Start-90 clock.
* **High Scale** copies Low Scale on the falling edge, half a period later.

At the Stop edge both are sampled, together with the chain. Each counter is
unsafe only near its own update moment, and the two update moments are half a
period apart. The fine code tells which half of the period the Stop fell in,
so it selects the counter that was stable at that moment:

* Fine code in the first half (`fine < N/2`): use `High + 1`.
* Otherwise: use `Low`.

With the coarse code `c` (1 .. `coarse_limit`), the histogram bin is
`(c - 1) * N + fine`. Events with coarse 0, coarse above `coarse_limit`, or a
bin at or beyond 1200 are counted as out of range. `coarse_limit` is 3 for
5 ns of range and 5 for 8.33 ns. A state not found in the table is a *miss*
and is also counted. The block takes one clock.

The exact phase of High + 1 versus Low, and the "first half" test on the fine
code, are this design's reading of the scheme. They were checked with
Stops placed inside the race windows (`tb_timestamp_calc`) and end to end.

### Encoder (`state_encoder`)

This is a content-addressable table of 1024 entries. Each entry holds a
448-bit state, a 10-bit code and a valid bit. Stage 1 compares the incoming
state with every valid entry and registers the match vector. Stage 2 gives
the code of the lowest matching entry, or a miss. The latency is two clocks,
and a side band (the two coarse counts) travels alongside. The host writes
entries through `enc_we/enc_addr/enc_state/enc_code/enc_valid`. A full
1024 x 448 compare is large, but it is what a direct state-to-code mapping
needs. A hashed RAM would be smaller, but it is not used here so that the
mapping stays exact.

### Histograms (`histogram_pingpong`, `histogram_ram`)

There are two 1200 x 16 RAMs. One is *active* and counts events by
read-modify-write. A forwarding register covers back-to-back hits on the same
bin, and counts stop at 65535 rather than wrapping. After `integ_cycles`
clocks the roles swap. The finished histogram is streamed out one bin per
word, first bin flagged with `m_user` and last with `m_last`, and each bin is
cleared as it is read. So the histogram is empty again by the time it becomes
active. Counting never stops, which is what removes the dead time. At reset
both RAMs are cleared over 1200 cycles (`hist_ready` goes high afterwards).

A swap is due while the previous readout is still stalled by the consumer
(`m_ready` low). In that case `hist_overrun` is raised and the swap waits.
Events keep being counted into the active histogram.

### Step 1 and step 2

* `step = STEP_STATES`: every captured state is sent as 14 words of 32 bits,
  low word first. `m_user` marks the first word and `m_last` the last. A
  4-deep FIFO absorbs bursts. `states_dropped` pulses if a state arrives
  while the FIFO is full.
* `step = STEP_HISTOGRAM`: the encoder, timestamp and histogram path is in
  use, and finished histograms go out on the same stream. `m_hist_b` says
  which histogram a word came from.

Change `step` only while the stream is idle.

### Clock crossing (`stop_capture`)

The chain flip-flops and the sampled counts are clocked by Stop.
`stop_capture` toggles a flag on each Stop. It passes the flag through two
flip-flops into the Start-90 domain and, on a change, copies the (by then
stable) state and counts. `evt_capture` follows Stop by 3 to 4 clocks. Stops
must be at least 4 clocks (6.7 ns) apart. A 100 MHz Stop is 6 clocks apart.

### Sync output (`sync_generator`)

`sync` is a registered trigger made from the Low Scale count. It is high for
the first `HIGH_SLOTS` (3) counts of every coarse cycle, so it repeats every
6 Start periods and is aligned with the coarse code. It is enabled by
`sync_en`.

## The delay line model (`tdl_carry_chain`)

This is a behavioural model, not synthesizable. Each tap gets an arrival time
from a fixed pseudo-random hash: stage delays spread between 0.4 and 1.6
times the mean and scaled to the chain length, a different routing delay for
the O and CO branch, and a Stop skew per slice. At a Stop edge, tap j takes
the level Start had `tap_ps[j]` earlier. This reproduces the things the design
has to cope with: uneven bins, bubbles, and O/CO outputs out of order. It
gives about 870 distinct states for the default seed, which fits the
1024-entry table. On a device, this module is replaced by 28 CARRY8
primitives and 448 flip-flops clocked by Stop, with placement constraints.

## Departures from the source design and open points

* The delay line is a model. Its state count and bin widths are those of the
  model, not of a measured device.
* The back end runs on the Start-90 clock (600 MHz). The clock of the back
  end, the clock crossing, the FIFO depths, the stream format and the
  32-bit integration counter are this design's choices.
* The exact coarse-selection rule and the modulo-6 counter are this design's
  reading of the coarse timing. The counter's range is chosen so that five
  periods (8.33 ns) fit in 1200 bins at every resolution down to 10 ps.
* Histogram bins saturate at 65535. What the original does on overflow is
  not known.
* The encoder is a full parallel compare. How the original implements the
  table is not known.
* State ordering, grouping, RSE and the table contents are host software and
  are modelled only in the testbenches. The clock manager (with its fine
  phase shift), the DMA, the network link, the processor driver and the
  photon detector are not part of the RTL. The top brings their signals out
  as ports.

## Files

| File | Contents |
|---|---|
| `rtl/tdc_pkg.sv` | constants, configuration struct, step enum |
| `rtl/tdl_carry_chain.sv` | behavioural delay line (448 taps) |
| `rtl/coarse_counter.sv` | Low/High Scale counters |
| `rtl/sync_generator.sv` | Sync trigger |
| `rtl/stop_capture.sv` | Stop-to-clk crossing of state and counts |
| `rtl/state_collector.sv` | step-1 state FIFO and 32-bit serializer |
| `rtl/state_encoder.sv` | state-to-code table |
| `rtl/timestamp_calc.sv` | coarse selection and bin number |
| `rtl/histogram_ram.sv` | 1R1W RAM |
| `rtl/histogram_pingpong.sv` | interleaved histograms A/B with readout |
| `rtl/tdc_top.sv` | top level |

The top's configuration input is `cfg` (`tdc_cfg_t`): `n_groups` (N),
`coarse_limit` and `integ_cycles`. Besides the stream, every converted
event is visible as a one-clock pulse on `evt_bin`, with its bin number on
`evt_bin_index` and its coarse code on `evt_coarse`. This is useful for
time-interval tests, which need single readings rather than histograms.

## Simulation

Each testbench checks itself and ends with
`TB_RESULT checks=<n> failures=<m>`. With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb \
    rtl/tdc_pkg.sv tb/tb_tdc_top.sv -y rtl --top-module tb_tdc_top \
    -Mdir obj_tdc_top -o sim
./obj_tdc_top/sim
```

Use the same command with other testbench names for the other tests.

| Testbench | What it checks | Result |
|---|---|---|
| `tb_coarse_counter` | Low/High counting, High trailing by half a clock, reset | 121 checks, 0 failures |
| `tb_sync_generator` | Sync pattern against Low Scale | 61 / 0 |
| `tb_timestamp_calc` | coarse selection with counts inside the race windows, bin, miss, range | 8001 / 0 |
| `tb_state_encoder` | table writes, matches, misses, invalid entries, lowest index wins, latency (64-bit states, 32 entries) | 801 / 0 |
| `tb_histogram_pingpong` | counts against a model over many frames, forwarding, saturation, overrun, clear on read (40 bins, 4-bit counts) | 371 / 0 |
| `tb_state_collector` | word order, flags, FIFO and drops under back-pressure | 634 / 0 |
| `tb_tdl_carry_chain` | Seq rises with Stop phase, bubbles present | 2401 / 0 |
| `tb_tdc_top` | full size, default parameters: step 1, host configuration, step 2 exact bin-by-bin check against the model, time-interval sweep in 14.8 ps steps, a missing state, overrun, every mechanism counted | 103195 / 0 |
| `tb_tdc_resolutions` | full size: the six resolutions 5.00, 10.04, 21.65, 43.87, 64.11, 87.73 ps | 420215 / 0 |

`tb_tdc_top` reaches N = 38 (LSB 43.86 ps) with RSE 0.031 and DNL in
[-0.43, 0.35], with no empty bin in range. `tb_tdc_resolutions` obtains
N = 333, 166, 77, 38, 26 and 19 for the six targets, with RSE from 0.21
(5 ps) down to 0.016 (87.7 ps). The DNL it prints is per fine code, summed
over the coarse periods. It ranges from [-0.92, 1.51] at 5 ps to
[-0.15, 0.13] at 87.7 ps. At 5 ps the run has only about 4 counts per
(coarse, code) bin, so a few such bins stay empty by chance; no fine code is
empty. Events whose state never appeared during step 1 come out as encoder
misses and are counted separately.

To change the resolution, rerun the host grouping with another `ref`, write
the new table and set `cfg.n_groups` and `cfg.coarse_limit`. To model another
device, change `P_SEED` or `P_CHAIN_PS` of the delay line.
