# A single-FPGA signal generator and time tagger for NV-centre experiments

Experiments on nitrogen-vacancy (NV) centres need three things with tight
mutual timing:
- laser and microwave gating pulses with sub-nanosecond edge placement;
- arbitrary microwave-band waveforms;
- time stamps of the photons that come back.

This design puts all three in one Virtex-7-class FPGA, with one clock tree:
- **2 AWG channels**: 16-bit samples at 1 Gsps, streamed from external DDR3.
- **12 pulse channels**: a 1.25 ns coarse grid refined by a tapped delay
  line in ~50 ps steps. No dead time between segments, 5 ns minimum width,
  and each segment can last over 5 s.
- **2 TDC channels**: a carry-chain interpolator gives ~23 ps bins over an
  8 ns clock period. A 33-bit coarse counter extends the range to 68 s. An
  on-chip accumulator keeps either a count rate or an arrival-time histogram.
- **A USB 2.0 link** through a CY7C68013A (FX2) slave FIFO. It carries the
  host's commands to a small command processor that holds every configuration
  register.

The top level is `nv_device_top`, and every block below it is synthesizable
RTL except two. The two tapped delay lines are behavioural models: the
pulse fine-delay chain and the TDC carry chain. On silicon they are placed
carry or routing primitives, so they cannot be written as portable RTL. Both
models give each tap a uniform delay; real chains are not uniform, and a
calibration table corrects for that.

## Clocks

All clocks come from one PLL and are inputs of the top. They must be phase
aligned: every edge of a slower clock coincides with an edge of each faster
clock.

| clock    | rate    | used by |
|----------|---------|---------|
| `clk`    | 125 MHz | USB, command processor, AWG load side, TDC counter and accumulators |
| `clk_dac`| 500 MHz | AWG serializers, on both edges (1 Gsps) |
| `clk200` | 200 MHz | pulse program processing and fine-delay tap selection |
| `clk800` | 800 MHz | pulse coarse serializers (1.25 ns slot) |

The design never derives a phase from counting. Each fast-domain serializer
watches a signal that toggles every slow cycle, and it reloads on the first
fast edge after that signal changes. This works at any phase relationship
that keeps the slow edges on fast edges.

Signals that cross from `clk` to `clk200` are of three kinds:
- The start and stop commands pass through a toggle synchronizer
  (`cdc_pulse`).
- Enables pass through two flops.
- Pulse-memory writes use the RAM's separate write clock. A program must not
  be rewritten while it runs.

## Pulse channels

This is the most intricate part. Each channel plays a list of 80-bit entries
from its own 512-entry memory:

| bits  | field       | meaning |
|-------|-------------|---------|
| 79:48 | `dur0`      | slots at '0' before the rising edge |
| 47:16 | `dur1`      | slots at '1' before the falling edge |
| 15:8  | `fine_rise` | extra delay of the rising edge, in taps |
| 7:0   | `fine_fall` | extra delay of the falling edge, in taps |

A slot is 1.25 ns, one period of `clk800`. Entries follow each other with no
gap. With the channel's loop bit set, the list repeats until it is stopped.

**Coarse part (`pulse_coarse`).** The program runs at 200 MHz. Each 200 MHz
cycle plans one *window* of four slots:
- A register `rem` counts the slots left in the current segment.
- While `rem >= 4`, the window is filled with the current level.
- Once `rem < 4`, the edge lands in slot `rem` of this window. The module
  loads the next segment and subtracts the slots already spent in this
  window.

No segment is shorter than 4 slots: shorter durations are raised to 4, which
is the 5 ns minimum width. So a window holds at most one edge, and each
window needs only one fine-delay value. The 4-bit pattern goes to a 4:1
serializer at 800 MHz. The next entry is prefetched from the one-cycle-latency
RAM while the current one plays. A replacement read is issued in the very
cycle an entry is consumed, so even back-to-back 4-slot segments do not
starve.

**Fine part (`pulse_delay_chain`, `pulse_chain_ctrl`).** The coarse output
runs down a 32-tap delay line of 50 ps per tap (1.6 ns in total, more than
one slot). With each window that holds an edge, the coarse module passes on
that edge's fine code. At the same 200 MHz edge the chain controller
switches the output multiplexer to that tap, so the edge comes out `code × 50
ps` late. The delay applies from one edge to the next, which gives:

    high time = dur1 × 1.25 ns − fine_rise × 50 ps + fine_fall × 50 ps
    low time  = dur0 × 1.25 ns − fine_fall(prev) × 50 ps + fine_rise × 50 ps

**Constraint:** a tap switch is glitch-free only if no edge is in flight in
the chain at that moment. Keep fine codes below 25, which covers the whole
1.25 ns slot in 50 ps steps. Codes above the last tap are clamped.

**Start and stop.** The start command begins every enabled channel at the
same 200 MHz edge. The first window begins 25 ns after the start edge
reaches the 200 MHz domain. Stop drops every channel to '0' at once.

## AWG channels

Each channel has the same pipeline: DDR3 read port → 32 × 128-bit FIFO →
8:1 serializer → 16-bit DAC bus.

- A waveform is `cfg_len` 128-bit words starting at `cfg_addr`. Each word
  holds 8 samples, with sample 0 in bits 15:0, played first.
- **Arming** flushes the FIFO and starts fetching. Fetching is
  credit-based: a request is issued only when `count + outstanding < 32`, so
  any DDR3 read latency is tolerated without overflow.
- `ready` rises when the FIFO is full or the whole waveform is inside it.
- **Trigger.** The selected trigger starts playback: external (two-flop
  synchronizer, then rising edge) or internal.
- **Playback.** One word leaves the FIFO each 125 MHz cycle. The serializer
  drives a new sample on every edge of the 500 MHz DAC clock, with a
  positive-edge register, a negative-edge register and an output multiplexer.
  On an FPGA this maps onto an OSERDES in DDR mode.
- **Latency.** The first sample appears 24 ns after the internal trigger is
  sampled. An external trigger adds 16 ns.
- With `cfg_repeat` set, the channel re-arms after each playback.
- If DDR3 falls behind during playback, the bus outputs 0 (mid-scale) for
  each missing word and a sticky `underflow` flag is set. Playing needs
  2 GB/s per channel from the memory.

The internal trigger is the command processor's trigger strobe OR the pulse
start command. So AWG playback and pulse programs start on the same command.
That same command also marks time zero for the TDCs.

The DDR3 controller itself is not part of this RTL. Its user-side read
ports, one per AWG channel, are ports of the top:
- `req`/`addr`, accepted by `gnt`;
- read data returned in order with `rvalid`, at any latency.

## TDC channels

Each channel works like this (`tdc_carry_chain`, `tdc_encoder`):
- **Sampling.** The input runs down a 360-tap chain of 23 ps, at least the
  348 taps that span one 8 ns period. Every 125 MHz edge samples all taps.
  After a rising input edge the sample is a thermometer code: ones from tap 0
  up to the edge's front. The count of ones is the time from the edge to the
  clock.
- **Hit detection.** A hit is seen when tap 0 goes from 0 to 1 between two
  samples. So input pulses and gaps must each last at least one clock period
  (8 ns).
- **Encoding.** The encoder counts ones rather than searching for the
  transition, which tolerates bubbles in the code. It outputs
  `{coarse = 33-bit cycle count, fine = taps}` two clock edges after the hit.

The hit time is `coarse × 8 ns − fine × 23 ps`.

**Accumulator (`tdc_accum`).** It has two modes:
- **Count rate.** Counts the hits in each gate of `gate_len` cycles, then
  latches the count and steps a sequence number. The host can poll without
  missing windows.
- **Histogram.** For each hit, computes the time since the latest *start*
  event, in taps:

      dt  = (hit.coarse − start.coarse) × taps_per_clk + start.fine − hit.fine
      bin = dt >> bin_shift

  - It increments one of 512 32-bit bins. Hits outside the bins, or before
    any start, are counted as overflow.
  - `taps_per_clk` is a calibration value, nominally 348.
  - The start is either the other TDC channel (a time-interval histogram
    between two inputs) or the internal start marker. A start that arrives
    in the same clock cycle as a hit already counts for that hit. This
    matters for short intervals: at 0.96 ns, about 88% of pairs fall in one
    8 ns cycle.
  - The update is a read-modify-write pipeline with forwarding, so hits on
    one bin in consecutive cycles are all counted.
  - Clearing takes 512 cycles.

Non-uniform bin widths are not corrected on chip. A code-density run with
`bin_shift = 0` gives the per-tap widths, and the host builds its correction
table from them.

## Host link and command set

**USB link (`usb_fx2_if`).** The FX2 runs as a synchronous slave FIFO:
- a 16-bit bus, with IFCLK = 31.25 MHz driven by the FPGA;
- EP2 carries host-to-device words, EP6 device-to-host words.

The FPGA decides on the falling edge of IFCLK and the FX2 samples on the
rising edge. Each IFCLK period does one of four things: read a word, write a
word, commit a short packet (PKTEND, after 16 idle periods with unsent data),
or nothing. This gives at most 62.5 MB/s, shared between the two directions.

**Commands (`cpu_ctrl`).** Each command is three words:
`{op[15:12], addr[11:0]}`, then data[31:16], then data[15:0].
- op 1 writes a register.
- op 2 reads one; the reply is two words, high half first.
- The command stream stalls until a reply has been taken.

| address | register |
|---------|----------|
| 0x000 | ID, reads 0x4E560001 |
| 0x001 | strobes: bit 0 pulse start, 1 pulse stop, 3:2 arm AWG 1/0, 4 stop AWGs, 5 AWG internal trigger, 7:6 clear TDC histogram 1/0, 8 TDC start marker |
| 0x002 | pulse channel enable mask |
| 0x003 | pulse channel loop mask |
| 0x004–0x006 | pulse entry staging, bits 31:0, 63:32, 79:64 |
| 0x007 | write staged entry: channel in bits 19:16, index in 15:0 |
| 0x008 | status: {clearing[11:10], pulse busy[9], 0, underflow[7:6], playing[5:4], ready[3:2], armed[1:0]} |
| 0x010+ch | index of the last entry of pulse channel ch |
| 0x020+4·ch | AWG ch: +0 start word, +1 length in words, +2 {repeat, external} |
| 0x040+16·ch | TDC ch: +0 {run, histogram mode}, +1 gate length, +2 bin shift, +3 taps per clock, +4 start is the other channel, +5 bin address (write) / bin value (read), +6 rate, +7 rate sequence, +8 histogram total, +9 overflow |

A typical run:
1. Write the pulse entries and AWG settings.
2. Arm the AWGs and wait for `ready`.
3. Configure the TDCs.
4. Write the start strobe.
5. After stopping the TDCs, read the histogram bins.

## What is not in the RTL, and where it departs from the source design

- **Not in the RTL.** The DDR3 controller, the clock manager (PLL), the FX2
  chip, the DAC board, the TTL drivers, the input comparators and the power
  supplies are not RTL here. The testbenches use behavioural models of the
  DDR3 read port and the FX2 FIFO side.
- **Delay chains.** Both are behavioural models with uniform taps, so
  differential non-linearity is not modelled.
- **Sizes chosen here.** The source gives block-RAM budgets, not depths.
  These sizes were chosen to fit them:
  - pulse memory: 512 entries;
  - AWG FIFO: 32 words;
  - histogram: 512 bins;
  - TDC chain: 360 taps;
  - pulse chain: 32 taps.
- **TDC input timing.** Hits closer than 8 ns apart, or shorter than 8 ns,
  are merged. Raw time stamps are not streamed to the host.
- **Long intervals.** The on-chip histogram cannot resolve a long interval
  (such as 100 ms) at tap resolution without an offset register, which is
  not built. The time stamps themselves cover 68 s.
- **Host protocol.** The command format, register map and USB framing are
  this design's own.
- **No on-chip feedback** from TDC results to the pulse programs.

## Simulating

Every module is in `rtl/<name>.sv`. The shared types and constants are in
`rtl/nv_pkg.sv`, which must be read first. Each block has a self-checking
testbench `tb/tb_<name>.sv` that prints `TB_RESULT checks=N failures=M`. For
example:

    verilator --binary --timing --assert -Irtl -y rtl -y tb rtl/nv_pkg.sv \
        tb/tb_nv_device_top.sv --top-module tb_nv_device_top -o sim
    ./obj_dir/sim

Add `-Wno-fatal` if your verilator turns lint warnings into errors.

**End-to-end test.** `tb_nv_device_top` runs the device at its full size and
controls it only through the USB pins. It checks:
- register read-back;
- pulse segment lengths to the picosecond, including a 500 ps fine rise
  delay;
- a looping channel at 100 MHz, and stop;
- AWG playback sample by sample at 1 Gsps on the internal trigger;
- external trigger with repeat, and underflow with a starved memory;
- TDC count rate over a 10 µs gate;
- histogram clear, and a 20 ns interval histogram between the two TDC
  inputs.

It takes about 1.5 minutes.

**Block tests.** These cover the 50 ps sweep of the fine delay, every tap
of both chains, the TDC fine code against the injected arrival time, and
back-to-back histogram updates.

**Interval test.** `tb_tdc_interval` measures intervals between the two TDC
channels at their full size. It runs 1000 pulse pairs at random clock phase
for 0.96 ns and again for 5 ns. Every pair must land within one bin of the
ideal value, and the mean must agree to within half a tap. With the uniform
chain model, the measured means are 960.6 ps and 5002.8 ps.

The testbench helpers `tb/ddr3_read_model.sv` and `tb/fx2_model.sv` are
behavioural. The DDR3 model returns sample `8a + k` plus a per-channel
offset as sample k of word a, and stalls grants at random.
