# Eight-channel tapped-delay-line TDC for picosecond timing

Some pixel-detector test chips (the DPTS and FASTPIX demonstrators, for
example) do not send their hits as data words. They send them as a short burst
of digital pulses, and the information is carried by the time between the
edges. In the DPTS, one hit is two pulse pairs:

- the time between the first and the second rising edge gives the column;
- the time between the second rising and the second falling edge gives the row;
- the time between the two groups gives the time over threshold (ToT);
- the first rising edge is the time of arrival.

Neighbouring pixels differ by about 100 ps. The column and row delays are around
1 ns, and the ToT can be as long as about 10 µs. To read such a chip, a
time-to-digital converter (TDC) needs three properties:

- it has no dead time;
- it can record several rising and falling edges inside one clock cycle;
- its resolution is well below 100 ps, over a range of microseconds.

This design does this in FPGA fabric. Each channel sends its input down a
chain of 504 carry-logic taps, about 10 ps each. On every cycle of a
311.1111 MHz clock it takes a snapshot of all 504 taps. Whenever the snapshot
holds an edge, the whole snapshot goes to memory. The snapshot is compressed to
216 bits, and a coarse cycle count is attached. The line is about 5 ns long,
longer than the 3.214 ns clock period. So every edge is caught, nothing is
thrown away inside a cycle, and the fine time comes from where the edge sits in
the line. The readout software turns the snapshot into times. It uses a
per-channel calibration of the tap delays.

The RTL follows the architecture of the TDC prototype built for the Caribou
data-acquisition system (Zynq-7000 FPGA, ZC706 board). Those numbers are the
prototype's:

- 8 channels;
- 126 CARRY4 elements per line, giving 504 taps;
- groups of 7 taps;
- 216 fine bits in a 256-bit word;
- a 311.1111 MHz clock.

Everything else was chosen here, and the choices are marked below and in each
file's header. Examples are the word layout, the buffering, the DMA protocol
and the delay values used in simulation.

## Block diagram

```
 sig_i[3:0] ──►┌──────────────┐ chan[7:0]   ┌──────────── tdc_channel (x8) ─────────────────────┐
               │ input_switch │────────────►│ tdc_delay_line ─► tdc_sampler ─► tap_group_sum ─┐  │
 loopback_o ◄──└──────────────┘             │ (126 x carry4,    (504 FFs)      (72 x popcount) │  │
                                            │  504 taps)                                      ▼  │
                                            │ coarse_counter ────────────────────────► hit_detection
                                            └──────────────────────────────────────────────┬──┘
                                                                     8 word streams (256 b) │
                                                            ┌────────────────────────────▼──┐
                                                            │ stream_merger                 │
                                                            │ 8 x sync_fifo + round robin    │
                                                            └──────────────┬────────────────┘
                                                                           ▼ 1 word / cycle
                                                            ┌───────────────────────────────┐
                                                            │ dma_engine (circular buffer)  │──► memory write port
                                                            └───────────────────────────────┘
```

The clock comes from an external jitter-cleaning clock generator. That
generator can be locked to a trigger logic unit, so several devices share one
time base. The memory is the processor system's DRAM. Both lie outside this
RTL: the clock is the `clk` input, and the memory is the valid/ready write port
of `tdc_top`.

## How a snapshot encodes time

This is the part to understand before anything else.

**The line.** Tap `i` shows the input as it was about `A(i)` earlier. `A(i)`
is the sum of the stage delays from the input up to and including tap `i`.
Suppose an edge entered the line at time `te`, and the line is sampled at clock
edge `ts`. Then every tap with `A(i) <= ts - te` already shows the new level,
and every later tap still shows the old one. The snapshot is a thermometer
code, and the step sits where the edge is:

```
tap:      0 ............................................... 503
rising:   1 1 1 1 1 1 1 1 1 1 1 0 0 0 0 0 0 0 0 0 0 0 0 0 0 0      step at p  =>  te ≈ ts - A(p)
pulse:    0 0 0 0 1 1 1 1 1 1 1 1 1 0 0 0 0 0 0 0 0 0 0 0 0 0      newest edge nearest tap 0
```

The level on the input side of a step is the newer value. Ones before the step
mean a rising edge; zeros mean a falling edge. Several edges in one snapshot
show as several steps, and the newest is nearest tap 0. That is how one cycle
can hold a whole pulse pair.

**Why nothing is lost.** The line is longer than one clock period: about
4.95 ns for rising edges and 5.27 ns for falling edges, against a 3.214 ns
clock. Every edge is therefore inside the line at one sampling edge at least,
and usually at two. The readout keeps the first sighting. It recognises a
repeat because the repeat has the same polarity and the same computed entry
time (the time estimates agree to within a bin).

**Group sums.** Before anything leaves the channel, the 504 taps are cut into
72 groups of 7, and each group is replaced by its count of ones (3 bits).

- A full group reads 7 and an empty group reads 0.
- The group that holds a step reads 1 to 6.
- The step position is 7·g plus that count, or 7·g + (7 − count) for a falling
  edge. So for a clean step the position is still exact to one tap.

What the sums give up is the order of the taps inside a group. That makes them
immune to "bubbles" (out-of-order taps) within a group. It also means two edges
closer than 7 taps (about 70 ps) can no longer be told apart.

**Coarse time.** Each word carries the 32-bit coarse count of the clock edge
that took the snapshot. Counting starts at reset or at a load. With `T` =
3.214 ns and the counter's zero at `t0`, the sampling edge is at
`t0 + (coarse + 1)·T`. Only differences matter, so the offset cancels.

**Calibration.** The tap delays are uneven. On the prototype, bins range from
about 0.1 ps to 70 ps, with wider bins where the line crosses between clock
regions. Rising and falling edges also travel at different speeds. The times
are therefore calibrated in software, separately for each channel and polarity.
A source that is not related to the clock gives edges evenly spread in time.
The number of edges that land in each bin is proportional to the bin's width.
Summing those widths gives `A(i)`. No hardware is needed for this beyond the
data path here. An edge found between taps `p-1` and `p` is placed at
`ts - (A(p-1) + A(p))/2`.

## Output word (256 bits, `tdc_pkg::tdc_word_t`)

| bits      | field     | meaning |
|-----------|-----------|---------|
| [215:0]   | `fine`    | 72 group sums; sum `g` (taps `7g`..`7g+6`) in bits `[3g+2:3g]` |
| [247:216] | `coarse`  | coarse count of the sampling cycle |
| [250:248] | `channel` | channel 0..7 |
| [251]     | `hit`     | the snapshot is not uniform, so it contains at least one edge |
| [252]     | `ovf`     | the coarse counter wrapped to 0 in this cycle |
| [253]     | `lost`    | words of this channel were dropped just before this one |
| [255:254] | —         | zero |

The 256-bit width and the 216 fine bits are the prototype's. The split of the
remaining 40 bits is this design's.

## Channel pipeline (`tdc_channel`)

| clock edge | stage | block |
|------------|-------|-------|
| n   | all 504 taps captured; coarse count captured beside them | `tdc_sampler`, `coarse_counter` |
| n+1 | 72 group sums registered | `tap_group_sum` |
| n+2 | word built; `word_valid_o` high if the sums are not all 0 and not all 7, or if the counter wrapped | `hit_detection` |

A channel can emit a word on every cycle and never stalls. A counter wrap
always produces a word, even without an edge. The readout uses those words to
extend the time range beyond 32 bits.

## Merging and the memory buffer

**Merging (`stream_merger`).** Each channel writes into its own 16-word FIFO.
A round-robin arbiter moves at most one word per cycle to the output. It starts
each search at the channel after the one it served last, and holds a word it
has offered until the word is taken.

A channel cannot be stalled. So when its FIFO is full, the new word is dropped
and counted in `dropped_o[c]`, and the next stored word of that channel has
`lost` set.

Capacity is the main thing to watch. One edge seen on all eight channels gives
up to 16 words, and the merged output carries one word per cycle. Sustained
edge rates must therefore stay below about one edge per 16 cycles (about
51 ns). The FIFOs only absorb bursts. The end-to-end test drives bursts faster
than that on purpose to show the drop path.

**Memory buffer (`dma_engine`).** The software provides a circular buffer:

- `dma_base_addr_i`: the base word address;
- `dma_buf_words_i`: the length in words;
- `dma_rd_ptr_i`: the next slot it will read.

Word `k` goes to `base + (k mod length)`. `dma_wr_ptr_o` only moves when the
memory has accepted a write. So every slot from `rd_ptr` up to `wr_ptr` holds
valid data when the software looks. One slot is always kept free. When the
buffer is full (`dma_full_o`), the engine stops taking words, and the
back-pressure fills the channel FIFOs.

The write port is a plain valid/ready word port: one 256-bit word per transfer,
at a word address. A real system puts a bus master (e.g. AXI) behind it.

## Input switch and the loopback

The switch has these connections:

- `sig_i[3:0]`: four signal inputs;
- `chan_sel_i[c]`: for each channel, which input it takes;
- `loop_sel_i`: which input is repeated on `loopback_o`.

It is combinational on purpose: the input edges are the quantity being
measured.

The loopback supports the resolution measurement the prototype was
characterised with. One source drives input 0 and channels 0–3. It is looped
out through a cable of known delay (3, 12, 15 or 24 ns) into input 1, which
feeds channels 4–7. The spread of the measured difference between the two
groups gives the resolution.

That the switch exists, with four inputs and a loopback, comes from the
prototype's block diagram. The per-channel select is this design's choice.

## The delay line in simulation

`carry4.sv` is a **behavioural model** of the FPGA's CARRY4 primitive, with
the primitive's port names. It cannot be synthesized (it uses timed `fork`
threads). For an FPGA build, use the vendor primitive in its place.

`tdc_delay_line.sv` only chains 126 instances:

- the signal enters through `CYINIT` of the first element;
- `CO[3]` feeds `CI` of the next element;
- the four `CO` outputs are the taps.

On the FPGA, each sampling flip-flop must be placed in the slice of the carry
element it samples. The prototype used only that constraint.

The stage delays of the model are made up to look like the prototype's
measurements:

| property | model | prototype (measured) |
|----------|-------|----------------------|
| stages in each element, rising | 13.0, 3.7, 12.0, 10.0 ps | — |
| stages in each element, falling | 14.0, 4.2, 12.6, 10.4 ps | — |
| variation between elements | ±6 % | — |
| clock-region crossings | +25 ps at elements 25, 75 and 125 (about taps 100, 300, 500) | wider bins near bins 100, 300 and 500 |
| mean tap, rising | 9.7 ps (about 332 bins per clock) | 331–334 bins per clock |
| mean tap, falling | 10.3 ps (about 312 bins per clock) | 303–320 bins per clock |

Delays are transport delays. Each input change travels on its own, so narrow
pulses survive. There is no jitter, no metastability and no process
variation. The simulated timing is therefore exact to the bin, and the tests
check it bit for bit. It says nothing about the few-picosecond resolution of
real silicon, which comes from calibration quality and clock jitter.

`verilator --lint-only` reports `SYNCASYNCNET` on the taps. They are sampled
asynchronously on purpose: that is the measurement.

## Files

| file | content |
|------|---------|
| `rtl/tdc_pkg.sv` | sizes and the output word type |
| `rtl/carry4.sv` | behavioural CARRY4 model (simulation only) |
| `rtl/tdc_delay_line.sv` | 126-element, 504-tap line |
| `rtl/tdc_sampler.sv` | 504 sampling flip-flops |
| `rtl/tap_group_sum.sv` | 72 groups of 7 to 3-bit sums |
| `rtl/coarse_counter.sv` | 32-bit cycle counter with wrap flag and load |
| `rtl/hit_detection.sv` | edge/overflow decision, word assembly |
| `rtl/tdc_channel.sv` | one channel |
| `rtl/sync_fifo.sv` | FIFO used by the merger |
| `rtl/stream_merger.sv` | eight streams into one, drop accounting |
| `rtl/dma_engine.sv` | circular-buffer writer |
| `rtl/input_switch.sv` | input routing and loopback |
| `rtl/tdc_top.sv` | the whole TDC |

All files use `` `timescale 1ps/1fs `` so that the delay model resolves
femtoseconds.

## Simulating

Every testbench checks itself and ends with a line `TB_RESULT checks=N
failures=M`. To build and run one:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb +libext+.sv \
    rtl/tdc_pkg.sv tb/tdc_tb_pkg.sv tb/tdc_top_tb.sv --top tdc_top_tb
./obj_dir/Vtdc_top_tb
```

Use another file and `--top` name for any other testbench. The simulator
has two states, so every register that is read has a reset or is overwritten
before use.

`tb/tdc_tb_pkg.sv` is an independent reference model. From the delay formula
above, it computes when each tap sees each input edge. From that it derives the
tap vector, the group sums and the expected words at any sampling instant, and
it decodes edges the way readout software would.

| testbench | what it shows |
|-----------|---------------|
| `carry4_tb` | per-stage rise and fall delays; a 2 ps pulse passes; the carry logic when `S`=0 |
| `tdc_delay_line_tb` | the full 504-tap vector equals the reference at 180 instants (rising, falling, pulse); line length 4–7 ns |
| `tdc_sampler_tb` | captures at the rising edge only |
| `tap_group_sum_tb` | 600 random and thermometer samples against a popcount |
| `coarse_counter_tb` | counting, wrap flag in the cycle the count reads 0, load |
| `hit_detection_tb` | uniform snapshots give no word; any step does; overflow-only words; field placement |
| `tdc_channel_tb` | 120 random pulses (150 ps to 2 ns); every word equals the reference in fine data, coarse time, flags and 3-cycle latency; includes a counter wrap |
| `stream_merger_tb` | order per channel; sent = received + dropped; `lost` exactly after gaps; 1 word per cycle; round-robin order |
| `dma_engine_tb` | memory contents and order, wrap-around, stall when full, random memory stalls |
| `input_switch_tb` | random routing |
| `tdc_top_tb` | the whole design at its default sizes (see below) |
| `tdc_calibration_tb` | code-density calibration of one channel (see below) |

`tdc_top_tb` runs the TDC like a laboratory set-up, in three phases. Every word
that reaches memory is compared bit for bit with the reference model.

1. **Cable-delay measurement.** Random edges go to channels 0–3 and, through a
   3, 12, 15 or 24 ns loopback cable, to channels 4–7. Edges are decoded from
   memory, and the group difference must equal the cable delay within 30 ps.
2. **DPTS-style hits.** The input switch is changed to two other inputs, which
   carry hits with column delays in 100 ps steps, row delays of 0.5–3.6 ns and
   ToT of 20–200 ns, plus one hit with a 10 µs ToT (about 3100 clock cycles
   between the two groups). Column, row and ToT decoded from memory must be
   within 30 ps.
3. **Stalled readout.** The software stops reading while a fast pulse train
   runs. The buffer fills, the FIFOs drop words, and the test checks that
   produced = read + dropped on every channel.

The coarse counters are also loaded just below their end once, so overflow
words occur. The test counts each mechanism and fails if one never happens:

- hits;
- words with several edges;
- overflows;
- lost flags;
- a full buffer;
- buffer wrap;
- an input-switch change;
- cable and DPTS decodes.

It runs in about 35 s. In a typical run, 1175 words reach memory, the
largest cable-delay error is 17.7 ps and the largest column, row or ToT error
is 11.6 ps. These errors are the bin widths of the model line, since the decode
places each edge at the middle of its bin.

`tdc_calibration_tb` runs the calibration described under "How a snapshot
encodes time" on one channel. A 24.69 ns clock, not related to the TDC clock,
gives 5000 rising and 5000 falling edges. The test keeps the first sighting of
each edge and histograms its step position, per polarity. It then builds the
delay curve `A(i)` from the histogram, scaled to one clock period, and compares
it with the true curve of the model line. With the model's delays it finds
329 rising and 309 falling bins per clock period. The mean bins are 9.8 ps and
10.4 ps. The calibrated curve stays within 16 ps of the true one. Bins range
from about 1.5 ps to 39 ps, and the widest is at the clock-region crossing
near tap 300. Before calibration, the DNL spans about [-0.8; 2.9] LSB and the
INL [-1.9; 2.4] LSB. The prototype's DNL and INL are given only after
calibration and for 2, 4 or 8 channels combined, so they do not compare
directly.
It fails if the curve error exceeds 25 ps, if the bin count falls outside
290–345, or if the widest bin is not at a crossing. It runs in about 25 s.

## What to trust, and where this departs from the prototype

**Taken from the prototype:**

- 8 channels, 126 CARRY4 elements and 504 taps per line;
- one sampling flip-flop per tap;
- summing in groups of 7 down to 216 bits;
- a 256-bit word with 40 bits for coarse time, channel and flags;
- hit detection that also fires on a coarse-counter overflow;
- merging of all channel streams, then DMA into memory;
- a 311.1111 MHz clock;
- an input switch with four inputs and a loopback output.

**Chosen here, because the prototype's description does not give them:**

- the hit rule (snapshot not uniform);
- the bit layout of the 40 bits, including a 32-bit coarse counter and the
  `lost` flag;
- the coarse-counter load input, used for a common T0 across devices;
- the pipeline registers and their latency;
- per-channel 16-word FIFOs, round-robin merging and drop-on-full;
- the circular-buffer DMA protocol and its simple write port;
- a single clock domain for everything;
- the per-channel input select;
- the delay values of the simulation model.

**Not built:**

- the clock generator and the trigger logic unit;
- the memory and processor system;
- the readout and calibration software;
- the carrier board and its ADC;
- the detector chips themselves.

Data compression and better matching of the line lengths were named as future
improvements of the prototype. They are not included.
