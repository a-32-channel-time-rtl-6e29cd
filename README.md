# 32-channel time-tagging and coincidence unit

This is SystemVerilog for the FPGA logic of a time-tagging and coincidence
detector for quantum-optics experiments. It follows the structure of the
design published by A. Hidvégi in "A 32 Channel Time-Tagging and Coincidence
Detector Unit with High Data Throughput". Every rising or falling edge on
32 inputs gets a time-tag with a step of 1/256 of a 440 MHz clock period,
about 8.9 ps. The tags are merged into one stream in time order. Tags that
fall within a programmable window are grouped into 32-bit coincidence
vectors. Eight pattern registers turn chosen vectors into trigger pulses.
A host reads time-tags or vectors over USB-3, depending on the run mode.

The paper describes the design at block level: what each subsystem does,
but rarely how. The block structure, the rates and most of the numbers
below come from the paper: 32 channels, 8 delay chains per channel, 256
effective taps, 440 MHz sampling, a window of at most 2.5 µs, 8 trigger
patterns, and the three run modes. The internals are this implementation's
own: tag format, sorting rule, window rule, word format, buses and register
map. Each file's header says which parts of that module follow the paper
and which are choices made here.

```
 sma_in[31:0] ──► MCTTU ──────────────► protocol_gen ──► usb_interface ◄──► USB-3 bridge
 test_clk ─────►  (TDC, offset,  │            ▲              │
                  dead time,     ▼            │              ▼
                  FIFO) x32 ─► coinc_processor ─► pattern_trigger ──► trig_out[7:0]
                  + sorter                                   control_unit (all settings)
```

## Making a time-tag

Each channel has a **carry-chain TDC**. In the FPGA, the input runs into
eight independent delay lines built from the carry logic. Each line has 32
taps and spans one 440 MHz period. `tdc_delay_line` is a behavioural model
of these lines. Synthesis drops its delays and leaves each tap as a wire
from the input, so the rest of the unit can be synthesised and sized. On
an FPGA the lines must be real carry-chain primitives. In the model, chain *k* starts
*k*/256 of a period later than chain 0, so tap *i* of chain *k* switches
(*k* + 8*i*) fine steps after the input edge. Adding up the taps that have
switched, over all eight chains, therefore counts elapsed time in 256 steps
per period. On silicon the taps are uneven; the eight chains are kept
because averaging them smooths out that nonlinearity. By default the
model's delays are ideal. `TAP_SPREAD` makes every element 1 ± s times its
nominal delay, drawn from a fixed pseudo-random sequence, with each chain
rescaled to span exactly one period. Then the taps switch in a mixed-up
order. The tag still follows the time monotonically, because it counts
switched taps and never decodes a position, but the fine codes become
uneven. Those uneven codes are what a code-density measurement calibrates
away.

`tdc_encoder` samples all 256 taps on every clock edge. It registers them
once more against metastability and inverts them if the channel is set to
falling edges. An edge is detected when tap 0 of chain 0 goes from 0 to 1
between two samples. In that sample, each chain's number of ones is how far
the edge has travelled. The counts of all chains add up to a sum S between
1 and 256. The count uses no thermometer decoding, so bubbles in the code
do no harm. The tag is

```
tag = coarse * 256 - S + 1
```

Here `coarse` is the free-running cycle counter at the capturing edge. The
result is the edge time rounded up to the next fine step. A tag is 55 bits:
a 47-bit coarse count (it wraps after 3.7 days) and 8 fine bits. The
encoder's pipeline is 4 cycles. An input must stay at its new level for
more than one period, and two edges of the chosen polarity must be at least
two periods apart.

`tag_conditioner` adds the channel's **offset** to each tag. The offset is
unsigned, 20 bits, in fine steps, and compensates cable and on-chip path
differences. The conditioner then applies the optional **dead-time
filter**: a tag closer than `dead` steps to the last tag it accepted is
dropped, and `dead = 0` turns the filter off. `tag_fifo` then holds the tag
in a 512-deep first-word-fall-through FIFO, one block RAM per channel. A
full FIFO drops new tags and counts them.

## Putting 32 channels in time order

`tag_sorter` looks at the heads of all 32 FIFOs every cycle and picks the
earliest tag; on a tie, the lower channel goes first. The earliest head is
not always safe to send: an edge captured a few cycles ago may still be in
another channel's pipeline, and its tag may be earlier. The sorter relies
on two facts:

* A tag is never earlier than its edge, because offsets are only added.
* An edge reaches a FIFO head well within HOLDOFF cycles of being captured.
  The encoder takes 4 cycles, the conditioner 2 and the FIFO about 2.

So every tag still to come is at least the **horizon**,
`(now - HOLDOFF) * 256`, with HOLDOFF = 16. The earliest head is released
only when it lies before the horizon. This gives a correct order at one tag
per cycle (440 M tags/s), at the price of about 16 cycles of latency.

All time comparisons use the sign of the 55-bit difference, so wrap-around
is harmless. If you allow negative offsets or lengthen the TDC pipeline,
raise HOLDOFF to match.

The sorter also reports `out_safe`, a time before which its stream is
complete. The coincidence processor uses it to close windows.

## Coincidence vectors and the event filter

`coinc_processor` consumes the sorted stream.

* A tag that arrives when no window is open opens one. Its time becomes the
  window start, and its channel sets a bit in a 32-bit vector.
* Each later tag no more than `window` steps after the start sets its
  channel's bit.
* The window closes when a later tag arrives, and that tag opens the next
  window. It also closes when `out_safe` shows that no tag inside the
  window can still come. A vector therefore never waits for the next hit.
* A closed vector with fewer bits set than `threshold` is dropped and
  counted in `n_filtered`. Any other vector leaves together with its start
  tag.

`window` is 19 bits in fine steps and is clamped to 281,600 steps
(2.5 µs = 1100 periods). The processor takes one tag per cycle. It stalls
its input only while a closing vector waits for the output.

`pattern_trigger` compares every vector that leaves the processor with
eight registers. An exact match starts a 10-cycle pulse on that register's
output, and a new match restarts the pulse. A register left at zero never
matches.

## Readout

The sorted tag stream feeds two blocks: the coincidence processor, and
`protocol_gen`, which selects the source from the run mode. The source that
is not being read out is still drained, so neither can stall the other.

| mode | `REG_CTRL[3:2]` | words sent |
|---|---|---|
| time-tagging | 0 | one `W_TAG` per tag |
| coincidence | 1 | one `W_COINC` per vector |
| coincidence with time-tags | 2 | `W_COINC_TS` then `W_TIME` |

The histogram modes of the original system are host software. They use the
two coincidence modes.

Every output word is 64 bits, with its type in bits [63:60]:

| type | code | contents |
|---|---|---|
| `W_TAG` | 1 | [59:55] channel, [54:0] tag |
| `W_COINC` | 2 | [31:0] vector |
| `W_COINC_TS` | 3 | [31:0] vector; the next word is its `W_TIME` |
| `W_TIME` | 4 | [54:0] tag of the first hit of the vector |
| `W_REG` | E | [47:32] register address, [31:0] value |
| `W_STATUS` | F | [59:47] dropped tags (saturating), [46:0] coarse time |

While the unit runs, a status word is sent ahead of data every
`status_period` cycles (0 turns it off). With these words the host can
track time and losses without scanning the data. The original host
software decompresses the stream, but the compression is not published.
Words here are sent uncompressed.

`usb_interface` buffers words in a 1024-deep FIFO. It sends each word to an
external USB-3 bridge as two 32-bit transfers, upper half first, one
transfer per cycle while `usb_full` is low. Register replies from the
control unit go into the same FIFO ahead of data. The host sends commands
as pairs of 32-bit words:

* a command word: bit 31 is 1 for a write and 0 for a read; bits [15:0]
  are the address;
* a data word, which a read ignores.

`control_unit` holds the register map below (all in `ttcd_pkg`):

| address | register |
|---|---|
| 0x0000 | [0] run, [1] test pattern, [3:2] mode |
| 0x0001 | coincidence window (fine steps) |
| 0x0002 | event-filter threshold |
| 0x0003 | status period (cycles) |
| 0x0004 | channel enables |
| 0x0005 | falling-edge select per channel |
| 0x0010–0x0017 | trigger patterns 0–7 |
| 0x0020–0x003F | offset of channel 0–31 |
| 0x0040–0x005F | dead time of channel 0–31 |

After reset the unit is stopped, in time-tagging mode. All channels are
enabled, on rising edges. The window is 256 steps, the threshold is 1, and
the status period is 1 ms.

## Self-test input

For calibration, the original board drives all 32 input pins with the same
2 MHz clock from a separate oscillator, so the whole input path is
measured. Averaging the 32 tags of one test edge gives the best estimate of
its time, and each channel's deviation from it shows that channel's jitter.
Here, `test_en` (control bit 1) switches every channel's TDC input to the
`test_clk` port and raises `test_oe`. The I/O buffers that do this on the
board are not modelled. The jitter and linearity analysis is host software.

## Clocks, rates and latency

All logic runs on the 440 MHz sampling clock `clk`, from an external PLL.
The original system very likely splits the logic into more clock domains;
the paper does not say. Rates at 440 MHz:

| stage | rate |
|---|---|
| one TDC channel | one edge every 2 cycles |
| sorter and coincidence processor | 440 M tags/s |
| protocol generator | 440 M words/s |
| USB bus | 220 M words/s |

The original design claims 200 M pulses/s on average. The sustained rate is
bounded by the bus, so it exceeds 200 M pulses/s only if status words and
bus stalls leave enough room. Bursts are absorbed by 513 tags per channel
FIFO and 1024 words in the USB FIFO.

An edge reaches the sorter output about 20 cycles after it happens. The
sorted stream uses a single combinational minimum search across 32 55-bit
heads. At 440 MHz this would need pipelining, for example as a tree of
two-input merge stages; timing closure has not been attempted.

## Where this differs from the original design, and what is missing

* The delay lines are a behavioural model. Its taps are ideal unless
  `TAP_SPREAD` is set, and the form and size of that mismatch are
  assumptions. So are the split into 8 × 32 taps and the staggered chain
  starts. The paper says 256 effective taps, eight chains and 440 MHz.
* "8 ps" in the paper is 1/(440 MHz × 256) = 8.88 ps here.
* The paper does not describe any of these, so they are this design's own:
  the tag, offset, dead-time and window widths; the sorting rule; the
  window rule; the word format; the USB bus; the command format; and the
  register map.
* There is no stream compression, so the uncompressed 8-byte words cannot
  reach the paper's 80 M words/s over a real USB-3 link. Such links carry
  about 400 MB/s, which is about 50 M words/s.
* Not built:
  * the logic analyzer block, which is only named;
  * the PCIe x4 port, which is vendor hard IP and drawn as optional;
  * the 1 GB DDR3L memory, whose use is not described;
  * the board parts: PLL, reference clock multiplexer and fan-out,
    oscillators, the USB-3 bridge and connectors.

## Verification

Each module has a self-checking testbench in `tb/`. Each compares the
module against a reference model written independently in the testbench,
and ends by printing `TB_RESULT checks=N failures=M`.

| testbench | what it checks |
|---|---|
| `tb_tdc_delay_line` | tap counts for edges at known sub-step times |
| `tb_tdc_encoder` | tag = edge time rounded up, rising and falling edges, 4-cycle latency |
| `tb_tag_conditioner` | offset and dead-time rule against a model, channel disable |
| `tb_tag_fifo` | order, capacity of DEPTH + 1, overflow flag, 2-cycle fall-through |
| `tb_tag_sorter` | time order, no loss, the safe-time bound, one tag per cycle |
| `tb_coinc_processor` | vectors and start tags against a model, filter count, the 2.5 µs clamp, back-pressure |
| `tb_pattern_trigger` | pulse timing and length, retriggering, match counts |
| `tb_protocol_gen` | word formats in all three modes, status period and contents, back-pressure |
| `tb_usb_interface` | bus order and halves, `usb_full`, full rate, command pairs |
| `tb_control_unit` | reset values, every register written and read back |
| `tb_mcttu` | 32 channels from pin edges to sorted tags, offsets, dead time, test pattern, FIFO overflow |
| `tb_ttcd_top` | the whole unit at default size, driven through the USB bus in all modes (see below) |
| `tb_workload_rates` | the rates and the self-test capture of the original evaluation (see below) |
| `tb_tdc_linearity` | a code-density sweep of one channel with ±30 % element spread (see below) |

`tb_ttcd_top` checks:

* every word in all three modes;
* the filtered count;
* the trigger pulses of two patterns;
* the dead-time drops;
* the test-pattern vectors;
* FIFO overflow, when the bridge holds `usb_full`;
* status words and a register read-back.

`tb_workload_rates` checks:

* 200 M random pulses/s on all channels, with no loss;
* bursts above that rate;
* a 2 MHz self-test capture, where every edge must give 32 equal tags.

`tb_tdc_linearity` repeats the original unit's linearity measurement.

* It sweeps 2,048 edges evenly across one period, through a channel whose
  element spread is ±30 %.
* The code-density histogram must reproduce the model's true code
  boundaries to within one sweep step.
* Summing the eight chains must give a smaller worst-case INL than one
  chain alone: 3.25 LSB against 5.23 LSB on average.

To run a testbench with Verilator 5, from the directory that holds `rtl/`
and `tb/`:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb rtl/ttcd_pkg.sv \
    tb/tb_ttcd_top.sv --top-module tb_ttcd_top -o sim && obj_dir/sim
```

The delay-line model needs `--timing`. The RTL files use
`` `timescale 1ps/1fs `` so that the fine delays of the model can be
represented.
