# Multi-phase-clock TDC with an oscillating input buffer (Kintex-7 style), in SystemVerilog

A multi-phase-clock time-to-digital converter samples its input with a few
clock phases and can never resolve time more finely than the phase spacing.
Here that spacing is 625 ps: four phases (0, 90, 180, 270 degrees) of a
400 MHz clock, as an FPGA ISERDES in oversample mode provides them. The
design gets below that limit without faster clocks or more phases. It sends
each input edge through a short delay ring that makes it oscillate. The ring
period T_OSC is a little more than a whole number of bins
(about 8 x 625 ps + 625/8 ps). So the M = 8 copies of the edge land at eight
evenly spread sub-positions of the 625 ps grid. The sum of the M measured
positions then has an effective bin of 625 ps / M = 78.125 ps. This is the
same as measuring the edge with eight TDCs whose clocks are shifted by 1/8
of a bin.

This RTL models one such TDC channel end to end, plus a two-channel top
level that shares one coarse timer: from the input pulse to a packed
{coarse, fine} event word in a FIFO. The delay ring is an analog element on
the FPGA, so it is a behavioural model with delays. Everything after it is
synthesizable SystemVerilog.

## Numbers at a glance

| quantity | value | origin |
| --- | --- | --- |
| ISERDES clocks | 400 MHz, 0/90/180/270 deg | paper |
| bin of one measurement | 1/(f x P) = 625 ps | paper |
| system clock, coarse timer | 100 MHz, 40 bits (about 3.05 h range) | paper |
| measurements per hit, M | 8, set at run time (4-bit `m_cycles`) | paper (value), this design (width) |
| effective bin of the sum | 625 ps / M = 78.125 ps | paper |
| T_OSC | > 5 ns; about 5.08 ns in the model | paper (rule), this design (model delays) |
| IDELAY tap | 1/(64 x 300 MHz) = 52.083 ps, 5-bit tap | paper (tap), device (width) |
| fine field | 12 bits | this design |
| event FIFO | 16 words per channel | this design |
| channels in `tdc_top` | 2 | paper's test set-up |

## The oscillation launcher

This is the part that makes the design work, and the part that is hardest
to see in the code. It is made of three modules:

* `hit_latch`: a flip-flop clocked by the input pulse itself, with D = 1.
  It gives a clean rising edge, HIT, whatever the width of the input pulse.
* `osc_delay_loop`: a MUX, then routing and an IDELAY, then an inverter
  whose output goes back to MUX input 1. MUX input 0 is HIT. The IDELAY
  output, DDLY, goes to the ISERDES.
* `selector`: drives the MUX select, SEL.

One hit runs like this:

1. While idle, SEL = 0, so HIT passes through the MUX. DDLY rises
   t_MUX + t_routing + t_IDELAY after HIT. This first edge, t_0, is a true
   copy of the input edge, shifted by a fixed delay.
2. That rising edge of DDLY sets SEL. The MUX now takes the inverted DDLY,
   and the loop runs as a ring oscillator with period
   T_OSC = 2 (t_IDELAY + t_INV + t_MUX + t_routing). DDLY rises again at
   t_0 + T_OSC, t_0 + 2 T_OSC, and so on.
3. SEL also clears `hit_latch` and holds it cleared. Input edges that come
   during the oscillation are therefore ignored. This is the dead time.
4. The selector counts the falling edges of DDLY. On the M-th one (the end
   of the M-th cycle) it clears SEL. DDLY is low at that moment and the
   inverter has not yet switched, so the ring stops without a runt pulse.
   The latch is released, and the channel is ready again.

So each hit gives exactly M rising edges, t_i = t_0 + i T_OSC. In the model,
the default delays (MUX 250 ps, inverter 250 ps, routing 789.5 ps, IDELAY
tap 24) give T_OSC = 5079 ps. That is within a picosecond of the ideal
8 x 625 + 78.125 ps, which spreads the eight sub-positions evenly. On real
silicon this period is set by placement and by the IDELAY tap (the `tap`
input), and is checked by measurement.

The SEL flip-flops are clocked by DDLY itself, one set on its rising edges
and one on its falling edges. SEL is the XOR of two toggle flip-flops, so
each flip-flop has only one clock.

## From samples to edge positions

`iserdes_os` follows the three-column by four-row flip-flop array of an
ISERDES in oversample mode. Stage 1 samples DDLY on the rising edge of each
of the four phases. Stages 2 and 3 retime the samples to the 0-degree clock.
Each 2.5 ns clock period gives a 4-bit word. Its MSB is the 0-degree sample,
which is the earliest.

`buffer4x4` collects four words into a 16-bit code per 10 ns system period.
Bit 15 is the earliest sample and bit 0 the latest. The system clock takes
this code from a holding register that stays stable for four fast cycles.
The 400 MHz and 100 MHz clocks come from one PLL with aligned edges, so this
is an ordinary synchronous transfer. Which four words form one code depends
on the moment reset is released. **Release `rst` in the first quarter of a
system clock period.** With that rule, the code that enters the pipeline at
system edge E holds the samples of [E - 25 ns, E - 15 ns).

`one_out_n` marks leading edges. It has one three-input gate per bit:
`mark[k] = in[k] & ~in[k+1] & ~in[k+2]`. This is a sample that is high after
two low samples, i.e. a 0-to-1 transition in time. Asking for two zeros
removes single-sample bubbles. For k = 14 and 15, the indices 16 and 17 wrap
to bits 0 and 1. Those two bits are taken from the previous period's code:
they are the samples just before bit 15 in time.

`output_encoder` turns the marks into bin positions counted from the start
of the period (0 = earliest). Because T_OSC > 5 ns, one 10 ns period holds
at most two edges. The encoder therefore gives `n` (0, 1 or 2) and two
4-bit positions. A third mark cannot occur at valid settings and is ignored.

## Summing the M measurements

`fine_sum` adds the M positions of one hit. Each edge is measured within
its own system period. Before adding, every position is referred to the
period of the first edge:

    t_fine = sum over i = 0..M-1 of ( pos_i + 16 * w_i )

Here w_i is the number of system periods between edge 0 and edge i.
Counting a one-edge period as "one more T_CLK" is the compensation term of
the original formulation. This design counts it cumulatively, because every
period boundary that has passed adds one T_CLK to all later edges.
Measurement of a hit starts with the first edge seen while idle and ends
after M edges. One hit can end and the next begin in the same period.

After the M-th edge, the event {coarse, fine} is produced. `coarse` is the
coarse counter value in the cycle where edge 0 was added. That is a fixed
pipeline latency after edge 0's 16-sample period: the counter holds the
value `coarse` during the system clock period that begins 45 ns after that
16-sample period begins.

What the numbers mean: with M = 8 and T_OSC = 5079 ps, the fine code of a
hit whose first edge lies at fraction x (0 <= x < 16 bins) into its period is
about 8x + 28 x T_OSC / 625 ps. That gives codes 224 to 351: 128 values of
78.125 ps on top of a constant offset. The 28 comes from 0 + 1 + ... + 7
oscillation periods. A time stamp in units of 78.125 ps is
`coarse * 16 * M + fine`. Only differences of such stamps (between channels,
or between hits) are meaningful without a calibration of the constant
offsets. The fine code is not linearised. A code-density histogram can
correct it if needed.

### Measuring the ring period with the TDC itself

The same referred edge times give the oscillation period. The distance
from edge i to edge i+1, both counted from edge 0's period, is
t_{i+1} - t_i = T_OSC, measured in 625 ps bins. A one-edge period between
them already shows up as the extra 16 bins of the later edge, so nothing
needs correcting. `fine_sum` reports these M - 1 distances per hit on its
`per` output (`tdc_pkg::osc_period_t`: a count n of 0, 1 or 2 and the values
d0, d1), one clock after the period holding the later edge.

A single value is 625 ps coarse: with T_OSC = 8.126 bins it reads 8 or 9.
Averaged over many hits, the mean converges to T_OSC. The spread is
625 ps x sqrt(p (1 - p)) with p the fractional part of T_OSC / 625 ps, about
208 ps here. So a spread of about 200 ps in such a histogram is quantisation
and says nothing about the ring's jitter. An oscilloscope shows the true
jitter. The output is meant for setting the IDELAY tap so that T_OSC lands
close to the ideal value of (8 + 1/M) x 625 ps.

## Event words and the two-channel top

`packager` writes each event into a 16-deep FIFO as `tdc_pkg::tdc_event_t`,
which is coarse[39:0] followed by fine[11:0]. Its read side is a valid/ready
stream, first word fall-through. If the FIFO is full, the new event is
dropped and the sticky `overflow` flag is set.

`tdc_channel` wires one complete channel. `tdc_top` has two channels. It
builds the 180- and 270-degree clocks by inverting `clk0` and `clk90`. It
shares one `coarse_counter` between the channels, so their stamps share a
time base. It brings out each channel's FIFO stream, `overflow`, `busy`
(dead time) and the unbuffered period output `per`. The PLL and the serial readout link are outside the design.
`tdc_top` therefore takes `clk0`, `clk90` and `clk_sys` as inputs and gives
the streams as outputs.

Latency: about 2.3 ns from input to t_0, then (M - 1) x T_OSC to the last
edge. Samples then need 15 ns to enter the pipeline, plus four system clocks
through `one_out_n`, `output_encoder`, `fine_sum` and the FIFO. With M = 8
the channel is re-armed 40.4 ns after a pulse. It takes pulses 50 ns apart
(20 Mevent/s) without loss; the encoder and sum accept a new edge pair every
cycle.

Size: a generic synthesis gives about 250 flip-flops per channel (the sum
alone has 144, including the period output), plus the shared 40-bit
counter and the 16 x 52-bit FIFO. That is the same order as the roughly
350 flip-flops and 200 LUTs reported for the FPGA prototype, whose packing
logic is not described in detail.

## What is this design's own, and where it differs from the paper

The design follows the published architecture: the latch, the
MUX/IDELAY/INV ring with its selector, the four-phase ISERDES, the 4x4
buffer, the one-out-of-N gates, the output encoder, the sum over M
measurements, the 40-bit coarse counter and the packing. The following
points are not given there and were chosen here:

* The latch is cleared by SEL. Input edges during the oscillation are
  ignored rather than queued.
* The selector counts falling edges and uses two toggle flip-flops.
* The clocks of ISERDES stages 2 and 3 are both the 0-degree clock. The
  Q-bit order puts the earliest sample in the MSB.
* The buffer uses a shift register and a holding register. Its reset has a
  release-timing rule.
* The wrap-around inputs of the two top one-out-of-N gates come from the
  previous period, not from the same code. Taken literally from the same
  code, a pulse that crosses a period boundary would be counted twice.
* The one-out-of-N gates are active high. The source text calls them NAND
  gates, but its figure shows active-high marks.
* The output encoder is a plain priority search, not the fat-tree encoder
  the source cites.
* The T_CLK compensation in the sum is cumulative (see above).
* Widths of the fine field (12 bits), of M (4 bits) and of a period value
  (8 bits), the FIFO depth, the stream handshake and the drop-on-full rule.
* How the measured periods leave the channel: one unbuffered port beside
  the event stream.
* The single coarse counter shared by both channels.
* All delay values of the ring model except the IDELAY tap size.

Not built:

* The PLL. It is a vendor primitive, and the testbenches generate its
  clocks.
* The Aurora link, DAQ card and PC of the measurement set-up.

Jitter, temperature drift and the spread of T_OSC between channels are
analog effects. The behavioural ring does not model them. The resolution
figures printed by the testbenches are therefore quantisation only.

## Verification

Every module has a self-checking testbench in `tb/`. Each compares the
module against values the testbench works out by itself, and ends with a
`TB_RESULT checks=... failures=...` line.

| testbench | what it checks |
| --- | --- |
| `tb_hit_latch` | set on rising edge only, hold, async clear, edges ignored while cleared |
| `tb_osc_delay_loop` | HIT-to-DDLY delay and oscillation period against the delay sum, for six taps; clean stop |
| `tb_selector` | SEL set on first edge, exactly M rising edges, stop on M-th falling edge, M = 8 and 3 |
| `tb_iserdes_os` | q = the four phase samples of the period two clocks earlier, random DDLY |
| `tb_buffer4x4` | four consecutive words per code, order and latency |
| `tb_one_out_n` | edge marks against a time-ordered reference, bubbles, boundary-crossing pulses |
| `tb_output_encoder` | first two marks as positions, 0 to 3 marks |
| `tb_fine_sum` | sums and periods against edge bin numbers, M = 8 and 4, two-edge periods, end and start in one period |
| `tb_coarse_counter` | count and width |
| `tb_packager` | FIFO order, full, drop and overflow flag |
| `tb_tdc_top` | two channels at default parameters, every event and period exact; dead time, 50 ns back-to-back pulses, M switch, FIFO overflow |
| `tb_code_density` | 6000 random hits per channel: fine code 224..351, 128 codes, DNL within about -0.4..+0.5 LSB; T_OSC histogram of 42000 periods per channel, mean 5078.8 ps, RMS 207.5 ps |
| `tb_interval_sweep` | 0-2 ns in 100 ps steps and 0-2 us in 50 ns steps: mean error within 12 ps, RMS 15-39 ps |

The system-level testbenches predict each event from first principles. They
compute the DDLY edge times t_i = t_hit + t_MUX + t_route + t_IDELAY +
i x T_OSC, take their sample numbers n_i = ceil(t_i / 625 ps), group the
samples into 16-sample periods, and from that derive coarse and fine.
`tb_tdc_top` also counts every mechanism it is meant to exercise, and fails
if one never happened.

## Simulating

All files use `timescale 1ps / 1fs`. The ring model needs `--timing`.
`tdc_pkg.sv` must come first; `-y rtl` finds the modules. The lint warnings
(widths in the testbenches, delays that Verilator cannot see as non-zero)
are harmless, hence `-Wno-fatal`:

    verilator --binary --timing --assert -Wno-fatal -Irtl -y rtl \
        rtl/tdc_pkg.sv tb/tb_tdc_top.sv --top-module tb_tdc_top -Mdir obj_tdc_top
    ./obj_tdc_top/Vtb_tdc_top

A block testbench needs only the package, the block and the testbench. For
example: `rtl/tdc_pkg.sv rtl/fine_sum.sv tb/tb_fine_sum.sv`. The end-to-end
runs take about a second.

Things to change, and where:

* M: the `m_cycles` input. Change it only while no channel is busy.
* The ring period: the `tap` inputs, or the `T_*` parameters of
  `osc_delay_loop` (passed through `tdc_channel`). Keep T_OSC above 5 ns.
  Otherwise more than two edges can fall into one 10 ns period.
* The FIFO depth: the `FIFO_DEPTH` parameter.
* The number of channels: the `NUM_CH` parameter.

For an FPGA build, replace `osc_delay_loop` with a LUT multiplexer, a LUT
inverter and an IDELAYE2 placed by constraints. `iserdes_os` can be mapped
onto the ISERDESE2 primitive in oversample mode.

## Files

`rtl/tdc_pkg.sv` (constants and types), `hit_latch`, `osc_delay_loop`
(behavioural), `selector`, `iserdes_os`, `buffer4x4`, `one_out_n`,
`output_encoder`, `fine_sum`, `coarse_counter`, `packager`, `tdc_channel`,
`tdc_top`; one testbench per module in `tb/`, plus `tb_code_density` and
`tb_interval_sweep`.
