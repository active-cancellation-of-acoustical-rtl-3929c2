# A 25,600-tap, low-latency FIR loop filter

Feedback loops around mechanical actuators (a piezo moving a cavity mirror,
a scanning tip, a laser-cavity stretcher) rarely reach the bandwidth that
their delay would allow. Long before that, the loop gain runs into the
structure's acoustic resonances and anti-resonances. These are narrow pole
and zero pairs, often with Q above 200, at which the phase swings by up to
π and the loop starts to oscillate. This design cancels them in the digital
domain. The detector signal x is digitised and convolved in real time with
the impulse response of the inverse of the resonant part of the plant. The
result y goes to the loop controller. Once the resonances are divided out,
the controller sees a smooth 1/f plant and its gain can be raised by an
order of magnitude.

An inverse filter with 10 Hz wide features at a 243 kHz sample rate needs
an impulse response about 0.1 s long: 25,600 taps. Each tap costs one
multiply-accumulate per sample, so the filter needs 6.2 billion
multiply-accumulates per second. It must also add well under a microsecond
of delay, because the filter sits inside the loop. The RTL here does this
on a small FPGA clocked at 125 MHz. It uses 50 multipliers, each working
through 512 taps per sample period, and two block RAMs per multiplier.

    y(n) = sum_{m=0}^{25599} a(m) * x(n-m)

## Word formats

| quantity | width | format |
|---|---|---|
| input sample x (ADC) | 14 bit | signed two's complement |
| coefficient a(m) | 17 bit | signed, read as Q1.16 (65535 ≈ 1.0) |
| product | 31 bit | signed |
| MAC and total accumulators | 48 bit | signed (a DSP48 accumulator) |
| output y (DAC) | 14 bit | signed, = clip(total >>> 16) |

The sum of 25,600 full-scale products needs 46 bits, so the 48-bit
accumulators never wrap. The filter gain is set by the size of the
coefficients. With the Q1.16 reading, a single tap a(0) = 65535 passes x
through almost unchanged (the F = 1 setting). A total that is too large
for the DAC is clipped to +8191 or −8192, and the `sat` output pulses.

## Lanes: how the delay line is cut up

The 25,600 taps are split into `N_MAC` = 50 lanes of `N_OP` = 512 taps
(`fir_slice`). Lane k owns delay-line positions 512k … 512k+511 and
coefficients a(512k) … a(512k+511). Each lane has:

* a **sample RAM** (`sample_ram`, 512 × 14 bit) with its part of the delay
  line;
* a **coefficient RAM** (`coef_ram`, 512 × 17 bit), which the host loads;
* a **MAC** (`mac`), which multiplies one sample by one coefficient per
  clock and sums them.

All 50 lanes sweep their 512 taps at the same time, one tap per clock, so
the whole convolution takes about 512 clocks. 125 MHz / 514 clocks gives a
sample rate of 243.19 kHz.

Conceptually the delay line is a shift register. Once per sample period
every sample moves one position along it, and the oldest sample of lane k
moves into the first position of lane k+1. Block RAMs cannot shift, so each
lane's RAM is a **circular buffer**:

* At the start of a period the lane writes its incoming sample one place
  past its newest one. This overwrites the sample that has just left the
  lane.
* Sweep step t reads address `wptr − t`, the t-th newest sample, together
  with coefficient word t.
* At the step that reads the oldest sample it still uses, the lane copies
  that sample into a register (`s_out`).
* At the next period start, that register is the sample that lane k+1
  writes.

So each sample moves on to the next lane during the sweep that last uses
it, and each RAM does only one write per period.

## One sample period, clock by clock

`fir_sequencer` runs every lane in lock step from a single counter
(`cnt`, 0 … `PERIOD`−1):

| cycle | event |
|---|---|
| PERIOD−1 | `sample_strobe`: the free-running ADC word is taken as the new x(n) |
| 0 | `period_start`: every lane writes its incoming sample (lane 0: x(n)); lane 0 reads a(0) |
| 1 | `hold`: every lane latches its finished sum; lane 0 adds a(0)·x(n) as it does so |
| 2 | `sum_start`: the 50 latched sums are loaded into `mac_sum` |
| 1 … 512 | sweep: tap t = cycle−1 is read in every lane (the sample RAM and the coefficient RAM) |
| 2 … 513 | products are accumulated, one clock behind the reads |
| 3 … 52 | `mac_sum` adds one lane result per clock |
| 53 | the total is ready; `dac_output` scales and clips it |
| 54 | `dac_valid`: the new y(n) is on `dac_data` |

The sweep takes clocks 1 … 513, so a period needs at least `N_OP`+2 = 514
clocks. The default `PERIOD` of 514 is therefore both the shortest possible
period and the one that gives 243 kHz. The series sum must also fit into
one period (`PERIOD` ≥ `N_MAC`+3). Elaboration stops with an error if
either rule is broken, or if `N_OP` is not a power of two. The sums are
latched into hold registers, so the sweep for the next sample and the
series sum of the current one run at the same time.

## The latency trick: computing the next output ahead of time

A direct schedule would take x(n) in, sweep all 25,600 taps, and only then
sum and output. That adds a full sample period (4.1 µs) of delay. The goal
is about N_MAC clocks plus the half-sample delay that any sampled filter
has. This design gets there by computing almost all of y(n+1) before x(n+1)
exists:

* Only the term a(0)·x(n+1) depends on the newest sample. Every other term
  uses samples that are already stored.
* So the sweep in the period after x(n) arrives computes
  `sum_{m=1}^{25599} a(m) x(n+1−m)`.
* In lane 0 this means that x(n) sits at position 1. Sweep step t uses
  coefficient t+1 (address `tap+1`). The sample that lane 0 hands on to
  lane 1 is the one read at step 510 (position 511). The read at step 511
  is unused.
* Lanes 1 … 49 are not shifted: lane k step t uses position 512k+t and
  coefficient t.
* When x(n+1) is latched, lane 0's MAC, which is otherwise idle on that
  clock, multiplies it by a(0). a(0) was read on cycle 0. The product is
  added while the lane's sum is latched on cycle 1.

As a result, lane 0's RAM stores 511 samples and x_reg supplies position 0.
That is still 1 + 511 + 49·512 = 25,600 positions. The sample reaches the
DAC `N_MAC`+5 = 55 clocks (0.44 µs) after `sample_strobe`. Adding the
half-period delay of the sample-and-hold, 1/(2·243 kHz) = 2.06 µs, gives an
effective delay of 2.50 µs. The target was 2.6 µs.

## Series summation

`mac_sum` copies the 50 latched lane results into a shift register and
adds the word at its head to the total once per clock. `valid` pulses
N+1 clocks after `start`. The lanes therefore share one adder, and the
summing costs N_MAC clocks of latency. An assertion checks that `start`
never arrives while a sum is in progress.

## Loading coefficients

The coefficients are computed offline from a fit of the plant's transfer
function. Swap each fitted pole-zero pair, sample the result at f_s, and
take the inverse DFT. The host writes them through a plain write port:

* `coef_we`: write strobe;
* `coef_addr`: the tap index m, 0 … 25599;
* `coef_wdata`: the coefficient.

The top bits of m select the lane (m / 512) and the low 9 bits select the
word. Writes are allowed at any time, including while the filter runs. A
sweep that overlaps a write uses old coefficients for some taps and new
ones for others, so the outputs of about two sample periods are a mix. The
coefficient RAMs are not reset.

## Reset

Reset is synchronous and active low. After reset the sequencer spends
`N_OP` clocks writing zeros to every address of every sample RAM (`ready`
is low during this time). The delay line therefore starts silent and the
first output is a(0)·x(0). The first sample strobe comes right after the
clear.

## Sizes at the default parameters

| | value |
|---|---|
| taps | 50 × 512 = 25,600 |
| sample rate | 125 MHz / 514 = 243.19 kHz |
| memory time | 25,600 / f_s = 105 ms |
| spectral resolution | f_s / 25,600 = 9.5 Hz |
| filter bandwidth (Nyquist) | 121.6 kHz |
| processing delay | 55 clocks = 0.44 µs (2.50 µs including the half-sample hold) |
| RAM bits | 25,600 × (14 + 17) = 793,600 |
| multipliers | 50 (14 × 17 bit) |

The target device has 80 DSP48 slices and 2.1 Mb of block RAM. Each
sample and coefficient RAM (512 × 14 and 512 × 17) fits in one 18 Kb block
RAM, so the filter uses 100 of them (50 of the device's 60 36 Kb blocks).

## Parameters of `fir_top`

| parameter | default | meaning |
|---|---|---|
| `N_MAC` | 50 | lanes (MACs) |
| `N_OP` | 512 | taps per lane, power of two |
| `PERIOD` | 514 | clocks per sample, ≥ N_OP+2 and ≥ N_MAC+3 |
| `ADC_W`, `DAC_W` | 14, 14 | converter words |
| `COEF_W` | 17 | coefficient word |
| `ACC_W` | 48 | accumulators |
| `OUT_SHIFT` | 16 | output scaling shift |

The tap count, lane count, word widths, clock and sample rate are the
original design's figures. So are the lane structure and the serial
summing. The following are choices made here, and another implementation
could differ in any of them:

* the 514-clock period;
* the circular-buffer RAMs and the cycle plan;
* the tap-0 look-ahead;
* the write port;
* the accumulator width;
* the Q1.16 scaling with clipping;
* the clear after reset;
* two's complement converter words.

The board's converters have two channels. Only one input and one output
channel are used here. How the original design used the second channels is
not described (its housing brings out the raw signal x next to the
filtered y), so nothing is built for them.

The ADC and DAC themselves, the anti-aliasing low-pass (100 kHz corner)
ahead of the ADC, the processor that computes and loads the coefficients,
and the analog loop controller are outside this RTL.

## Files

| file | contents |
|---|---|
| `rtl/fir_pkg.sv` | default sizes and word types |
| `rtl/fir_top.sv` | the filter: sequencer, input register, 50 lanes, series sum, DAC stage |
| `rtl/fir_sequencer.sv` | period counter, clear after reset, control pulses |
| `rtl/fir_slice.sv` | one lane: RAM addressing, hand-over register, look-ahead in lane 0 |
| `rtl/sample_ram.sv`, `rtl/coef_ram.sv` | simple dual-port RAMs, synchronous read |
| `rtl/mac.sv` | multiply-accumulate with hold register |
| `rtl/mac_sum.sv` | serial sum of the lane results |
| `rtl/dac_output.sv` | scaling, clipping, output register |
| `tb/tb_*.sv` | one self-checking testbench per module, plus the end-to-end tests below |

## Simulation

Every testbench prints `TB_RESULT checks=N failures=M` and ends with
`$finish`. Build one with verilator, for example the full-size test:

    verilator --binary --timing --assert -Irtl -y rtl rtl/fir_pkg.sv \
        tb/tb_fir_full.sv --top-module tb_fir_full -Mdir obj_full
    ./obj_full/Vtb_fir_full

* `tb_fir_top` runs the whole filter at 4 lanes × 16 taps with a 20-clock
  period. It has its own model of the coefficients and of every input
  sample, and checks each output against the full convolution. It also
  checks the clip flag, the 55-clock latency (N_MAC+5 at its size), the
  period length and the clear after reset. Each run clips both high and
  low, uses the a(0) look-ahead, moves samples across lanes, rewrites the
  coefficients while running and resets in mid-run. The test counts each of
  these and fails if one never happens. It runs in well under a second.
* `tb_fir_full` runs the filter at its default size. It loads 25,600
  random coefficients, feeds 26,000 random samples so that the first ones
  pass through all 50 lanes, and checks every output bit-exactly. It also
  checks the latency and the period. This is about 13.4 million clocks and
  takes under a minute.
* `tb_fir_inverse` is an application test at the default size. It builds
  an inverse filter for six resonance/anti-resonance pairs of a
  piezo-mounted cavity mirror, with resonances at 3190, 5530, 7290, 13700,
  16350 and 25530 Hz and anti-resonances at 3330, 6000, 7810, 14350, 16600
  and 28400 Hz, with widths of 30 to 400 Hz. Each pair becomes one digital
  biquad, with s-plane roots mapped to z = exp(s/f_s) and unity gain at DC.
  The test runs the cascade on an impulse, rounds the result to 25,600
  coefficients at quarter scale and loads them. It then feeds a
  5530 Hz + 6000 Hz two-tone input and checks every output bit-exactly. It
  measures the gain at each tone from the DAC words and compares it with
  the loaded coefficients and with the biquad design. Measured gains:
  0.0179 at the filter zero and 7.62 at the filter pole. The loaded
  coefficients predict 0.0179 and 7.61, and the design 0.0170 and 7.61.
  The quarter scale is needed because the first coefficient of this filter
  is about 2.05.
* The module testbenches check each RAM's read latency and its behaviour
  when one address is read and written on the same clock. They also check
  the MAC sums, including the extra a(0) product, the series sum and its
  N+1-clock latency, the clipping, and the position of every sequencer
  pulse within the period.

The RAMs are plain arrays with a registered read, which synthesis tools map
to block RAM. The multiplier and accumulator in `mac` are one combinational
stage with no internal pipeline registers. At 125 MHz this meets timing on
the original device class only if the tool packs the stage into a DSP48
with its output register. Extra pipeline stages would shift the cycle plan
above by the same number of clocks.
