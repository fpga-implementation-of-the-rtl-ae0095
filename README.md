# A time-multiplexed CAR cochlea: 1224 resonator sections at 48 kHz

The Cascade of Asymmetric Resonators (CAR) models the basilar membrane of the
inner ear as a long chain of second-order filters. Each filter is tuned a
little lower than the one before it, so a sound moves down the chain the way a
travelling wave moves along the cochlea from its base to its apex. The output
of every filter is one channel of a frequency analysis. CAR is the
basilar-membrane part of the larger CAR-FAC hearing model. The hair-cell and
gain-control stages of CAR-FAC are not part of this design.

A good approximation of the human cochlea needs a large number of channels.
This design gets 1224 of them into one FPGA at audio rate by leaning on one
observation. One section needs only a handful of multiplications per sample,
and a 142 MHz clock gives 2958 cycles per 48 kHz sample. So a single
arithmetic unit, the *CAR core*, is shared in time by 102 sections. These
102 sections form a *CAR array*. Twelve arrays run side by side and are
chained together into a cascade of 12 x 102 = 1224 sections.

The RTL follows the published architecture of this FPGA implementation: the
section equations, the coefficient set, the 29-cycle section time, the 102
sections per array, the 12 arrays and the names of the state machines. Word
lengths, rounding, the memory organisation, the upload port, reset
behaviour and the joint between arrays were not published. They are this
design's own choices, and the last section lists them.

## The resonator section

Each section is a two-pole, two-zero filter with two state variables W1 and W2
(the outputs of its two delay elements). With input X and output Y, one sample
step is

    W1' = X + a*W1 - c*W2
    W2' =     c*W1 + a*W2
    Y   = g * (X + h*W2')

where a = r cos(theta) and c = r sin(theta). Here theta is the pole angle in
radians per sample and r is the pole radius. The transfer function is

    Y/X = g (z^2 + (-2 a0 + h c0) r z + r^2) / (z^2 - 2 a0 r z + r^2),
    a0 = cos(theta), c0 = sin(theta).

The state update is a rotation by theta scaled by r, which is why the section
rings at theta. The h term puts a pair of zeros above the pole frequency, and
that zero pair gives the resonance its asymmetric shape: a gentle rise below
the peak and a steep fall above it. As long as h < (2 + 2 a0)/c0 the zeros
stay complex and sit at the same radius r as the poles. Choosing

    g = (1 - 2 a0 r + r^2) / (1 - (2 a0 - h c0) r + r^2)

gives each section unit gain at DC. The cascade then passes low frequencies
unchanged and adds up the peak gains of the sections tuned near each input
frequency.

Section pole frequencies follow the Greenwood map of the human cochlea,
f = 165.4 (10^(2.1 x) - 1), where x runs from 0 at the apex to 1 at the base.
x = 1 gives 20.657 kHz and x = 0.023 about 20 Hz. Sections are ordered from
high to low frequency, so section 0 of array 0 is the basal, highest-frequency
channel. The hardware only ever sees a, c, g and h. The host computes them
with r as a free parameter and uploads them; the chip holds no
coefficient formula. `tb/car_ref_pkg.sv` (`greenwood_coefs`) shows one way to
compute them: x spaced evenly from 1 to 0.023, r = 1 - 0.12 theta, h = c0.

## Number formats (`rtl/car_pkg.sv`)

| quantity | format |
|---|---|
| sound input | 16-bit two's complement, shifted left by 4 into the data word |
| X, Y, W1, W2 | 24-bit two's complement integers |
| a, c, g, h | 18-bit signed, 16 fractional bits (range -2 .. +2) |
| products | 42-bit, rounded half up back to 24 bits, saturated |
| sums | saturated to 24 bits |

This leaves 4 bits below the input LSB and 4 bits of headroom above input full
scale. An 18-bit coefficient and a 24-bit datum fit one 25 x 18 DSP multiplier.
Low-frequency sections have small c (about 0.0026 at 20 Hz), so their
coefficients have only a few significant bits. Widen `COEF_W` and `COEF_FRAC`
together if those channels need finer tuning.

## The CAR core (`rtl/car_core.sv`)

The core computes one section step. Two state machines run in parallel, each
going Idle, then Calc, then Done:

* The **W1 machine** forms a*W1 and c*W2 in its first Calc cycle and
  W1' = X + a*W1 - c*W2 in its second. Then it waits in Done.
* The **W2 machine** forms c*W1 and a*W2, then W2', then h*W2', then
  X + h*W2', then Y = g*(X + h*W2'). That is five Calc cycles.

`done` is high for one cycle once both machines are in Done, and both then go
back to Idle. X, the stored states and the coefficients are latched on the
`start` cycle. `done` comes 6 cycles after `start` (`CORE_LATENCY`), and `y`
and `st_new` hold their values until the next step. Each Calc cycle holds at
most one multiplier level and one adder or saturation, to keep the paths short
at 142 MHz. Timing closure on an FPGA has not been checked.

## The CAR array: one core, 102 sections (`rtl/car_array.sv`, `rtl/car_ctrl.sv`)

An array holds:

* a coefficient memory (`coef_mem`, 102 x 72 bits);
* a state memory (`state_mem`, 102 x 48 bits, the W1 and W2 of every section);
* one CAR core;
* the global state machine (`car_ctrl`), which time-multiplexes the core;
* a bank of 102 output registers, the taps y1..y102;
* `sample_sync`, which turns the 48 kHz clock into a one-cycle tick in the
  system clock domain (two synchronising flip-flops and an edge detector).

The global state machine has the states Idle, Control and Done, plus an Init
state that this design adds. After reset, Init clears W1 and W2 of all 102
sections, one per cycle, and `ready` stays low meanwhile. Idle waits for the
sample tick. In Control every section gets a fixed slot of 29 cycles:

    slot cycle 0        section number presented to both memories
                        (for section 0 this is the tick cycle itself)
    slot cycle 1        core started with the section's a, c, g, h, W1, W2
                        and its input X
    slot cycle 7        core done: W1', W2' written back, Y published as tap s
                        and kept as the next section's input
    slot cycles 8..28   idle
    (cycle 28 of the last section)  -> Done, one cycle of done_sample

The input multiplexer gives section 0 the sound sample latched at the tick
and gives every later section the output the previous section produced a
slot earlier. So within one sample the whole array behaves as one 102-stage
cascade, with no extra delay between sections. Tap s appears
s x 29 + 7 cycles after the tick, and `done_sample` comes exactly
102 x 29 = 2958 cycles after it.

The 29-cycle slot is the published section time (203 ns at 142 MHz). This
core needs only 7 of those cycles. The slot length is kept because it sets the
budget: 2958 of the 2958.3 system cycles in one 48 kHz period. The Done state
accepts a new tick, so ticks 2958 or 2959 cycles apart (the pattern of a real
48 kHz clock against 142 MHz) are all taken. If a tick arrives while sections
are still being processed, the sample is dropped and the sticky `overrun` flag
is set. With a slower system clock or a larger `NSEC`, this flag is how the
design reports that it cannot keep up. The rule is
NSEC x SECTION_CYCLES <= f_clk / f_s.

## Twelve arrays (`rtl/car_cochlea.sv`)

All arrays run in lock step from the same two clocks. Array 0 takes the sound
input. Array k+1 takes `y_last` of array k, the last section's output, which
array k produced during the *previous* sample period and still holds. So
each array works one sample behind the array before it. The 1224 sections are
still one cascade, but the output of array k lags the sound by k sample
periods, and the final section lags it by 12 periods (12 x 20.8 us = 250 us).
The published design reports this same 250 us latency at the final section,
which is why the joint is built this way. For a cochlear model the delay
does not matter, since it is far shorter than the period of the lowest
channel, but a user aligning channels must allow for it:
`taps[k][s]` at period n belongs to input sample n - k.

### Ports of `car_cochlea`

| port | dir | width | meaning |
|---|---|---|---|
| `clk` | in | 1 | system clock, 142 MHz |
| `rst_n` | in | 1 | synchronous active-low reset |
| `clk_48k` | in | 1 | sample clock; sound_in is latched about 3 system cycles after its rising edge |
| `sound_in` | in | 16 | sound sample, must be stable around the rising edge of `clk_48k` |
| `coef_we`, `coef_arr`, `coef_sec`, `coef_wdata` | in | 1, 4, 7, 72 | write {a, c, g, h} of section `coef_sec` of array `coef_arr` (global section coef_arr x 102 + coef_sec); one entry per cycle |
| `taps` | out | 12 x 102 x 24 | output of every section for its latest sample |
| `tap_valid`, `tap_sec`, `tap_y` | out | per array | stream of each section output as it is computed |
| `y_out` | out | 24 | output of the final (lowest-frequency) section |
| `done_sample` | out | 12 | one-cycle pulse per array when a sample is finished |
| `busy`, `ready`, `overrun` | out | 12, 1, 12 | processing; initialised; sticky overrun |

Parameters: `NARR` = 12, `NSEC` = 102, `SECTION_CYCLES` = 29 (at least 8).

To use it: hold `rst_n` low, release it, upload the coefficients (this may
overlap the 102-cycle clearing), wait for `ready`, then run the sample clock.
The coefficient memories are not reset. Coefficients may be rewritten at any
time, and a rewritten section uses the new values from its next slot on.

## Verification

Every testbench checks itself and ends by printing
`TB_RESULT checks=N failures=M`. The reference arithmetic in
`tb/car_ref_pkg.sv` restates the fixed-point section with 64-bit integers,
written apart from the RTL. Its rounding and saturation are the ones given
above.

| testbench | what it checks |
|---|---|
| `tb_car_core` | 600 random operand sets (including saturating ones) and a 40-step impulse response of a real section, bit-exact; latency 6; one-cycle done |
| `tb_coef_mem`, `tb_state_mem` | writes in scrambled order, one-cycle read, read-during-write returns old data |
| `tb_car_ctrl` | against a stand-in core: state clearing, section order, 29-cycle slots, input multiplexer, write-back, done_sample at 2958 cycles, back-to-back ticks, overrun |
| `tb_car_array` | one array at 102 sections, Greenwood coefficients, a real 48 kHz clock pattern: all taps and the stream bit-exact for 12 samples, done_sample 2 + 2958 cycles after the clock edge, overrun on an early edge |
| `tb_car_cochlea` | the full 1224-section design at its default parameters: all 1224 taps bit-exact against a plain cascade delayed one period per array, for 16 samples; counts coefficient writes, clearing, section steps, done_sample, hand-over between arrays, 12-period latency and overrun |
| `tb_car_fig4` | full design: impulse response over 100 samples and a 127-sample MLS, first 20 channels against a floating-point model. Checks that the peak error stays below 1 % of each channel's peak (measured about 0.003 %) and that impulse responses decay within 100 samples. From the impulse responses it computes gain curves by DFT and checks DC gain within 0.2 dB of 0 dB and hardware within 0.1 dB of floating point (measured 0.007 dB) |

To run one with Verilator 5 (here the full design):

    verilator --binary --timing --assert -y rtl -Irtl \
        rtl/car_pkg.sv tb/car_ref_pkg.sv rtl/car_cochlea.sv tb/tb_car_cochlea.sv \
        --top-module tb_car_cochlea
    ./obj_dir/Vtb_car_cochlea

The full-size runs take a few seconds. The testbenches initialise everything
they read, so they also run correctly on a two-state simulator.

## Departures from the published design and open points

* **Word lengths and rounding** (24-bit data, Q2.16 coefficients, round half
  up, saturation) are this design's. The published work chose its word
  lengths from a fixed-point software model but did not state them.
* **Core timing.** Two parallel W1/W2 machines as published. How the work is
  split between them (the W2 machine also forms Y) and the 6-cycle latency are
  this design's. The 29-cycle section time is kept as a fixed slot length.
* **Combining the two done signals.** The published block diagram shows the
  two machines' done lines entering one gate but does not say which kind.
  Here done means both machines have finished.
* **State transitions** of Idle/Control/Done, the Init state, the overrun flag
  and the tick synchroniser are this design's.
* **Sections per array.** The published block-diagram caption says 100
  sections per array, while its text and the diagram's y1..y102 outputs say
  102. The RTL uses 102.
* **Joint between arrays.** Inferred from the reported 250 us final-section
  latency, as described above.
* **Coefficient upload.** The published design loads coefficients computed
  off-chip from a file. Here that is a plain write port; the file and the host
  software are outside the RTL.
* **Memories** are written as arrays with a one-cycle read and are meant for
  distributed RAM. The reported memory use on the Virtex-6 (about 3000 LUTs)
  fits that.
* **Not included.** The outer and inner hair-cell models and the AGC
  smoothing filters of CAR-FAC, which would make r vary with the signal.
  These were future work for the published design and are not described in
  enough detail to build. Here r is fixed through the uploaded a, c, g.
* **Clock generation.** Both clocks enter as ports, so no clock manager is
  included.
* The reported Virtex-6 utilisation was not reproduced, since no vendor
  mapping was run.
