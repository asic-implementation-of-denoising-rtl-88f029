# Folded wavelet low-pass filter for pacemaker ECG denoising

An implantable pacemaker has to find the QRS complex (the ventricular
contraction) in a noisy ECG on a tiny power and area budget. A common way to do
that is a dyadic wavelet filter bank followed by a QRS detector; the filter
bank is built from small low-pass and high-pass FIR filters that repeat at
every scale. This RTL implements the low-pass filter of that bank in an
area-reduced form: the four additions of the filter are *folded* onto two
physical adders, each of which is time-shared between two additions, so the
filter needs two adders instead of four at the cost of taking two clock
cycles per sample. At ECG sample rates (hundreds of samples per second) that
cost is irrelevant; the clock is many orders of magnitude faster.

## The filter

The filter is the quadratic-spline wavelet low-pass

    y[n] = (x[n] + 3 x[n-1] + 3 x[n-2] + x[n-3]) / 8

written without multipliers. The two symmetric pairs are added first,

    A0 = x[n]   + x[n-3]
    A1 = x[n-1] + x[n-2]

and the weights 1/8 and 3/8 = 1/4 + 1/8 are applied with shifts:

    A2 = (A1 >>> 2) + (A1 >>> 3)        (3/8 of A1)
    A3 = A2 + (A0 >>> 3)                (= y[n])

All shifts are arithmetic (samples are two's complement), so each shift is a
division rounded towards minus infinity, and y[n] is *exactly*
`floor(A0/8) + floor(A1/4) + floor(A1/8)`. The DC gain is 1 and the magnitude
response is |cos(pi f / fs)|^3, a gentle low-pass. At fs = 360 samples/s
(the usual ECG rate) the simulated gains are:

| tone | meaning | gain |
|---|---|---|
| 5 Hz | P and T waves | 0.997 |
| 45 Hz | top of the QRS band | 0.789 |
| 60 Hz | mains interference | 0.650 |
| 150 Hz | muscle / motion noise | 0.017 |

The filter alone is one stage of a denoiser, not a complete one: the wavelet
decomposition that uses it (and its high-pass partner, the multi-scale
product, the adaptive threshold comparator and the noise/mode detector) is
not part of this RTL.

## From four adders to two: the folding

Unfolded, the filter has four additions (A0..A3) and three sample delays. The
folding puts them on two adder units, each an adder followed by one register
(one pipeline stage per unit):

| unit | time slot 0 | time slot 1 |
|---|---|---|
| unit 1 | A1 = x[n-1] + x[n-2] | A0 = x[n] + x[n-3] |
| unit 2 | A2 = (A1>>>2) + (A1>>>3) | A3 = A2 + (A0>>>3) |

Each unit has a 2:1 selection on both adder inputs that picks the operands of
the current slot. The order within each unit is what makes two units enough
with a single register between them. Counting, for every edge of the filter,
the registers the folded version needs (N·w − P + v − u, with folding factor
N = 2, P = 1 pipeline register per unit, u and v the slots of source and
destination and w the register count on the edge in the pipelined filter):

* A1 → A2 (both shift branches): 2·1 − 1 + 0 − 0 = 1 register
* A2 → A3: 2·0 − 1 + 1 − 0 = 0 registers: unit 2 feeds its own output
  straight back into its slot-1 input
* A0 → A3: 2·1 − 1 + 1 − 1 = 1 register

So a single register `r2` between the units serves both edges that need one:
it holds A1 in the cycle unit 2 computes A2, and A0 in the cycle unit 2
computes A3. The two shift branches, `r2 >>> 2` and `r2 >>> 3`, are wiring.

### Cycle by cycle

A sample accepted in cycle s moves through the schedule below. `fold_ctrl`
drives it from a five-stage token shift register: a token enters on
acceptance and its position selects the slot of each unit.

| cycle | unit 1 | r2 loads | unit 2 | output |
|---|---|---|---|---|
| s | (sample registered, delay line shifts) | | | |
| s+1 | slot 0: A1 | | | |
| s+2 | slot 1: A0 | A1 | | |
| s+3 | | A0 | slot 0: A2 | |
| s+4 | | | slot 1: A3 = y | |
| s+5 | | | | switch: y_out ← y |
| s+6 | | | | y_valid, y_out = y[n] |

Because unit 1 is busy in s+1 and s+2, the next sample can be accepted at
s+2 at the earliest; at that rate unit 1 works on sample n+1 while unit 2 works
on sample n, and both units are busy every cycle. `x_ready` is low only in
the cycle after an acceptance. At lower rates the units and `r2` are
clock-enabled only in their slots and otherwise hold.

### Sample history

`sample_delay_line` is a four-register shift register that moves once per
accepted sample, not once per clock: tap 0 is the accepted sample x[n],
taps 1..3 are x[n−1]..x[n−3]. The delays of the filter are sample delays, so
they stay sample delays when the arithmetic is folded.

## Interface and timing (`lpf_fold_top`)

| port | dir | width | meaning |
|---|---|---|---|
| `clk` | in | 1 | clock |
| `rst_n` | in | 1 | asynchronous reset, active low; clears the history to zero |
| `x_valid` | in | 1 | a sample is offered on `x_in` |
| `x_ready` | out | 1 | the sample is taken in this cycle if `x_valid` is high |
| `x_in` | in | DATA_W | two's-complement sample |
| `y_valid` | out | 1 | one-cycle strobe: `y_out` has just been updated |
| `y_out` | out | DATA_W+1 | filtered sample; held until the next result |

* Throughput: one sample per two clocks at most.
* Latency: `y_valid` rises exactly 6 clocks after the cycle of acceptance.
* Results come out in order, one per accepted sample.
* Parameter: `DATA_W` (default 16). All sums are DATA_W+1 bits wide, enough
  for every intermediate value, so nothing wraps; y itself always lies within
  the DATA_W-bit input range, the extra output bit is kept for uniformity with
  the sum registers.
* The folding factor (2), the shift amounts (2 and 3) and the tap count (4)
  live in `lpf_pkg`; they are fixed by the filter structure and the schedule
  of `fold_ctrl` is written for a factor of 2.

## Modules

| file | what it is |
|---|---|
| `rtl/lpf_pkg.sv` | constants (fold factor, shifts, taps, default width) and the slot type `inst_e` |
| `rtl/fold_add_unit.sv` | one folded adder-delay unit: two operand pairs, 2:1 selection, adder, enabled register |
| `rtl/sample_delay_line.sv` | sample-rate shift register of the last DEPTH samples |
| `rtl/fold_ctrl.sv` | token-pipeline controller: handshake, slot selects, register enables, output switch |
| `rtl/lpf_fold_top.sv` | the filter: delay line, two adder units, `r2`, shift branches, output register |

Synthesised at the default width the design has 138 flip-flops (64 in the
delay line, 3 × 17 in the two unit registers and `r2`, 17 + 1 in the output
register and strobe, 5 in the controller), two 17-bit adders and four 17-bit
2:1 selections.

## Where this RTL follows its source and where it chooses

Taken from the published folded architecture: the filter coefficients and
the shift-add structure, the two adder-delay units and the operand pairs of
each slot, the slot order (A1 before A0, A2 before A3), the one register
between the units, unit 2's feedback for A3, and an output switch that
closes in a third slot.

Choices of this design, not fixed by the source:

* **Sample width** 16 bits (the source's layout shows 17-bit registers,
  which fits 16-bit samples with 17-bit sums).
* **Arithmetic shifts.** The source labels one branch `>>2` and the others
  `>>>3`; a logical shift of a negative sum is not a scaling, so all three
  are arithmetic here.
* **Sample delays.** The delay elements on the input are one-sample delays
  shifting once per accepted sample. The source draws a separate delay for
  x[n−1] on each adder input; here the two are one register.
* **Registered input and held output.** The accepted sample is registered
  (tap 0), so a source holds its sample for one cycle only; the output switch
  is a register that keeps the last result. These add one cycle each to the
  latency.
* **Handshake and reset**: valid/ready on the input, a strobe on the output,
  asynchronous active-low reset to zero.
* **Initiation interval 2.** The source's folding equations assume a period
  of two clocks per sample; its register-lifetime graph repeats every four
  clocks instead. This design follows the equations.
* **Register count.** The source states that the folded filter needs only
  one register beyond its adder units, but its own drawing has several more
  (the input delays and the register between the units); the drawing was
  followed. The published cell count (194 flip-flops) is higher than the 138
  here; the difference is not explained by anything in the description.

## Verification

Each testbench is self-checking and prints one line
`TB_RESULT checks=N failures=M`; each has a watchdog.

| testbench | checks |
|---|---|
| `tb_fold_add_unit` | random operands, selects and enables; sum of the chosen pair one clock later, hold when disabled |
| `tb_sample_delay_line` | random shift pattern against a model of the last four shifted-in samples |
| `tb_fold_ctrl` | every control output, every cycle, against the schedule derived from the list of acceptance cycles; refusal in the cycle after acceptance |
| `tb_lpf_fold_top` | 60 000 cycles at default width: random, sparse, full-rate and full-scale input; every result bit-exact against a floor-division model and exactly 6 clocks after acceptance; `y_out` steady between results; reset in mid-run; each of these situations must occur |
| `tb_lpf_ecg_workload` | 360 samples/s stream, one sample every 8 clocks; tones at 5, 45, 60 and 150 Hz; gain measured by correlation must match \|cos(pi f/fs)\|^3 within 1 %; every result bit-exact |

Assertions in `fold_ctrl` check that no adder unit is given two slots in the
same cycle.

To run one with Verilator 5:

    verilator --binary --timing --assert -Irtl -Itb \
        rtl/lpf_pkg.sv rtl/fold_add_unit.sv rtl/sample_delay_line.sv \
        rtl/fold_ctrl.sv rtl/lpf_fold_top.sv tb/tb_lpf_fold_top.sv \
        --top-module tb_lpf_fold_top
    ./obj_dir/Vtb_lpf_fold_top

Every testbench runs in well under a second.

## Changing it

* Another sample width: set `DATA_W` on `lpf_fold_top`; the sum width
  follows.
* Another filter of the bank with the same shape (a different pair of shifts)
  only needs new `SH_*` constants; a filter with more taps or another
  folding factor needs a new schedule in `fold_ctrl` and more slots in
  `fold_add_unit`.
* Because the sample history only moves on acceptance, the filter can be
  stalled indefinitely by holding `x_valid` low; results already in flight
  still finish.
