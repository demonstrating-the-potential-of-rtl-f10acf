# Adaptive LMS filter for superconducting-qubit readout pulses

A dispersive qubit readout returns, after digital down-conversion, a short
tone (here 30 MHz, 8 µs) buried in amplifier noise. The usual way to see it
is to average thousands of single-shot traces. This design puts an adaptive
FIR filter in the readout stream instead. A least-mean-squares (LMS) engine
adjusts the filter taps after every sample, so that the filtered pulse `y`
follows a reference `d`. The reference is the running ensemble average of the
pulses seen so far. The filter learns the shape of the noise from a few
pulses and then cleans each new pulse as it streams through. It does not
wait for a large ensemble to build up.

The RTL follows the LMS demonstrator described by Johnson, Bornman, Kim,
Van Zanten, Zorzetti and Saniie in *Demonstrating the Potential of Adaptive
LMS Filtering on FPGA-Based Qubit Control Platforms for Improved Qubit
Readout in 2D and 3D Quantum Processing Units*. That demonstrator ran on an
RFSoC 4x2 board, inside the QICK/PYNQ environment. Only the programmable-logic
signal path is given here as RTL: the LMS update engine, the reloadable FIR
filter and the error/synchroniser unit, wired into one loop. The data
converters, DMA engines, processor software and register blocks around that
loop are left outside. Where the published description stops, the choices
made here are listed in [Departures and design choices](#departures-and-design-choices).

## The three equations

With `n` the sample index, `i` the tap index and `N = taps + 1` taps:

```
w[i]  <-  w[i] + mu * e[n] * x[n-i]          (weight update, lms_block)
y[n]   =  sum_{i=0}^{N-1} w[i] * x[n-i]      (filter, fir_reload)
e[n]   =  d[n] - y[n]                        (error, error_sync)
```

The reference comes from outside: `d_new[n] = (d_old[n]*k + x_new[n]) / (k+1)`,
the average over pulses `0..k`. In the demonstrator this average is formed
in processor software and streamed back in by DMA. The end-to-end testbench
forms it in the same way.

`e` is the residual that drives the adaptation. As the loop converges, `e`
shrinks and `y` approaches the clean tone. The filtered pulse is therefore
`y`, which the top level brings out on `y_mon_*`. The `e` output is the
residual, as equation (3) defines it.

## Signal flow

```
                 +-------------------------------------------+
 x (ADC side) -+-> fir_reload --y--> error_sync --e--+--------+--> e out
               |      ^  (e = d - y)   ^             |
               |      | weights        | d (DMA)     | e (and filler beats)
               |      |                              v
               +-> axis_fifo ---- x ---------> lms_block
```

- Each accepted `x` sample goes, in one handshake, to the FIR filter and into
  a small FIFO. The FIFO holds `x[n]` until `e[n]` exists. `e[n]` exists only
  after the filter has produced `y[n]` and the synchroniser has paired it
  with `d[n]`.
- The LMS engine takes `x[n]` from the FIFO and `e[n]` together. It updates
  every weight and streams the new set, tap by tap, into the FIR filter's
  reload port.
- The FIR filter switches to a new set only between samples. It therefore
  works with the weights of a slightly earlier sample, which makes the loop
  a *delayed* LMS. With one sample in flight, the delay is a couple of samples.
- `e` leaves the design and feeds the LMS engine in one joint handshake.

All streams use AXI4-Stream valid/ready. `TLAST` marks the last sample of a
pulse.

## Number formats

| Quantity | Width | Format | Note |
|---|---|---|---|
| x, d, y, e | 16 | Q2.14 (signed, 14 fractional bits, range ±2) | |
| mu | 16 (bits 15:0 of a 32-bit port) | Q2.14 signed | 0.0006 becomes 10/2^14 = 0.00061 |
| x·e | 32 | Q4.28 | |
| mu·x·e, weights | 48 | Q6.42 | clipped to the 48-bit range |
| FIR accumulator | 70 | Q8.56 + 6 guard bits | y is rounded to nearest and saturated to Q2.14 |

These widths are the ones the demonstrator's LMS pipeline is drawn with
(16:14, 32:28, 48:42). The arithmetic is exact up to the final rounding of
`y` and the saturation of `e`.

## The LMS update engine (`lms_block`)

The engine has one x·e multiplier, one ·mu multiplier and one adder. It walks
the taps in series, one tap per clock:

```
accept (x[n], e[n])      shift x[n] into the 64-entry delay line, latch e, mu, taps
stage A (clock i+1)      p1 = x[n-i] * e[n]                       32 bits
stage B (clock i+2)      p2 = p1 * mu                             48 bits
stage C (clock i+3)      w[i] = clip(w[i] + p2); output (w[i], i)
```

Stage C reads the stored weight, adds, clips and writes it back in the same
clock. It also registers the result as an output beat. The taps of one
sample all differ, and stages run in order. A weight is therefore never
read before the previous sample's write to it, even with a single tap and
back-to-back samples. No stall logic is needed.

The next pair is accepted on the clock that issues the last tap. The engine
thus takes one pair every `taps+1` clocks. The weight of tap `i` is valid
`i+3` clocks after the accepting edge. `weight_tlast` marks tap `taps`.
`mu` and `taps` are sampled once per pair. `taps` is the index of the last
tap, so `taps = 63` means 64 taps.

## The FIR filter (`fir_reload`)

This is a serial multiply-accumulate filter: `taps+1` clocks of accumulation,
then `y` is registered. The filter is ready again one clock later, so it
takes one sample per `taps+2` clocks. That is the rate of the whole loop.
The serial form matches the LMS engine's rate. It also agrees with the very
small DSP count reported for the demonstrator, where the filter was a
library FIR core.

Coefficients arrive as (value, index) beats and are written into a shadow
bank. The beat with `TLAST` completes a set. The shadow bank is then copied
into the active bank on the first clock on which no accumulation is running,
and `reload_done` pulses. A sample is therefore always filtered with one
consistent bank. The copy takes the shadow bank as it stands. Beats of the
next set that arrived in the meantime are therefore already in it. In this
loop that only makes the coefficients slightly fresher.

## Error and synchronisation (`error_sync`)

The synchroniser pairs `d` and `y` position by position and emits
`e = sat(d - y)`. It uses `TLAST` to keep the two streams aligned on pulse
boundaries. If one stream reaches `TLAST` while the other has not, the
longer stream is drained up to its own `TLAST`. The two last samples are
then paired. A `realign` pulse marks each dropped sample.

Dropping `y` samples needs care. The `x` samples behind them are already in
the FIR delay line and in the LMS engine's FIFO. For each dropped `y` the
unit therefore emits a *filler* beat: `e_tuser = 1`, value 0. The top level
sends fillers only to the LMS engine. The engine shifts the matching `x` in
and adds `mu·0·x = 0` to every weight, so the `x` history stays the same in
the filter and in the engine. Dropped `d` samples have no `x` behind them
and produce no beat.

## Rate and latency

| | clocks (output registered this many edges after the input edge) |
|---|---|
| loop rate, steady state | one sample per `taps+2` (65 at 64 taps) |
| LMS engine alone | one pair per `taps+1` |
| first weight after a pair is accepted | 3 |
| y after its x is accepted (output free) | `taps+1` |
| e after its d and y are paired | 1 |

In sample terms the loop adds no delay: `e[n]` is formed from `d[n]` and
the `y[n]` of the same input sample, and pulses stay aligned through
`TLAST`. In clock terms one sample passes from the `x` input to the `e`
output in `taps+2` clocks when nothing stalls.

The demonstrator clocked its data path at 491.52 MHz. At that clock, 64 taps
give about 7.6 Msample/s. That is enough for a handshaked stream fed from
memory, as in the demonstrator. It is not enough for a converter running in
real time at the rate a 30 MHz tone needs. A parallel filter and update
would fix that, at the cost of many more multipliers.

## Verification

Every module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog.

| Testbench | What it checks |
|---|---|
| `lms_block_tb` | An exact integer reference model of the update, for every weight beat: value, index, TLAST, clip flag and the clock it appears on. Pair spacing of `taps+1` at 64, 8, 2 and 1 taps. Clipping with full-scale inputs. |
| `fir_reload_tb` | A reference convolution with the bank that was active when each sample was accepted. Latency and rate. Reloads that arrive during an accumulation must wait (counted). Backpressure. Output saturation. |
| `error_sync_tb` | A packet-level model: `min(Ld, Ly)` output beats, fillers, `|Ld - Ly|` realign pulses. One pair per clock. Saturation. |
| `lms_filter_top_tb` | The whole loop at its default size (64 taps). Details below. |

`lms_filter_top_tb` streams ten mock readout pulses with `d` formed as the
running ensemble average. Each pulse is a 30 MHz tone of 8 µs. The sample
rate is taken as 491.52 Msample/s (3932 samples per pulse). The tone
amplitude is 0.4 and the noise deviation 0.4, in full-scale units. Settings
are `mu = 10/2^14` and `taps = 63`. Every `e` beat is checked against a
model of the synchroniser. So are the weight index sequence, the count of
one weight set per `x` sample and the loop rate. Typical results:

| pulse | mean e² | mean (y − tone)² |
|---|---|---|
| 1 | 0.117 | 0.018 |
| 2 | 0.045 | 0.024 |
| 5 | 0.031 | 0.019 |
| 10 | 0.018 | 0.007 |

In pulse 10, the mean (x − tone)² is 0.157. That is the noise power of the
input, so the filter output is about 13 dB closer to the clean tone than the
input. Further phases run 16 taps with backpressure on `e`, then pulses whose
`d` is 3 samples short or long (realignment). A last phase uses a negative
learning rate with full-scale inputs, which makes the loop run away so that
the weights clip. The testbench counts each of these mechanisms and fails if
any did not occur. A run takes a few seconds.

`noise_sweep_tb` repeats the ten-pulse run for three noise deviations.
The filter is reset between runs. Pulse 10 of each run:

| noise deviation | mean e² (pulse 1 → 10) | mean (y − tone)² | mean (x − tone)² |
|---|---|---|---|
| 0.2 | 0.043 → 0.0045 | 0.0019 | 0.039 |
| 0.4 | 0.116 → 0.019 | 0.0080 | 0.156 |
| 0.8 | 0.201 → 0.069 | 0.0228 | 0.596 |

`e` cannot fall below the noise left in the reference: after ten pulses, `d`
still carries a noise power of σ²/10 (0.064 at σ = 0.8).

### Running

With Verilator 5 (any simulator with SystemVerilog 2017 support should do):

```
verilator --binary --timing --assert -Irtl -y rtl rtl/lms_pkg.sv \
          tb/lms_filter_top_tb.sv --top-module lms_filter_top_tb
./obj_dir/Vlms_filter_top_tb
```

Replace the testbench name for the others. Testbenches read no files. They
generate their stimulus with `$urandom`, `$sin` and a Box-Muller noise
source.

## Parameters

| Module | Parameter | Default | Meaning |
|---|---|---|---|
| `lms_block`, `fir_reload`, `lms_filter_top` | `TAPS_MAX` | 64 | length of the delay line and weight arrays |
| `lms_filter_top` | `X_FIFO_DEPTH` | 16 | x samples waiting for their error |
| `axis_fifo` | `WIDTH`, `DEPTH` | 16, 16 | |

The sample and weight widths are constants in `lms_pkg`. Changing them
changes all modules together.

## What lies outside this RTL

- **Ensemble averaging of `d`.** It runs in processor software in the
  demonstrator. Here it is an input stream.
- **DMA engines.** They carry `x` out, and `x`, `d` and `e` between memory
  and logic. Here they are the `x`, `d` and `e` stream ports.
- **RF data converters.** In the demonstrator these are 14-bit DACs and ADCs
  in loopback. The `x` input stands for the ADC stream and `e` for the DAC
  stream.
- **`mu` and `taps` registers.** In the demonstrator these are
  processor-written registers on a 100 MHz clock. Here they are plain inputs.
  They are expected to change only while no pulse streams, and they are not
  synchronised into the data clock.
- **Clock generation.** The design runs on one clock and one asynchronous
  active-low reset.

## Departures and design choices

- **Serial tap walk.** The update pipeline (x·e, register, ·mu, register,
  add with clipping, register) is as the demonstrator describes it.
  Stepping it one tap per clock is this design's reading of a pipeline with
  one multiplier pair. The FIR filter's serial structure, its shadow/active
  reload and its rounding are this design's own. The demonstrator used a
  library FIR core.
- **`mu` port.** It is 32 bits wide, like the demonstrator's packaged block.
  Only the low 16 bits (Q2.14) are used, the width its pipeline is drawn
  with. `mu` is treated as signed.
- **Clipping** saturates to the 48-bit signed range. The published
  description does not give the clip level.
- **Subtraction order.** It is `e = d − y`, as in the equation and the
  drawing of the summing node. One sentence of the published description
  reads the other way round.
- **Realignment.** The drop-until-TLAST rule and the filler beats are this
  design's own. The published description only says that `TLAST` keeps `d`
  and `y` aligned.
- **Handshakes.** The x and e forks, the FIFO and the joined x/e input of the
  LMS engine are this design's own.
- **Timing closure.** The 70-bit accumulate and the 32×16 and 16×48
  multiplies are single-cycle. At 491.52 MHz they would need retiming
  (more pipeline stages) on an FPGA. The RTL has not been through place and
  route.
- **Not covered:** resource figures (LUTs, BRAM, DSPs) and the latency
  observations of the demonstrator. Those belong to the complete board
  design, not to this loop.

## Files

| File | Content |
|---|---|
| `rtl/lms_pkg.sv` | widths, fixed-point types, saturation helper |
| `rtl/lms_block.sv` | LMS weight-update engine |
| `rtl/fir_reload.sv` | serial FIR filter with coefficient reload |
| `rtl/error_sync.sv` | e = d − y with TLAST realignment |
| `rtl/axis_fifo.sv` | small stream FIFO |
| `rtl/lms_filter_top.sv` | the closed loop |
| `tb/*_tb.sv` | testbenches |
