# Frequency counter for free-induction-decay pulses (HT-LR in logic)

An atomic magnetometer run in free-induction-decay (FID) mode produces a burst
of damped oscillation, `A exp(-t/tau) sin(2 pi f t)`, once per pump cycle. The
field is read from `f` (10 kHz to 500 kHz in the Earth's field), and the useful
sensitivity is in the micro-hertz per root-hertz range. Counting zero crossings
loses too much to quantisation, and fitting a damped sine with a nonlinear
least-squares solver is too slow for a small real-time instrument.

The HT-LR method (Hilbert transform, linear regression) replaces the nonlinear
fit by a linear one. The Hilbert transform of the sampled burst gives the
quadrature signal `y[n]`. The angle of `x[n] + i y[n]` is the instantaneous
phase, and once unwrapped it grows linearly with time at `2 pi f`. A straight
line fitted to that phase gives `f` as its slope. Each point is weighted by the
instantaneous amplitude, so the noisy tail of the decay counts for less. No
model of the envelope is needed.

This repository holds synthesizable SystemVerilog for the whole counter: the
ADC interface, trigger-gated capture, the segment memory, and the complete
HT-LR computation as a streaming hardware pipeline. It returns one frequency
per pulse. In the instrument this design follows, the HT-LR steps ran as
software on an ARM core next to the FPGA. Here they are logic (see
"Departures" below).

## Signal flow

```
            +--------------+   sample    +-----------+  write   +------------------+
 ADC pins --| adc_spi_ctrl |------------>| acq_ctrl  |--------->|   seg_buffer     |
 cnv sclk   +--------------+             |           |          |  bank 0 | bank 1 |
 din dout                     trigger -->|           |--start-->|                  |
                                         +-----------+  bank,   +------------------+
                                                        cnt      |  port A    | port B
                                                                 v            v
      +-------------------------------------- ht_lr_engine ---------+   +-----------+
      | sequencer -> hilbert_fir -> cordic_atan -> phase_unwrap ->   |   | axil_regs |-- AXI4-Lite
      |                x,y          phase,weight     Phi,weight      |-->|           |-- irq
      |                                          -> wlr_fit -> f     |   +-----------+
      +--------------------------------------------------------------+-- res_* ports
```

`fid_freq_counter` is the top. The PLL that makes `clk` from the 40 MHz
reference oscillator, the ADC itself and the processor are outside it.

## Pulses, segments and the two banks

The trigger input is low while a pulse is present and high in the quiet time
between pulses. In the reference set-up the pulse rate is 200 Hz at 50 % duty,
so the trigger is low for 2.5 ms, then high for 2.5 ms.

* After a two-flop synchroniser, a falling trigger edge opens a segment. The
  edge counts only once the trigger has been seen high, so a pulse already
  running at reset is skipped.
* Every ADC sample taken while the trigger is low is written to the current
  bank at addresses 0, 1, 2, ...
* The rising edge closes the segment. Its bank and sample count (`data_cnt`)
  go to the engine with a one-clock `start`, and capture moves to the other
  bank. So pulse n+1 is sampled while pulse n is processed.

Three exceptional cases are handled and counted, and each can be read over
AXI:

| case | what happens |
|---|---|
| overrun: a segment ends while the engine is still busy | The segment is dropped and its bank reused, because the engine is still reading the other bank. |
| overflow: more than `DEPTH` samples | Samples beyond `DEPTH` are discarded. The first `DEPTH` samples are processed and the overflow flag is set. |
| short: fewer than 40 samples | The segment is too short for the Hilbert window. The engine returns `err` at once. |

At the defaults the engine needs `cnt + 164` clocks per segment: 4 010 clocks,
or 20 us at 200 MHz, for a 3 846-sample pulse. That is far less than the
2.5 ms quiet time, so overruns only happen if the trigger has very short high
periods.

## The HT-LR arithmetic

All four stages accept one sample per clock. A sample marked `last` travels
with its data, so the stages need no other control.

### Truncated Hilbert transform (`hilbert_fir`)

The discrete Hilbert transform is `y[n] = (2/pi) sum x[n-k]/k` over odd `k`.
It is cut off at `|k| <= K`, with `K = 20`, so the largest odd `k` is `KO = 19`.
The kernel is odd, so it folds into

```
y[n] = sum_{k=1,3,...,19} c_k (x[n-k] - x[n+k]),   c_k = round(2^16 * 2/(pi k))
```

That is ten multipliers working on sample differences. A 39-sample window
slides over the segment. An output is produced only when the window is full,
so a segment of `N` samples yields `N - 38` pairs `(x[n], y[n])`, for
`n = 19 .. N-20`. The edge samples are not used. For `x = sin(w n)` the output
is `y = -cos(w n)`, so the phase advances with time. `y` is 20 bits wide,
because the truncated sum can reach about 2.7 times the input's full scale.
The testbench allows a difference from the exact sum of one LSB plus the
effect of rounding the coefficients.

### Phase and amplitude (`cordic_atan`)

A 22-stage vectoring CORDIC computes both `atan2(y, x)` and `|x + iy|`. A
first stage folds the left half-plane over by half a turn. The angle is kept
in **turns**: 24 bits, with `2^24` equal to one turn, in two's complement.
Wrap-around in the adder is then exactly the wrap of the phase. The angle
table `round(atan(2^-i) / 2pi * 2^24)` is computed at elaboration. The
magnitude keeps the CORDIC gain (about 1.6468), because only relative weights
matter to the fit. The weight is the magnitude divided by 16, saturated to
16 bits.

### Unwrapping (`phase_unwrap`)

In the turn format, the modular difference `phi[n] - phi[n-1]` is already the
phase step in `(-1/2, +1/2]` turn. It is sign-extended and accumulated into a
40-bit cumulative phase `Phi[n]`. This holds as long as the signal stays below
`fs/2`, which is 769 kHz at 1.538 MSa/s.

### Weighted straight-line fit (`wlr_fit`)

The fit minimises `sum w (Phi - a - b t)^2`, where `t` is the sample index
inside the fitted run. Five exact integer sums are kept while the samples
stream in:

```
Sw = sum w   St = sum w t   Stt = sum w t^2   Sp = sum w Phi   Stp = sum w t Phi
b  = (Sw*Stp - St*Sp) / (Sw*Stt - St^2)
```

At the default sizes (16-bit weights, 13-bit time, 40-bit phase) the sums are
29 to 83 bits wide. The numerator is 114 bits and the denominator 86 bits.
Nothing is rounded before the division. A restoring divider makes one quotient
bit per clock, 130 clocks in all. The quotient is `b` in turns per sample,
which is `f/fs`, with 40 fraction bits. At 1.538 MSa/s one LSB is 1.4 uHz.

A zero denominator raises `err`. This happens with fewer than two
distinctly-timed weighted points, for example when every weight is zero. A
quotient that does not fit the format also raises `err`.

### Hertz

The engine multiplies the ratio by the constant `fs = CLK_HZ / SAMPLE_CYCLES`.
This constant is formed at elaboration with 16 fraction bits. The result,
`res_freq`, is the frequency in Hz with 16 fraction bits (15 uHz LSB). `fs`
comes from the same clock that paces the ADC, so a clock error scales the
result but does not bias it any other way. The stability of the reference
oscillator therefore sets the accuracy.

### How close it is to floating point

The testbenches run the same algorithm in double precision on the same ADC
codes: exact coefficients, `atan2`, unwrapping, and weights
`sqrt(x^2 + y^2)`. Across 10 kHz to 500 kHz and segments of 769 to 7 692
samples, the hardware agrees with that model within the 2 mHz the testbenches
allow. Most of the observed differences are far smaller, in the micro- to
milli-hertz range. Through the complete counter, the differences are 4 to
10 uHz for 2.5 ms and 5 ms pulses, and up to 0.3 mHz for 0.5 ms pulses. This
was run at default sizes with the ADC model in the loop.

The remaining error against the true frequency is the algorithm's own, mostly
from the truncation at `K = 20`. For a clean 2.5 ms pulse it is -30 mHz at
10 kHz, and below 2 mHz at 250 kHz and 500 kHz. It grows quickly for short pulses that hold only a few
cycles of the signal.

### Choosing K

`K` is a parameter of the engine. In this design a larger `K` does not make
the engine slower. The Hilbert sum is computed in parallel, so `K` costs
`(KO+1)/2` multipliers: 10 at `K = 20`, 25 at `K = 50`. The time stays at
`cnt + 164` clocks for every `K`. Only the edge loss of `KO` samples at each
end grows with `K`.

The table shows the error against the true frequency for a clean 2.5 ms pulse
(tau = 2.5 ms, 3 846 samples). Each row is a separate build of the engine.
The hardware matches floating point to within about 0.1 mHz.

| K | 10 kHz | 20 kHz | 100 kHz | 400 kHz |
|---|---|---|---|---|
| 1 | -2.148 | -0.964 | -0.058 | +0.002 |
| 5 | -1.638 | -0.458 | -0.010 | -0.000 |
| 10 | -1.095 | -0.051 | +0.007 | -0.001 |
| 15 | -0.376 | +0.134 | -0.011 | +0.000 |
| 20 | -0.030 | +0.070 | -0.002 | +0.000 |
| 30 | +0.301 | +0.001 | -0.000 | -0.000 |
| 40 | +0.143 | +0.108 | +0.004 | +0.000 |
| 50 | -0.029 | -0.009 | +0.000 | -0.000 |

All errors are in Hz. Truncation matters only when a pulse holds few cycles
of a low frequency. From `K` of about 15 to 20 on, the error no longer shrinks steadily.
It oscillates at the tenth-of-a-hertz level at 10 kHz to 20 kHz, because the
cut-off kernel ripples with frequency. Weighing that against cost, `K = 20` is
a sensible default.

## ADC port

`adc_spi_ctrl` starts a conversion every `SAMPLE_CYCLES` clocks, which is
650 ns at 200 MHz:

1. `adc_cnv` stays high for `CONV_CYCLES` (280 ns).
2. Then come 18 `adc_sclk` pulses at 50 MHz. `adc_dout` is sampled on each
   rising edge, MSB first. The ADC moves to the next bit on the falling edge.
3. `adc_din` is held high, which selects 3-wire mode on the usual 18-bit SAR
   parts.

Conversion and read-out take 128 of the 130 clocks. The code is taken as two's
complement. Timing and mode follow generic SAR-ADC practice and are not tied
to a particular part. Check them against the data sheet of the ADC you use.

## Register map (`axil_regs`, AXI4-Lite, 32-bit)

| offset | name | access | content |
|---|---|---|---|
| 0x00 | CTRL | rw | [0] acquisition enable, 1 after reset |
| 0x04 | STATUS | ro | [0] capturing, [1] engine busy, [2] result pending, [3] last result err, [4] last segment overflowed, [5] bank of last segment |
| 0x08 | DATA_CNT | ro | samples in the last segment handed to the engine |
| 0x0C | SEG_TOTAL | ro | segments completed |
| 0x10 | OVERRUNS | ro | segments dropped, engine busy |
| 0x14 | OVERFLOWS | ro | segments longer than a bank |
| 0x18 | RES_SEQ | ro | results produced |
| 0x1C | RES_CNT | ro | samples behind the last result |
| 0x20/0x24 | RATIO_LO/HI | ro | f/fs, 40 fraction bits, sign-extended |
| 0x28/0x2C | FREQ_LO/HI | ro | f in Hz, 16 fraction bits, sign-extended |
| 0x30 | RES_CYCLES | ro | clocks the engine spent on the last result |
| 0x34 | IRQ_CLR | wo | any write clears "result pending" and `irq` |
| 0x8000 + 4i | sample window | ro | raw sample `i` of the last segment, sign-extended |

The sample window reads the buffer through its second read port. Raw data can
therefore be logged, or fitted off-line, while the engine works on the same
bank. Each direction handles one transaction at a time, and responses are
always OKAY.

## Parameters

| parameter | default | origin |
|---|---|---|
| sample width | 18 bits | the ADC of the reference instrument |
| `SAMPLE_CYCLES` | 130 | 650 ns sampling interval (1.538 MSa/s) at an assumed 200 MHz clock |
| `CLK_HZ` | 200 000 000 | assumed PLL output, 5 x the 40 MHz reference |
| `CONV_CYCLES`, `SCLK_HALF` | 56, 2 | assumed ADC timing |
| `K` | 20 | the truncation used in the reference instrument |
| `DEPTH` | 8192 per bank | holds the longest pulse used: 5 ms = 7 692 samples (100 Hz rate, or a 5 ms gate) |
| `ITER` (CORDIC) | 22 | this design; the last micro-rotation is 0.24 urad and the angle LSB 0.37 urad |
| number formats | see `rtl/fc_pkg.sv` | this design |

`DEPTH` must be a power of two. `SAMPLE_CYCLES` must be at least
`CONV_CYCLES + 36*SCLK_HALF`, which is checked at elaboration.

## Departures from the reference instrument

* **Processing in logic.** The reference instrument split the work over two
  ARM cores. One copied each segment from the FPGA into on-chip memory. The
  other ran the Hilbert transform, the arctangent and unwrapping, and the
  weighted fit in software, in the quiet time between pulses.
  Here the FPGA holds the segment in its own two banks and the whole
  computation is a pipeline of about 20 us. The processor is left only to
  read results.
* **Edge samples.** Treatment of the segment edges is not specified by the
  method. This design fits only samples whose Hilbert window lies inside the
  segment: 19 are lost at each end.
* **Choices of this design.** The clock frequency, ADC protocol details,
  buffer depth, all internal number formats, overrun and overflow policy,
  and the register map were all chosen here.
* **Not included.** The memory-card logging of raw data used for off-line
  comparison is not included. The raw samples are readable over AXI instead.
  The PLL, the oscillator and the ADC are external parts. The board's link
  to a host is also left out, because its protocol is not specified. Results
  leave through the AXI4-Lite port and the `res_*` ports.

## Files and simulation

`rtl/` holds one module or package per file:

* `fc_pkg`
* `adc_spi_ctrl`
* `acq_ctrl`
* `seg_buffer`
* `hilbert_fir`
* `cordic_atan`
* `phase_unwrap`
* `wlr_fit`
* `ht_lr_engine`
* `axil_regs`
* `fid_freq_counter` (top)

`tb/` holds one self-checking testbench per module, `tb_<module>.sv`. There is
also the full-size run `tb_fid_full.sv`, the truncation sweep
`tb_ht_lr_ksweep.sv` and a behavioural ADC model, `adc_model.sv`. Every
testbench prints `TB_RESULT checks=N failures=M` and has a watchdog.

| testbench | what it shows |
|---|---|
| `tb_hilbert_fir` | Every output matches the floating-point truncated transform. It also checks the output count `N - 38`, the latency and the window reset between segments. |
| `tb_cordic_atan` | Angle and magnitude match `atan2` and `sqrt` in all quadrants. It also checks the latency of `ITER + 1` clocks. |
| `tb_phase_unwrap` | The exact cumulative phase is recovered for steps up to just under half a turn. |
| `tb_wlr_fit` | The slope matches a double-precision weighted fit, including the widest sums. It also checks the error cases and the latency. |
| `tb_adc_spi_ctrl` | Samples match the ADC model, spaced exactly 130 clocks apart. It also checks the CNV width and the SCLK count. |
| `tb_acq_ctrl` | Counts, banks and stored data are right. It also checks the start-up arming, overrun and overflow. |
| `tb_seg_buffer` | Both read ports match a reference memory under random traffic. |
| `tb_axil_regs` | Every register reads back correctly. It also checks the sample window, CTRL writes, irq set and clear, and stalled responses. |
| `tb_ht_lr_engine` | Runs 250 kHz, 10 kHz and 500 kHz. Also runs a noisy 400 kHz pulse at 1 kHz rate, a 20 kHz pulse at 100 Hz rate, and a noisy 250 kHz pulse with a 5 ms gate. Results are compared with floating point and the true frequency. A short segment must be rejected. |
| `tb_ht_lr_ksweep` | Builds eight engines, `K` = 1 to 50, and runs 10, 20, 100 and 400 kHz pulses through all of them. Each must match floating point with the same `K`, and take the same time. |
| `tb_fid_freq_counter` | End to end at reduced sizes: a normal result, both banks, overrun, overflow, short segment, acquisition off, raw read-back and irq. Each mechanism is counted and must occur. |
| `tb_fid_full` | Default sizes. Runs 200 Hz pulses at 10, 250 and 500 kHz, then 100 Hz and 1000 Hz pulse rates at 20 and 400 kHz. Each pulse must give one result within the quiet time, with the expected segment length and engine time. Each result must match floating point on the recorded ADC codes. |

To run one with Verilator 5 from the repository root:

```
verilator --binary --timing --assert -Wno-fatal --timescale 1ns/1ps -Irtl -Itb \
    rtl/fc_pkg.sv $(ls rtl/*.sv | grep -v fc_pkg) tb/adc_model.sv \
    tb/tb_fid_full.sv --top-module tb_fid_full
./obj_dir/Vtb_fid_full
```

For a unit testbench, list the package, the module and its testbench, and name
the testbench as top module. `tb_fid_full` simulates about 8 million clocks,
which takes about ten seconds.
