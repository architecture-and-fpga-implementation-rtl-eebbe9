# Digital time-to-digital converter with multiple-delay-line interpolation

This converter measures how long a pulse lasts, to a small fraction of a clock period,
without running any logic faster than the clock. It was designed for sensor front ends.
There, a resistance-controlled oscillator turns a gas sensor's resistance into a period, and
that period must become a binary number. The sensor's resistance can span many decades, so
the converter needs both a wide range and a fine step. Two mechanisms give these:

* a **coarse counter** counts whole clock periods, which gives the range;
* two **fine TDCs** measure the leftover fractions at the start and the end of the pulse,
  in steps of one buffer delay, which gives the resolution.

The pulse splitter in front follows the Nutt interpolation method. The fine TDCs use
delay lines whose taps are sampled by counters. The RTL here is SystemVerilog, organised as
a structure of 4 delay lines × 20 buffers per fine TDC, with 35-bit counters and adders and an
800 MHz clock. That structure comes from a published FPGA implementation of this converter.
The section on departures below lists what this RTL adds or chooses on its own.

```
          +-----------+  tf1  +-----------------+ cnt_f1
   tin -->| time-to-  |------>| fine TDC 1      |---------+
          | pulse     |  tf2  +-----------------+ cnt_f2  |     +-----+
          | generator |------>| fine TDC 2      |---------+---->| ALU |--> dout, dout_valid
          |           |  tc   +-----------------+  ctnc   |     +-----+
          |           |------>| coarse counter  |---------+        |
          +-----------+       +-----------------+                  | fine_clr
   clk ----------+---------------------+---------------------------+
   en[3:0] ------------------------> both fine TDCs (which counter array counts)
```

## 1. Splitting the pulse (`dtdc_tpg`)

Let the pulse `tin` rise at `t0` and fall at `t1`. Neither edge is related to the clock. The
generator synchronises `tin` with two flip-flops, `q1` and `q2`, and then forms three pulses:

```
clk      _|‾|_|‾|_|‾|_|‾|_|‾|_  ...  _|‾|_|‾|_|‾|_|‾|_
tin      ___/‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾  ...  ‾‾‾‾‾‾‾\_________       t0 = rise, t1 = fall
tc       ___________/‾‾‾‾‾‾‾‾‾  ...  ‾‾‾‾‾‾‾‾‾‾‾‾‾\___       = q2: e1 .. e2
tf1      ___/‾‾‾‾‾‾‾\_________  ...  _________________       t0 .. e1
tf2      _____________________  ...  _______/‾‾‾‾‾\___       t1 .. e2
```

Here `e1` and `e2` are the *second* rising clock edges after `t0` and after `t1`. This gives

```
tc = e2 - e1          (a whole number of clock periods)
tf1 = e1 - t0         (between 1 and 2 periods)
tf2 = e2 - t1         (between 1 and 2 periods)
tc + tf1 - tf2 = t1 - t0 = width of tin
```

Each fine pulse ends on the second edge rather than the first. This makes it at least one
clock period long, however close `t0` or `t1` falls to a clock edge. A fine TDC therefore
never has to measure a vanishingly short pulse. In gates: `tc` is an XOR of `q2` with the
idle level of `tin`, `tf1 = NOR(NOT tin, tc)` and `tf2 = NOR(tin, NOT tc)`. Setting the
parameter `TIN_ACTIVE_LOW` measures a low-going pulse instead.

`tin` must stay high for at least two clock periods, and low for about eight periods between
pulses, so that one result is out before the next pulse starts.

## 2. Measuring a fraction with counters (`dtdc_delay_line`, `dtdc_counter_array`, `dtdc_summer`)

This is the least obvious part of the design. A fine pulse `tf` starts at an arbitrary time
`ts` and ends exactly on a clock edge `te`. It enters a delay line of 20 buffers, each
delaying it by `τ`. Tap `j` (j = 1..20) therefore carries the same pulse shifted by `j·τ`.
Tap `j` drives counter `j-1` of a counter array (counters are numbered 0..19). On every rising clock edge, a counter adds 1
if its tap is high.

A pulse one to two periods long covers either 1 or 2 rising edges. So each counter ends at 1
or 2, depending on where the shifted start `ts + j·τ` falls relative to the first clock edge
`e0` after `ts`:

```
count_j = 2  if ts + j·τ < e0        (the shifted pulse still catches e0)
        = 1  otherwise
sum     = 20 + #{ j : j·τ < e0 - ts }  ≈ 20 + (e0 - ts)/τ
```

With 20·τ equal to one clock period `T`, the sum is `tf` expressed in steps of `T/20`,
rounded up: 20 steps for the whole period plus one step per `τ` of the fraction. The 20
counters together sample one clock period at 20 phases. This is what a multiple-delay-line
interpolator does. A chain of 19 two-input 35-bit adders sums them (`dtdc_summer`):
counter 0 + counter 1, then + counter 2, and so on up to counter 19.

The buffer delay is `BUF_DELAY_PS = 62`, so 20 taps span 1240 ps, just under the 1250 ps
period. One step is then effectively `T/20 = 62.5 ps`. The taps are 10 ps short of an even
spread, which costs at most one step. Taking 62.5 ps exactly would put tap 20 on a clock edge
every time, which is a sampling race in hardware and in simulation alike.

The delay line is a **behavioural model** with real `#` delays. A buffer's delay is a
property of the cells, not of logic. On an FPGA or in silicon this block is hand-placed
cells whose delay must be calibrated. Everything else in the design is synthesizable.

## 3. Four lines and the enable (`dtdc_fine_tdc`)

Each fine TDC holds four copies of the line–counter-array–summer channel. All four lines
receive the same `tf`. Only the counter array whose bit of `en` is set counts. A multiplexer
passes on the sum of that array; if several bits are set, it takes the lowest-numbered one,
and with `en = 0` it outputs 0. The arrays are meant to be used one at a time, in turn. The
testbenches step through arrays 0, 1, 2, 3 from one pulse to the next. The same `en` drives
both fine TDCs. The published description says the arrays are triggered in order but not
what drives the order, so `en` is a top-level input and this RTL only implements the
selection.

## 4. Combining the results (`dtdc_coarse_counter`, `dtdc_alu`)

The coarse counter increments on every rising edge while `tc` is high. On the first edge at
which `tc` is low again with a non-zero count, it copies the count to `ctnc`, pulses `valid`
and starts again from zero.

The ALU evaluates the splitting equation. The coarse count is in clock periods and the fine
sums are in `T/20` steps, so the coarse count is weighted by 20:

```
dout = 20 · ctnc + cnt_f1 - cnt_f2          (modulo 2^35)
```

`dout` is the width of `tin` in steps of `T/20` (62.5 ps at 800 MHz). A 100 ns pulse reads
1600. The ALU waits `SETTLE = 2` cycles after `valid`. By then the last shifted copy of
`tf2`, which ends up to 20·τ after `tc`, has been counted. The ALU then registers `dout`, and
pulses `dout_valid` and `fine_clr` together. `fine_clr` clears all fine counters for the
next pulse.

## 5. Interface and timing of `dtdc_top`

| port         | dir | width | meaning |
|--------------|-----|-------|---------|
| `clk`        | in  | 1     | reference clock, 800 MHz nominal (period 1250 ps) |
| `rst`        | in  | 1     | synchronous, active high |
| `tin`        | in  | 1     | pulse to measure, asynchronous |
| `en`         | in  | 4     | counter-array enable for both fine TDCs; set one bit per measurement |
| `dout`       | out | 35    | width of the last pulse, in `T/20` steps; held until the next result |
| `dout_valid` | out | 1     | one-cycle pulse with each new `dout` |

Keep `en` stable from the leading edge of `tin` until `dout_valid`. `dout_valid` rises
exactly four clock periods after `e2`, the edge at which `tc` ends. That is 5 to 6 periods
after the trailing edge of `tin`. `dout` lies within two steps of the true width.
The path is deterministic once the edges are fixed, so the testbench predicts `dout` bit for
bit from the edge times of `tin`.

Parameters of `dtdc_top` (defaults in `dtdc_pkg`): `NLINES_P = 4`, `NTAPS_P = 20`,
`CNT_W_P = 35`, `BUF_DELAY_PS_P = 62`, `TIN_ACTIVE_LOW = 0`. If you change `NTAPS_P`, choose
`BUF_DELAY_PS_P` so that `NTAPS_P · BUF_DELAY_PS_P` stays just below the clock period. The
ALU weights the coarse count by `NTAPS_P` automatically.

Size at the default parameters: 2 × 4 × 20 counters of 35 bits (5600 flip-flops), 2 × 4 × 19
adders of 35 bits, plus about 120 bits of control.

## 6. Where this RTL departs from, or adds to, the published design

Taken from the published design: the block structure; the Nutt splitting with the one-period
extension and its flip-flop / NOR / XOR / NOT construction; 4 delay lines of 20 buffers per
fine TDC; 20 counters per array with a common enable; 19 adders of 35 bits per array; the
multiplexer after the four adder chains; the coarse counter's "output the count when `tc`
is zero and the count is non-zero" rule; and `coarse + fine1 − fine2` in the ALU.

Choices made here, because the published description does not give them:

* **Gate wiring of the pulse generator** and its two-flip-flop depth. Only the gate types
  are published.
* **Buffer delay** of 62 ps. No value is published.
* **Weighting the coarse count by 20** in the ALU. Without a common unit the sum of a count
  of periods and a count of `T/20` steps is meaningless. The published simulation shows the
  value 100 for a 100 ns pulse, but does not state its unit. This RTL reads 1600 (62.5 ps
  steps).
* **Counting rule of the fine counters**: increment on a rising edge while the tap is high,
  the same rule as the coarse counter.
* **Sequencing**: the `valid` of the coarse counter, the ALU's settle wait, the `fine_clr`
  clear, and `dout_valid`.
* **Multiplexer select rule**: the lowest enabled array wins.
* **Coarse counter width**: 35 bits.

Known disagreements:

* The published resource table lists 249 registers. The published structure, 160 counters
  fed into 35-bit adders, needs about 5600 flip-flops if the counters are 35 bits. This RTL
  follows the structure and widths.
* A resolution "up to 1 ps" is claimed. With 20 taps per line and an 800 MHz clock the
  step cannot be below 62.5 ps.
* The published I/O count (42) equals `clk`, `rst`, `tin`, 4 enable bits and 35 output
  bits. This RTL adds `dout_valid`.

What is not modelled: the clock source (the clock is an input), metastability in the
synchroniser and in counters sampling asynchronous taps, delay mismatch between buffers and
lines, and any calibration.

## 7. Files

| file | contents |
|------|----------|
| `rtl/dtdc_pkg.sv` | default sizes (`NLINES`, `NTAPS`, `CNT_W`, clock period, buffer delay) |
| `rtl/dtdc_tpg.sv` | time-to-pulse generator |
| `rtl/dtdc_delay_line.sv` | behavioural tapped delay line |
| `rtl/dtdc_counter_array.sv` | 20 counters with common enable and clear |
| `rtl/dtdc_summer.sv` | 19-adder chain |
| `rtl/dtdc_fine_tdc.sv` | 4 channels and output multiplexer |
| `rtl/dtdc_coarse_counter.sv` | coarse counter |
| `rtl/dtdc_alu.sv` | result arithmetic and sequencing |
| `rtl/dtdc_top.sv` | complete converter |
| `tb/tb_<module>.sv` | self-checking testbench for each module |

The ALU and the coarse counter carry assertions: `fine_clr` always coincides with
`dout_valid`, and a coarse result is never zero.

Each testbench prints `TB_RESULT checks=N failures=M` and stops. A watchdog ends any run that
hangs. The unit testbenches check against independent reference models: a per-tap edge count,
a 64-bit adder loop, and expected edge times from the clock grid. `tb_dtdc_top` runs the whole
converter at its default size. It covers the 100 ns pulse of the published simulation
(830 ns to 930 ns, which reads 1600), the shortest pulse (just over two periods), a 2 µs pulse
and 60 random pulses. It rotates through all four counter arrays and checks every `dout`
bit-exactly, along with its latency. It counts each mechanism (array use, coarse results,
clears) and fails if one never occurs.

## 8. Simulating

All files carry `timeunit 1ps`. The delay lines need Verilator's timing support:

```
verilator --binary --timing --assert -Wno-fatal \
    rtl/dtdc_pkg.sv rtl/dtdc_tpg.sv rtl/dtdc_delay_line.sv rtl/dtdc_counter_array.sv \
    rtl/dtdc_summer.sv rtl/dtdc_fine_tdc.sv rtl/dtdc_coarse_counter.sv rtl/dtdc_alu.sv \
    rtl/dtdc_top.sv tb/tb_dtdc_top.sv --top-module tb_dtdc_top -o sim
./obj_dir/sim
```

For a unit testbench, list `dtdc_pkg.sv`, the module, its submodules and `tb/tb_<module>.sv`.
Make sure that in a testbench no edge of `tin` and no delayed copy of one lands exactly on a
rising clock edge. A real flip-flop would go metastable there, and a simulator resolves it by
event order. The supplied testbenches nudge such times by 1 ps.
