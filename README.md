# A feedback processor for qubit readout: from ADC samples to a trigger in three clock cycles

Active feedback on a superconducting qubit needs a decision about the qubit
state within a small fraction of the qubit's lifetime. The qubit is read out
by sending a microwave pulse through a resonator. The transmitted pulse is
mixed down to an intermediate frequency (IF) of 25 MHz and digitised at
100 MS/s. The digital circuit must then:

1. recover the pulse's in-phase and quadrature components I and Q;
2. compare them with a threshold;
3. raise a trigger line that makes a pulse generator act on the qubit.

The circuit described here does this in **three 10 ns clock cycles**. It
avoids multipliers in the signal path and keeps only the pipeline registers
that timing needs:

- The IF is chosen as exactly a quarter of the sampling rate, so digital
  down-conversion becomes a 4-way multiplexer.
- The low-pass filter is a running sum with a bypass adder.
- Offset and gain are a subtraction and a shift.
- The "threshold" is the sign bit after the offset is subtracted.

Beside the decision path sits a histogram recorder. It counts how often each
(I, Q) value occurs, across millions of repetitions, in an external SRAM.
This gives the single-shot statistics of the readout (and correlations
between consecutive readouts) without moving every sample to a computer.

The RTL is SystemVerilog (IEEE 1800-2017). It was written from the published
description of an FPGA design (a Virtex-4 on a commercial ADC/DAC board). Where
the description stops, the choices made here are stated in the file headers
and listed under "Departures and own choices" below.

## 1. The signal path and its timing

```
 adc_i ─► [z^-1] ─► mixer ─►│ filter ─►│ offset/scale ─► sign bits ─► LUT ─► AND ─►│ fb_o, fb2_o
 (14 b)   input     (reg)   │  (reg)   │ (no register)    x, y                 ▲    │ (reg)
          register          │          │                                      │
 tr_i ─► [z^-6] ─► [z^-1] ─► [z^-1] ─► rising edge ─► [z^-d] ─── fbTime ───────┘──► histogram
```

One clock cycle is 10 ns. Each register stage in the drawing is one cycle.
Counted from the input register to the feedback output register, the path is
**3 cycles = 30 ns**:

- mixer register;
- filter register;
- the fb/fb2 output register (the offset, scale and decision logic before it
  is combinational).

The ADC itself is outside the design. It has a 4-cycle conversion pipeline
plus one cycle of data transfer. The trigger that marks the start of a
readout pulse arrives directly at `tr_i`, with no such delay. The trigger
therefore passes six registers (z^-6) to catch up with the ADC and the input
register. It then passes one register for the mixer and one for the filter.
After that, the trigger and the samples of the same analog instant reach the
decision logic together.

The trigger does not make the decision itself. Its rising edge is delayed by a
host-set **readout time d** (in clock cycles) and becomes the one-cycle
**fbTime** marker. In that cycle the signs of I~ and Q~ are sampled. d sets
where, inside the readout pulse, the integration window ends.

Latencies seen at the pins (all register to register; pad delays are not
modelled):

| from | to | clock edges |
|---|---|---|
| `adc_i` sample | it enters I~, Q~ (combinational) | 3 |
| `adc_i` sample | decision including it on `fb_o` | 4 |
| rising edge on `tr_i` | `fbtime_o` high | 8 + d |
| rising edge on `tr_i` | `fb_o`, `fb2_o` high, for one cycle | 9 + d |

For d = 1 the trigger-to-feedback delay is 10 cycles (100 ns). The FPGA's
input and output pads add their own few nanoseconds on top.

`fb_o` and `fb2_o` are single-cycle pulses. A downstream instrument that needs
a longer pulse must stretch it.

## 2. Down-conversion: multiplexers instead of multipliers

With f_IF = f_s/4 the two local-oscillator sequences reduce to two repeating
patterns:

- cos(2πn/4) = 1, 0, -1, 0;
- -sin(2πn/4) = 0, -1, 0, 1.

`fs4_mixer` therefore has:

- a free-running 2-bit counter;
- one 4-input multiplexer per branch, choosing among the sample, zero and the
  negated sample;
- a register on each output.

The output is one bit wider than the input (15 bits) so that negating the most
negative code cannot overflow. The counter is reset to 0, and that fixes the
global phase of the I/Q plane. A constant phase offset of the readout signal
is absorbed by the offsets c_I and c_Q and the choice of lookup table
(section 4).

`nco_mixer` is the general alternative. It is for an arbitrary IF or when the
I/Q axes must be rotated:

- A 16-bit phase accumulator advances by a frequency word, f_IF/f_s · 2^16,
  every cycle.
- A phase offset is added.
- The top 6 bits address a 64-entry table of round(2048·cos(2πk/64)).
- The same table, read a quarter turn further on, gives -sin.
- Two 14×13-bit multipliers and a shift by 11 produce Re and Im.

The LO amplitude 2048 makes ±1 exact. At the reset settings (frequency word
0x4000, phase 0) the block's output is bit-identical to `fs4_mixer`. A phase
offset of 0x8000 negates both quadratures. The block is also one register
deep, so choosing it changes neither latency nor trigger alignment.

## 3. Filtering: a running sum that already contains the newest sample

After mixing, the wanted signal sits at DC and an unwanted image oscillates at
2·f_IF. That image has a period of two samples, so a box-car average over any
even number of samples l removes it. The experiment uses l = 4, a 40 ns
integration window.

`moving_average` keeps the window sum with one adder and one subtractor,
whatever the value of l:

- A variable delay (a shift register with a tap selected by l) gives b = x
  delayed by l samples.
- The accumulator integrates x − b. After each clock edge it holds the sum of
  the last l samples up to the previous cycle.
- The **bypass adder** adds the present x − b to the accumulator output. The
  newest sample is therefore in the sum in the same cycle, without waiting for
  the accumulator's clock edge.
- The sum is divided by l and registered. That register is the pipeline stage
  of the filter.

Division by l is an arithmetic right shift by ⌊log2 l⌋. It is exact for
l = 1, 2, 4, 8 and 16. For other l the gain is l/2^⌊log2 l⌋, between 1 and 2,
which the host can compensate with the offset and scale settings. The delay
line and the accumulator start at zero, so the sum is exact from the first
sample. Writing a new l (or a new path selection) re-zeroes them.

`fir_filter` is the general alternative. It is a 40-tap FIR filter with
host-loaded 16-bit coefficients (15 fraction bits), for matched-filter
integration weights:

- It is built in **transposed form**: each tap multiplies the *newest* sample
  and adds the product to the partial sum passed on by the next tap.
- The output register (`z_q[0]`) therefore already includes the present
  sample, and the filter is one stage deep like the moving average.
- The output is the floor of the scaled sum, saturated to 16 bits.
- Both branches share one coefficient set.
- After reset the coefficients are 1/4, 1/4, 1/4, 1/4, 0, … : the same
  four-sample average as the default moving average.

## 4. Offset, scale and the decision

`offset_scale` computes m·(I − c) for each branch with m = 2^k, k = 0…7. It
is built as a multiplexer over shifted copies of the difference and
saturates to 16 bits. There is no register here. Subtracting c moves the
decision threshold to zero, so the decision only needs the sign bits:

- x = sign(I~), y = sign(Q~), with 1 meaning negative.

`state_discrimination` uses {x, y} to address two 4-bit lookup tables written
by the host:

- fb = L(1)[{x,y}] AND fbTime;
- fb2 = L(2)[{x,y}] AND fbTime.

Bit 0 of a table is the entry for x = 0, y = 0 and bit 3 the entry for
x = 1, y = 1. Some examples:

| want | L(1) |
|---|---|
| fb when I~ ≥ 0 (qubit in the state on the positive-I side) | `0011` (reset value) |
| fb when I~ < 0 | `1100` |
| fb only in the I~ ≥ 0, Q~ < 0 quadrant | `0010` |

The two tables can issue two independent triggers. A protocol that measures
two qubits, one readout seen in I and the other in Q (as in a teleportation
experiment), can steer two separate pulse generators.

The readout delay d is a 255-stage shift register of trigger edges with a tap
multiplexer. Triggers closer together than d cycles are therefore all
delivered, each d cycles after its own edge. d = 0 uses the edge pulse
itself.

## 5. Histograms in external memory

Every fbTime marker can also add one count to a histogram bin. The bins live
in an external zero-bus-turnaround (ZBT) SRAM of 2^21 words × 16 bits
(2^25 bits). The host switches recording on, lets the experiment repeat
10^5–10^7 times, and then reads the counts back.

First, `histogram_module` rounds I~ and Q~ to 7-bit bin indices:

- round to nearest;
- saturate;
- offset binary, so bin 0 is the most negative value and bin 127 the most
  positive.

It then forms the address for the selected mode (most significant bit first):

| mode | address | bits | what it records |
|---|---|---|---|
| 2-d (0) | {I~ 7, Q~ 7} | 14 | the 128 × 128 I/Q distribution at the readout time |
| correlation (1) | {I~2 7, Q~ 5, I~1 7, seg 2} | 21 | joint distribution of two consecutive readouts |
| time-resolved (2) | {I~ 7, Q~ 7, t 4, seg 3} | 21 | the I/Q distribution at up to 16 consecutive samples after the marker |

Correlation mode:

- I~1 is a buffer loaded with I~ at every marker; I~2 is the present I~.
- Q~ keeps its upper 5 bits, so the address fits 21 bits.
- The segment counter seg advances at every marker.
- In an experiment with two readouts per repetition (for example a first
  readout, feedback, then a check readout), odd values of seg hold the
  (first, second) pairs. seg[1] alternates between repetitions, so with the
  feedback switched on and off in alternate repetitions both cases land in
  separate halves of the histogram.

Time-resolved mode:

- A marker opens a window of `tlen` cycles (1…16, default 16).
- The bin of every sample in the window is counted, with t = 0…15 as the time
  coordinate.
- The segment number is the one captured at the marker.

`increase_count` does the memory traffic:

- Every count is a read-modify-write: read the word, wait the RAM's read
  latency (`RAM_RD_LAT` = 2 cycles), write the word plus one. A full word
  saturates at 65,535.
- One increment therefore occupies the RAM for 3 cycles.
- The next read is issued only after the write, so a repeated bin never reads
  a stale count.

Time-resolved mode asks for one increment per cycle for 16 cycles, faster
than the RAM can serve. Requests therefore wait in a 32-entry queue: about 11
are still waiting when a window ends, and the backlog drains 48 cycles after
the marker. Markers must thus be at least about 48 cycles (480 ns) apart in
this mode; at a typical 10 µs repetition time nothing is lost. A request that
finds the queue full is dropped and counted. The count of dropped requests and
a busy flag are in status register 7.

The host reaches the memory through the `hmem_*` port:

- It is served only while the queue is empty and the engine idle.
  `hmem_ready_o` is high while the port can take a command.
- Read data appear on `hmem_rdata_o` with `hmem_rvalid_o`, 2 cycles after the
  command. The data lines are the RAM data bus itself.
- Clearing the histogram means writing zeros through this port.

## 6. Host registers

The host writes 32-bit words through `cfg_wr_en_i`/`cfg_wr_addr_i`/`cfg_wr_data_i`.
A write takes effect at the clock edge that samples it. Reads through
`cfg_rd_addr_i` → `cfg_rd_data_o` are combinational.

| addr | field | reset |
|---|---|---|
| 0 | [15:0] c_I, signed | 0 |
| 1 | [15:0] c_Q, signed | 0 |
| 2 | [2:0] k_I, [6:4] k_Q (m = 2^k) | 0, 0 |
| 3 | [4:0] moving-average length l, 1…16 (write re-zeroes the filters) | 4 |
| 4 | [7:0] readout delay d | 14 |
| 5 | [3:0] L(1), [7:4] L(2) | 0011, 0101 |
| 6 | [1:0] histogram mode, [4] record enable, [12:8] time window 1…16 | 2-d, off, 16 |
| 7 | read only: [15:0] dropped increments, [16] histogram busy | — |
| 8 | [0] mixer 0 = quarter-rate, 1 = oscillator; [1] filter 0 = moving average, 1 = FIR (write re-zeroes the filters) | 0, 0 |
| 9 | [15:0] oscillator frequency word, [31:16] phase offset | 0x4000, 0 |
| 10 | write only: [21:16] FIR tap, [15:0] coefficient | 1/4 on taps 0–3 |

## 7. Top-level ports (`feedback_dsp`)

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst` | in | 1 | sampling clock (100 MHz), synchronous active-high reset |
| `adc_i` | in | 14 | ADC word, two's complement |
| `tr_i` | in | 1 | readout trigger (a rising edge starts a readout) |
| `fb_o`, `fb2_o` | out | 1 | feedback triggers |
| `fbtime_o`, `xy_o` | out | 1, 2 | readout-time marker and the sign bits, for monitoring |
| `cfg_*` | | | host register bus (section 6) |
| `hmem_*` | | | host access to the histogram memory |
| `ram_*` | | 21 / 16 | ZBT SRAM: one-cycle command, read data `RAM_RD_LAT` edges later |

Parameters (defaults are the published sizes where one is given):

- `TR_ALIGN` = 6, the trigger alignment delay;
- `HIST_AW` = 21 and `HIST_DW` = 16;
- `N_TAPS` = 40;
- `L_MAX` = 16, `RAM_RD_LAT` = 2 and `HIST_FIFO` = 32 are this design's own.

## 8. Files

| file | content |
|---|---|
| `rtl/fbdsp_pkg.sv` | widths, the `settings_t` record and the histogram-mode enum |
| `rtl/feedback_dsp.sv` | top level: signal path, trigger alignment, path selection |
| `rtl/delay_line.sv` | z^-n register chains (input register, trigger alignment) |
| `rtl/fs4_mixer.sv`, `rtl/nco_mixer.sv` | quarter-rate and general I/Q mixers |
| `rtl/moving_average.sv`, `rtl/fir_filter.sv` | box-car and 40-tap FIR low-pass filters |
| `rtl/offset_scale.sv` | m·(x − c) |
| `rtl/state_discrimination.sv` | edge detector, readout delay, sign LUTs, fb/fb2 |
| `rtl/histogram_module.sv`, `rtl/increase_count.sv` | bin addressing and the read-modify-write engine |
| `rtl/host_regs.sv` | register bank |
| `tb/tb_*.sv` | one self-checking testbench per module |
| `tb/tb_workload_teleport.sv` | two-trigger feedforward of a two-qubit measurement on the whole design |
| `tb/adc_model.sv`, `tb/zbt_ram_model.sv` | behavioural models of the ADC (5-cycle latency) and the SRAM |

## 9. Simulating

Each testbench prints `TB_RESULT checks=N failures=M` and stops. With Verilator 5:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Irtl -Itb -y rtl -y tb +libext+.sv \
          rtl/fbdsp_pkg.sv tb/tb_feedback_dsp.sv --top tb_feedback_dsp -Mdir build -o sim
./build/sim
```

Replace `tb_feedback_dsp` with any other `tb_<module>` to test one block.

`tb_feedback_dsp` runs the whole design at its default parameters (full
21-bit memory) and finishes in well under a second. It plays a
qubit-reset experiment:

- A 25 MHz readout tone with a state-dependent amplitude, ring-up and noise
  goes through the ADC model.
- A model pulse generator flips the simulated qubit whenever `fb_o` fires.
- A check readout follows 36 cycles (360 ns) after the first.

Every fb/fb2 pulse is checked against the chosen states and the 9 + d
latency. Every histogram count after the 2-d, correlation and time-resolved
phases is checked against the states the test chose. The test then:

- overloads the time-resolved mode to force dropped increments;
- switches to the oscillator mixer and FIR filter, first with equivalent
  settings, then with 8 loaded coefficients, then with a 180° phase offset
  that must invert every decision.

It fails if any of these mechanisms never occurred.

`tb_workload_teleport` drives the whole design with two-qubit readouts:
one outcome is in I and the other in Q. Each round draws new thresholds,
scale factors and readout delays, and each table steps through all 16
lookup-table values. The test checks every fb/fb2 pulse and its 9 + d
timing. It also checks that a model receiver, corrected by X on fb and Z on
fb2, always ends in the identity frame.

## 10. Departures and own choices

Taken from the published design:

- The block structure of the quarter-rate mixer, moving average,
  offset/scale and sign-LUT discrimination.
- The pipeline depths: the 3-cycle processing and the z^-6, z^-1, z^-1
  trigger alignment.
- The readout delay d and the default l = 4, d = 14.
- The two LUTs and two triggers.
- The three histogram modes with their field widths and order, and the
  2^21 × 16-bit memory.
- The 40-tap length of the general FIR filter.

This design's own:

- **All internal word widths**: 15-bit mixer output, 16-bit I/Q, 3-bit shift
  code, 8-bit d, 5-bit l. Saturation on overflow, and rounding in the
  histogram binning.
- **1/l as a shift**: exact only for powers of two.
- **Insides of the general mixer and FIR filter**: the phase accumulator,
  table size, coefficient format, transposed structure and shared
  coefficients. The published design states only that they exist. Both are
  kept at one pipeline stage here, so the published latency holds for every
  selection; the published design does not give their latency.
- **Histogram details**: which fbTime markers advance the segment counter
  (all of them), the Q reduction to its top 5 bits, and restarting a
  time-resolved window on a new marker.
- **The memory engine**: the increment queue, drop counting, count saturation
  and the RAM read latency. The published design names the block and its
  function only.
- **The host bus and register map**. The published design only says that the
  settings come from the host computer.

Not modelled: the FPGA pad delays, which make a measured trigger-to-feedback
delay about 10 ns longer than the register count; the ADC; the SRAM chip; the
board's host link. The variant with fewer pipeline registers that the
published timing study suggests for newer FPGAs (one cycle of processing) is
not built.
