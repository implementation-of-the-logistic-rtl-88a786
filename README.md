# A logistic-map generator in 32-bit fixed point

The logistic map

    x[n+1] = r * x[n] * (1 - x[n]),      0 <= x <= 1,  0 < r <= 4

is one of the simplest chaotic systems: for r close to 4 two orbits that start
almost together drift apart exponentially. A chaotic sequence of this kind is a
cheap source of pseudo-random numbers, but only if its finite-precision
realisation still behaves chaotically. Any digital implementation rounds every
product. Because the map amplifies every small error, the rounding rule decides
which orbit the hardware actually follows.

This RTL computes the map in hardware with 32-bit fixed-point words
instead of 64-bit floating point. The words have 16 integer and 16 fraction
bits (Q16.16). Every product is narrowed back to 32 bits either by
truncation or by rounding toward +infinity, chosen by one input pin. Running
the same r and x0 in both modes gives two sequences that agree for about a
dozen steps and then part completely, while both keep the chaotic character
of the map: their Lyapunov exponent stays near ln 2.

The design has two halves:

* an **operative unit** (`uoml`) that computes one step of the map with two
  pipelined *multiplication and conversion units*;
* a **control unit** (`control_unit`), a four-state machine and an 11-bit
  iteration counter, plus the **X_n path** (`xn_path`): two multiplexers and
  the register that holds the current sample and feeds it back.

`logistic_map_top` wires the three together.

```
                  +---------------------- uoml ----------------------+
 i_r ------------>|  r_q --+                                         |
                  |        +--> MCU #1: r*x --> rx --+               |
 X_n (x[n-1]) --->|  x_q --+                         +--> MCU #2 --> o_xn, o_done,
                  |        +--> 1 - x ------> omx ---+    rx*omx     |  o_over, o_under
 i_round -------->|                                                  |
 ready ---------->|                                                  |
                  +--------------------------------------------------+
                                  |o_xn      |o_done
                 i_x0 --> MUX1 --> MUX2 <----+
                          ^  |     |  (select: o_done in state op)
          (select: idle) -+  |     v
                             +--- X_n register ---> o_xn, and back to uoml
```

## Number format

Every datapath word is a signed two's-complement Q16.16 number
(`lm_pkg::q16_16_t`): the value is the 32-bit integer divided by 2^16. The
range is [-32768, 32768 - 2^-16] and the resolution is 2^-16 ≈ 1.5e-5.
Examples: 1.0 = `0x0001_0000`, 4.0 = `0x0004_0000`, 0.1 ≈ `0x0000_199A`
(the nearest word). The full product of two words is a 64-bit Q32.32 value
(`q32_32_t`). The design keeps that product exact and loses precision in
one place only, the converter.

## The conversion unit: where the rounding happens

`fxp_conv64to32` is combinational. From a Q32.32 product `p` it forms the
Q16.16 result in three steps:

1. **Drop the 16 low fraction bits.** The arithmetic shift `p >>> 16` gives
   the floor of the exact value. This is the *truncation* mode
   (`i_round = 0`). In *round toward +infinity* mode (`i_round = 1`), one LSB
   is added whenever any dropped bit was 1, which gives the ceiling. For the
   non-negative numbers of the map, truncation and rounding toward zero are
   the same. For negative numbers this design's truncation goes toward
   -infinity.
2. **Check the range.** The rounded value is 49 bits wide. If it lies outside
   the Q16.16 range, `o_over` is raised and the result saturates to
   `0x7FFF_FFFF` or `0x8000_0000`, keeping the sign. The check is made after
   rounding, so a value that rounds past the top also saturates.
3. **Check for underflow.** If the product is non-zero but smaller in
   magnitude than one LSB (strictly between -2^-16 and 2^-16), `o_under` is
   raised and the result is exactly zero. This matters in rounding mode: a
   tiny positive product would otherwise round up to 2^-16.

Overflow and underflow exclude each other.

## The multiplier

`fxp_mul32` splits each operand into 16-bit parts: a signed upper part and
an unsigned lower part, `a = aH*2^16 + aL`. It then forms

    p = aH*bH * 2^32 + (aH*bL + aL*bH) * 2^16 + aL*bL

The four 16x16 partial products are computed in parallel and registered in
stage 1. Their weighted sum is registered in stage 2. The lower parts are
zero-extended to 17 bits, so every partial product is an ordinary signed
multiplication. On an FPGA each partial product maps onto a few small
embedded multipliers. The result is exact, with no rounding.

`mult_conv_unit` (an *MCU*) is the multiplier followed by the converter and
one output register. Its latency is 3 cycles and it accepts one operand pair
per cycle. `i_round` must stay stable while a product is in flight; `uoml`
ensures this by capturing the mode at the start of a step.

## One step: the operative unit

`uoml` evaluates the map as `(r * x) * (1 - x)`. It does not use the
algebraically equal forms `r*x - r*x*x` or `r*(x - x*x)`. With finite
precision these forms give different sequences, and the form chosen here
fixes which sequence comes out. `r*x` (MCU #1) and `1 - x` are computed side
by side. MCU #2 then multiplies the two.

A step is sequenced by a phase counter that knows the fixed MCU latency:

| edge (after start) | what happens                                           |
|--------------------|--------------------------------------------------------|
| 0                  | `i_ready` seen high while idle: r, x and the rounding mode are captured |
| 1                  | MCU #1 partial products of r*x; `1 - x` registered        |
| 2                  | MCU #1 sum                                             |
| 3                  | MCU #1 result `rx` and its flags                         |
| 4, 5, 6            | MCU #2 computes `rx * (1 - x)`                         |
| 7                  | `o_xn`, `o_over`, `o_under` updated; `o_done` high for one cycle |

`o_over` and `o_under` are the OR of every flag raised during the step. A
flag may come from either MCU, or from `1 - x` leaving the range, which is
possible only for x below -32767. The flags are held with `o_xn` until the
next step ends.

`i_ready` is a level, not a pulse. A step starts at an edge where `i_ready`
is 1, no step is under way, and `o_done` is low. If `i_ready` falls
during a step, the step is dropped and no `o_done` follows. The control unit
relies on this: it keeps `ready` high in its last op cycle, and the step
begun there must not finish later.

## Control: states, counter and the X_n register

`control_unit` is a Moore machine. All of its outputs depend on the state
alone.

| state      | ready | what it does                                           | next state |
|------------|-------|--------------------------------------------------------|------------|
| `idle`     | 0     | counter held at 0; X_n is loaded with x0 every cycle | `op` when `i_start` = 1 |
| `op`       | 1     | the operative unit runs                                | `done_all` if counter = IT_MAX; else `done_it` on `o_done` (counter + 1, X_n takes the new value); else stays |
| `done_it`  | 0     | one-cycle gap between iterations                       | `op`       |
| `done_all` | 0     | `o_done_all` = 1 for this one cycle                    | `idle`     |

The counter test comes before the `o_done` test. So after IT_MAX completed
iterations, the next op cycle goes straight to `done_all`. The counter is
11 bits wide, so IT_MAX can be 0 to 2047. The default is 150.

`xn_path` has no enable: the X_n register is loaded on every clock edge.
MUX1 passes x0 in idle and the register's own value otherwise. MUX2 passes
the new result from `uoml` when `o_done` is high in op, and MUX1's output
otherwise. The register therefore holds x0 while idle, takes each new
sample at the end of its step, and keeps its value in between. The
register's output is the design's output `o_xn` and is also `uoml`'s input
`x[n-1]`.

## Timing of a run

One iteration takes 10 clock cycles:

* the first op cycle, whose closing edge starts `uoml`;
* seven cycles of `uoml` latency;
* the cycle in which the control unit sees `o_done`;
* the `done_it` cycle.

A run of IT_MAX iterations ends with `o_done_all` high in the cycle after
the (10*IT_MAX + 1)-th clock edge following the edge that samples
`i_start`. For the default 150 iterations that is 1501 edges, or about 9 µs
at 166 MHz.

Top-level interface (`logistic_map_top`, parameter `IT_MAX`, default 150):

| port         | dir | width | meaning                                              |
|--------------|-----|-------|------------------------------------------------------|
| `i_clk`      | in  | 1     | clock, rising edge                                   |
| `i_rst`      | in  | 1     | asynchronous reset, active high                      |
| `i_start`    | in  | 1     | starts a run when sampled high in idle               |
| `i_r`, `i_x0`| in  | 32    | r and x0 (Q16.16); hold them for the whole run       |
| `i_round`    | in  | 1     | 1 = round toward +infinity, 0 = truncate; hold for the run |
| `o_xn`       | out | 32    | current sample (the X_n register)                    |
| `o_done`     | out | 1     | one-cycle pulse: a new sample is loaded on the next edge |
| `o_over`, `o_under` | out | 1 | flags of the most recent step                  |
| `o_done_all` | out | 1     | one-cycle pulse at the end of a run                  |
| `o_counter`  | out | 11    | iterations completed in this run                     |

To collect a sequence, read `o_xn` on each edge where `o_counter` changes,
or one cycle after each `o_done`.

## Behaviour with r = 4, x0 = 0.1

The reference case is r = 4, x0 = `0x199A`, and 150 iterations in each
rounding mode. `tb_logistic_map_top` prints both series. The first samples
are 0.360031, 0.921646, 0.288864 and 0.821701 when rounding, and 0.360016,
0.921616, 0.288956 and 0.821838 when truncating. The two series differ by less
than 0.03 up to n = 13 and first differ by more than 0.1 at n = 15. After that they are unrelated.

The test computes the Lyapunov exponent directly over these 150 samples, as
(1/N) Σ ln|r(1 - 2x_n)|. It gives 0.6925 with rounding and 0.6638 with
truncation. The exact value for r = 4 is ln 2 = 0.6931. Published figures
for a comparable 32-bit implementation are 0.6979 and 0.7031. Those were
found with a different estimator meant for short series, so only rough
agreement should be expected.

## Where this RTL departs from, or goes beyond, the original description

* **End-of-run pulse.** The original describes a half-clock-cycle pulse in
  `done_all`. Such a pulse would need the clock inside the logic. Here
  `o_done_all` is high for one full cycle.
* **Signedness, truncation of negative numbers, and the underflow rule** are
  this design's choices, as given above. The original says only that
  overflow saturates and underflow gives zero.
* **Pipeline depths** are this design's choices: 2 cycles in the
  multiplier, 1 after the converter, 7 cycles per step, 10 per iteration.
  So are the phase-counter sequencing, the dropping of a step when `ready`
  falls, the saturation of `1 - x`, and the way the flags are held.
* **IT_MAX** is a parameter, fixed when the design is built. It is not an
  input.
* **Resources.** The reference FPGA build reports 1471 logic elements,
  1358 registers, sixteen 9-bit multipliers, 320 memory bits and
  166.83 MHz on a Cyclone IV. This RTL has about 640 flip-flop bits and no
  memory. Where the original's additional registers and its 320 memory
  bits come from is not described, so they are not reproduced. Frequency
  and power depend on the FPGA tools and are not claimed here.
* The original used a vendor flow with embedded 9-bit multipliers. Here
  the multiplications are written with `*` and left to synthesis.

## Files

| file | contents |
|------|----------|
| `rtl/lm_pkg.sv` | word widths, Q16.16 types and constants, rounding-mode and state enums |
| `rtl/fxp_mul32.sv` | 2-stage 32x32 multiplier from four 16-bit partial products |
| `rtl/fxp_conv64to32.sv` | Q32.32 to Q16.16 conversion: rounding, saturation, underflow |
| `rtl/mult_conv_unit.sv` | multiplier and converter in series (MCU) |
| `rtl/uoml.sv` | one step of the map, with two MCUs |
| `rtl/control_unit.sv` | four-state controller and iteration counter |
| `rtl/xn_path.sv` | MUX1, MUX2 and the X_n register |
| `rtl/logistic_map_top.sv` | the whole generator |
| `tb/tb_ref_pkg.sv` | integer reference model of conversion and of one step |
| `tb/tb_<module>.sv` | one self-checking testbench per module |

Each testbench prints `TB_RESULT checks=N failures=M` and stops. A watchdog
ends any testbench that hangs. They check:

* `tb_fxp_mul32`: every product against a 64-bit integer multiply, and the
  2-cycle latency.
* `tb_fxp_conv64to32`: edge cases and random products in both modes.
* `tb_mult_conv_unit`: a stream of products with the 3-cycle latency.
* `tb_uoml`: chained orbits, random steps, overflow, underflow, a dropped
  step, and the 7-cycle latency.
* `tb_control_unit`: the state sequence, cycle by cycle, against the state
  table above.
* `tb_xn_path`: the register against its select rules.
* `tb_logistic_map_top`: the r = 4 runs above at the default size,
  checked sample by sample, plus one run that overflows and one that
  underflows.

## Simulating

With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/lm_pkg.sv tb/tb_ref_pkg.sv tb/tb_logistic_map_top.sv \
    --top-module tb_logistic_map_top
./obj_dir/Vtb_logistic_map_top
```

Substitute any other testbench name. Every testbench finishes in well under
a second. To run a different r, x0 or length, change the `run(...)` calls
in `tb_logistic_map_top`, or override `IT_MAX` on `logistic_map_top`. The
reference in `tb_ref_pkg` follows the same arithmetic rules, so the
sample-by-sample checks still apply. To try another rounding rule, edit the
converter; the reference function `conv_ref` must then change with it.
