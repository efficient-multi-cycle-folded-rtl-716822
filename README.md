# Multi-cycle folded integer multipliers

A wide combinational multiplier is large and power-hungry, and many systems do
not need a new product every clock cycle. If a product is only needed every
second or third cycle, one smaller multiplier can be used repeatedly on pieces
of the operands ("folding"), and the pieces summed over several cycles. The
units here do that for unsigned W x W multiplication: each takes CT clock
cycles per product (throughput 1/CT) and is built around a single
**partial product multiplier (PPM)**, a multiplier whose final carry-propagate
addition is left out so that it returns its product as two vectors. All the
summing of shifted pieces is done in carry-save form, by rows of full adders
("compressors"), and only one carry-propagate adder per unit turns the final
pair of vectors into a binary number.

Three architectures are provided, each suited to a different case:

| unit | cycles per product | idea | good for |
|---|---|---|---|
| `mcim_fb` (feedback) | any CT >= 2 | accumulate one operand slice per cycle through a 3:2 compressor and an adder in a loop | relaxed clocks, large CT |
| `mcim_ff` (feedforward) | 2 (any CT >= 2 allowed) | store the PPM results, then sum them all at once; no loop, so it pipelines | tight clocks |
| `mcim_karatsuba` | 3 | three half-size products (Karatsuba), sums and differences done inside the compressor | 128 bits and wider |

Combining units gives fractional rates: a 2-cycle and a 3-cycle unit side by
side deliver 5/6 products per cycle, two 3-cycle units 2/3. The top level,
`mcim_top`, is a bank with one unit of each kind at 128 x 128 bits (feedback
at CT 3, feedforward at CT 2, Karatsuba at CT 3), every unit with its own
operands and handshake.

The architectures, their block structure and the sizes come from the
published description of these multi-cycle multipliers (Houraniah, Ugurdag,
Dedeagac, "Efficient Multi-Cycle Folded Integer Multipliers"). The step
schedules, the handshake, the reset, and the insides of the PPM and of the
compressors, which that work takes from a commercial component library, are
this implementation's own; the sections below say which is which.

## Interface and timing (all three units)

```
clk, rst_n                      clock, asynchronous active-low reset (control only)
start                           1 = begin a product with the a, b now present
a[W-1:0], b[W-1:0]              unsigned operands
result[2W-1:0]                  unsigned product
done                            1 for one cycle when result is the product
```

```
cycle      0      1      ...    CT-1    CT      CT+1
start      1      0             0       (1)
a, b       <------- held stable ------->  may change
done       0      0             0       1
result                                  product
```

* `start` is sampled at a rising edge; the cycle in which it is high is step 0.
* The operands must stay unchanged from step 0 through step CT-1. The units
  have no operand registers: they read the operand slices they need in each
  step straight from the inputs.
* `done` is high in cycle CT, i.e. the latency is CT cycles, and the unit
  is free again in that same cycle: `start` may be high together with `done`,
  so products can follow each other every CT cycles.
* With `OUT_REGS = n` the result and `done` pass through n more registers
  (latency CT + n); a new product may still start every CT cycles. Those
  registers are meant to be moved into the logic by a synthesis tool's
  retiming when a short clock period is needed.
* Each unit carries two assertions: no `start` while a product is in
  progress, and operands stable while busy.

`result` of the feedback and Karatsuba units is valid in the `done` cycle and
stays until the cycle after the next `start`; the feedforward unit's
registered result stays until the next product is written.

## Building blocks

**`csa32`** - a row of W full adders: three vectors in, sum and carry out,
`sum + carry = x + y + z (mod 2^W)`. This is the "3:2 compressor".

**`csa_tree`** - an N:2 compressor, a Wallace tree of `csa32` rows: each level
groups its vectors in threes and compresses each group, so n vectors become
2*floor(n/3) + n mod 3; levels are added until two remain. The units use it
as 4:2 (feedforward), 5:2 (Karatsuba) and 10:2 (Karatsuba PPM).

**`ppm_array`** - the PPM: the WB rows `a & b[j]`, shifted by j, reduced to
two vectors by `csa_tree`. With output width OUT_W >= WA + WB no bit is ever
dropped, so the two vectors add up to the product exactly, as integers, not
only modulo 2^OUT_W (every intermediate vector is non-negative and no larger
than the product). The feedforward unit relies on that to store the vectors
at product width. A commercial PPM generator or a Dadda tree would do the same
job with less delay; the array-plus-Wallace form is simply the plainest one.

**`ppm_kara`** - a Karatsuba PPM, described below.

**`mcim_out_pipe`** - the optional output registers.

## Feedback unit (`mcim_fb`)

b is cut into CT slices of K = ceil(W/CT) bits (padded with zeros when W is
not a multiple of CT). One W x K PPM is used each cycle on a and one slice,
chosen by a multiplexer driven by the step counter. Per step, three vectors
are summed: the two PPM vectors and the fed-back accumulator. A 3:2
compressor makes them two, one adder makes them one, and that value is the
new accumulator:

```
acc(0) = a * b_slice[CT-1]
acc(i) = acc(i-1) * 2^K + a * b_slice[CT-1-i]          i = 1 .. CT-1
acc(CT-1) = a * b
```

Slices go most significant first, so the fed-back value is shifted by the
fixed amount K, which costs only wiring. In the `start` cycle the fed-back
value is forced to zero; this is how `start` clears the accumulator. The
adder sits inside the loop, so it cannot be pipelined, and the clock period
must hold one compressor row and a 2W-bit adder. The accumulator register is
the result register.

## Feedforward unit (`mcim_ff`) and the multi-cycle PPM (`mcppm_ff`)

Slices go least significant first. In steps 0 .. CT-2 the two PPM vectors are
stored in registers (W + K bits each, exact as explained for `ppm_array`). In
the last step the stored vectors, shifted left by i*K, and the current
vectors, shifted left by (CT-1)*K, enter a 2CT:2 compressor (4:2 at CT = 2),
whose two outputs are registered. The final adder comes after those
registers. Nothing loops, so every stage can be pipelined; the cost is
storage that grows with CT, which is why CT = 2 is the intended setting.

Everything up to the registered compressor outputs is a module of its own,
`mcppm_ff`: a **multi-cycle PPM** that delivers a product in carry-save form
after CT cycles. `mcim_ff` is `mcppm_ff` plus the final adder. Because a
multi-cycle PPM has the same job as a PPM, it can replace the combinational
PPM inside another feedforward unit: with `SUB_CT > 1` each slice product is
computed by an inner `mcppm_ff` of cycle time SUB_CT, so a product takes
CT * SUB_CT cycles (2 x 2 = 4, 2 x 3 = 6, ...). Each outer slice then lasts
SUB_CT cycles; the inner unit is started in the first of them and its
registered vectors are taken when it raises `done`. The vectors of the last
slice arrive one cycle after the operands were last used, so the nested
latency is CT * SUB_CT + 1, while a new product can still start every
CT * SUB_CT cycles.

## Karatsuba unit (`mcim_karatsuba`)

This is the least obvious of the three. With H = W/2, a = {a1, a0} and
b = {b1, b0}:

```
T0 = a0 * b0      T1 = a1 * b1      T2 = (a0 + a1) * (b0 + b1)
a * b = T1 * 2^W + (T2 - T1 - T0) * 2^H + T0
```

Three products of H+1 bits replace four of H bits. One (H+1) x (H+1) PPM
computes them in three steps, and one small H-bit adder, shared through two
2-input multiplexers, prepares the two operand sums in time:

| step | PPM operands | shared adder | 5 compressor inputs |
|---|---|---|---|
| 0 (`start`) | a0, b0 -> T0 | a0 + a1 -> reg sa | T0.s, T0.c, -T0.s*2^H, -T0.c*2^H, constant |
| 1 | a1, b1 -> T1 | b0 + b1 -> reg sb | fb.s, fb.c, T1.s*2^W, T1.c*2^W, -T1.s*2^H |
| 2 | sa, sb -> T2 | - | fb.s, fb.c, T2.s*2^H, T2.c*2^H, delayed -T1.c*2^H |

The five vectors of each step are chosen by a multiplexer stage and reduced
by a 5:2 compressor whose two outputs are registered and fed back (fb.s,
fb.c). The loop holds only the compressor; the final adder sits after the
registers, outside the loop, so it can be pipelined. After step 2 the
registers hold the product in carry-save form and the adder resolves it in
cycle 3.

**Subtraction without an adder.** All vectors are 2W bits and all arithmetic
is modulo 2^(2W), which is exact because the product fits. For any vector x,

```
-(x * 2^H)  =  {~x, H zeros} + 2^H        (mod 2^(2W))
```

so a subtracted PPM vector enters the compressor through an inverter and a
fixed shift, and owes a correction of +2^H. Four vectors are subtracted per
product (two of T0, two of T1), so the corrections add up to 2^(H+2), which
enters as a constant vector in step 0, when the feedback inputs are not yet
in use. Note that a PPM's two vectors must each be negated: the pair is only
known to add up to the product, not what either vector is on its own.

**Why one vector is delayed.** The ten PPM vectors plus the constant need
eleven compressor inputs over three steps; step 0 has five free inputs, steps
1 and 2 three each (two go to the feedback). T1 arrives in step 1 with four
vectors, so one of them, -T1.c*2^H, is parked in a register and added in
step 2, which has a free input.

**Karatsuba PPM (`ppm_kara`).** The same identity is applied inside the PPM,
combinationally: three smaller PPMs for T0, T1, T2 and a 10:2 compressor for
their ten vectors, with the four corrections merged into one bit 2^(m+2)
(m = ceil(n/2) is the split point), ORed into the vector T1.s*2^(2m), whose
low 2m bits are zero. The recursion can go `KARA_LEVELS` deep; it is unrolled
into levels of 3^l equal nodes, each level's operand width being
ceil(n/2) + 1 of the level above, and it stops at plain `ppm_array` leaves
(also whenever the width falls below 8). The Karatsuba unit uses one level by
default; `KARA_LEVELS = 0` gives it a plain PPM. Every vector in the
recursion is carried at the full 2W-bit frame, because the inverted vectors
are only right modulo that frame.

## Parameters

| module | parameter | default | meaning |
|---|---|---|---|
| all units | `W` | 128 | operand width |
| `mcim_fb` | `CT` | 3 | cycles per product, >= 2 |
| `mcim_ff` | `CT` | 2 | cycles per product, >= 2 |
| `mcim_ff`, `mcppm_ff` | `SUB_CT` | 1 | cycle time of a nested multi-cycle PPM (1 = combinational PPM) |
| `mcim_karatsuba` | `KARA_LEVELS` | 1 | recursion depth of the Karatsuba PPM; W must be even |
| all units | `OUT_REGS` | 0 | extra output registers |
| `mcim_top` | `W`, `FB_CT`, `FF_CT`, `KARA_LEVELS`, `OUT_REGS` | 128, 3, 2, 1, 0 | passed to the units |

Sizes evaluated for these architectures: 16 x 16 (feedback at CT 2 and 3,
feedforward at CT 2), 32 x 32 (feedback at CT 2 to 8) and 128 x 128 (all
three). Each is one parameter setting of the units here; 16- and 32-bit
operands also run on the 128-bit bank zero-extended, at the cost of area.
The latencies quoted for deep pipelines at short clock periods (for example
4 for the 128-bit feedforward unit at 0.8 ns, 7 for the Karatsuba unit)
correspond to `OUT_REGS = L - CT` followed by retiming.

## Where this departs from, or adds to, the original description

* **PPM and compressors.** The original units use a commercial PPM generator
  and compressor generator. Here they are an AND array and Wallace trees of
  full-adder rows: same function, not the same area or delay.
* **Feedforward "custom" compressor.** An area-saving variant of the
  feedforward compressor with a wider final result is mentioned but not
  described; it is not provided.
* **Multi-cycle PPMs.** Dropping the final adder of a feedforward or
  Karatsuba unit gives a multi-cycle PPM that can in turn serve as the PPM
  of another unit, for cycle times that are products of 2 and 3. Only the
  feedforward form is provided (`mcppm_ff`, nested one level deep through
  `SUB_CT`); how the Karatsuba unit's compressor schedule would stretch over
  a multi-cycle PPM is not described, so there is no Karatsuba form and no
  multi-cycle PPM inside the Karatsuba unit. The nesting schedule and its
  extra cycle of latency are this implementation's own.
* **Karatsuba unit CT.** Only the 3-cycle form is provided, not multiples of 3.
* **Latency of the 128-bit feedback unit at CT 3.** One table gives it as 2
  cycles, while the 16-bit unit at CT 3 is given as 3; a feedback unit with one
  PPM needs one cycle per slice, so this implementation has latency CT.
* **Own choices.** Slice order, step counters, the operand-hold rule, the
  `done` strobe, the reset, the Karatsuba step schedule (order of T0, T1, T2,
  which vector is delayed, where the constant enters), the split point and
  leaf limit of the Karatsuba PPM, and `KARA_LEVELS = 1`.
* **Signed operands** are not supported.
* The area, power and timing figures of the original work come from a
  commercial 40 nm flow and are not reproduced by this RTL.

## Verification

Every module has a self-checking testbench in `tb/`; each prints
`TB_RESULT checks=N failures=M` and stops itself with a watchdog if it hangs.

| testbench | what it checks |
|---|---|
| `tb_csa32` | sum and carry bit by bit against the full-adder equations, and their total |
| `tb_csa_tree` | 1, 3, 4, 5, 6, 10 and 17 inputs against the sum of the inputs |
| `tb_ppm_array` | exact (not modular) product at 128x43, 128x64, 16x8; 9x9 over all a for several b |
| `tb_ppm_kara` | 65-bit PPM at 1 and 2 levels, 16-bit at 1 level, 8-bit leaf, with corner operands |
| `tb_mcim_fb` | 16-bit CT 2 and 3, 32-bit CT 5 (padded slices), 32-bit CT 8 with 2 output registers, 128-bit CT 3 |
| `tb_mcppm_ff` | the multi-cycle PPM's two vectors, 16-bit CT 2, and nested: 16-bit 3 x 2, 32-bit 2 x 3, 128-bit 2 x 2 |
| `tb_mcim_ff` | 16-bit CT 2, same with 4 output registers, 32-bit CT 3, 20-bit CT 3 with 1 register, 128-bit CT 2, nested 16-bit 2 x 2 and 24-bit 3 x 2 |
| `tb_mcim_karatsuba` | 16-bit with plain and Karatsuba PPM, 32-bit with 2 output registers, 64-bit with 2 levels, 128-bit |
| `tb_mcim_top` | the 128-bit bank at its defaults, all three units running at once |
| `tb_mcim_workloads` | all 21 evaluated configurations: 16/128-bit units at minimum latency and at the deeper pipelines of the tight-timing results (16-bit FF L 9, FB L 4 and 9; 128-bit FF L 4, FB L 4 and 6, Karatsuba L 7), 32-bit feedback at CT 2 to 8 |
| `tb_fir_usecase` | four 128-bit feedforward units with latency 4 and a two-stage adder: sums of four products due exactly 6 cycles after each sample |

The unit testbenches share `tb_mcim_driver`, which issues products with
random gaps (often none, so that `start` coincides with the previous `done`),
holds the operands, mixes random operands with corner cases (zero, all ones,
alternating bits, a lone top bit), and checks every result against the `*`
operator and every `done` against its exact due cycle. `tb_mcim_top` also
counts back-to-back starts, idle gaps, corner operands, Karatsuba operand sums
that carry out, and cycles in which two units start or finish together, and
fails if any of these never happened.

To run one with Verilator:

```
verilator --binary --timing --assert -Irtl -Itb rtl/mcim_pkg.sv tb/tb_mcim_top.sv --top-module tb_mcim_top
./obj_dir/Vtb_mcim_top
```

(the other modules are found through `-I`; every file holds one module named
after it). Each testbench runs in well under a second once built; building
`tb_mcim_workloads`, which elaborates 21 multipliers, takes about two
minutes.
