# A pipelined, interleaved FFM2 multiplier for SIKE primes

Isogeny-based key exchange (SIKE) spends most of its time multiplying
elements of GF(p) for a prime of the special form

    p = f * 2^alpha * 3^beta - 1          (SIKEp751: f = 1, alpha = 372, beta = 239)

This RTL computes `A * B mod p` for such a prime. It follows the architecture
of Jeon and Jeon, "A Fast Finite Field Multiplier for SIKE". That design has
two ideas:

* **Reduction by FFM2.** Because `p + 1 = T = f*2^alpha*3^beta`, reducing
  modulo `p` can be replaced by dividing by `T`. Then `C = q'T + r' ≡ q' + r' (mod p)`.
  Dividing by `2^alpha` is a bit slice. Dividing by `f*3^beta` is a Barrett
  reduction, which needs two more multiplications, both narrower than `A*B`.
* **One deep multiplier, kept busy by interleaving.** Every multiplication
  (`A*B`, the Barrett estimate and the Barrett back-multiplication) is broken
  into N x N-bit limb products. All of them go through a single 9-stage
  pipelined N x N multiplier. A data set's phases depend on each other, so one
  set alone would leave the pipeline mostly empty. Two independent operand
  pairs (for example the real and imaginary parts of a GF(p^2) product) are
  therefore processed together, their products alternating in the pipeline.

At the default size (N = 380, 760-bit operands, sixteen 95 x 95-bit
sub-multipliers) two products come out every 50 cycles: 25 cycles per
product. The latency is 57 cycles, counted from the first operand pair of a
batch to the second result. These are the numbers the paper reports.

## Arithmetic and word sizes

With `C = A*B` for `A, B < p`, the steps of FFM2 as built are:

| step | operation | width at default (N = 380) | where |
|---|---|---|---|
| 1 | `C = A * B` | 2N x 2N -> 4N, 4 limb products | multiplier |
| 2 | `q1 = C >> alpha`, `r1 = C mod 2^alpha` | q1 < 2^1130 (3N = 1140) | internal registers (slice) |
| 3 | `q2 = (q1 * x) >> k`, `x = floor(2^k / (f*3^beta))` | 3N x 2N -> 5N, 6 limb products | multiplier + slice |
| 4 | `q2 * (f*3^beta)` | 2N x N -> 3N, 2 limb products | multiplier |
| 5 | `r2 = q1 - q2*f*3^beta`; if `r2 >= f*3^beta`: `r2 -= f*3^beta`, `q2 += 1` | 2N+2 bits | post-processing |
| 6 | `s = q2 + (r2 * 2^alpha + r1)` | 2N+2 bits | post-processing |
| 7 | `res = s >= p ? s - p : s` | 2N bits | post-processing |

The Barrett shift is `k = 2*bitlen(p) - alpha` (1130 for SIKEp751). Then
`q1 < 2^k`, so the estimate `q2` is the true quotient or one less, and one
correction step is enough. The factor `x` then has 752 bits and fits the two
N-bit limbs the multiplier reads. In step 5 only the low 2N+2 bits of `q1`
and `q2*f*3^beta` are kept: their difference is below `2*f*3^beta`, so those
bits are exact. With `A, B < p` the sum `s` is below `2p`. One conditional
subtraction therefore gives a fully reduced result.

`f*3^beta`, `p` and `x` are not typed in anywhere. `ffm_pkg` computes them at
elaboration from `F`, `ALPHA` and `BETA` with constant functions on 2048-bit
numbers. Elaboration stops with an error if one of them does not fit its
field.

## Datapath

```
            in_a, in_b (DATA)                                      res (RES)
                 |                                                    ^
                 v                                                    |
   +--------------------------+     +-------------------------------+ |
   | internal_reg (per set)   |---->| post_proc: 2 muxes -> 1 W-bit |-+
   |  A, B, q1, r1, q2, q2*m3 |     | add/sub, 7 steps              |
   +--------------------------+     +-------------------------------+
        |  ^ slices of acc                    ^ m3, p
        v  |                                  |
   +--------------------------------------+  +-------------+
   | reconf_mult                          |  | precomp_rom |
   |  limb muxes -> nxn_mult (9 stages)   |<-| x0, x1, m3  |
   |             -> prod_accum (5N acc)   |  +-------------+
   +--------------------------------------+
        ^ mul_cmd_t each cycle
   +-----------+
   | ffm_ctrl  |  batch FSM, product schedule, post-processing start
   +-----------+
```

(`m3` stands for `f*3^beta`.)

* **`nxn_mult`** is the N x N multiplier. Its stages are: an input buffer;
  sixteen `sub_mult` N/4 x N/4 multipliers, each 3 stages deep; a 4-level
  adder tree, 16 -> 8 -> 4 -> 2 -> 1, that places product (i, j) at
  (i+j)*N/4; and an output register. That makes 9 stages, so a product
  appears 9 cycles after its operands. Each `sub_mult` splits its right
  operand into three slices: slice products, then a partial sum, then the
  final sum.
* **`reconf_mult`** puts operand multiplexers in front of the multiplier and
  the accumulation path behind it. Each cycle the controller issues one
  `mul_cmd_t`: a phase, a data set, the two limb indices, and first/last
  flags. The command's tag goes down a shift register next to the
  multiplier. `prod_accum` then adds each product into a 5N-bit accumulator,
  shifted by (limb offset)*N. The first product of a result overwrites the
  accumulator and the last one raises `done`. Both sets share one
  accumulator: the schedule never lets their product streams touch.
* **`internal_reg`** keeps one bank per set. When `done` arrives it takes the
  slice the phase calls for: `q1`/`r1` after A*B, `q2 = acc >> k` after
  q1*x, and the low bits after q2*m3.
* **`post_proc`** has one adder/subtractor. Its two input multiplexers choose
  among the internal registers, the ROM and its own working registers. It
  runs steps 5-7 of the table in 7 cycles, one adder operation per cycle:
  remainder, correction test, quotient increment, recombination, sum,
  subtract `p`, select.
* **`ffm_ctrl`** is a two-state FSM (IDLE, RUN) with a cycle counter. The
  counter is decoded into the product schedule below.

## The interleaved schedule

The schedule is the least obvious part of the design. A batch starts when a
pair is accepted while the FSM is idle; that is cycle 0, and the pair is set 0.
A second pair, set 1, can be accepted in cycles 1-5. After that the second
slot runs empty: its products are computed on whatever the registers hold,
and no result comes out.

Products enter the multiplier in these cycles:

| phase | products | set 0 | set 1 | limb order (left limb fastest) |
|---|---|---|---|---|
| A*B | 4 | 1-4 | 6-9 | (a0,b0) (a1,b0) (a0,b1) (a1,b1) |
| q1*x | 6 | 15-20 | 22-27 | (q1_0,x0) (q1_1,x0) (q1_2,x0) (q1_0,x1) (q1_1,x1) (q1_2,x1) |
| q2*m3 | 2 | 31-32 | 38-39 | (q2_0,m3) (q2_1,m3) |

Two delays give these cycles:

* **Operands come back after L+2 = 11 cycles.** A phase's result is back in
  the internal registers 11 cycles after its last product was issued: 9 in
  the multiplier, 1 in the accumulator and 1 into the register bank.
* **Set 1 trails set 0.** Set 1 always follows set 0 by the phase's product
  count plus one idle slot. This gives the zero slot in cycle 5 and keeps
  the two sets' accumulations apart.

Each phase of each set starts at the later of two cycles: when its operands
are back, and when the multiplier is free. `ffm_pkg::sched_start` computes
this from the multiplier latency, so the table above follows from `L = 9`.

Intermediate results are complete in cycles 43 (set 0) and 50 (set 1).
Post-processing starts in those cycles. It delivers set 0's product in cycle
50 and set 1's in cycle 57. The FSM is idle again in cycle 50, so the next
batch can start there, while set 1 is still in post-processing. This
reproduces the cycles the paper publishes: 43 and 50 for the multiplier's
outputs, 50 and 57 for the final products, and a new batch every 50 cycles.

The paper's timing figure for the first phase counts from the first
product entering the multiplier: products enter at cycles 0-3, and the first
result comes out at cycle 9. Here that product enters at cycle 1, one cycle
after the pair is accepted and stored, and its result comes out at cycle 10.
The end-to-end numbers count from the acceptance, and they match the
paper's.

The multiplier's last product of a batch is issued in cycle 39. Holding the
next batch until cycle 50 is how the paper describes the design, not a hard
limit of the datapath.

## Interface of `ffm_top`

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst` | in | 1 | clock; synchronous active-high reset |
| `in_valid`, `in_ready` | in/out | 1 | operand pair handshake (`in_ready` does not depend on `in_valid`) |
| `in_a`, `in_b` | in | 2N | operands; must be below p |
| `res_valid` | out | 1 | one-cycle pulse with a result |
| `res` | out | 2N | `in_a * in_b mod p` |
| `res_set` | out | 1 | slot: 0 for the pair that started the batch, 1 for the second |
| `busy` | out | 1 | a batch is in progress |

Timing, counting from the cycle the batch's first pair was accepted:

* the second pair is accepted in cycles 1-5;
* slot 0's result appears at cycle 50 and slot 1's at cycle 57;
* `in_ready` is high again at cycle 50.

Results come out in order within each slot.

## Parameters and other primes

`ffm_top` takes `N`, `ALPHA`, `BETA`, `F` and `PLUS`. The defaults are 380,
372, 239, 1 and 0. `N` must be a multiple of 4, and the prime must satisfy:

* `f*3^beta` fits in N bits;
* `p` fits in 2N bits;
* `x` fits in 2N bits;
* `k <= 3N`.

The constant functions check all four. For example, the small prime
`2^15 * 3^10 - 1` works with `N = 16`; the fast end-to-end test uses it. A
771-bit prime does not fit the default N = 380. It needs N of at least 388,
and then the sub-multipliers are no longer 95 bits wide.

The SIKE primes have the form `f*2^alpha*3^beta - 1`, the default. Setting
`PLUS = 1` selects the other form the algorithm allows,
`p = f*2^alpha*3^beta + 1`. The only hardware difference is in the last
three post-processing steps. With `T = f*2^alpha*3^beta`, write
`C = q'*T + r'`. Then `C ≡ r' - q' (mod p)`, because `T ≡ -1`. The module
computes `s = r' - q'` and keeps its sign. It adds `p` when `s` is negative.
The constants and the schedule are the same for both forms.

## Verification

Every module has a self-checking testbench in `tb/`. Each one compares the
module with reference values computed inside the testbench, using the
language's own wide `*`, `/` and `%`. Reference arithmetic shared by several
testbenches is in `tb/tb_ref_pkg.sv`. Where a cycle count is fixed, the
testbenches check it too.

| testbench | what it checks |
|---|---|
| `tb_sub_mult`, `tb_nxn_mult` | products, and the 3- and 9-cycle latencies |
| `tb_prod_accum` | offset accumulation, first/last, `done` timing and tag |
| `tb_reconf_mult` | all three product shapes for both sets, in random limb order; result 10 cycles after the last issue |
| `tb_internal_reg` | operand loads, slices by phase and set |
| `tb_precomp_rom` | every ROM word against independently computed constants |
| `tb_post_proc` | final product for exact and one-short Barrett estimates, the 7-cycle latency, empty slots, back-to-back starts |
| `tb_ffm_ctrl` | the whole schedule above, cycle by cycle; the `in_ready` window; late and missing second pairs |
| `tb_ffm_top` | about 300 batches on the 31-bit test prime; every result and its cycle (50/57) |
| `tb_ffm_top_f5` | the same with a cofactor f = 5 (`p = 5*2^15*3^8 - 1`) |
| `tb_ffm_top_plus` | the same for the `+1` form (`PLUS = 1`, `p = 2^15*3^10 + 1`); counts the final addition of `p` taken and skipped |
| `tb_ffm_top_full` | the same at the default SIKEp751 size with untouched parameters, including (p-1)^2, then a throughput run: 20 back-to-back two-set batches must take exactly 50*19 + 57 cycles |

The end-to-end tests also count each mechanism and fail if one never
happens:

* interleaved batches;
* empty second slots;
* back-to-back batches;
* the Barrett correction, both taken and skipped;
* the final subtraction of `p` (addition for `PLUS = 1`), both taken and
  skipped.

To run a testbench with Verilator:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb \
    rtl/ffm_pkg.sv tb/tb_ref_pkg.sv tb/tb_ffm_top_full.sv --top-module tb_ffm_top_full
./obj_dir/Vtb_ffm_top_full
```

Every testbench ends by printing `TB_RESULT checks=<n> failures=<m>`.

## What follows the paper and what does not

Taken from the paper:

* the algorithm (FFM2 with Barrett reduction by `f*3^beta`), for both of its
  prime forms `f*2^alpha*3^beta - 1` and `+ 1`;
* the block structure: reconfigurable multiplier, ROM, internal registers,
  post-processing with one adder/subtractor, FSM controller;
* N x N limb products from sixteen N/4-bit multipliers of 3 stages each, 9
  pipeline stages in all;
* the operand shapes 2N x 2N, 3N x 2N and 2N x N, taking 4, 6 and 2 cycles;
* two interleaved data sets;
* the 7-cycle post-processing;
* the published cycle numbers: 9, 43, 50, 57, and a 50-cycle batch period;
* the 95-bit sub-multipliers, which fix N = 380.

Choices of this design, where the paper gives no detail:

* the valid/ready operand interface, the slot bit on the result, and the
  handling of a missing second pair;
* synchronous reset;
* how each sub-multiplier is split into its 3 stages;
* which registers make up the 9 multiplier stages;
* a shift-and-add accumulator in place of the adder tree drawn for the
  accumulation path;
* the schedule rule that yields the published cycles;
* the Barrett shift `k` and the reduced widths in post-processing;
* the order of the post-processing operations;
* doing the Barrett subtraction and correction in post-processing;
* reading Algorithm 3's `r2 << 2^a + r1` as `r2 * 2^alpha + r1`, and its
  `C > p` test as `C >= p`.

Differences from the paper:

* **`2^alpha` is not stored.** The paper lists it among the ROM values.
  Here it is a wire shift.
* **Limb order within a phase.** The paper's text and its timing figure give
  different orders. This design takes the figure's input rows. The order has
  no effect on the result.
* **Only SIKEp751.** The paper also reports a SIKEp771 configuration, with
  the same 95-bit multipliers. A 771-bit prime does not fit 760-bit
  operands, so only SIKEp751 is supported at the default size.
* **The prime's exponents.** alpha = 372 and beta = 239 come from the SIKE
  specification. The paper names the prime but does not print them.
* **Fully-utilized schedule not built.** The paper sketches, as a possible
  improvement, interleaving n sets on a multiplier of latency 4n to reach 14
  cycles per product. That is not part of this design.

At the default size, generic synthesis reports about 28,000 flip-flop bits
plus about 13,000 bits of register-file storage. For comparison, the paper's
FPGA implementation reports 31,541 flip-flops. The clock frequency depends on
the target and has not been measured here.
