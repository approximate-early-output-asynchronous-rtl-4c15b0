# Early output dual-rail approximate adders (RTZ and RTO)

Approximate adders save delay and energy by computing the low-order bits of a
sum inaccurately. This design does that in a quasi-delay-insensitive (QDI)
asynchronous circuit with no clock. Every bit travels on two wires (dual-rail),
and each operation is one 4-phase handshake. The adder is a 32-bit ripple
carry adder in which the `APPROX_BITS` least significant bits are approximated:

* each approximate sum bit is `a_i | b_i`, with no carry;
* the carry into the accurate upper part is `a_{K-1} & b_{K-1}` (K = `APPROX_BITS`);
* the upper `WIDTH-K` bits are added exactly by a ripple of full adders.

So for K > 0:

    result = { a[31:K] + b[31:K] + (a[K-1] & b[K-1]),  a[K-1:0] | b[K-1:0] }   (33 bits with carry out)

With K = 0 the adder is exact (a half adder in bit 0, full adders above it).
This scheme is known from synchronous approximate adders. What is new here is
that every building block is an *early output* QDI gate, in two versions, one
for each handshake convention. The reference configurations are
K = 0, 4, 8, 12, 16 and 20, for both conventions. The RTL builds all of them
from three parameters.

The design follows the paper "Approximate Early Output Asynchronous Adders
Based on Dual-Rail Data Encoding and 4-Phase Return-to-Zero and Return-to-One
Handshaking" (P. Balasubramanian). The gate equations, the adder structure and
the encodings come from that paper. The stage registers, the completion
detector, reset and all interfaces are this implementation's own choices.

## Dual-rail words and the two handshakes

A bit is a pair `{r1, r0}` (`dr_pkg::dr_t`).

| protocol | value 1 | value 0 | spacer | illegal |
|---|---|---|---|---|
| RTZ (return-to-zero) | (1,0) | (0,1) | (0,0) | (1,1) |
| RTO (return-to-one)  | (0,1) | (1,0) | (1,1) | (0,0) |

Tokens alternate, data, spacer, data, and so on. Under RTZ, data is signalled
by rising rails and the spacer by falling ones; under RTO it is the other way
round. An RTO word is the bitwise complement of the RTZ word for the same
value. Therefore every RTO gate is the Boolean *dual* of the RTZ gate: AND and
OR swap. C-elements are their own dual, so they and their inputs stay the same.
The RTL writes both forms out explicitly, selected by a
`PROTOCOL` parameter (`dr_pkg::RTZ` / `dr_pkg::RTO`, default RTO).

## The building blocks (RTZ form; RTO swaps AND/OR)

`C(x,y)` below is a 2-input Muller C-element. Its output goes to 1 when both
inputs are 1 and to 0 when both are 0, and it holds its value while they
differ (`dr_c_element`).

**Full adder** (`dr_full_adder`). This is a disjoint sum-of-products design
with four C-elements:

    X = A0.B0 + A1.B1          Y = A0.B1 + A1.B0
    SUM1 = C(CIN1,X) + C(CIN0,Y)       SUM0 = C(CIN0,X) + C(CIN1,Y)
    COUT1 = CIN1.Y + A1.B1             COUT0 = CIN0.Y + A0.B0

The carry is *early output*. When a = b, it is valid from a and b alone,
without waiting for the carry in. It also returns to spacer as soon as a and b
do. The sum waits for all three inputs through the C-elements, and holds its
value until the carry in has returned to spacer. So the sum outputs acknowledge
the carry chain.

**Half adder** (`dr_half_adder`):
`SUM1 = A0.B1 + A1.B0`, `SUM0 = A0.B0 + A1.B1`, `COUT1 = A1.B1`,
`COUT0 = A0.B0 + A0.B1 + A1.B0`.

**AND** (`dr_and2`): `Z1 = X1.Y1`, `Z0 = X0 + Y0`. A single 0 input already
gives an output of 0.

**OR** (`dr_or2`): `V1 = X1 + Y1`, `V0 = X0.Y0`. A single 1 input already
gives an output of 1.

**Adder** (`eo_approx_adder`, parameters `WIDTH=32`, `APPROX_BITS=8`,
`PROTOCOL=RTO`): OR gates make sum bits `0..K-1`, and one AND makes the carry
into bit K. Full adders cover bits `K..WIDTH-1`, and `cout` is C32. For K = 0,
a half adder sits in bit 0. `APPROX_BITS >= WIDTH` is rejected at
elaboration. The adder has no clock and no state apart from the full adders'
C-elements. The first spacer after power-up initialises those C-elements.

## The pipeline stage around the adder

`eo_adder_stage` is the top. It wraps the adder in a complete handshake stage:

    a,b ──► input register ──► eo_approx_adder ──► output register ──► sum, cout
                 │   ▲                                   │   ▲
       completion│   └──────────── NOT ◄── completion ───┘   └── NOT ◄── rx_ackout
        detector ▼                          detector
              ackout

* `dr_register` is one C-element per rail, with ACKIN as the C-element's
  second input. It passes a token when ACKIN is at the matching level, then
  holds it. An asynchronous active-low `rst_n` sets the register to spacer.
* `dr_completion_detector` reduces each bit to one signal: the OR of its rails
  for RTZ (the bit holds data), or the AND for RTO (the bit holds spacer). A
  balanced tree of 2-input C-elements then combines these signals. Its output
  is 1 after complete data for RTZ, and 1 after a complete spacer for RTO.
* The inverse of the output detector's ACKOUT is the input register's ACKIN.
  The inverse of the receiver's ACKOUT (`rx_ackout`) is the output register's
  ACKIN.

Handshake on the ports:

| | sender presents data when | sender presents spacer when | receiver raises `rx_ackout` after |
|---|---|---|---|
| RTZ | `ackout = 0` | `ackout = 1` | complete data |
| RTO | `ackout = 1` | `ackout = 0` | complete spacer |

**Present each token on all operand bits at once.** The adder is early output:
a complete result, data or spacer, can appear before every operand bit has
changed. The output register then captures the result and flips the input
register's ACKIN. Any operand bit that had not yet entered the input register
is then shut out, and the stage deadlocks. A vector-driven environment avoids
this by changing all `a`/`b` bits in the same instant, as was done when these
adders were evaluated. The adder on its own has no such restriction, and its
testbench feeds it one bit at a time in random order. To make the stage
tolerate skewed operand arrival, the input register's ACKIN would also have to
wait for the input completion detector, for instance through a C-element. That
change is not made here.

## What the RTL does not reproduce

The published results are physical: forward latency, cycle time, area and
power, from a 32/28 nm standard-cell implementation. For the 32-bit RTO adder,
cycle time falls from 3.47 ns (exact) to 2.00 ns (20 approximate bits).
Technology-independent RTL with zero-delay gates cannot reproduce these
numbers. The C-element is modelled as a level-sensitive latch with the same
next-state function as the AO222-with-feedback cell. Synthesis will therefore
map it to a library latch, not to that cell. Synthesis also does not preserve
the hazard-free gate structure that QDI operation relies on. A real
implementation must keep the gates as written (dont-touch, or instantiate
cells).

Lint and synthesis report latches (the C-elements) and a combinational loop
(the handshake loop through the stage). Both are intended.

## Files

`rtl/`:

| file | contents |
|---|---|
| `dr_pkg.sv` | protocol enum, `dr_t`, encode/decode/spacer helpers |
| `dr_c_element.sv`, `dr_c_element_r.sv` | C-element, without and with reset |
| `dr_full_adder.sv`, `dr_half_adder.sv`, `dr_and2.sv`, `dr_or2.sv` | early output gates |
| `eo_approx_adder.sv` | the approximate ripple carry adder |
| `dr_register.sv`, `dr_completion_detector.sv` | stage register and detector |
| `eo_adder_stage.sv` | top: one stage around the adder |

`tb/`: every testbench is self-checking and prints `TB_RESULT checks=N failures=M`.

* `tb_dr_*`: each gate for both protocols. They check every input combination
  and arrival order, that no illegal word appears, and the early set/reset
  behaviour (for example, the full adder's carry must be valid before the
  carry in arrives when a = b).
* `tb_eo_approx_adder`: all 12 configurations, 1000 random operand pairs each,
  with the 64 operand bits arriving and leaving one at a time in random order.
  It checks against an integer model, checks that every output rail is
  monotonic and glitch-free, and checks that approximate sum bits are early.
* `tb_eo_adder_stage`: the top at its default parameters, 1000 transactions
  with a randomly slow receiver. `stage_env.sv` provides the behavioural
  sender, receiver and scoreboard. The testbench checks every result and
  requires that back-pressure stalls, carries of 1 into the accurate part,
  carry outputs of 1 and inexact results each occur.
* `tb_stage_workloads`: the same in all 12 configurations. It prints, for
  each configuration, how many results differ from the exact sum (about 69 %
  at K = 4, over 99 % at K = 20, for random operands).

To simulate, for example the stage:

    verilator --binary --timing --assert -Irtl -Itb rtl/dr_pkg.sv tb/tb_eo_adder_stage.sv \
              --top-module tb_eo_adder_stage -Wno-UNOPTFLAT -Wno-NOLATCH
    ./obj_dir/Vtb_eo_adder_stage

The full-size stage test takes a few seconds, and the 12-configuration
workload about a minute. To change the configuration, set `WIDTH`,
`APPROX_BITS` and `PROTOCOL` on `eo_adder_stage`, or on `eo_approx_adder`
alone.
