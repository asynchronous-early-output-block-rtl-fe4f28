# Early output dual-rail block carry lookahead adder

This is synthesizable SystemVerilog for a 32-bit **asynchronous adder**. It
follows the design in "Asynchronous Early Output Block Carry Lookahead Adder
with Improved Quality of Results" (P. Balasubramanian, D. L. Maskell,
N. E. Mastorakis). The adder has no clock. Every bit travels on two wires in
a delay-insensitive dual-rail code. Words are separated by an all-zero
*spacer*, and the environment talks to the adder with a 4-phase
return-to-zero handshake.

The design combines three ideas:

* **Block carry lookahead.** The 32 bits are cut into eight 4-bit sections.
  Inside a section the carry ripples through small full adders. Between
  sections it is looked ahead: each section has a *block carry lookahead
  generator* (BCLG) that computes the section's carry out directly from its
  operands and its carry in.
* **Early output.** A gate produces its output as soon as the inputs it
  needs are there. It does not wait for all of its inputs. For example, a
  carry is known from a generate (both bits 1) or a kill (both bits 0)
  without the carry in. Valid data therefore often finishes long before the
  worst case.
* **Redundant carries.** Each BCLG produces its carry twice, with the same
  logic equation. The *regular* carry feeds the next section's sum chain.
  The *redundant* carry feeds the next BCLG. The redundant copy is built so
  that it drops back to the spacer as soon as its operands do. As a result,
  the return to the spacer no longer has to wait for a long chain of carries
  to clear. This makes the reverse latency constant and shortens the cycle
  time. This mechanism is the main contribution of the design, and the
  section "Why two carries" below explains it in detail.

Parameters also select the paper's other three 32-bit architectures:
regular carries only, and either version with a 4-bit ripple carry adder in
the low bits (the "hybrid").

## Dual-rail code and the 4-phase handshake

A bit `W` is a pair of wires (`W1`, `W0`):

| W1 W0 | meaning |
|---|---|
| 0 0 | spacer (no data) |
| 1 0 | valid 1 |
| 0 1 | valid 0 |
| 1 1 | illegal, never produced |

In the RTL a pair is the packed struct `dr_pkg::dr_t` with fields `r1` and
`r0`, and buses are packed arrays `dr_t [N-1:0]`. The package also defines
`DR_SPACER` and the helper functions `dr_enc`, `dr_dec`, `dr_is_valid`,
`dr_is_spacer` and `dr_is_illegal`.

One transaction with the top module `eo_bcla_stage`:

1. All buses are spacer and `ack_out = 0`. The transmitter drives a valid
   `a`, `b` and `cin`.
2. When every bit of `sum` and `cout` is valid, `ack_out` rises. In the
   paper's terms this is the stage's ACKOUT. The transmitter's ACKIN is its
   inverse.
3. The receiver takes the result and raises `ack_in`. The transmitter, having
   seen `ack_out` high, returns its outputs to the spacer.
4. When every output bit is spacer, `ack_out` falls. The receiver lowers
   `ack_in`, and the next word may be sent.

There is no reset pin. A spacer on every input, with `ack_in = 0`, clears
every state-holding element. The protocol does this after every word anyway.

## The C-element

Everything that holds state is a **Muller C-element** (`c_element`). Its
output rises when all of its inputs are 1, falls when all are 0, and
otherwise keeps its value. C-elements are what make an asynchronous circuit
*indicate* its inputs. An output that passes through a C-element cannot
return to the spacer until all of the C-element's inputs have done so.

In the RTL the C-element is an `always_latch` that is transparent while all
of its inputs agree. Synthesis therefore maps it to a latch. Lint and
synthesis warnings about latches, and about combinational loops through
them, are expected for this design. A real implementation uses a custom
C-element cell, as the paper's authors did.

## Building blocks

### Early output full adder (`eo_fa`) and sum logic (`eo_sl`)

Two first-level products classify the operand pair:
`E = A0·B0 + A1·B1` (the bits are equal) and `D = A0·B1 + A1·B0` (the bits
differ).

* `SUM1 = C(CIN1, E) + C(CIN0, D)` and `SUM0 = C(CIN0, E) + C(CIN1, D)`. The
  sum needs the carry in. Through its C-elements it also stays valid until
  both the carry in and the operands have returned to the spacer.
* `COUT1 = CIN1·D + A1·B1` and `COUT0 = CIN0·D + A0·B0`. This is a disjoint
  sum of products: no two product terms can be true at once. A generate or a
  kill sets the carry without the carry in (early set). As soon as the
  operands leave, the carry returns to the spacer even if the carry in is
  still valid (early reset).

`eo_sl` is the sum half alone. It computes the top bit of each section,
whose carry comes from the BCLG instead.

### 4-bit block carry lookahead generator (`bclg4`)

For each bit `i`: generate `Gi = Ai1·Bi1`, propagate
`Pi = Ai1·Bi0 + Ai0·Bi1` and kill `Ki = Ai0·Bi0`. The carry out is:

```
C41 = G3 + P3G2 + P3P2G1 + P3P2P1G0 + P3P2P1P0·C01
C40 = K3 + P3K2 + P3P2K1 + P3P2P1K0 + P3P2P1P0·C00
```

Every product is built from 2-input C-elements, nine in three levels:

* P3G2, P3K2 and P3P2;
* (P3P2)·G1, (P3P2)·K1 and (P3P2)·P1;
* (P3P2P1)·G0, (P3P2P1)·K0 and (P3P2P1)·P0.

The four terms that do not involve the carry in are ORed per rail. The last
term, the one with the carry in, is built twice:

| output | last level | on valid data | on the spacer |
|---|---|---|---|
| regular `cout` (C41, C40) | C-element of carry-in rail and P3P2P1P0 | same value | waits until carry in **and** operands are spacer |
| redundant `red_cout` (RedC41, RedC40) | plain AND of the same two signals | same value | drops as soon as **either** is spacer |

### Why two carries

Take the case where all four bits of a section propagate. When the operands
return to the spacer, the product P3P2P1P0 clears at once. The regular
carry, however, sits behind a C-element that also watches the carry in. It
stays valid until the carry in has cleared too. If the section's carry in
came from the previous section's regular carry, which came from the section
before that, and so on, the spacer has to ripple the whole length of the
adder. The reverse latency then depends on the data.

The redundant carry has no C-element in its last level. It clears as soon
as the operands do. Passing the redundant carry from BCLG to BCLG cuts that
chain, so the spacer reaches every section in a fixed number of gate
levels. The regular carry still drives the section's own full adders, and
the full adders' C-elements make sure the sum bits indicate their carry.

`tb_eo_bcla` shows the difference directly. It applies a word in which
every bit propagates, then returns A and B to the spacer while the carry in
is still valid:

* in the regular-only adder, the carry out is still valid, held by the
  chain of C-elements;
* in the redundant-carry adder, it is already spacer.

### 4-bit section (`sub_bcla4`)

A section is one `bclg4`, full adders for bits 0..2, and sum logic for
bit 3. It has two carry inputs:

* `cin` drives the ripple through the full adders;
* `cin_la` drives the BCLG.

In the redundant-carry adder, `cin_la` is the previous section's redundant
carry and `cin` is its regular carry. Otherwise both are the same signal.

## The 32-bit adder (`eo_bcla`)

| parameter | default | meaning |
|---|---|---|
| `WIDTH` | 32 | adder width; `WIDTH - RCA_BITS` must be a multiple of 4 |
| `REDUNDANT` | 1 | 1: redundant carries go from BCLG to BCLG; 0: regular carries do both jobs |
| `RCA_BITS` | 0 | low bits built as an early output ripple carry adder (`eo_rca`); 4 gives the hybrid |

`(REDUNDANT, RCA_BITS)` = (1, 0) is the proposed design. (0, 0), (0, 4) and
(1, 4) are the regular-only adder, the regular-only hybrid and the
redundant-carry hybrid. In the hybrids, the ripple carry adder's carry out
feeds the first section's BCLG and its full adders. The redundant carry of
the top BCLG is brought out as `red_cout`, next to the regular `cout`.

## The adder as a pipeline stage (`eo_bcla_stage`, top)

```
 a,b,cin ──► input register ──► eo_bcla ──► output register ──► sum, cout
               ▲ en = ~ack_out                 ▲ en = ~ack_in      │
               └──────────── completion detector ◄─────────────────┘
                                  │
                                  └──► ack_out
```

* `dr_register` is one 2-input C-element per rail, with the enable as the
  other input. When the enable is 1 it passes valid data and then holds it.
  When the enable is 0 it passes the spacer and then holds that. It never
  lets a new word overwrite one that has not been taken.
* `completion_detector` has one OR per bit feeding an N-input C-element. Its
  output rises when every output bit is valid and falls when every bit is
  spacer.

The paper says only that the measured adders sat between input and output
registers with a completion detector. The circuits above and their wiring
are this implementation's choice: the simplest common form.

The top has the same three parameters as `eo_bcla`. `red_cout` is taken from
the adder unregistered, and nothing in the stage uses it.

## Timing

The RTL has no delays. All it can show about timing is *when an output is
allowed to change* relative to the inputs, and the testbenches check that:

* early carries;
* sums waiting for their carry;
* regular carries held;
* redundant carries reset early;
* acknowledges withheld until complete.

The paper's figures for a 32/28 nm implementation are given below for
reference. They cannot be reproduced here.

| adder | forward latency | cycle time | area | power |
|---|---|---|---|---|
| BCLA, regular carries | 2.76 ns | 5.26 ns | 2209.78 µm² | 2174 µW |
| BCLA, regular + redundant (default) | 2.01 ns | 3.39 ns | 2245.36 µm² | 2176 µW |
| hybrid BCLA-RCA, regular + redundant | 1.93 ns | 3.31 ns | 2171.41 µm² | 2174 µW |

## What follows the paper and what does not

Taken from the paper:

* the dual-rail code and the 4-phase protocol;
* the equations and C-element placement of the full adder, the sum logic
  and the BCLG;
* the regular and redundant last levels of the BCLG;
* the section structure, the routing of regular and redundant carries, and
  the 4-bit ripple carry adder of the hybrid;
* the 32-bit width.

Choices made here where the paper is silent or not legible:

* The pairing of the BCLG's nine inner C-elements with products is read off
  the equations. The figure's crossing wires cannot be followed reliably.
* Gates other than C-elements are written as the Boolean equation each
  output must satisfy. Their drawn shapes are not reproduced.
* The redundant last level is a plain AND-OR. The paper says only that it
  differs from the regular one and is faster.
* The register and completion-detector circuits and the stage wiring shown
  above are this implementation's own.
* There is no reset pin; a spacer clears the circuit.
* The C-element is modelled as a latch.

Not modelled:

* gate delays;
* the isochronic-fork and relative-timing assumptions that a gate-level
  implementation must meet;
* the area, latency and power results.

## Files

| file | contents |
|---|---|
| `rtl/dr_pkg.sv` | dual-rail type and helpers |
| `rtl/c_element.sv` | N-input Muller C-element |
| `rtl/eo_fa.sv`, `rtl/eo_sl.sv` | early output full adder and sum logic |
| `rtl/bclg4.sv` | 4-bit BCLG with regular and redundant carries |
| `rtl/sub_bcla4.sv` | one 4-bit section |
| `rtl/eo_rca.sv` | early output ripple carry adder (hybrid low bits) |
| `rtl/eo_bcla.sv` | the 32-bit adder, four architectures |
| `rtl/dr_register.sv`, `rtl/completion_detector.sv` | stage register and completion detector |
| `rtl/eo_bcla_stage.sv` | top: the adder as a 4-phase stage |
| `tb/tb_<module>.sv` | self-checking testbench per module |

## Verification

Each testbench checks its results and ends by printing
`TB_RESULT checks=N failures=M`.

* `tb_c_element`: a random walk on 2- and 3-input elements.
* `tb_eo_fa` and `tb_eo_sl`: all operand combinations. Also checks the
  early carry, the sum waiting for and being held by the carry in, and the
  return to the spacer.
* `tb_bclg4`: all 512 input combinations. Checks the early carry, both
  carries, the redundant carry's early reset, and the regular carry being
  held.
* `tb_sub_bcla4` and `tb_eo_rca`: exhaustive at 4 bits.
* `tb_eo_bcla`: all four architectures side by side on 3000 words (random
  plus propagate-heavy ones), including the reset experiment described in
  "Why two carries".
* `tb_dr_register` and `tb_completion_detector`: hold, block, rise and fall
  rules.
* `tb_eo_bcla_stage`: the top at its default size. It covers about 1000
  random words, as in the paper's own functional test, plus corner words,
  with the testbench acting as transmitter and receiver. It counts the
  early carries, the withheld acknowledges, the output holds, the
  redundant-carry resets, and both orders of the receiver and transmitter
  returning to the spacer.
* `tb_workload_architectures`: the same 1000-word random workload sent
  through four complete stages at once, one per architecture. The
  testbench forks the handshake to all four and joins their acknowledges.

To run one with Verilator:

```
verilator --binary --timing --assert rtl/dr_pkg.sv -y rtl -y tb \
          --top-module tb_eo_bcla_stage tb/tb_eo_bcla_stage.sv
./obj_dir/Vtb_eo_bcla_stage
```

Every testbench starts by driving the spacer, so the result does not depend
on the random initial values of the latches.
