# Early output dual-bit full adders in delay-insensitive logic

This is synthesizable SystemVerilog for two asynchronous ripple carry adders.
Each one adds two bits per cell instead of one. Both run under the 4-phase
return-to-zero handshake with delay-insensitive data codes. The cell is a
*dual-bit full adder* (DBFA). It takes two 2-bit operands and a carry-in and
gives a 2-bit sum and a carry-out, so a 32-bit adder needs only 16 carry hops.
The cells are *early output* circuits. Their first logic level looks only at
the operands, not at the carry. So a cell can present a valid carry-out (or
sum) before all its inputs have arrived, and it can start returning to spacer
before all its inputs have. The cost of checking that every input has arrived
(input completeness) moves out of the adder, into one completion detector at
the stage's input register.

The carry path is the second idea. In the *redundant* form, each cell's
carry-out comes from one AO21 gate (AND-OR):

    cout.r1 = cin.r1 & P | G1        cout.r0 = cin.r0 & P | G0

Here P says "the operand pair sums to 3 (mod 4)", so the carry propagates. G1
and G0 say the carry is generated or killed whatever the carry-in is. The
*non-redundant* form reuses the C-elements that the sum logic needs anyway:

    cout.rX = C(P, cin.rX) | GX

That puts a C-element plus an OR on every carry hop, not one gate. The two forms
compute the same value. They differ in timing and in one behaviour, described
under "Redundant and plain carry". The redundant form is the default
(`REDUNDANT = 1`). It is the configuration the adders were proposed for.

Two encodings are provided:

* **homogeneous** (`dbfa_hom`, `rca_hom`): every bit, carry and sum is
  dual-rail;
* **heterogeneous** (`dbfa_het`, `rca_het`): each operand bit pair and each sum
  bit pair is one 1-of-4 digit; only the carries are dual-rail.

## Codes and handshake

A dual-rail bit (`di_pkg::dr_t`, fields `r1`, `r0`) is 1 when `r1` is high, 0
when `r0` is high, and *spacer* when both are low. Both high never occurs. A
1-of-4 digit (`di_pkg::q4_t`) holds a two-bit value `v` as wire `v` high, and is
spacer when all wires are low. For the bit pair (X, Y), with X the more
significant bit, the raised wire is `E[2X+Y]`.

Every transfer is data, then acknowledge, then spacer, then acknowledge
released. Inside the adders all wires rise during the data phase and fall
during the spacer phase, and nothing else happens. The cells hold no state
except their C-elements.

## The homogeneous dual-bit adder (`dbfa_hom`)

The ports `a1, a0, b1, b0, cin` are dual-rail. The first level is sixteen
4-input AND gates, one for each operand pair (a, b) with a, b in 0..3. Each
AND takes one rail of each of the four operand bits. Their ORs classify the
pair by its sum a + b:

| signal | operand pairs        | meaning for the cell                            |
|--------|----------------------|-------------------------------------------------|
| `p3`   | a+b = 3              | carry-out = carry-in; sum MSB = not carry-in    |
| `q15`  | a+b = 1, 5           | sum MSB = carry-in                              |
| `r26`  | a+b = 2, 6           | sum MSB = 1 whatever the carry-in               |
| `r04`  | a+b = 0, 4           | sum MSB = 0 whatever the carry-in               |
| `g1`   | a+b ≥ 4              | carry-out = 1 (`A11·B11` + the pairs 1+3, 3+1)  |
| `g0`   | a+b ≤ 2              | carry-out = 0 (`A10·B10` + the pairs 2+0, 0+2)  |
| `x1`/`x0` | a0 ≠ b0 / a0 = b0 | LSB half sum (two AO22 gates)                   |

The second level has eight 2-input C-elements. Each joins `p3`, `q15`, `x1` or
`x0` with one carry-in rail. ORs then give the outputs:

    sum1.r1 = C(p3,cin.r0) | C(q15,cin.r1) | r26
    sum1.r0 = C(p3,cin.r1) | C(q15,cin.r0) | r04
    sum0.r1 = C(x1,cin.r0) | C(x0,cin.r1)
    sum0.r0 = C(x1,cin.r1) | C(x0,cin.r0)

Every output rail is a disjoint sum of products. For any input token exactly
one product term of one rail is true. So no rail can glitch high and then low
within a phase.

## The heterogeneous dual-bit adder (`dbfa_het`)

The operands are the 1-of-4 digits `a` and `b`. Exactly one 2-input AND
`a[i] & b[j]` fires per token. The ANDs are grouped by `(i + j) mod 4` into
`t0..t3`, built from AO22 gates plus the four ANDs `a1b1`, `a3b3`, `a0b0`,
`a2b2`, which the carry logic also uses. The sum is a rotation of these classes
by the carry-in:

    sum[k] = C(t[k], cin.r0) | C(t[(k-1) mod 4], cin.r1)

`t3` plays the role of `p3`. `g1` is the OR of the products with i + j ≥ 4,
and `g0` the OR of those with i + j ≤ 2. The carry-out is formed as in the
homogeneous cell. The first level is much smaller here: sixteen 2-input ANDs,
against sixteen 4-input ANDs. The price is the encoders and decoders at the
stage boundary.

## Redundant and plain carry

In a ripple chain the carry-in of a middle cell arrives last, so the carry path
decides the adder's latency. With `REDUNDANT = 1` that path is one AO21 per
cell. With `REDUNDANT = 0` it is a C-element and an OR per cell.

The two forms also behave differently on the way back to spacer. Take a
propagating pair (`p3` high) with `cin = 1` latched. If one operand bit returns
to spacer first, `p3` falls:

* the redundant carry-out falls at once, because its AND sees `p3` low: an
  early reset that ripples ahead of the carry-in's own spacer;
* the plain carry-out stays high, because its C-element holds until `cin` also
  falls.

The cell testbenches check this difference directly.

## The adders and the stage

`rca_hom` and `rca_het` chain `WIDTH/2` cells (default `WIDTH = 32`) through
their dual-rail carries. Cell `i` takes bits `2i+1` and `2i`. The carry-in of
cell 0 is the adder's carry-in.

`eo_dbfa_rca_top` wraps each adder in an asynchronous system stage:

    transmitter ─► dr_register ─┬─► [dr_to_1of4] ─► rca ─► [q4_to_dr] ─► receiver
                     ▲          └─► completion_detector ─► ACKOUT to transmitter
                     └── ACKIN = NOT (receiver's ACKOUT)

* `dr_register`: one C-element per rail, joining the input rail with ACKIN.
  Data passes while ACKIN is high. The spacer that follows passes once the
  receiver has acknowledged (ACKIN low). An active-high `rst` clears it.
* `completion_detector`: an OR per dual-rail input, then a balanced tree of
  2-input C-elements (`c_tree`). With 2·32+1 = 65 inputs the tree is 7 levels
  deep. Its output is ACKOUT: high once all 65 inputs are latched, low once all
  are spacer.
* the heterogeneous stage adds a C-element encoder per operand bit pair in
  front of `rca_het` and an OR decoder per sum digit after it, so that both
  stages have the same dual-rail ports (`hom_*` and `het_*`).

The two stages are independent. They share only `rst`. In each stage the
handshake runs like this:

1. The transmitter sends a token while ACKOUT is low.
2. The register latches each bit as it arrives. The adder outputs start going
   valid (early set).
3. ACKOUT rises when the last input is latched.
4. The transmitter returns to spacer. The register keeps the token for as long
   as the receiver has not acknowledged.
5. The receiver acknowledges. The register passes spacer, the outputs clear
   (early reset), and ACKOUT falls.
6. The receiver releases its acknowledge.

## Early output needs one timing rule

This is the point to understand before reusing the stage. An early output adder
can show all-spacer outputs while some of the register's rails still hold data.
The carry-in or an operand bit, for example, can be the last to return to
spacer. A receiver that watches only the outputs could then release its
acknowledge too soon. The register's ACKIN would go high again while a rail is
still 1. That rail would then never clear, and the stage would deadlock.

The stage's own completion detector closes this gap. ACKOUT falls only when
every input rail is spacer. **The next token may be admitted only after
ACKOUT has fallen.** In the testbenches the receiver model waits for ACKOUT low
before it releases its acknowledge. In a real pipeline this either holds by
timing (relative timing: the register's spacer is faster than the receiver's
whole cycle) or must be enforced by the environment. The RTL itself does not
enforce it. A pipeline that cannot guarantee it needs an extra gate on ACKIN,
for example a C-element of the receiver's acknowledge and this stage's ACKOUT.

## What follows the source design and what was chosen here

From the source design:

* the equations and gate structure of both cells;
* the redundant and plain carry forms;
* the 32-bit ripple width;
* the C-element function;
* the completion detector (OR gates, then a tree of 2-input C-elements);
* the position of encoders and decoders around the heterogeneous adder;
* the handshake phases.

Chosen here:

* the cells of the register (C-element latches) and of the encoder
  (C-elements, so the encoder is input-complete);
* the OR decoder;
* the balanced shape of the C-element tree;
* the reset;
* the bit-pair to cell mapping;
* placing both stages in one top;
* the timing rule above, which the source does not discuss.

The C-element is a latch here: `always_latch if (a == b) q = a;`. It stands for
a hand-built transistor cell. Synthesis therefore reports latches, 772 of them
in the top. They are intended.

All gates have zero delay. The latency, area and power figures of the original
32/28 nm implementation are cell-library results, and this RTL cannot
reproduce them. For the record, that implementation found the redundant carry
form much faster than the plain one at about the same area. It also found the
homogeneous adder somewhat faster and smaller than the heterogeneous one. To
compare latencies, map the RTL onto a library with a real C-element cell and
time the carry path.

## Verification

Each module has a self-checking testbench in `tb/`:

| testbench | what it checks |
|---|---|
| `tb_c_element` | random input walks against the C-element rule, including holds |
| `tb_dbfa_hom`, `tb_dbfa_het` | all 32 input combinations, several random arrival and departure orders each, both carry forms: no illegal code, every valid output correct, complete when the inputs are complete, spacer when the inputs are spacer; early set and early reset occur; the redundant/plain release difference |
| `tb_dr_to_1of4`, `tb_q4_to_dr` | every value, and that the encoder waits for both bits |
| `tb_rca_hom`, `tb_rca_het` | 32 bits, both carry forms, 1200 operand sets (corner cases including a full-length carry ripple), bits arriving and leaving one at a time in random order, checked after every step |
| `tb_completion_detector` | 65 inputs: the output changes only on the last arrival or departure |
| `tb_dr_register` | pass, hold of the token, hold of the spacer, reset |
| `tb_eo_dbfa_rca_top` | the top at its default parameters: both stages concurrently, 1100 handshaked additions each; counts early set, early reset, register hold and full carry ripple, and fails if any never occurs |
| `tb_eo_dbfa_rca_top_plain` | the same with `REDUNDANT = 0` |

`tb/dr_channel_env.sv` is the behavioural transmitter and receiver used by the
two top-level tests.

## Simulating

With Verilator 5, from the directory that holds `rtl/` and `tb/`:

    verilator --binary --timing --assert -Irtl -Itb rtl/di_pkg.sv \
        tb/tb_eo_dbfa_rca_top.sv --top-module tb_eo_dbfa_rca_top -Mdir obj -o sim
    ./obj/sim +verilator+rand+reset+2

Swap in any other `tb_*.sv` file and its module name. Each testbench ends with
a line `TB_RESULT checks=N failures=M`. The full top-level test takes under a
second.

Verilator has two-state logic. The C-elements hold a random value until their
inputs first agree. Every C-element here has both inputs low after reset, or is
cleared by `rst`, so this does not matter. For a lint run:

    verilator --lint-only -Wall -Irtl rtl/di_pkg.sv rtl/eo_dbfa_rca_top.sv -y rtl

## Parameters

| module | parameter | default | meaning |
|---|---|---|---|
| `dbfa_hom`, `dbfa_het` | `REDUNDANT` | 1 | 1: AO21 carry; 0: C-element + OR carry |
| `rca_hom`, `rca_het`, `eo_dbfa_rca_top` | `WIDTH` | 32 | adder width, even |
| same | `REDUNDANT` | 1 | passed to every cell |
| `dr_register`, `completion_detector` | `N` | 65 | number of dual-rail signals |
| `c_tree` | `N` | 2 | number of C-element inputs |
