# A 32-bit early output asynchronous ripple carry adder with dual-bit cells

This is a clockless 32-bit adder. Every bit is carried on two wires, in the
dual-rail (1-of-2) code, and words are exchanged under a 4-phase
return-to-zero handshake. Like any ripple carry adder, its forward latency is
set by the carry chain. The chain is shortened by building most of the adder
from **dual-bit full adders (DBFAs)**. A DBFA adds two bits of each operand
plus a carry in one cell, so 32 bits need roughly 16 carry stages instead of
32. The two least significant positions use ordinary **single-bit full adders
(SBFAs)** instead, because a DBFA whose operands arrive last would be slow
there. The default adder therefore has 2 SBFAs (bits 0 and 1) followed by 15
DBFAs (bits 2 to 31), which makes 17 carry stages.

Both cells are **early output** circuits. An output can become valid before
every input has arrived ("early set"). For example, the carry out of a DBFA is
known as soon as its high bit pair generates or kills a carry. An output can
also return to spacer before every input has ("early reset"). These cells are
the reason the adder is fast. They are also why the surrounding stage needs
one timing assumption, which is explained below.

The RTL covers:

- the C-element;
- both adder cells, at gate level;
- the parameterised ripple adder;
- the dual-rail stage registers;
- the completion detectors;
- a top level that wires all of these into one handshaking pipeline stage.

## Dual-rail code and the 4-phase protocol

A bit `X` travels on the wires `(X1, X0)`:

| `(X1, X0)` | meaning |
|---|---|
| `(1, 0)` | data 1 |
| `(0, 1)` | data 0 |
| `(0, 0)` | spacer (no data) |
| `(1, 1)` | illegal |

`dr_pkg::dr_bit_t` is a packed struct `{r1, r0}` with exactly this meaning.
The package also holds small helpers: `dr_encode`, `dr_is_data`,
`dr_is_spacer` and `dr_is_illegal`.

A transaction has four phases:

1. The bus starts all spacer and the sender's `ackin` is high. The sender then
   raises one rail of every pair.
2. The receiver sees a complete code word and raises `ackout`.
3. The sender sees `ackin = not ackout` go low and returns the bus to spacer.
4. The receiver sees a complete spacer and lowers `ackout`.

Completion is detected, not timed. A **completion detector** ORs the two rails
of each pair and joins the results with a tree of two-input **Muller
C-elements**. A C-element's output goes to 1 when both inputs are 1, goes to 0
when both are 0, and holds its value otherwise. So `done` rises only after the
last pair arrives and falls only after the last pair leaves.

## The single-bit cell (`sbfa`)

The SBFA decodes the two operand pairs into two signals:

- `CG1 = A0·B0 + A1·B1`: the operands are equal (AO22 gate);
- `CG2 = A0·B1 + A1·B0`: the operands differ (AO22 gate).

Four C-elements pair `CG1` and `CG2` with the two carry rails. Two ORs then
form the sum:

```
SUM1 = C(CG1, CIN1) + C(CG2, CIN0)
SUM0 = C(CG1, CIN0) + C(CG2, CIN1)
```

The carry is formed by two more AO22 gates:

```
COUT1 = A1·B1 + CG2·CIN1
COUT0 = A0·B0 + CG2·CIN0
```

The products `A1·B1` and `A0·B0` appear both inside `CG1` and directly in the
carry gates. This implicit redundancy lets the carry appear as soon as the
operands generate or kill, without waiting for `CIN`. It also lets the carry
fall back to spacer as soon as `a` or `b` does. The sum always waits for all
three inputs, and its C-elements hold it until both the operands and `CIN` are
spacer.

## The dual-bit cell (`dbfa`)

This cell is the centre of the design. Rail names map as follows:

- `A11/A10` = `a[1]`, `A01/A00` = `a[0]`, and likewise for `b`;
- `CIN1/CIN0` = `cin`;
- `SUM11/SUM10` = `sum[1]`, `SUM01/SUM00` = `sum[0]`;
- `COUT21/COUT20` = `cout`.

**Operand decode.** For each bit position `i`, the four rails reduce to three
mutually exclusive signals plus two helpers:

| signal | definition | meaning |
|---|---|---|
| `k_i` | `Ai0·Bi0` | kill |
| `g_i` | `Ai1·Bi1` | generate |
| `p_i` | `Ai1·Bi0 + Ai0·Bi1` | propagate (AO22) |
| `e_i` | `k_i + g_i` | operands equal |
| `v_i` | `e_i + p_i` | this bit pair has arrived |

**Low sum bit.** This is built the same way as in the SBFA:
`SUM01 = C(p0,CIN0) + C(e0,CIN1)` and `SUM00 = C(e0,CIN0) + C(p0,CIN1)`.

**Carry into bit 1.** This is plain combinational logic:
`c1_1 = g0 + p0·CIN1` and `c1_0 = k0 + p0·CIN0`.

**High sum bit.** Two AO22 gates first form intermediate sums:

```
ISUM11 = c1_0·p1 + c1_1·e1
ISUM10 = c1_0·e1 + c1_1·p1
```

Each one then passes through a C-element with a completion signal:

```
done = C( C(v0, v1), c1_1 + c1_0 )
```

So the high sum bit becomes data only after all four operand pairs have
arrived and the internal carry is known. It returns to spacer only after all
of them have left. It does not have to wait for `CIN` when bit 0 generates or
kills.

**Carry out.** This needs no C-element:

```
COUT21 = p1·p0·CIN1 + (p1·g0 + g1)
COUT20 = p1·p0·CIN0 + (p1·k0 + k1)
```

A generate or kill in bit 1 produces the carry immediately. So does bit 1
propagating a generate or kill from bit 0. `CIN` matters only when both bits
propagate, and then it passes through a single AO21 gate. In a middle position
of the adder, the carry therefore costs one AO21 per two bits. The carry
returns to spacer as soon as the operands do, whatever `CIN` is doing.

Expanded, these gates are the disjoint sum-of-products equations of the cell,
listed in `tb/tb_dbfa.sv`. For example:

```
COUT21 = A10A00B11B01CIN1 + A11A00B10B01CIN1 + A10A01B11B00CIN1
       + A11A01B10B00CIN1 + A10A01B11B01 + A11A01B10B01 + A11B11
```

In a disjoint sum of products, no two products can be true at once. So exactly
one path is activated from the inputs to each output rail, which keeps the
rails monotonic.

**Where this cell departs from its source drawing.** The gate network follows
the published drawing of the cell, with one exception. The drawn gates for the
carry-0 rail `c1_0` could not be read unambiguously. This RTL writes `c1_0` as
the mirror image of the clearly drawn `c1_1`. With that choice the cell
matches the published equations for every input word, and the testbench
checks this.

## The ripple adder (`async_rca`)

`async_rca #(WIDTH, NUM_SBFA)` places `NUM_SBFA` SBFAs at bits `0 ..
NUM_SBFA-1`. It fills the rest with DBFAs, two bits each, and chains the
dual-rail carry from bit 0 upwards. `WIDTH - NUM_SBFA` must be even.

| `NUM_SBFA` | arrangement | carry stages |
|---|---|---|
| 2 (default) | 2 SBFAs + 15 DBFAs | 17 |
| 0 | 16 DBFAs | 16 |
| 4 | 4 SBFAs + 14 DBFAs | 18 |

The SBFAs sit at the bottom because of where the DBFA is slow. When a DBFA's
carry arrives last, the DBFA adds only one AO21 to the path. When its own
operands arrive last, the path is AO22, then AND, then AO21. At the least
significant position, the operands are what arrives last. Two SBFAs there cost
less than one DBFA. Adding more SBFAs makes the chain longer again.

The adder is a pure function block with no handshake of its own. Its outputs
become data after its inputs do and return to spacer after its inputs do, with
the early behaviour described above.

## The pipeline stage (`async_rca_stage`, the top)

```
a,b,cin ──► input register ──┬──► async_rca ──► next stage register ──┬──► sum,cout
             ▲ackin          │                   ▲ackin               │
             │               ▼                   │                    ▼
             │       completion detector ──► ackout      completion detector
             │                                   │                    │
             └────────────── NOT ◄────────────────┼────────────────────┘
                                                 └── NOT ◄── rx_ackout
```

- **Registers** (`dr_register`): each rail is `q = C(d, ackin)`. With `ackin`
  high, rising rails pass and are then held. With `ackin` low, falling rails
  pass. So a register empties only after its successor has taken the word.
  The input register holds 65 pairs and the next stage register 33. Both
  have an asynchronous active-high `rst` that empties them to spacer.
- **Input side**: `ackout` is the input register's completion detector. The
  transmitter sends data while `ackout` is low and spacer after `ackout` has
  gone high. The input register's `ackin` is the inverse of the next stage
  register's completion signal, so a new word enters only after the previous
  result has been taken and cleared. While that has not happened, a new word
  waits at the input register (a stall).
- **Output side**: `sum`/`cout` are the next stage register's outputs. The
  receiver raises `rx_ackout` after taking a word and lowers it after seeing
  spacer. The next stage register's `ackin` is `~rx_ackout`.

**Timing assumption.** Data may arrive on the 65 input pairs with any skew.
The return to spacer may not be skewed in the same way. Early reset lets the
adder return *every* output to spacer while some operand pairs are still data,
since only the bit-0 sum waits for the carry in. If that happens:

1. the next stage register empties;
2. its completion detector falls;
3. the input register's `ackin` rises;
4. an operand rail still held in the input register can no longer be cleared,
   and the stage deadlocks.

The stage is therefore correct when the transmitter resets the whole operand
bus together, as the 4-phase protocol says it does. "Together" means within
less time than it takes to go round the loop adder → register → completion
detector → `ackin`. The carry in may lag the operands by any amount, because
the bit-0 sum C-elements keep the next stage register non-empty until `cin`
has left.

This is the relative-timing assumption that early output circuits carry. A
simulation that resets operand pairs one at a time does deadlock. The top
testbench resets all operands in one step and the carry in one to four steps
later.

## C-elements in RTL

`c_element` is written as an `always_latch` that sets on `a & b` and clears on
`~a & ~b`; `c_element_rst` adds an asynchronous clear. Synthesis therefore
reports one latch per C-element:

| module | latches |
|---|---|
| `async_rca` | 128 |
| two registers | 196 |
| two completion detectors | 96 |
| whole stage | 420 |

These latches are intended. Verilator also reports two kinds of warning:

- **`UNOPTFLAT`** for the top: the handshake loop through the registers and
  completion detectors is a real combinational loop, broken only by the
  C-elements' state. Verilator iterates it to a fixed point.
- **`NOLATCH`** on the C-element's `always_latch`: this is a false alarm of
  its latch detector.

The adder-cell C-elements have no reset. Under spacer both of their inputs are
0, so they settle to 0 by themselves. Only the register C-elements need one.

## Testbenches

Every testbench is self-checking and ends with a `TB_RESULT checks=…
failures=…` line.

| testbench | what it checks |
|---|---|
| `tb_c_element` | every transition and a long random sequence against a set/clear/hold model; hold after 11 and after 00 explicitly |
| `tb_sbfa` | all 8 words, 40 times each. Inputs arrive and leave one pair at a time in random order. After every step: no illegal code, monotonic rails, every valid output already correct, carry early set and early reset. With all inputs present: the four published equations |
| `tb_dbfa` | the same for all 32 words. Also checks the carry's early set conditions, that the high sum waits for all operands, and early reset of the carry and high sum while `cin` is still data. Compares with the six published equations typed in rail by rail |
| `tb_async_rca` | the default adder, the 16-DBFA adder and the 4-SBFA adder side by side. 400 words (directed full-carry cases plus random) with the 65 pairs arriving and leaving in random order. Checks per step, the sum against `a+b+cin`, and counts early set and early reset events |
| `tb_dr_register` | pass, hold, release and blocking of a 65-pair register, plus random stimulus against a per-rail C-element model |
| `tb_completion_detector` | a 65-pair and a 3-pair detector: `done` exactly at the last arrival and at the last departure |
| `tb_async_rca_stage` | the whole stage at default parameters: 1000 random words through transmitter and receiver processes with random, sometimes long, acknowledge delays. Checks results in order, completion-detector behaviour of `ackout`, no illegal codes, and that the output holds until acknowledged. Requires at least one completed transaction, early set, early reset and stall; a typical run sees about 19000 early set events, 12000 early reset events and 200 stalls |

To run one with plain Verilator, from the directory that holds `rtl/` and
`tb/`:

```
verilator --binary --timing --assert -Wno-fatal --timescale 1ns/1ps \
    -Irtl -y rtl -y tb +libext+.sv \
    rtl/dr_pkg.sv tb/tb_async_rca_stage.sv --top-module tb_async_rca_stage
./obj_dir/Vtb_async_rca_stage +verilator+rand+reset+2
```

`-Wno-fatal` is needed because the `UNOPTFLAT` and `NOLATCH` warnings
described above would otherwise stop the build. `--timescale` gives the RTL
files, which have no time unit of their own, the testbench's unit.

`+verilator+rand+reset+2` starts uninitialised state at random values, which
also tests that reset and spacer bring every C-element to a known state. Each
testbench runs in seconds.

## What can and cannot be trusted

- **Logic function**: both cells are checked exhaustively against their
  published equations and against arithmetic. The adder is checked against
  `a+b+cin` for every arrival order tried. This part is solid.
- **Gate structure**: the SBFA and most of the DBFA follow the published
  drawings gate for gate. The DBFA's `c1_0` is an inferred gate, as explained
  above.
- **This design's own choices**, not taken from the source:
  - the register cell `q = C(d, ackin)`;
  - the reset;
  - the balanced shape of the C-element tree;
  - placing both registers and the ack inverters inside the top;
  - the stage's timing assumption, which the source does not state.
- **Not modelled**: gate delays. The RTL is zero-delay, so the source's
  figures (forward latency in ns, area in µm², power in µW, measured in a
  32/28 nm process with vectors every 20 ns) cannot be reproduced. Neither can
  the latency ranking of the 0/2/4-SBFA arrangements. What can be checked is
  the number of carry stages, which follows from `NUM_SBFA` as in the table
  above. The comparison adders (heterogeneous 1-of-4 encodings, older DBFAs,
  carry lookahead and carry select adders) are not included.
- **Synthesis**: the C-elements synthesise as latches. A real implementation
  would map them to a custom C-element cell and keep the AO21/AO22 gates as
  complex gates, so that the hazard-free decomposition survives.

## Files

| file | contents |
|---|---|
| `rtl/dr_pkg.sv` | dual-rail type and helpers |
| `rtl/c_element.sv`, `rtl/c_element_rst.sv` | C-elements |
| `rtl/c_tree.sv` | N-input C-element as a balanced tree |
| `rtl/sbfa.sv`, `rtl/dbfa.sv` | the two adder cells |
| `rtl/async_rca.sv` | the ripple adder, parameters `WIDTH` (32) and `NUM_SBFA` (2) |
| `rtl/dr_register.sv`, `rtl/completion_detector.sv` | stage register and completion detector, parameter `N` (65) |
| `rtl/async_rca_stage.sv` | the top: one pipeline stage, parameters `WIDTH` and `NUM_SBFA` |
| `tb/tb_*.sv` | one testbench per module |
