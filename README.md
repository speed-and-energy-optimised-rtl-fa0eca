# A quasi-delay-insensitive block carry lookahead adder with redundant carries

This is a clockless 32-bit adder. Every bit travels on two wires, and the adder
tells by itself when a sum is complete, so no clock and no delay matching are
needed. The circuit is quasi-delay-insensitive (QDI): it works whatever the gate
and wire delays, given one assumption about forks of the input wires.

The adder is a block carry lookahead adder (BCLA). Each 4-bit nibble makes its sum
bits with a short ripple chain. Its carry output comes from a lookahead generator
that sees the nibble's eight operand bits at once. The design's main idea is to give
each lookahead generator a second, *redundant* carry output. It has the same value as
the normal one but skips the completion check, so it switches early. The redundant
carries chain the generators together, one AND-OR gate per nibble. The normal,
fully checked carries feed the ripple chains. So the carry crosses the adder fast,
and every signal is still acknowledged. The adder does this for both common
4-phase handshakes: return-to-zero (RTZ) and return-to-one (RTO).

The RTL describes the circuit gate by gate, with the C-element as the only stateful
gate. It simulates with plain Verilator. It carries no delays, so it checks function,
handshake and ordering behaviour, not speed.

## Dual-rail codes and the two handshakes

A bit `b` is a pair of rails `{r1, r0}` (`qdi_pkg::dr_t`):

| protocol | b = 1 | b = 0 | spacer (no data) | illegal |
|---|---|---|---|---|
| RTZ | `10` | `01` | `00` | `11` |
| RTO | `01` | `10` | `11` | `00` |

Every transaction is *data* and then *spacer*. A sender drives data and waits for
the acknowledge. It then drives the spacer and waits for the acknowledge to return.
Under RTZ, data makes rails rise and the spacer makes them fall. Under RTO it is the
other way round. All gates are monotonic, so no output rail ever glitches.

The RTO circuit is the RTZ circuit with each AND replaced by an OR, and each OR by an
AND. The C-elements stay. (The RTO code is the RTZ code inverted, and a C-element is
its own dual.) The RTL writes each circuit once and uses functions named after the
RTZ gate: `g_and2`, `g_or4`, `g_ao22`, `g_ao21`, and so on in `qdi_pkg`. Each gives
the named gate when `PROTOCOL == RTZ` and its dual when `PROTOCOL == RTO`. Every
module below has this `PROTOCOL` parameter. The default is RTZ.

The **C-element** (`c_element`) copies its inputs when they agree and holds while they
differ. It is built from an AO222 gate whose output feeds back to two of its inputs:
`q = ab + aq + bq`. Lint and synthesis tools therefore report a combinational loop at
every C-element. That loop is the storage and is intended. If you map the RTL to
cells, use a C-element cell or keep the feedback gate whole.

## The 4-bit lookahead generator (`bclg4`)

This is the new cell of the design and the hardest part to follow. Inputs: nibbles
`x`, `y` and a carry `cin` (all dual-rail). For each bit `i` it forms three mutually
exclusive signals:

```
P_i = X_i1.Y_i0 + X_i0.Y_i1   (propagate)
G_i = X_i1.Y_i1               (generate)
K_i = X_i0.Y_i0               (kill)
```

The true and false rails of the carry are disjoint sums of products:

```
C41 = G3 + P3G2 + P3P2G1 + P3P2P1G0 + P3P2P1P0.C01
C40 = K3 + P3K2 + P3P2K1 + P3P2P1K0 + P3P2P1P0.C00
```

Only one product term can be active at a time. That is what keeps the rails monotonic.
In the RTL:

* `gs`/`ks` is the OR of the four generate or kill terms, and `pp = P3P2P1P0`.
* `pp` meets each carry-input rail in a C-element. Each result is ORed with `gs`/`ks`
  to give `NC41`/`NC40`.
* **Internal completion detection.** Each bit gives `R_i = G_i + P_i + K_i`, which is 1
  once both operand bits of position `i` are present. A tree of three C-elements turns
  `R3..R0` into `ICD`. The carry output itself is `C4x = C(NC4x, ICD)`.

The last point is what makes the block QDI. Suppose `P3 = P2 = P1 = G0 = 1`, so
`NC41 = 1`. During the spacer, `P3..P1` may fall while `G0` is still high. `NC41` then
already reads as spacer, but the `G0` gate has not yet been acknowledged. The
C-element with `ICD` holds `C41` at 1 until every bit position has started to reset.
So a spacer on `C4` proves that the whole block has reset. In the same way, data on
`C4` proves that all eight operand bits have arrived, even when a generate or kill
made the carry early.

With `REDUNDANT = 1` the block is a **BCLGRC**. It adds

```
RC41 = P3P2P1P0.C01 + GS        RC40 = P3P2P1P0.C00 + KS      (one AO21 per rail)
```

`RC4` has the same value as `C4` but does not wait for `ICD`. It may change before
all operands have arrived or left. That is safe, because it only feeds the next
generator's carry input, and each nibble's own `C4` acknowledges what that nibble
used. When `REDUNDANT = 0` (plain BCLG) the `rc4` port is held at the spacer.

## Full adder and XOR3 (`eo_full_adder`, `eo_xor3`)

Both cells are *early output* cells. `E = X0Y0 + X1Y1` (operands equal) and
`D = X0Y1 + X1Y0` (operands differ) are each combined with both carry rails in
C-elements:

```
SUM1  = C(E,CIN1) + C(D,CIN0)      SUM0  = C(E,CIN0) + C(D,CIN1)
COUT1 = CIN1.D + X1.Y1             COUT0 = CIN0.D + X0.Y0
```

A generate or kill gives the carry output before the carry input arrives. The sum
always waits for the carry. `eo_xor3` is the sum half alone. It makes bit 3 of each
nibble, where no carry output is needed.

## The 32-bit adder (`bcla4`, `qdi_bclarc`)

A nibble (`bcla4`) has full adders at bits 0 to 2, an XOR3 at bit 3, and a `bclg4`.
The ripple chain takes its carry on `cin_fa`, and the generator takes its carry on
`cin_g`. `qdi_bclarc` connects `WIDTH/4` nibbles as follows:

```
nibble k:   cin_g  = rc4 of nibble k-1   (redundant chain, generators only)
            cin_fa = c4  of nibble k-1   (checked carry into the ripple chain)
nibble 0:   cin_g  = cin_fa = cin
top nibble: plain BCLG (REDUNDANT = 0); its c4 is the adder's carry-out
```

When data arrives, the worst path starts in the lowest generator. It runs along the
redundant chain (one AO21 per nibble) to the generator of the second-highest nibble.
That generator's checked carry `c4` then goes down the top nibble's three full adders
and XOR3. The published gate count for this path lists an AO21 for that last generator.
Here the checked carry also passes the `C(cin,PP)` C-element, an OR2 and the `C(NC4,ICD)`
C-element. The RTL follows the published gate structure, so this is a difference in
counting only. When the spacer arrives, the
redundant carries all reset almost at once, so the reverse path is short.

## The pipeline stage (`bclarc_top`)

The adder is measured, and used, between two register banks:

```
 x,y,cin -> [dr_register] -> qdi_bclarc -> [dr_register] -> sum,cout
               |     ^                        |     ^
  tx_ack <- [CD]     +-- ~[CD] <--------------+     +-- ~rx_ack
```

A register bank (`dr_register`) has one C-element per rail. The C-element combines
the rail with the stage's ACKIN. A completion detector (`completion_detector`) ORs
(RTZ) or ANDs (RTO) the two rails of each signal, then combines the results with a
tree of C-elements. The input register's ACKIN is the complement of the output-side
detector. The input-side detector drives `tx_ack` towards the sender. The output
register's ACKIN is `~rx_ack`, taken from the receiver. The carry input is registered
and acknowledged with the operands.

| signal | RTZ | RTO |
|---|---|---|
| `tx_ack` / `rx_ack` after data | 1 | 0 |
| `tx_ack` / `rx_ack` after spacer | 0 | 1 |
| idle level during reset | 0 | 1 |

`rst_n` (active low) forces both register banks to the spacer. During reset, hold the
inputs at the spacer and `rx_ack` at its idle level.

**Timing assumption.** The adder resets early. Its outputs can all return to the
spacer while one input-register rail still holds data. If the output side then
acknowledges the spacer, the input register opens for the next data, and the
straggling rail can never fall. The stage therefore needs the spacer to reach all
input rails together. This is the isochronic-fork assumption that early output logic
places on its primary inputs. The RTL cannot check it, and it must be met in layout.
The end-to-end testbenches deliver data bits in random order, one at a time, and the
spacer as one vector. If the spacer is delivered bit by bit with gaps, the zero-delay
model deadlocks.

## Parameters

| module | parameter | default | meaning |
|---|---|---|---|
| all cells | `PROTOCOL` | `RTZ` | `RTZ` or `RTO` (`qdi_pkg::protocol_e`) |
| `qdi_bclarc`, `bclarc_top` | `WIDTH` | 32 | operand width, a multiple of 4 |
| `bclg4`, `bcla4` | `REDUNDANT` | 1 | 1 = with redundant carry (BCLGRC/BCLARC), 0 = plain BCLG/BCLA |
| `completion_detector`, `dr_register` | `N` | 3 | number of dual-rail signals |
| `c_element` | `RESET_VAL` | 0 | value forced by `rst_n` |

## How far it follows the source, and where it departs

Taken from the published design: the dual-rail codes and handshakes, the register
and completion-detector structure, and the gate-level generator (P/G/K terms, lookahead
equations, internal completion tree, redundant AO21 outputs). Also the early output
full adder and XOR3, the nibble composition, the two carry chains, and the 32-bit
size with a plain BCLG in the top nibble.

Choices made here, where the source says nothing:

* An active-low reset on the register C-elements. It is needed so that a two-state
  simulation and real silicon start in the spacer.
* The shape of the completion-detector tree: heap-ordered and balanced.
* Which input signals the SUM1/SUM0 OR gates collect. The only arrangement that
  computes a sum was used.
* The carry input is treated as an ordinary handshaken operand. The source only says
  it is normally 0.
* Dual gates under RTO are produced by functions, not by a second netlist.

Not reproduced: forward latency, reverse latency, cycle time, area and power. These
come from a 32/28 nm cell-level implementation. The RTL has no cells and no delays,
and the tests measure nothing in time beyond event order. The plain-BCLA adder,
ripple-carry, carry-select, conventional CLA and hybrid adders that the source
compares against are not included. The plain 4-bit BCLA nibble used at the top of the
adder is available as `bcla4` with `REDUNDANT = 0`.

## Files

`rtl/`: `qdi_pkg.sv` (types, codes, dual gate functions), `c_element.sv`,
`completion_detector.sv`, `dr_register.sv`, `eo_full_adder.sv`, `eo_xor3.sv`,
`bclg4.sv`, `bcla4.sv`, `qdi_bclarc.sv`, `bclarc_top.sv` (top).

`tb/`: one self-checking testbench per module (`tb_<module>.sv`). Also `qdi_env.sv`, a
behavioural sender and receiver with a scoreboard, and `tb_bclarc_top_full.sv`, the
top at its default parameters for 2000 transactions.

## Simulating

Each testbench prints `TB_RESULT checks=N failures=M` and ends with `$finish`. With
Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb rtl/qdi_pkg.sv tb/tb_bclarc_top.sv \
          --top-module tb_bclarc_top -Wno-fatal -o sim
./obj_dir/sim
```

Replace `tb_bclarc_top` with any other testbench name. Verilator warns about
combinational loops (UNOPTFLAT) and still simulates them correctly. Two practical
notes for Verilator:

* It has two states, so every register must be reset or driven before it is read.
* In a testbench, do not change the circuit's inputs after a zero-length delay
  (`#0`). Verilator can then miss re-evaluating the feedback loops. Use delays of at
  least one time unit.

What the tests check:

* **Cells** (`tb_eo_full_adder`, `tb_eo_xor3`, `tb_bclg4`, `tb_bcla4`): all input
  combinations under both protocols. Inputs arrive and leave one at a time in random
  order. The tests check every value against integer arithmetic and check that every
  output rail changes only monotonically. `tb_bclg4` also checks that `C4` never shows
  data before all eight operands have arrived. It checks that `C4` keeps its data
  until the internal completion tree releases it, and that `RC4` does run ahead.
* **Adder** (`tb_qdi_bclarc`): 300 operand sets per protocol with random arrival
  order. They include all-bits carry propagation and overflow. The test counts early
  carry-outs and redundant carries running ahead of the checked ones.
* **Stage** (`tb_bclarc_top`, `tb_bclarc_top_full`): 2000 transactions per protocol
  through the full handshake with a randomly slow receiver. The tests check every
  result and count overflows, full propagations, sender stalls, early carry-outs and
  redundant-carry lead. Each event must occur. Assertions in the environment also
  check the handshake rules on both channels. `tx_ack` may acknowledge data only when
  every input holds data, and the spacer only when every input is back to the spacer.
  An output rail may take data only while `rx_ack` asks for it, and may return to the
  spacer only after `rx_ack` has acknowledged.
