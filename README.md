# Reversible D and JK latches built from a 4x4 one-through gate

In a reversible circuit every gate maps its input vector one-to-one onto its
output vector, so no information is erased. Such a gate has as many outputs
as inputs. Outputs that a circuit does not need are still there, and are
called *garbage*. Reversible designs are judged by three costs: the number of
gates, the number of garbage outputs, and the *delay*. Here delay is the
largest number of gates on any path from an input to an output, with every
gate taking one time unit.

This RTL implements a published proposal for cheap reversible latches. Its
main idea is a new 4x4 gate, the Sayem gate (SG). Its second output is a 2:1
multiplexer, and its third output is a copy of that multiplexer, flipped by
the fourth input. Give the SG the enable E as select, the stored bit Q and the
data D as the two data legs, and 0 as the fourth input. Both the second and
third outputs then equal `DE + E'Q`, the D-latch next-state function. Wiring
one of those outputs back to the Q input closes the latch. The other carries
Q out. **A complete reversible D latch is therefore a single gate.** A JK
latch adds one Fredkin gate in front of the SG, which forms `JQ' + K'Q` as the
SG's data input. A complement output, where wanted, costs one more Feynman
gate.

The library holds five circuits:

| circuit | module | gates | garbage | delay (gates) |
|---|---|---|---|---|
| SG as NAND (universal-gate use) | `sg_nand` | 1 SG | 3 | 1 |
| D latch, Q | `rev_d_latch` | 1 SG | 2 | 1 |
| D latch, Q and not-Q | `rev_d_latch_qbar` | 1 SG + 1 FG | 2 | 2 |
| JK latch, Q | `rev_jk_latch` | 1 FRG + 1 SG | 3 | 2 (see below) |
| JK latch, Q and not-Q | `rev_jk_latch_qbar` | 1 FRG + 1 SG + 1 FG | 3 | 3 (see below) |

`rev_latch_top` puts one instance of each side by side, each with its own
pins.

## The gates

All gates are one-through: input A appears unchanged on output P.

| gate | module | inputs | outputs |
|---|---|---|---|
| Feynman (FG, CNOT) | `feynman_gate` | A, B | P = A, Q = A xor B |
| Fredkin (FRG) | `fredkin_gate` | A, B, C | P = A, Q = A'B xor AC, R = A'C xor AB |
| Sayem (SG) | `sayem_gate` | A, B, C, D | P = A, Q = A'B xor AC, R = A'B xor AC xor D, S = AB xor A'C xor D |

The Fredkin gate is a controlled swap: B and C trade places when A = 1. The
SG's Q is "B if A = 0, else C", and S is the other leg ("C if A = 0, else B"),
each flipped by D. With D fixed, (A, Q, S) is therefore a Fredkin gate on
(A, B, C), and R = Q xor D keeps D recoverable. That is why all 16 input
vectors give different outputs. The SG testbench checks this directly against
the gate's 16-row truth table.

The FG is used in two ways. With B = 0 it copies A. With B = 1 its Q output
is the complement of A, which is how the Q/not-Q latches make not-Q.

With C = 0 and D = 1, the SG's S output is `AB xor 1 = NAND(A, B)`, so the SG
on its own is a universal gate. `sg_nand` is that configuration. Its garbage
`g[2:0]` is (not(A'B), A'B, A).

## How the latches are wired

Pin names below are the RTL's. The "SG input b" loop is what stores the bit.

**`rev_d_latch`**: SG inputs (a, b, c, d) = (e, q_fb, d, 0).
SG output q is the pin `q`. SG output r is `q_fb`, fed back to SG input b.
SG output p (= e) is `g1`, and SG output s (= EQ xor E'D) is `g2`.

**`rev_d_latch_qbar`**: the same SG. Its output q drives an FG whose B input is
tied to 1. The FG's P output is the pin `q` and its Q output is `q_bar`.

**`rev_jk_latch`**: FRG inputs (a, b, c) = (state, j, not k).
- FRG output q = `Q'J xor QK'` = `JQ' + K'Q`. The two product terms can never
  both be 1, so xor and or agree. This is the SG's data input.
- FRG output r is `g1`.
- FRG output p (the state passed through) is the pin `q`.

SG inputs are (e, q_fb, JQ'+K'Q, 0).
- SG output q is the state. It goes back to the FRG's control input.
- SG output r goes back to the SG's input b.
- SG outputs p and s are `g2` and `g3`.

K is inverted by a plain inverter, which is not counted as a reversible gate.

**`rev_jk_latch_qbar`**: as `rev_jk_latch`, but SG output q drives an FG
(B = 1). The FG's P output is the state fed back to the FRG, and its Q output
is `q_bar`.

### Behaviour at the pins

- D latches: while `e = 1`, `q` follows `d`. When `e` goes to 0, `q` keeps the
  last value. `g1 = e`, and `g2` settles to `d` in both modes.
- JK latches: while `e = 1`:
  - `j=1, k=0` sets the latch;
  - `j=0, k=1` clears it;
  - `j=k=0` holds it.

  While `e = 0` the latch holds whatever `j` and `k` do.

## Storage is a combinational loop

These circuits contain no flip-flops, no `always_latch` and no clock. The
stored bit lives on a wire that a gate output drives back into that gate's own
input, exactly as in the gate diagrams. Consequences for anyone using the
RTL:

- **Tools flag the loops.** Verilator reports `UNOPTFLAT` (circular
  combinational logic) on `q_fb` or on the SG's internal `mux` net. Yosys
  reports "found logic loop". These warnings describe the intended storage.
  They are left visible, not suppressed. Verilator simulates the loops
  correctly by iterating until the loop settles.
- **No reset.** The source defines none. At power-up the loop holds an
  arbitrary value: in a two-state simulator, whatever random value the net
  started with. Load every latch once, with `e = 1`, before relying on `q`.
  All testbenches do this first.
- **Race-around in the JK latches.** With `e = j = k = 1`, the next state is
  always the complement of the present one, so the loop has no stable point
  and oscillates. In a zero-delay simulator this becomes an infinite
  evaluation loop; Verilator stops with "did not converge". This is a
  property of any level-sensitive JK latch, and the source does not discuss
  it. Both JK modules therefore carry an immediate assertion that reports the
  condition before the simulator gives up. The toggle function (`j = k = 1`)
  is thus unusable with `e` held high. Toggling would need an enable pulse
  shorter than the loop delay, which the zero-delay RTL cannot represent. The
  testbenches never apply `e = j = k = 1`.
- **Setup/hold at the closing edge** is the user's business, as with any latch.
  If `e` falls and `d` changes at the same time, the outcome depends on real
  gate delays. In simulation both changes land in the same time step, so the
  latch keeps its old value.
- **No delay model.** The RTL is zero-delay. The delay figures in the table
  above are gate counts along paths, read from the netlists, not simulated.

## Costs against the published figures

Gate and garbage counts of the RTL match the published ones for all four
latches. Three small points:

- **JK delay and the Q pin.** In the published JK diagrams, the Q pin is the
  Fredkin gate's pass-through output, and this RTL keeps that. A change on J
  or K crosses FRG → SG to reach the stored state, or FRG → SG → FG for the
  complement. The published delays (2 and 3) count exactly these paths. At
  the Q pin the new value arrives one FRG pass later, because the state goes
  back through the FRG. SG output q (or FG output P) carries the same value
  without that extra pass. A designer who cares could take the pin from there
  instead; the logic value is the same.
- **Hardware complexity.** The source counts logic operations as α (2-input
  XOR), β (2-input AND) and δ (NOT):

  | latch | published | this RTL |
  |---|---|---|
  | D latch with complement | 5α + 6β + 3δ | 5α + 4β + 2δ |
  | JK latch with complement | 7α + 10β + 7δ | 7α + 8β + 5δ |

  The RTL has the gate equations as written (SG: 4 XOR, 4 AND, 2 NOT). The XOR
  counts agree. The published AND/NOT counts are two higher, apparently from
  expanding one SG output separately. This changes no function.
- The published text writes "Q+" both for the next state (in the
  characteristic equations) and for the complement output pin. The RTL calls
  the pin `q_bar`.

The Toffoli and Peres gates also appear in the source, as background. None of
the proposed circuits uses them, so they are not included here.

## Choices made in this RTL

These follow the published circuits: the gate equations, the gate input
assignments, the constant tie-offs, and which outputs are fed back.

These are this RTL's own choices:

- the pin names;
- packing garbage into vectors at the top level;
- the race-around assertion;
- treating the K inverter as a plain `~k`;
- the top level itself. It only collects the five circuits, because the source
  never connects them to each other.

## Files

`rtl/`, one module per file, each with a header comment:

- `feynman_gate.sv`, `fredkin_gate.sv`, `sayem_gate.sv`: the gates.
- `sg_nand.sv`: the SG wired as a NAND.
- `rev_d_latch.sv`, `rev_d_latch_qbar.sv`: the D latches.
- `rev_jk_latch.sv`, `rev_jk_latch_qbar.sv`: the JK latches.
- `rev_latch_top.sv`: all five circuits side by side.

`tb/`, one self-checking testbench per module (`tb_<module>.sv`). Each prints
`TB_RESULT checks=N failures=M` and stops itself with a watchdog.

- **Gates:** exhaustive input sweeps, plus a reversibility check (no repeated
  output vector). The SG testbench holds the 16-row truth table as its
  reference.
- **Latches:** compare against a reference bit that follows the latch's
  characteristic behaviour. They run directed cases, then thousands of random
  steps, checking `q`, `q_bar` and every garbage output.
- **Behaviour counts:** each latch testbench counts transparent, set, clear
  and hold steps, including holds that blocked a change. A behaviour that
  never occurs counts as a failure.
- **`tb_rev_latch_top`:** drives all five circuits together at the top's
  default (and only) configuration.

## Simulating

The modules have no parameters. With Verilator 5, from the directory holding
`rtl/` and `tb/`:

```
verilator --binary --timing --assert -Wno-UNOPTFLAT -y rtl +libext+.sv \
    --top-module tb_rev_latch_top tb/tb_rev_latch_top.sv -o sim
obj_dir/sim
```

Replace the top module and file name to run any other testbench. Use
`-Wno-UNOPTFLAT`, or `-Wno-fatal`, because Verilator otherwise stops on the
intended storage loops. Every testbench finishes in well under a second.
