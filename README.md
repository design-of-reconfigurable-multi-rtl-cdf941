# A multi-operand adder built from 4-operand modules

Neural-network hardware spends much of its time summing many numbers at once:
every neuron adds the weighted contributions of all its inputs. Doing this
with ordinary two-input adders takes N-1 additions for N operands. The design
here adds *many operands in one operation*. Its basic block adds four
operands at a time by counting the ones in each bit column. Larger adders are
assembled from copies of that block.

The RTL has three layers:

1. **The column counter.** A 4-input one's-count circuit turns one column of
   four operand bits into a 3-bit column sum, 0 to 4.
2. **4-operand adders (4xM).** Four M-bit operands in, an (M+2)-bit sum out.
   There are two versions:
   * a *serial* one that reuses a single column counter, one column per clock;
   * a *parallel* one that has one counter per column and is combinational.
3. **The N-operand adder.** 4xM modules, arranged in levels by a fixed
   reconfiguration rule, add N M-bit operands (N = 16, 64 or 256) into an
   (M + clog2 N)-bit sum. For N = 16 this is seven modules in three levels.

Everything is unsigned binary. The default sizes are 16 operands of 16 bits
and serial modules. With those defaults the top adds sixteen operands in 41
clocks.

## How wide the carry gets

Adding N operands column by column makes a carry that can be more than one
bit wide. The bound used throughout the design is simple: **the carry into
any column is at most N-1**, whatever the number base and the number of
columns. Here is why. Suppose the carry coming in is at most N-1. The column
then sums to at most N(k-1) + N-1 = Nk - 1. That keeps the outgoing carry at
most N-1 as well.

Consequences for sizing:

| operands N | largest carry | carry bits | sum of N M-bit operands |
|---|---|---|---|
| 4  | 3  | 2 | M+2 bits (18 for M = 16) |
| 16 | 15 | 4 | M+4 bits (20 for M = 16) |
| 64 | 63 | 6 | M+6 bits (22 for M = 16) |

`moa_pkg` has this rule as the functions `carry_bits(N)` and
`sum_bits(N, M)`. The bound is sometimes loose; for N a multiple of the base
the true maximum is smaller. The width it gives is still the width needed in
the cases built here.

## The column counter (`lut4x3`)

The counter is the heart of every adder here. Its input is one bit from each
of the four operands in the same column. Its output is the number of ones on
three bits. It is written as logic, not as a memory, so no clock is needed:

* bit 0 is the parity of the four bits;
* bit 1 is set when exactly two or exactly three bits are set;
* bit 2 is set only when all four are set.

The equations use pair terms (the XOR and AND of bits 3,2 and of bits 1,0).
This is one reduction of the truth table; any other circuit with the same
table can replace it.

## Serial 4xM adder (`serial_add4xm`)

```
 data_in --> input buffer --col i--> lut4x3 --L--> adder3 --bit0--> sum bit i
             (shifts right)                          ^   \--bits 2:1--> carry buffer
                                                     +---------------------(2 bits)
```

Each clock, the input buffer presents column i. The counter makes L (0..4).
`adder3` adds the 2-bit carry C (0..3) to it. The total is at most 7, so three
bits are enough:

* bit 0 is result bit i;
* bits 2:1 go back into the carry buffer for column i+1.

After the last column, the carry buffer becomes the top two result bits. Only
one counter and one 3-bit adder exist, whatever M is.

**Timing.** The addition takes M+1 clock edges, counting the edge on which
`start` is sampled:

* edge 0: column 0;
* edges 1 to M-1: columns 1 to M-1;
* edge M: the carry is copied into the result, and `done` rises.

That is 5 edges for M = 4 and 17 for M = 16. The adder is busy throughout.
`lut_out` shows each column sum as it is added, which is handy in waveforms.

**Handshake** (used by every clocked module here):

| signal | meaning |
|---|---|
| `load`  | capture `data_in` (and `carry_in`) into the buffers |
| `start` | begin the addition; may come in the same clock as `load`, the operands then feed column 0 directly |
| `busy`  | addition in progress; `start` must stay low (an assertion checks this) |
| `done`  | result valid; stays high until the next `start` |

`carry_in` presets the carry buffer. Leave it at 0 for a plain addition; a
non-zero value adds 0..3 to the sum. Reset is synchronous and active low.

## Parallel adders (`par_add4x4`, `par_add4xm`)

`par_add4x4` uses four column counters side by side. It then adds their
outputs with weights 1, 2, 4, 8, for a 6-bit result of at most 60. The second
stage is written as a plain weighted addition, and synthesis picks its
structure. A hand-built network of further counters, a half adder and an OR
gate would do the same job.

`par_add4xm` cuts M-bit operands (M a multiple of 4) into slices of four
columns. Each slice goes to a `par_add4x4`, so slice j gives a 6-bit partial
sum P_j weighted 2^(4j). Neighbouring partial sums overlap in two bit
positions. They are merged from the bottom up. At each junction:

* a half adder takes the lower overlap bit;
* a full adder takes the upper overlap bit;
* a half-adder chain carries into the rest of P_j.

The merge is exact. Slices 0..j-1 sum to less than 4·2^(4j), so the running
sum has at most the value 3 above bit 4j. P_j + 3 ≤ 63 then fits in six bits
and no carry leaves the junction.

## The 4xM module (`moa_unit`)

Larger adders need a building block with a clock and a handshake. `moa_unit`
has the same ports whatever its implementation. The parameter `PARALLEL`
chooses which:

| `PARALLEL` | inside | start-to-done |
|---|---|---|
| 0 (default) | `serial_add4xm` | M+1 edges |
| 1 | input buffer, `par_add4xm`, result register | 1 edge |

For M = 16 the latencies are 17 and 1 edges. Whether to prefer many small
serial units or fewer fast parallel ones comes down to a simple rule. Given
enough independent additions, serial units deliver more results per area
when the area ratio (parallel/serial) exceeds the latency ratio (17 here).

## N-operand adder (`moa_addn`, the top)

The default, N = 16, looks like this:

```
 IP0..3  -> U1 --S0,C0--+           level 1: four 4xM sum modules
 IP4..7  -> U2 --S1,C1--+
 IP8..11 -> U3 --S2,C2--+
 IP12..15-> U4 --S3,C3--+
                        |
   S0..S3 ------------> U5 (4xM) --> S4 (low M bits of the result), C4
   {00,C0}..{00,C3} --> U6 (4x4) --> S5 (<= 12), C5 = 0
                                      level 2
   {00,C4}, S5, 0, 0 -> U7 (4x4) --> S6 (<= 15), C6 = 0
                                      level 3
 result = {S6, S4}
```

This arrangement is the part of the design that needs care. Each module's
(M+2)-bit result is split:

* the low M bits are the partial sum S_i;
* the top two bits are the carry C_i.

The total is S0+S1+S2+S3 + 2^M·(C0+C1+C2+C3). U5 adds the partial sums, which
leaves S4 and its own 2-bit carry C4. Every carry now has weight 2^M:

* U6 adds C0..C3, each zero-padded to four bits; S5 is at most 12.
* U7 adds C4 and S5; S6 is at most 15.

S6 is therefore exactly the 4-bit carry of the whole addition. U6 and U7
never carry out of four bits. Two of U7's operands are unused and tied to
zero. A smaller adder would do for U6 and U7; 4x4 modules keep the design
uniform.

**General N.** For N = 4^L the same rule builds L+1 levels of three kinds
of module:

* **sum modules A[i]** (width M): level 1 adds the operands four at a time,
  level i adds the partial sums of level i-1 four at a time. Level L has a
  single module, whose S is the low M bits of the result.
* **carry modules C[i]** (levels 2..L, width `carry_bits(N)`): they add the
  carries of the level i-1 sum modules, four at a time, and the sums of the
  level i-1 carry modules, zero-padded to groups of four.
* **the final module B** (level L+1): adds the carry of the last sum module
  and the sums of the level-L carry modules. Its sum is the top
  `carry_bits(N)` bits of the result.

Every carry enters the carry tree exactly once, all with weight 2^M. The
total carry is at most N-1, so no carry module ever carries out of its
width. For N = 64 this is 16 + 4 + 1 sum modules, 4 + 2 carry modules and B;
B then has three inputs in use. The width of the carry modules is
`carry_bits(N)` with serial modules (4 for N = 16) and is rounded up to a
multiple of 4 with parallel ones, which are built from 4-column slices.
Other operand counts give an elaboration error: they would need a partial
tree, or more than four inputs into B.

**Sequencing.** A small state machine walks through the levels. It has an
IDLE state, a RUN state with a level counter, and a GO state between levels.

* `start` starts level 1 (with `load`, or after it).
* When every module of a level is done, GO spends one clock giving all
  modules of the next level load and start together.
* `done` is B's done while the adder is ready.

A new `start` is accepted in the same clock in which `done` rises, so
additions can run back to back. Assertions check that B never carries out,
that no module is busy while the adder reports ready, and that `start` never
arrives while the adder is busy.

Latency from the start edge to `done`:

* serial modules, N = 16, M = 16: 17 (level 1) + 1 (hand-over) + 17
  (level 2) + 1 (hand-over) + 5 (level 3) = **41 edges**. The start edge of
  a level is the edge that leaves the GO state, so it counts inside its
  level. U6 runs alongside U5 and finishes well before it.
* serial modules, N = 64, M = 16: three sum levels of 17 + 1, then B with
  6-bit modules, 7 edges: **61 edges**.
* serial modules, N = 256, M = 16: four sum levels of 17 + 1, then B with
  8-bit modules, 9 edges: **81 edges**.
* parallel modules: one edge per level plus one per hand-over, 2L+1 edges:
  **5** for N = 16, **7** for N = 64 and **9** for N = 256.

Worked example: sixteen 16-bit operands FFFF, 1900, 0700, 0340, 0100, 1020,
1129, 1010, 2134, 1234, 01A3, 3123, 0908, 0A00, 12DC, 21AD sum to 20357
(hex). The testbenches check this sum and the 41-clock latency.

## Where this RTL departs from, or goes beyond, the source description

* **Second stage of the 4x4 parallel adder.** The original uses further
  counters, a half adder and an OR gate, but its schematic was not
  available. A weighted addition of the four column sums replaces it. The
  result is the same; the gate-level timing is not.
* **4x16 parallel merge network.** The drawing shows half and full adders
  (three per junction) between overlapping partial sums. Its exact wiring
  could not be read. The merge here is the exact HA/FA/HA-chain described
  above.
* **Clocking.** The original block diagram of the serial adder draws clocks
  into the counter and the 3-bit adder. Here those two are combinational and
  only the buffers are clocked. The one-column-per-clock rate stays the same.
* **Carry input.** A 2-bit `carry_in` is loaded into the carry buffer. The
  description says to clear it, which `carry_in = 0` does.
* **Handshake, reset and sequencing** are this design's own. That covers
  load/start/busy/done, synchronous active-low reset and the registered
  hand-over between levels. They were chosen to reproduce the published
  latencies: M+1 clocks for a serial module and 41 clocks for the 16-operand
  adder.
* **The general reconfiguration rule.** The published listing feeds the
  carry adders with the *sums* of the previous level, which looks like a
  slip for the carries (the 16-operand drawing uses the carries). It also
  passes only one carry-module sum to the final module. Here every carry
  and every carry-module sum is collected, so the rule is exact for
  N = 16, 64 and 256. Only those three sizes are supported.
* **Outputs between additions.** The published waveforms show the outputs
  floating (high impedance) until the result is ready. Here `sum_out` holds
  its last value and `done` marks validity.
* **Not built:**
  * the first serial algorithm, which keeps a separate buffer per carry
    column (the column-carry variant is the one built);
  * the neuron examples around the adder: serial multipliers, output
    buffers, sigmoid, ARN resonators and normaliser. They are described too
    loosely to be designed.
  * the accumulation of partial sums for neurons with more inputs than one
    addition takes.

## Files

| file | contents |
|---|---|
| `rtl/moa_pkg.sv` | carry-width and tree-shape functions, state enums |
| `rtl/lut4x3.sv` | 4-bit column counter |
| `rtl/adder3.sv` | 3-bit adder of the serial adder |
| `rtl/serial_add4xm.sv` | serial 4-operand adder |
| `rtl/par_add4x4.sv`, `rtl/par_add4xm.sv` | combinational 4-operand adders |
| `rtl/moa_unit.sv` | clocked 4xM module, serial or parallel |
| `rtl/moa_addn.sv` | N-operand adder (top) |
| `tb/tb_<module>.sv` | one self-checking testbench per module |
| `tb/moa_addn_harness.sv` | drives and checks one N-operand adder of a given shape |
| `tb/tb_moa_addn_full.sv` | the top at default parameters, back-to-back additions |

## Verification

Every testbench prints `TB_RESULT checks=<n> failures=<n>` and has a
watchdog. Expected values are integer sums computed in the testbench itself.

| testbench | what it checks |
|---|---|
| `tb_lut4x3` | exhaustive (16 columns) |
| `tb_adder3` | exhaustive (the 20 reachable input pairs) |
| `tb_par_add4x4` | exhaustive (all 65536 operand sets) |
| `tb_par_add4xm` | worked example A234+FFFF+0A2D+FF7F = 2ABDF, extremes, 20000 random sets |
| `tb_serial_add4xm` | M = 4 and M = 16: sums, every column sum, latency (5 and 17 edges), `carry_in`, separate load/start |
| `tb_moa_unit` | serial and parallel modules side by side, latencies 17 and 1 |
| `tb_moa_addn` | six tops side by side: N = 16, 64 and 256, serial and parallel (latencies 41, 5, 61, 7, 81, 9), plus the worked example |
| `tb_moa_addn_full` | the top at defaults, worked example, back-to-back issue |

`tb_moa_addn` also counts, for each of its six tops, how often each
mechanism occurs and fails if one never does:

* a carry out of a level-1 sum module;
* a carry out of a sum module above level 1;
* the maximum total carry, N-1;
* split load/start;
* back-to-back additions.

Each testbench has also been run against a copy of its module with one
deliberate bug, and each failed.

Simulate with plain Verilator, for example:

```
verilator --binary --timing --assert -Wall -Wno-fatal --top-module tb_moa_addn \
    -y rtl -y tb +libext+.sv rtl/moa_pkg.sv tb/tb_moa_addn.sv
./obj_dir/Vtb_moa_addn
```

Replace `tb_moa_addn` with any other testbench name. Every simulation
finishes in well under a second.

## Changing it

* `N` on `moa_addn` sets the operand count: 16, 64 or 256. The module
  tree, carry widths and result width follow from it.
* `M` sets the operand width of `serial_add4xm`, `moa_unit` and `moa_addn`.
  It must be at least 4, and a multiple of 4 with `PARALLEL = 1`. Result
  widths follow automatically.
* `PARALLEL` on `moa_addn` or `moa_unit` switches every 4xM module between
  serial and parallel.
