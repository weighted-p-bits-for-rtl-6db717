# Weighted p-bits: invertible probabilistic circuits in synthesizable SystemVerilog

A *p-bit* is a binary random variable with a tunable bias: its state `m` is 1 with
probability `(1 + tanh(I))/2`, where `I` is its input. Couple many p-bits so that each one's
input is a weighted sum of the others' states,

    I_i = I0 * ( h_i + sum_j J_ij m_j )

update them one at a time, and the network wanders through its states with the Boltzmann
probabilities `P(m) ~ exp(-E(m))` of the energy defined by the symmetric matrix `J` and the bias
vector `h` (a Boltzmann machine sampled by Gibbs updates). If `J` and `h` are chosen so that the
lowest-energy states are exactly the rows of a truth table, the network *is* that logic gate,
and it works in every direction: pin the inputs and the output settles to the result; pin the
output and the inputs fluctuate among every combination that produces it. An AND gate pinned to
output 0 lists the factors of 0; an adder pinned at its sum subtracts; a three-operand adder
with pinned sum and constrained operands searches for a subset sum.

This RTL builds such circuits from a single digital building block, the **weighted p-bit**: a
p-bit that stores its own row of `J` and its own bias, so that the multiply-accumulate and the
random decision happen in one local unit. The weighted p-bits are grouped in **tiles** that are
updated serially by a sequencer, tiles are joined by **directed** links into larger circuits (an
N-bit ripple-carry adder, a Subset Sum solver), and the result is wrapped as a memory-mapped
AXI4-Lite peripheral.

The architecture, number formats, multiplexer truth table, LFSR taps, sequencing and the
example problems follow the published description of an FPGA implementation of weighted p-bits.
Where that description is silent, choices were made; they are listed in
[Departures and choices](#departures-and-choices).

## Number formats

| quantity | format | width | range |
|---|---|---|---|
| weights `J_ij`, biases `h_i`, coupling `hC` | s[4][2] | 7 | -16.00 .. 15.75, step 0.25 |
| weighted sum | signed, 2 fraction bits | 12 | -512 .. 511.75 |
| activation (tanh table) input | s[3][2] | 6 | -8.00 .. 7.75 |
| activation output `z = (tanh+1)/2` | unsigned fraction of 2^32 | 32 | 0 .. 1 |
| random word | LFSR state, read as unsigned fraction | 32 | 0 .. 1 |

`s[x][2]` means sign, `x` integer bits, 2 fraction bits. All of these live in `pbit_pkg`. A 12-bit
sum cannot overflow: a p-bit has at most 15 neighbours plus bias plus the coupling term, 17
weights of magnitude at most 16.

## The weighted p-bit

```
            +-------------------- weight_matrix --------------------+   +---- tunable_rng ----+
 m_j ---+   |                                                       |   |                     |
 J_ij --AND-+--> adder tree (12 b) --+--> > 7.75 ? --+               |   |  tanh_lut  z (32 b) |
 h    ------+                        +--> < -8.00 ? --+--> 16-way MUX -+-->| i_q -> LUT ----+    |
 mC AND hC -+                        +---- sum ------>|  sel={S,C,>,<} |   |                 > --> m
                                                      S, C ---------->|   |  lfsr32  r (32 b) +   |
            +-------------------------------------------------------+   +---------------------+
```

**Weighted sum.** States are binary (0/1), so each product `J_ij m_j` is a gate that passes
`J_ij` or 0, and the sum is an adder tree over the neighbours, the bias and the coupling input
`mC` weighted by `hC`.

**Thresholding and pinning.** The sum is compared with the two ends of the activation table and
a 16-input multiplexer chooses what the table sees. Its select word is
`{S, C, sum > 7.75, sum < -8.00}` (bits 3..0):

| S (Select) | C (Clamp) | sum > max | sum < min | table input |
|---|---|---|---|---|
| 0 | x | 0 | 0 | sum |
| 0 | x | 0 | 1 | -8.00 |
| 0 | x | 1 | 0 | 7.75 |
| 1 | 0 | x | x | -8.00 |
| 1 | 1 | x | x | 7.75 |

`S = 1` pins the p-bit: the table input is forced to an end, where `z` is within 1e-7 of 0 or 1,
so the p-bit reads `C`. This one mechanism provides overflow protection, pinning inputs or
outputs of a gate, and joining tiles.

**Random decision.** The clamped input addresses a 64-entry table holding
`z = round((tanh(I)+1)/2 * 2^32)` (saturated at `2^32 - 1`), and a 32-bit comparator sets
`m = (z > r)` where `r` is the state of a 32-bit LFSR (XNOR feedback from stages 32, 22, 2, 1
into stage 1, period `2^32 - 1`). So `P(m = 1) = z`. Every p-bit has its own LFSR with its own
seed (`pbit_pkg::pbit_seed`); p-bits sharing a seed would be strongly correlated.

**Timing.** An update takes two enabled cycles: the first registers the clamped sum (`i_q`), the
second loads the comparator result into `m`. The LFSR runs every clock.

## Serial updating inside a tile

A reciprocal network only samples the Boltzmann distribution if no two coupled p-bits change at
once. Each tile therefore has a `sequencer`: a ring of `3N` flip-flops carrying a single 1, with
enable `i` the OR of stages `3i` and `3i+1`:

```
clk      : 0 1 2 3 4 5 6 7 8 | 9 ...
en[0]    : 1 1 0 . . . . . . | 1
en[1]    : . . . 1 1 0 . . . |
en[2]    : . . . . . . 1 1 0 |          (N = 3, one complete update = 9 cycles)
sweep    : . . . . . . . . 1 |
```

Each p-bit gets two cycles, followed by a one-cycle gap, in the fixed order 0, 1, ..., N-1. One
complete update of a tile takes `3N` cycles: 9 for an AND gate, 15 for the 5 p-bit full adder,
48 for a full 4 x 4 tile. `sweep` marks the last cycle of each complete update; sampling the
states there gives one sample per update.

`system_tile` holds `N` weighted p-bits (16 by default, a 4 x 4 array) each wired to the other
`N-1`, the sequencer, and registers for the per-p-bit Select and Clamp inputs (one cycle of
delay). `J`, `H` and `HC` are parameters: a problem is mapped onto the tile when the design is
built, and any symmetric `J` with zero diagonal up to 16 x 16 can be used.

## Mapping a problem

Problems are usually written for bipolar states `s = 2m - 1` in {-1, +1}. Substituting gives the
binary-state weights the hardware uses:

    J_bin = 2 * J_bip          h_bin = h_bip - J_bip * 1

and the inverse pseudo-temperature `I0` is folded into the stored values (there is no separate
multiplier). `pbit_pkg::bin_j` and `bin_h` do both, with `I0` given in quarters (`I0_Q = 4`
means `I0 = 1`). Larger `I0` sharpens the distribution towards the ground states but slows the
escape from local minima.

Two problems come with the package (bipolar, order as listed):

```
AND   (A, B, C)                    Full adder (Cin, B, A, S, Cout), h = 0
J = [ 0 -1  2 ]   h = [ 1 1 -2 ]    J = [  0 -1 -1  1  2 ]
    [-1  0  2 ]                         [ -1  0 -1  1  2 ]
    [ 2  2  0 ]                         [ -1 -1  0  1  2 ]
                                        [  1  1  1  0 -2 ]
                                        [  2  2  2 -2  0 ]
```

The full adder's eight truth-table rows are its eight lowest-energy states; at `I0 = 1` they
hold about 81 % of the probability, each row about 10 %. `full_adder` is a 5 p-bit tile with
these weights.

## Joining tiles: directed links and the serial-parallel scheme

Tiles can also be coupled so that information flows one way. A p-bit of one tile is pinned
(`Select = 1`) to the *current* state of a p-bit of another tile (`Clamp = that state`). The
driven p-bit copies its source, but the source feels nothing back. (A soft, two-way coupling of
adjustable strength is available through each p-bit's `mC` input and `hC` weight; a very large
`hC` is the same as pinning.)

Directed links let tiles run **in parallel**, each with its own sequencer: only p-bits inside a
tile need serial updating. A complete update of a circuit of many tiles then takes as long as
one tile's, not the sum of all.

**`rca`, the N-bit ripple-carry adder** (N = 32 by default) is N `full_adder` tiles. The Cin
p-bit of bit `i` is pinned to the Cout p-bit of bit `i-1`; the first Cin is pinned to 0. Carries
go only from LSB to MSB. Every A, B and S bit, the first carry-in and the last carry-out can be
pinned from outside:

* pin A and B: the per-bit majority of S over a few thousand updates is `A + B`;
* pin S and A: B settles to `S - A` (a subtractor, even though the chain is one-way);
* pin nothing: S, A and B become correlated so that `S = A + B` holds exactly in a sizeable
  fraction of samples (15 % at 32 bits with `I0 = 1.75`, in simulation).

Note that Boltzmann statistics no longer apply to a directed circuit as a whole.

## The Subset Sum solver

`ssp_solver` computes `S = A + B + C` for 15-bit operands and a 17-bit sum with two rows of full
adders (31 tiles, 155 p-bits):

```
  A[14:0], B[14:0] -> upper rca (15 bits)  :  P = A + B      (P's top bit is its carry-out)
                          ^ S p-bits pinned to ...
  P[15:0], C[15:0] -> lower rca (16 bits)  :  S = P + C      (S[16] is its carry-out)
                          ... the lower row's A p-bits (which float)
```

The link between the rows points from the sum towards the inputs. The lower row is given the
pinned target S and the constrained C and proposes a partial sum P; the upper row is driven in
reverse by that P and proposes A and B. To pose an instance, pin S to the target and pin every
operand bit that no member of its set uses to 0, so that each operand can only take values from
its set. The demonstration instance is `A in {0, 512}`, `B in {0, 1024}`, `C in {0, 2048}`,
target 3584. Sampled over 100 000 complete updates, `A + B + C` comes out as:

| A+B+C | 0 | 512 | 1024 | 1536 | 2048 | 2560 | 3072 | 3584 |
|---|---|---|---|---|---|---|---|---|
| fraction | 0.028 | 0.092 | 0.132 | 0.218 | 0.031 | 0.103 | 0.153 | **0.243** |

The target is the most frequent value and the wrong sum 1536 comes next, as published for the
FPGA. Since the lower row does not know the upper row's constraints, some of its proposals cannot
be met, which is why the other sums keep appearing. A larger `I0` would sharpen the peaks but
makes the circuit stick in metastable states for longer.

## Bus interface (`pcircuit_top`)

`pcircuit_top` is the top level: the Subset Sum solver behind an AXI4-Lite slave (8-bit byte
address, 32-bit data, byte strobes, OKAY responses). A host programs the pins, then repeatedly
takes a snapshot and reads it.

| addr | name | access | content |
|---|---|---|---|
| 0x00 / 0x04 | A_SEL / A_CLAMP | RW | bits [14:0]: pin enable / pinned value of A |
| 0x08 / 0x0C | B_SEL / B_CLAMP | RW | same for B |
| 0x10 / 0x14 | C_SEL / C_CLAMP | RW | same for C |
| 0x18 / 0x1C | S_SEL / S_CLAMP | RW | bits [16:0]: same for the sum |
| 0x20 | SNAP | W / R | write: capture A, B, C, S at once; read: number of snapshots |
| 0x24 .. 0x30 | A_SMP, B_SMP, C_SMP, S_SMP | R | the last snapshot |
| 0x34 | SWEEPS | R | complete updates since reset (one per 15 clocks) |

A write is accepted in the cycle where both AWVALID and WVALID are high and no response is
pending, with the response one cycle later; a read returns data one cycle after it is accepted.
Unmapped reads return 0, writes to read-only or unmapped addresses are ignored. Reset leaves
every p-bit floating. Assertions in the module check that a response, once offered, is held
until taken.

## Files

| file | contents |
|---|---|
| `rtl/pbit_pkg.sv` | formats, types, AND and full-adder matrices, `bin_j`, `bin_h`, `pbit_seed` |
| `rtl/lfsr32.sv` | 32-bit XNOR LFSR |
| `rtl/tanh_lut.sv` | 64-entry activation table |
| `rtl/tunable_rng.sv` | table + LFSR + comparator + state register |
| `rtl/threshold_mux.sv` | overflow clamp and Select / Clamp multiplexer |
| `rtl/weight_matrix.sv` | weighted sum + `threshold_mux` |
| `rtl/wpbit.sv` | weighted p-bit |
| `rtl/sequencer.sv` | serial update enables |
| `rtl/system_tile.sv` | tile of N weighted p-bits |
| `rtl/full_adder.sv` | 5 p-bit invertible full adder |
| `rtl/rca.sv` | N-bit invertible ripple-carry adder |
| `rtl/ssp_solver.sv` | three-operand adder / Subset Sum solver |
| `rtl/pcircuit_top.sv` | AXI4-Lite wrapper, top level |
| `tb/tb_<module>.sv` | a self-checking testbench per module |

Hierarchy: `pcircuit_top > ssp_solver > rca (x2) > full_adder > system_tile > {sequencer,
wpbit > {weight_matrix > threshold_mux, tunable_rng > {tanh_lut, lfsr32}}}`.

## Simulating

Each testbench prints `TB_RESULT checks=<n> failures=<n>` and stops itself; a watchdog ends it
with a failure if it hangs. With Verilator 5, from the directory holding `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Irtl -Wno-fatal --top-module tb_pcircuit_top \
    rtl/pbit_pkg.sv tb/tb_pcircuit_top.sv -y rtl -o sim
./obj_dir/sim
```

Replace `pcircuit_top` with any other module name. All testbenches finish within seconds.

| testbench | what it establishes |
|---|---|
| `tb_lfsr32` | bit-exact sequence against a model for 5000 steps, hold, no lock-up, balanced output |
| `tb_tanh_lut` | all 64 entries against `(tanh+1)/2` computed in real arithmetic, monotonic |
| `tb_threshold_mux` | exhaustive: every 12-bit sum with every S, C |
| `tb_weight_matrix` | 20 000 random weight rows against integer sums, both overflow directions |
| `tb_tunable_rng` | `P(m=1)` within 0.015 of `(tanh(I)+1)/2` at 7 inputs; hold; timing |
| `tb_wpbit` | two-cycle update, pinning, overflow, `mC`, sigmoid points |
| `tb_sequencer` | enable pattern cycle by cycle for N = 16 and N = 3 |
| `tb_system_tile` | AND gate: 8 state probabilities within 0.02 of Boltzmann; forward (C = 1 in 98 %); inverse (A,B even over 00/01/10); 4 x 4 tile: serial-update rule, `mC` |
| `tb_full_adder` | 32 state probabilities against Boltzmann; forward and inverse for every case; 15-cycle update |
| `tb_rca` | 32-bit adder and subtractor (per-bit majority), floating correlation |
| `tb_ssp_solver` | the 3584 instance: sets respected, all 8 sums visited, 3584 first and 1536 second |
| `tb_pcircuit_top` | the whole design at its default size over the bus: register access, the 3584 instance from 20 000 snapshots, 15-cycle update rate, and counts of pinning, inter-tile carries and overflow clamps |

The statistical checks compare against values computed inside the testbench (Boltzmann
probabilities from `J` and `h`, `tanh` in real arithmetic), not against recorded outputs. Since
every random source is a seeded LFSR, each run is reproducible.

## Departures and choices

Follows the published design:
the weighted p-bit structure, the s[x][2] formats, the 12-bit sum, the 6-bit table input, the
32-bit table output and comparator, the LFSR taps and XNOR feedback, the multiplexer numbering
and truth table, two cycles per update with a one-cycle gap, the 4 x 4 tile, the AND and 5 p-bit
full-adder couplings and the binary transform, Select / Clamp as the directed link between tiles,
the serial-parallel adder, the 15-bit / 17-bit Subset Sum instance with `I0 = 1`, and AXI
memory mapping.

Choices made here, where the description gives no detail:

* **Comparator polarity.** The block diagram draws the LFSR on the comparator's `+` input, which
  taken literally gives a falling sigmoid; the state is set when the table value exceeds the
  random word, which gives the rising sigmoid described and measured.
* **Table output.** The 32-bit `z` is read as an unsigned fraction (the sign bit of the described
  s[0][31] format is never needed, since `z >= 0`).
* **Pipeline.** How the two update cycles are used is not described; here one registers the
  clamped sum and the other loads the state. The LFSR runs every clock.
* **I0** is folded into the stored weights. The full adder has zero bipolar bias (implied by its
  complementary truth table, not stated).
* **Weights are build-time parameters**, as they were computed offline; there is no write port
  for them.
* **The adder uses 5 p-bit full adders.** The published 32-bit adder uses a 14 p-bit full adder
  (434 p-bits) whose couplings are not available; this one has 160 p-bits. Its `I0` is not stated
  either; its testbench uses 1.75.
* **Subset Sum wiring.** The lower row's A p-bits carry the partial sum and drive the upper
  row's sum p-bits; which terminal carries it is a choice. Operand sets follow the published
  figure caption ({0,512}, {0,1024}, {0,2048}); the running text lists {0,512} for all three,
  which cannot reach the target 3584.
* **Register map, snapshot and counters** of the AXI wrapper are this design's own.
* Resets (synchronous, active low), seeds and the sequencer's start state are choices.

Not included: the processor, UART and host of the original FPGA system (vendor IP), the 14
p-bit full adder, randomized update order, annealing (changing `I0` at run time) and run-time
writable weights (mentioned as possible but not used).
