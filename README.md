# A spiking neural network computed inside memory arrays

This design runs leaky integrate-and-fire (LIF) neurons and their spike-timing
dependent plasticity (STDP) without a datapath in the usual sense. **Each neuron
is one computational RAM array.** Every column of the array belongs to one
presynaptic connection. The arithmetic for a time step is a long series of
single-bit logic gates. Each gate is evaluated in all columns at once, between
rows of the same array. So a neuron with J inputs works on all J synapses in
parallel, one bit at a time. The arrays never move operands to a processor.
The only data that leaves an array is one spike per time step. A fixed,
multi-stage De Bruijn network delivers those spikes to the other arrays.

The RTL models the arrays at the level of their logic behaviour. That covers
which gates exist, the preset each gate needs, and what a gate does to its
output cell. It does not model the magnetic tunnel junction cells or their
electrical timing. Everything above the cells is synthesizable
SystemVerilog: gate sequencing, arithmetic recipes, neuron and learning
microprograms, spike routing and time-step control.

## 1. The compute-in-memory array (`cram_array`)

An array is `ROWS x COLS` bits. Besides row reads and writes it takes one
*micro-operation* per clock:

* **PRESET** writes a constant to up to 15 consecutive rows.
* **GATE** computes one of NAND, AND, MAJ3, MAJ5, INV, INV1-2 (one input, two
  inverted outputs) or COPY. It reads up to five input rows and writes the
  result into an output row in every enabled column.

The gates behave like spintronic logic. The output cell must be *preset* to a
known value first: 1 for NAND and the inverters, 0 for AND and majority. The
gate can then only switch the cell away from that preset. If the output cell
did not hold the preset, it keeps its old value. COPY is the exception and
always writes its input. `cram_array` models exactly this rule. The array
testbench checks it with gates that deliberately skip the preset.

The only arithmetic primitive is the three-gate full adder:

```
Cout = MAJ3(A, B, Cin)
D, E = INV1-2(Cout)          (two copies of NOT Cout)
S    = MAJ5(A, B, Cin, D, E)
```

Two copies of `NOT Cout` in a 5-input majority give the sum bit without any
XOR gate.

## 2. From gates to numbers (`array_ctrl`)

Numbers are stored *vertically*. An n-bit value in a column takes n
consecutive rows, least significant bit first. The same rows in the other
columns hold the values of the other synapses. `array_ctrl` takes one
multi-bit *macro operation* at a time and expands it into gate
micro-operations.

| macro | recipe | micro-ops |
|---|---|---|
| ADD d = a + b (+1) | ripple of the full adder above, carry in a reserved row | 7 per result bit, +1 |
| MUL | shift-and-add: clear 2n rows, then per multiplier bit one AND and one full adder per bit | 2n + n·(9(n+1) + 1) |
| EQ / EQC | XOR from four NANDs per bit, then an AND chain; EQC compares with a constant | 10 / 5 per bit, +1 |
| GE a ≥ b | carry out of a + ~b + 1 | 5 per bit, +2 |
| AND / OR / NOT / COPY | preset, gate, copy into place per bit (OR = MAJ3 with a constant-1 row); COPY is one gate | 3 / 1 per bit |
| SHR / BCAST | read a row, write it back shifted across columns or replicated from column 0 (the shift is done by the row buffer) | 2 per bit |
| LFSR | x⁹+x⁵+1: bulk preset, XOR(b5,b9) from 4 NANDs, 9 COPYs | 14 |
| SETEN | load the column-enable register from a row | 1 |

A 7-step full adder (two presets, three gates, two copies that move carry and
sum into place) rather than 3 steps is the price of the preset rule. Each
gate's output row has to be prepared first. The LFSR step is 13 gate cycles
plus one shared preset cycle.

The top 13 rows of every array are reserved. They hold constant 0 and 1, the
carry, and scratch rows for the recipes. An assertion in `array_ctrl` fails if
a program names one of them.

**Column enable** is what makes synaptic delays work. A macro flagged
`masked` only writes the columns whose bit is set in the enable register.
The register is loaded from a row of the array itself, a row the program has
just computed.

## 3. What one array holds

`rtl/cram_layout.svh` is the row map. Listed from the bottom:

* the spike history, LF rows (row 0 is the newest);
* the alpha lookup table, LF entries of S bits;
* per-synapse weight, delay and delay counter;
* the neuron's constants: bias, decay 1/τ_v, threshold θ, the rounding
  constant 2^(S−1), and the STDP constants A+, A− and the α-to-F scale;
* state: membrane potential v, previous spike, the two STDP time counters
  and the 9-bit LFSR with its four work rows;
* scratch fields for every intermediate result.

At the default S = 1, LF = 64 the map needs 202 rows, plus the 13 reserved
rows, out of 512. The general count is `LF + LF·S + 29·S + 21 + 4·log2(LF)`.
The tile stops elaboration with an error if the array is too small.

The per-neuron fields are only meaningful in column 0. The per-synapse fields
use every column.

## 4. The LIF time step (`lif_prog`)

This is the densest part of the design. Each numbered step below is a few
macro operations, run in all columns at once.

0. **Delay.** `dly = dly + 1`, then `en = (dly == d)`, then `dly = en ? 0 : dly`.
   `en` is loaded as the column enable. Columns whose synaptic delay has not
   run out skip steps 1–3. They keep the weighted input they computed last
   time, held in a field that later whole-array multiplies cannot overwrite.
1. **Spike in.** The routed input row is written into spike-history row 0.
2. **Filter.** `conv = Σ_s spike(t−s) AND α(s)` over the LF history rows, as
   LF AND/ADD pairs. The sum is kept S + log2 LF bits wide so it cannot
   overflow. It is then rounded to S bits: add 2^(log2 LF − 1) and keep the
   top S bits. The history then shifts up by one row.
3. **Weight.** `p = round_S(conv · w)`. Rounding adds 2^(S−1) to the 2S-bit
   product and keeps the top S bits.
4. **Sum over synapses.** There are log2 J halving stages. Each shifts the
   row across columns by J/2^k (read, shift, write back) and then computes
   `x = round_S(x + shifted)`, the S+1-bit sum with its rounding carry. After
   the last stage column 0 holds the rounded synaptic total. Each stage loses
   one bit of the sum, so the total is an average scaled to S bits, not an
   exact sum.
5. **Current.** `u = x + b + r(t)`, where `r(t)` is the low min(S, 9) bits of
   the LFSR, stepped once here.
6. **Membrane.** The steps are:
   - `m = u + round_S(v · (1/τ_v)) + r(t)`, with the LFSR stepped again;
   - `m = max(m − θ·s_old, 0)`;
   - `s = (m ≥ θ)`;
   - `v = m AND NOT s`.
7. **Spike out.** `s_old = s`, and the spike row is read out to the router.

Sums after step 3 wrap at S bits apart from the clamp in step 6. Step 6 subtracts θ only
after a spike and saturates at zero. The equations both subtract θ·s_old and
reset v. On unsigned S-bit values the subtraction alone would wrap, so the
clamp is this design's choice.

## 5. Learning (`stdp_prog`)

After a routing round the sequencer can run the STDP program:

* **Time since the last spike.** Each column has a counter `dt_pre` that
  counts up, saturates at `t_max = LF − 1` and is cleared by a presynaptic
  spike. The clear is an AND with the inverted spike row. Column 0 keeps the
  same counter, `dt_post`, for the neuron's own spike.
* **F(Δt) from the alpha table.** For every table entry e, one EQC finds the
  columns whose counter equals e. The entry is ANDed with that match and ORed
  into the result. This is a table lookup done as LF column-parallel
  compare-and-select passes. The value is scaled by a constant
  (F = τ_u·α), then multiplied by A+ (pre term) or A− (post term).
* **Update.** The post term is computed once in column 0 and broadcast to all
  columns. The updates are:
  - `w += A+·F(dt_pre)` where the neuron fired (saturating at 2^S−1);
  - `w −= A−·F(dt_post)` where the input fired (saturating at 0).

Saturation uses the carry/borrow bit of an S+1-bit sum as a mask.

The update runs at the weight width S. Using a separate, wider learning
precision for narrow weights is not built. Learning of the delays is not
built either.

## 6. Microprograms and the sequencer (`neuron_seq`, `lif_prog`, `stdp_prog`)

Both programs are combinational lookup tables indexed by a program counter.
Each line is one macro plus loop information. The information is a loop-start
flag, a loop-end flag with an iteration count, and per-iteration steps for
the operand rows. It can also make the iteration number the EQC constant or
the shift distance `J >> (it+1)`. The sequencer `neuron_seq` fetches a line
and adds `iteration × step` to the row operands. It hands the macro to
`array_ctrl` over valid/ready and waits for `m_done`. Loops are one level
deep, which is all the programs need. The filter loop, the history shift,
the reduction stages and the lookup-table scan are all single loops.

`neuron_tile` combines sequencer, controller and array. While idle it gives
the host direct row read/write access to the array. Parameters, tables and
initial state are loaded that way.

## 7. Distributing spikes (`gdbg_router`)

N arrays are linked as a binary De Bruijn graph. Array d listens to
`p0 = d/2` and `p1 = d/2 + N/2`. Every array therefore has two incoming and
two outgoing links. One round takes log2 N stages with the same link pattern
each time, like FFT butterflies. Each array starts with a 1-bit train, its
own spike.

* **Stages 1 … log2 J: concatenation.** Each array places p0's train in the
  low half and p1's train in the high half, doubling the length. After log2 J
  stages every array holds J spikes, those of 2^(log2 J) distinct sources. No
  configuration is involved.
* **Stages log2 J + 1 … log2 N: selection.** Both incoming trains are J bits
  long but only J spikes can be kept. Every array keeps a per-stage, per-slot
  **bit indicator** and a log2 J-bit **address**, and computes
  `out[k] = (ind[k] ? train(p1) : train(p0))[addr[k]]`.
  This mapping decides which J of all possible sources reach the array. This
  is where the network's connectivity is programmed.

The result is each array's J-bit input row for the next step. Configuration
is written through the `cfg_*` ports. A round takes exactly log2 N clocks
(4 at N = 16) whatever the spikes are.

What to check when changing it: the gather form (`addr` names the source
position for slot k) is this design's reading of "reordering addresses". It
stores (1 + log2 J)·J bits per array and stage. That is more than the paper's
stated memory count, which would give one address per stage rather than one
per slot.

## 8. The network time step (`snn_top`)

`snn_top` instantiates N tiles and the router. The `step` input runs one
time step:

1. **Compute.** All tiles run the LIF program in lock step on the rows from
   the previous round. An assertion checks that they finish together.
2. **Route.** Tile spikes, with `ext_spike` substituted wherever `ext_en` is
   set (this is how stimuli enter), go through the router.
3. **Learn.** If `learn_en` is set, all tiles run STDP.

`step_done` pulses at the end with the spikes and the delivered rows on the
outputs. `phase_cycles` gives the step's length. Every phase has a
data-independent length. At the default size an inference step takes 4209
clocks and a step with learning takes 10184. Most of the time goes into the
LF-term filter sum (S + log2 LF-bit adds) and into the LF-entry table scan
of STDP, which is done twice.

## 9. Parameters and sizes

| parameter | default | meaning |
|---|---|---|
| `N` | 16 | neuron arrays (power of two) |
| `J` | 8 | inputs per neuron = array columns (power of two, ≤ N) |
| `S` | 1 | bit length of weights, table entries and neuron state |
| `LF` | 64 | alpha lookup-table entries (filter length) |
| `ROWS` | 512 | array rows |
| `NOISE` | 1 | add LFSR noise to u and v |

S = 1, LF = 64 and 512-row arrays are the main evaluated configuration.
N = 16 with J = 8 is the size of the worked routing example. The evaluated
network of 10⁹ neurons with 1024 inputs each is far beyond anything that can
be elaborated. A single `neuron_tile` with `J = 1024` is a legal instance.

## 10. Where this departs from the original description

* Full adders take 7 micro-op cycles each because presets and result moves
  are explicit. Multi-bit latencies are therefore several times the
  gate-count figures.
* The row map uses scratch fields freely. Some published array sizes are too
  small for the top of their S range in this layout: 256 rows at LF = 32,
  S = 4 and at LF = 64, S = 2; 512 rows at LF = 32, S = 8; 1024 rows at
  LF = 32, S = 16. Those sizes count only constants, parameters and the
  table.
* STDP runs at weight precision S. A separate 10-bit learning precision and
  delay learning are not built.
* The θ comparison is the carry out of `m + ~θ + 1` (an inverter and a
  majority gate per bit), not a NAND-only comparator. Equality tests use XOR
  from four NANDs per bit followed by an AND chain.
* θ subtraction clamps at zero. The LFSR is stepped for each of the two noise
  uses. The reduction rounds after every stage.
* Router buffers are registers outside the arrays. Selection uses one
  indicator and one address per slot and stage.
* The cells themselves (MTJ devices, SHE/STT variants, voltages, energy) are
  not modelled.

## 11. Simulating

Every testbench is self-checking and prints
`TB_RESULT checks=<n> failures=<n>`. With plain Verilator:

```
verilator --binary --timing -Irtl rtl/cram_pkg.sv rtl/*.sv tb/tb_snn_top.sv \
          --top-module tb_snn_top -Mdir obj && obj/Vtb_snn_top
```

| testbench | what it checks |
|---|---|
| `tb_cram_array` | random gates, presets and masks against a shadow model that follows the preset rule; full-adder truth table |
| `tb_array_ctrl` | every macro against integer arithmetic, masked execution, LFSR sequence; 7n+1-cycle add and 14-cycle LFSR latency |
| `tb_neuron_tile` | 40 LIF + STDP steps (S = 4, LF = 8, J = 4) against an integer model of the equations: spike, v, all weights, both counters |
| `tb_gdbg_router` | 16×8 routing with random indicators and addresses against a source-tracking model; log2 N latency; J distinct sources per array |
| `tb_tile_full_size` | one neuron array at its default, full size (J = 1024, S = 1, LF = 64, 512 rows): 60 LIF + STDP steps against the same model, fixed step lengths (4372 cycles LIF, 5975 STDP) |
| `tb_snn_top` | the whole network at default parameters: 48 steps checking all spikes, delivered rows, v, weights and counters. It counts nonzero filter sums, firing, delay-masked columns, θ clamps, LFSR noise, concatenation and both selection choices, external injection, potentiation, depression and learning phases, and fails if any never occurred. It also checks that step lengths are data-independent. |

The neuron model in the testbenches is plain integer arithmetic written from
the equations above. It knows nothing of gates, rows or micro-ops.
