# CSB-RNN accelerator in SystemVerilog

Recurrent networks (LSTM, GRU) spend almost all of their arithmetic on
matrix-vector products with large weight matrices. Those matrices can be
pruned heavily, but unstructured pruning leaves scattered non-zeros that a
parallel engine cannot use efficiently: every weight needs its own index, and
the work per processing element becomes uneven. Coarse structured pruning
(whole rows or columns) is easy for hardware, but removes much less.

The *compressed structured block* (CSB) format sits between the two. The
weight matrix is cut into blocks of `blk_n x blk_m` (32 x 32 by default). In
each block, pruning removes whole rows and whole columns **of that block
only**, so what is left of a block is a small dense kernel: a set of kept
row indices, a set of kept column indices, and the dense values where they
cross. Each block may keep a different number of rows and columns. A dense
kernel maps directly onto a small PE array. Its row and column indices are
reused across the whole kernel, so the index overhead stays small.

This repository is an RTL implementation of an accelerator built around that
format. It has two parts:

* a **CSB-Engine**: a two-level array of processing elements that computes
  `y = W x` for a CSB-pruned `W`. It balances the uneven kernel sizes between
  its PE groups by *workload sharing*;
* a small programmable **RNN dataflow** around the engine: vector buffers,
  sigmoid/tanh units, element-wise multipliers and adders, and load/store
  units. A VLIW program steers it, so one time step of an LSTM runs as a
  short instruction list.

All numbers are 16-bit fixed point.

## The CSB format as the hardware sees it

For a matrix of `CountV*K` block rows by `CountH*L` block columns, each block
`(bi, bj)` carries:

| item | meaning |
|---|---|
| `n`, `m` | number of kept rows and columns of the block |
| `RowIdx` | which of the `blk_n` rows are kept (5-bit indices) |
| `ColIdx` | which of the `blk_m` columns are kept |
| `Val` | the dense `n x m` kernel |

The hardware does not store `Val` as one flat list. Each kernel is cut into
`P x Q` tiles (4 x 4 by default), zero-padded at the edges. The tiles are
stored in the order the PE array consumes them: row-passes outer,
column-passes inner. `RowIdx` and `ColIdx` are stored in the same pass
order: one entry of `P` row indices per row pass, and one entry of `Q` column
indices per column pass. All four memories are read with sequential pointers,
so no address arithmetic is needed at run time.

## CSB-Engine

```
              BufferA (input neurons)
                 |  L words per cycle (preload)
   +-------------+-------------+-------------+-------------+
   | BNB col 0   | BNB col 1   | BNB col 2   | BNB col 3   |   BlockNeuronBuffers
   +------+------+------+------+------+------+------+------+
          |             |             |             |
   PEGroup(0,0) - PEGroup(0,1) - PEGroup(0,2) - PEGroup(0,3)   - horizontal sum -> \
        |             |             |             |                                  |
   PEGroup(1,0) - ...                                           - horizontal sum -> ReorderLogic -> BufferB
        ...                                                                          |
   PEGroup(3,0) - ...                                           - horizontal sum -> /
   (torus: column 0 also reads column 3's buffer; row 3 also feeds row 0)
```

* **PEGroup** (`csb_pegroup`): `P x Q` PEs. Each PEGroup has its own weight
  buffer (tiles, micro-instructions, RowIdx, ColIdx) and a
  `NeuronAccumBuffer` of `blk_n` 32-bit partial sums. In each cycle it does
  one *pass*:
  * it reads one weight tile, one `ColIdx` entry and one `RowIdx` entry;
  * PE `(p,q)` multiplies tile lane `(p,q)` by neuron `ColIdx[q]`;
  * each PE row sums its `Q` products;
  * the sum is added to partial sum `RowIdx[p]`.

  A kernel of `n x m` takes `ceil(n/P) * ceil(m/Q)` cycles.
* **BlockNeuronBuffer** (`block_neuron_buffer`): one per PEGroup column. It
  holds the `blk_m` input neurons of the block column being worked on. It has
  `2K` read ports of `Q` neurons each: one port for every PEGroup in its own
  column, and one for every PEGroup in the column to its right.
* **Block iteration**: the engine handles `K x L` blocks at a time, one per
  PEGroup:
  1. It preloads the `L` BlockNeuronBuffers from BufferA (`blk_m` cycles).
  2. It starts all PEGroups.
  3. It waits until every PEGroup is done (a global barrier).

  After all `CountH` block iterations of a block row, it adds the `L`
  accumulators of each PEGroup row (the horizontal adders). The
  `ReorderLogic` then writes the `K` results of every row `r` to BufferB at
  `b_addr + (i*K + k)*blk_n + r`, rounding the Q16.16 sums to Q8.8 with
  saturation.

### Workload sharing

With kernels of different sizes, the barrier makes every PEGroup wait for
the busiest one. The engine therefore lets a PEGroup give part of its kernel
to a neighbour over two torus-connected paths:

* **horizontal**: PEGroup `(k,l)` computes rows that belong to its *left*
  neighbour `(k,l-1)`. It reads its input neurons from the left column's
  BlockNeuronBuffer (through the second set of read ports). The results land
  in its own accumulator, in the same block row, so the horizontal adders
  combine them correctly.
* **vertical**: PEGroup `(k,l)` computes rows that belong to the PEGroup
  *above*, `(k-1,l)`. The inputs are the same block column's neurons. Its row
  sums go over the vertical accumulation path straight into the
  NeuronAccumBuffer of `(k-1,l)`. That buffer adds all same-cycle
  contributions (its own and the one from below) in one step.

Row 0 wraps to row `K-1`, and column 0 to column `L-1`.

Sharing is encoded in the **micro-instructions**. For every block iteration,
each PEGroup runs exactly three *items* in the order local, horizontal,
vertical. An item is a `sharing` flag plus a `TripCount` (`tn` rows x `tm`
columns). An item with zero size is skipped, at a cost of one header cycle.
The row and column indices of a shared item are those of the block it comes
from. Choosing which rows to move is the compiler's job. The testbenches use
a greedy scheduler: it moves whole `P`-row slices from an over-loaded PEGroup
to its right or lower neighbour while that lowers the iteration's maximum
load.

**Engine timing** (checked cycle-exactly by the engine testbench):
* per command: `K+1` flush cycles;
* per vertical iteration: 1 clear cycle, plus `(blk_n-1)(K+1)+1` output
  cycles;
* per block iteration: `blk_m + 2` preload/start cycles, plus the busiest
  PEGroup's time, plus 2.

A PEGroup's time is `sum over items of (1 + passes)`, with at least 2 cycles
after its last pass.

## The RNN dataflow and its instructions

```
 memory -> LoadUnit -> BufferA -> CSB-Engine -> BufferB -+
                 ^                                       v
                 |   BufferBias -> Sum1 -> Sigmoid/Tanh -> Mult1 -> Sum2 -> {A, C, D, E}
                 |                           ^              ^        ^
                 |               BufferC/D/E-+   BufferC/D/E+   Mult2 (C*E)
                 +-- (h_t written to BufferA for the next step)
 memory <- StoreUnit <- BufferE
```

Vector buffers A–E and Bias each hold 8192 words (`vector_buffer`). Reads are
synchronous, like FPGA block RAM.

The **element-wise chain** (`ew_dataflow`) handles one element per cycle,
with 4 cycles of latency:

```
s1  = B[b+e] + Bias[bias+e]                              (Sum1)
a   = act_src  ? one of s1, C, D, E at act_addr+e
y   = sigmoid(a) | tanh(a) | a                           (Sigmoid / Tanh / pass)
m1  = mult1_en ? y * (C | D | E)[m1_addr+e] : y          (Mult1)
m2  = mult2_en ? C[m2c+e] * E[m2e+e] : 0                 (Mult2)
out = sum2_en  ? m1 + m2 : m1                            (Sum2)
write out to every buffer of the destination mask {A,C,D,E} at dst_addr+e
```

The `act_src` and `m1_src` selects, and the destination mask, make up the
programmable datapath. They let the same units compute LSTM gates, the cell
update and the hidden output.

A **macro-instruction** (`csb_pkg::macro_inst_t`) is a VLIW word with one
section per unit:

* LoadUnit: memory address, stride, count, BufferA address;
* CSB-Engine: BufferA address, `blk_m`, `blk_n`, `CountH`, `CountV`, BufferB
  address, and a `rewind` bit;
* element-wise chain: the fields above;
* StoreUnit: BufferE address, count, memory address, stride.

Several weight matrices can stay resident in the PEGroups: the host stores
their tiles and micro-instructions one after the other. A CSB command with
`rewind` set restarts every PEGroup's pointers at zero. A command without it
continues where the previous command stopped. A program therefore rewinds on
its first matrix product and continues on the following ones (later layers,
or the second product of a GRU step).

`macro_ctrl` starts, in the same cycle, every unit whose section has a
non-zero count. It moves to the next instruction only when all of them are
idle. It runs `n_inst` instructions and repeats the list `n_steps` times, once
per time step. Load and store addresses advance by their stride each step.

### One LSTM time step

With the gate rows of `W = [W_x | W_h]` ordered `i, f, o, g`, and with
`x_t` in `A[0..X)` and `h_{t-1}` in `A[X..X+H)`:

| instr | unit(s) | effect |
|---|---|---|
| I0 | CSB-Engine | `B[0..4H) = W * A[0..X+H)` |
| I1 | chain | `C[0..3H) = sigmoid(B + bias)` — gates i, f, o |
| I2 | chain | `D[0..H) = tanh(B[3H..] + bias[3H..])` — candidate g |
| I3 | chain | `E[c] = D * C[i] + C[f] * E[c]` — cell state (pass-through, Mult1, Mult2, Sum2) |
| I4 | chain | `A[X..], E[X..] = tanh(E[c]) * C[o]` — `h_t`, written back for the next step |
| I5 | Store ‖ Load | `h_t` to memory, and `x_{t+1}` from memory into `A[0..X)`, at the same time |

A three-instruction prologue clears `h` and `c` and loads `x_0`:
1. load zeros into A;
2. run the CSB-Engine, giving `B = 0`;
3. `E[c] = B + 0`, while the LoadUnit fetches `x_0`.

### One GRU time step

The GRU cell computes:
* `z = sigma(Wz[h;x] + bz)` and `r = sigma(Wr[h;x] + br)`;
* `h~ = tanh(Wg[x; r*h])`;
* `h = (1-z)*h + z*h~`.

It needs two matrix products per step, and a `1-z` that the chain has no
subtracter for. The sigmoid unit is exactly symmetric, `sigma(-s) = 1 -
sigma(s)`, so the compiler appends a copy of the z rows with negated weights
and bias, and one sigmoid pass yields `z`, `r` and `1-z` together. BufferA
holds `[h ; x ; r*h]`, so that both `[h;x]` and `[x;r*h]` are contiguous:

| instr | unit(s) | effect |
|---|---|---|
| I0 | CSB-Engine, rewind | `B[0..3H) = [Wz; Wr; -Wz] * A[0..H+X)` |
| I1 | chain | `C[0..3H) = sigmoid(B + bias)` — z, r, 1-z |
| I2 | chain | `A[H+X..) = C[r] * E[h]` |
| I3 | CSB-Engine, continue | `B[3H..4H) = Wg * A[H..H+X+H)` |
| I4 | chain | `A[0..H), E[0..H) = tanh(B[3H..]) * C[z] + C[1-z] * E[h]` |
| I5 | Store ‖ Load | `h_t` out, `x_{t+1}` into `A[H..H+X)` |

### Stacked layers

Every layer's matrix stays resident. BufferA holds `[x ; h1 ; h2]`, so layer 1
reads `[x;h1]` at `A[0..)` and layer 2 reads `[h1;h2]` at `A[X..)`. Layer 1's
`h1_t` is written exactly where layer 2 reads its input, so no copy is needed.
One step is the five LSTM instructions I0–I4 for layer 1 (CSB rewinding),
then the same five for layer 2 (CSB continuing, its own bias region and cell
state in BufferE), then the store/load instruction. Layer 2 reuses BufferB,
C and D. `tb_lstm2_workload` runs this with two layers.

An LSTM with a projection layer (LSTMP) adds one more CSB command for the
projection. A pass-through chain instruction then copies its result from
BufferB to BufferA. It is not simulated here.

## Number format

* Q8.8 signed for all vectors and weights.
* Products are Q16.16, accumulated in 32 bits in the engine.
* Every element-wise result is rounded toward minus infinity (arithmetic
  shift) and saturated to 16 bits.

Sigmoid uses the piecewise-linear PLAN approximation:
* `|x| >= 5` gives 1;
* `|x| >= 2.375` gives `|x|/32 + 0.84375`;
* `|x| >= 1` gives `|x|/8 + 0.625`;
* otherwise `|x|/4 + 0.5`;
* negative inputs use `sigma(-x) = 1 - sigma(x)`.

Tanh is `2*sigma(2x) - 1` on the same unit. The error stays under 0.02 for
sigmoid and under 0.05 for tanh.

## Interface of the top (`csb_rnn_top`)

* **Configuration bus**: `cfg_we`, `cfg_target`, `cfg_grp`, `cfg_addr`,
  `cfg_wdata`, `cfg_inst`. The host writes four things over it:
  * for each PEGroup `cfg_grp = k*L + l`: weight tiles, micro-instruction
    items, RowIdx entries and ColIdx entries;
  * macro-instructions;
  * bias words.

  Everything is loaded before a run.
* **Run control**: pulse `start` with `n_inst` and `n_steps`; `busy` stays
  high until `done` pulses.
* **External memory**:
  * read channel: `mem_rd_req/addr`, accepted by `mem_rd_gnt`; data returns
    in order on `mem_rd_rvalid/rdata`, with any latency;
  * write channel: `mem_wr_req/addr/data`, accepted by `mem_wr_gnt`.

  Both channels may stall for any number of cycles.
* **Reset**: `rst_n`, asynchronous, active low. It resets control state only;
  buffer contents are not reset.

Default parameters: `P = Q = K = L = 4` (256 PEs), blocks up to 32 x 32.
Per PEGroup, the memories hold 8192 weight tiles, 4096 micro-instruction
items and 8192 RowIdx/ColIdx entries. The macro program holds 64
instructions.

## Departures from the source design, and limits

* **Engine configuration.** The evaluated engine has 4 x 4 PEGroups of 4 x 4
  PEs. One summary table of the original work lists 512 PEs for it; this RTL
  follows the 4x4x4x4 configuration (256 PEs).
* **Scheduling.** The original compiler finds the sharing schedule with an
  SMT solver. Here the testbench uses a greedy row-slice scheduler. The
  hardware runs any valid schedule.
* **Element count.** Each unit of the original VLIW format has its own
  element count. Here the whole element-wise chain shares one count.
* **Preload overlap.** The BlockNeuronBuffer preload is not overlapped with
  computation (no double buffering). This costs `blk_m + 2` cycles per block
  iteration.
* **Recurrent path.** In the source block diagram, the recurrent path runs
  from BufferD/E straight back into the engine. Here the chain writes `h_t`
  into BufferA, where the engine reads the whole `[x ; h]` vector, so each
  step needs one matrix product over the concatenated vector.
* **Cell types.**
  * GRU is mapped with the duplicated, negated z rows described above; this
    costs `H` extra weight rows.
  * Li-GRU needs ReLU, which is not built.
* **Weight capacity.** The weight memories hold 2.1 M weight slots (tiles are
  zero-padded). Large models, such as two 1500-unit LSTM layers, do not fit
  at once.
* **External parts.** The external memory, the host and the instruction
  compiler are outside the design. The testbenches contain behavioural
  stand-ins for them.

## Simulation

Every block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M`.

| testbench | checks |
|---|---|
| `tb_csb_pe`, `tb_act_sigmoid`, `tb_act_tanh` | arithmetic against reference formulas (exact, or within the stated error) |
| `tb_vector_buffer`, `tb_block_neuron_buffer`, `tb_neuron_accum_buffer`, `tb_csb_weight_buffer` | storage, ports, write priority, one-shot accumulation |
| `tb_csb_pegroup`, `tb_reorder_logic` | PEGroup passes and sharing items; output ordering |
| `tb_csb_engine` | five random CSB matrices, with and without sharing, against a reference MVM; cycle-exact timing; sharing never slower |
| `tb_ew_dataflow`, `tb_load_unit`, `tb_store_unit`, `tb_macro_ctrl` | element-wise formulas, memory stalls, VLIW sequencing |
| `tb_csb_rnn_top` | a 128-input, 128-hidden LSTM layer over 5 steps, at default parameters |
| `tb_gru_workload` | a 128-input, 128-hidden GRU layer over 4 steps, with two resident matrices, at default parameters |
| `tb_lstm2_workload` | a two-layer stacked LSTM (64 inputs, 64 hidden per layer) over 4 steps: layer 1's `h_t` feeds layer 2 through BufferA, both matrices resident, at default parameters |

`tb_csb_rnn_top` compares every `h_t` bit-exactly with a model in the
testbench. It also counts each mechanism and fails if one never happens:
* horizontal and vertical sharing;
* memory read and write stalls;
* multi-unit instructions and unit overlap;
* recurrent write-back to BufferA;
* every activation mode;
* Mult2/Sum2.

The shared testbench helpers (`csb_tb_pkg`) hold the matrix generator, the
CSB compiler with the greedy sharing scheduler, and the reference MVM.

With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb --top-module tb_csb_rnn_top \
    rtl/csb_pkg.sv $(ls rtl/*.sv | grep -v csb_pkg) tb/csb_tb_pkg.sv tb/tb_csb_rnn_top.sv
./obj_dir/Vtb_csb_rnn_top
```

Any other testbench builds the same way. Only `tb_csb_engine`,
`tb_csb_pegroup`, `tb_csb_rnn_top`, `tb_gru_workload` and `tb_lstm2_workload` need
`tb/csb_tb_pkg.sv`. The full-size
LSTM run takes about ten seconds.

## File map

| file | block |
|---|---|
| `csb_pkg.sv` | types, constants, instruction formats, fixed-point helpers |
| `csb_pe.sv` | PE: registered 16x16 multiply |
| `csb_weight_buffer.sv` | per-PEGroup tile / item / RowIdx / ColIdx memories |
| `neuron_accum_buffer.sv` | per-PEGroup partial sums, local plus vertical input |
| `block_neuron_buffer.sv` | per-column input neurons, `2K` read ports |
| `csb_pegroup.sv` | PE array, adder rows, micro-instruction sequencer |
| `reorder_logic.sv` | serialises block-row results into BufferB order |
| `csb_engine.sv` | `K x L` PEGroups, torus sharing, preload, barrier |
| `vector_buffer.sv` | BufferA–E, BufferBias |
| `act_sigmoid.sv`, `act_tanh.sv` | activations |
| `ew_dataflow.sv` | Sum1 → activation → Mult1 / Mult2 → Sum2 chain |
| `load_unit.sv`, `store_unit.sv` | memory ↔ buffer transfers |
| `macro_ctrl.sv` | VLIW program sequencer |
| `csb_rnn_top.sv` | the whole accelerator |
