# Zero-state-skipping LSTM accelerator

An LSTM layer spends most of its time on two matrix-vector products per step:
`W_x x_t` and `W_h h_(t-1)`. If the network is trained so that most entries of
the hidden state are pruned to exactly zero, most of `W_h h_(t-1)` never needs
computing. Each zero entry of `h_(t-1)` removes a whole row of the four gate
weight matrices.

This accelerator exploits that on an edge device whose off-chip bandwidth is
the limit. Each step it writes the hidden state in a compressed form:
- only the hidden units that are non-zero in some sequence of the batch are
  stored;
- each stored unit carries an *offset*, the number of zero units skipped
  before it.

On the next step the offsets give the address of the next weight row to
fetch. The rows of pruned units are therefore never read, and no clock is
spent on them. No decoder is needed.

The RTL is SystemVerilog (IEEE 1800-2017), synthesizable, and has no
parameters at the top. It computes one LSTM time step per `start`:

```
[f i o g] = [sig sig sig tanh](W_x x_t + W_h h_(t-1) + b)
c_t = f*c_(t-1) + i*g
h_t = prune(o*tanh(c_t)),   prune(v) = 0 if |v| < T else v
```

## Structure

| Part | Module | What it is |
|---|---|---|
| four tiles, 48 PEs each | `tile` | Tile 0..3 computes gate f, i, o, g. Each PE lane is followed by a sigmoid unit, or a tanh unit in tile 3. |
| processing element | `pe` | 8x8-bit multiplier and a 12-bit saturating adder. The adder's second operand is the PE's scratch memory word, zero, or a value routed from another tile. |
| scratch memory | `scratch_mem` | 16 words of 12 bits per PE, one partial sum per sequence of the batch (batch size up to 16). |
| activation | `act_unit` | Piecewise-linear sigmoid. tanh is computed as `2*sig(2x)-1`. |
| local router | `local_router` | Selects each lane's multiplier operands. |
| weight/input registers | `wi_regs` | The weights of the current input column, an 8-stage pipeline that carries input elements from PE group to PE group, and the 48 values of `c_(t-1)`. |
| global router | `global_router` | Feeds the tiles from the registers during the matrix product. In the element-wise phase it routes activations, `c_(t-1)` and PE outputs between tiles. |
| encoder | `encoder` | Counts hidden units that are zero in every sequence. For each kept unit it outputs the offset and the position in the compressed vector. |
| controller | `controller` | Sequences a whole time step. |
| top | `lstm_accel` | Wires the above together and brings out three memory channels. |

`lstm_pkg` holds the sizes, the number formats, the command structs and the
configuration record.

## Sharing one weight fetch across the batch

The off-chip memory delivers 24 8-bit weights and one 8-bit input element per
clock. That is enough weights for only 24 of the 192 PEs. The array is
therefore split into 8 *groups* of 24 PEs (group `g` is half `g%2` of tile
`g/2`).

For one input column (one row of the stacked weight matrix) the controller
spends a *period* of `P = max(B, 8)` clocks, where `B` is the batch size:

- In clock `k < 8` of the period it fetches the 24-weight word of group `k`
  into that group's weight register.
- In clock `k < B` it fetches the input element of sequence `k` into stage 0
  of the input pipeline.
- The element moves one stage (one group) per clock. Sequence `b` reaches
  group `g` in clock `b + g`. Group `g`'s weights arrive in clock `g`, which is
  exactly when sequence 0 reaches it. The weights then stay in place while
  sequences 1..B-1 pass.
- Every PE multiplies and accumulates into scratch entry `b` of the sequence
  passing it. The first column of a block starts the sum at zero.

With `B >= 8` all 192 PEs are busy every clock. That is 76.8 Gops at 200 MHz.
With `B = 1` only one group in eight works at a time.

A column can only be skipped if it is zero in **every** sequence of the batch,
because all sequences share the weights. Larger batches therefore see less
sparsity.

## Encoded vectors and memory layout

The design has three memory channels. Each read returns data in the clock after
the request.

| Channel | Word | Holds |
|---|---|---|
| wide | 24 x 8 bit | weights; `c` state |
| value | 8 bit | elements of `x_t` and `h` |
| index | 16 bit | offsets |

Word addresses, with `ROWS = 1 + dx + dh`:

```
weights  w_base + (blk*ROWS + row)*8 + grp   row 0 = bias, 1..dx = W_x, 1+dx.. = W_h
c state  c_base + (blk*16 + b)*2 + half      48 values of block blk, sequence b
values   base + n*16 + b                     entry n of an encoded vector, sequence b
offsets  base + n                            zero columns skipped before entry n
```

Hidden units are processed in *blocks* of 48. Unit `j` of block `blk` is hidden
unit `48*blk + j`. Word `grp` of a weight row holds the 24 weights of PE group
`grp`, for gate `grp/2` and units `24*(grp%2)`..`+23` of the block.

Both `x_t` and `h_(t-1)` are read in the encoded form:
- `nx` and `nh` entries;
- the column index of entry `n` is the previous column, plus one, plus
  `offset[n]`.

A one-hot input, as in a character model, therefore costs one column per
distinct symbol in the batch. The host writes the encoded `x_t`. The
accelerator writes the encoded `h_t` and returns its length in `h_count`. The
host passes `h_count` back as `nh` of the next step, swapping `h_idx_rd`/`h_val_rd`
with `h_idx_wr`/`h_val_wr`. Offsets are relative, so the weight-row address is
a running sum. The controller reads the next offset one column ahead, so
following it costs no clock.

## One time step, block by block

For each block of 48 hidden units the controller runs three phases.

**MAC.** The bias row, multiplied by a constant 1.0, then each kept column of
`x_t`, then each kept column of `h_(t-1)`. Each takes one period. Twelve clocks
of drain follow, to empty the input pipeline and the PE pipeline.

**Element-wise (11 clocks per sequence `b`).**

| Clock | Action |
|---|---|
| 0-1 | Read `c_(t-1)` of sequence `b` (two wide words) into the c registers. All PEs output scratch entry `b`. |
| 2 | All four tiles latch their activations f, i, o, g. |
| 3 | Tile f forms `f*c`. Tile i forms `i*g`, reading g from tile 3's activations. |
| 5 | Tile g adds: `c_t = i*g` (saturated to 8 bits) times 1.0, plus the 12-bit `f*c` from tile f. |
| 7 | Tile g latches `tanh(c_t)`. The first half of `c_t` is written off-chip. |
| 8 | The second half of `c_t` is written off-chip. Tile o forms `h_t = o*tanh(c_t)` into its scratch entry `b`. |
| 10 | Each lane ORs "pruned `h_t` is non-zero" into a per-unit flag. |

**Encode (one clock per unit, plus `B` clocks per kept unit).** The encoder
looks at each of the 48 flags in turn. A zero unit only increments the zero
run. A kept unit writes its offset. Its `B` values are then read out of tile
o's scratch memory, pruned, and written to the value channel.

In dense mode (`sparse_en = 0`), `T` is forced to 0 and every unit is kept,
with offset 0.

Clocks per step:

```
sum over blocks of ((1 + nx + nh) * max(B,8) + 16 + 11*B)  +  kept*B + skipped
```

The testbenches check this formula exactly (`stat_cycles`).

## Numbers

- Weights, inputs, `h`, `c` and gate values are 8-bit signed Q2.5, covering
  [-4, 4) in steps of 1/32.
- Partial sums are 12-bit Q6.5.
- A product is shifted right arithmetically by 5.
- Every addition saturates to 12 bits. Every value leaving a PE towards memory
  or a multiplier saturates to 8 bits.

The sigmoid uses the PLAN approximation:

| Range of \|x\| | sigmoid(x) |
|---|---|
| >= 5 | 1 |
| 2.375 to 5 | x/32 + 0.84375 |
| 1 to 2.375 | x/8 + 0.625 |
| < 1 | x/4 + 0.5 |

Negative inputs use the mirror image. All slopes are shifts. The absolute error
is below 0.07 for sigmoid and below 0.11 for tanh.

## Using it

1. Fill `cfg` (type `lstm_pkg::cfg_t`) with:
   - `dx`, `dh`, `batch` (1..16), `sparse_en`, `thr`;
   - `nx`, `nh`;
   - the eight base addresses.
2. Hold `cfg` stable.
3. Pulse `start`.
4. Wait for the one-clock `done`. `h_count`, `h_skipped`, `stat_cycles` and
   `stat_columns` then describe the step.

Before the first step, `h_0` is empty: `nh = 0`.

The weight rows must be laid out as above, with padding lanes of the last
block (when `dh` is not a multiple of 48) set to zero.

## Where this design departs from the source

The source gives the block diagram, the sizes, the batch pipelining, the
division of the element-wise products among the tiles, and the offset
encoding. Everything at clock level is this design's own choice:

- the number formats;
- the activation approximation;
- the three memory channels and the layout;
- the block order;
- how the bias is handled;
- the element-wise schedule;
- encoding of `x_t` as well as `h`.

Known differences and limits:

- The element-wise phase does not overlap the next block's MAC phase. For large
  layers this costs little: at 1000 hidden units and batch 16, dense
  throughput is 74 Gops against 76.4 reported. For small layers it costs more:
  at 100 units and batch 8, 37 against 74 Gops. Sparse runs reach 207-355 Gops
  at 1000 units, against 223-395 reported.
- `c_t` is stored off-chip as 8 bits. `tanh(c_t)` and `h_t` in the same step
  use the 12-bit sum.
- The off-chip DRAM is not part of the RTL. The testbenches use a behavioural
  memory (`tb/dram_model.sv`).
- The scratch memory is a register array in place of a compiled dual-port SRAM
  macro.
- `dh` and `dx` are limited to 65535 by the 16-bit counters. Memory is limited
  to 2^24 words per channel.

## Simulation

Each testbench prints `TB_RESULT checks=N failures=M`. With verilator 5, from
the repository root:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb \
    rtl/lstm_pkg.sv $(ls rtl/*.sv | grep -v lstm_pkg) tb/dram_model.sv tb/lstm_run.sv tb/tb_lstm_accel.sv \
    --top-module tb_lstm_accel -o sim && ./obj_dir/sim
```

For a unit testbench, list only that unit's files (for example
`rtl/lstm_pkg.sv rtl/scratch_mem.sv rtl/pe.sv tb/tb_pe.sv`).

| Testbench | What it runs |
|---|---|
| `tb_scratch_mem`, `tb_pe`, `tb_act_unit`, `tb_local_router`, `tb_tile`, `tb_wi_regs`, `tb_global_router`, `tb_encoder`, `tb_controller` | Each unit against an independent model. The activation testbench is exhaustive against real sigmoid/tanh. |
| `tb_lstm_accel` | Three small layers in parallel: one-hot x with pruning, real-valued x with batch 10, and dense mode. Several steps each, bit-exact against a reference model. Also counts that each mechanism occurred: skipped columns, bandwidth-bound periods (B < 8), full periods, partial blocks and dense mode. |
| `tb_lstm_workloads` | Two more layers of evaluated sizes, with pruning: 300 units with 300 real-valued inputs at batch 8 for two steps (word model), and 100 units with one input at batch 16 for four steps (pixel-sequence classifier). |
| `tb_lstm_full` | A 1000-unit, 50-input, batch-16 layer for two steps with pruning. This is the size of the character-level language model. About 250k clocks, under 2 minutes. |

`tb/lstm_run.sv` holds the reference model and the check logic shared by the
two system testbenches.
