# Vis-TOP: an overlay processor for vision Transformers

Vision Transformers such as Swin Transformer are built from a small number of
operations: matrix multiplication, softmax, layer normalisation, GELU and
element-wise vector arithmetic. These are applied to tensors whose shapes change
from layer to layer. Vis-TOP does not hard-wire one network. It is an
*overlay*: a fixed set of hardware modules, each sized once at design time,
that a stream of instructions sequences at run time. Changing the network
means changing the instruction program, not the hardware.

This repository holds synthesizable SystemVerilog for such a processor, with
8-bit fixed-point data. It includes a self-checking testbench for every module
and one for the whole processor. The reference workload is Swin Transformer
tiny (Swin-T) on a 3×224×224 image, with patch size 4 and window size 7.

## Three layers

Think of the design in three layers:

* **Model.** Transformer building blocks such as window attention, the MLP and
  patch merging.
* **Instruction bundle.** Each model block becomes a short sequence of
  instructions. The instructions set sizes and addresses, then start component
  modules one after another.
* **Components.** The hardware modules themselves:
  * One *fixed module*, the matrix multiply. It is always the same PE array;
    different problem sizes come from a run-time *batch* (how many PEs take
    part) and from repeating blocks.
  * Several *variable modules*: softmax, layer normalisation, GELU, basic
    vector operations, and data selection/arrangement. Their run time depends
    on the size of the data.

The hardware implements the component layer and the instruction interface.
It can also store a bundle and replay it when a single instruction calls for
it. Deciding what each bundle contains, that is, translating a model into
instructions, is software's job.

## Block diagram

```
             instructions (64 b)        parameters (C x 8 b per beat)
                  |                              |
          +-------v--------+                     |
          | bundle store   | record / replay     |
          +-------+--------+                     |
          +-------v--------+             parameter stream bus
          | instruction    |-- registers         |
          | bundle table   |  (reg_file)         |
          +--+---------+---+                     |
 instruction |         | data bus (operands in,  |
 bus (cmd,   |         | results out)            |
 start)      v         v                         v
   +-----------------------------------------------------------+
   | block modules:  matmul (C PEs)   softmax   layernorm      |
   | stream modules: gelu   vecop                              |
   +-----------------------------------------------------------+
               ^   |
               |   v
        +-------------------+      +-------------+       +-------------+
        | memory cache unit |<---->| data_select |<----->| main memory |
        | (mem_cache)       |      | (Alg. below)|       | (off chip)  |
        +-------------------+      +-------------+       +-------------+
```

| file | role |
|---|---|
| `rtl/vt_pkg.sv` | widths, opcodes, module ids, register map, command structs |
| `rtl/vistop.sv` | top level: wires everything below |
| `rtl/bundle_table.sv` | stores recorded instruction bundles and replays one on request |
| `rtl/ibt.sv` | instruction bundle table: decode, address and count generation, operand streaming |
| `rtl/reg_file.sv` | 32 × 32-bit registers written by parameter-set instructions |
| `rtl/bus_mux.sv` | instruction, data and parameter-stream buses; cache and main-memory port ownership |
| `rtl/mem_cache.sv` | memory cache unit: 512 KiB, two read ports, one write port |
| `rtl/data_select.sv` | data selection/arrangement: cube copy between main memory and the cache |
| `rtl/matmul.sv`, `rtl/mm_pe.sv` | matrix multiply with 96 PEs |
| `rtl/softmax.sv`, `rtl/layernorm.sv`, `rtl/seq_div.sv` | row-wise normalisation modules and their shared divider |
| `rtl/gelu.sv`, `rtl/vecop.sv` | element-wise stream modules |

## Programming model

### Instructions

Instructions are 64 bits wide and arrive on a valid/ready stream. The opcode
sits in bits [63:60].

| opcode | meaning | fields |
|---|---|---|
| `OP_PSET` (1) | parameter set: write a register | [52:48] register index, [31:0] value |
| `OP_EXEC` (2) | module execution: run one component | [3:0] module id |
| `OP_BREC` (3) | record a bundle: store the next `count` words, do not execute them | [47:32] base, [15:0] count |
| `OP_BRUN` (4) | replay the stored words base … base+count−1 | [47:32] base, [15:0] count |
| `OP_NOP` (0) | ignored | |

Module ids:

* `M_NONE` = 0: no module; a barrier (see below)
* `M_SEL` = 1: data selection
* `M_MM` = 2: matrix multiply
* `M_SM` = 3: softmax
* `M_LN` = 4: layer normalisation
* `M_GELU` = 5
* `M_VEC` = 6: vector operation

The table accepts instructions only while no execution is running. A
parameter-set instruction therefore never changes the sizes of a module that
is already running. A `PSET` takes one cycle. An `EXEC` holds the instruction
stream until its module has finished.

### Background data selection

A data selection from main memory into the cache with `MODE` bit 3 set runs
in the background. The table starts it and returns to idle at once. The
following instructions, including one computation, then run while the
selection fetches the next window. This is how data transfer and computation
run in parallel.

* A second data selection waits until the background one has finished.
* An `EXEC` that names no module (`M_NONE`) is a barrier. It also waits
  until the background selection has finished, and then does nothing.
* `n_exec` counts the background selection when it finishes.
* `busy` stays high while a background selection runs.

The program must not let a computation read the area that the background
selection is writing before the barrier.

### Stored bundles

`bundle_table` sits between the instruction input and the decoder. Ordinary
words pass straight through it in the same cycle. After an `OP_BREC`, it
writes the next `count` words into a 256-word bundle memory instead of
passing them on. An `OP_BRUN` issues the stored words to the decoder in
order, at one word every two cycles. After that, the external stream resumes.

Registers that a bundle does not set keep their values. So one bundle, for
example "normalise, project, GELU, residual add" on one window, can be
replayed for every window. The host sets only the window's addresses or
selection offsets between replays.

Bundles do not nest. An `OP_BREC` or `OP_BRUN` found inside a bundle is
skipped. `n_replay` counts finished replays.

### Registers

| index | name | used by |
|---|---|---|
| 0, 1, 2 | `SRC_A`, `SRC_B`, `DST` | cache byte addresses of operand A, operand B and the result |
| 3, 4 | `ROWS`, `LEN` | rows (tokens) and elements per row (K for matrix multiply) |
| 5, 6, 7 | `NOUT`, `BATCH`, `SHIFT` | matrix multiply: output columns, active PEs, requantisation shift (also the vector-multiply shift) |
| 8 | `MODE` | data selection: bit 0 source is main memory, bit 1 destination is main memory, bit 3 run in the background; vector: bits 1:0 operation, bit 2 operand B from the parameter stream |
| 9–17 | `MH MW MC SH SW SC FH FW FC` | data-selection cubes |
| 18, 19 | `SRC_OFF`, `DST_OFF` | data-selection offsets |

### What an execution does

When an `EXEC` arrives, the table does the following:

1. It copies the registers into a command: the module id and the row, length,
   output-column, batch, shift and mode values. It also computes:
   * the number of input elements, `rows*len`;
   * the number of results: `rows*nout` for a matrix multiply, `rows*len`
     otherwise.
2. It pulses `exec_start` for one cycle on the instruction bus. The bus
   delivers that start only to the selected module.
3. It streams operands, in order, from cache addresses `SRC_A + n`. Vector
   operations also read `SRC_B + n` through the second read port. The operands
   go through a two-entry buffer onto the data bus as a valid/ready stream.
4. It writes the `n`-th result that the module returns to `DST + n`.
5. It finishes when the last result is written. A data selection moves its own
   data, and the table waits only for its `done`. The counter `n_exec` then
   increments.

When no module stalls, an element-wise execution of `N` elements ends `N + 6`
cycles after its `EXEC` is accepted.

A typical fragment, a residual MLP on one 7×7 window with 96 channels:

```
PSET SRC_A=xin  PSET DST=t0  PSET ROWS=49 PSET LEN=96   EXEC LN
PSET SRC_A=t0   PSET DST=t1  PSET NOUT=384 PSET BATCH=96 PSET SHIFT=7  EXEC MM
PSET SRC_A=t1   PSET DST=t2  PSET LEN=384                               EXEC GELU
...             PSET MODE=ADD PSET SRC_B=xin                            EXEC VEC
```

The parameter stream must deliver the parameters in the order each module
consumes them (see below). In this design the stream comes from outside, as
one C×8-bit beat per handshake.

## Data layout and data selection

Every tensor is stored flattened, C×H×W, with W varying fastest, then H, then
C. Any window, patch or channel slice is then a *small cube* inside a *large
cube*, and one address formula reaches all of them. `data_select` copies a
small cube of SC×SH×SW bytes, at offset (FC, FH, FW) inside a large cube of
MC×MH×MW bytes, into a contiguous destination:

```
for i < SC, j < SH, k < SW:
    dst[i*SH*SW + j*SW + k + DST_OFF] =
        src[(i+FC)*MH*MW + (j+FH)*MW + (k+FW) + SRC_OFF]
```

Either side can be main memory or the cache, chosen by `MODE` bits 0 and 1.

The engine does not wait for each read to return before issuing the next. It
issues read requests back-to-back and keeps up to four of them in flight. The
data comes back through a four-entry buffer. Each returned byte is written in
the order it was requested. So one byte moves per cycle whatever the latency
of main memory, and a copy of `T` bytes with no stalls takes `T + 4` cycles.

Before copying, the engine checks the cube:

* It rejects a small cube that is empty or that pokes outside the large cube
  (compared against MC, MH and MW).
* On a rejected cube it raises `err` together with `done` and writes nothing.
  At the top level this appears as `sel_err`.

Patch embedding uses a cube of SC=3, SH=4, SW=4 per 4×4 patch. Window
partitioning uses 7×7×C cubes. Moving results back to main memory is the same
copy with the roles of source and destination swapped.

## The matrix multiply

`matmul` computes

```
Y[r][n] = sat8( round( (sum_k X[r][k] * W[k][n]) >> SHIFT ) )
```

It uses int8 inputs and weights and a 32-bit sum. The module has C = 96
processing elements (`mm_pe`). Each PE has an input register, a parameter
register, a multiplier and an output register.

**How a row is computed.** A row of `len` inputs is cut into blocks of `batch`
inputs (1 ≤ batch ≤ 96). For each block:

1. **Load.** The block's inputs come off the data bus, one per cycle. Input `i`
   is latched in PE `i` and stays there for the whole block. PEs beyond the
   batch hold zero.
2. **Stream.** `nout` parameter beats follow, one per output column. Lane `i`
   of beat `n` is `W[k0+i][n]`, where `k0` is the first input index of the
   block. Every PE multiplies its input by its lane. A pipelined adder tree
   sums the 96 products.
3. **Accumulate.** The tree's sum goes into accumulator `n` of a bank of
   `MAX_N` = 3072 words. On the first block of a row the old value is replaced
   instead of added to, so no separate clear pass is needed.
4. **Output.** On the last block of the row, each column leaves as soon as it
   is complete: rounded, shifted and saturated to int8. Results come out in
   row-major order.

So the parameter stream carries, for every row, `ceil(len/batch)·nout` beats.
The order is row by row, then block by block, then column by column. Each beat
is used exactly once, and that is why parameters are streamed rather than
stored.

A block costs `min(batch, inputs left) + nout + 3` cycles when nothing stalls.
Both streams can stall at any time. The module simply waits.

## The normalisation modules

Both modules handle one element per cycle and buffer one row.

**Softmax** (`softmax`, rows of up to 49 = 7×7 window tokens). Input scores
are int8 with 4 fractional bits. The module works in three passes over the
row:

1. **Load.** Buffer the row and find its maximum.
2. **Exponent.** Form `e_i = 2^(-(max - x_i)·log2 e)`. The integer part of the
   exponent becomes a shift. A quadratic fit of `2^-f` on the fraction gives
   the rest (Q15, error below 0.2 %). The pass also sums the `e_i`.
3. **Output.** One sequential division gives `2^30 / sum`. Each output is then
   `(e_i · recip) >> 23`, rounded. Outputs have 7 fractional bits, and a
   probability of 1.0 saturates to 127.

A row takes `3·len + 34` cycles.

**Layer normalisation** (`layernorm`, rows of up to 1536). The variance is
taken as `E[x²] − (E[x])²`. One pass can therefore collect both `Σx` and
`Σx²`, and the row never has to be re-read for a second, centred pass. After
the load pass, one 40-bit sequential divider is used three times:

* mean = Σx·2⁸ / L, in Q12;
* E[x²] = Σx²·2⁸ / L, in Q16;
* 1/σ = 2²⁸ / σ.

σ itself comes from a 16-step bit-serial square root of the variance plus one
LSB of epsilon. The output pass takes one parameter beat per element
(gamma in Q6 on lane 0, beta in Q4 on lane 1) and produces:

```
y = ((((x·2⁸) − mean)·(1/σ) >> 16)·gamma + 2¹³) >> 14 + beta
```

The result is saturated to int8.

## The stream modules

**GELU** computes `x·0.5·(1 + tanh(√(2/π)·(x + 0.044715·x³)))` in a
three-stage pipeline. It accepts one element every cycle and has a fixed
latency of 3. The cube and the scaling are exact fixed-point arithmetic in Q16.
`tanh` comes from a 17-entry table of `tanh(k/4)` for `k = 0..16` (Q15), with
linear interpolation between entries. It saturates for |u| ≥ 4 and is mirrored
for negative arguments.

**Vector operations** (`vecop`) provide saturating add, subtract, maximum, and
multiply with a rounding right shift. They have a latency of one cycle.
Operand B is either read from the cache next to operand A (for example, a
residual connection) or taken from lane 0 of the parameter stream (for
example, a bias or a scale).

## Buses, storage and timing

* **Buses.** `bus_mux` gives each bus to one module at a time, the one named by
  the current command:
  * the start pulse;
  * the data-bus operand and result streams, with their ready/valid;
  * the parameter stream and its ready. The ready comes from whichever of
    matmul, layernorm or vecop is running.

  While a data selection runs, it owns the main-memory ports and the cache
  ports it uses. A background selection reads main memory and writes the
  cache. The table keeps both cache read ports and has priority on the write
  port; on a conflict the selection waits a cycle.
* **Cache.** `mem_cache` is a byte-wide synchronous RAM of 524,288 bytes. It
  has two read ports with one-cycle latency (read-first) and one write port.
  Its contents are not reset.
* **Main memory** is outside this RTL. The ports `mem_rd_*` and `mem_wr_*`
  carry byte requests with a grant. Read data comes back in order, after any
  latency.
* **Clock and reset.** Everything runs on one clock. `rst_n` is an
  asynchronous, active-low reset that clears all control state.

## Fixed-point conventions

| quantity | format |
|---|---|
| activations (module inputs and outputs) | int8, 4 fractional bits |
| matrix-multiply weights | int8. Scaling is folded into `SHIFT`. |
| matrix-multiply sums | 32-bit signed, then `>>> SHIFT` with rounding, saturated to int8 |
| softmax output | int8, 7 fractional bits |
| layer-norm gamma / beta | int8 with 6 / 4 fractional bits |

## Verification

Every module has a self-checking testbench in `tb/`. Each testbench:

* computes its expected values independently: a floating-point reference for
  the nonlinear modules, and exact integer models elsewhere;
* drives random valid/ready gaps on every stream;
* checks cycle counts where the module has a fixed timing;
* has a watchdog;
* prints one line, `TB_RESULT checks=N failures=M`.

| testbench | what it establishes |
|---|---|
| `tb_matmul` | products for several row lengths and batches (single and multi-block), with stalls; exact cycle count per block |
| `tb_softmax` | rows of 49 and shorter against `exp`/sum, one LSB tolerance; cycle count |
| `tb_layernorm` | rows of 96, 384, 768 and 1536 (full-scale inputs) against the floating-point formula, two LSB tolerance |
| `tb_gelu` | all 256 inputs and a random stream, one LSB tolerance; latency 3 |
| `tb_vecop` | all four operations, both operand-B sources, saturation |
| `tb_data_select` | Algorithm-style copies of many cube shapes through a memory with random latency and grant gaps; rejected cubes; `T + 4` cycles |
| `tb_mem_cache`, `tb_reg_file` | storage behaviour against a model |
| `tb_ibt` | register writes, command fields, result placement, output counts for matrix multiply, waiting on data selection, background selection with a computation overlapping it, the second selection and the barrier waiting, `n_exec`, no instruction accepted while busy, `N + 6` timing |
| `tb_bus_mux` | every routing rule, randomly, for 20,000 cycles, including write-port conflicts between a background selection and the table |
| `tb_bundle_table` | pass-through in the same cycle; recorded words not executed; exact replay, including wrap-around and skipped nested words; replay count; 2 cycles per replayed word |
| `tb_vistop` | the whole processor at default size, described below |
| `tb_attention` | one head of window attention at default size: Q, K, V projections, K and V written back, Q·Kᵀ with Kᵀ streamed back by the host, softmax, P·V, all compared with references |
| `tb_patch_embed` | Swin-T patch embedding at default size: 49 patches of a 3×28×28 image, each copied by a replay of a one-instruction bundle, then a 48→96 projection, a streamed bias and layer normalisation, all compared with references |

`tb_vistop` runs the full-size processor (C = 96, 512 KiB cache) through a
program on one Swin-T window:

1. Select a 7×7×96 window out of a 14×14×96 map in main memory.
2. Layer normalisation.
3. A 49×96·96×96 matrix multiply with batch 96. Then a background selection
   of the next window into a spare cache area starts.
4. GELU.
5. A residual add. Steps 4 and 5 are recorded as a bundle and replayed
   twice. Both run while the background selection is active. A barrier
   then waits for it to finish.
6. A 49×96·96×49 matrix multiply with batch 32 (three accumulated blocks).
7. Softmax over rows of 49.
8. A multiply by a streamed operand.
9. Write the result back to main memory.
10. An illegal selection.

The instruction stream, the parameter stream and main memory all insert random
delays. Every intermediate result in the cache is compared with references
computed by the testbench. The test also requires each mechanism to have
occurred: every module, bundle replays, a selection overlapping computation, parameter-stream stalls, data-bus back-pressure,
main-memory read stalls, multi-block accumulation and the selection error.

`tb_patch_embed` also runs on the full-size processor. It shows how one
stored bundle serves many windows: the cube registers are set once, and only
`FH`, `FW` and `DST_OFF` change between the 49 replays of the selection.

`tb_attention` shows how attention maps onto the processor. The matrix
multiply takes its right-hand operand only from the parameter stream. So for
Q·Kᵀ and P·V the program writes K and V back to main memory with two data
selections, and the host streams them in again as parameters, K transposed.

To run a testbench with Verilator:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    --top-module tb_vistop rtl/vt_pkg.sv tb/tb_vistop.sv -o sim
obj_dir/sim
```

Replace `tb_vistop` with any other testbench name. All module parameters have
defaults. Only `tb_matmul` (C = 8), `tb_mem_cache` (4096 bytes) and
`tb_bus_mux` (32-bit parameter bus) shrink their module.

## Sizing against Swin-T

| quantity | needed | built |
|---|---|---|
| input image | 3×224×224 = 150,528 B | 524,288 B cache |
| stage-1 feature map | 56×56×96 = 301,056 B | fits in the cache |
| stage-1 MLP hidden tensor | 3136×384 = 1.2 MB | does not fit whole; processed in window-sized row tiles |
| attention scores per row | 49 | softmax rows up to 49 |
| widest matmul output row | 3072 (stage-4 MLP) | 3072 accumulators |
| widest normalised row | 1536 (input of the last patch merging) | layer-norm rows up to 1536 |
| matmul batch | 96 | 96 PEs |

Swin-T needs roughly 4.5 G multiply-accumulates per image. At 96 per cycle,
that is at least 47 M cycles in the matrix multiply alone. The published
inference times therefore imply either a clock far above what an FPGA
reaches or a wider datapath than the 96-PE array described. Matching those
times is not the aim of this RTL. Nothing here was timed on a device.

## Limitations and departures

* **Bundles are recorded by the host, not built in.** The bundle store keeps
  whatever sequences the host records. No fixed table maps model blocks to
  bundles, because the contents of such a table are a property of the network
  and its compiler, not of the hardware.
* **Limited overlap.** Only a data selection from main memory into the cache
  can run in the background. It overlaps one computation at a time, and only
  one background selection can be in flight. Selections into main memory and
  cache-to-cache copies run alone.
* **Softmax and layer normalisation work on one element per cycle.** They do
  not use a 96-wide datapath. Together they are a small share of the run time,
  but a wider version would need C-lane buffers and adder trees.
* **Parameters come from an external stream.** The order is fixed by the
  modules, as described above. Laying out weights in that order, and in
  particular re-streaming a layer's weights for every row, is the job of
  whatever feeds the stream.
* **Products of two activations go through main memory.** In attention,
  Q·Kᵀ and P·V multiply two computed matrices. The second one must be written
  back and streamed in again as parameters, which costs main-memory traffic.
* **The image pre-processing step is not included.**
* **Block or stream module?** The matrix multiply is described both as the
  stream-type module (element-wise data, parameters streamed) and as one of
  the block modules. Here it reads operands as a sequential stream, like the
  stream modules, but keeps the per-row blocking of a block module.
* **Fixed-point formats are this design's own.** This covers the Q-formats,
  rounding, saturation and the exp/tanh approximations. The only given point
  is 8-bit fixed-point data.
