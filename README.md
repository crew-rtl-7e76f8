# CREW: a fully-connected-layer accelerator that memoizes products

Once a fully-connected (FC) layer is quantized to 8 bits, each input neuron
meets only a few distinct weights across all its output neurons. The CREW
paper reports an average of 29 to 59 distinct weights per input for speech
and translation networks. A standard accelerator still performs all N × M
multiplications and fetches N × M 8-bit weights. CREW does two things
instead:

* **Memoization.** Each input is multiplied once by each of its *unique*
  weights. The products are kept in a small buffer, and every dot product is
  then built by adding products taken from that buffer. The number of
  multiplications drops to N × (unique weights per input).
* **Efficient weight storage.** Every weight is replaced by an *index* into
  its input's list of unique weights. An input with u unique weights needs
  only ceil(log2 u) bits per index, so the weight matrix becomes a stream of
  short indexes.

This repository holds synthesizable SystemVerilog for that accelerator. It
follows the organisation the paper describes:

* a 16 × 16 array of processing elements (PEs);
* one partial product buffer shared by the PEs of each row;
* per PE, an index decoder, an indirections buffer and a partial sum buffer;
* double-buffered global SRAM;
* a controller that overlaps product generation, index decoding and
  accumulation.

The paper gives the architecture, the dataflow and the buffer sizes. It does
not give word formats, handshakes or the control protocol. Every such detail
here is this design's own choice; each one is listed in
[Where this design departs from or adds to the paper](#where-this-design-departs-from-or-adds-to-the-paper).

## A small example

Take an FC layer with 4 inputs and 8 outputs, the running example of the
paper, with these inputs and per-input unique weights:

| input n | x[n] | unique weights of n |
|---|---|---|
| 0 | 1 | {2, 6} |
| 1 | 4 | {8} |
| 2 | 5 | {2, 5} |
| 3 | 7 | {3, 9} |

Step 1 computes the 7 products x[n]·uw[n][j]: 2, 6, 32, 10, 25, 21 and 63.
Step 2 reads, for output m, the index idx[n][m] of every input and adds
x[n]·uw[n][idx[n][m]].

With index rows (0,1,0,0,1,1,1,0), (0,…,0), (1,1,1,0,0,1,1,1) and
(0,0,0,0,0,0,1,0), the outputs are 80 84 80 65 69 84 126 80. The design
needed 7 multiplications instead of 32. Indexes of 1 bit, or 0 bits for a
single weight (stored as 1 bit here), replace 8-bit weights.
`tb/crew_top_tb.sv` runs exactly this layer on a 2 × 2 array first.

## Blocking: groups, iterations and blocks

The array has `PE_ROWS × PE_COLS` PEs, 16 × 16 by default. A block has
`BS_ROW × BS_COL` indexes, 16 × 16 by default. A layer is cut as follows:

* **Input group g** has `PE_ROWS × BS_ROW` inputs (256). PE row r owns
  inputs `g·PE_ROWS·BS_ROW + r·BS_ROW + i`, for i = 0 … BS_ROW-1.
* **Output iteration t** has `PE_COLS × BS_COL` outputs (256). PE column c
  owns outputs `t·PE_COLS·BS_COL + c·BS_COL + k`, for k = 0 … BS_COL-1.
* **Block (g, t) of PE (r, c)** is the BS_ROW × BS_COL sub-matrix of indexes
  at those rows and columns. Its row i is input i of the PE row's group
  slice, and its column k is output k of the PE column's slice.

The PEs of one row share inputs and so share partial products, but compute
different outputs. The PEs of one column compute partial sums of the same
outputs over different inputs. A final reduction down each column adds them.

Blocks are processed with the group as the outer loop and the iteration as
the inner loop: (0,0), (0,1), …, (0,T-1), (1,0), … This way, one group's
products stay in the shared buffer while all T iterations use them. Output
k of iteration t lives in partial-sum entry `e = t·BS_COL + k` of every PE.
So one pass can hold `n_iters·BS_COL ≤ PSUM_ENTRIES` outputs per column,
which is 4096 outputs at the defaults. Layer sizes must be padded to whole
groups and iterations. Padding inputs are given the value 0, one unique
weight and index 0.

## Step 1: generating partial products (`pp_row_engine`, `pe`)

Each PE row has a step-1 engine. For input i of group g it does three
things:

1. It reads the row's input bank at `g·BS_ROW + i`. The word there is
   `{unique-weight count - 1, x}`, 8 bits each.
2. It reads the input's unique weights from the row's unique-weight bank.
   Each word holds PE_COLS weights, one per PE column, so a word is read per
   cycle. Each input starts a new word, and a pointer walks the bank through
   the whole layer.
3. It broadcasts x to the row, sends weight lane l to PE column l, and
   writes the returned products into the shared buffer. Lanes past the
   count are masked off.

Each PE holds a registered 8 × 8 signed multiplier. Its operand registers
load only when step 1 uses them. The paper power-gates the multiplier at
this point; gating is a physical-design matter and is not modelled.

An input with n unique weights costs `2 + ceil(n/PE_COLS)` cycles. With the
paper's averages (29 to 59 unique weights per input) that is 4 to 6 cycles
per input, which is 64 to 96 cycles per group. Step 2 needs 256 cycles for
each block, so step 1 normally hides behind it.

## The shared partial product buffer (`pp_buffer`)

The buffer has one bank per PE column. Each bank holds the products of
`BS_ROW/PE_COLS` inputs, 256 products of 16 bits each: the worst case of
256 unique weights for an 8-bit weight. There are two halves.

Input i of a block lives in bank `i mod PE_COLS`, at offset
`(i / PE_COLS)·256 + j`, where j is the unique-weight number. At the
defaults, each bank holds one input. The size is 16 banks × 256 × 16 bit ×
2 halves = 16 KB per row, which is exactly 1 KB per PE.

The buffer has one wide write port for step 1 and one read port per PE
column for step 2. In step 2, PE column c works on block row
`(r + c) mod BS_ROW` during its r-th pass over the block. So at any cycle
the 16 PEs of a row read 16 different banks and never collide. An
assertion checks this every cycle. The paper says only that the PEs start
"with a different offset located into a different bank". The rotation by
column number is this design's way of doing that.

## Compressed index blocks and the decoder (`index_decoder`)

All indexes of one input neuron have the same width. The width code is 3
bits and the width is code + 1, so 1 to 8 bits. A block therefore has
BS_ROW widths. It is stored in the PE's index bank as 32-bit chunks, least
significant bit first:

```
header : BS_ROW 3-bit width codes, row 0 first, padded to whole chunks
body   : the BS_COL indexes of row 0, then of row 1, ...,
         each idx_bits(code[row]) wide, padded to a whole chunk
```

Blocks of one PE follow each other in the order (g, t) given above.

The decoder requests one chunk at a time; the data arrives one cycle later.
It works as follows:

* It first collects the header.
* It then keeps a 64-bit bit buffer topped up. From the header it knows how
  many body chunks the block has, and it never reads past the block.
* It emits one index per cycle while the buffer holds enough bits. Each
  index is zero-padded to 8 bits and written to the indirections buffer at
  `row·BS_COL + col`.

A block of 256 indexes therefore decodes in 256 cycles plus at most about
8 cycles of header and refill (the testbench bounds it by 256 + 8). Step 2
spends 257 cycles on a block, so decoding the next block mostly hides
behind computing the current one. With wide indexes step 2 can wait a few
cycles per block; `st_wait_ppi` shows it. The paper describes a byte read, masking and a pointer
advanced by the index size. The bit buffer with a variable shift does the
same work.

## Step 2: accumulation (`pe`, `ppi_buffer`, `psum_buffer`)

All PEs run step 2 in lockstep on blocks of the same (g, t). In cycle
`s = r·BS_COL + k` of a block, PE (row, c) does the following:

* it reads index `idx = ppi[i·BS_COL + k]` with `i = (r + c) mod BS_ROW`;
* it reads the product at bank `i mod PE_COLS`, offset
  `(i/PE_COLS)·256 + idx`, of the shared buffer half holding group g;
* it adds the product, sign-extended, to partial-sum entry
  `t·BS_COL + k`, and writes the result back.

Reads are combinational and the write is registered, so one accumulation
happens per cycle. A block takes exactly `BS_ROW·BS_COL` = 256 cycles.
The controller adds one idle cycle between blocks.

Blocks of group 0 overwrite the entry instead of adding, so no clear pass
is needed. The indirections buffer (2 × 256 × 8 bit = 0.5 KB) and the
partial sum buffer (256 × 24 bit = 0.75 KB) match the per-PE sizes the
paper gives. The paper gives only the 0.75 KB total; the 24-bit width
follows from it.

## Overlap and control (`crew_ctrl`)

Three activities run at the same time. Full flags on the two halves of the
shared buffers and of the indirections buffers link them:

| activity | fills / drains | starts when |
|---|---|---|
| step 1, all row engines | fills product half g mod 2 with group g | that half is empty |
| decoding, all PEs | fills indirection half b mod 2 with block b | that half is empty |
| step 2, all PEs | drains both | indirection half b mod 2 and product half g mod 2 are full |

Step 2 releases an indirection half after each block. It releases a product
half after the last iteration of its group. An activity ends only when
every row engine or every PE has reported done; the controller keeps sticky
done bits for this.

Status outputs show each activity, plus the two stall reasons: step 2
waiting for products (`st_wait_pp`) or waiting for indexes (`st_wait_ppi`).
At the paper's average unique-weight counts neither stall should appear
after the first block. The layer then takes about
`blocks × 257 + n_iters × 16` cycles.

## Reduction and output

After the last block, the controller walks the entry e from 0 to
`n_iters·BS_COL - 1`, one per cycle. Every PE adds its own entry e to the
value coming from the PE above, and the sum leaves the bottom of column c.
It is written to output bank c at address e, which is output
`t·PE_COLS·BS_COL + c·BS_COL + k`.

The column sum is a combinational chain of PE_ROWS adders. The paper states
only that the reduction runs top to bottom. A pipelined chain would need
one register per row and would shorten the critical path. Sums wrap at
PSUM_W = 24 bits. Products of two 8-bit values are at most 2^14 in size, so
overflow is possible in the worst case once more than 512 products are
added. The paper does not discuss this.

## Global buffers and the memory-side interface (`global_buffer`, `crew_top`)

Every global bank has two halves. The memory side (`fill_*`, `drain_*`)
uses one half while the array uses the other, and a `swap` pulse exchanges
them. Reads take one cycle. The banks and their sizes are:

| buffer | banks | word | depth (both halves) | size |
|---|---|---|---|---|
| inputs | 1 per PE row | 16 bit {count-1, x} | 65536 | 2 MiB |
| unique weights | 1 per PE row | PE_COLS × 8 bit | 16384 | 4 MiB |
| indexes | 1 per PE | 32-bit chunk | 16384 | 16 MiB |
| outputs | 1 per PE column | 24 bit | 32768 | 1.5 MiB |

The total is 23.5 MiB, against the paper's 24 MB of global SRAM. The split
between the buffers is this design's choice.

A layer runs in this order:

1. Write the memory-side halves through the fill port. `fill_target`
   chooses the buffer. `fill_bank` is the PE row for inputs and weights, or
   `r·PE_COLS + c` for indexes.
2. Pulse `swap`.
3. Pulse `start` with `n_groups` and `n_iters`.
4. Wait for `done`.
5. Pulse `swap` again and read the results through the drain port.

The next layer can be written while the current one runs. `crew_top_tb`
does this.

Main memory, the bus to it, bias addition and the FP32 activation functions
are outside this RTL.

## Parameters

| parameter | default | from |
|---|---|---|
| PE_ROWS × PE_COLS | 16 × 16 | paper |
| BS_ROW × BS_COL | 16 × 16 | paper |
| partial product width | 16 | paper |
| decoded index width | 8 | paper |
| width code | 3 bits | paper (encoding: this design) |
| PSUM_ENTRIES × PSUM_W | 256 × 24 | derived from the paper's 0.75 KB |
| CHUNK_W | 32 | this design |
| IN/UW/IDX/OUT_DEPTH | 65536 / 16384 / 16384 / 32768 | this design, within the paper's 24 MB |

`BS_ROW` must be a multiple of `PE_COLS`. Every parameter default is the
full size; nothing is scaled down.

## Capacity for the evaluated networks

The paper evaluates DS2, GNMT, Transformer, Kaldi and PTBLM, but gives only
their unique-weights-per-input averages, not their layer shapes. The shapes
below are general knowledge of those networks, not figures from the paper.

* One pass holds at most 4096 outputs and 524288 inputs.
* The index bank of one PE holds 262144 bits per half.
* The LSTM/GRU gate matrices, about 1024–3000 inputs × 3072–6000 outputs,
  fit in one or two passes.
* Very wide layers need several passes over slices of the outputs. Examples
  are a Transformer vocabulary projection, and PTBLM's 3000 × 6000 layer,
  whose indexes exceed one index-bank half. Such indexes must be refilled
  while the layer runs.

## Where this design departs from or adds to the paper

* **Word formats and sizes.** The word formats, the compressed block layout
  (header, LSB-first, chunk padding), the 32-bit chunk and the split of the
  global SRAM are all this design's.
* **Block order and synchronisation.** The order (groups outer, iterations
  inner), the lockstep step 2 with one idle cycle per block, and the
  full-flag protocol are this design's. The paper says only that the
  activities overlap through double buffering.
* **Step-1 reads.** The paper's flowchart draws "read input" and "read
  unique weights" side by side. Here the input word is read first, because
  the count it carries decides how many weight words follow. This costs one
  cycle per input, which step 2 hides.
* **Bank rotation.** Step 2 uses a rotation of `(r + c) mod BS_ROW` to
  avoid bank conflicts.
* **First block.** The first block overwrites the partial sum instead of
  clearing it.
* **Index widths.** An input with a single unique weight still gets 1-bit
  indexes, because width = code + 1.
* **Reduction.** The reduction is a single combinational adder chain per
  column and runs once per layer.
* **Not built:**
  * multiplier power gating;
  * bias and activation;
  * the DRAM and memory bus, which are replaced by the fill/drain ports;
  * any non-FC (convolution) mode.
* **No hardware needed:** the paper's partial-product approximation is an
  offline change to the unique-weight lists and indexes, so it needs no
  hardware.

## Files

`rtl/`, one unit per file:

| file | contents |
|---|---|
| `crew_pkg.sv` | formats and helper functions |
| `global_buffer.sv` | double-buffered SRAM bank |
| `index_decoder.sv` | index decompressor |
| `ppi_buffer.sv` | indirections buffer |
| `pp_buffer.sv` | shared partial product buffer |
| `psum_buffer.sv` | partial sum buffer |
| `pe.sv` | processing element |
| `pp_row_engine.sv` | step-1 sequencer |
| `crew_ctrl.sv` | controller |
| `crew_top.sv` | the accelerator |

`tb/` has one self-checking testbench per unit, `<unit>_tb.sv`. Each prints
`TB_RESULT checks=N failures=F`. In addition:

* `crew_top_tb.sv` runs the worked example and a random 4-group ×
  3-iteration layer on a 2 × 2 array. It counts every mechanism: stalls on
  both buffers, overlap of each activity with step 2, every index width
  from 1 to 8 bits, and fills and drains during a run.
* `crew_top_full_tb.sv` runs one 256 × 256 layer on the default
  16 × 16 design.
* `crew_top_workload_tb.sv` runs, on the default design, one 1024 × 256
  layer for each evaluated network. Each layer's unique-weight counts are
  spread around that network's average (29 to 59). Every layer finishes in
  1333 cycles: 4 blocks × 257 cycles, 16 cycles of reduction, and about
  290 cycles to produce the first group and decode the first block. Step 2
  is then the bottleneck, and multiplications drop to 11–23 % of the
  262144 multiply-accumulates.

The testbenches also check cycle counts:

* 256 cycles per block in step 2;
* the decoder's rate;
* the step-1 cost per input;
* that a compute-bound layer has at most one idle cycle per block.

To simulate a testbench with Verilator 5:

```
verilator --binary --timing --assert -Irtl -y rtl rtl/crew_pkg.sv tb/crew_top_tb.sv \
          --top-module crew_top_tb -o sim
./obj_dir/sim +verilator+rand+reset+2
```

The full-size testbench builds in about a minute and runs in well under a
second of simulation time.
