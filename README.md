# An inter-task auto-reconfigurable attention accelerator in SystemVerilog

Between the layers of a deep network, the amount of intermediate data swings widely. One
projection may produce a few hundred kilobytes while the next matrix product produces megabytes.
A purely sequential accelerator runs one task at a time on all of its compute. It must then spill
the large intermediates to off-chip memory. A purely dataflow accelerator gives every task its
own processing elements and streams between them. It avoids the spill, but its processing
elements wait on one another.

The inter-task auto-reconfigurable approach (InTAR) switches between these patterns task by
task. Tasks whose outputs fit on chip run sequentially or side by side. Tasks whose outputs do
not fit are pipelined, so that the large intermediate is consumed as it is produced and never
stored whole. The switching schedule is fixed when the circuit is designed. It lives in a small
read-only instruction table. Only the multiplexers and links that the schedule actually uses are
built.

This repository implements that idea for one concrete workload: part of a self-attention layer.
With sequence length L = 256 and hidden size 1024, the design computes

    Q = X·Wq,  V = X·Wv,  K = X·Wk,  A = Q·Kᵀ

on a 2 × 2 grid of compute cores. By default it follows the two-stage schedule in which the cores
first compute Q and V side by side, and then reconfigure into a K → A pipeline. A design-time
parameter selects the alternative schedule for the first part instead. In that schedule all cores
compute V, then all cores compute Q, and then they switch to the same K → A pipeline.

## The schedule

```
            stage 0: task-parallel              stage 1: task-pipeline
            ----------------------              ----------------------
 column 0   Q = X·Wq, kept on chip (int8, Qᵀ)   A = Q·Kᵀ  (Q from scratchpad, K from FIFO)
 column 1   V = X·Wv, written off-chip          K = X·Wk, streamed to column 0, row by row
```

Q (256 × 1024 int8, 256 KB) is small enough to cache. K has to meet every row of Q before it can
be discarded. If the design also cached K, the scratchpads would overflow. Instead K flows
through a FIFO into the cores that hold Q, and A is formed while K is being produced. V is not
needed again here and goes straight off-chip. So the design writes no intermediate data off-chip.
It reads only X and writes only V and A.

Each column has N_ROWS = 2 cores. Core (c, r) owns the output columns
r·512 … r·512+511 of Q, K and V. In stage 1 it therefore holds only half of the hidden dimension
of Q. The A tile it computes is a partial sum over that half. Row 1 sends its partial rows down a
reduction FIFO to row 0. Row 0 adds them to its own partial rows in its reduction unit and writes
A off-chip.

```
             column 0 (Q, A)                 column 1 (V, K)
          +-----------------+   K FIFO   +-----------------+
  row 1   |  CC(0,1)        |<-----------|  CC(1,1)        |
          +--------+--------+            +-----------------+
                   | partial A (reduction FIFO)
          +--------v--------+   K FIFO   +-----------------+
  row 0   |  CC(0,0)        |<-----------|  CC(1,0)        |
          +-----------------+            +-----------------+
      every core: X read port and V/A write port to off-chip memory, weight preload port
      all cores:  instruction broadcast from the instruction reader
```

### The sequential alternative

Set `SEQUENTIAL_QV = 1` on `intar_top` to get a three-stage schedule:

| stage | column 0 | column 1 |
|---|---|---|
| V (sequential) | first half of the row's V column tiles, off-chip | second half, off-chip |
| Q (sequential) | first half of the row's Q tiles, into its Qᵀ cache | second half, sent to column 0 through the K FIFO |
| K → A (pipeline) | as above | as above |

In the Q stage, column 0 writes the words arriving from column 1 into its Qᵀ cache. It does so
whenever its own tile write-back is not using the cache's write port. The stage ends when its
own tiles are written and all of column 1's words have arrived. So the FIFO that carries K in
the last stage also carries this redistribution of Q, and no new link is added. Both schedules
take the same time: 1,170,461 cycles (task-parallel) and 1,170,483 cycles (sequential) at the
default size. The sequential schedule has one more reconfiguration and a short wait for the last
redistributed words.

## Reconfiguration: four cycles

The static schedule sits in `config_inst_buffer` as a case table with one entry per stage. An
entry holds a stage index and three loop bounds (i, j, k), plus flags that say which bounds
depend on the run-time sequence length. A switch from one stage to the next takes four cycles,
one for each step:

| cycle | unit | action |
|---|---|---|
| READ | `instr_reader` | read the buffer entry of the next stage |
| MODIFY | `instr_reader` | replace each flagged bound with seq_len / PE_DIM |
| SEND | `instr_reader` | broadcast the instruction to all cores (`inst_valid` for 1 cycle) |
| DECODE | every `compute_core` | turn (stage index, own column) into the multiplexer selects and the three loop counts |

The reader starts the next switch when every core raises `stage_done`. That barrier is this
design's choice. At 300 MHz the four cycles take 13 ns. The testbenches check that each switch
takes exactly four cycles.

The stage index changes only multiplexer selects. The datapath is the same in every stage:

* **Operand 1 of the PE array** comes from off-chip X (Q, V and K projections) or from the Qᵀ
  scratchpad (A).
* **Operand 2** is a 4-bit weight from the weight scratchpad or an 8-bit K element from the
  stream buffer. One set of multipliers serves both precisions (see below).
* **The finished tile** is written to the Qᵀ scratchpad, to off-chip memory, into the K FIFO, or
  through the reduction unit.
* **Words arriving on the K FIFO** go into the K stream buffer, or in the sequential Q stage into
  the Qᵀ scratchpad.

## Inside a compute core

Each core contains the following blocks:

* **`pea`**: a PE_DIM × PE_DIM (16 × 16) array of multiply-accumulate units. Each cycle it adds
  the outer product of a 16-element column of operand 1 and a 16-element row of operand 2 to its
  accumulators. After K cycles it holds a complete 16 × 16 output tile over a reduction length K.
  Operand 1 is signed int8. Operand 2 arrives packed. In the 4-bit stage, lane q is bits
  `[4q+3:4q]`. In the 8-bit stage, lane q is bits `[8q+7:8q]`. The selected slice is zero-padded
  to 8 bits and then used as a signed number. So 4-bit weights act as unsigned values 0 … 15,
  while 8-bit K values are signed. Padding both precisions to one width lets the same multipliers
  serve both stages.
* **`scratchpad`** instances, each word holding one 16-element vector:
  * the weight buffer: 4-bit words, 1024 · 32 words in column 0 and twice that in column 1;
  * in column 0 only, a Qᵀ cache (SEQ_MAX/16 × 512 words) and a 512-word K stream buffer.

  All reads take one cycle.
* **`dm_ctrl`**: the combinational router for the choices listed above.
* **`reduction_unit`**: adds the partner's partial row to the core's own row when the core has a
  partner below it in the column. Either input can stall the output.
* **A three-level loop nest** driven by the instruction bounds:

  ```
  for o < O:  [column 0, stage 1: fill the K buffer with 512 words from the FIFO]
    for t < T:
      for k < K: issue reads, MAC one cycle later
      1 drain cycle, then 16 write-back cycles (one row or column per cycle)
  ```

  | core | O | T | K |
  |---|---|---|---|
  | Q, V, K cores | L/16 row tiles (i) | 32 column tiles (j), 16 in the sequential V and Q stages | 1024 (k) |
  | A core | L/16 tiles of K rows | L/16 tiles of Q rows | 512 (j·16) |

Q and K tiles are requantised to int8 on write-back: arithmetic shift right by SHIFT = 8, then
saturate. Q is written transposed into the scratchpad. K is streamed one column per word, so that
the A core reads both operands along the hidden dimension. V and A leave at full 32-bit
precision. Because all tiles are 16 × 16, a row and a column of a tile have the same width. Reads
and transposed writes can then share one memory word size.

## Timing

A tile costs K + 1 + 16 cycles. There is no double buffering, so write-back does not overlap the
next tile's MACs.

* **Stage 0** has no stalls. It lasts (L/16) · 32 · (1024 + 17) cycles, which is 533,504 cycles
  at L = 256. In the sequential schedule, the V and Q stages each take half of that.
* **Stage 1** is paced by the K cores. They do the same amount of work as in stage 0. Whenever an
  A core is busy multiplying, its FIFO fills and the K core stalls on back-pressure.

At the default size one complete run takes **1,170,461 cycles**, about 3.9 ms at 300 MHz. This
covers both stages and both reconfigurations, but not the weight preload. The A cores spend most
of stage 1 waiting for K. This is the pipeline inefficiency the approach accepts in exchange for
not writing K off-chip.

## Interface of `intar_top`

Core index c = col · N_ROWS + row. All per-core ports are packed arrays indexed by c.

| port | meaning |
|---|---|
| `start`, `seq_len` | start pulse. seq_len must be a multiple of 16 and at most SEQ_MAX |
| `busy`, `done` | run status. `done` stays high until the next start |
| `pl_wr_en/addr/data[c]` | weight preload, see below |
| `off_rd_en/addr[c]`, `off_rd_data[c]` | X reads, data exactly one cycle after the request. Word k·(L/16) + t holds X[16t + p][k] in lane p |
| `off_wr_en/addr/data[c]` | V and A writes, always accepted. V word V_BASE + i·64 + w holds V[i][16w + q]. A word A_BASE + i·(L/16) + w holds A[i][16w + q] |
| `stage`, `reconfiguring`, `cc_*` | monitoring: stage index, switch in progress, per-core decode, stall and stream activity |

The weight buffer holds regions of 4-bit words. A full-slice region at base B has word
B + k·32 + t = W[k][row·512 + 16t + q] in lane q. A half-slice region at base B has word
B + k·16 + t = W[k][row·512 + 16(col·16 + t) + q]. With H = 1024 · 32 words:

| schedule | column 0 | column 1 |
|---|---|---|
| task-parallel | Wq full at 0 | Wv full at 0, Wk full at H |
| sequential | Wq half at 0, Wv half at H/2 | Wv half at 0, Wq half at H/2, Wk full at H |

The off-chip memory itself is not part of the RTL. The testbench environment `tb/intar_env.sv`
contains a behavioural model of it.

## What follows the published description, and what is this design's own

These parts follow the published description:

* the grid of compute cores, each with a scratchpad, a reconfigurable PE array, a reduction unit
  and data movement control;
* a static instruction buffer read by a global instruction reader;
* instructions made of a stage index and i/j/k loop bounds;
* the seq_len-dependent rewrite of the bounds;
* stage-indexed multiplexers in every core;
* the four single-cycle reconfiguration steps;
* the task-parallel (Q, V) then task-pipeline (K → A) schedule of the attention case study, and
  its sequential alternative (V, then Q, then K → A) with output redistribution;
* FIFOs between pipelined tasks;
* the zero-padded multi-precision operand selection inside the PE array;
* equal square output tiles (16 × 16).

These are choices made here, because the description leaves them open:

* all bit widths (int8 activations, 4-bit weights, 32-bit accumulators), the requantisation and
  the SHIFT value;
* how work is split inside a column, and therefore the use of the reduction links for A;
* in the sequential schedule, splitting each row's column tiles in half between the columns;
* the data layouts and the off-chip address map;
* one off-chip read port and one write port per core, with a fixed one-cycle read latency;
* the weight preload port;
* FIFO depth and the valid/ready handshake;
* broadcasting the instruction instead of forwarding it core to core;
* the all-cores-done barrier between stages;
* the 16 × 16 array size.

These are not built:

* The special function units. The case study needs none, and no design is given for softmax,
  GeLU or LayerNorm.
* The third dimension that the description gives the PE array.
* Schedules for other networks: feed-forward, CNN, VAE, gating network, and the full GPT-2
  layer.

Each of those networks would need its own instruction table and its own stage behaviour in
`decode_stage`. That is in the spirit of the approach, which builds each accelerator for one
application.

## How far it has been checked

Every module has a self-checking testbench in `tb/`. The main ones are:

* **`tb_intar_top`** runs the whole accelerator at reduced size (SEQ_MAX 32, hidden 128, 4 × 4
  PE arrays, FIFO depth 4) for L = 32 and then L = 16.
* **`tb_intar_seq`** does the same with the sequential schedule.
* **`tb_intar_full`** runs it at the default size for L = 256.

Both use `tb/intar_env.sv`, which does the following:

* generates random X and weights;
* computes Q, K, V and A with plain loops;
* checks every V and A word as it is written;
* checks that each word is written exactly once;
* checks the 4-cycle reconfigurations and the exact cycle count of the first stage;
* counts each mechanism and fails if any never happened. The mechanisms are the stage switch,
  task-parallel execution (or, for the sequential schedule, all cores on one task and every
  redistributed Q word), streaming, back-pressure stalls, stream-buffer waits and reduction
  waits.

Results are exact integer matches: 20,491 checks at full size. The full-size simulation takes
about 10 s of build time and 8 s of run time. The design is checked for functional correctness
in simulation only. It has not been placed, routed or timed on an FPGA.

## Simulating

With Verilator 5 (the package must come first):

```
verilator --binary --timing --assert -Irtl -Itb rtl/intar_pkg.sv tb/tb_intar_full.sv \
          --top-module tb_intar_full -Mdir obj_full -j 8
./obj_full/Vtb_intar_full
```

Any other testbench builds the same way. A run ends with a line
`TB_RESULT checks=N failures=M`.

To change the workload size, override the parameters of `intar_top`: SEQ_MAX, HIDDEN, N_ROWS,
PE_DIM, SHIFT and FIFO_DEPTH. SEQUENTIAL_QV selects the schedule. HIDDEN must be a multiple of N_ROWS · PE_DIM, and SEQ_MAX a
multiple of PE_DIM. With SEQUENTIAL_QV, HIDDEN must be a multiple of 2 · N_ROWS · PE_DIM. To change the schedule, edit the table in `config_inst_buffer` and the
`decode_stage` function in `intar_pkg`.
