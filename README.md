# Near-memory tensor gather-reduce for embedding training

Recommendation models keep their sparse features in large embedding tables.
A training step touches these tables three times:

1. **Forward gather-reduce.** Each sample looks up a few dozen table rows and
   sums them into one vector.
2. **Backward expand-coalesce.** Each sample's gradient vector is copied back
   to every row the sample looked up. The copies aimed at the same row are
   then summed. The usual implementation sorts the expanded copies, which
   writes and re-reads one full vector per lookup.
3. **Scatter.** Each coalesced gradient is added into its table row.

All three are bandwidth-bound vector moves with hardly any arithmetic. The
tables are far larger than a GPU's memory. So they belong in a memory node
with a small processing engine next to each DRAM rank.

The key observation behind this design is that step 2 can be rewritten as a
gather-reduce. The rewrite is called *Tensor Casting*. Sort the forward
lookup pairs (row, sample) by row. The sorted sample numbers tell which
gradient vector to gather. A running count of distinct rows tells which
output to reduce it into. The coalesced gradients then come out of a
gather-reduce over the gradient table, with no expanded copies. The
rewrite needs only the index arrays, which are small. It runs on the GPU
during the forward pass.

The near-memory hardware therefore needs only two vector instructions,
**gather-reduce** and **scatter**. Both run on one datapath: two input
queues, a vector adder and an output queue. A controller next to them
turns each instruction into DDR4 commands for its own rank.

This repository holds the SystemVerilog of that memory node: one such core
per rank, 32 ranks per node. The GPU, the DDR PHYs and the DRAM devices are
outside the RTL. The testbenches model the last two, and also the
Tensor Casting step.

## Tensor Casting, worked through

Take a batch of two samples. Sample 0 looks up rows 1, 2 and 4; sample 1
looks up rows 0 and 2. As (src, dst) pairs, where src is the table row and
dst is the sample:

```
forward   src: 1 2 4 0 2      dst: 0 0 0 1 1
```

The forward gather-reduce computes `R[dst] += E[src]`: R[0] = E1+E2+E4 and
R[1] = E0+E2.

For the backward pass, sort the pairs by src with a stable sort. The sorted
pairs are (0,1) (1,0) (2,0) (2,1) (4,0). Now form a casted pair for each
sorted pair:

- casted src = the pair's original dst, i.e. which gradient to read;
- casted dst = the number of distinct src values seen so far, minus one.

```
casted    src: 1 0 0 1 0      dst: 0 1 2 2 3      distinct rows: 0 1 2 4
```

A gather-reduce of the gradient table G with these pairs gives the
coalesced gradients C = G1, G0, G0+G1, G0. These belong to table rows 0, 1,
2 and 4. A scatter with pairs (k, row_k) then adds C[k] into E[row_k].

In the real system the casting runs on the GPU. Here it is the function
`tensor_cast` in `tb/tb_tcast_ref_pkg.sv`. `tb_nmp_core` runs this exact
example. It also checks the casted arrays against the numbers above, and it
checks the coalesced result against a plain expand-coalesce.

## Memory node (`nmp_memory_node`, top)

The node holds `N_RANKS` = 32 cores (`nmp_core`), one per rank. The
embedding tables are spread across the ranks, and every core works only on
its own rank's DRAM. The node's bandwidth therefore scales with the number
of ranks: 32 × 25.6 GB/s = 819.2 GB/s.

- **Instructions.** One instruction at a time arrives on `instr_*`. Its
  `rank` field selects the core. `instr_ready` is that core's ready, so
  instructions to different ranks run concurrently.
- **Host port.** Host beat reads and writes (`host_req_*`) carry a rank
  number and go to that core. Responses come back per rank on
  `host_rsp_valid[r]` / `host_rsp_data[r]`. A core takes host traffic only
  while it is idle.
- **PHY side.** Each rank's DDR4 command bus `cmd[r]` and read return
  `phy_rd_*[r]` are top-level ports, as are the per-rank `busy`, `done` and
  event vectors `ev[r]`.

## One rank's core (`nmp_core`)

```
                 in[src] beats  ┌──────────────┐
  DRAM reads ──┬───────────────►│ Input Q (I1) │──a──┐
               │                └──────────────┘     │   ┌────────────┐   ┌───────────────┐
               │ out[dst] beats ┌──────────────┐     ├──►│ vector ALU │──►│ Output Q (O)  │──► DRAM writes
               └───────────────►│ Input Q (I2) │──b──┘   │  16 × +32  │   └───────┬───────┘
                                └──────▲───────┘         └────────────┘           │
                                       └────── partial sum of a run ──────────────┘
                 local_mem_ctrl: index walker, pair sequencer, DDR4 scheduler
```

- **Queues.** I1, I2 and O are instances of `vec_queue`, a first-word-
  fall-through FIFO of `QDEPTH` = 8 beats of 512 bits.
- **Adder.** `vector_alu` adds 16 lanes of 32-bit integers (wrap-around)
  and registers the result once. When `zero_b` is set it takes b as zero
  and leaves I2 alone; this starts a new output row. The controller gates
  the adder (`alu_en`) so that it takes exactly the current pair's beats
  from I1.
- **Feedback path.** The path from O back into I2 carries a run's partial
  sum (see on-chip accumulation below).

## Instructions

| field       | bits | meaning |
|-------------|------|---------|
| `op`        | 2    | 0 NOP, 1 GATHER_REDUCE, 2 SCATTER |
| `rank`      | 5    | core that runs it |
| `row_beats` | 8    | embedding row length in 64-byte beats (a 64-dim row is 4) |
| `count`     | 32   | number of (src, dst) pairs |
| `idx_base`  | 31   | beat address of the packed index array |
| `in_base`   | 31   | table read by src |
| `out_base`  | 31   | table reduced or scattered into, by dst |

All addresses are beat addresses, i.e. byte address / 64. Row `i` of a
table starts at `base + i*row_beats`.

**Index array.** Pairs are packed 8 to a beat. Pair k of a beat sits at
bits `[64k +: 32]` (src) and `[64k+32 +: 32]` (dst).

**Gather-reduce.** Computes `out[dst] = Σ in[src]` over each *run*, i.e.
each block of consecutive pairs with equal dst. The first pair of a run
adds zero instead of the old `out[dst]`. Index arrays must therefore keep
equal dst values adjacent. Forward arrays do, because dst is the sample
number. Casted arrays do too, because their dst never decreases.

**Scatter.** Computes `out[dst] += in[src]` for every pair. It applies
coalesced gradients that the GPU has already multiplied by −learning-rate,
which makes it a plain SGD update.

The `out` array must not overlap `in` or the index array.

## Local memory controller (`local_mem_ctrl`)

This is the part with the most behaviour. It has two halves that run at the
same time, and a DDR4 back end.

### Index walker

The walker fetches one index beat at a time into a one-beat buffer. It
takes the pairs in order, and for each pair:

- issues the `row_beats` reads of `in[src]` into I1;
- pushes `(out row address, first-of-run flag)` into a 4-entry pair FIFO.

I1 reads are subject to a **credit check**: a read issues only if I1 has a
free slot once all reads still in flight are counted. Because the walker
can run up to four pairs ahead, the DRAM read latency of later pairs
overlaps the adding and writing of earlier ones. Without this look-ahead a
gather-reduce reached only about 30% of the rank bandwidth. With it, the
same gather-reduce reaches about 75%.

### Pair sequencer

The sequencer works on the pair at the head of the pair FIFO. It runs in
one of two modes, chosen per instruction.

**On-chip accumulation** is used for a gather-reduce whose rows fit the
queues (`row_beats ≤ QDEPTH`).

- **Pair ends.** A pair ends once all its sum beats sit in O. Nothing is
  written yet.
- **Run continues (`S_MOVE`).** If the next pair has the same dst, O is
  moved into I2, and that pair adds its gathered row to the partial sum.
- **Run ends (`S_FLUSH`).** If the next pair starts a new run, or the
  instruction ends, O is written to `out[dst]`.
- **Result.** Each output row is written exactly once and is never read.
  The casted backward pass thus reads each gradient once and writes each
  coalesced row once.

**Read-modify-write** is used for scatter, and for a gather-reduce with
longer rows.

- **Per pair.** The sequencer reads `out[dst]` into I2 (unless the pair
  starts a run), lets the adder combine I1 and I2 beat by beat, and writes
  each sum from O back to `out[dst]`.
- **Long rows.** Reads into I2 use the same credit check as I1. Rows of
  any length therefore stream through the 8-beat queues.
- **Ordering.** All writes of a pair are issued before the next pair's
  `out[dst]` read. The back end is in order, so a repeated dst always sees
  the newest value.

**Request priority.** Requests to the back end are granted in this order:
sum write, `out[dst]` read, index fetch, `in[src]` read. Writes go first,
so O drains and the adder never deadlocks against a full queue.

### DDR4 back end (`dram_sched`)

The back end turns beat requests into ACT, RD, WR and PRE commands.

- **Policy.** Strictly in order, at most one command per cycle, open-page:
  a row stays open until another row of the same bank is needed.
- **Timing counters.** Per-bank counters enforce tRCD, tRP, tRAS and the
  read-to-precharge and write-to-precharge gaps. Shared counters enforce
  tCCD and the write-to-read turnaround.
- **Read returns.** Read data returns in command order and is matched to
  its destination (index buffer, I1, I2 or host) through a tag FIFO.
- **Timing values.** The defaults are DDR4-3200 timings in 1600 MHz
  clocks: tRCD = tRP = 22, tRAS = 52, tCCD = 4, tRTP = 12,
  write-to-precharge 44, write-to-read 32. One 64-byte beat per tCCD = 4
  clocks at 1600 MHz is the rank's 25.6 GB/s.
- **Address map.** A beat address maps as `{row[19:0], bank[3:0],
  column[6:0]}`: 16 banks, 8 KB rank rows and 2^31 beats, i.e. 128 GB per
  rank.
- **Not modelled.** Refresh and bank-group timing are not generated.

### Events

Every core reports one-cycle event pulses (`nmp_ev_t`) for performance
counters:

- row activate, precharge, column read and column write;
- index fetch;
- pair starting a run (zero operand), read-modify-write pair, pair
  continued on chip;
- credit stall;
- host access.

## Measured behaviour

`tb_workload_rm` trains one table of RM1 (80 lookups per sample) and of RM3
(20 lookups per sample) on one core at default parameters. It uses batch
1024 and a 256-row table, with lookups skewed towards a few hot rows.

| phase | RM1 cycles | RM1 GB/s | RM3 cycles | RM3 GB/s |
|---|---|---|---|---|
| forward gather-reduce (81920 / 20480 pairs) | 1,805,358 | 19.4 | 504,016 | 18.0 |
| casted gather-reduce | 1,898,314 | 18.3 | 668,058 | 13.1 |
| scatter (256 rows) | 20,929 | 15.2 | 20,929 | 15.2 |

GB/s is DRAM traffic at 1600 MHz against a 25.6 GB/s peak.

- **Forward.** The forward table stays in open DRAM pages, so the forward
  pass comes closest to the peak.
- **Casted gather-reduce.** It reads the gradient table in random order
  across several DRAM rows per bank. The in-order, open-page back end pays
  a precharge and an activate on every row miss. A reordering scheduler
  would recover much of this; none is built here.

The same test sweeps the embedding size for RM3 at a batch of 128:

| row size | forward GB/s | casted GB/s | mode |
|---|---|---|---|
| 32-dim, 2 beats | 14.8 | 9.1 | on-chip accumulation |
| 64-dim, 4 beats (batch 1024) | 18.0 | 13.1 | on-chip accumulation |
| 128-dim, 8 beats | 20.1 | 18.5 | on-chip accumulation |
| 256-dim, 16 beats | 16.1 | 16.1 | read-modify-write |

- **Short rows.** With 2-beat rows the fixed per-pair work of the sequencer
  (state changes, the O-to-I2 move, the adder latency) takes longer than
  the two DRAM reads. That work, not DRAM, limits the rate.
- **256-dim rows.** These rows do not fit the queues. Every pair then also
  reads and writes its output row, which is correct but moves about three
  times the data.
- **Traffic.** For every case the test checks exact read and write counts,
  and it checks every result.

## Where this RTL departs from the source design, and why

- **Number format.** Elements are 32-bit wrap-around integers, not
  floating point. No number format is given, and integers keep the adder to
  one cell per lane and make results exact to check.
- **Optimiser.** Only plain SGD is built: the scatter adds a pre-scaled
  gradient. Optimisers with per-row state, such as Adagrad or RMSprop, would
  need more than an adder and are not implemented.
- **On-the-fly reduction.** How the local buffers reduce on the fly is not
  described. The O-to-I2 feedback, the 8-beat queue depth and the
  read-modify-write fallback for long rows are this design's own choices.
- **Own choices.** The instruction encoding, the index packing, the walker
  look-ahead, the DDR4 timing values, the address map and the host port are
  this design's own.
- **Outside the RTL.** The DDR PHY and DRAM devices are outside the RTL.
  `tb/ddr4_rank_model.sv` is a behavioural stand-in. It returns read data
  26 cycles after RD and flags protocol breaches.
- **Casting step.** Tensor Casting itself is GPU software. It exists here
  only as the testbench reference model.

## Files

| file | contents |
|---|---|
| `rtl/tcast_pkg.sv` | beat, address, instruction, command and event types |
| `rtl/vec_queue.sv` | FWFT FIFO (I1, I2, O, pair FIFO, read-tag FIFO) |
| `rtl/vector_alu.sv` | 16-lane adder with zero-operand select |
| `rtl/dram_sched.sv` | in-order open-page DDR4 command scheduler |
| `rtl/local_mem_ctrl.sv` | index walker, pair sequencer, host port |
| `rtl/nmp_core.sv` | one rank's core |
| `rtl/nmp_memory_node.sv` | top: 32 cores with rank routing |
| `tb/tb_tcast_ref_pkg.sv` | Tensor Casting reference, beat helpers |
| `tb/ddr4_rank_model.sv` | behavioural DDR4 rank + PHY |
| `tb/tb_*.sv` | self-checking testbenches |

## Testbenches

Every testbench checks its outputs against values computed independently
in the testbench. Each has a watchdog and ends by printing
`TB_RESULT checks=N failures=M`.

- `tb_vector_alu`, `tb_vec_queue`: random traffic against reference models,
  including back-pressure and full/empty corners.
- `tb_local_mem_ctrl`: host reads and writes, and a read stream that must
  issue one RD per tCCD. Also gather-reduce and scatter with short rows,
  with rows longer than the queues and with one-beat rows. It uses 4-deep
  queues so that credit stalls occur.
- `tb_nmp_core`: the worked example above, then random training steps.
- `tb_nmp_memory_node`: 4 ranks with 4-deep queues run a forward pass, a
  casted backward pass and a scatter concurrently. Half the ranks use rows
  that fit the queues and half use rows that do not, so both sequencer
  modes run. It counts and requires each mechanism: concurrency, activates,
  precharges, index fetches, zero-start runs, read-modify-write pairs,
  on-chip run continuation, credit stalls and host accesses.
- `tb_nmp_memory_node_full`: the same at the default size, with 32 ranks
  and no parameter overrides.
- `tb_workload_rm`: the measurements above, including exact DRAM traffic
  counts and bandwidth floors (60% of peak forward, 40% casted, for rows of
  4 or more beats that fit the queues).

To simulate, for example the node test, with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb --top-module tb_nmp_memory_node \
  rtl/tcast_pkg.sv tb/tb_tcast_ref_pkg.sv rtl/vec_queue.sv rtl/vector_alu.sv \
  rtl/dram_sched.sv rtl/local_mem_ctrl.sv rtl/nmp_core.sv rtl/nmp_memory_node.sv \
  tb/ddr4_rank_model.sv tb/tb_nmp_memory_node.sv
./obj_dir/Vtb_nmp_memory_node
```

Lower-level tests need only the files below their unit. Packages go first.
With `-Wall`, Verilator also lists some unused bits (for example the rank
field inside a core, which only the node uses).
