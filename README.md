# PipeRec ETL engine: a streaming FPGA stage between training data and the GPU

Training a recommender model (a DLRM-style network) needs its raw click logs
transformed first: dense counters are clipped and log-scaled, sparse
categorical ids are parsed from hex strings, folded into a bounded range and
then replaced by dense vocabulary indices. On CPUs this extract-transform-load
(ETL) step is far slower than the GPU that consumes its output. This design
does the transformation on an FPGA, in a stream: column data flows from
memory or the network through a fixed chain of operators and lands, already
batched, in the GPU's staging buffers. Nothing is written back in between,
and the GPU paces the FPGA through buffer credits.

The RTL here is the FPGA side of that system, as described in the PipeRec
paper ("Accelerating Recommender Model ETL with a Streaming FPGA-GPU
Dataflow"). It is written from that description and is not the authors'
code. Where the paper states a behaviour, the RTL follows it; where the paper
is silent, the choice made here is said so, in this document and at the top of
each source file.

## Data as it moves through the engine

Data is columnar. A column of one feature is stored as consecutive **words**
of 64 bytes, and each word holds **W = 8 lanes** of 64 bits, so one word is
eight rows of one column. Every stage handles one whole word per cycle.

| column kind | lane content at the input | lane content at the output |
|---|---|---|
| dense  | float32 in bits 31:0 | float32 `ln(1 + max(x, 0))` in bits 31:0, upper half zero |
| sparse | 8 ASCII hex characters, first (most significant) digit in byte 0 | vocabulary index (or, in bypass, `value mod range`), zero-extended |

Next to the data, every word carries a small sideband (`word_user_t` in
`piperec_pkg`): whether the column is sparse, its column number (10 bits), and
a `last` flag on the final word of a stream. The sideband selects the
operator path and the vocabulary table. It also tells the batch packer where a
stream ends.

Work is handed to a pipeline as **column descriptors** (`desc_t`). Each one
gives a virtual address, a length in words, the sparse flag, the column
number, the end-of-stream flag, and whether the column lives in remote
memory (and so is read over the network port).

## One pipeline

```
 descriptors                                               GPU staging buffers
     |                                                           ^
 dma_source --> stage_a --------------------> vocab_unit --> batch_packer
 (reads,         clamp_op -> log_op      (dense)   |               |   ^
  bursts,        hex2int_op -> modulus_op (sparse) vocab_table     |   credit_return
  credits)                                                      done_* (completions)
```

`etl_pipeline` is one such chain; it is what one dynamic region of the FPGA
would hold. All links are valid/ready. When the GPU withholds a credit, the
packer refuses input and the stall travels back through the stages to the
DMA engine, which then stops issuing reads. Nothing is dropped and nothing
overflows.

### Data source (`dma_source`)

The DMA engine turns a descriptor into read bursts of up to `BURST` = 64
words on the local port, or on the network port for remote columns. It keeps
a receive FIFO of `MAX_OUTSTANDING x BURST` words. A burst is issued only
when the FIFO can hold all of it, so the memory side never has to be
back-pressured mid-burst. At most four bursts are in flight. A switch from
one port to the other waits until every earlier burst has returned, which
keeps words in order without a reorder buffer. Each returning word is tagged
with the descriptor's sideband.

### Stateless stage (`stage_a`)

The four stateless operators are fused into one stage that accepts a word
every cycle. Every word enters both paths:

* **dense**: `clamp_op` (negative to +0; NaN passes) and then `log_op`,
  giving `ln(1 + x)`;
* **sparse**: `hex2int_op` (eight characters to a 32-bit value) and then
  `modulus_op`, giving `value mod divisor`.

The dense path is 1 + 23 = 24 cycles long. The sparse path is 1 + 32 = 33
cycles. The dense path is padded to 33 so both results of a word leave
together, and the word's sideband selects one of them. The whole stage moves
on one enable, `en = !out_valid || out_ready`, so a stalled consumer freezes
it in place.

**Logarithm.** The paper only says that a hardware math library computes it
at one word per cycle. Here each lane goes through these steps:

1. The lane forms `y = x + 1` and splits it into exponent `E` and a mantissa
   `m` in [1, 2).
2. It takes `log2(m)` one bit per stage by repeated squaring: square `m`; if
   the result is at least 2, the next bit is 1 and the result is halved. This
   runs for `FRAC_BITS` = 20 stages.
3. It forms `E + log2(m)` and multiplies it by ln 2 (Q0.32 constant
   `0xB17217F8`).
4. It renormalises the result to float32.

The result is truncated. Its error is about 1e-6 absolute for small results
and below 2e-5 relative. The logarithm is natural: the paper's worked example
maps 17 to 2.89.

**Modulus.** This is a 32-stage restoring divider, one quotient bit per stage,
and it keeps only the remainder. The divisor is a run-time register (the
"range" that sizes the vocabulary). A divisor of 0 leaves values unchanged.

**Hex2Int.** Upper- and lower-case digits are accepted. Any other character
counts as 0 and raises a per-lane flag (`bad_hex`).

### Vocabulary (`vocab_unit`, `vocab_table`)

This is the stateful part, and the one that shapes the pipeline's rate. A
vocabulary gives each distinct value of a sparse column a dense index, in the
order values are first seen. Building it (**fit**, VocabGen) takes one pass
over the data. Using it (**apply**, VocabMap) takes a second pass, which
replaces each value by its index. Pipelines without vocabularies (the paper's
Pipeline I) run the unit in **bypass**, where every word passes through
unchanged.

The table has one entry per (column, value) pair: `NUM_COLS x DEPTH` =
26 x 8192 entries. Because Modulus has already bounded the values, the value
itself is the address and no hashing is needed. An entry is a valid bit and
an index of `clog2(DEPTH) + 1` bits. The table is a single-port-read,
single-port-write RAM with a registered read: it is on-chip BRAM.

A sparse word is handled lane by lane against this one table. The lanes are
broadcast onto the table one after another, and the indices are gathered back
into the same lane positions before the word leaves:

* **fit**: each lane does two things in two cycles. Cycle 1 reads the entry.
  Cycle 2 either uses the stored index or writes the column's next free index
  and uses that. The write has to land before the next lane's read; that
  read-after-write is the reason for the initiation interval of 2 that the
  paper reports for on-chip tables. A sparse word takes 2W + 2 = 18 cycles.
* **apply**: reads are pipelined, one lane per cycle (the paper's II of 1). A
  sparse word takes W + 2 = 10 cycles.

Dense words pass through the unit in one cycle in every mode. In fit mode the
unit also emits the indices it assigns, so a fit pass produces the same
output an apply pass would.

Values without an index get the **OOV** marker, which is all ones in the
index width (`0x3FFF` at the default size). This happens in three cases:

* In apply mode, the value was never seen during fit. This counts as a
  *miss*.
* The value is `>= DEPTH`, because the Modulus range was set larger than the
  table. This counts as an *overflow*.
* The column has used all `DEPTH` indices. This also counts as an overflow.

The unit also counts new entries.

After reset, and on `vocab_clear`, the table clears itself by writing one
entry per cycle, with `vocab_busy` high throughout. At the default size this
takes 212,992 cycles, about 1.07 ms at 200 MHz. Start a fit only after
`vocab_busy` has fallen.

Three vocabulary behaviours follow the paper: the fit-then-apply passes, the
first-appearance order, and the two on-chip IIs. The rest is this design's
choice:

* the per-column index origin 0;
* the OOV marker;
* the clear sweep;
* serialising the lanes onto one table. The paper speaks of partitioning the
  stream across P parallel lanes and of an optional off-chip table, and
  neither is built here.

### Batch packer and GPU rate matching (`batch_packer`)

The GPU owns `N_BUF` = 2 staging buffers (double buffering). The packer holds
one credit per free buffer, and both credits are free after reset. With a
credit in hand it writes the next `BATCH_WORDS` = 16384 words (1 MiB) to
consecutive addresses of the next buffer in turn, in write bursts of 64
beats. A batch ends early on a word with `last`. At the end of each batch the
packer raises `done_valid` for one cycle, together with the buffer number, the
word count and whether the batch ended the stream. The GPU copies the buffer
out and returns the credit with a one-cycle `credit_return` pulse. While no
credit is free, input is refused and `stall_cycles` counts up. This is the
mechanism by which a slower trainer slows the ETL engine down. Double
buffering and writing only into buffers the GPU has released follow the
paper. Batch size, burst length and the completion format are choices made
here.

## Sharing the card: `piperec_top`

The top holds `N_PIPES` pipelines (default 1; the paper runs up to 7). They
share two ports:

* **local arbiter** (`rdwr_arbiter`): reads of on-board or host memory and
  batch writes toward the GPU. It passes through the MMU (`mmu_tlb`) to the
  shell's memory port. Read requests are granted round-robin, one per cycle.
  An order FIFO records which pipeline owns each request, so the in-order
  read data can be routed back. A pipeline granted the write side keeps it
  until the last beat of its burst.
* **network arbiter**: a second `rdwr_arbiter`, for reads of remote memory
  through the RDMA stack. Its write side is unused.

The MMU has a fully associative TLB: 16 entries of 2 MiB pages, filled by the
control plane. It translates read and write addresses combinationally. A
miss passes the address through untranslated and counts in
`tlb_miss_count`, because page-fault handling is the shell's job. Network
reads are not translated.

The shell, the RDMA stack, HBM, host memory, the GPU and the CPU control
plane are outside this RTL. Their signals are the top's ports: the
per-pipeline control registers and descriptor stream, the TLB fill port, the
memory port, the network port, per-pipeline credits in and completions out,
and status counters.

### Running a job

1. Release reset. Fill the TLB for the pages that hold the input columns and
   the staging buffers. Wait for `vocab_busy` to fall.
2. Set `divisor` (the Modulus range, e.g. 8192 for 8K vocabularies), set
   `buf_base` (the two staging buffer addresses), and set `mode`.
3. Push one descriptor per column. Mark the last one with `last`.
4. For each `done_valid`, consume the buffer and pulse `credit_return`.
   `done_last` marks the end of the stream.
5. Change `mode` only between streams, after `done_last`. For a stateful
   pipeline the sequence is: fit over the training data, then apply.

## Rates and latencies (default parameters)

| path | rate | latency |
|---|---|---|
| `stage_a`, any word | 1 word / cycle | 33 cycles |
| `vocab_unit`, dense word or bypass | 1 word / cycle | 1 cycle |
| `vocab_unit`, sparse word, fit | 2 cycles / lane | 18 cycles |
| `vocab_unit`, sparse word, apply | 1 cycle / lane | 10 cycles |
| `batch_packer` | 1 word / cycle while a credit is held | combinational to the write port |
| `dma_source` | 1 word / cycle when memory keeps up | memory latency + FIFO |
| vocabulary clear | 1 entry / cycle | 212,992 cycles |

At 200 MHz a stateless pipeline moves 64 B x 200 MHz = 12.8 GB/s. A
stateful pipeline runs at that rate on dense columns. On sparse columns it
runs at 1/W of that in apply and 1/(2W) in fit, because of the single shared
table.

## Capacity against the paper's workloads

| workload | at the defaults |
|---|---|
| Criteo Kaggle (13 dense + 26 sparse, 45M rows), stateless | yes |
| same, 8K vocabularies (26 x 8192 entries, about 3.2 Mbit on chip) | yes |
| same, 512K vocabularies (26 x 512K entries, about 36 MB) | no: off-chip tables are not built |
| synthetic (504 dense + 42 sparse), stateless | yes (10-bit column number) |
| synthetic, with vocabularies | no: needs `NUM_COLS = 42` (parameter change) or off-chip tables for 512K |
| Criteo 1TB (same layout, about 4.4 billion rows), stateless or 8K | yes: streamed, descriptor lengths fit in 32 bits |
| 2, 4 or 7 concurrent pipelines | set `N_PIPES`; 2 and 7 are simulated |

## Where this departs from the paper

* **No off-chip vocabulary.** The paper can place large tables in HBM, at an
  II of about 6. Only the on-chip table is built, so Pipeline III (512K
  entries per column) is not supported.
* **One vector lane per pipeline.** The paper's dataflow splits the input into
  W-wide vectors processed across N parallel lanes, without giving N. Here
  each pipeline handles one W = 8 word per cycle, which is N = 1. More
  processing in parallel comes from more pipelines (`N_PIPES`), within the
  memory-port limit described below.
* **No parallel vocabulary partitions.** The paper mentions partitioning a
  column across P parallel units. Here one table is shared by all eight lanes
  of a word, which caps stateful sparse throughput at one lane per cycle
  (apply) or one per two cycles (fit).
* **Formats chosen here.** The hex string layout, the float32 dense format,
  the descriptor, the OOV marker, the completion record, batch size and
  burst sizes are this design's choices.
* **Interfaces left out.** The shell (Coyote), the RoCE/RDMA stack, the
  memories, the GPU and the CPU-side planner that compiles a pipeline
  description into this hardware are interfaces only. Partial
  reconfiguration is represented by the `N_PIPES` parameter: each pipeline is
  the content of one dynamic region.
* **One memory port.** All pipelines share one 64-byte-per-cycle memory port
  (12.8 GB/s at 200 MHz), plus the network port. The paper's card has 32 HBM
  channels and a PCIe link behind its shell. Spreading the traffic over
  several channels is the shell's job and is not modelled, so this top cannot
  show the paper's linear scaling from 1 to 4 pipelines by itself.
* **Clock frequency** (200 MHz in the paper; 150 MHz with 7 regions) is not
  something RTL can state. No timing closure has been done on this code.

## Verification

Every module has a self-checking testbench in `tb/` (`tb_<module>.sv`). Each
one compares against a reference model written independently in the
testbench, drives random traffic with random back-pressure (`$urandom`), has
a watchdog, and ends with a `TB_RESULT checks=N failures=M` line.

* **Operators.** Each is checked against real arithmetic or integer
  references, including the paper's worked row:
  `0xbe589b51, 0, 17, -1 -> 39761, 0, 2.89, 0` with range 65536. The stage
  is also checked for one word per cycle.
* **`tb_vocab_unit`.** Checks fit, apply and bypass against a dictionary
  model, the OOV and overflow cases, the counters, and the 18- and 10-cycle
  word timings.
* **`tb_etl_pipeline`.** Runs one pipeline through bypass, fit and apply
  passes with models of memory and of the GPU. The GPU model checks every
  batch word by word.
* **`tb_piperec_top`.** Runs two concurrent pipelines at small sizes. It
  counts each mechanism and fails if any never occurs: credit stall, both
  buffers in use, short batch, bypass, fit, apply, mode switch, overflow,
  miss, network read, read and write arbitration contention, TLB hit and TLB
  miss.
* **`tb_piperec_full`.** Runs the top at its default parameters through the
  212,992-cycle clear and three jobs:
  * a stateless job of 16,500 words, giving one full 1 MiB batch and one
    short batch;
  * a fit job in the Criteo layout: 13 dense and 26 sparse columns, range
    8192;
  * an apply job on new data.
  It takes about one second in Verilator.

* **`tb_piperec_concurrent`.** Runs seven pipelines (`N_PIPES = 7`, every
  other parameter at its default), each running the stateless pipeline on
  the wide 504 dense + 42 sparse layout, one word per column. Three of the
  pipelines read a column over the network. Every output word is checked.

To simulate with Verilator 5 (here the end-to-end test; the others take the
files they need in the same way):

```
verilator --binary --timing --assert -Irtl rtl/piperec_pkg.sv \
  rtl/delay_line.sv rtl/clamp_op.sv rtl/log_op.sv rtl/hex2int_op.sv \
  rtl/modulus_op.sv rtl/stage_a.sv rtl/vocab_table.sv rtl/vocab_unit.sv \
  rtl/sync_fifo.sv rtl/dma_source.sv rtl/batch_packer.sv rtl/etl_pipeline.sv \
  rtl/rdwr_arbiter.sv rtl/mmu_tlb.sv rtl/piperec_top.sv \
  tb/tb_piperec_top.sv --top-module tb_piperec_top
./obj_dir/Vtb_piperec_top
```

The testbenches are two-state safe: every register that is read is reset.
The exceptions are the RAM contents and the RAM read register, which the
clear sweep and the read enable cover.

## Files

| file | role |
|---|---|
| `piperec_pkg.sv` | word, lane, sideband, descriptor, request and mode types |
| `clamp_op.sv`, `log_op.sv`, `hex2int_op.sv`, `modulus_op.sv` | stateless operators on one word |
| `delay_line.sv` | register pipeline that pads the shorter operator path |
| `stage_a.sv` | fused stateless stage |
| `vocab_table.sv`, `vocab_unit.sv` | vocabulary memory and VocabGen/VocabMap operator |
| `sync_fifo.sv` | receive buffer of the DMA engine and order FIFO of the arbiter |
| `dma_source.sv` | read DMA engine (memory / network) |
| `batch_packer.sv` | batching and credit-based GPU rate matching |
| `etl_pipeline.sv` | one pipeline |
| `rdwr_arbiter.sv`, `mmu_tlb.sv` | shared memory access |
| `piperec_top.sv` | N pipelines with the local and network arbiters and the MMU |
