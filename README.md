# Sparse stream semantic registers: an RTL model of the SSSR streamer

A stream semantic register (SSR) turns a floating-point register into a port onto memory. When
the core reads `ft0`, it gets the next element of a stream that a small address generator fetches
in the background. When it writes `ft2`, the value is stored at the next address of another
stream. With loads and stores gone from the loop body, a single-issue core can keep its FPU busy
every cycle on dense kernels. Sparse linear algebra breaks this model in two places:

* **Indirection.** `y += a[i] * b[idx[i]]` needs addresses that come from memory.
* **Index matching.** A sparse-sparse product needs the *intersection* of two index lists, and a
  sparse-sparse sum needs their *union*. The number of result elements is unknown when the loop
  starts.

The sparse SSR (SSSR) extension solves both in the streamer itself:

* An **indirection SSR (ISSR)** fetches an index array and turns the indices into data addresses.
* Two ISSRs can feed an **index comparator**. It walks both index lists in lockstep. For each pair
  of head indices it tells each ISSR to emit its element, skip it, or insert a zero.
* An **egress SSR (ESSR)** writes the resulting joint index list back to memory, next to the
  values the core computes.
* A one-bit **stream-control queue** tells the core's hardware loop when the joint stream ends, so
  the loop body runs exactly once per result element.

This repository holds synthesizable SystemVerilog for that streamer in its default configuration:

* ISSR 0 on `ft0`, ISSR 1 on `ft1`, and the ESSR on `ft2`;
* one index comparator with its stream-control queue;
* the register switch that redirects FPU register accesses to the lanes;
* self-checking testbenches for every block and for the whole streamer.

The host core, the FPU, the hardware loop and the cluster memory are not part of it. Their
connections are the streamer's ports.

## Structure

```
               cfg port (host core)                 FPU register file ports
                     |                                  R0 R1 R2     W
           +---------+----------+                        |  |  |     |
           | lane demux cfg_addr[6:5]                 +-------------------+
           v         v          v                     |   reg switch      |  ft0 -> lane 0
      +--------+ +--------+ +--------+  rego/regi     |  (sssr_reg_switch)|  ft1 -> lane 1
      | ISSR 0 | | ISSR 1 | |  ESSR  | <------------> +-------------------+  ft2 -> lane 2
      +--------+ +--------+ +--------+
       |  cmp       cmp |     ^ joint idx
       |   +----------+ |     |
       +-->| idx cmp  |<+-----+         seq (1 bit per joint element, 0 at end) -> hardware loop
           +----------+ -- ctrl FIFO -->
       |          |          |
      mem0       mem1       mem2        one memory port per lane
```

| Module | Role |
|---|---|
| `sssr_pkg` | Widths, types, enums, request structs and the configuration register map. |
| `sssr_streamer` | Top level. It holds three lanes, the comparator and the register switch. |
| `sssr_issr` | ISSR: indirection address generator, data mover and port arbiter. |
| `sssr_essr` | ESSR: egress address generator, data mover and port arbiter. |
| `sssr_indir_addrgen` | Affine, indirect and index-matching address generation. |
| `sssr_egress_addrgen` | Affine mode, or joint-index writeback plus unit-stride data addresses. |
| `sssr_cfg_regs` | Shadow and runtime configuration copies, and job launch. |
| `sssr_affine_iter` | Four nested loops advancing one address pointer. |
| `sssr_idx_serializer` | Cuts 64-bit index words into 8/16/32/64-bit indices. |
| `sssr_idx_coalescer` | Packs indices back into strobed 64-bit word writes. |
| `sssr_data_mover` | Data queue between register side and memory, with zero injection and repetition. |
| `sssr_mem_arb` | Round-robin merge of the index port and the data port. |
| `sssr_idx_cmp` | Intersection/union decision and the stream-control queue. |
| `sssr_reg_switch` | Redirects `ft0`/`ft1`/`ft2` accesses to the lanes when enabled. |
| `sssr_fifo` | Generic fall-through queue used throughout. |

## Programming a lane

Every lane has the same word-addressed register file. The streamer's configuration address is
`{lane[1:0], reg[4:0]}`: lane 0 is ISSR 0, lane 1 is ISSR 1 and lane 2 is the ESSR.

| reg | name | access | meaning |
|---|---|---|---|
| 0 | status | R | bit 0: a job runs; bit 1: a job waits in the shadow registers |
| 1 | repeat | RW | each read element is presented `repeat + 1` times |
| 2..5 | bound[0..3] | RW | iterations − 1 of loop level k |
| 6..9 | stride[0..3] | RW | byte increment applied when level k increments (see below) |
| 10 | idx_cfg | RW | [1:0] index size 8/16/32/64 bit, [3:2] mode affine/indirect/intersect/union, [7:4] index shift, [8] egress (write back the joint indices) |
| 11 | idx_base | RW | byte address of the index array, aligned to the index size |
| 12 | joint_len | R | ESSR only: number of elements of the last joint stream |
| 16..19 | rptr[d] | W | data base address; launches a **read** job with d+1 loop levels |
| 20..23 | wptr[d] | W | data base address; launches a **write** job with d+1 loop levels |

**Shadowed launch.** All writes go to a shadow copy. Writing a pointer register marks the shadow
job *pending*. A pending job is copied into the runtime copy in the cycle the running job ends,
with no gap. The next job can therefore be set up while the current one streams, and sparse
kernels that start a job per matrix row depend on this. While a job is pending, further writes
to that lane stall through `cfg_ready_o` until the job starts.

**Relative strides.** The affine iterator keeps one address pointer. When loop level k
increments, and all lower levels wrap, the pointer grows by `stride[k]`. To walk an array with
absolute per-level strides `S[k]`, program the following:

    stride[k] = S[k] − Σ_{j<k} bound[j]·S[j]

For example, for a 4×3 block of a row-major matrix with 64-byte rows:

* `bound0 = 3`, `stride0 = 8`;
* `bound1 = 2`, `stride1 = 64 − 3·8 = 40`.

**Index jobs.** In the indirect, intersect and union modes, `bound0` holds the number of indices
minus one. The other loop registers are not used.

## How indices become addresses (ISSR)

The index path is the most involved part of the design:

```
 affine iter --> index word requests --(arbiter)--> memory
   (walks idx_base .. end, 8-byte steps)               |
                                                       v
 credit: outstanding + queued < IdxFifoDepth   index word FIFO (2 words)
                                                       |
                                             index serializer (slot pos, size)
                                                       |
                       +------------------------------+------------------+
                       | indirect                                        | intersect / union
          data_base + (idx << shift)                     head index + end marker -> comparator
                       |                                 operation <- emit / skip / zero / end
                       v                                 address = data_base + 8·element
               address token queue (2)  -----------------------------------------------
                       |
                       v
                  data mover
```

* **Word-wise index fetch.** The lane never reads single indices. It reads whole 64-bit words, so
  one bus beat brings 8, 4, 2 or 1 indices. At launch, the affine iterator is reprogrammed to walk
  the words from `idx_base & ~7` to the word holding the last index.
* **Credit.** A word request is only sent while the outstanding requests plus the words already
  queued are fewer than the queue depth. A response therefore always has room, and memory
  responses never need backpressure.
* **Alignment.** The index array may start anywhere, as long as the address is aligned to the
  index size. The serializer starts at slot `(idx_base mod 8) / size` of the first word. It
  releases a word after its last slot, or after the job's final index.
* **Shift and base.** Each index is shifted left by `idx_shift` and added to the data base. A
  shift of 3 indexes an array of doubles. Larger shifts step over power-of-two-sized rows of a
  tensor, with no multiplier.
* **Match modes.** The indices go to the comparator instead. The lane keeps an element counter,
  and its data addresses simply count up from the data base in 8-byte steps: one value per index.
  The comparator answers each index with one of four operations:
  * **emit**: produce the element's address and advance;
  * **skip**: advance without an address;
  * **zero**: produce a zero token without advancing;
  * **end**: accepted once the serializer is exhausted, which ends the job.
* **Tokens.** The address token `{addr, zero, write, reps}` leaves through a small queue
  (`TokDepth`, 2 entries), one per cycle. The comparator's operation is accepted whenever the
  queue has room. The tokens leave at the port rate. With a single register, the comparator would
  lose a step each time a token waited for the port. An all-match intersection would then drop
  from 1.25 to 1.5 cycles per pair.

## Joining two index streams (comparator)

Each cycle, the comparator looks at both ISSR heads. Each head is an index or an end marker. The
mode comes from ISSR 0's configuration (intersect or union), and both ISSRs must be in a match
mode.

| heads | intersection | union | joint stream |
|---|---|---|---|
| both ended | end / end | end / end | end marker, ctrl bit 0 |
| a = b | emit / emit | emit / emit | index a, ctrl bit 1 |
| a < b, or b ended | skip / – | emit / zero | union: index a, ctrl bit 1 |
| a > b, or a ended | – / skip | zero / emit | union: index b, ctrl bit 1 |

A step happens in one cycle, and only when every participant can take it. The participants are:

* each ISSR that receives an operation (its ready does not depend on the operation);
* the ESSR, if the joint index is to be written back;
* the stream-control queue, if a bit is pushed.

There are no partial steps, so the lanes can never disagree about the position in the joint
stream.

The **stream-control queue** holds a 1 for every joint element and a final 0. A hardware loop in
"stream-controlled" mode pops one bit per iteration and stops at the 0. The core thus runs
`fmul`/`fadd` exactly once per result element without knowing the count in advance.

**Intersection.** The ISSRs only produce data for matching indices. The core sees equal numbers of
elements on `ft0` and `ft1`.

The published speed of an intersection is one cycle per nonzero when no index matches. When every
index matches, it is 1.25 cycles per pair, because a matching element still costs a data read
next to the shared index reads. This design reaches both rates with 16-bit indices on a memory
without stalls:

* 200 matching pairs take 255 cycles;
* 2 × 200 indices without a single match take 404 cycles.

**Union.** Every joint element produces a value on both `ft0` and `ft1`. A lane that does not hold
the index supplies a zero, which the data mover injects without touching memory. So
`fadd.d ft2, ft0, ft1` computes the sparse sum.

## Writing joint indices back (ESSR)

With its mode set to intersect or union, the ESSR takes the joint index stream from the
comparator. It works as follows:

* The **coalescer** packs the indices at the configured size into 64-bit words with byte
  strobes. Each full word is written through the lane's index port. At the end marker, the final
  partial word is written too.
* For every index, one data address is pushed into a **lead queue** of `IdxLead` (4) entries.
  The addresses count up from the data base. The data mover pairs them with the values the core
  writes to `ft2`.
* Because of the lead queue, index writing can run ahead of the computed values by up to four
  elements. The comparator is not held back by the FPU pipeline.
* At the end marker, the element count is stored in `joint_len` (reg 12). The core reads it to
  learn the length of the result vector.

The ISSR's `egress` bit (idx_cfg[8]) decides whether the comparator forwards the joint stream to
the ESSR.

## Data mover

Each lane has one data queue of four 64-bit entries. The queue serves either direction:

* In a read job, memory responses enter it and the core pops them through `rego`.
* In a write job, the core pushes through `regi`, and each value leaves with the next write
  address token.

The queue changes direction only when it is empty.

A small **tag queue** keeps read elements in order. It holds one entry `{zero, reps}` per read
element that is requested or queued. A zero element gets a tag but no memory request, and at the
head of the queue it is presented as 0. Read tokens are accepted only while the tag queue has
space. That space limit bounds the reads in flight, so the data queue can never overflow. An
element with `reps = r` is presented `r + 1` times before it is popped. This is used, for
example, to reuse an 8-bit-indexed value several times.

## Memory ports and throughput

Each lane has one memory port. Inside the lane, a round-robin arbiter merges the index port (input
0) and the data port (input 1). The priority moves to the other input after every grant.

The memory protocol is as follows:

* Requests use a valid/ready handshake.
* Reads are answered in order by a response strobe, one or more cycles later.
* Writes are posted and get no response.

The arbiter keeps a queue of up to `MaxReads` (8) requester ids, which routes each read
response back to the index side or the data side.

Index and data share the port, so an indirect stream needs one index word per n data words, with
n = 64 / index width. The data side can then use at most n/(n+1) of the port cycles:

| index width | n | limit | cycles per element | measured (120 elements, memory without stalls) |
|---|---|---|---|---|
| 32 bit | 2 | 67 % | 1.5 | 177 cycles (limit 178) |
| 16 bit | 4 | 80 % | 1.25 | 148 cycles (limit 148) |
| 8 bit | 8 | 89 % | 1.125 | 132 cycles (limit 133) |

Affine streams do not use the index port and run at one element per cycle.

## Register switch

The switch maps `ft0`, `ft1` and `ft2` to lanes 0, 1 and 2 while `ssr_en_i` is set. It has two
sides:

* **Reads.** The FPU issue logic presents its three operand register indices (`rd_addr`,
  `rd_en`). For each stream register it gets back `rd_is_ssr` and a `rd_valid` to stall on. When
  the instruction issues (`rd_done`), the lane is popped.
* **Writes.** The result write (`wr_*`) is steered into the lane's `regi` port, and `wr_ready`
  carries the lane's back-pressure.

Naming one stream register twice in a single instruction is not supported. An assertion flags it.

## Parameters

| Parameter | Default | Where set | Meaning |
|---|---|---|---|
| `DataWidth` | 64 | package | data and memory word width |
| `AddrWidth` | 17 | package | byte address width (128 KiB data memory) |
| `NumLoops` | 4 | package | affine loop levels |
| `DataFifoDepth` | 4 | streamer | data queue entries per lane |
| `IdxFifoDepth` | 2 | streamer | index words queued per ISSR (own choice) |
| `TokDepth` | 2 | address generator | address tokens queued towards the data mover (own choice) |
| `IdxLead` | 4 | streamer | elements the ESSR's index writing may lead by (own choice) |
| `CtrlDepth` | 4 | streamer | stream-control queue entries (own choice) |
| `MaxReads` | 8 | streamer | outstanding reads per lane port (own choice) |
| `BoundWidth` | 16 | package | loop bound width: 65536 iterations per level (own choice) |
| `IdxWidth` | 32 | package | internal index width; 64-bit indices are truncated (own choice) |
| `RepWidth` | 8 | package | repetition counter width (own choice) |

The widths, the four loop levels and the four data queue entries follow the published default
streamer. That streamer synthesizes to about 30 kGE in a 12 nm process: 9.7 kGE per ISSR and
8.8 kGE for the ESSR. The other defaults above are this design's own.

A 17-bit address covers a 128 KiB scratchpad. That is enough for the cluster kernels, which
stream matrix chunks through that memory. It is not enough for the largest single-core
benchmarks run on the original architecture, which assume the whole matrix is held in local
memory.

## Where this design departs from, or fills in for, the published architecture

* **Own choices.** The following were left open and are this design's own:
  * the register map and the launch-by-pointer-write convention;
  * the relative stride encoding;
  * all handshakes, including the comparator/lane protocol with its end marker;
  * the tag-queue scheme in the data mover;
  * the lead-queue structure in the ESSR;
  * the single-cycle comparator step;
  * the `joint_len` register.
* **Stalling shadow writes.** Writing the shadow registers while a job is already pending stalls
  the core. A design with a deeper job queue would not need to.
* **Egress bit.** Whether the joint stream goes to the ESSR is set by a bit in ISSR 0's
  configuration. The comparison mode is likewise taken from ISSR 0.
* **64-bit indices.** They are accepted and serialized, but only their low 32 bits are used.
  That is still far beyond the 17-bit address space.
* **Three memory ports.** The streamer exposes one memory port per lane. In the published
  cluster, the first ISSR shares its port with the core's own load/store port, and the other two
  lanes have ports of their own. That merge belongs to the core complex, which is not modelled
  here.
* **Not built.** These are prior work or external:
  * the Snitch core and FPU;
  * the FREP hardware loop, including its stream-controlled mode, which this design only feeds
    through `seq_*`;
  * the cluster interconnect and memory banks;
  * the DMA engine and its control core;
  * the instruction cache and the shared multiplier;
  * the DRAM.

## Verification

Every block has a self-checking testbench in `tb/`. Each one compares against a reference
computed in the testbench, stops itself with a watchdog, and ends by printing
`TB_RESULT checks=N failures=M`.

| Testbench | What it establishes |
|---|---|
| `tb_sssr_fifo` | Random push and pop against a queue model. |
| `tb_sssr_affine_iter` | 1- to 4-level jobs against `base + Σ i_k·S_k`; last flag; one address per cycle. |
| `tb_sssr_idx_serializer` | All index sizes, start slots and counts against indices read from the same bytes. |
| `tb_sssr_idx_coalescer` | All sizes at unaligned bases under backpressure; no stray bytes written. |
| `tb_sssr_indir_addrgen` | 2-D affine job with repetition; indirect jobs of all sizes and shifts; match jobs under a random comparator; outstanding index fetches never exceed the queue depth. |
| `tb_sssr_egress_addrgen` | Joint index writeback, data tokens, joint length, lead bound, affine mode. |
| `tb_sssr_data_mover` | Read/zero/repeat/write jobs against a memory model; no memory request for zeros. |
| `tb_sssr_mem_arb` | Response routing, unchanged requests, strict alternation under contention. |
| `tb_sssr_issr` | Gathers of all index sizes on a stalling memory; the n/(n+1) rate on an ideal one; writes; union/intersection element streams. |
| `tb_sssr_essr` | Egress jobs: index array, values and joint length in memory; affine read. |
| `tb_sssr_idx_cmp` | Intersection and union of random index sets; operations, joint stream, control bits. |
| `tb_sssr_reg_switch` | Redirection rule for all read ports and the write port, on and off. |
| `tb_sssr_streamer` | End to end at default parameters, with the testbench acting as core and FPU (see below). |
| `tb_sssr_kernels` | The streamer running whole sparse kernels and the intersection rates (see below). |

The end-to-end test `tb_sssr_streamer` drives the streamer the way the kernels use it. The memory
model `tb_sssr_mem` stalls pseudo-randomly, to stand in for bank conflicts. The five workloads are:

* **sV×dV.** A sparse·dense dot product with 16-bit indices at an unaligned base. The steady
  state must take 5/4 cycles per element.
* **sV×sV.** A sparse·sparse dot product by intersection. The loop is driven by the control bits.
* **sV+sV.** A sparse sum by union, with the result indices and values written back by the ESSR
  and the joint length read back.
* **Scatter.** A scatter with 8-bit indices, running in parallel with the next workload.
* **Chained jobs.** Back-to-back affine jobs launched from the shadow registers, including a 2-D
  job with repetition and configuration writes that must stall.

The test counts each mechanism and fails if one never occurs: indirection, skip, zero
insertion, match, index writeback, memory stalls, shadow launch, repetition and configuration
stall.

`tb_sssr_kernels` runs larger kernels on the same streamer, with results checked against a
reference computed in the testbench:

* **sM×dV.** A 40 × 256 CSR matrix with 923 nonzeros times a dense vector, 16-bit column
  indices. Each row is one job, launched from the shadow registers while the previous row streams.
* **sV+dV.** A sparse vector added into a dense one, with 32-bit indices. On a memory without
  stalls, the 126 gathered elements take 189 cycles. That is exactly the 2/3 port limit.
* **sM×sV.** The same matrix times a sparse vector with about one entry in three set. Each row
  is one intersection, and the stream-control bits end every row loop.
* **Intersection rates.** The all-match and no-match cases described above.

To run a testbench with Verilator 5, from the repository root:

```
verilator --binary --timing --assert -Irtl -Itb rtl/sssr_pkg.sv tb/tb_sssr_streamer.sv \
          -y rtl -y tb +libext+.sv --top-module tb_sssr_streamer -o tb
./obj_dir/tb
```

Replace `tb_sssr_streamer` with any other testbench name. The design is plain synthesizable
SystemVerilog-2017: packages, packed structs, enums, `always_ff`/`always_comb` and concurrent
assertions. The assertions (queue overflow and underflow, start while busy, a response with no
outstanding read) are simulation checks and do not affect synthesis.

## Limits worth knowing

* Only one comparator exists, as in the published default. Index matching therefore works only
  between ISSR 0 and ISSR 1, and only the ESSR can take the joint stream.
* A job's index count is limited to 65536 by `BoundWidth`. Widen the package constant for longer
  rows.
* The design's numbers come from simulation against behavioural memory. It has not been taken
  through place-and-route, and no area or timing is claimed for it.
