# NeuraChip RTL: decoupled, hash-accumulated sparse matrix multiplication

The aggregation step of a graph neural network is a sparse-times-sparse
matrix product (SpGEMM). For graphs above 99 % sparsity, the work is almost
all bookkeeping. Each multiply is trivial. What is hard is collecting the
partial products that belong to the same output element. These arrive in
an order that depends on the graph, and in the worst case they must be held
in memory for a long time.

NeuraChip splits the product into two kinds of hardware that never wait on
each other:

* **NeuraCores** only multiply. They fetch a 4 x 4 block of the outer
  product, form the 16 products, and send each one away as a small
  self-describing packet.
* **NeuraMems** only add. Each NeuraMem keeps an on-chip hash table (the
  *HashPad*) keyed by the output element's address (the *TAG*). Every
  arriving partial product is summed into its table line.

Two ideas make this work:

1. **Rolling eviction.** Each packet also carries a counter: the number of
   partial products that the output element still expects. The compiler
   knows this number in advance. When a line's counter reaches zero, the line
   is complete and is written to DRAM at once. Finished sums therefore never
   sit in on-chip memory, and the HashPad only holds outputs that are still
   in progress.
2. **Dynamically reseeding hash-based mapping (DRHM).** The NeuraMem that
   accumulates a TAG is chosen by a cheap multiplicative hash of the TAG.
   The seeds come from a small table that can be refilled. This spreads
   accumulation evenly, whatever the sparsity pattern, without a large
   mapping table.

This repository holds synthesizable SystemVerilog for the chip in its
"Tile-16" configuration:

* 8 tiles, each with 4 NeuraCores, 4 NeuraMems, 8 routers and one memory
  controller with its own DRAM channel;
* the 64 routers form an 8 x 8 torus;
* a dispatcher feeds the NeuraCores.

It also holds self-checking testbenches, including one that runs a complete
SpGEMM on the full-size chip.

## The two instructions

All work is expressed as two 128-bit instructions. The struct types are in
`rtl/neurachip_pkg.sv`.

**MMH4** (host to NeuraCore) describes one 4 x 4 block of the product:

| bits    | 127:120 | 119:88 | 87:66  | 65:44     | 43:22  | 21:0         |
|---------|---------|--------|--------|-----------|--------|--------------|
| field   | opcode  | base   | A_data | B_col_ind | B_data | roll_counter |

All fields are word offsets from `base`. For block element (i, j), with
i, j in 0..3, the core reads:

* `A[i]` at `base + A_data + i`: four consecutive non-zeros of one column of
  A;
* `B[j]` at `base + B_data + j`: four consecutive non-zeros of the matching
  row of B;
* `TAG[i][j]` at `base + B_col_ind + 4i + j`;
* `COUNTER[i][j]` at `base + roll_counter + 4i + j`.

It then emits `HACC(TAG, A[i]*B[j], COUNTER)`. A TAG of `0xFFFFFFFF` marks a
product slot the compiler left empty, for blocks with fewer than four rows
or columns. Such a slot produces nothing. One MMH4 thus yields up to 16
HACCs.

**HACC** (NeuraCore to NeuraMem, over the network):

| bits    | 127:120 | 119:88 | 87:56 | 55:24           | 23:16       | 15:0   |
|---------|---------|--------|-------|-----------------|-------------|--------|
| field   | opcode  | TAG    | data  | rolling counter | NeuraMem ID | unused |

The TAG is the DRAM word address of the output element, so an evicted line
is simply written to address TAG.

The **counter convention** is this: every HACC for an output element carries
the same counter, equal to (number of partial products of that element) − 1.

* The first HACC to arrive allocates the line with that value.
* Every later HACC adds its data and decrements the counter.
* When the counter reaches 0, the line is evicted.
* If the element has a single partial product, the counter is 0 on
  allocation and the line is evicted immediately.

### What the host prepares

The host (a compiler, not part of the chip) lays out:

* A in column-major form and B in row-major form;
* for each MMH4, a 16-word TAG block and a 16-word counter block;
* a stream of MMH4s, one per 4-row slice of A's column k times 4-column
  slice of B's row k.

The chip-level testbenches (`tb/spgemm_tb_body.svh`) contain such a compiler
written in SystemVerilog, and are the reference for the layout.

## Chip organisation

Row `y` of the torus is tile `y`. Along a row, NeuraCores and NeuraMems
alternate:

* x = 0, 2, 4, 6 are NeuraCores 0..3 of the tile;
* x = 1, 3, 5, 7 are NeuraMems 0..3 of the tile.

NeuraMem number `m` (0..31) therefore sits at x = 2·(m mod 4) + 1 and
y = m / 4. The torus carries only HACC packets, from cores to memories.

Operand reads do not use the torus. Each NeuraCore reads directly from its
own tile's memory controller. Each NeuraMem also writes its evicted lines
through its own tile's controller.

Every NeuraCore and every NeuraMem must be able to reach all of DRAM, so in
the testbenches the eight channel models share one backing store. A physical
chip would instead interleave addresses across channels or route reads
across tiles. The source does not say which network carries read traffic.

| parameter (top)     | default | meaning                                       |
|---------------------|---------|-----------------------------------------------|
| `NT`                | 8       | tiles (= DRAM channels = torus rows)          |
| `CPT`, `MPT`        | 4, 4    | NeuraCores / NeuraMems per tile               |
| `PIPES`, `REGS`     | 4, 8    | pipelines per core, MMH4 slots per pipeline   |
| `NAG`               | 2       | address generators per core                   |
| `HE`                | 4       | hash engines per NeuraMem                     |
| `LINES`, `WAYS`     | 2048, 4 | hash-lines per engine, associativity          |
| `DRHM_K`            | 16      | k of the lower-k-bit hash                     |
| `NSEEDS`            | 64      | entries of the DRHM seed table                |
| `ROW_SHIFT`         | 8       | TAG bits skipped when indexing the seed table |
| `RBUF`              | 4       | packet buffer depth per router input          |

The HashPad totals 32 NeuraMems × 4 engines × 2048 lines. Each line holds a
32-bit TAG, 32-bit data and a 32-bit counter, so the total is 3 MB.

The top's DRAM side is one plain request/response port per tile:

* a 128-bit line read;
* a 128-bit line write with 4 word enables.

A real HBM controller would sit behind these ports.

## NeuraCore (`neuracore`, `neuracore_pipeline`)

A core has an instruction buffer and four pipelines. Each pipeline has an
8-slot register file with a scoreboard and one multiplier.

**Allocation.** An incoming MMH4 goes to the next pipeline, in round-robin
order, that has a free slot.

**Operand fetch.** Once a slot is allocated, the pipeline asks for its 40
operand words one at a time: 4 A, 16 TAG, 4 B and 16 COUNTER words.

* The two address generators each serve two pipelines, round-robin.
* The generators share the core's memory port, also round-robin.
* Every request carries a tag {pipeline, slot, operand index}, so responses
  may come back in any order.
* A response is written straight into its slot.

**Multiply.** When a slot has all 40 words, its scoreboard bit is set. The
multiplier then walks the 16 (i, j) pairs of the lowest ready slot, one per
cycle, and frees the slot afterwards.

**Output.** The core's output arbiter picks one pipeline's HACC per cycle.
The DRHM mapper stamps the destination NeuraMem ID into it.

`load` tells the dispatcher how busy the core is: buffered instructions plus
occupied slots.

## NeuraMem and the hash engine (`neuramem`, `hash_engine`)

This is the most delicate part of the design.

**Engine choice.** A NeuraMem sends each HACC to engine
`(TAG >> ENG_SHIFT) mod 4`. The top sets `ENG_SHIFT` to log2(32) = 5. It
must skip the low TAG bits because DRHM already fixes them, to some extent,
for all TAGs that reach one NeuraMem.

**The lookup.** Each engine is a 4-way set-associative table of 512 sets.
The set index is an XOR fold of TAG bits above the engine-select bits. One
HACC is handled per cycle:

1. **Compare** the TAG with the 4 lines of its set (four comparators).
2. **Hit:** add the data with the single adder and decrement the counter.
   If the counter was 1, i.e. this was the last partial product, the line is
   freed and `(TAG, sum)` goes to the eviction queue.
3. **Miss with a free way:** allocate the line with the packet's data and
   counter. If that counter is 0, the line is evicted at once and never
   stored.
4. **Miss with a full set** (a *hash collision*): the HACC is parked in a
   4-entry collision buffer.

**Retries.** Parked HACCs are retried, alternating with new input whenever
both are waiting. A retried HACC that still finds its set full goes back to
the end of the buffer.

**Back-pressure.** The engine stops taking input only when:

* the collision buffer is full; or
* an eviction is due and the eviction queue is full.

**Capacity limit.** Rolling eviction frees a line only when its element is
complete. So the hardware needs the live outputs of any one set to fit:
more than `WAYS + RETRY` = 8 unfinished TAGs hashing to one set stall that
engine for good. This is unlikely if the compiler issues MMH4s in row-block
order (Gustavson's formulation): then only the outputs of the current 4-row
block are live. Nothing in hardware checks for it, though. The end-to-end
testbenches size their problems with this in mind.

**Evictions out of the NeuraMem.** The evictions of the four engines are
merged round-robin into one write stream to the tile's memory controller.

## DRHM mapping (`drhm_mapper`, `dispatcher`)

The destination of a TAG is:

```
gamma  = seed[(TAG >> ROW_SHIFT) mod NSEEDS]
nm_id  = (((TAG << K) >> K) * gamma) mod N        (32-bit arithmetic, K = 16)
```

The shift pair keeps the low `32 − K` bits of the TAG. These bits vary most
between neighbouring outputs.

**The seed table.** It has 64 entries and is filled from a 32-bit Galois
LFSR (taps `0x80200003`), one entry per cycle. Seeds are forced odd, so no
seed collapses the mapping. The table is filled after reset and again after
every reseed. During the 64 fill cycles the core holds its HACC output.

**Reseeding.** Every partial product of one output must reach the same
NeuraMem, so reseeding is only safe between phases of work. The sequence is:

1. The host raises `reseed_req`.
2. The dispatcher stops issuing.
3. It waits until the chip reports that no instruction, request, packet or
   hash-line is left anywhere.
4. It pulses `reseed` to every core's mapper and resumes.

**Dispatch.** The dispatcher issues at most one MMH4 per cycle. Each goes to
the least-loaded core that can take it; ties go to the lowest core number.

## Network (`torus_router`)

Each router has five ports: local, +X, −X, +Y, −Y. Each input has a 4-packet
buffer, and a packet is one 128-bit HACC.

**Routing.** Packets are routed in dimension order, X first. In each ring
they take the shorter way round, with ties going the + way.

**Deadlock avoidance** uses bubble flow control:

* a packet that stays in its ring needs one free slot downstream;
* a packet that enters a ring, either from the local port or by turning from
  X to Y, needs two.

The free-slot counts come from the neighbours' buffer counters, which are
registers, so there is no combinational path between routers. Each output
has a round-robin switch. A router forwards at most one packet per output
per cycle.

## Memory controller (`mem_controller`)

The cores' 32-bit word reads enter a 16-entry request table.

**Issue.** Each cycle, the oldest not-yet-issued entry starts a 128-bit line
read. Every other waiting entry for the same line is marked as served by
that read (coalescing).

**Return.** A returning line goes into an 8-entry queue. It is handed out
one word per cycle to every entry that was waiting on it. The number of line
reads in flight is limited so that this queue can never overflow.

**Writes.** Evicted results from the tile's NeuraMems pass through a 4-entry
write queue. Each becomes a single-word line write with one word enable set.

## Where this RTL departs from the source design

* **Ports.** NeuraCores and NeuraMems have one network port and one memory
  port each; the source design gives them four.
* **Accumulators.** There is one adder per hash engine (4 per NeuraMem),
  where the source counts 256 accumulators per NeuraMem without saying how
  they are organised.
* **TAG layout.** TAGs are read as a 16-word block per MMH4
  (`B_col_ind + 4i + j`). The source's pseudo-code indexes them by j only,
  which would give the four rows one TAG.
* **Arithmetic.** It is 32-bit integer. The number format is not stated in
  the source.
* **Not given in the source, chosen here:**
  * the hash used inside a NeuraMem;
  * the set index;
  * the collision routine (a 4-entry retry buffer);
  * the seed generator;
  * the routing and flow control;
  * the buffer depths;
  * the dispatcher's load metric;
  * when to reseed.
* **Not built:**
  * the combination phase of a GNN layer (dense X·W and the activation);
  * the host/compiler;
  * the HBM itself, which is only modelled behaviourally.

## Verification

Every block has a self-checking testbench. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog.

| testbench                | what it shows |
|--------------------------|---------------|
| `tb_hash_engine`         | merge/insert/evict sums; exactly two collisions for six TAGs in one 4-way set; 8 hits in 8 cycles; random streams with eviction back-pressure |
| `tb_neuramem`            | 40 TAGs with 1-6 partial products, shuffled; exact sums, one eviction each, merge count, bad opcode dropped |
| `tb_drhm_mapper`         | seed table against an independent LFSR model; mapping against the formula; refill time; reseed changes the mapping |
| `tb_neuracore_pipeline`  | 60 MMH4s, out-of-order operand returns; every HACC value and counter; skipped slots emit nothing |
| `tb_neuracore`           | 80 MMH4s through all four pipelines; HACCs and their NeuraMem IDs against an independent DRHM model |
| `tb_torus_router`        | 400 packets from all inputs; output port against a reference route; bubble rule respected and exercised |
| `tb_mem_controller`      | 1000 reads from four cores (coalescing seen), 240 writes land in DRAM |
| `tb_dispatcher`          | least-load choice every cycle; reseed waits for idle, pulses once |
| `tb_neurachip_top`       | 2 tiles × (2 cores + 2 mems), 128 lines: two complete SpGEMMs (28×24 by 24×80) with a reseed between; every output checked; counts merges, evictions, collisions, coalesced reads, bubble holds and reseeds, and fails if any never happened |
| `tb_neurachip_full`      | the default Tile-16 chip with no parameter changes: a 32×32 by 32×32 SpGEMM checked element by element |

`tb/dram_channel_model.sv` is a fixed-latency (20-cycle) behavioural DRAM
channel. All channels share the word store in `tb/dram_backing_pkg.sv`.

To run a testbench with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb \
  rtl/neurachip_pkg.sv tb/dram_backing_pkg.sv rtl/*.sv \
  tb/dram_channel_model.sv tb/tb_neurachip_top.sv --top-module tb_neurachip_top
./obj_dir/Vtb_neurachip_top
```

Replace the last testbench file and top module name to run another one. The
unit testbenches need only the package and the RTL. The full-size
testbench's build takes a few minutes, because the chip has 32 cores, 32
NeuraMems and 64 routers. It finishes its product in under 2,000 cycles.

## Files

* `rtl/neurachip_pkg.sv`: instruction and request structs, opcodes, the DRHM
  hash function.
* `rtl/sync_fifo.sv`: the valid/ready FIFO used by all buffers.
* `rtl/hash_engine.sv`, `rtl/neuramem.sv`: accumulation.
* `rtl/neuracore_pipeline.sv`, `rtl/neuracore.sv`, `rtl/drhm_mapper.sv`:
  multiplication and mapping.
* `rtl/torus_router.sv`, `rtl/mem_controller.sv`, `rtl/dispatcher.sv`:
  network, memory, issue.
* `rtl/neurachip_top.sv`: the chip.
* `tb/`: the testbenches above, the DRAM model and the shared SpGEMM
  testbench body.
