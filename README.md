# AutoGNN-style graph preprocessing accelerator in SystemVerilog

Training or serving a graph neural network on a large graph starts with
preprocessing that the GNN itself never sees. The edge list (COO: one
`(dst, src)` pair per edge) is converted to a compressed sparse column form
(CSC: a pointer array plus an index array). For each batch vertex, `k`
in-neighbours are sampled per layer. Then the sampled vertices are renumbered
densely so the subgraph can index a compact embedding table. On a CPU or GPU
these steps are dominated by sorting, prefix counting and hash lookups.

This design does all of them with just two kinds of small, reusable circuits:

* **UPE (unified processing element).** It performs *set-partitioning*. From an
  array and a condition bit per element, it returns the selected elements
  packed to the left, in order, in one combinational pass. A radix-sort digit
  pass, a one-hot extraction and a bitmap extraction are all
  set-partitioning. So sorting, merging and unique random selection all run
  on UPEs.
* **SCR (single-cycle reducer).** It performs *set-counting*. It compares every
  element of an array with one target and reduces the results in the same
  cycle. An adder tree gives "how many are ≥ target", which builds the
  pointer array. An OR tree gives "is the target present, and what is stored
  next to it", which replaces a hash map for renumbering.

A sequencer chains these into one request. The host loads an edge list,
writes a few registers and gets back a sampled, renumbered subgraph in CSC
form.

## Edge format and the padding element

Every edge is one 64-bit element `{dst[31:0], src[31:0]}` (`agnn_pkg`).
Sorting the elements as unsigned numbers therefore sorts by destination and
then by source. That is exactly the order CSC needs, with the source VIDs
forming the index array.

The all-ones element `PAD_ELEM` is padding. It sorts after every real edge
and is ignored by all consumers. Real VIDs must be below `2^vid_bits − 1`,
where `vid_bits` is the key width the sort examines (register `VID_BITS`,
default 32).

## The UPE datapath (`upe_prefix_sum`, `upe_relocation`, `upe`)

For N elements and N condition bits:

1. **AND filter.** It clears the elements whose condition bit is low.
2. **Prefix sum.** It computes the inclusive running count of set bits. For
   example, the conditions `0 1 0 1` give `0 1 1 2`. The network is
   hierarchical (Sklansky style): in layer *l*, every element in the upper
   half of a 2^(l+1) block adds the count at the end of the lower half.
   There are log2 N layers, and each adder is only clog2(N)+1 bits wide.
3. **Relocation.** Each selected element must move left by
   `i − (count before i)`, which is the number of unselected elements before
   it. There are log2 N layers of 2:1 multiplexers. Layer *l* moves an
   element 2^l places when bit *l* of its distance is set, lowest bit first.
   For a left-compaction no two elements ever land in the same position, so
   every multiplexer needs only one select bit.

The whole UPE is combinational. `count_o` gives the number of selected
elements.

## Jobs on a UPE (`upe_engine`)

Each UPE has a small sequencer beside it. The sequencer fetches scratchpad
rows of W/2 elements through the crossbar, runs the UPE as many times as the
job needs, and writes the result back.

| Job | What it does | UPE passes |
|---|---|---|
| `JOB_SORT` | Sorts one W-element chunk in place. LSB-first radix sort, one bit per digit: the low `vid_bits` bits of `src`, then of `dst`. Each digit compacts the 0-elements to the left, then the 1-elements to the right (the UPE is fed the mirrored array). | 2 per bit (4·vid_bits in total) |
| `JOB_MERGE` | Merges two sorted runs of `len` rows. A W-element buffer holds the W/2 smallest elements from each run. The buffer is radix-sorted and its lower half written out. The lower half is then refilled from the run whose next element is smaller. An exhausted run counts as +∞. | one buffer sort per W/2 output elements |
| `JOB_SELECT` | Picks k distinct in-edges from a window of `deg` edges. Steps: align the window; build an index array `0..deg−1`; then, k times, draw `r = (lfsr·remaining) >> 16`, extract index r with a one-hot condition, set its bit in the sampled bitmap, and drop it from the index array with the inverted condition. A last pass with the bitmap as condition extracts the edges, and the rest of the row is padded. If deg ≤ k, every edge is taken. | 1 + 2k + 1 |

Limits: `deg ≤ W/2` and `k ≤ W/2`. The sequencer of the whole request caps
both. A longer neighbour list is cut to its first W/2 entries.

## UPE kernel (`upe_controller`, `upe_scheduler`, `upe_crossbar`, `scratchpad`, `upe_kernel`)

**Edge ordering.** The edge array is padded to a power-of-two number of
W-element chunks. The controller issues one `JOB_SORT` per chunk, then
rounds of `JOB_MERGE`:

- Round *r* merges pairs of runs of 2^r chunks.
- Rounds alternate between two scratchpad regions (`base`, `tmp`).
- A round starts only when the scheduler's scoreboard shows every UPE idle.
- `sort_result_o` says which region holds the result.

**Scheduler.** It keeps a busy bit per UPE. A job offered while some UPE is
idle is accepted in the same cycle by the lowest-numbered idle UPE. The bit
clears on that UPE's `done`.

**Crossbar.** It is an N_UPE:1 round-robin switch onto one scratchpad port.
Read data comes back one cycle after the grant, so every engine is served
within N_UPE grants.

**Scratchpad.** It has two synchronous ports of rows of W/2 edges:

- port A serves the UPEs;
- port B serves the request sequencer, the reshaper and the host;
- reads return data one cycle after the request, and a same-cycle write
  from the other port is not seen.

## SCR kernel (`scr`, `reshaper`, `reindexer`, `scr_kernel`)

**SCR.** W lanes, each with a valid bit. In adder mode each comparator
reports `element ≥ target` (subtract and test the borrow), and the adder tree
sums the results. In filter mode each comparator reports `element ==
target`, and an OR tree returns `{hit, payload}` of the matching lane.

**Reshaper: pointer array from the sorted COO.** `ptr[t]` is the number of
edges whose destination is below t. N_SCR SCRs work on targets
`v .. v+N_SCR−1` against one buffered segment of W_SCR edges. Each SCR
yields the number of edges in the segment below its target, and the pointer
is that count plus `acc[t]`, the edges below t in earlier segments.

- A target is complete once the segment contains an edge ≥ it, or no edges
  remain.
- If the last target of the window is complete, all N_SCR pointers are
  written as one row and `v` advances by N_SCR.
- Otherwise the segment is consumed: each `acc` grows by its count, and the
  next segment is read.

A run costs about `(n+1)/N_SCR` evaluation cycles plus 3 cycles per segment.
The pointer memory has two read ports, so `ptr[t]` and `ptr[t+1]` come out
together one cycle after the address.

**Reindexer: dense renumbering without hashing.** An SRAM bank holds pairs
(original VID, new VID), with a counter of how many exist. A request is
compared group by group: N_SCR filter-mode SCRs × W_SCR pairs per group, two
cycles per group.

- On a hit, the stored new VID is returned.
- On a miss, the counter value becomes the new VID, the pair is appended and
  the counter increments.

New VIDs therefore follow first appearance. The original-VID array, read by
new VID, is the table for gathering the subgraph's embeddings.

**SCR kernel.** It puts both controllers behind one read port:

- address bit 31 clear: pointer pair at the address;
- address bit 31 set: original VID of new VID `addr[30:0]`.

## One request end to end (`agnn_workflow`)

```
host: edges -> scratchpad rows G_BASE.., batch VIDs, registers, CTRL.start
 1. pad G to 2^m chunks; order (UPE kernel); pointer array (reshaper)
 2. reindex batch vertices -> new VIDs 0..b-1; frontier = batch
    for hop = 1..layers:
       for groups of up to N_UPE frontier vertices:
          fetch ptr[v], ptr[v+1]; deg==0 -> no job
          JOB_SELECT(window, min(deg,W/2), k) -> result row SEL_BASE+slot
       wait all UPEs idle; for each result row:
          reindex v, then every sampled source u; append {v', u'} to
          subgraph rows S_BASE..; u joins next hop's frontier
 3. pad S; order; pointer array of the subgraph
host: SUB_EDGES, SUB_NODES, SUB_BASE; pointer array and VID table via
      the result port; subgraph index array = src fields of rows SUB_BASE..
```

Sampling is node-wise. A vertex that is reached twice in a hop is sampled
twice, and its edges appear twice.

Scratchpad layout (rows of W/2 edges):

| Region | Rows |
|---|---|
| G_BASE | MAX_E/RE |
| G_TMP | MAX_E/RE |
| S_BASE | MAX_SUB_E/RE |
| S_TMP | MAX_SUB_E/RE |
| SEL_BASE | N_UPE |

At the defaults that is 416 rows, inside SP_ROWS = 512.

Error flags are sticky in STATUS[6:4]:

- bit 4: frontier overflow;
- bit 5: subgraph overflow;
- bit 6: renumbering table full.

## Shell (`cfg_regs`, `fpp_controller`, `autognn_top`)

Register map (byte addresses; reads return data one cycle later):

| Addr | Name | Meaning |
|---|---|---|
| 0x00 | CTRL | w: bit0 start request, bit1 start reconfiguration |
| 0x04 | STATUS | r: busy, done (sticky), reconfiguration busy, error[6:4] |
| 0x08–0x24 | N_EDGES, N_NODES, VID_BITS, K, LAYERS, BATCH, SEED, RECONF_KEY | configuration |
| 0x28–0x30 | SUB_EDGES, SUB_NODES, SUB_BASE | results |
| 0x34–0x3C | CYC_ORDER, CYC_RESHAPE, CYC_SAMPLE | cycles spent per phase |

**Reconfiguration.** In the published system the host picks a
pre-compiled kernel variant (UPE count and width, SCR count and width) with
a cost model and loads it by partial reconfiguration. `fpp_controller`
implements the on-chip part of that:

- key *n* selects a 50 MB slot at `DRAM_BASE + n·BS_BYTES`;
- the slot is read word by word through the DRAM port and handed to the
  configuration port with a valid/ready handshake;
- keys ≥ 20 are refused.

In the RTL the variants are the parameters N_UPE, W and N_SCR.

`autognn_top` has these ports:

- a register bus;
- a batch-list write port;
- a result read port;
- a scratchpad row port, owned by the host only while the kernel is idle;
- the DRAM read and configuration ports of the reconfiguration controller;
- an interrupt.

## Parameters

| Parameter | Default | Origin |
|---|---|---|
| N_UPE | 32 | prototype size |
| W (UPE width) | 64 | prototype size |
| N_SCR | 8 | prototype size |
| W_SCR | W/2 = 32 | this design; one reshaper segment = one scratchpad row |
| SP_ROWS | 512 (kernel alone: 1024) | this design |
| MAX_E / MAX_SUB_E | 4096 / 2048 edges | this design |
| MAX_N / MAP_DEPTH | 4096 / 4096 | this design |
| MAX_FRONT / MAX_BATCH | 512 / 64 | this design |
| N_BITSTREAMS, BS_BYTES | 20, 50 MB | published system |
| k, layers (register reset values) | 10, 2 | 2-layer GraphSAGE with 10 samples |

## Where this departs from the published design

- **Graph storage.** The graph is held in the on-chip scratchpad, not in
  device DRAM behind a DMA engine. The PCIe controller, scatter-gather DMA,
  DRAM controller, system bus and configuration primitive are vendor parts
  and are not modelled. At the default sizes, a request holds up to 4096
  input edges and a 2048-edge subgraph. None of the published evaluation
  graphs (0.5 M to 400 M edges) fits. A 2-layer, k = 10 request fits for
  batches of up to 18 vertices.
- **Per-UPE sequencers.** Each UPE has its own job sequencer, where the
  published design describes one central UPE controller.
- **Neighbour window.** Selection sees at most W/2 = 32 neighbours per
  vertex, the first 32 by source VID.
- **Random numbers.** They come from a 16-bit LFSR, with a new seed per job
  derived from the SEED register.
- **Shell interfaces.** The SCR kernel's port is a plain read port, not
  AXI. The register map and all handshakes are this design's own.
- **Reconfiguration scope.** Reconfiguration streams the bitstream but
  cannot change the RTL parameters of the running design.

## Verification

Every module has a self-checking testbench in `tb/`. Each compares against
an independent model, uses `$urandom` stimulus, has a watchdog, and prints
`TB_RESULT checks=N failures=M`.

Highlights:

- The UPE pieces are checked against the printed examples and thousands of
  random arrays.
- The kernel test sorts random arrays and random selections, and checks the
  ordering time.
- `tb_autognn_top` runs two requests at reduced size (4 UPEs of width 16,
  2 SCRs), followed by a reconfiguration and a refused key.
  - It checks every pointer pair, every job descriptor, every sampled row
    (distinct, legal, `min(k,deg)` edges), the renumbering table, the sorted
    graph, the sorted subgraph and its pointer array.
  - It counts each mechanism (sort and merge jobs, random draws and
    take-all, degree cap, zero-degree skip, reindex hit/miss, reshaper
    consume/advance, crossbar contention, scheduler stall, padding,
    reconfiguration, key rejection, configuration-port back-pressure) and
    fails if any never occurs.
- `tb_autognn_top_full` runs the same checks with the top at its default
  parameters. It uses a 3000-edge, 200-vertex graph with k = 10 and a batch
  of 8. The request takes 13,900 cycles. The build takes about 5 minutes;
  the run takes seconds.

To simulate, for example:

```
verilator --binary --timing --assert rtl/agnn_pkg.sv $(ls rtl/*.sv | grep -v agnn_pkg) \
          tb/tb_autognn_top.sv --top-module tb_autognn_top -Mdir obj && ./obj/Vtb_autognn_top
```

(`agnn_pkg.sv` must come first.)

Lint is clean apart from these warnings:

- Unused upper address bits and unused job fields.
- Verilator's note that `rst_n` is used both as an asynchronous reset and
  inside the `disable iff` of the handshake assertions. The assertions are
  checks only; every flop uses the asynchronous reset.
