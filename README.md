# A shift-register load-store queue with speculative store allocations

This is synthesizable SystemVerilog for a load-store queue (LSQ) built for
circuits generated by high-level synthesis (HLS). It follows the design in
*"A High-Frequency Load-Store Queue with Speculative Allocations for
High-Level Synthesis"* (R. Szafarczyk, S. W. Nabi, W. Vanderbauwhede). The RTL,
the testbenches and this text are an independent implementation of that
design, not the authors' code.

## The problem and the idea

A pipelined loop such as `hist[idx[i]] += 1` has a possible read-after-write
hazard through memory. A static scheduler cannot know whether two iterations
touch the same word, so it must assume they do and start a new iteration only
every few cycles. An LSQ resolves this at run time. Loads and stores send their
addresses to the LSQ early. The LSQ lets a load go to memory as soon as no
earlier store to the same address is still pending.

Classic LSQs use a content-addressable store queue. In one cycle it compares a
load with every older store, picks the youngest match and forwards its data.
On an FPGA that search is slow and large. This design splits it into pieces
that can be pipelined:

* **Store allocation queue.** Stores whose address is known but whose value is
  not yet computed. It only answers one question: must this load wait? It
  returns no data.
* **Store commit queue.** Stores that have been written to memory but might not
  be visible there yet. It is the only place data is forwarded from. It is a
  short delay line that is always in program order, so the first match found
  from the young end is the right one.

Both queues are shift registers. Every entry sits in a register and all entries
can be compared at once, without a memory search.

The second idea is **speculative store allocation**. Sometimes a store executes
only when a condition holds, and that condition depends on a value loaded from
the same array. Maximal matching is an example:

```
if (v[s] < 0 && v[d] < 0) { v[s] = d; v[d] = s; }
```

The address generator still sends the store addresses ahead of time, without
evaluating the condition. When the condition turns out false, the compute
pipeline sends a store value with its *valid* bit cleared. The LSQ then removes
the allocation without writing anything. Nothing was written early, so nothing
has to be undone: a wrong guess costs no replay.

## Tags: program order without a reorder buffer

Each memory request carries a tag, an integer that names a state of memory:

* State 0 is the initial memory. State *k* is memory after the *k*-th store of
  the sequential program.
* A **store** allocation carries the state it creates. The address generator
  increments its tag counter first, then uses it, so store tags are
  1, 2, 3, … in program order.
* A **load** allocation carries the state it expects to read, which is the
  current counter value.

Two rules follow from this:

* A load with tag *t* must see exactly the stores with tags ≤ *t*. Store *s*
  blocks load *l* when
  `l.addr == s.addr && l.tag >= s.tag`.
  This is called **eq. 1** below.
* Store sequences are merged in program order by accepting only the store
  whose tag is `last_tag + 1`.

An LSQ allocation is therefore an `(address, tag)` pair (`alloc_t` in
`lsq_pkg`). A store value is `(data, valid)` (`st_val_t`). A store commit is
`(address, data)` with no tag (`st_commit_t`).

## Block structure

```
 load allocations ──► ld_alloc_mux ──► load allocation queue ──► ld_check_pipe ──► ld_return ──► load values
   (N_LD_SEQ chans)    (min tag)        (shift_queue)            T │  A │  C          (order FIFO +
                                                                   │    │    │          data FIFO, demux)
                                       last_tag ───────────────────┘    │    │   ▲
 store allocations ─► st_alloc_mux ──► st_alloc_queue ── eq. 1 ─────────┘    │   │ load port
   (N_ST_SEQ chans)    (tag=last+1)        │ head                            │   │ (mem_rd / mem_rsp)
                                           ▼                                 │
 store values ──────────────────────► st_issue ──► st_commit_queue ── hit ──┘
   (N_ST_SEQ chans, valid bit)             │            (ST_LATENCY stages)
                                           └──► store port (mem_wr)
```

| Module | Role |
|---|---|
| `lsq_pkg` | Widths and types: `alloc_t`, `st_val_t`, `st_commit_t`, event bits `lsq_events_t` |
| `ld_alloc_mux` | Merges load allocation sequences in program order (smallest tag, then lowest index) |
| `st_alloc_mux` | Merges store allocation sequences: accepts only `tag == last_tag + 1` |
| `shift_queue` | Shift-register FIFO with every entry visible in parallel |
| `st_alloc_queue` | Store allocations awaiting values, `last_tag`, eq. 1 check against all entries |
| `st_issue` | Takes the head store's value; issues it or drops it; holds it behind older loads |
| `st_commit_queue` | Delay line of issued stores; forwards the youngest match |
| `ld_check_pipe` | Three-stage load disambiguation: tag wait, eq. 1 wait, forward or read |
| `sync_fifo` | Small circular FIFO used by the return path |
| `ld_return` | Puts forwarded and memory values back in load order and sends each to its sequence |
| `lsq` | The LSQ: all of the above, with `N_LD_PORTS` load ports (default 1) and one store port |
| `lsq_bram` | On-chip RAM: 1-cycle registered reads (one port per load port), write through an `ST_LAT`-stage buffer |
| `lsq_top` | `lsq` + `lsq_bram`; the channels are ports for the address and compute pipelines |

### Several load ports

By default all load sequences share one load port, as in the diagram above.
Loads never conflict with other loads, so a memory with more read ports can
serve load sequences in parallel. With `N_LD_PORTS` > 1, the whole load side is
built once per port. Each copy, a *lane*, has its own mux, load allocation
queue, check pipeline, return path and memory read port. Lane *p* serves
sequences *p*·S … *p*·S+S−1, where S = `N_LD_SEQ` / `N_LD_PORTS`.

The lanes share the store side:

* The store allocation queue has one eq. 1 check port per lane.
* The commit queue has one forwarding port per lane.
* The older-load guard (below) looks at every lane.

Stores always use a single port, which keeps writes in program order.

`tb_lsq_ports` runs the loop `d[a] += d[b]` (two loads and one store per
iteration) for 2000 iterations:

| Load ports | Cycles |
|---|---|
| 1 | 4582 |
| 2 | 2658 |

The 2658 cycles include about 512 cycles of initialisation and read-back. With
two ports, both read ports are busy in 1799 cycles.

The address generating pipeline and the compute pipeline are program specific.
An HLS compiler derives them from the user's loop, so they are not part of this
RTL. The testbench module `tb/lsq_traffic.sv` plays both roles.

## The load path in detail

A load allocation goes through `ld_alloc_mux` into the load allocation queue.
From the queue head it passes three register stages in `ld_check_pipe`:

1. **T: tag wait (queue head).** The load waits while
   `load.tag > last_tag`, where `last_tag` is the tag of the most recent store
   allocation accepted. When it passes, every store that precedes the load in
   program order is known to the LSQ. Each such store is either in the
   allocation queue, in the commit queue, or already in memory.
2. **A: allocation check.** The load waits while eq. 1 holds for any entry of
   the store allocation queue. Such an entry is an earlier store to the same
   word whose value has not been issued yet. The comparison is done against
   every entry in parallel. It yields a single bit and selects no data.
3. **C: commit check.** The commit queue is searched from youngest to oldest.
   * On a hit, the value is *forwarded*: it goes into the return buffer at
     once.
   * Otherwise a read goes to the load port. By this point any earlier store
     has either left the commit queue, and so is visible in memory, or was
     never written.

   The search happens in the cycle the load leaves stage C. A store issued
   while the load waited in C for buffer room is still seen.

A stage holds its load while it waits. An empty or moving next stage lets it
advance, so the pipeline takes one load per cycle when nothing blocks.

The return path, `ld_return`, gives each served load a slot in an order FIFO.
A forwarded load's value goes straight into its slot. A memory load's value
arrives later on the in-order load port response and waits in a data FIFO. The
head slot is delivered when its value is known, on the channel of the sequence
the load came from. This hides variable memory latency from the pipeline:
stage C stalls only when `RET_DEPTH` loads are outstanding.

**Timing.** With the default on-chip RAM, a load allocation accepted in cycle
*t* returns its value in cycle *t*+5 when nothing conflicts:

* queue head in *t*+1;
* stage A in *t*+2;
* stage C and read in *t*+3;
* RAM data in *t*+4;
* value out in *t*+5.

Independent loads stream at one per cycle.

## The store path, speculation, and the older-load guard

The head of the store allocation queue waits for its value. `st_issue` reads
the value channel of the sequence recorded with the allocation. Values of one
sequence arrive in the same order as its allocations, and the queue is in
program order, so this multiplexes the value channels in program order. What
happens next depends on the value:

* **Valid value.** The store goes to the store port and into the commit queue
  in the same cycle, and the allocation is popped.
* **Invalid value (speculation).** The allocation is popped and nothing else
  happens. No write, no commit entry, and no load can ever be forwarded from
  it. A load that waited on it in stage A is released and reads the older
  value.

The commit queue has no tags, so forwarding "the youngest match" is correct
only if the queue never holds a store that comes *after* a load still waiting
to be served. Without that property, a younger store could also overwrite
memory before an older load reads it (a write-after-read hazard). The design
enforces the property in `st_issue`: a valid store waits while any load with a
smaller tag is still unserved. The loads checked are:

* those offered at the LSQ inputs;
* those in the load allocation queue;
* those in stages A and C.

This guard is the design's own mechanism. The paper states the property but
not how it is kept. Invalid values are never held back, because they touch
nothing.

Stores issue one per cycle when their values are ready (checked: 32 stores on
32 consecutive cycles). A store is issued in the cycle its value arrives,
unless an older load holds it back.

## Memory ports and the store latency

The LSQ owns `N_LD_PORTS` load ports (default 1) and one store port of the
memory it protects:

* The **store port** has no backpressure. It feeds a buffer with a fixed
  write-to-read latency.
* Each **load port** must answer in request order. It may take any number of
  cycles.

The commit queue is a delay line of `ST_LATENCY` stages that shifts every
cycle. A store stays forwardable for exactly that long, and must be visible in
memory by the time it drops out. For the built-in RAM (`lsq_bram`), a store
issued in cycle *s* is read by requests from cycle *s*+`ST_LAT`+1.
`lsq_top` ties `ST_LAT` to `ST_LATENCY`. For a slower or off-chip memory, set
`ST_LATENCY` to that memory's write-to-read latency, including any buffers in
front of it. Set `RET_DEPTH` to the number of reads that should be in flight.

## Sizing the store allocation queue

The queue must hold every store allocation issued between a load and its
dependent store. For a loop that should start one iteration per cycle, with a
load-to-store delay of *L* cycles and *S* stores per iteration, it needs about

    ceil(L / target_II × S)

entries. `lsq_pkg::st_q_depth_for(L, target_II, S)` computes this at
elaboration time, for use as `ST_Q_DEPTH`. *L* counts the whole path from the
load allocation to the store value: the compute latency, plus the LSQ's own
5 cycles of load latency, plus any channel buffering.

A smaller queue still gives correct results, but it throttles the address
generator. `tb_lsq_scaling` shows this with a histogram over non-repeating
addresses and a compute latency of 200 cycles. The first queue is sized by the
rule with *L* = 208 (200 plus 8 cycles of load path and buffering). Each run is
2000 iterations plus about 2000 cycles of initialisation and read-back:

| Store allocation queue | Cycles |
|---|---|
| 208 entries (by the rule) | 4054 (about one iteration per cycle) |
| 8 entries | 47979 (about 8 iterations per 200 cycles) |

## Parameters (lsq_top)

| Parameter | Default | Meaning |
|---|---|---|
| `N_LD_SEQ` | 2 | load allocation / load value channel pairs |
| `N_ST_SEQ` | 2 | store allocation / store value channel pairs |
| `N_LD_PORTS` | 1 | load ports (lanes); `N_LD_SEQ` must be a multiple |
| `LD_Q_DEPTH` | 4 | load allocation queue entries |
| `ST_Q_DEPTH` | 8 | store allocation queue entries (the original histogram configuration) |
| `ST_LATENCY` | 4 | commit queue stages = memory write-to-read latency |
| `RET_DEPTH` | 8 | return buffer slots = maximum reads in flight (power of two) |
| `MEM_DEPTH` | 1024 | words of on-chip RAM |

Addresses, data and tags are 32 bits wide (`lsq_pkg`). Addresses are word
addresses.

At the defaults, yosys reports 399 cells, 981 flip-flop bits and a 33.8 kbit
memory for `lsq_top`.

## Interface and protocol

All channels use valid/ready handshakes. A transfer happens at a rising clock
edge where both are high. Reset is synchronous and active low (`rst_n`). It
clears valid bits, pointers and `last_tag`; data registers and the RAM are not
reset.

| Port group | Direction | Content |
|---|---|---|
| `ld_alloc_valid/ready`, `ld_alloc[N_LD_SEQ]` | in | `(addr, tag)` of each load, per sequence |
| `st_alloc_valid/ready`, `st_alloc[N_ST_SEQ]` | in | `(addr, tag)` of each store, per sequence |
| `st_val_valid/ready`, `st_val[N_ST_SEQ]` | in | `(data, valid)`, in the order of that sequence's allocations |
| `ld_val_valid/ready`, `ld_val[N_LD_SEQ]` | out | load values, in the order of that sequence's allocations |
| `ev` | out | one-cycle pulses: `ld_wait_tag`, `ld_wait_conflict`, `ld_forward`, `ld_mem_read`, `ld_ret_stall`, `st_issue`, `st_drop`, `st_wait_load`, `ld_q_full`, `st_q_full` |

The user must meet these rules:

* Tags follow the rule above: stores increment the counter and use it, loads
  use it without incrementing.
* Every store allocation eventually receives exactly one value.
* All allocations of one loop iteration are offered together. See the
  limitations below.

`lsq` alone exposes the memory ports, for use with another memory:

* load ports `mem_rd_valid/addr` and `mem_rsp_valid/data`, as packed arrays
  with one element per load port;
* store port `mem_wr_valid/addr/data`.

## Where this design departs from the paper, and its limits

* **Load ports.** The default is one load port, which is the configuration
  the paper draws. Several ports are supported through lanes. The grouping of
  sequences into lanes is this design's choice.
* **How program order is recovered is this design's choice.**
  * Load mux: it picks the smallest tag among the sequences that currently
    offer a load. If one sequence lagged so far that its next load had a
    smaller tag than a load already accepted from another sequence, order
    would break, and the tag wait could deadlock. Address generators that
    emit one iteration's allocations together, as HLS pipelines do, are safe.
  * Store mux: it relies on store tags being consecutive.
* **Older-load guard.** It is needed for correctness and is described above.
  It sees only loads that have reached the LSQ's inputs. A load the address
  generator has not produced yet cannot hold back a younger store. This is
  also safe when one iteration's allocations arrive together.
* **Pipeline split.** The three load stages, the two-FIFO return path, the
  combinational store issue and all buffer depths are this design's. The
  paper gives the order of the checks, not the stage boundaries.
* **Widths and wrap-around.** The 32-bit widths are assumed. Tags do not wrap
  around, so one run may issue at most 2^32−1 store allocations.
* **Memory.** The LSQ does not model the off-chip DRAM system or its
  load-store units. `tb/dram_model.sv` is a behavioural stand-in with 20–60
  cycle reads.
* **Not part of the RTL.** The address generating unit, the compute pipeline
  and the compiler passes that produce them, including the hoisting of
  speculative allocations and the poison blocks that send invalid values.
  `lsq_traffic` shows by example what they must send.
* **Benchmarks.** `tb_lsq_kernels` runs small models of three of the paper's
  kernels: histogram, conditional histogram and matching. Their loop bodies,
  array sizes and inputs are this design's own. The other benchmarks, and the
  cycle counts the paper measured, are not reproduced.
* **Frequency and area.** Nothing here reproduces the paper's FPGA frequency
  and area figures.

## Verification

Each module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=<n> failures=<n>` and has a watchdog.

| Testbench | What it establishes |
|---|---|
| `tb_shift_queue` | random push/pop against a reference queue; parallel view; next-cycle visibility |
| `tb_ld_alloc_mux` | choice by (tag, index) among present sequences; ready routing |
| `tb_st_alloc_mux` | only `last_tag + 1` passes |
| `tb_st_alloc_queue` | eq. 1 conflict against a reference over random traffic; `last_tag` |
| `tb_st_commit_queue` | hit exactly within `DEPTH` cycles of the store; youngest value wins |
| `tb_st_issue` | issue / drop / hold-for-older-load truth table |
| `tb_ld_check_pipe` | one load per cycle (32 loads served in cycles 2 to 33); tag wait, conflict hold, forward-or-read |
| `tb_ld_return` | global order, right sequence, right value under random memory latency; forward latency 1 |
| `tb_lsq_bram` | 1-cycle read; a write is seen exactly from cycle s+ST_LAT+1 |
| `tb_lsq` | store rate 1/cycle; load latency 5 and rate 1/cycle; RAW wait; speculative drop; younger store held behind an older load |
| `tb_lsq_top` | full-size end-to-end run (defaults); random histogram/matching/read-write mix; every load value checked; each event in `ev` must occur |
| `tb_lsq_dram` | same mix behind a 20–60 cycle in-order memory with an 8-cycle store buffer |
| `tb_lsq_scaling` | store allocation queue sized by the rule (208) against 8 entries (table above) |
| `tb_lsq_ports` | one against two load ports on a two-load loop (table above); values checked in both |
| `tb_lsq_kernels` | histogram, conditional histogram and matching kernels at default parameters; each store allocation retires exactly once (issued or dropped) |

`lsq_traffic` builds a program of loop iterations and checks every load value
against a sequential execution of the same program. The iteration kinds are
histogram, conditional histogram, maximal-matching step, two-load accumulate,
independent read-write, initialisation and read-back. It also drives the LSQ's channels as an address generator and a
compute pipeline would.

Running a testbench with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/lsq_pkg.sv tb/tb_lsq_top.sv --top-module tb_lsq_top -o sim
./obj_dir/sim +verilator+rand+reset+2
```

`tb_lsq_kernels` runs 1000 iterations of each kernel over a 64-word array,
with a 4-cycle compute latency and all `lsq_top` parameters at their defaults:

| Kernel | Cycles | Stores issued | Stores dropped |
|---|---|---|---|
| histogram | 1491 | 1064 | 0 |
| conditional histogram (`if (x < 300) h[a] = x + w`) | 1631 | 680 | 384 |
| matching | 3157 | 104 | 1960 |

The issued counts include the 64 stores that initialise the array. The cycle
counts include about 128 cycles of initialisation and read-back. Most matching
steps drop both stores, because most vertices of the small graph are matched
early.

Verilator simulates two-state logic. `+verilator+rand+reset+2` starts
unreset state at random values, which checks that nothing depends on an
unreset register.
