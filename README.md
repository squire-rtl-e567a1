# Squire: a private cluster of worker cores for dependency-bound kernels

Some kernels have parallelism, but the parallel pieces are small and depend on
each other. Examples are the chaining step of a read mapper, where each score
depends on earlier scores, or a dynamic-programming matrix filled band by band.
Vector units handle such dependencies badly. A GPU or an external accelerator
costs too much to start and to synchronize for work this small.

Squire is the answer proposed in "Squire: A General-Purpose Accelerator to
Exploit Fine-Grain Parallelism on Dependency-Bound Kernels" (Langarita et al.).
Each host core gets its own small group of simple in-order cores, called
*workers*. The workers share the host's ISA and read and write memory through
the host's private L2, so no data is copied. Dependencies between workers are
handled by a small **synchronization module**: 64-bit hardware counters that
any worker can increment or wait on in one cycle.

This repository gives synthesizable SystemVerilog for the accelerator around
the workers: the synchronization module, the control registers, the shared L2
bus with its arbiter, and each worker's L1 instruction and data caches. It is
an independent implementation from the published description, not the
authors' code. The worker pipelines, the host core and the L2 are existing
designs that the description only names. They are not included: their
connections are ports of the top module.

## Block diagram

```
                         host L2 (extra port)
                                 |
                 +---------------+----------------+
                 |  l2_arbiter: one access/cycle, |
                 |  broadcasts snoops             |
                 +--+--------+--------------+-----+
                    |        |              |
             +------+--+ +---+-----+   +----+----+
             |L1I  L1D | |L1I  L1D |...|L1I  L1D |   l1i_cache / l1d_cache
             |worker 0 | |worker 1 |   |worker 15|   (cores: external)
             +----+----+ +----+----+   +----+----+
                  |           |             |
          +-------+-----------+-------------+------+
          | control_regs          sync_module      |
          +-----------+------------------+---------+
                      |                  |
                          host core
```

`squire` (the top) holds one `control_regs`, one `sync_module`, one
`l2_arbiter` and, for each worker, one `l1i_cache` and one `l1d_cache`. The
shared types are in `squire_pkg`.

## How the host uses it

The host offloads a function in the same way for every kernel:

1. It writes the function's entry address to `CR_FUNC` and up to four
   arguments to `CR_ARG0..3`.
2. It writes `CR_START`. One cycle later `wk_start` pulses for one cycle.
   Every worker loads its PC from `wk_start_pc` and its argument registers
   from `wk_start_args`. All counters are cleared. Every instruction cache is
   flushed, so freshly written code is fetched. `wk_running` becomes all
   ones.
3. The host waits on a counter, for example until the global counter equals
   the number of workers. It presents the wait on `host_sync_*` and holds it
   until `host_sync_ready`.
4. Each worker ends with `stop_worker()`, which pulses its `wk_stop` bit. `busy`
   drops when the last worker stops.

Register map (host port, 4-bit index, 64-bit data; reads are combinational):

| index | name        | access | content                                  |
|-------|-------------|--------|------------------------------------------|
| 0     | `CR_FUNC`   | R/W    | entry address of the offloaded function  |
| 1-4   | `CR_ARG0-3` | R/W    | arguments                                |
| 8     | `CR_START`  | W      | any write starts the workers             |
| 9     | `CR_STATUS` | R      | bit mask of running workers              |
| 10    | `CR_NUMW`   | R      | `num_workers()`                          |

A start while workers are still running restarts all of them.

## The synchronization module

This module is what makes fine-grain work practical. It holds one *global
counter* and one *local counter* per worker. All of them are 64 bits wide.
Each worker has its own operation port (`wk_sync_op`, counter index `w`,
threshold `s`). `wk_sync_ready` answers in the same cycle. A worker holds an
operation until it is ready, so a wait that is not yet satisfied simply
stalls the worker.

| operation      | API call             | ready when                                 |
|----------------|----------------------|--------------------------------------------|
| `SYNC_INC_L`   | `inc_lcounter(w)`    | always; local counter `w` grows by one     |
| `SYNC_WAIT_L`  | `wait_lcounter(w,s)` | local counter `w` >= `s`                   |
| `SYNC_WAIT_G`  | `wait_gcounter(s)`   | global counter >= `s`                      |
| `SYNC_INC_G`   | `inc_gcounter()`     | the worker's increment queue is not full   |

The host can use the two waits. If several workers increment the same local
counter in one cycle, every increment counts.

### Local counters: 2-D wavefronts

For a dynamic-programming matrix, each worker takes a band of columns and
works down the rows. At the end of each row, worker *x* increments local
counter *x*. Before starting row *i*, worker *x* waits until local counter
*x-1* reaches *i+1*. Vertical and diagonal dependencies stay inside a band. The
counters only carry the horizontal dependency across band edges. The host
learns that the whole matrix is done by waiting on the last worker's counter.

### Global counter: in-order increments for 1-D recurrences

In the chain kernel, anchors are dealt round robin (worker *x* takes anchors
*x*, *x+N*, ...). When worker *x* finishes anchor *i*, it increments the global
counter. A consumer of score *F[j]* waits until the counter exceeds *j*. This
works only if the counter value *k* means "anchors 0..k-1 are all finished".
But a worker may finish early, for example when its anchor needs no earlier
score at all. Its increment must then not be counted before those of the
workers ahead of it.

The hardware keeps this order itself. A *token* names the worker whose
increment is due next; it starts at worker 0. Each worker has a queue of
increments that it issued early. Every cycle:

* every incoming increment is accepted if its worker's queue has room;
* starting at the token, the module walks over the workers in order. It
  *retires* one increment from each worker that has one (queued or arriving
  now) and stops at the first worker that has none;
* the counter grows by the number retired, and the token moves past them,
  wrapping at `NUM_WORKERS`.

So an increment from the token holder with nothing queued counts in the cycle
it arrives. An early increment is parked. A late increment releases, in one
cycle, the whole run of parked increments behind it. Example with four
workers, token at 1, where workers 2 and 3 have parked one increment each:
when worker 1 increments, the counter grows by 3 and the token returns to 0.

Every queue entry is the same "one increment", so each queue is kept as a
small count (`QDEPTH`, 4 by default). A worker whose queue is full is not
ready and stalls until the token reaches it. `pending[]`, `token`, `gcounter`
and `lcounter[]` are outputs for observation.

## The memory path

### Shared bus and arbiter

The workers reach memory only through the host's L2, over one shared bus.
Every L1 cache is a requester: worker *w*'s instruction cache is number *2w*
and its data cache is *2w+1*. `l2_arbiter` grants one request per cycle, in
round-robin order, whenever `l2_req_ready` is high. It forwards the request
to the L2 in the same cycle, tagged with the requester's number as
`l2_req_id`. The L2 answers later with `l2_rsp_valid`, `l2_rsp_id` and a whole
64-byte line (for a write, the answer is only an acknowledgement). The answer
is broadcast, and the requester whose number matches takes it. A single
arbitrated bus means the L2 needs only one extra port.

### Caches and coherence

Each worker has a 1 KB instruction cache and an 8 KB data cache. Both are
direct mapped, use 64-byte lines and have one miss outstanding.

The data cache is **write-through with no write allocate**. A store updates
the line if present, goes to the L2 as one 64-bit word with byte enables, and
completes when the L2 acknowledges it. No line is ever dirty, which keeps
coherence simple. Every cache watches the bus. A write granted to another
requester, or an invalidation sent by the L2 (`l2_inv_valid`, for data
changed by the host or evicted from the L2), drops the matching line. The
next access then misses and reads the current data from the L2.

One race needs care. A line may be invalidated after its read was granted
but before the line arrives. The arriving line is then older than the write
that invalidated it. The cache still hands the requested word to the core,
because that read was ordered before the write. But it does not install the
line: the index is left empty. The instruction cache does the same, and also
treats a flush during a fill this way.

Core-side timing of both caches: a request is taken when `*_ready` is high.
A hit answers in the next cycle. A miss answers in the cycle after the line
arrives. A store answers in the cycle after its acknowledgement. The
instruction cache returns one aligned 64-bit word, which is two 32-bit
instructions, for a dual-issue front end. All data accesses are 64-bit and
8-byte aligned; byte enables select the bytes a store writes.

## Top-level ports (`squire`)

| group | ports | role |
|-------|-------|------|
| host registers | `host_we/waddr/wdata`, `host_raddr/rdata` | control registers |
| host waits | `host_sync_op/w/s`, `host_sync_ready` | `wait_lcounter`, `wait_gcounter` |
| launch | `wk_start`, `wk_start_pc`, `wk_start_args`, `wk_stop`, `wk_running`, `busy` | to/from the worker cores |
| fetch | `wk_fetch_valid/addr/ready/rvalid/rdata[w]` | each worker's instruction port |
| data | `wk_dreq_valid/write/addr/wdata/be/ready`, `wk_drsp_valid/rdata[w]` | each worker's load/store port |
| sync | `wk_sync_op/w/s/ready[w]` | each worker's primitives |
| L2 | `l2_req_*`, `l2_rsp_*`, `l2_inv_*` | the L2's extra port |

A worker core connected here gets `id_worker()` from its position in the
arrays and `num_workers()` from `NUM_WORKERS`. The encoding of the Squire
primitives as instructions belongs to the core and is not defined here.

Parameters: `NUM_WORKERS` (16), `L1I_BYTES` (1024), `L1D_BYTES` (8192),
`QDEPTH` (4). The first three are the published design point: 16 workers,
chosen over 4, 8 and 32, and caches sized by a miss-rate study. `QDEPTH`, the
64-byte line, direct mapping, write-through, round-robin arbitration, the
register map and all handshakes are this implementation's own choices, since
the description does not give them. Reset is asynchronous and active low.
At 16 workers the cache arrays hold about 1.3 Mbit; they are written as plain
arrays and would be mapped to SRAM macros in a real flow.

## How far to trust it

What follows the description closely: the workers' private 1 KB / 8 KB
caches; one shared L2 port with a central arbiter granting one access per
cycle; snoop invalidations on that bus; 64-bit global and local counters,
usable in one cycle; the token-and-queues scheme that keeps global
increments in order; counters cleared by start; the start sequence (entry
address and arguments into registers, PCs set, counters reset); and the
API's wait semantics (greater than or equal).

What is this implementation's own: everything in the previous section's list
of choices; the decision to give every worker its own synchronization port
(so all workers can use the counters in the same cycle); the modelling of
each queue as a counter; retiring any number of queued increments in one
cycle; and flushing the instruction caches on start.

Not included: the worker pipeline (an Armv8 in-order core, which the
description only compares to a Cortex-M35P), the host core, the L2, and the
rest of the chip (mesh network, L3, memory controllers).

## Simulation

Every testbench in `tb/` checks itself. Each prints
`TB_RESULT checks=N failures=M` and stops on a watchdog if it hangs. They need
only Verilator 5 (two-state simulation, `--timing`). For example:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb \
    rtl/squire_pkg.sv tb/tb_squire.sv --top-module tb_squire -o sim
./obj_dir/sim
```

Other testbenches build the same way: put a different `tb/tb_<block>.sv` and
top module in the command. `-Wno-fatal` is needed only because the testbench
code has some width and style warnings. The RTL gives only unused-signal
warnings (for example address bits below the line offset) and the event pins
of the caches left open in `squire`.

| testbench | what it checks |
|-----------|----------------|
| `tb_sync_module` | 4 workers, depth 2. Random traffic checked against a model written differently from the RTL: the counter must equal the longest prefix of increment slots (slot *p* belongs to worker *p mod 4*) that have all been issued. Also checks queue-full stalls, local counters, worker and host waits, clear. |
| `tb_control_regs` | start pulse one cycle after the write and one cycle long, carrying the written values; clear; stop and busy; read-back. |
| `tb_l2_arbiter` | one grant per cycle, round-robin order, forwarding, snoop broadcast, response routing, fairness bound. |
| `tb_l1d_cache` | 512-byte cache over a 2 KB region with foreign writes, L2 invalidations and fill races. Each load must return memory as it was when the load was ordered. Checks hit, miss and store timing. |
| `tb_l1i_cache` | same approach for fetches, including flushes. |
| `tb_squire` | the full default configuration (16 workers) end to end. |
| `tb_squire_workers` | the same end-to-end runs, shorter, at 4, 8 and 32 workers side by side (`squire_run` holds one run). |

`tb_squire` connects 16 behavioural worker cores (`worker_model`) and a
behavioural L2 (`l2_model`: 4-cycle access, random back-pressure, spurious
invalidations). It plays the host and runs five offloads in turn:

* a **radix sort** of 10,240 keys: each worker sorts its 640-key chunk, then
  increments the global counter; the host waits for 16. The size is just
  above 10,000, the point below which the published host code does not
  offload a sort at all;
* a **chain** kernel: 256 anchors, window of 64 (as published), round robin.
  Consumers wait on the global counter. Anchors too far apart skip their
  waits, so increments arrive out of order;
* a **DTW** matrix: 8 rows by 64 columns, four columns per worker,
  synchronized through the local counters;
* a **Smith-Waterman** matrix of the same shape over a 4-letter alphabet,
  using the same band scheme with a local-alignment cell;
* a **burst**: back-to-back global increments with worker 0 late, so the
  other workers' queues fill.

The testbench checks every result against a reference computed inside it. It
also counts each mechanism and requires every one to occur at least once:
hits and misses in both caches, snoop invalidations, L2 invalidations, bus
contention, parked increments, full queues, and stalls on both kinds of wait.
A full run takes about 25,000 cycles, under a second of simulation.
`tb_squire_workers` does the same at smaller sizes (64 keys per worker, 128
anchors, 6-row matrices) for the other worker counts.

The worker model stands in for real worker code. It issues, one at a time,
the same loads, stores and primitives that the published worker functions
would. Its timing is not that of a real core, so cycle counts from it are not
performance figures. The scores are simplified: the chain match-up is 16
minus the gap for anchors at most 12 apart, and Smith-Waterman uses +3/-3 for
a match/mismatch and -2 per gap. The matrix and array sizes are far below the
published inputs (for example DTW signals of about 221 samples). The hardware
does not limit these sizes: the data lives in memory behind the L2, and the
64-bit counters never come near overflow. The seed-sorting kernel of the read
mapper is the radix sort on other keys, so it has no test of its own.
