# Tree Traversal Prefetcher (TTP) for a ray-tracing unit

A GPU ray-tracing unit spends most of its time waiting for BVH (bounding volume
hierarchy) nodes to arrive from memory. Each ray walks the tree with a small
per-thread traversal stack that holds the *addresses* of the nodes it still has to
visit. The Tree Traversal Prefetcher uses that stack as a free and exact source of
future addresses, so it needs no address prediction.

- When a ray goes **down** the tree (pop a node, push its hit children), the next
  address depends on an intersection test that has not finished yet. Nothing is
  prefetched.
- When a ray goes **back up** (several pops in a row), the nodes it will read next
  are already on its stack. TTP prefetches them. The longer the pop streak, the
  more it prefetches.

All it needs per thread is a 2-bit state machine, one pointer into the stack, a
decrementer and a comparator. This repository holds synthesizable SystemVerilog
for that per-thread engine and for the RT-unit memory front end around it. The
front end comprises the warp buffer, the warp scheduler, demand coalescing, the
memory access queue, 32-byte sectoring, the demand/prefetch arbiter and the
response FIFO. A depth-first (stack) mode and a breadth-first (queue) mode are
both supported. The design follows the TTP paper ("TTP: A Hardware-Efficient Design for Precise
Prefetching in Ray Tracing", Tozlu, Naithani and Zhou). Where that description
stops, this implementation makes its own choices, which are listed below.

## 1. The pop-streak state machine (`ttp_fsm`)

Every thread has a 2-bit machine that counts how many pops in a row its stack has
seen:

| state | reached by | prefetch distance k |
|---|---|---|
| S0 | any push (and reset) | 0 |
| S1 | first pop after a push | 1 |
| S2 | second pop in a row | 2 |
| S3 | third and later pops | 16 |

The distances are parameters `K1/K2/K3`. The default is 1-2-16; 1-2-4 and 1-2-8
are the other settings the source evaluated, with little difference between
them. `k` is combinational from the registered state, so a pop shows up in `k`
one cycle later.

## 2. The prefetch window and pointer (`ttp_thread_prefetcher`)

This is the part that needs the most care. Stack positions are numbered from
0 (bottom) to T (top). After a pop the state gives k, and the engine may prefetch
the k entries T, T-1, ..., T-k+1. A register `ptr` walks down through that
window:

```
        push ──► mux ◄── ptr-1 (the "-1" unit)
        T ─────►  │
                 ptr ──► reads stack[ptr] as the prefetch address
                  │
   FSM ─► T-k ─► (ptr != T-k) ──► send_prefetch
```

- **push**: `ptr` is loaded with the new top T. The state drops to S0, so T-k = T
  and nothing is sent.
- **prefetch accepted** (`pf_ack`): `ptr` is decremented.
- **pop**: T drops by one and k grows, so T-k moves down and the comparator
  reopens. If `ptr` is now above the new top, it is brought down to the new top.

The last rule is this implementation's reading of the description. Without it,
the first prefetch after a pop would be the very entry just popped, and that entry
is already being read as a demand. With it, the worked example of the source
comes out exactly. Take a stack holding B H K L N O P, with P on top and `ptr` at
P:

| event | state, k | window | prefetched |
|---|---|---|---|
| pop P | S1, 1 | O | O |
| pop O | S2, 2 | N, L | N, L |
| pop N | S3, 16 | L, K, H, B | K, H, B (L was already sent) |

`ptr` is reloaded only by a push, so a run of pops never sends the same entry
twice. A new push followed by new pops may send an entry again; the cache
absorbs that. T-k is clamped at -1 ("below the bottom"). Positions are signed,
with width `clog2(DEPTH)+7`.

One prefetch per thread per cycle is possible. The warp buffer takes at most one
prefetch per cycle from the selected warp (section 4).

## 3. Breadth-first mode

With `mode = TRAV_BFS` every traversal stack works as a FIFO queue: push at the
tail, pop at the head. The next addresses are then known at any time, and the
distance is a fixed `N_BFS` (default 4). After each pop the first
min(N, entries left) entries from the head form the window. A counter of entries
already prefetched from the head walks through it, and each pop lowers that
counter by one because the head entry leaves. Each queue entry is therefore
prefetched at most once. The window is latched at the pop: children pushed
afterwards wait for the next pop. The mode may only change while all stacks are
empty, which is asserted.

## 4. The RT-unit front end (`ttp_rt_unit`)

```
 upd_* (from the operation units)
   │
   ▼
 warp_buffer ──(has_demand/has_prefetch)──► rt_warp_scheduler ──sel_warp──┐
   │  per thread: traversal_stack, ray record, ray-status bit,            │
   │              ttp_thread_prefetcher (FSM + ptr)                       │
   │  selected warp: demand_coalescer ─► demand node ─► memory_access_queue ─► sector_splitter ─┐
   │                 round-robin lane  ─► prefetch node ──────────────────► sector_splitter ──┤
   ◄──────────────────────────────────────────────────────────────────────────────────────────┘
                                                         prefetch_arbiter ──► l1_* (32 B/cycle)

 l1_resp_* (demand sectors back from the L1) ──► response_fifo ──► op_* (to the operation units)
```

Each cycle the scheduler picks, round-robin, one warp that can issue: it must have
a demand read and room in the queue, or a prefetch and a free prefetch splitter.
From that warp:

- **Demand.** The lowest-numbered thread that is waiting for a node and has a
  non-empty stack leads. Every waiting thread of the warp whose next node is the
  same address is merged into one read. All of them pop, and the read, with the
  lane mask, enters the memory access queue (8 entries).
- **Prefetch.** One thread whose engine has `send_prefetch` is chosen round-robin.
  The address is read from its stack at `ptr`, and its pointer moves on.

Both paths break each 64-byte node into two 32-byte sector requests, sent on
consecutive cycles. At the L1 port a demand sector always wins by default, so
prefetches use only idle cycles. With `ARB_THRESHOLD > 0`, a waiting prefetch wins
once that many cycles have passed since the last prefetch left. The source tried
25, 50 and 100 and found little difference.

**Timing.** A thread marked ready can be popped in the next cycle. Without
contention, the first sector of its read is on `l1_*` three cycles after the pop:
queue, then splitter register, then port. The second sector follows the next
cycle. A prefetch reaches the port two cycles after it is taken from the stack.

**Ports of `ttp_rt_unit`.**

| port | dir | meaning |
|---|---|---|
| `mode` | in | `TRAV_DFS` or `TRAV_BFS` |
| `upd_valid, upd_warp, upd_lane` | in | one update per cycle, for one thread |
| `upd_push, upd_push_addr` | in | push a hit child's node address |
| `upd_ready` | in | the thread has finished its node and waits for the next one |
| `ray_wr_valid, ray_wr_warp, ray_wr_lane, ray_wr_id, ray_wr_props` | in | a ray enters: store its 16-bit ID and 192-bit properties for that thread |
| `ray_rd_warp, ray_rd_lane` → `ray_rd_valid, ray_rd_id, ray_rd_props` | in → out | combinational read of one thread's ray record, for the operation units |
| `l1_valid, l1_ready` | out/in | sector request handshake |
| `l1_req` | out | `mem_req_t`: sector address, `REQ_DEMAND`/`REQ_PREFETCH`, warp tag |
| `l1_mask` | out | threads of a demand read (zero for prefetches) |
| `l1_resp_valid, l1_resp_req, l1_resp_mask, l1_resp_data` / `l1_resp_ready` | in / out | a demand sector returned by the L1, with its request, lane mask and 32 data bytes |
| `op_valid, op_req, op_mask, op_data` / `op_ready` | out / in | the oldest response, for the operation units |
| `warp_done` | out | every thread of the warp waits on an empty stack |
| `stack_full` | out | some stack is full (pushing then is an assertion error) |

Only demand sectors come back, in the order the L1 returns them; a prefetched
sector just fills the cache (an assertion in the FIFO checks this). The response
FIFO (8 entries, one sector each) holds them until the intersection and
transform units take them on `op_*`. Those units are not part of this RTL; they
read the thread's ray record, test the node, and then drive
`upd_*`: first the pushes of the hit children, then the ready mark. A thread is
popped only while it waits, and pushed only while it does not, so a stack never
sees a push and a pop in one cycle.

## 5. What is not here

- **Not built:** the intersection units (ray-box, ray-triangle), the coordinate
  transform, the L1/L2 caches, the crossbar and the SM cores.
  They belong to the surrounding GPU, and the TTP description does not design
  them. The node format and arithmetic are not given either.
- **Not built:** any-hit early termination. That decision is made by the
  operation units, which simply stop sending `upd_ready`.
- **Not built:** the optional per-entry "already prefetched" flag, which is an
  alternative to the pointer.

## 6. Parameters and own choices

| parameter | default | origin |
|---|---|---|
| `NUM_WARPS` | 4 | RT-unit warp buffer size of the evaluated GPU |
| `WARP_SIZE` | 32 | warp size |
| `K1, K2, K3` | 1, 2, 16 | state machine |
| `N_BFS` | 4 | BFS distance chosen by the source |
| `ARB_THRESHOLD` | 0 (demand priority) | default policy; 25/50/100 evaluated |
| `STACK_DEPTH` | 128 | own: 6-wide DFS of an 18-level tree needs at most 5*18+1 = 91 |
| `MAQ_DEPTH` | 8 | own |
| `RESP_DEPTH` | 8 | own |
| node size / sector | 64 B / 32 B | node size own; sector size from the source |
| address width | 32 bits | own (`ttp_pkg::ADDR_W`) |

Other choices made here:

- synchronous active-low reset;
- round-robin warp and lane selection, and the lowest thread leads a merged read;
- a single update port, and separate ray-record write and read ports;
- a 16-bit ray ID; the ray properties are origin and direction, three 32-bit
  components each (192 bits), kept as an unreset memory behind a reset valid bit;
- stacks are circular buffers whose second read port serves the prefetcher.

At the defaults the top synthesises, before technology mapping, to about
6.6 k flip-flops plus 512 Kbit of stack memory (128 stacks x 128 x 32 bits) and
26 Kbit of ray records (128 x 208 bits). The
TTP-specific state is small: per thread, 2 FSM bits, a 14-bit pointer and two
8-bit BFS counters. The source quotes 1117 cells for 128 FSMs in a 45 nm library;
that figure is not comparable with the word-level counts here.

## 7. Simulating

All files are SystemVerilog-2017. Packages come first. With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal rtl/ttp_pkg.sv rtl/*.sv \
          tb/tb_ttp_rt_unit.sv --top-module tb_ttp_rt_unit
obj_dir/Vtb_ttp_rt_unit
```

(`rtl/ttp_pkg.sv` is listed twice by the glob; Verilator only warns.) Each
testbench prints `TB_RESULT checks=N failures=M` and has a watchdog.

| testbench | what it checks |
|---|---|
| `tb_ttp_fsm` | state and k against a pop-streak counter, all four states reached |
| `tb_traversal_stack` | LIFO and FIFO behaviour, both read ports, full/empty, against a queue model |
| `tb_ttp_thread_prefetcher` | the B H K L N O P example exactly; random DFS: no repeats, every prefetch inside the window, full window covered; random BFS with N=4 |
| `tb_demand_coalescer` | leader and merge mask |
| `tb_warp_buffer` | the example through a warp; random traffic against reference stacks and ray records (2 warps x 4 threads) |
| `tb_rt_warp_scheduler` | round-robin choice and fairness |
| `tb_prefetch_arbiter` | demand priority and a 5-cycle threshold side by side |
| `tb_sector_splitter` | sector addresses, order, one per cycle back to back |
| `tb_memory_access_queue` | order, level, write-while-full |
| `tb_response_fifo` | order, data, level, write-while-full |
| `tb_ttp_rt_unit` | whole unit at default size, below |
| `tb_ttp_rt_unit_variants` | the same end-to-end test with `ARB_THRESHOLD=25`, `K3=8` (1-2-8) and `N_BFS=2`; the threshold must let a prefetch sector overtake demand |

`tb_ttp_rt_unit` runs the unit at its default size. It builds an implicit 6-ary
BVH of 1555 nodes and decides hits with a hash, so groups of four threads share
paths. It models the L1 port (random back-pressure plus periodic 60-cycle stalls,
fixed latency, sectors returned through the response FIFO) and the operation
units, which are sometimes busy.

- **Checks:** every one of the 128 threads reads exactly the node sequence of a
  reference DFS, then after a reset a reference BFS. Demand sectors leave on
  consecutive cycles. Every prefetched node is read by its warp. Each update
  reads back the ray record written for that thread. Every response leaves the
  FIFO with its own data, the two sectors of a node in order.
- **Mechanisms:** it counts merged reads, prefetches in S1, S2 and S3, prefetches
  held back by demand, a full queue, back-pressure, BFS prefetches and a full
  response FIFO. Each must
  occur.

One run takes about 30 k cycles and under a second. Prefetches that leave after
their own demand read are reported too. They come from the strict demand priority
and from merged threads that have already read the node.

## 8. How far to trust it

- The state machine, the pointer/comparator mechanism and the BFS distance are
  checked against the worked example and against independent window models.
- The surrounding front end is an interpretation. Queue sizes, selection orders,
  the update interface and the clamp of the pointer on a pop are choices made here
  where the description is silent.
- Performance is not measured. The caches and memory are simple models in the
  testbench, so the testbench says nothing about speedup.
