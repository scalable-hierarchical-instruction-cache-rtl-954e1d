# A two-level instruction cache for a cluster of ultra-low-power cores

Eight small RISC-V cores in a tightly coupled cluster usually run the same
program on different data (SPMD). A private instruction cache per core wastes
capacity, because every core keeps its own copy of the same code. A cache that
all cores share directly has the opposite problem: it holds the code once, but
the path from every core through a crossbar to every bank becomes the slowest
path of the cluster and limits the clock.

This design splits the difference. Each core keeps a tiny private **L1**
(512 B) that answers in one cycle, and the eight L1s share a **4 KB L1.5**,
split into two banks and reached through a registered 8x2 interconnect in two
cycles. The critical path no longer crosses the interconnect. The price is the
extra latency of an L1 miss, and three mechanisms win it back:

* a **next-line prefetcher** in every L1. It asks the L1.5 for the line after
  each one the core fetches. **Cache probe filtering** (CPF) drops the request
  when the line is already in the L1, so sequential code costs almost no extra
  L1.5 bandwidth.
* an **out-of-order return path**. Fetch and prefetch share one L1.5 port per
  L1 and carry a one-bit transfer id, so either can be in flight while the
  other waits. If both answers reach one L1 in the same cycle, the prefetch
  answer is thrown away.
* a **4-entry ring FIFO** in each core's fetch stage. The core's fetch request
  no longer depends combinationally on the L1, and short branches can be served
  from words the ring still holds.

The RTL here is the full instruction-side subsystem of such a cluster: the
cores' fetch front ends, the L1s, the L1.5 and its AXI4 refill port. It is
written in synthesizable SystemVerilog. Its default parameters are the
configuration described above, with 8 cores, 8 x 512 B L1 and 2 x 2048 B L1.5.
The cores, the L2 memory and the rest of the SoC are not part of it.

## Block structure

```
 core c (x8)                                                         shared
 ──────────────────────────────────────────────────────────         ─────────────────────────
 instr port ◄─ fetch_ring_fifo ◄─ l0_buffer ◄─ l1_icache ◄─ l1_l15_buffer ◄─┐
 branch ─────►  (4 x 32 bit)      (128 bit)    512 B 4-way   req: off          │
                                               ├ scm_tag_array (2 read ports)  l15_interconnect (8x2)
                                               ├ scm_data_array                  │        │
                                               ├ l1_fetch_unit                 l15_bank  l15_bank
                                               ├ l1_prefetch_unit (CPF)        2 KB 4-way each
                                               ├ l1_arbiter (transfer id)        │        │
                                               └ prand_replacement             axi_ibus_mux
                                                                                  │ 64-bit AXI4 read
                                                                                  ▼ to L2
```

`hier_icache` is the top. Its ports are plain signals and unpacked arrays.

* **Per core:** a valid/ready instruction port (`instr_valid_o`,
  `instr_rdata_o`, `instr_addr_o`, `instr_ready_i`), a branch input
  (`branch_i`, `branch_target_i`) and a prefetch enable (`prefetch_en_i[c]`).
* **Toward L2:** one AXI4 read port, AR and R channels only, 64-bit data,
  2-bit ID.
* **Counters:** the hardware event counters described below.

## What happens on a fetch

Addresses are byte addresses. A cache line is 16 B, four 32-bit instructions,
and that line is also the width of every interface below the L0 buffer.

**The core side.** The ring FIFO asks for the next word whenever the words it
holds plus those in flight leave room. It does not wait for the core. The L0
buffer holds the last line the L1 returned and answers a word of that line one
cycle after the request. A request for any other line goes to the L1.

**L1 hit: 1 cycle.** The L1 accepts a request in cycle T. In T+1 it reads the
tag array (port 0) and the data array and returns the line. It can take the
next request in that same cycle, so hits stream one per cycle.

**L1 miss, L1.5 hit: 3 cycles.** The lookup in T+1 misses. The refill request
goes out in that same cycle, through the arbiter and straight into the
interconnect: the request buffer is disabled by default. The interconnect picks
one L1 per bank, round robin, and the bank registers the request. In T+2 the
bank looks up its tags and reads the line. The response buffer registers the
answer. In T+3 the L1 forwards the line to the core and writes it into its
arrays at the same time. The victim way is the first invalid way, otherwise
the one chosen by a 16-bit LFSR.

**L1.5 miss: 19 cycles at the L1 port.** The bank leaves its run state. It
issues one AXI4 INCR burst of two 64-bit beats (ARLEN=1, ARSIZE=3), collects
the beats, writes the line and answers in the cycle the last beat arrives. Each
bank has one miss outstanding, and other requests to that bank wait. The
mux in front of the AXI port gives each bank its own ARID, the bank number
prepended, so read data returns to the right bank. With an L2 that gives the
first beat 13 cycles after the address, an L1 miss that also misses in the
L1.5 costs 19 cycles at the L1 port. This is the refill figure the
hierarchical configurations are usually quoted with.

## Prefetching, filtering and the out-of-order return

Only one request port connects an L1 to the L1.5. Fetch and prefetch must
share it, and the prefetch must never hold up a demand fetch. The interactions
follow.

**Trigger and probe.** Every core fetch the L1 accepts sets a prefetch
candidate: the next line (address + 16). In the next cycle the candidate's set
is read on the second tag port. If the candidate is already in the L1, or
already in the prefetch buffer, it is dropped. This is cache probe filtering:
in straight-line code, most next lines were brought in earlier, and the
filter stops them from loading the L1.5. Otherwise the prefetch unit raises
its request. The arbiter gives the port to a demand refill first. A prefetch
goes out only in a cycle without one.

**One in flight, one buffered.** Each L1 has at most one prefetch in flight.
A trigger that arrives meanwhile replaces the waiting candidate, so the newest
one goes next. The answer goes into a one-line **prefetch buffer**, not into
the cache. A line enters the cache only when a demand fetch uses it, so
prefetches never evict useful lines.

**What the fetch unit does with it.** On an L1 miss, the fetch unit asks the
prefetch side about the line. There are three cases:

* *Prefetch hit.* The line is in the buffer, or arriving in this very cycle.
  The fetch unit takes it, answers the core with no L1.5 round trip, and
  writes it into the cache through the write mux (input 1: prefetch buffer;
  input 0: refill).
* *Wait for the unfinished prefetch (WUP).* The line is the one in flight. The
  fetch unit sends no second request and waits for that answer.
* *Miss.* Otherwise it sends a demand refill. It may do so while an unrelated
  prefetch is still in flight: the two travel independently.

**Transfer id and the drop rule.** Each request carries a one-bit id: 0 for
fetch, 1 for prefetch. The two banks may answer one L1 in the same cycle: a
prefetch that waited for an L2 refill in one bank, and a demand fetch that hit
in the other. The L1 can take only one line per cycle. The interconnect passes
the fetch answer, discards the prefetch answer and raises a drop flag. The
drop flag clears the prefetch unit's in-flight state. If the fetch unit was
waiting for that very line (WUP), it falls back to a demand refill. The
demand fetch is never delayed.

**Software switch.** `prefetch_en_i[c]` disables the prefetcher of core c. The
L1 then behaves like a plain two-level cache. The end-to-end test uses this
switch to measure what prefetching buys: with it the 0.75 KB loop runs about
20 % faster, and its L1 misses fall from 1024 to about 30.

## The fetch front end: ring FIFO and L0 buffer

The ring FIFO has four 32-bit entries and read and write pointers with a wrap
bit (equal pointers mean empty). Its fetch request is a function of its own
registers only. That is the point of the block: the core's fetch request does
not wait on the cache's grant through combinational logic. Words already
handed to the core stay in their entries until overwritten.

When the core takes a branch, the ring looks for the target among the stored
words. If the target is there, and the words in flight still fit behind it,
the read pointer moves to the target: a **ring hit**. No fetch is lost, which
helps short forward branches and very short loops. Otherwise the FIFO is
flushed. Fetching restarts at the target, and words still in flight are counted
and discarded when they arrive. A branch is taken in a cycle in which the core
takes no instruction. The core model treats a jump as known one cycle after it
was fetched, like a decode-stage jump. The one-cycle delay of conditional
branches belongs to the core pipeline and is not part of this RTL.

The L0 buffer is a single 128-bit line register with its address. The four
words of a line therefore cost the L1 one access.

## L1.5 banks and interconnect

* **Bank select.** A line goes to bank `addr[4]`: consecutive lines alternate
  banks, so a fetch and its next-line prefetch always go to different banks.
* **Bank layout.** Each bank is 4-way, with 32 sets of 16 B lines. The set
  index is `addr[9:5]` and the tag is `addr[31:10]`.
* **Arbitration.** The interconnect arbitrates each bank round robin over the
  eight L1s. A request that loses waits, with its valid held and no grant:
  this is the bank conflict the counters reveal.
* **Timing.** Answers return in a fixed 2 cycles after the grant, or after the
  refill. They carry the number of the L1 they belong to, so answers from the
  two banks arrive in any order.
* **Buffers.** `l1_l15_buffer` sits between each L1 and the interconnect. Its
  request register (`REQ_BUF`, off by default) cuts the L1 to L1.5 request
  path and adds a cycle. Its response register (`RSP_BUF`, on) is part of the
  two-cycle L1.5 access.

## Event counters

All counters are 32 bits, count from reset and wrap.

| counter | per | counts |
|---|---|---|
| `l1_hit_cnt_o` | core | L1 tag hits |
| `l1_miss_cnt_o` | core | demand refills sent to the L1.5 |
| `l1_pf_hit_cnt_o` | core | L1 misses served from the prefetch buffer |
| `l1_wup_cnt_o` | core | misses that waited for an unfinished prefetch |
| `l1_pf_issued_cnt_o` | core | prefetches sent to the L1.5 |
| `l1_pf_filtered_cnt_o` | core | prefetch candidates removed by the probe |
| `ring_hit_cnt_o` | core | branches served from the ring FIFO |
| `l15_hit_cnt_o` | bank | L1.5 hits |
| `l15_refill_cnt_o` | bank | L2 refills (AXI bursts) |

The L1.5 refill count and the elapsed cycles are the two quantities needed to
estimate energy including the L2 reads.

## Parameters

| module | parameter | default | meaning |
|---|---|---|---|
| `hier_icache` | `NB_CORES` | 8 | cores, L1s and interconnect masters |
| | `NB_L15_BANKS` | 2 | L1.5 banks (power of two) |
| | `L1_BYTES` | 512 | capacity of each L1 |
| | `L15_BYTES` | 4096 | capacity of the whole L1.5 |
| | `NB_WAYS` | 4 | associativity of L1 and L1.5 |
| | `RING_DEPTH` | 4 | ring FIFO entries |
| | `REQ_BUF` / `RSP_BUF` | 0 / 1 | L1 to L1.5 request / response register |
| `hic_pkg` | `LINE_W`, `AXI_DATA_W` | 128, 64 | line and refill beat width |

Other sizes work through the parameters. For example, an 8 KB L1.5 is
`L15_BYTES=8192`, and a 16-core cluster is `NB_CORES=16`, which also widens
the master number. For a larger cluster, the request register (`REQ_BUF=1`)
is the knob that keeps the L1 to L1.5 path short, at one more cycle per L1.5
access. One testbench runs 16 cores with it on. The 8 KB L1.5 is not
simulated.

## Where this RTL departs from the paper

This RTL follows a published architecture. Where that description stops, the
design makes its own choices:

* **Memory arrays.** The published cache uses latch-based standard-cell
  memories. Here they are flip-flop arrays with combinational read. A
  synthesis flow would map them to the latch arrays.
* **Unspecified microarchitecture.** None of the following is specified, so
  each is this design's choice:
  * the exact cycle in which a refilled line is written;
  * the one-prefetch-in-flight limit and the one-line prefetch buffer;
  * fetch priority in the L1 arbiter;
  * round-robin bank arbitration;
  * interleaving on address bit 4;
  * the blocking L1.5 refill;
  * the two-beat AXI burst;
  * the ARID scheme;
  * the LFSR (taps 16, 14, 13, 11, seed 0xACE1);
  * the invalid-way-first rule.
* **Ring FIFO.** The ring FIFO's hit rule is a design choice. A branch target
  must still be stored and the in-flight words must fit.
* **Core interface.** The interface toward the core is a generic valid/ready
  port with a branch input. The real core's fetch interface and its extra
  conditional-branch stage are not modelled.
* **Reset.** Reset clears all valid bits, FSMs, pointers and counters. There
  is no invalidate or flush command for the caches.

## Verification

Every block has a self-checking testbench in `tb/`. Each ends with a line
`TB_RESULT checks=N failures=M` and has a watchdog.

| testbench | covers |
|---|---|
| `tb_scm_tag_array`, `tb_scm_data_array` | random writes and reads on both tag ports against a model |
| `tb_prand_replacement` | invalid-way-first, LFSR sequence against an independent LFSR |
| `tb_l1_icache` | L1 with a behavioural L1.5: 1-cycle hit, 3-cycle miss, prefetch hit, WUP, CPF, drops, random traffic |
| `tb_l1_l15_buffer` | both buffers, lossless in-order transfer under random stalls |
| `tb_l15_interconnect` | routing, round robin, out-of-order answers, fetch-over-prefetch drop |
| `tb_l15_bank` | hit in one cycle after the stage, miss latency with the L2 model, bursts, counters |
| `tb_axi_ibus_mux` | AR arbitration, ID routing, R return |
| `tb_l0_buffer`, `tb_fetch_ring_fifo` | word delivery, branches, ring hits, flushes |
| `tb_hier_icache` | the whole top at its default size |
| `tb_synthetic_vecmul` | the unrolled vector-multiplication benchmark at every loop size |
| `tb_hier_icache_16` | a 16-core cluster with the request buffer on; L1 miss with an L1.5 hit then costs 4 cycles |

`tb_hier_icache` instantiates the top with no parameter overrides. Behind it
is `l2_axi_model`, a behavioural AXI read slave returning a fixed pattern per
address (`tb_pkg::code_word`). Eight core models check, for every instruction
they receive, its address and content against the program order. The test
runs the following phases:

1. It measures the cold 19-cycle refill.
2. It runs a 0.75 KB loop with prefetching off and then on.
3. It runs loop bodies of 0.375, 0.75, 1.5, 3, 6 and 12 KB, like the unrolled
   vector-multiplication benchmark. For each it reports cycles per instruction
   after a warm-up pass and checks where the body fits.
4. It runs control code with random short and far branches and core stalls.
5. It runs single cores over a body larger than the L1.5, which makes fetch
   and prefetch answers collide.

It fails if any of these mechanisms never happened: L1 hit, L1 miss,
prefetch hit, WUP, CPF, drop, bank conflict, L1.5 hit, refill, ring hit or
flush.

A typical run reports about 1.3 cycles per instruction per core for bodies up
to 0.75 KB, 1.5 up to 3 KB, and 3.3 and 4.1 for 6 and 12 KB, once the body
outgrows the L1.5. Part of the cost in small loops is the ring FIFO flush at
every loop jump.

`tb_synthetic_vecmul` runs the parallel synthetic benchmark the way it is
defined. A vector multiplication of 8192 elements is split evenly over the 8
cores. Its loop is unrolled STEP = 32 to 1024 times, so each core makes
1024/STEP passes over a body of 3 x STEP instructions (0.375 to 12 KB). Every
version runs from reset, with the prefetcher off and then on. For each, the
test reports cycles, throughput relative to the smallest body, and L2 refills.
It checks three things:

* bodies that fit the L1.5 are refilled from L2 only once;
* larger bodies are refilled again on later passes;
* prefetching shortens the 0.75 to 3 KB versions.

With prefetching off, 0.75 KB runs at 0.77 of the throughput of 0.375 KB and
3 KB at 0.53. With prefetching on, these become 0.94 and 0.69.

To run a testbench with plain verilator:

```
verilator --binary --timing --assert --top-module tb_hier_icache \
    -y rtl -y tb +libext+.sv rtl/hic_pkg.sv tb/tb_pkg.sv tb/tb_hier_icache.sv
./obj_dir/Vtb_hier_icache
```

Replace the top module and file for any other testbench. The whole-system test
takes a few seconds.

The stimulus is random, so each testbench was also run with
`+verilator+rand+reset+2` and several `+verilator+seed+N` values. All of them
pass on seeds 1, 2, 3, 4, 7, 11 and 13. The unit testbenches start with reset
high and pull it low after 1 ns. This gives the asynchronous reset a real
falling edge, so no register holds a random value before the first clock.

## Files

`rtl/`: `hic_pkg` (types: address, line, transfer id, request and answer
structs), `scm_tag_array`, `scm_data_array`, `prand_replacement`,
`l1_fetch_unit`, `l1_prefetch_unit`, `l1_arbiter`, `l1_icache`,
`l1_l15_buffer`, `l15_interconnect`, `l15_bank`, `axi_ibus_mux`, `l0_buffer`,
`fetch_ring_fifo` and `hier_icache`.

`tb/`: one testbench per block as listed above, plus `tb_pkg` (the
instruction pattern) and `l2_axi_model`.
