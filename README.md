# SRAM-PCM hybrid last-level cache with dead-fast-block replacement

Phase-change memory (PCM) packs about eight times more bits into the area of
SRAM and leaks far less. But a PCM write takes about 150 ns and wears out the
cell. Building a large L2 entirely from PCM gives a cache that is slow to
write and wears out quickly. This design builds each set from two kinds of
way:

* 2 of the 8 ways are SRAM, the *fast* ways. They are quick to write and
  practically do not wear.
* 6 ways are PCM, the *slow* ways. They provide most of the capacity.

The replacement policy then makes sure that new blocks, and the writes that
follow them, land in the SRAM ways as often as possible.

The policy is called **dead fast block (DFB)**. It is LRU with one change. An
SRAM block is declared dead, and is replaced, as soon as it has sunk to
position `Z` of the LRU stack. It does not wait until it reaches the bottom.
The SRAM ways are therefore recycled much faster than the PCM ways. Every
fill into a recycled SRAM way is a write that the PCM is spared. `Z` is
re-chosen at run time from the miss rate.

The RTL follows the SRAM-PCM hybrid cache and DFB policy described by
S. Mittal in *A Technique for Efficiently Managing SRAM-NVM Hybrid Cache*. The
sizes, the victim and `Z` algorithms, the interval and the latencies are
taken from that description. The bank pipeline, handshakes, address mapping
and write policy are choices made here. The section "What is taken from the
source and what is not" lists all of them.

## Organisation

| quantity | value | parameter |
|---|---|---|
| capacity | 8 MB | `N_BANKS * SETS_PER_BANK * ASSOC * 64 B` |
| line size | 64 B (512 bits) | `llc_pkg::LINE_BYTES` |
| associativity | 8 | `ASSOC` |
| SRAM ways per set | 2 (ways 0 and 1) | `N_FAST` |
| PCM ways per set | 6 (ways 2 to 7) | `ASSOC - N_FAST` |
| banks | 8, one access each in flight | `N_BANKS` |
| sets per bank | 2048 | `SETS_PER_BANK` |
| physical address | 48 bits | `llc_pkg::ADDR_BITS` |

The address is split as follows:

| bits | field |
|---|---|
| `addr[5:0]` | byte offset (ignored, since whole lines move) |
| `addr[8:6]` | bank |
| `addr[19:9]` | set within the bank |
| `addr[47:20]` | 28-bit tag |

The physical ways 0 and 1 are the SRAM ways. Which ways are SRAM does not
matter to the algorithm. What matters is that the victim search below visits
the SRAM ways first.

## The LRU stack and the DFB victim

Each set keeps an `LRU_Order` for each way. It is the way's position in the
recency stack, and it is stored in 3 bits (`lru_stack`). The text below counts
positions from 1, the MRU position, to 8, the bottom. The hardware stores the
position minus 1.

On every hit and every fill, the accessed way moves to position 1. Every way
that was above it moves down by one place, and the ways below it keep their
positions.

After reset, way `w` sits at position `w+1`. This puts the two SRAM ways at
the top of the stack. Blocks that have never been filled are never promoted.
They therefore always occupy the lowest positions, which is what LRU needs in
order to fill invalid ways first. No separate invalid-way search is needed.

On a miss, `dfb_victim_select` scans the ways from way 0 upward and takes the
first way that passes either of two tests:

1. it is an SRAM way (`w < N_FAST`) and its position is at least `Z`, or
2. its position is 8, the bottom of the stack.

Plain LRU is test 2 alone. Test 1 evicts an SRAM block early, once it has sunk
only `Z` places, so that the next block is brought into SRAM. The `early`
output marks a victim that LRU would not have chosen.

Here is a worked example with `Z = 4`, starting from reset, with a run of
misses to one set. Positions are listed for ways 0 to 7.

| miss | positions before the miss | victim | reason |
|---|---|---|---|
| 1 | 1 2 3 4 5 6 7 8 | way 7 | bottom of the stack |
| 2 | 2 3 4 5 6 7 8 1 | way 6 | bottom of the stack |
| 3 | 3 4 5 6 7 8 1 2 | way 1 | SRAM way at position 4 ≥ Z |
| 4 | 4 1 5 6 7 8 2 3 | way 0 | SRAM way at position 4 ≥ Z |
| 5 | 1 2 5 6 7 8 3 4 | way 5 | bottom of the stack |

Once the SRAM ways have been used, they are taken again as soon as they sink
to position 4, so a large share of fills go to SRAM. With a smaller `Z` the
SRAM ways are recycled even sooner.

The cost is visible when the working set is large and well used. DFB may then
throw out an SRAM block that would have been reused, while keeping a useless
block at the bottom of the stack. The reverse effect also exists. In a pure
stream, LRU evicts everything, but DFB leaves a few blocks untouched in the
lower part of the stack, and these can later hit.

## Choosing Z

`z_update` is shared by all banks. It counts lookups and misses over a fixed
interval, `Z_INTERVAL` cycles (5 M cycles by default). At the end of each
interval it sets `Z` from the miss rate `Mr`:

| miss rate in the last interval | new Z |
|---|---|
| below 80 % | 5 |
| 80 % to below 90 % | 4 |
| 90 % to below 99 % | 3 |
| 99 % and above | 2 |

The idea is that a high miss rate means poor locality. Blocks are then
unlikely to be reused, so SRAM blocks can be declared dead after sinking only
a little.

Some details of the implementation:

* The comparison is done without division: `misses*100 < 80*accesses`, and
  likewise for 90 and 99.
* `Z` is 4 after reset.
* An interval with no lookups leaves `Z` unchanged.
* Events that happen in the boundary cycle are counted in the next interval.
* `Z` is one 3-bit register and is the only state DFB adds to LRU.

## One bank

Each `llc_bank` serves one request at a time. A request reads or writes a
whole 64-byte line.

| step | what happens |
|---|---|
| IDLE | Take the request. Read the set's tags (`tag_array`) and LRU orders (`lru_stack`). |
| LOOKUP (1 cycle, the miss-detection latency) | Compare the tags and report `access` and, on a miss, `miss`. |
| hit | Promote the way to the top. Read it, or write it and set its dirty bit. |
| miss | Pick the DFB victim. If the victim is valid and dirty, read it and send it to memory. A read miss fetches the line from memory. A write miss does not fetch, because the whole line is overwritten. Write the line into the victim way, write its tag (dirty for a write miss), and promote the way to the top. |
| response | A read hit answers when the data array returns data. A write answers when the array write has finished. A read miss answers as soon as the memory data arrives, while the fill write continues in the background. |

The bank accepts its next request only when the data array is idle and the
response has been taken. A PCM fill or PCM write hit therefore blocks its bank
for about 300 cycles. This is why directing fills into SRAM speeds the cache
up, and is not only a matter of wear.

Array timing is given at the 2 GHz clock, rounded up to whole cycles. The
nanosecond figures are those of a 1 MB SRAM and an 8 MB PCM array in 32 nm:

| | SRAM ways (`sram_data_array`) | PCM ways (`pcm_data_array`) |
|---|---|---|
| read | 0.697 ns → 2 cycles | 0.905 ns → 2 cycles |
| write | 0.3 ns → 1 cycle | 150.384 ns → 301 cycles |
| miss detection | | 0.274 ns → 1 cycle (the LOOKUP cycle) |

Latency as the requester sees it is counted from the edge at which the
request is taken to the edge at which the response is taken:

| access | latency |
|---|---|
| read hit | 4 cycles: 1 tag + 2 array + 1 response register |
| write hit, SRAM way | 3 cycles |
| write hit, PCM way | 303 cycles |
| read miss | 2 cycles + memory latency, plus the writeback if the victim is dirty |

After reset every bank spends `SETS_PER_BANK` cycles (2048) clearing its valid
bits and writing the initial LRU orders. `init_done` rises when all banks are
ready. Until then `req_ready` is low.

`pcm_data_array` is a behavioural stand-in for a PCM array macro. It has the
macro's interface and timing, and its storage is an ordinary memory. It does
not model wear, drift or the analog write circuits. `sram_data_array` is the
same structure with SRAM timing, and is meant to map onto an SRAM macro.

## Top level: `hybrid_llc`

### Ports

All handshakes are valid/ready. A transfer takes place on a rising `clk` edge
when both signals are high, and the payload must be held until then.

* **Requests: `req_valid`, `req_ready`, `req`.** `req` is an
  `llc_pkg::llc_req_t` with fields `we`, `addr`, `id` and `wdata`. A request
  goes to the bank selected by `addr[8:6]`. `req_ready` is low while that bank
  is busy. The port does not look past a stalled request.
* **Responses: `resp_valid`, `resp_ready`, `resp`.** `resp` is an
  `llc_pkg::llc_resp_t` with fields `id`, `we`, `hit` and `rdata`. Banks finish
  in any order, so responses come back out of order and must be matched by
  `id`. A round-robin `rr_arbiter` picks among banks with a response ready.
  Requests to the same bank are answered in the order they were accepted.
* **Memory requests: `mem_req_valid`, `mem_req_ready`, `mem_req`.** These are
  line reads (fills) and line writes (dirty victims). `mem_req.src` is the bank
  number, and a second round-robin arbiter shares the port among the banks.
  Memory must process requests in order, and must return read data on
  `mem_resp_valid` / `mem_resp` with the `src` of the read. There is no ready
  signal on the return: the bank that asked is always waiting for it.
* **Status: `z`, `z_updated`, and `st_*`.** `z` is the current `Z` and
  `z_updated` pulses after each update. The `st_*` outputs carry one pulse per
  bank per event: `st_access`, `st_miss`, `st_early` (a DFB early eviction),
  `st_writeback`, `st_fast_write` (a write into an SRAM way) and
  `st_slow_write` (a write into a PCM way). Counting `st_fast_write` against
  `st_slow_write` gives the share of cache writes absorbed by SRAM, which is
  the quantity DFB tries to raise.

### Files

| file | role |
|---|---|
| `rtl/llc_pkg.sv` | constants and request, response and memory structs |
| `rtl/hybrid_llc.sv` | top: bank routing, arbiters, `Z` |
| `rtl/llc_bank.sv` | bank controller |
| `rtl/tag_array.sv`, `rtl/lru_stack.sv` | per-set state |
| `rtl/dfb_victim_select.sv` | DFB victim |
| `rtl/z_update.sv` | miss-rate driven `Z` |
| `rtl/sram_data_array.sv`, `rtl/pcm_data_array.sv` | data ways |
| `rtl/rr_arbiter.sv` | round-robin arbiter |

Assertions in `llc_bank` check these handshake rules:

* responses and memory requests are held stable while they are stalled;
* a data array is never started while it is busy;
* memory data never arrives at a bank that is not waiting for it.

## What is taken from the source and what is not

The following are taken from the source description:

* 8 MB capacity, 8 ways, 64-byte lines.
* 2 SRAM ways and 6 PCM ways, with the SRAM ways first.
* 8 banks, each with one access in flight.
* The LRU stack with the SRAM ways on top at start-up. Invalid ways sit
  lowest.
* The DFB victim search.
* The `Z` thresholds, the interval of 5 M cycles and the start value of 4.
* `Z` as one 3-bit register for the whole cache.
* The SRAM and PCM latencies, and the 2 GHz clock used to convert them to
  cycles.

The following are choices made here. The source says nothing about them:

* The 48-bit address and its bank/set/tag split.
* The request, response and memory interfaces, with ids and out-of-order
  responses.
* Round-robin arbitration.
* A write-back, write-allocate policy. Dirty victims are written to memory,
  and a full-line write miss allocates without a fetch.
* The early response on read misses.
* The reset sweep.
* Rounding the latencies up to whole cycles.
* The treatment of an interval without accesses.
* Counting miss rates without division.

The following are not implemented:

* Energy and leakage accounting.
* Any modelling of PCM endurance. The `st_*` pulses count writes per
  region, not per block.
* The comparison designs: a PCM-only cache, an SRAM-only cache, and a hybrid
  cache with plain LRU.

Plain LRU is what DFB becomes when `Z` equals the associativity (8). The
3-bit `Z` register holds at most 7, and the update algorithm never goes above
5, so no LRU mode is provided.

## Simulation

Every testbench in `tb/` checks itself. Each one prints a single line,
`TB_RESULT checks=N failures=M`, and stops with `$finish`. Plain Verilator 5
is enough. For example:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/llc_pkg.sv tb/tb_hybrid_llc.sv --top-module tb_hybrid_llc -o sim
obj_dir/sim
```

| testbench | what it checks |
|---|---|
| `tb_lru_stack` | start-up order; random promotions against a list-based reference |
| `tb_dfb_victim_select` | the worked example above; 3000 random stacks for every `Z` from 1 to 7 |
| `tb_z_update` | every threshold, including exactly 80 %, 90 % and 99 %; the empty interval; update timing |
| `tb_tag_array` | hits, hit way and entries against a reference |
| `tb_sram_data_array`, `tb_pcm_data_array` | data, exact read and write latencies, busy behaviour |
| `tb_rr_arbiter` | grant sequence; fairness |
| `tb_llc_bank` | one bank against a reference model, described below |
| `tb_hybrid_llc` | the whole cache end to end at reduced size, described below |
| `tb_hybrid_llc_full` | the same traffic at full size, described below |
| `tb_workload_cyclic` | a cyclic streaming workload, described below |

`tb_llc_bank` runs one bank with 4 sets against a full reference model. The
model has its own tags, LRU lists, DFB search and golden data. The testbench
checks:

* every response;
* every event pulse;
* the exact hit latencies of 4, 3 and 303 cycles.

`tb_hybrid_llc` runs the whole cache end to end with 16 sets per bank and a
6000-cycle `Z` interval. The traffic comes from `llc_traffic`, in three
phases:

1. A hot phase, after which `Z` must be 5.
2. A streaming phase, after which `Z` must be 2.
3. A read-back of everything written.

It also requires that every mechanism occurs at least once:

* hit, miss, early DFB eviction and dirty writeback;
* SRAM and PCM writes;
* a `Z` change;
* all 8 banks busy at once;
* request stalls;
* response and memory contention;
* out-of-order responses.

`tb_hybrid_llc_full` runs the same traffic with every parameter at its
default. This means 8 MB and a 5 M-cycle interval, with 11 M cycles per phase.
It takes about a minute.

`tb/main_memory_model.sv` is the DRAM used by these testbenches:

* a 360-cycle read latency;
* one line accepted every 13 cycles, which is 10 GB/s at 2 GHz;
* requests served in order;
* an address-derived pattern in lines that have never been written.

In the full-size run the SRAM ways absorb a little under half of all cache
writes, although they are a quarter of the ways. The workloads used in the
source evaluation (SPEC CPU2006 traces) are not reproduced here.

`tb_workload_cyclic` shows the effect DFB has on a streaming program. Each
set is visited by 10 lines in turn, round after round, so the footprint is
1.25 times what the 8 ways hold. Plain LRU misses on every access of such a
loop, and a plain-LRU model of the same trace inside the testbench confirms
0 hits. The DFB cache keeps recycling the upper part of the stack, so the
blocks left lower down survive to the next round. In this run about half of
all accesses hit (miss rate 51 %), while `Z` moves between 2 and 5.

## Changing the design

All sizes are parameters of `hybrid_llc` with the defaults above.

* `SETS_PER_BANK` and `N_BANKS` must be powers of two.
* `ASSOC` must be a power of two, at most 8, because `Z` is a 3-bit value.
* `N_FAST` may be anything from 1 to `ASSOC-1`.
* The four latency parameters set the array timing.
* `Z_INTERVAL` and `Z_INIT` set the adaptation.

A different victim policy only requires replacing `dfb_victim_select`, which
is purely combinational, from position vector and `Z` to victim way.
