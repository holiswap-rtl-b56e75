# HoLiSwap L1 data cache in SystemVerilog

In an L1 cache whose four ways sit in four separate SRAM subarrays, the ways
do not all cost the same energy. The word read out of a way must travel from
that subarray to the way multiplexer next to the processor. For the way
placed nearest the multiplexer (W0) the wire is short. For the farthest way
(W3) it is several times longer. In a 32KB 4-way 22nm cache the output-wire
energy per access is about 1.6 pJ for W0 and 9.9 pJ for W3.

Accesses are also very uneven across lines. A few lines, well under 3% of
them, stay in the cache for a long time and take most of the hits. HoLiSwap
("hot line swap") exploits both facts. Small per-set counters find these
*hot* lines, and the cache moves each one into W0 by swapping it with W0's
current line. After that most accesses are served over the shortest wires.
The miss rate does not change, because lines only change places within their
set.

This repository holds a synthesizable RTL model of that cache: a 32KB,
4-way, 128-set L1 data cache with 64-byte lines, hot-line detection and
swapping, and three ways of looking up the data (sequential, parallel, and
parallel with a static prediction of W0). It also holds a self-checking
testbench for each part and an end-to-end workload test that estimates the
energy saved.

## Organisation

```
                 +--------------------- holiswap_l1d ----------------------+
 cpu_req  ---->  |  FSM  --- tag_array (128 x 4 x {valid,dirty,tag[18:0]}) |
 cpu_resp <----  |   |   --- lru_state (2-bit age per way)                  |
                 |   |   --- holiswap_controller (C_s, H_l per set)         |
                 |   |         `-- log_counter_inc x5, random bits: hs_lfsr |
                 |   `-- data_subarray W0  W1  W2  W3  (8KB each)           |
                 |          |   |   |   |   gated output wires              |
                 |         way_output_mux (near W0) ---> load word          |
 mem_req  <----  |  line-wide refill / write-back port                      |
 mem_resp ---->  +----------------------------------------------------------+
```

| module | what it is |
|---|---|
| `holiswap_pkg` | sizes, request/response/event structs, lookup enum, counter code |
| `holiswap_l1d` | the cache (top): lookup FSM, swap sequencer, refill, event outputs |
| `data_subarray` | one 8KB way: 128 x 512-bit, single port, 1-cycle read, byte-enable write |
| `tag_array` | tags, valid and dirty bits, one row of four ways per set |
| `holiswap_controller` | epoch and hit counters, epoch end, hot-line and swap decision |
| `log_counter_inc` | probabilistic increment of a 4-bit logarithmic counter |
| `hs_lfsr` | 16-bit LFSR, the random bits for the counters |
| `lru_state` | LRU replacement whose ages follow swapped lines |
| `way_output_mux` | per-way output gating and the way multiplexer |

Address split: `addr[31:13]` tag, `addr[12:6]` set, `addr[5:2]` word,
`addr[1:0]` byte.

## Finding hot lines

Each set `s` has an epoch counter `C_s`. Each of its four lines has a hit
counter `H_l`. Every access to the set (hit or miss) counts in `C_s`. Every
hit counts in the `H_l` of the way that hit. When `C_s` reaches the epoch
length `E`, a new epoch begins and the set's five counters return to zero.
A line is hot when `H_l >= T`. With `T = E/2`, at most one line of a set can
normally be hot in an epoch. The defaults are `E = 256` and `T = 128`.

**Logarithmic counters.** Exact counts up to 256 would need 9 bits per
counter. Here each counter keeps only an exponent in 4 bits, which makes
20 bits per set. The code stored is:

| code | 0 | 1 | 2 | 3 | ... | k |
|---|---|---|---|---|---|---|
| count it stands for | 0 | 1 | 2 | 4 | ... | 2^(k-1) |

An event moves code `k >= 1` to `k+1` with probability `1/2^(k-1)`: on
average it takes `2^(k-1)` events to double the count, so the expected count
is correct. Code 0 always moves to 1. The coin is "the low `k-1` bits of a
16-bit random word are all zero", and code 15 saturates
(`log_counter_inc`). So `T = 128` is code 8 and `E = 256` is code 9. The
epoch counter and the hit counters draw different coins from the same LFSR
word: the hit counters use it rotated by 8 bits. Because the counts are
random, the number of accesses before a line is found hot varies: in the
tests it took from about 150 to about 400 hits.

**Decision, in the lookup cycle of each access** (`holiswap_controller`, all
combinational, state updated at the clock edge):

1. Increment `C_s` and, on a hit, `H_l` of the hit way.
2. If `C_s` reached `E`, clear the set's counters. No swap is made.
3. Otherwise, on a hit, find the hottest line: the highest code, with the
   lower way winning a tie. If its code is at least `T` and it is not in
   W0, request a swap of that way with W0. The two hit counters are swapped
   at once, so the counters keep describing the lines they count.

When a way is refilled after a miss, its hit counter is cleared.

## The swap

A swap exchanges the data line, the tag entry (including the dirty bit) and
the LRU age of the hot way with those of W0. The subarrays are single-ported.
The swap takes two reads and two writes and blocks the processor port for
exactly four cycles:

| cycle | SW0 | SW1 | SW2 | SW3 |
|---|---|---|---|---|
| subarray | read W0 | read Wk; W0 line -> buffer | write W0 with Wk line | write Wk with buffer; write both tags; swap LRU ages |

The access that triggers the swap is answered first. Its response appears in
the same cycle as SW0, and `cpu_req_ready` is low through SW0..SW3.

## Lookup organisations and timing

The parameter `LOOKUP` selects the organisation. Latency is counted from the
clock edge that accepts a request (`cpu_req_valid && cpu_req_ready`) to the
cycle in which `cpu_resp_valid` is high.

| `LOOKUP` | accept cycle reads | hit latency | notes |
|---|---|---|---|
| `LOOKUP_SEQUENTIAL` (default) | tags only | 3 (load and store) | the hit way alone is read in cycle 2 |
| `LOOKUP_PARALLEL` | tags + all four ways (loads) | 2 | all bit lines cycle; only the hit way's wire toggles |
| `LOOKUP_PREDICT_W0` | tags + W0 (loads) | 2 if the load hits W0, else 3; stores 3 | the static "always W0" way prediction |

Static W0 prediction works because migration concentrates hits in W0. It
needs no prediction table.

In every organisation, the word of each way is gated by that way's tag match
before it reaches the multiplexer. An unselected way's long output wire
therefore does not toggle (`way_output_mux`).

The cache is blocking: it holds one access at a time, and `cpu_req_ready` is
high only when the cache is idle.

**Miss path.** After the lookup cycle, the FSM picks a victim: the lowest
invalid way, else the least recently used way. A dirty victim is read (one
cycle) and written back on the memory port. Then the line is requested, and
the memory's one-cycle `mem_resp_valid` pulse writes it into the subarray and
the tag array. The access is then replayed as a hit. The replay does not
count again in the HoLiSwap counters. Its response has `hit = 0`. Stores
allocate on a miss.

## Interfaces

- **Processor**: `cpu_req_valid/ready`, and `cpu_req = {we, addr[31:0],
  wdata[31:0], wstrb[3:0]}` (word aligned). The answer is a one-cycle
  `cpu_resp_valid` pulse with `cpu_resp = {rdata, hit, way}`. `way` is the
  physical way that served the access. `rdata` is 0 for stores.
- **Memory**: `mem_req_valid/ready`, `mem_req_we`, line address and 512-bit
  write data, which stay stable while the request waits (an assertion checks
  this). A read is answered by `mem_resp_valid` with `mem_resp_rdata`.
- **Events** (`hs_events_t`): one-cycle flags for access, hit, miss, swap,
  epoch end, write-back and wrong W0 prediction. They also carry the
  subarrays cycled (`sub_en`) and the output wires driven (`wire_sel`) in
  each cycle. Energy models can be driven from these without looking inside
  the cache.

Reset (`rst_n`, asynchronous, active low) invalidates all lines and clears
all counters. The data arrays and tag bits are not reset.

## What follows the source design and what is chosen here

Taken from the published description: the 32KB / 4-way / 8KB-per-way
organisation with 128 sets; the per-set epoch counter and per-line hit
counters; the rules `C_s = E` (new epoch) and `H_l >= T` (hot); `E = 256`
and `T = 128`; exponent-only 4-bit counters with increment probability
`1/2^e` (20 bits per set); the swap of the hottest line to W0 with a
four-cycle port block (2 reads, 2 writes); gating the output wires by tag
match; and the three lookup organisations with their 2- and 3-cycle hit
latencies and the static W0 prediction.

Chosen here, where the description is silent:

- the 64-byte line, 32-bit word and address, and address split;
- the zero code of the counters, saturation, tie rule, and swap decision on
  hits only;
- clearing a refilled line's counter;
- the LFSR as random source;
- LRU replacement whose ages move with swapped lines. The description does
  not name a policy, only that migration leaves the miss rate unchanged.
  With random replacement, hot lines were evicted often enough that only
  38% of hot-line accesses came from W0 in the workload test; with LRU it
  is 100%;
- write-back, write-allocate, the memory port and the blocking single-access
  FSM;
- AND gating in place of the tri-state buffers of the original. A gated wire
  here is driven to 0 rather than left floating, and a real tri-state wire
  would keep its last value. Either way it does not toggle while unselected.

The source figure labels the hot condition `H_l > T`, while its text says
`H_l >= T`. This design uses `>=`.

Not built:

- the 1KB direct-mapped L0 filter cache that the source also evaluates in
  front of the L1. It would need a line-wide port between L0 and L1.
- 16KB and 64KB variants. The set count is the package constant `L1_SETS`,
  and the 64KB floorplan puts two subarrays in each way.
- the physical floorplan and wire routing that create the energy
  differences. They have no logic function. The workload test uses
  per-way energy figures instead.

## Verification

Each module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog.

| testbench | checks |
|---|---|
| `tb_log_counter_inc` | every code against the rule, and advance rates within 20% of 1/2^(k-1) over 8192 draws |
| `tb_hs_lfsr` | the sequence against a software LFSR; stepping and holding; returns to the seed |
| `tb_data_subarray` | random byte-enabled writes and reads against a copy; 1-cycle read; output held |
| `tb_tag_array` | reset clears valid/dirty; per-way writes against a copy |
| `tb_lru_state` | random touches and swaps against a recency-list model |
| `tb_way_output_mux` | only the selected way's wire carries data; output = selected word |
| `tb_holiswap_controller` | directed T/E crossings with all coins won, then 20,000 random events against a reference model of the counters |
| `tb_holiswap_l1d` | one cache per lookup mode; random loads/stores with misses and write-backs, checked against a memory copy; hit latency of each mode; a hot line in W3 moved to W0 and the old W0 line in W3 with intact data; each swap blocks exactly 4 cycles; every mechanism must occur |
| `tb_holiswap_workload` | the cache at default parameters on 100,000 accesses (see below) |
| `tb_holiswap_sweep` | ten caches on one stream: each lookup organisation with and without migration, and E = 4 .. 1024 (see below) |

**Workload.** `tb_holiswap_workload` shapes its access stream after the
statistics that motivate the design. 16 hot lines (3% of the 512 lines) take
60% of the accesses, 600 warm lines take 35%, 5% stream through new lines,
and a quarter of the accesses are stores. Every load is checked. The
testbench charges each access the sequential-lookup energy of the way that
served it: total 5.7 / 8.8 / 10.9 / 14.0 pJ, of which wire 1.6 / 4.7 / 6.8 /
9.9 pJ, for W0..W3. It charges each swap two reads and two writes. It
compares this with the same lines left in the ways they were filled into. In
a typical run all hot-line accesses in the second half are served by W0, the
output-wire energy drops by about 30%, and the total access energy drops by
about 17%. These figures come from a synthetic stream, not from real
application traces.

**Sweep.** `tb_holiswap_sweep` runs one 40,000-access stream of the same
kind (`hs_workload_driver`) on ten caches. It charges 4.1 pJ per subarray
activation plus the wire energy of the way that carries the data; this
reproduces both the sequential and the parallel per-way energies. "Without
migration" is the same cache with `T = 2^14`, a count that a 256-access epoch
never reaches. A typical run:

| configuration | energy saved by migration | wire energy saved | W0 share of load hits (without -> with) |
|---|---|---|---|
| sequential, E = 256 | 13% | 27% | 24% -> 73% |
| parallel, E = 256 | 7% | 28% | 24% -> 75% |
| static W0 prediction, E = 256 | 21% | 27% | 24% -> 74% |

For the W0 prediction, the W0 share is also the prediction accuracy. The
prediction case gains most because every wrong prediction costs a second
subarray access and a cycle: migration saves about 6% of its cycles here.
Across epoch lengths (sequential), the energy saved is 8% at E = 4 (747
swaps), 13% at E = 16, 14% at E = 64, 13% at E = 256 and 9% at E = 1024. Short
epochs pay for many redundant swaps. Long epochs find hot lines late. The
miss count is the same with and without migration in every organisation,
because the LRU order moves with the lines.

## Simulating

With Verilator 5, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/holiswap_pkg.sv tb/tb_hs_pkg.sv tb/tb_holiswap_l1d.sv \
    --top-module tb_holiswap_l1d -o sim && ./obj_dir/sim
```

Replace `tb_holiswap_l1d` with any testbench name. The packages must come
first on the command line; the other files are found through `-y`. The
simulations finish in seconds.

Useful parameters of `holiswap_l1d`: `LOOKUP`, `EPOCH_LOG2` (E =
2^EPOCH_LOG2, codes up to 11 fit the 4-bit counters, so E up to 1024),
`HOT_LOG2` (T = 2^HOT_LOG2; keep it at EPOCH_LOG2 - 1 for T = E/2) and `SEED`
of the LFSR.

## Known limits

- The cache handles one access at a time. Its throughput is one access per
  2-3 cycles plus misses. A pipelined cache would overlap lookups, and swaps
  would then also have to stall the pipeline.
- `rd_epoch`/`rd_hit` of the controller (a counter read-out) are unused
  inside the cache. They are for the controller's own test.
- In the default sequential build, `events.pred_wrong` is constant 0.
