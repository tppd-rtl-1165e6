# TPPD: a shared last-level cache that closes Prime+Probe covert channels

Two cooperating processes on different cores can talk through a shared
last-level cache (LLC) without any shared memory. In a Prime+Probe covert
channel the receiver (the *spy*) fills one cache set with its own blocks. The
sender (the *trojan*) then either evicts all of them, to send a 1, or does
nothing, to send a 0. When the spy reads its blocks again it sees eight slow
misses or eight fast hits, and so recovers the bit.

Targeted Pseudo Partitioning based Defence (TPPD) breaks this channel only
where it is in use. A detector watches for sets in which two processes keep
evicting each other. When it reports such a set, the replacement policy of
that set changes for those two processes only. From then on the spy and the
trojan may not push each other below a fixed number of blocks in that set. So
after the trojan's turn the set looks the same whether it sent a 1 or a 0.
Every other process, and every other set, keeps plain LRU replacement. This
keeps the cost for innocent programs small.

This repository holds synthesizable SystemVerilog for such an LLC:

* the LLC arrays,
* the TPPD replacement logic,
* the per-set TPPD state,
* a cross-process conflict-miss detector,
* a controller that ties them together.

It also holds self-checking testbenches for Verilator, including one that
mounts the covert channel and shows it closing.

## Configuration

The default parameters (`rtl/tppd_pkg.sv`) describe a 4-core system with a
shared, inclusive L2 acting as the LLC:

| item | value |
|---|---|
| capacity, associativity, block size | 2 MB, 8 ways, 64 B, so 4096 sets |
| access latency | 18 cycles (the hit latency of `tppd_llc`) |
| main memory latency | 250 cycles (behavioural model `tb/dram_model.sv`) |
| owner id of a block | `PID_W` = 2 bits: one process per core, id = core id; 16 for real process ids |
| TPPD thresholds | th_s = th_t = 4 = associativity / 2 ("TPPD-4") after reset; can be changed at run time |
| physical address | 40 bits (tag 22, index 12, offset 6) — own choice |
| detector window, threshold | 200 M cycles (0.1 s at 2 GHz), 2000 misses — own choice |

TPPD-z means that both thresholds equal z. The useful range is 1 to A/2, where
A is the associativity. A/2 is the setting that fully hides the bit: each
attacker then keeps exactly half of the set.

The thresholds in use are two registers in `tppd_llc`. They reset to the
parameters `TH_S`/`TH_T`. A pulse on `cfg_valid_i` loads `cfg_th_s_i` and
`cfg_th_t_i`, and the new values apply from the next cycle. `th_s_o` and
`th_t_o` show the current values.

## The replacement decision (`tppd_evict`, `tppd_victim_except`)

Each LLC block stores the id of the process that brought it in. Each set
stores a tuple `(attack_flag, pS, pT, CpS, CpT)`:

* whether the set is under attack,
* the ids of the suspected spy and trojan,
* how many blocks each of them now holds in the set.

On a miss by process `p` in a set with no free way, the victim is chosen as
follows:

1. `w` is the plain LRU victim, the way with the highest age. `p_w` is its
   owner.
2. If the set is not under attack, evict `w`.
3. If `p` is innocent (neither pS nor pT), or `p == p_w`, evict `w`.
4. If `p_w` is the spy and `CpS <= th_s`, or `p_w` is the trojan and
   `CpT <= th_t`, then evicting `w` would push the other attacker below its
   share. In that case the alternative victim is evicted instead. This is the
   oldest way not owned by `p_w`, so it belongs either to `p` itself or to an
   innocent process.
5. Otherwise, evict `w`.

The counters follow the contents of the set:

* When a block of the spy (trojan) leaves, `CpS` (`CpT`) goes down by one.
* When the spy (trojan) brings a block in, `CpS` (`CpT`) goes up by one.
* Nothing changes when the incoming and the outgoing block have the same
  owner.

A free (invalid) way is always used first, and the incoming attacker's counter
grows.

`tppd_victim_except` does both searches. It scans the ways for the oldest one
whose owner is not a given process. With the exclusion turned off, it returns
the plain LRU victim. The LRU ages of a set are a permutation of 0..A-1.
`lru_age_update` keeps them that way: the touched way gets age 0 and every
younger way ages by one.

### Worked example (4 ways, TPPD-2)

This is the example `tb_tppd_evict` replays. The set starts full of trojan
blocks, so `(CpS, CpT) = (0, 4)`.

1. The spy primes with four new blocks. The counts go to (1,3) and then (2,2).
2. The spy's third and fourth blocks find a trojan victim whose owner is at
   its threshold. They therefore replace the spy's own oldest block.
3. The trojan sends a 1 by loading four blocks. Each of them meets a spy
   victim at the threshold and replaces a trojan block instead.

The set ends as two spy and two trojan blocks, the same as if the trojan had
sent 0. The spy's probe therefore sees the same misses in both cases.

With the default 8 ways and TPPD-4, the full-system test measures 8 probe
misses for both bit values. The spy's 8 addresses cycle through its 4 ways, so
every probe access misses. Before the defence engages, the spy sees 8 misses
for a 1 and none for a 0.

## Engaging a set

`cca_detector` counts, per set, the *cross-process* conflict misses: misses
that evict a block owned by another process. It counts them within a fixed
window. Each set has a count and an epoch stamp, and a count with an old stamp
reads as zero, so no sweep is needed when a window ends.

When a set reaches the threshold, the detector reports it once, on a
valid/ready handshake. The report carries the set and the two processes of
that miss: the owner of the evicted block is called the spy, and the incoming
process the trojan. The naming does not matter while th_s = th_t.

The controller takes the report in a cycle in which it is idle. It counts the
suspects' valid blocks in that set and writes the tuple with
`attack_flag = 1`. Any number of sets can be engaged at once, each with its
own pair.

A set stays engaged until one of its two suspects ends. The system signals
the end of a process on `term_valid_i`/`term_pid_i`, which the controller
takes when idle (`term_ready_o`). It then walks all 4096 sets, one per cycle
(state `CLEAR`). Every engaged set whose spy or trojan is that process goes
back to plain LRU, and the detector forgets it (`rearm_i`), so the set can be
reported again later. Requests wait during the walk. This matters most
because owner ids are core ids: without the release, whatever runs next on
a suspect's core would inherit the restriction.

A pair of Prime+Probe attackers produces about 16 cross-process misses per
transmitted 1. With the default threshold of 2000 the test engages after
about 190 bits. Benign programs are expected to stay well below the
threshold. The threshold and window are parameters (`DET_THRESH`, `DET_WIN`
on the top), to be tuned for the system.

## Cache organisation and timing (`llc_store`, `tppd_llc`)

`llc_store` holds, for each set and way:

* the metadata, in this order: tag, sharers (one bit per core), owner id,
  valid, dirty;
* a 3-bit LRU age;
* the 512-bit data block.

A read returns a whole set combinationally. Writes are synchronous: metadata
writes take a per-way mask, the ages of a set are written together, and data
is written one block at a time. `tppd_table` holds the 13-bit TPPD tuple of
each set. Neither array is reset. After reset the controller spends 4096
cycles (state `INIT`) clearing valid bits, setting the ages to 0..7 and
clearing the tuples. The detector clears its own table in the same cycles.

`tppd_llc` is blocking and serves one request at a time:

* **Hit.** `resp_valid_o` pulses exactly 18 cycles after the cycle in which
  the request was accepted (`req_valid_i && req_ready_o`). LRU ages and
  sharers are updated in that cycle, and a write also sets dirty.
* **Read miss.** At the same point the victim is chosen. The new metadata,
  ages and TPPD counters are written, and the detector sees the eviction. A
  dirty victim is written back, costing one cycle when memory is ready. The
  block is then fetched. The response arrives one cycle after the memory's
  data: 18 + 1 + 250 = 269 cycles with the default memory, or 270 with a
  write-back.
* **Write miss.** Requests move whole blocks, so a write miss allocates
  without fetching. It answers at 18 cycles, or 19 with a write-back.
* **Eviction of a block with sharers.** For inclusion, the controller pulses
  `binv_valid_o` with the block address and the sharers mask, so that the
  private caches can drop their copies.
* **Process end.** The notice takes one cycle plus one cycle per set
  (4097 cycles) before the next request is accepted.
* **Observation outputs.** `ev_engage_o`/`ev_engage_set_o`, `ev_disengage_o`, `ev_alt_o`
  (alternative victim taken) and `ev_evict_o` pulse for one cycle.

The memory port holds `mem_req_valid_o` until `mem_req_ready_i`. Read data
comes back on `mem_resp_valid_i`, at any later time. Responses to the cores
have no back-pressure.

The TPPD work (both victim searches and the counter update) is combinational
and runs in parallel with the lookup. It adds no cycles.

## Where this RTL departs from, or adds to, the published description

* **Threshold comparison.** The published pseudo-code switches to the
  alternative victim when the owner's counter is *less than* the threshold.
  Its worked example, and the accompanying explanation, stop the counts *at*
  the threshold. This RTL follows the example (`<=`). With `<`, each attacker
  could be pushed down to th-1 blocks. Only the `tppd_evict` comparison
  changes between the two readings.
* **Counter width.** The storage budget gives log2(A) = 3 bits per counter,
  which cannot represent 8 blocks in an 8-way set. 4-bit counters are used,
  so the per-set state is 13 bits (6.5 KB for 4096 sets) instead of 11 bits
  (5.5 KB).
* **Counter update typo.** The published counter-update routine tests the spy
  id twice; the second test is taken to be the trojan.
* **Detector.** This is the simplified rule "many cross-process misses per
  unit of time in a set", which the published work argues is enough. The
  earlier two-step detector it builds on is not built. That detector first
  filters out sets with few conflict misses, then looks for a ping-pong
  pattern between two processes. The window and threshold values here are
  not published values.
* **Only the published rule is built.** The variant that picks a random
  non-excluded block as the alternative victim is not built. Neither is the
  second release option, in which the detector periodically re-checks an
  engaged set.
* **Release interface.** The published scheme keeps a set engaged until its
  suspects terminate. It does not say how termination reaches the cache. The
  process-end port, the blocking 4096-cycle walk and the detector re-arm are
  this design's own.
* **Threshold interface.** The published scheme allows z to change at run
  time but gives no interface for it. The `cfg_*` port is this design's own.
* **Cache controller is this design's own.** The blocking controller,
  whole-block requests, write-allocate without fetch, back-invalidation port,
  40-bit addresses and reset-time clearing walk are not part of the
  published scheme, which was evaluated in an architectural simulator. The
  MESI protocol, the cores and L1 caches, and DRAM are outside this RTL.
* **Owner ids.** A request carries the core id (`req_core_i`, for the
  sharers bit and the response) and the process id (`req_pid_i`). The
  process id becomes the owner of a block the request brings in. The
  default `PID_W` = 2 matches the evaluated system, with one process bound
  to each core, whose id is the core id. Setting `PID_W` = 16 in `tppd_pkg`
  gives the practical variant with real process ids. All testbenches also
  pass at 16 bits, and the end-to-end test then uses process ids unlike the
  core ids. The per-set TPPD state is then 41 bits, 20.5 KB for 4096 sets.

## Verification

Each block has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M`:

| testbench | what it checks |
|---|---|
| `tb_lru_age_update` | ages against an explicit recency list, 2000 random touches |
| `tb_tppd_victim_except` | oldest non-excluded way against a reference search, 3000 random sets |
| `tb_tppd_evict` | the 4-way TPPD-2 worked example step by step; 5000 random 8-way sets against a reference of the policy, including that the new counters equal the counts of the set after the fill |
| `tb_tppd_table`, `tb_llc_store` | write/read against shadow copies |
| `tb_cca_detector` | a cycle-level reference of counts, windows, one-time reports, re-arming and the handshake |
| `tb_tppd_llc` | the full design at its default parameters (see below) |
| `tb_tppd_levels` | the covert channel under TPPD-1 to TPPD-4 (see below) |

`tb_tppd_llc` runs the complete design with every parameter at its default,
together with the 250-cycle DRAM model, in five phases:

1. 1500 random reads and writes from four cores. They are checked against a
   plain-LRU reference for hit/miss, exact latency and data.
2. A Prime+Probe channel between core 0 and core 1 on set 77, until the
   detector engages TPPD. Before that point every bit must be readable. After
   it, the probe outcome must be identical for 0 and 1. Each attacker must
   keep at least 4 blocks, and the counters must match the set contents.
3. An innocent core sweeps the engaged set. It must never be restricted, and
   the counters must return to 0.
4. TPPD-2 is set at run time through the threshold port. The spy primes and
   the trojan loads its 8 blocks. The set must end with exactly 2 spy and 6
   trojan blocks.
5. A process-end notice for an uninvolved core must change nothing. A notice
   for the trojan must release set 77 after a 4096-cycle walk, and plain LRU
   must return. A new channel on the same cores must then be readable again,
   until the re-armed detector engages the set a second time. Meanwhile a
   second pair, with core 3 as spy and core 2 as trojan, runs its own
   channel on set 300. Both sets must be engaged, each holding its own pair,
   and both partitions must hold at the same time.

The test also counts hits, read and write misses, write-backs,
back-invalidations, engagements, alternative victims and innocent evictions,
and fails if any of them never occurs. It finishes in under a second of
simulation time.

`tb_tppd_levels` repeats the channel for each z from 1 to 4. For each z it
resets the cache, sets TPPD-z, lets the detector engage, and sends 24 bits.
The measured results, with 8-block eviction sets:

| | probe misses, bit 0 / bit 1 | spy's blocks before the probe, bit 0 / bit 1 |
|---|---|---|
| no defence | 0 / 8 | 8 / 0 (follows from the misses; not recorded) |
| TPPD-1 | 8 / 8 | 7 / 1 |
| TPPD-2 | 8 / 8 | 6 / 2 |
| TPPD-3 | 8 / 8 | 5 / 3 |
| TPPD-4 | 8 / 8 | 4 / 4 |

Once the spy is held below 8 ways, all 8 of its probe reads miss, so the
probe time is the same for both bit values at every z (2152 cycles). Below
A/2 the spy's share of the set still depends on the bit. A spy that probed
fewer addresses could read it. Only at z = A/2 is the set identical for 0
and 1. The published evaluation reports a small but separable timing gap for
TPPD-1 to TPPD-3. That evaluation had system noise, which this cycle model
does not.

The same test counts all LLC misses of the two attackers per transmitted
bit, averaged over 0s and 1s. Without the defence this is 8 misses per bit.
With TPPD it is 12 at every z: 8 probe misses for a 0, and 8 trojan plus 8
probe misses for a 1. The attack alone therefore costs 50 % more misses
here. The published figure for the attack pair running alongside ordinary
work is 17 %, also nearly the same for every z.

## Simulating

With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb rtl/tppd_pkg.sv tb/tb_tppd_llc.sv \
          --top-module tb_tppd_llc -Mdir obj -o sim
./obj/sim
```

Replace `tb_tppd_llc` with any other testbench to run that one. The testbenches
initialise everything they read, so they also pass with
`+verilator+rand+reset+2`.

To try another TPPD-z, drive the `cfg_*` port, or override `TH_S`/`TH_T` on
`tppd_llc` to change the reset value. The cache
geometry and the widths are in `tppd_pkg` and apply to every module.
