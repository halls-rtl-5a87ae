# HALLS: an adaptable last-level STT-RAM cache in SystemVerilog

STT-RAM is dense and leaks little, which makes it attractive for a large
last-level cache. Its weak point is writing, which is slow and costs energy.
Both costs fall if the magnetic cells are made less thermally stable. The
price is that they then hold data for only a limited time, from
microseconds to a few hundred milliseconds, after which the data is lost.

Different programs, and different parts of one program's data, need data to
live for different lengths of time. Some blocks are rewritten or evicted
within microseconds. Others must stay for a long time. HALLS uses this:

- The cache is built from banks with **four different retention times**.
- A hardware tuner learns, per application, which configuration to use and
  which retention time each part of the cache should get.
- Each part of the cache is then placed in banks whose cells are just
  durable enough for it.
- Blocks that outlive their cells are evicted, and written back if dirty.
  The design never refreshes cells.

The tuner also adapts the cache geometry: its size, line size and
associativity. This RTL models the 1MB shared L2 of a dual- or quad-core
system clocked at 2GHz.

## Organisation

The 1MB of data sits in 32 independent 32KB banks. Each bank stores 2048
physical rows of 16B. The banks are grouped into four clusters of eight.
All banks in a cluster are made with the same cells:

| Cluster | Retention | Write latency | Counter tick (2GHz) | Write energy |
|---|---|---|---|---|
| 0 | 100 µs | 3 cycles | 12,500 cycles | 0.392 nJ |
| 1 | 1 ms   | 4 cycles | 125,000 cycles | 0.404 nJ |
| 2 | 10 ms  | 6 cycles | 1,250,000 cycles | 0.419 nJ |
| 3 | 100 ms | 7 cycles | 12,500,000 cycles | 0.438 nJ |

A read hit takes 2 cycles in every cluster. A 64B line hit costs 5.794 nJ.
The array leaks 2200 mW in total.

Every bank has its own components:

- data array, tag array and valid/dirty bits;
- a valid checker and a tag comparator, so it produces its own hit bit;
- a 4-bit lifetime counter for every line.

A bank can be switched off independently of the others.

## Configurations and virtual banks

The cache configuration has three parameters. Each is a power of two and is
held in log2 form (`halls_pkg::cfg_t`):

- **size**: 4 to 32 banks (128KB to 1MB). Unused banks are powered down.
- **line size**: 16B, 32B or 64B. A 32B or 64B line is stored as 2 or 4
  consecutive 16B rows of one bank.
- **associativity**: 1 to 16 ways. Capped at the number of banks.

The central idea is the **virtual bank** (VBank). This is a bank-sized slice
of the cache as the address sees it: one way of one group of sets. A virtual
bank is tied to a physical bank only through the mapping table. For a
configuration with `2^s` banks, `2^l` rows per line and `2^w` ways, the
address splits as follows:

```
addr[3:0]                     byte within a 16B row
addr[4 +: l]                  row within the line
set  = addr >> (4+l)          (s - w + 11 - l) bits
tag  = the bits above the set (at most 17)
set group  = set >> (11-l)    which slice of 2048 rows
row in bank = (set mod 2^(11-l)) * 2^l + row-within-line
VBank of way k = setgroup * 2^w + k
```

For example, take a 128KB cache (4 banks) with 2 ways and 64B lines:

- There are 1024 sets.
- Sets 0–511 are set group 0: way 0 is VBank0 and way 1 is VBank1.
- Sets 512–1023 are VBank2 and VBank3.

The **mapping table** (`vbank_map_table`) stores, for each VBank, a
physical bank: a (cluster, BankID) pair. One possible table puts:

- VBank0 in the 100 µs cluster;
- VBank1 and VBank3 in banks 0 and 1 of the 100 ms cluster;
- VBank2 in the 1 ms cluster.

The BankID is what lets two virtual banks share a cluster.

The **set address decoder** (`set_addr_decoder`) handles each request:

1. It splits the address for the current configuration.
2. It finds the VBank, and through the table the physical bank, of every way.
3. It raises those banks' selects and looks up all ways at once.
4. It combines the returned hit bits into a hit and a hit way.

The table also drives the power enables: a bank that no VBank uses is shut
down.

Two layouts always differ in where lines live. So whenever the tuner
installs a new layout, the controller first **flushes** the cache: it writes
back every dirty line and invalidates every valid line. Only then does it
load the new configuration and mapping. At 1MB this takes on the order of
10^5 cycles.

## Block lifetimes

Each line has a 4-bit counter stored with its tag. When the line is written
(fill or write hit), the counter is cleared. Each cluster has one
`retention_tick` generator, which pulses every retention time / 16.

On each tick, every bank in the cluster sweeps through its rows in cycles
when no operation is running, and advances the counter of each valid line.
When a counter reaches 15, the line has reached its retention time:

- A **clean** line is invalidated. The bank pulses `exp_clean`.
- A **dirty** line stops the sweep. The bank raises `exp_req` with the row.
  The controller reads the line (still intact), writes it to memory, and
  answers `exp_ack`. The bank then invalidates the line and continues.

A line therefore lives between 15/16 of the retention time and the full
retention time after its last write. That is always within the time its
cells hold data.

The sweep is this design's way of implementing the counter. The paper
describes the counter as a per-block state machine.

## The controller

`halls_ctrl` serves one 16B request at a time from the L1 side.

**Read hit.** The response comes 6 cycles after the request is accepted:

- 1 cycle to register the request;
- 1 cycle to issue it to the banks;
- the 2-cycle bank hit;
- 1 cycle to evaluate;
- 1 cycle to respond.

**Write hit.** The row is written in the hit way. The line is marked dirty,
and its counter restarts. The write takes the cluster's write latency.

**Miss.** The controller proceeds in this order:

1. Choose a victim: a free way if there is one, otherwise a random one from
   an LFSR, following the paper's random replacement.
2. If the victim is dirty, write back all its rows.
3. Fetch all rows of the new line from memory (one memory transaction per
   16B row).
4. Write the new tag, and retry the request, which now hits.

Between requests, the controller serves expiry write-backs and the flush.

It also reports per-bank events to `bank_perf_counters`: hits, writes and
fills.

## Tuning

`halls_tuner` is started with `tune_start` when a new application begins.
Each **sample** runs one tuning interval of `INTERVAL` retired instructions
(10M by default) on a freshly installed layout. The cores report retired
instructions through `instr_inc`. The sample's latency is the interval's
cycle count.

**Configuration tuning** (`config_tuner`) works on each parameter in turn:
first size, then line size, then ways. It starts from the largest
configuration (1MB, 64B, 16 ways). For each parameter, it keeps halving as
long as each halving lowers the latency. At the first halving that does not,
it goes back to the best configuration so far and moves to the next
parameter. During this phase, VBanks are placed in the 10 ms cluster first,
then in the 100 ms, 100 µs and 1 ms clusters.

**Retention tuning** (`retention_tuner`) takes four samples on the chosen
configuration. In sample `t`, VBank `v` is placed in cluster `(v+t) mod 4`,
bank `v/4`, so every VBank meets every retention time once. After each
sample, the energy-delay product of every VBank in its current cluster is
computed and stored. The estimate (`edp_estimator`, fJ × cycles) is:

```
energy = hits*E_hit + writes*E_write[cluster] + cycles*P_leak/bank
delay  = hits*2 + writes*W_LAT[cluster] + fills*100
EDP    = energy * delay
```

The per-access energies come from the table above. The delay model and the
100-cycle miss penalty are this design's own, because the paper does not
give a formula. Misses caused by expiries in a too-short cluster raise
`fills`, and so raise the EDP of that cluster.

Finally, VBanks are taken in order. Each gets the lowest-EDP cluster that
still has a free bank. BankIDs are given out from 0 upwards. The tuner then
installs the chosen configuration with this mapping.

A full tuning run takes at most 9 configuration intervals plus 4 retention intervals.

## Interfaces of the top (`halls_top`)

| Group | Signals |
|---|---|
| L1 side | `cpu_req_valid/ready/we/addr/wdata`, `cpu_rsp_valid/rdata/hit`. One outstanding request. Addresses are byte addresses; data is one 16B row. |
| Memory | `mem_req/we/addr/wdata`, `mem_ack`, `mem_rdata`. One 16B row per transaction; the request is held until `mem_ack`. |
| Tuning | `tune_start`, `instr_inc[3:0]`; status outputs `tuned`, `tune_phase`, `cur_cfg`, `cur_map`, `bank_pwr_en`, `cfg_samples`, `ret_samples`. |
| Monitoring | `ev_miss`, `ev_writeback`, `ev_expiry_wb`, `ev_expiry_clean[32]`, `reconf_done`. |

The parameters are the four counter periods `TICK_PERIOD0..3`, in cycles,
and `INTERVAL`. All defaults are the values above.

## Modules

| Module | Role |
|---|---|
| `halls_pkg` | Constants, configuration/mapping/bank-operation types, address helpers |
| `stt_bank` | One 32KB bank: arrays, hit logic, lifetime counters and sweep, latency |
| `retention_tick` | Counter clock of a cluster |
| `retention_cluster` | Eight banks of one retention time plus their tick |
| `set_addr_decoder` | Address split, VBank → physical bank, bank selects, hit combine |
| `vbank_map_table` | Active configuration and mapping, power enables, reverse map |
| `halls_ctrl` | Requests, replacement, fills, write-backs, expiry service, flush |
| `bank_perf_counters` | Per-bank hit/write/fill counts and interval cycles |
| `edp_estimator` | Energy, delay and EDP of one bank for one interval |
| `config_tuner` | Latency-driven search of size, line size and ways |
| `retention_tuner` | Four tuning sets, EDP table, allocation of VBanks to clusters |
| `halls_tuner` | Runs both phases, one interval per sample |
| `halls_top` | Everything above, wired together |

## Where this design departs from, or adds to, the paper

- **Hit latency.** The base parameter table gives a 2-cycle hit. One
  sentence says hits took 1 cycle in the selected configurations. 2 cycles
  is used.
- **Parameter order in configuration tuning.** The published algorithm
  leaves the rejected value in place when it moves to the next parameter.
  Here the search returns to the best configuration. It also never samples
  the same configuration twice.
- **Reconfiguration.** The paper names a context-switch cost but does not
  say how data is moved. Here dirty data is written back and the cache is
  emptied.
- **Energy estimate.** The tuner's energy datapath is described only by its
  inputs, so the formula above is this design's.
- **Lifetime counters.** The paper counts 4 bits per 64B block. Here a
  counter sits with each line's tag, so a 16B-line configuration has one
  counter per 16B line.
- **Tuner statistics.** The paper names read requests, write requests and
  write-backs as inputs to its energy estimate. Here each bank counts hits,
  writes and fills, plus one cycle counter for the interval.
- **Address width.** 32 bits.
- **Bandwidth.** The controller handles one request at a time. The banks
  could serve several requests in parallel, but the paper gives no protocol
  for that.
- **Not built.** The cores and L1 caches, the DRAM, and the STT-RAM cells
  themselves. The cells' behaviour enters only as latencies, energies and
  retention times.

## Simulating

Each block has a self-checking testbench, `tb/tb_<module>.sv`. Each prints
`TB_RESULT checks=N failures=M`. `tb/mem_model.sv` is the behavioural main
memory. Unwritten rows read as a fixed function of their address. With
Verilator 5:

```
verilator --binary --timing --assert -Irtl rtl/halls_pkg.sv \
  $(ls rtl/*.sv | grep -v halls_pkg) tb/mem_model.sv tb/tb_halls_top.sv \
  --top-module tb_halls_top && ./obj_dir/Vtb_halls_top
```

The main testbenches are:

- **`tb_halls_top`**: the whole design with shortened counter periods
  (3,000 to 20,000 cycles) and a 4,000-instruction interval.
  - It drives random reads and writes from a core model that stalls on the
    cache, and checks every read against a reference memory.
  - It checks the read-hit latency.
  - It requires each of these to happen at least once: hit, miss, victim
    write-back, clean expiry, dirty expiry, reconfiguration, bank shutdown,
    both tuning phases and the final install.
- **`tb_halls_top_full`**: the whole design at its default parameters. It
  checks a miss with a 4-row fill, a hit with its latency, a write hit,
  clean and dirty expiry in the 100 µs cluster after 200K cycles, and that a
  10 ms line survives. A full tuning run at the default 10M-instruction
  interval, with 12 intervals and the 100 ms counters, is too long to
  simulate. The tuning logic is the same at any `INTERVAL`; it is exercised
  only at reduced intervals.
- **`tb_halls_workloads`**: tuning for two synthetic programs at the two
  extremes of block lifetime, using shortened counter periods (lines live
  about 37K, 75K, 300K and 1.2M cycles) and a 200K-instruction interval.
  - A table that is read in passes 60K cycles apart must end up in a 10 ms
    or 100 ms bank, and must then keep hitting.
  - A small buffer that is rewritten constantly must end up in a 100 µs
    bank.
- **`tb_halls_ctrl`**: the controller with real clusters. It uses four
  layouts, including the 128KB / 2-way / 64B example above, and checks that
  every layout switch leaves memory equal to the reference.
- **`tb_config_tuner`, `tb_retention_tuner`, `tb_halls_tuner`**: the tuning
  algorithms on synthetic latency and counter landscapes with known answers.
