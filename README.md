# Per-bank DRAM bandwidth regulation: RTL of the regulation fabric

## The idea

On a multicore chip, a real-time task shares DRAM with best-effort tasks on other cores.
Conventional bandwidth regulators give each core (or group of cores) a budget of memory
accesses per time period, counted over the whole memory. To bound the worst case, that budget
must assume that all the interfering traffic goes to **one** DRAM bank. A single bank can sustain
only one row-miss access per row-cycle time tRC. With 64-byte lines and tRC of about 47 to 60 ns,
that is roughly 1 to 1.4 GB/s. This "guaranteed bandwidth" has barely changed across DRAM
generations. A safe all-bank budget is therefore tiny, and it is wasted whenever the traffic is
spread over many banks.

Per-bank regulation applies the same budget to **each bank separately**. In the worst case, with
all traffic on one bank, the guarantee is the same as with an all-bank budget. When traffic is
spread, the usable bandwidth grows with the number of banks:

    BW_max      = B_per_bank x N_bank
    B_per_bank  = N_acc / P x 64 B x f_clk

Here `N_acc` is the number of accesses allowed per period, `P` is the period in clock cycles, and
`f_clk` is the clock of the regulator, which is the cache clock.

This RTL implements the hardware that does this inside a multicore SoC with a shared, banked
last-level cache (LLC):

* the **tagging unit**, on the cores' request channels,
* the **DRAM regulator**, at the top level of the LLC,
* the **throttle-aware MSHR scheduler** in every LLC bank.

## Where the regulation happens

```
 core 0 .. core N
    |   per-core request channels
 [tagging unit] <----------- throttle (D x N_bank) -----------+
    |   requests tagged with a domain                         |
 system bus                                                   |
    |                                                         |
 [LLC bank 0: MSHRs -> mshr_scheduler] ---+                   |
 [LLC bank 1: MSHRs -> mshr_scheduler] ---+--> [dram_regulator]
    |   memory requests (observed by the regulator)
 memory bus -> DRAM (8 banks)
```

The regulator does not sit on the bus between the LLC and memory. Its clients there would be LLC
banks, not cores. Stalling a whole LLC bank because one core is over budget would also block every
other core's misses in that bank. Adding request queues to avoid that would cost area. Instead,
regulation acts where a cache miss *leaves* the cache. Each LLC bank picks the next MSHR (miss
status holding register) to send to memory with a round-robin arbiter. An MSHR whose
(domain, DRAM bank) pair is out of budget is simply not schedulable. It keeps its entry and
waits, while MSHRs of other domains or other banks go ahead. No extra queue is needed.

The same throttle bits are also sent back to the tagging unit (**regulation forwarding**). There,
they hold back new AcquireBlock requests of a throttled (domain, bank) pair before they enter the
cache. Without this, a throttled domain could still compete for cache bandwidth inside the LLC
banks.

## Domains and attribution

Cores are grouped into **regulation domains**. Any grouping is possible, and the number of
domains is a synthesis parameter. In the evaluated setting there are two domains:

* core 0 is alone in the real-time domain, which is not regulated;
* cores 1 to 3 are in the best-effort domain, which is regulated.

The tagging unit holds one MMIO register per core with that core's domain, and adds the domain to
every request it passes on. The cache keeps that tag with the miss. When the miss goes to memory,
the regulator charges it to `count[domain][bank]`. The bank comes from the address through the
bank map (below).

Only reads to memory (AcquireBlock refills) are counted. In this RTL only reads are held back:
write-backs always pass the MSHR scheduler, and the tagging unit stalls only AcquireBlock requests.

## The regulator in detail (`dram_regulator`)

* **Period timer.** It counts 0 .. P-1 and raises `period_end` in the last cycle. On that edge
  every counter is cleared, which replenishes every budget. If a read is issued in that last
  cycle, it is charged to the new period, so that no read goes uncounted. Writing the PERIOD
  register restarts the period. P = 0 behaves like P = 1.
* **Counters.** There is one 32-bit saturating counter per (domain, bank): 2 x 8 with the
  defaults. Each cycle, every cache bank whose memory request is accepted adds one to the counter
  of its (domain, bank). Two cache banks can add to the same counter in the same cycle.
* **Throttle.** `throttle[d][b] = enable[d] && count[d][b] >= budget[d]`. At most `N_acc` reads per
  bank per period get through, as the bandwidth formula above requires. The throttle is computed
  from registered counters. So if two cache banks issue to the same (domain, bank) in the one
  cycle where a single access is left, the budget is exceeded by one. In general the overshoot is
  at most N_LLC_BANKS - 1 per period.
* **Timing.** A read accepted in cycle t is visible in the counter, and in the throttle, from
  cycle t+1. The throttle bits go combinationally to the MSHR schedulers and to the tagging unit.

### Register map

The MMIO port is a simple single-cycle register port (`pbr_pkg::mmio_req_t`). A read returns its
data with `rvalid` one cycle after the request; a write has no response.

| offset | register | access | reset |
|---|---|---|---|
| 0x000 | ENABLE: bit d turns on regulation of domain d | RW | 0 |
| 0x004 | PERIOD, in cycles (writing it restarts the period) | RW | 1,000,000 |
| 0x100 + 4d | BUDGET of domain d, N_acc reads per bank per period | RW | 0 |
| 0x400 + 4(8d + b) | COUNT of domain d, bank b in the current period | RO | 0 |

Tagging unit: offset 4c holds the domain of core c (reset value 0).

Example, the evaluated setting: a 1 ms period at 1 GHz is 1,000,000 cycles. A budget of 53 MB/s
per bank is 53e6 x 1e-3 / 64 = 828 lines per period. Program PERIOD = 1000000,
BUDGET[1] = 828 and ENABLE = 0b10.

## Bank map (`bank_map`)

Bank bit i is the XOR of the address bits selected by mask `BANK_FN[i]`. A direct map (one bit
per mask) and the XOR maps of many commercial memory controllers are both expressed this way. The
default is the evaluated DDR3 map: b0 = A9, b1 = A10, b2 = A11. As an example of an XOR map, the
testbench also checks a 7-bit map of a 128-bank desktop system (b0 = A7^A14, ...,
b6 = A8^A9^A12^A13^A18^A19). The regulator must use the same map as the memory controller,
otherwise requests are charged to the wrong bank.

## MSHR scheduler (`mshr_scheduler`, `rr_arbiter`)

An MSHR is schedulable when all three hold:

* it has a request,
* the cache resources it needs are free (`mshr_res_ok`),
* it is not a read whose `throttle[domain][bank(addr)]` is set.

A round-robin arbiter picks the first schedulable MSHR at or after its pointer. It offers that
MSHR's request on the memory channel, which is a valid/ready handshake. When the request is
accepted, the pointer moves past the winner. One request per cycle per cache bank.

Finite MSHRs cause the throughput loss the results show: a bank does not always get its whole
budget. When all best-effort MSHRs hold misses to banks that are already throttled, the other banks
of that domain get nothing until the next period. With the evaluation's settings this RTL reaches
about 7.8x the single-bank throughput when traffic is spread over 8 banks (ideal: 8x), and
about 15.5x over 16 banks in a 16-bank build. The exact figure depends on the random traffic.

## Files

* `rtl/pbr_pkg.sv`: sizes, bank map, MMIO types and register map.
* `rtl/bank_map.sv`: address to bank.
* `rtl/rr_arbiter.sv`: round-robin arbiter.
* `rtl/mshr_scheduler.sv`: one per cache bank.
* `rtl/dram_regulator.sv`: counters, period, registers, throttle.
* `rtl/tagging_unit.sv`: domain table, tagging, forwarding stall.
* `rtl/pbr_soc_top.sv`: the three units wired together. Cores, cache banks, buses and DRAM are
  outside and appear as ports.

Defaults, taken from the evaluated SoC: 4 cores, 2 domains, 2 LLC banks with 27 MSHRs each,
8 DRAM banks on address bits 9 to 11. The 32-bit address and 32-bit counters are this design's
choice. They are large enough for the 1,000,000-cycle period.

## Testbenches

Every testbench is self-checking. Each prints `TB_RESULT checks=N failures=M` and has a watchdog.

| testbench | what it checks |
|---|---|
| `tb/bank_map_tb.sv` | direct and XOR maps against a bit-list reference |
| `tb/mshr_scheduler_tb.sv` | round-robin winner, throttle gating, fairness, one grant per cycle |
| `tb/dram_regulator_tb.sv` | registers; a cycle-level reference model of counters, throttle and period; exactly N_acc reads per bank per period; disabled domain never throttled |
| `tb/tagging_unit_tb.sv` | domain table, tagging, stall only of throttled AcquireBlocks |
| `tb/pbr_soc_top_tb.sv` | whole fabric at default parameters: single-bank vs all-bank best-effort traffic, per-period bounds, real-time traffic never throttled, and every mechanism (MSHR throttling, forwarding stall, replenishment, per-bank independence) seen |
| `tb/pbr_paper_config_tb.sv` (with `tb/pbr_scaling_bench.sv`) | the evaluated setting (1 ms, 828 lines per bank) on two fabrics at once: the default 8-bank one with best-effort traffic on 1, 2, 4, 8 banks, and a 16-bank one (fourth bank bit on address bit 12) with traffic on 1 to 16 banks. Each bank is held to 53 MB/s and the total grows with k |

To simulate with plain Verilator, for example the top:

```
verilator --binary --timing --assert -y rtl -Irtl rtl/pbr_pkg.sv tb/pbr_soc_top_tb.sv \
          --top-module pbr_soc_top_tb -o sim
./obj_dir/sim
```

`pbr_paper_config_tb` also needs `-y tb`, because its bench module lives there. It simulates two
fabrics for about 10 million cycles, which takes around 40 s. The other testbenches finish in
well under a second.

## How far it follows the source design, and what is this design's own

Follows the published design:

* per-domain, per-bank counting of reads sent to memory;
* a fixed period with replenishment, a single global period register, and per-domain budget
  registers;
* per-domain enable;
* a D x N_bank throttle vector;
* throttle gating of the round-robin MSHR arbiter in each cache bank;
* a tagging unit with an MMIO domain table that stalls AcquireBlocks of throttled pairs;
* the evaluated sizes.

Choices made here, where the description is silent:

* the throttle condition `count >= budget`. The description says "exceeds", but its bandwidth
  formula allows exactly N_acc accesses per period, and this design follows the formula;
* the MMIO format and register map, and all reset values;
* which bank function the regulator uses to attribute requests (the same XOR/direct map as the
  memory controller);
* gating reads only in the MSHR scheduler;
* the round-robin pointer rule;
* a write to PERIOD restarts the period;
* last-cycle reads are charged to the next period;
* counters saturate and can be read back;
* a combinational tagging unit.

Not included:

* the cores;
* the rest of the inclusive LLC (directory, data arrays, MSHR state machines);
* the TileLink buses. Their channels are reduced here to valid/ready and the few fields
  regulation needs;
* the DRAM and its controller.

The regulator is therefore verified against behavioural traffic, not against a full system.
A comparison "all-bank" regulator, with one counter per domain, is not included. It would differ
only in ignoring the bank index when counting and throttling.

Known limits:

* the budget can be overshot, as described under Throttle;
* MSHR head-of-line blocking on throttled banks;
* a stall in the tagging unit can withdraw a request that was already offered (valid falls when
  the throttle rises). That is acceptable on a valid/ready channel that does not require valid to
  be held, but not on one that does.
