# Per-bank bandwidth regulation for a multi-bank shared cache

A shared last-level cache (LLC) split into banks can serve several requests
in parallel, but only if they go to different banks. When many requests go to
one bank, they queue behind that bank's service rate. Every core that uses the
bank then slows down, even cores that have their own cache partition. A
program that deliberately sends all of its misses to one bank can therefore
delay a real-time task on another core several times over.

The usual defence is bandwidth regulation. Each group of cores gets a budget
of N cache accesses per time window, and a group that has used up its budget
is stalled until the window ends. Existing regulators count accesses to the
whole cache. The budget then has to be sized for the worst case, in which
every access hits the same bank. Traffic that is spread over *B* banks is
throttled *B* times harder than it needs to be.

This RTL regulates **per bank**. Every group has one counter per bank, an
access is charged only to the bank its address maps to, and a group is
stalled only on requests to a bank whose budget is used up. The worst case on
any single bank stays the same as with a whole-cache regulator. Traffic spread
over the banks, such as a sequential sweep, gets up to *B* times the
throughput.

The unit is written for a TileLink SoC in the style of Rocket Chip. It sits on
the coherent TL-C links between the cores' private L1 caches and the system
bus. It watches and gates channel A, which carries requests, and passes
channels B to E through unchanged. Software programs it through memory-mapped
registers on the periphery bus.

```
        core 0            core 1            core 2            (TL-C, one link per core)
          |                 |                 |
 +--------v-----------------v-----------------v-----------------------------+
 |  chan_a_throttle    chan_a_throttle    chan_a_throttle     B,C,D,E wired |
 |   bank decode         bank decode        bank decode       straight      |
 |   valid/ready gate    valid/ready gate   valid/ready gate  through       |
 |        |  access reports (valid, bank)        |                          |
 |        v                                      v                          |
 |  domain_control_interface   ABR[d], BAC[d][bank], depleted[d][bank]      |
 |  core_control_interface     DAR[c] (domain), RER[c] (regulation enable)  |
 |  period_counter             RPR, period counter, period_end pulse        |
 |  bank_monitor               MON[c][bank]                                 |
 |  reg_mmio                   TileLink-UL register slave  <---- periphery bus
 +--------|-----------------|-----------------|-----------------------------+
          v                 v                 v
                      system bus -> LLC bank 0 .. bank N-1
```

## Domains, budgets and the period

Cores are grouped into **domains**. A domain is the unit a budget applies to.
A typical set-up has a best-effort domain, which holds the cores that might
run an attacker and is regulated, and a real-time domain, which is left
unregulated.

| Register | Scope | Meaning |
|---|---|---|
| RPR, Regulation Period Register | global | length of the regulation period, in clock cycles |
| ABR, Access Budget Register | per domain | accesses allowed **to each bank** per period |
| DAR, Domain Assignment Register | per core | domain the core belongs to |
| RER, Regulation Enable Register | per core | 1: the core's requests may be stalled |
| BAC, Bank Access Counter | per domain and bank | accesses charged in the current period (read only) |
| MON, monitor counter | per core and bank | accesses since the last clear (write clears) |

The budget is not divided among the banks: every bank receives the whole
ABR. The bandwidth one bank allows a domain is therefore

    BW_bank = ABR / (RPR + 1) x bytes_per_access x f_clk

The "+1" appears because the period counter counts from 0 to RPR inclusive
(see below). With a 400-cycle period at 1 GHz, a budget of 32 accesses
corresponds to 1.28 GB/s per bank at 16 bytes per access. That is the
operating point this design's reset values are taken from. The number of
bytes per access depends on what one channel A message carries. The register
values themselves are always counts of accesses.

## The regulation algorithm, cycle by cycle

Everything happens in one clock cycle, with no pipeline:

1. **Period.** `period_end = (count >= RPR)`. If it is set, the counter
   returns to 0; otherwise it increments. A period therefore lasts RPR+1
   cycles. Because the comparison is `>=`, writing an RPR below the current
   count ends the period at once.
2. **Depleted flags.** For every domain *d* and bank *j*,
   `depleted[d][j] = !period_end && BAC[d][j] >= ABR[d]`. In the period-end
   cycle the counters count as already cleared, so nothing is depleted.
3. **Gate.** Core *c* stalls its channel A request when it is on the first
   beat of a message, RER[c] = 1, and
   `depleted[DAR[c]][bank(address)]` is set. A stall drives valid towards the
   bus low *and* ready towards the core low. The core simply keeps its
   request pending, as TileLink allows. Requests to the other banks are not
   affected.
4. **Charge.** Every message accepted by the bus (valid and ready both high
   on its first beat) adds one to `BAC[DAR[c]][bank]` and to `MON[c][bank]`.
   At period end the BACs restart from the accesses of that same cycle.

Points that are easy to get wrong:

* **Unregulated cores are still charged.** An access from a core with
  RER = 0 counts against its domain's BACs. It only escapes the stall. A
  domain that mixes regulated and unregulated cores shares one budget. Put
  unregulated cores in a domain of their own, as the example set-up does.
* **Simultaneous accesses can exceed the budget.** Step 2 uses the counter
  value from the start of the cycle. If *k* cores of one domain reach the same
  bank in the same cycle, all of them are charged, and the counter can end up
  to *k*-1 above ABR. The bound per period is therefore
  ABR + (cores in the domain - 1). The end-to-end testbench checks
  ABR + 1 for two regulated cores.
* **Bursts are one access.** A PutFullData of 64 bytes on an 8-byte bus is
  eight beats. It is charged once, and it can only be stalled before its
  first beat. Once started, it is never cut off in the middle.
* **Saturation.** BACs saturate at 2^32-1. Monitor counters wrap around like
  ordinary performance counters.
* **Reset state.** RPR = 400, every ABR = 32, all cores in domain 0, and
  every RER = 0. The unit is therefore transparent until software sets an RER.

## Bank mapping

The bank of a request is `address[BANK_LSB +: log2(N_BANKS)]`. The default is
bits 7:6 (four banks, 64-byte lines interleaved across banks). For two banks,
set `N_BANKS = 2`, which uses bit 6. `N_BANKS` must be a power of two. These
bits lie inside the page offset, so user code can aim at any bank, which is
why the bank-targeted attack works in the first place.

## Register map (periphery bus)

A TileLink-UL slave with a 4 KiB page and 32-bit words. It accepts Get,
PutFullData and PutPartialData (byte-masked) requests and answers with
AccessAckData or AccessAck one cycle later. It takes one request at a time,
and a response is held until the master takes it.

| Offset | Register |
|---|---|
| `0x000` | RPR |
| `0x100 + 4*d` | ABR of domain *d* |
| `0x200 + 4*c` | DAR of core *c*. Values above N_DOMAINS-1 are clamped to the last domain |
| `0x300 + 4*c` | RER of core *c*, bit 0 |
| `0x400 + 4*(d*N_BANKS + j)` | BAC of domain *d*, bank *j*, read only |
| `0x800 + 4*(c*N_BANKS + j)` | MON of core *c*, bank *j*. Any write clears it; an access in the same cycle is kept |

Unmapped offsets read as zero and ignore writes. The map fits up to 64 cores
and 64 domains, with N_DOMAINS x N_BANKS <= 256 and N_CORES x N_BANKS <= 512.

A typical programming sequence, for the attack-isolation set-up:

```
RPR      = 400          # period: 401 cycles
ABR[0]   = 32           # best-effort domain: 32 accesses per bank per period
DAR[0]   = 1            # real-time core in domain 1
DAR[1,2] = 0            # best-effort cores in domain 0
RER[1,2] = 1            # regulate them; RER[0] stays 0
```

The monitor counters measure each core's per-bank access pattern over a window
of your choice. Clear the counters, run the workload, and read them back. Use
them to choose budgets or to adapt budgets from software.

## Files

| File | Contents |
|---|---|
| `rtl/bpr_pkg.sv` | TL-C and TL-UL payload structs, TileLink opcodes, beat arithmetic, register offsets |
| `rtl/period_counter.sv` | RPR and the global period counter |
| `rtl/core_control_interface.sv` | DAR and RER per core |
| `rtl/domain_control_interface.sv` | ABR and per-bank access counters per domain; depleted flags |
| `rtl/chan_a_throttle.sv` | per-core bank decode, beat tracking, valid/ready gate |
| `rtl/bank_monitor.sv` | per-core, per-bank monitor counters |
| `rtl/reg_mmio.sv` | periphery-bus register slave |
| `rtl/bw_regulation_unit.sv` | top level; channels B-E pass-through |
| `tb/tb_*.sv` | one self-checking testbench per module, plus the ones below |
| `tb/tb_bw_regulation_unit.sv` | end-to-end test at the default parameters |
| `tb/tb_bandwidth_workloads.sv`, `tb/bw_workload_runner.sv` | synthetic access patterns on 2- and 4-bank configurations |
| `tb/llc_bank_model.sv` | behavioural bus and cache model: per-bank queue, one request every 2 cycles |

Parameters of the top (`bw_regulation_unit`):

| Parameter | Default | Meaning |
|---|---|---|
| `N_CORES` | 3 | TL-C links, one per core (the reference SoC has one out-of-order and two in-order cores) |
| `N_DOMAINS` | 2 | regulation domains (real-time and best-effort) |
| `N_BANKS` | 4 | LLC banks, a power of two |
| `BANK_LSB` | 6 | lowest bank-select address bit |
| `RPR_RESET` | 400 | reset value of RPR |
| `ABR_RESET` | 32 | reset value of every ABR |

The TileLink widths are package constants in `bpr_pkg`: 32-bit address,
64-bit data, 4-bit size, source and sink. At the defaults the unit
synthesises to about 840 flip-flop bits. Most of them are the 32-bit counters:
8 BACs, 12 monitors, the period counter and the registers.

## Verification

Each testbench prints `TB_RESULT checks=N failures=M`, then calls `$finish`.
Each also has a watchdog. To build and run one with Verilator:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -y rtl -y tb rtl/bpr_pkg.sv \
          tb/tb_bw_regulation_unit.sv --top-module tb_bw_regulation_unit
./obj_dir/Vtb_bw_regulation_unit
```

* `tb_period_counter`: checks that the period is RPR+1 cycles, that an RPR
  write takes effect, that lowering RPR ends the period at once, and that
  RPR = 0 gives a pulse every cycle.
* `tb_core_control_interface`: runs a four-core, two-domain example (cores
  0-2 regulated in domain 0, core 3 unregulated in domain 1), then random
  writes including out-of-range domains.
* `tb_domain_control_interface`: compares every counter and depleted flag,
  every cycle, with a reference model under random accesses, period ends and
  budget writes. It includes simultaneous charges.
* `tb_chan_a_throttle`: drives random Get, AcquireBlock and multi-beat Put
  messages with random bus back-pressure and random budget state. It checks
  the gate every cycle, that each message is reported once, and that the
  payload is unchanged.
* `tb_bank_monitor`: tests a skewed pattern, then random accesses and clears.
* `tb_reg_mmio`: covers the whole register map, byte-masked writes, the
  read-only BAC, a single-counter clear, unmapped addresses and response
  back-pressure.
* `tb_bw_regulation_unit`: runs at the default parameters against a
  cycle-accurate reference model of the whole unit, through six phases:
  bank-0 attack, sweep, bursts, register read-back, regulation off, and a
  new period and budget. It checks every channel on every cycle and counts
  every mechanism: stall, release at period end, pass to an open bank while
  another is depleted, burst beats past a depleted bank, double charge,
  register reads, writes and clears. It also checks that the attackers never
  exceed ABR+1 accesses to bank 0 per period. Measured: 32 accesses per
  period on one bank, about 118 per period when sweeping four banks behind
  the contended cache model.
* `tb_bandwidth_workloads`: runs a regulated core with 32 accesses per
  400-cycle period and a bus that never pushes back. It measures three
  patterns:

  | Pattern | 2 banks | 4 banks |
  |---|---|---|
  | all requests to one bank | 32 per period | 32 per period |
  | sequential line sweep | 64 per period | 128 per period |
  | skew with about 98% of requests on one bank | about 32 per period | about 32 per period |

  Per-bank regulation therefore gives a sweep 2x or 4x the throughput of the
  single-bank case, which is also what a whole-cache regulator with the same
  budget would allow. A full system measures less than this ideal
  (about 1.9x and 3.7x), because the core itself limits its request rate.

## Relation to the published design, and what is this design's own

The following come from the published description:

* the per-bank regulation and monitoring algorithms
* the registers RPR, ABR, DAR, RER, BAC and the per-bank monitors, and which
  of them are per core or per domain
* regulating channel A only, by pulling valid and ready low
* passing channels B to E through
* the MMIO connection on the periphery bus
* the bank bits (6, or 7:6)
* the evaluation operating point: three cores, two domains, 400 cycles,
  budgets of 16 to 384 accesses

The following are choices made here, because the description leaves them
open:

* all field and counter widths (32 bits)
* the register offsets, the TL-UL register protocol, clamping, and read-only
  and clear-on-write behaviour
* reset values and the asynchronous active-low reset
* counting a multi-beat message once and never stalling it mid-burst
* BAC saturation and monitor wrap-around
* treating the period-end cycle as "already replenished"

Two points where the description is ambiguous:

* **Where the access counters live.** One block diagram draws the bank access
  counters at each core's port. The text says every *domain* has its own
  counters, and the algorithm indexes them by domain. This design follows the
  text, so cores of one domain share counters.
* **Bytes per access.** The bandwidth formula is said to use the cache-line
  size (64 bytes). The published budget figures (16 accesses per 400 cycles =
  640 MB/s, 32 = 1.28 GB/s, 384 = 15.36 GB/s) only work out at 16 bytes per
  access. The RTL counts accesses, so only the conversion to bytes per second
  is affected.

Not included:

* The cores, the traffic generators used as attackers, the banked L2 cache,
  the system and periphery buses, and DRAM. These are existing components
  that the design attaches to. Only a small behavioural bank model
  exists, for testing.
* A whole-cache ("all-bank") regulation mode. It is only the baseline being
  compared against. Setting `N_BANKS = 1` makes every access count against a
  single budget, which is that mode. This configuration elaborates but has no
  testbench of its own.
