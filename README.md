# TRRIP: temperature-guided replacement in a shared L2

Large mobile applications spend a noticeable share of their cycles waiting
for instructions. Their hot code often comes back only after a long stretch
of other accesses. By then an ordinary replacement policy has already pushed
it out of the L2 in favour of data. Profile-guided compilers know which
functions are hot, warm or cold, and they already group the code into
separate sections by that "temperature". TRRIP hands this knowledge to the
cache without new instructions and without new per-line storage:

1. The program loader marks each code page with its temperature. The mark
   goes into spare, implementation-defined bits of the page table entry
   (PTE). On ARM these are the PBHA bits.
2. The MMU already reads the PTE to translate an address. It copies those
   bits into the memory request, next to the physical address.
3. The L2 uses RRIP replacement. When it inserts or promotes a line for an
   instruction fetch, it picks the re-reference prediction value (RRPV) from
   the request's temperature. Hot code starts as "re-referenced
   immediately". Warm code starts one step behind it. Everything else
   behaves as in plain static RRIP (SRRIP).

The temperature is used once, when the RRPV is written, and is never stored
in the cache. The cache arrays are therefore exactly those of an SRRIP
cache. The only additions are a few gates in the RRPV-update logic and the
two hint bits on the request path.

This repository holds synthesizable SystemVerilog for the hardware half of
the scheme:

- the replacement rule;
- an RRIP victim selector;
- a 512 kB, 8-way L2 built around them;
- an MMU (TLB plus page-table walker) that forwards the temperature;
- a top level that joins four cores' MMUs to the shared L2 through an
  arbiter.

The software half is outside the hardware and is not included: the
profiling compiler, the loader and the OS that write the PTE bits. The
testbenches build page tables with temperature bits themselves.

## The replacement rule

RRIP keeps a small counter, the RRPV, for every line. A low value means "this
line will be needed soon". With the 2-bit RRPV used here the values are
named as follows.

| RRPV | name         | meaning                            |
|------|--------------|------------------------------------|
| 0    | immediate    | keep longest                       |
| 1    | near         |                                    |
| 2    | intermediate | where SRRIP inserts every new line |
| 3    | distant      | eviction candidate                 |

**Eviction** is the same in all modes. It uses the set's valid lines and
their RRPVs:

- If some line is at 3, the lowest-numbered such way is the victim.
- Otherwise every RRPV in the set is incremented until one reaches 3.

`rrip_victim_select` does all the increments in one step. It adds
`3 - max(RRPV)` to every way, then picks the first way at 3. The aged values
are written back with the new line. An invalid way is always filled first,
and no ageing happens then.

**Insertion and promotion** are done by `trrip_policy`. They depend on the
mode (`mode_i`, chosen at run time) and on the request. The temperature
matters only for instruction fetches that carry one. Data requests, and
fetches marked "none", always get the SRRIP values.

| event | request              | SRRIP | TRRIP-1 | TRRIP-2          |
|-------|----------------------|-------|---------|------------------|
| hit   | hot fetch            | 0     | 0       | 0                |
| hit   | warm or cold fetch   | 0     | 0       | max(RRPV-1, 0)   |
| hit   | anything else        | 0     | 0       | 0                |
| fill  | hot fetch            | 2     | 0       | 0                |
| fill  | warm fetch           | 2     | 2       | 1                |
| fill  | anything else        | 2     | 2       | 2                |

The two variants work as follows:

- **TRRIP-1** only looks at hot code.
- **TRRIP-2** also handles warm and cold code:
  - warm lines enter at "near";
  - warm and cold lines that hit climb one step per hit instead of jumping
    to 0.

  This leaves RRPV 0 mostly to hot code.

Cold fills are deliberately left at the SRRIP value.

### Example

A hot instruction line is fetched once, and then 16 data lines that map to
the same 8-way set follow it.

- **SRRIP:** the instruction line enters at 2, like the data. Once the set
  is full, it ages to 3 and is evicted.
- **TRRIP-1:** it enters at 0, two steps ahead of every data line. The
  data lines enter at 2, so they reach 3 first and are evicted in its
  place. In the sequence the testbenches use, the instruction line is still
  present when it is fetched again.

Both the end-to-end and the full-size testbenches check exactly this
scenario.

## How the temperature reaches the cache

### PTE layout

Page-table entries are 64 bits, laid out as in an ARMv8 4 kB-granule table.

| bits          | field                                           |
|---------------|-------------------------------------------------|
| 1:0           | type: x0 invalid; 11 table, or a 4 kB page at the last level; 01 block (2 MB at level 2, 1 GB at level 1) |
| 39:12         | next-level table or page frame number (40-bit physical addresses) |
| 54            | execute-never (XN), page or block only          |
| 60:59         | temperature (heat), page or block only          |

The temperature field sits inside the four PBHA bits, 62:59. The heat and
XN positions are parameters of `mmu` (`HEAT_LSB`, `XN_BIT`). The type bits
are fixed at 1:0.

A block descriptor gives one temperature to the whole 2 MB (or 1 GB)
region. That is only accurate if hot and cold code do not share the region.
Toolchains that want huge pages for code must pad or align the temperature
sections accordingly.

### Temperature encoding

The encoding is defined in `trrip_pkg::temp_e`.

| value | temperature              |
|-------|--------------------------|
| 00    | none (no hint, SRRIP behaviour) |
| 01    | hot                      |
| 10    | warm                     |
| 11    | cold                     |

With 00 as "none", a page whose bits were never written behaves exactly like
an SRRIP system.

### MMU (`mmu.sv`)

The MMU holds one request at a time.

- **TLB.** The TLB is fully associative, with 32 entries by default and
  round-robin replacement. Each entry holds the page number, the frame
  number, the level the walk ended at, the temperature and XN. An entry
  made from a block matches every 4 kB page inside the block.
- **TLB hit.** The translated request appears on `out_*` two cycles after
  the request handshake. It carries the physical address and the
  temperature.
- **TLB miss.** The walker reads up to four levels with 9 index bits each.
  A 2 MB block stops the walk after three reads. Each read is a PTE address
  (PTEA) sent on `walk_req_*`, answered by a 64-bit PTE on `walk_resp_*`.
- **Faults.** A request faults in two cases: an invalid PTE at any level, or
  an instruction fetch from an XN page. A block type at level 0 or at the
  last level counts as invalid. A faulting request is returned with
  `out_fault_o` set and temperature "none", and nothing is cached in the TLB.
- **Flush.** `flush_i` clears the TLB. The OS needs this after it changes a
  page's temperature.
- **Payload.** A `USER_BITS` payload passes through unchanged. The top uses
  it for the write flag and the write data.

## The L2 cache (`l2_cache.sv`)

### Organisation

| property                      | default                           |
|-------------------------------|-----------------------------------|
| capacity                      | 512 kB                            |
| ways                          | 8                                 |
| line size                     | 64 B                              |
| sets                          | 1024                              |
| physical address              | 40 bits                           |
| tag                           | 24 bits                           |
| replacement state             | 2-bit RRPV per line               |

The cache is unified (code and data), inclusive, write-back and
write-allocate.

One word per set holds the valid, dirty, tag and RRPV fields of all eight
ways. Line data is a separate array of `SETS*WAYS` entries.

After reset, an initialisation sweep clears one set per cycle, so it takes
1024 cycles at the default size. `req_ready_o` stays low during the sweep.

### Request format

A request carries:

- the line address;
- a write flag. A write is a full-line write-back from an inner cache, with
  its data.
- an instruction flag;
- the 2-bit temperature.

### Sequence

The cache is blocking: it takes one request at a time.

| step | what happens |
|------|--------------|
| tag  | `TAG_LAT` (8) cycles to look up the set. |
| hit  | The new RRPV from `trrip_policy` is written. A write also updates the data and sets dirty. After `DATA_LAT` (12) more cycles, `resp_valid_o` pulses with the line. A hit takes 20 cycles from handshake to response. |
| miss | `rrip_victim_select` picks the victim. The aged RRPVs are kept for the update. |
|      | If the victim is valid, its address is announced on `inv_valid_o`/`inv_addr_o` for one cycle. This keeps inner caches inclusive. |
|      | If the victim is dirty, it is written to the next level (`mem_req_*` with `write=1`). |
|      | A read miss fetches the line from the next level. A write miss installs the written line directly. |
|      | The line is installed with the insertion RRPV. The response follows one cycle later, with `resp_hit_o` low. |

### Interfaces

- `req_*` uses a valid/ready handshake.
- `resp_*` is a single-cycle pulse with no back-pressure.
- `mem_req_*` uses valid/ready.
- `mem_resp_*` is a single-cycle pulse.

The next level, meaning the system level cache and DRAM, is outside the
design.

## The four-core cluster (`trrip_top.sv`)

`trrip_top` models a cluster of `NUM_CORES` (4) cores sharing the L2. Each
core has its own MMU and its own request port (`cpu_req_*[c]`). Each request
is one of:

- an instruction fetch or a data load that missed the core's L1;
- a full-line L1 write-back.

### Per core

- **Walks go through the L2.** The MMU's page-table reads are sent into the
  L2 as data reads, with temperature "none", of the line holding the PTE.
  Bits [5:3] of the PTE address select the PTE from the returned line.
- **Slots.** A walk and the core's translated request never coexist, because
  the MMU is single-issue. Whichever one is present takes the core's
  arbitration slot. A per-core flag remembers which of them is waiting for
  the L2's answer.
- **Faults.** A faulting translation never reaches the L2. It is answered
  with `cpu_resp_fault_o` once the core has no L2 access outstanding, so a
  core's responses stay in order.

### Shared

- **Arbitration.** `l2_arbiter` chooses among the cores' slots in round-robin
  order. The priority pointer moves past the winner each time the L2 accepts
  a request, so no core waits for more than three others.
- **Responses.** `cpu_resp_valid_o[c]` pulses for the core whose request
  finished. The response line `cpu_resp_rdata_o` is one bus shared by all
  cores.
- **Back-invalidation.** The notice (`inv_*`) goes to every core's inner
  caches.
- **Configuration.** `mode_i` sets the replacement mode for the whole L2.
  Each core also gets a page-table base (`ptbr_i[c]`) and a TLB flush
  (`tlb_flush_i[c]`).

### Timing without contention

- A request whose TLB and L2 both hit is answered 2 + 8 + 12 = 22 cycles
  after its handshake.
- A TLB miss adds the walk's L2 accesses: four for a 4 kB page, three for a
  2 MB block.
- An L2 miss adds the time the next level takes.

While the L2 serves one core, the other MMUs keep translating. The L2 takes
its next request one cycle after a response. Back-to-back hits from
different cores are therefore answered 21 cycles apart.

## Files and hierarchy

```
trrip_top            cluster: NUM_CORES x mmu, l2_arbiter, l2_cache
├── mmu              (one per core) TLB + 4-level walker, forwards PTE heat bits
├── l2_arbiter       round-robin choice among the cores' slots
└── l2_cache         blocking TRRIP L2
    ├── trrip_policy         insertion / promotion RRPV (the rule table above)
    └── rrip_victim_select   RRIP eviction with ageing
trrip_pkg            temp_e (temperature) and mode_e (SRRIP / TRRIP-1 / TRRIP-2)
```

### Parameters of `trrip_top`

| parameter      | default    | meaning                                  |
|----------------|------------|------------------------------------------|
| NUM_CORES      | 4          | cores sharing the L2 (at least 2)        |
| L2_SIZE_BYTES  | 524288     | L2 capacity                              |
| L2_WAYS        | 8          | associativity                            |
| LINE_BYTES     | 64         | line size                                |
| RRPV_BITS      | 2          | RRPV width                               |
| TAG_LAT        | 8          | tag-lookup cycles                        |
| DATA_LAT       | 12         | data-access cycles                       |
| VA_BITS        | 48         | virtual address width                    |
| PA_BITS        | 40         | physical address width                   |
| TLB_ENTRIES    | 32         | TLB entries per core                     |

Source of each default:

- From the evaluated configuration: the L2 size, ways, latencies and RRPV
  width, the four cores, and 4 kB pages.
- Chosen for this RTL: the line size, address widths, TLB size and PTE
  layout.

The smaller and differently associative L2s used in the cache-size
sensitivity study are reached through `L2_SIZE_BYTES` and `L2_WAYS`:

- 128 kB and 256 kB, 8-way;
- 128 kB, 4-way and 16-way.

## Where this RTL goes beyond, or departs from, the published description

The published description specifies two things:

- the replacement rule, together with the unchanged RRIP eviction;
- the path of the temperature from the PTE through the MMU to the cache.

The rest had to be chosen. The choices that matter are listed here.

- **Encodings and bit positions.** These cover the temperature encoding, the
  PTE positions of the heat and XN bits, and the 4-level, 4 kB page table.
  The source says only that no more than two of the existing spare PTE bits
  carry the temperature.
- **Page sizes.** The description discusses 16 kB and 2 MB pages as an
  option, and it counts how many pages each benchmark's hot and warm code
  needs at those sizes.
  - The MMU supports 4 kB pages, 2 MB blocks and 1 GB blocks, all on the
    4 kB granule.
  - A 16 kB granule, with 11 index bits per level, is not implemented.
- **Timing of the L2.** The 8-cycle tag and 12-cycle data latencies are
  applied one after the other, so a hit takes 20 cycles. They could also be
  read as a 12-cycle total with the tag check overlapped.
- **Blocking L2.** The cache handles one request at a time. There are no
  miss-status registers and no non-blocking operation.
- **No prefetch flag.** The simulated system has stride and FDIP prefetchers.
  Prefetch requests would enter through the same core ports with no special
  handling.
- **Invalid ways and tie-break.** Invalid ways are filled before any
  eviction, and ties go to the lowest way. The description does not cover
  empty ways.
- **Run-time mode.** The mode switch selects SRRIP, TRRIP-1 or TRRIP-2. It
  serves as the way to switch TRRIP off, which the source mentions. It is also
  a way to compare the variants on the same hardware.
- **Multi-core plumbing.** The arbiter, the shared response bus and the
  broadcast back-invalidation are this design's own choices. The source says
  only that four cores share the L2.
- **Walks through the L2.** Page walks go through the L2 as data reads. This
  follows the figure of the system, in which the MMU's PTE reads go to the
  caches. The cores' L1s are not modelled, so walks do not touch an L1.

## What is not included

The following parts are not included:

- the out-of-order cores, their branch predictors and the private L1
  instruction and data caches;
- the stride and FDIP prefetchers;
- the system level cache and DRAM below the L2;
- the compiler, the loader and the OS that classify code and write the
  temperature into the PTEs.

Their connections are ports of `trrip_top`. The testbenches contain small
behavioural stand-ins:

- a next-level memory with random delays;
- a page-table builder, `tb/pt_builder.sv`.

## Verification

Each block has a self-checking testbench that prints
`TB_RESULT checks=N failures=M`. Each also has a watchdog.

| testbench                  | what it checks |
|----------------------------|----------------|
| `trrip_policy_tb`          | All combinations of hit/fill, RRPV, instruction/data, temperature and mode, against the rule table. |
| `rrip_victim_select_tb`    | Random and directed sets against a literal "increment until one reaches 3" loop. |
| `l2_cache_tb`              | 8 ways × 4 sets under random traffic with random memory delays. A reference model predicts every hit/miss, returned line, back-invalidation and write-back. Also checks the handshake and the 20-cycle hit latency. |
| `mmu_tb`                   | 48 pages and 8 2 MB blocks, some XN and some unmapped, against a TLB model and the page table. Checks the two-cycle hit latency, four PTE reads per page walk and three per block walk, and flush. |
| `l2_arbiter_tb`            | Random requests and ready, against a reference pointer. Checks one-hot grants and a bound on waiting. |
| `l2_size_sweep_tb`         | The five L2 geometries of the size study (128/256/512 kB at 8 ways, 128 kB at 4 and 16 ways), described below. |
| `trrip_top_tb`             | Four cores with a 16-set L2, described below. |
| `trrip_top_full_tb`        | The unmodified top: 4 cores, 512 kB L2, 1024 sets, described below. |

`l2_size_sweep_tb` reproduces the basic effect in every cache geometry. In
each of 16 sets, every round fetches a hot line and a warm line, then
streams as many never-reused data lines as the set has ways. An exact model
predicts every hit. The measured re-fetch hits are listed below; 80 is the
maximum (16 sets × 5 repeat rounds).

| geometry       | SRRIP hot/warm | TRRIP-1 hot/warm | TRRIP-2 hot/warm |
|----------------|----------------|------------------|------------------|
| 4-way          | 0 / 0          | 80 / 0           | 80 / 48          |
| 8-way          | 0 / 0          | 80 / 0           | 80 / 64          |
| 16-way         | 0 / 0          | 80 / 0           | 80 / 80          |

Under SRRIP the code is lost between rounds. TRRIP-1 always keeps the hot
line. TRRIP-2 also keeps the warm line, more often as associativity grows.

`trrip_top_tb` runs four cores against a 16-set L2. All four issue random
fetches, loads and stores at the same time while the mode changes. Each
returned line is checked against a shadow memory. The test then checks:

- the 22-cycle hit path;
- the SRRIP-evicts / TRRIP-keeps case;
- a TLB flush;
- hot code in a 2 MB block, where one walk serves two of its pages.

It counts each mechanism and fails if one never happened. The mechanisms
are TLB hit, walk, L2 hit and miss, ageing, back-invalidation, write-back,
hot and warm insertion, warm/cold decrement, fault, flush, each mode, and
two cores competing.

`trrip_top_full_tb` runs the unmodified top. It checks:

- a cold fetch, then a 22-cycle hit;
- a store followed by a load;
- the SRRIP/TRRIP-1 eviction case on one set;
- a warm fetch landing at RRPV 1 under TRRIP-2;
- all four cores fetching at once, twice. The second time every fetch hits,
  and the cores are answered after 22, 43, 64 and 85 cycles.

All testbenches pass. Each testbench was also run against a copy of its
module with one deliberate bug, and every copy was caught. The bugs were:

- warm fills at the wrong RRPV;
- ageing left out;
- aged RRPVs not written back;
- heat bits read one position off;
- an arbiter pointer that never moves;
- the temperature dropped on the way to the L2.

The evaluation's benchmarks are program traces run on a full-system
simulator. They cannot be run on this RTL without the cores. The testbenches
use synthetic access streams instead.

## Simulating

The design needs Verilator 5 with `--timing`. No other tool or library is
needed. From the repository root:

```sh
RTL="rtl/trrip_pkg.sv rtl/trrip_policy.sv rtl/rrip_victim_select.sv \
     rtl/l2_cache.sv rtl/mmu.sv rtl/l2_arbiter.sv rtl/trrip_top.sv"

# end-to-end, four cores, reduced L2
verilator --binary --timing --assert -Wno-fatal --top-module trrip_top_tb \
    -Mdir obj_top $RTL tb/pt_builder.sv tb/trrip_top_tb.sv
./obj_top/Vtrrip_top_tb

# the five L2 geometries under the three modes
verilator --binary --timing --assert -Wno-fatal --top-module l2_size_sweep_tb \
    -Mdir obj_sweep rtl/trrip_pkg.sv rtl/trrip_policy.sv rtl/rrip_victim_select.sv \
    rtl/l2_cache.sv tb/l2_size_sweep_tb.sv
./obj_sweep/Vl2_size_sweep_tb

# full-size top at default parameters
verilator --binary --timing --assert -Wno-fatal --top-module trrip_top_full_tb \
    -Mdir obj_full $RTL tb/pt_builder.sv tb/trrip_top_full_tb.sv
./obj_full/Vtrrip_top_full_tb

# a single block, e.g. the L2
verilator --binary --timing --assert -Wno-fatal --top-module l2_cache_tb \
    -Mdir obj_l2 rtl/trrip_pkg.sv rtl/trrip_policy.sv rtl/rrip_victim_select.sv \
    rtl/l2_cache.sv tb/l2_cache_tb.sv
./obj_l2/Vl2_cache_tb
```

Random stimulus can be varied with `+verilator+seed+N`. Each run ends in
seconds.

These commands build without warnings. With `-Wall`, Verilator also lists a
few unused bits in the RTL. They are expected:
- the address bits below the line offset;
- the low bits of the page-table base;
- the L2's "ageing happened" flag, which only the testbenches observe.

### Changing the design

Sizes are parameters. The following changes are common.

- **Cache size and associativity.** Set `L2_SIZE_BYTES` and `L2_WAYS` on
  `trrip_top`. Both `L2_WAYS` and the resulting set count must be powers
  of two. The set count is `size / (ways × line size)`.
- **Wider RRPV.** Set `RRPV_BITS`:
  - "intermediate" becomes `2^N-2`;
  - "distant" becomes `2^N-1`;
  - "near" stays 1.
- **Different PBHA bits.** Set `HEAT_LSB` on `mmu`.
- **Different rule.** To try a different insertion or promotion rule,
  change `trrip_policy` alone. `trrip_policy_tb` holds the expected table
  and must be updated with it.
