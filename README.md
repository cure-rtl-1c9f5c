# Enclave-ID security primitives for a two-core RISC-V SoC

An enclave is a program that must stay protected even from the operating system.
To run many enclaves side by side, a chip must be able to tell, for every memory
or device access, which software context made it. The design here does this with
one 4-bit enclave ID (`eid`) per core. The ID is carried on every bus transaction,
and every shared resource checks it: main memory, the peripherals, DMA and the
shared L2 cache. A trusted security monitor (SM) sets the IDs and the rules. The
hardware enforces them in the same cycle as bus arbitration, and it partitions the
L2 cache by way so that enclaves can shut out cache side channels.

This SystemVerilog follows the hardware part of the CURE architecture (*CURE: A
Security Architecture with CUstomizable and Resilient Enclaves*) for a
Rocket-Chip-style SoC with two cores.

The design covers the parts CURE adds to the SoC:

- the per-core `eid` register;
- the access control in the memory arbiter, the peripheral arbiter and at the DMA port;
- the control bus through which the SM configures them;
- the partitioned shared L2 cache.

The Rocket cores with their L1 caches, the DMA device, DRAM, the peripherals and the
SM software are not part of it. They connect through ports of the top module `cure_soc`.

## Enclave IDs

| eid | context |
|---|---|
| 0x0 | untrusted OS (and its user processes) |
| 0x1 .. 0xD | 13 enclaves |
| 0xE | machine-mode firmware |
| 0xF | security monitor |

## Blocks

| module | role |
|---|---|
| `cure_pkg` | eid constants; the request/response structs of the reduced TileLink bus; the Addr/Mask match function |
| `eid_unit` | Per core. Holds the `eid` CSR (number 0x7C0) and guards `mtvec`: both are writable only while `eid` = 0xF, and other writes are refused with `csr_illegal`. On a trap into machine mode it asks the core to flush its L1, stalls the core until the flush is done, and only then sets `eid` to 0xF. It stamps `eid` onto every request. |
| `sysbus_decoder` | Per core. Sends MMIO requests (top address nibble 0x1) to the peripheral arbiter and all others to the memory arbiter. Routes the response back. |
| `bus_arbiter` | Round-robin grant of one master at a time, held until its response. Used by both arbiters. |
| `mem_arbiter_ac` | Arbitrates between the cores and the DMA port. It checks the granted request against 15 Addr/Mask region registers, in the same cycle as the grant. |
| `periph_arbiter_ac` | Arbitrates the cores' MMIO requests. Per peripheral it has an Addr/Mask register and a 32-bit read/write permission bitmap. |
| `dma_port_ac` | Filter in front of a DMA master, one per device. One Addr/Mask region and the owner enclave of the device. |
| `periph_bus` | Decodes MMIO pages: page 0 is the control bus, pages 1..3 are the peripherals, other pages read zero. |
| `ctrl_bus` | Configuration registers of all primitives, reached over MMIO. Also holds the sticky violation status and the interrupt to the SM. |
| `l2_way_alloc` | Cache partitioning state. A lookup table by `eid` holds {CP-STRICT mode bit, owned ways}. Per way there is an `excl` bit and the owner `eid`. There is also an unallocated-ways vector. |
| `l2_evict_sel` | Pseudo-random victim choice (16-bit LFSR), restricted to the allowed ways. |
| `l2_cache` | 2 MiB, 16-way, write-back L2 with a 4-bit line-eid per line. |
| `cure_soc` | Top: 2 cores' eid units and decoders, the DMA filters (`N_DMA`, 1 by default as in the paper's prototype), both arbiters, the peripheral bus, the control bus and the L2. |

## Bus

The bus is a reduced TileLink. A request struct (`tl_req_t`) carries:

- the operation: Get, Put with byte mask, or ReleaseData;
- a 32-bit address and 64-bit data;
- the `eid` and a source ID.

Get and Put stand for TileLink channel A. ReleaseData is the write-back of a dirty
L1 line and stands for channel C. As in the paper, these are the only directions that
carry the `eid`. Responses (channel D) carry data and source only. Every link uses
valid/ready handshakes for request and response, with one transaction outstanding.

## Access-control rules

A region register is a 32-bit base plus a 32-bit mask. An address is inside the region
when `(addr & mask) == (base & mask)`. A mask of zero marks the register as unused.

**Memory arbiter.** Register *i* belongs to eid *i*: 1..13 for the enclaves, 14 for the
firmware and 15 for the SM.

| requester | may access |
|---|---|
| SM (0xF) | everything |
| enclave *e* | only region *e* |
| OS (0x0) | every address outside all regions |
| firmware (0xE) | its own region and every address outside all regions |

The check is combinational on the granted request, so it adds no cycle. A refused
request is not dropped. Its address is replaced by the sink `0x8000_1FC0` and its data
by zero, so it reads zeros from or writes zeros to an unused zero-filled line. The sink
lies inside the SM's region, where the SM keeps it zero. A violation pulse goes to the
control bus, which interrupts the SM. The DMA port is not checked by `eid` here
(`CHECK_PORTS`), because `dma_port_ac` has already filtered it.

**Peripheral arbiter.** The lowest-numbered region that matches an MMIO address decides.
Permission bit `2*eid` allows reads and bit `2*eid+1` allows writes. An address
in no region is open to everyone. A refused access goes to the unmapped address
`0x1000_F000`, which reads zero and ignores writes. Region 0 should cover the control
bus and give access to the SM only. For that region, the bitmap must be written before
the base and mask, or the SM locks itself out.

**DMA port.** Requests inside the device's region pass, stamped with the owner's `eid`.
All others go to the memory sink with zero data. After reset the mask is zero, so the
device reaches nothing until the SM assigns it.

## Shared cache partitioning

The cache has 64-byte lines, 2048 sets and 16 ways. A lookup hits only if three things hold:

- the tag matches;
- the line-eid equals the request's `eid`;
- the way is allowed for that `eid`.

The allowed ways depend on the mode:

- **CP-BASIC** (the default): every way not owned exclusively by an enclave. A context
  never hits another context's lines, but may evict them.
- **CP-STRICT**: only the enclave's own exclusive ways. Its lines cannot be evicted by,
  or hit by, anyone else.

Misses fill a victim chosen by `l2_evict_sel` among the allowed ways. An empty way is
taken first; otherwise the search starts from an LFSR position.

A line that matches the tag but fails the eid or way test is a conflicting copy. It is
written back if dirty and then invalidated before the new fill, so an address is never
cached twice. This is how the SM reads data an enclave left in the cache.

Allocation follows the paper. An enclave in CP-STRICT asks for *n* ways. The ways are
granted only if they are free and the enclave then owns no more than the maximum. The
maximum is 8 here; the paper does not give a number. One way always stays unallocated
so that CP-BASIC contexts can still be cached. Clearing the mode bit or issuing RELEASE
returns the ways.

Timing:

- After reset the valid bits are cleared by a sweep of one set per cycle (2048 cycles).
- A hit answers 2 cycles after acceptance.
- A miss adds one memory read, plus a line write-back first if the victim is dirty.

## Control-bus register map

The control bus starts at MMIO address `0x1000_0000`. Registers are 64 bits apart,
and the low 32 bits of the data are used. Address bits 11:9 select the block and
bits 8:3 select the register.

| offset | block | registers |
|---|---|---|
| 0x000 | memory arbiter | index 2*i = base *i*, 2*i+1 = mask *i* (i = 1..15) |
| 0x200 | peripheral arbiter | index 3*p = base, 3*p+1 = mask, 3*p+2 = permission bitmap |
| 0x400 | DMA ports | for device d: 3*d = base, 3*d+1 = mask, 3*d+2 = owner eid |
| 0x600 | L2 partitioning | 0 = MODE {mode[4], eid[3:0]}, 1 = ALLOC {n[12:8], eid}, 2 = RELEASE {eid}; reads: 0 = {ok[31]}, 3 = unallocated ways, 16+e = {mode[16], ways of e} |
| 0x800 | status | 0 = sticky violations {l2, dma, periph, mem}, write 1 to clear; 1 = last violation address |

The interrupt `ac_irq` is the OR of the sticky bits.

## Memory map

| range | use |
|---|---|
| `0x1000_0000` | control bus (page 0) |
| `0x1000_1000`, `0x1000_2000`, `0x1000_3000` | peripherals 0..2 |
| rest of `0x1xxx_xxxx` | unmapped MMIO (reads zero) |
| everything else | main memory through the L2 |

The SM picks the memory regions. The tests put the SM at `0x8000_0000`, an enclave at
`0x8010_0000` and the OS above `0x8100_0000`.

## Testbenches

Each block, the arbiter helper included, has a self-checking testbench `tb/tb_<module>.sv`. Each one prints
`TB_RESULT checks=N failures=M` and has a watchdog. The cache test runs a reduced
cache (4 KiB, 4 ways) against a reference model. It also checks the hit latency,
CP-STRICT isolation and 400 random operations.

`tb_cure_soc` runs the top at its default, full size. Playing the SM, an enclave, the
OS and a DMA device, it:

1. configures every primitive over MMIO;
2. runs allowed and forbidden memory, MMIO and DMA traffic;
3. fills CP-STRICT ways;
4. traps both cores back into the SM, one of them with a malicious dirty write-back;
5. checks the interrupt status.

It counts every mechanism and fails if any never happened:

- violations of all three kinds;
- the interrupt;
- refused CSR writes;
- flush-before-eid;
- arbitration contention;
- L2 hit, miss, write-back and conflicting copy;
- way allocation.

`tb_l2_partition` runs the cache configuration of the paper's evaluation on the
full-size L2: 2 MiB, 16 ways, with one way (1/16) given to a CP-STRICT enclave.
The enclave fills its way. A CP-BASIC enclave fills lines of its own. The OS then
streams 2 MiB through the cache. Afterwards every line of the CP-STRICT enclave
still hits in 2 cycles. In one run, 465 of the CP-BASIC enclave's 2048 lines had
been evicted. With a single way, two lines of one set evict each other on every
access; this is the cost of strict isolation.

`tb_cure_soc_stress` runs the full-size top with three masters at once, like the
paper's stress runs of an OS beside an enclave. Enclave 1 on core 0 runs random
traffic on lines that thrash its two exclusive ways. The OS on core 1 runs its own
random traffic on the same cache sets and now and then attacks the enclave's lines.
The DMA device works in its buffer and now and then reaches outside it. All data
is compared with reference copies. Every attack must read zero and must change nothing.

`tb_cure_soc_dma` builds the top with two DMA devices. One is bound to an enclave
and one to the OS. Each must reach only its own buffer, while both run at the same
time as the cores.

To run one testbench with Verilator:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb rtl/cure_pkg.sv tb/tb_cure_soc.sv \
          --top-module tb_cure_soc -Mdir obj -o sim && obj/sim
```

## Departures from the paper and open points

- **Bus.** TileLink is reduced to one request and one response channel, with one
  transaction in flight per link. Real TileLink has five channels, bursts and several
  outstanding transactions. Only the `eid` on the A and C directions follows the paper.
- **Cores not built.** The Rocket cores, L1 caches and TLBs are outside the design. The
  L1 flush on a switch to the SM is a request/acknowledge handshake with the core, so
  the paper's measured flush cost of 3141 cycles belongs to the core. `tb_eid_unit`
  holds the flush for exactly that long and checks that the core stays stalled and the
  old `eid` stays in place until it ends. The TLB flush (28 cycles) is not modelled.
- **Cache organisation.** The L2 is blocking, with one request at a time, and its line
  size (64 B) is our choice. The paper does not describe the cache's pipeline; a
  production L2 would accept several requests at once.
- **Where the ownership bits live.** The paper's block diagram draws the exclusive bit,
  the way owner and the line owner side by side in every cache entry. Its text puts the
  exclusive bit and the owner in the way directory and the line owner in each line.
  This design follows the text: 16 ways × 5 bits of way state, and 4 bits per line.
- **Conflicting copies.** The paper does not say how a line with the same tag but
  another owner is treated. Here it is written back and invalidated.
- **Own numbers.** The per-enclave maximum of ways (8), the one reserved way, the sink
  addresses, the CSR number, the register map and the memory map are all our choices.
- **Shared memory.** As in the paper's prototype, each enclave has one region
  register. The monitor hands the 4 KB shared page between an enclave and the OS by
  rewriting that register; the hardware has no separate shared-region register.
- **DMA address space.** DMA requests always go to the memory side; DMA to MMIO
  is not supported.
- **Results not reproduced.** Table 2 (FPGA LUT and register overhead) and the
  performance results (rv8, CoreMark, stress-ng) need the cores and an FPGA flow. The
  design's sizes do hold the evaluated configurations: 13 enclaves plus firmware and SM,
  a 2 MiB 16-way L2 with one way per enclave, one DMA device, and a 32-bit permission
  bitmap for 16 eids.
