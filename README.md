# RVAS: binding every memory access to a cryptographic label

An enclave system usually isolates memory by keeping trusted tables. Examples are
page-ownership maps, protection keys and range checks. All of them must be
consulted and kept correct on every access. RVAS (RISC-V Authenticryption Shield)
replaces those tables with cryptography.

Memory leaves the chip through an *authenticated* memory encryption engine (MEE).
Every line the engine writes is encrypted and authenticated together with
associated data called the **tweak**. The core builds the tweak from the state
the access was made in:

- which protected virtual-address range the access hits, and where in it
- the privilege mode
- the page-table permission bits
- a software-chosen session identifier (a "memory colour")

A line written under one tweak decrypts correctly only under exactly the same
tweak. If anyone reads it under a different tweak (another enclave, the OS, a
mapping at another virtual address, the wrong privilege), authentication fails
and the core takes an **authentication exception**. The OS may still manage
page tables freely. Any mapping it forges changes the tweak, and the data then
fails to authenticate.

This repository holds synthesizable SystemVerilog for the core-side half of that
scheme:

- the new control registers
- the logic that computes the tweak for every fetch, load and store
- L1 caches that remember the tweak of every line
- the memory port that carries the tweak to the MEE
- the exception logic

The MEE itself, the CPU pipeline, the MMU, DRAM and the security-monitor software
sit outside. Their signals are ports of `rvas_top`, and the testbenches stand in
for them with behavioural models.

```
            CSR instr.       prv       fetch vaddr/paddr/PTE     load/store vaddr/paddr/PTE
                |             |                 |                          |
           +----v----+        |         +-------v------+           +-------v------+
           | rvas_csr|--cfg---+-------->| tweak_gen    |           | tweak_gen    |<-- cfg, prv
           +---------+                  | (no override)|           | (override)   |
                                        +-------+------+           +-------+------+
                                          tweak |                          | tweak
                                        +-------v------+           +-------v------+
                                        | I-cache      |           | D-cache      |
                                        | tweak/line   |           | tweak/line,  |
                                        +-------+------+           | write-through|
                                                |                  +-------+------+
                                                +-----> mem_arbiter <------+
                                                            |
                                     request + 134-bit tweak | response + auth error
                                                            v
                                                   MEE (outside) -> DRAM
   auth errors from both caches ------> auth_exc_gen ------> trap logic (cause 24)
```

## The tweak

The full tweak is 192 bits. The core computes the lower 134. The upper 58 bits
are an integrity counter, which the MEE keeps per line for replay protection.
Software never sees the counter, and nothing in this design handles it.

| bits      | field   | meaning |
|-----------|---------|---------|
| 191..134  | counter | integrity counter, owned by the MEE |
| 133..92   | voffset | line-granular virtual offset (48-bit VA − 6 line bits = 42 bits) |
| 91        | MRange  | address lies in the machine-mode range |
| 90        | SRange  | address lies in the supervisor-mode range |
| 89        | URange  | address lies in the user-mode range |
| 88..87    | PRV     | privilege mode of the access (U=0, S=1, M=3) |
| 86..80    | PTE     | TS1, TS0, U, G, R, W, X of the leaf page-table entry |
| 79..0     | SID     | session identifier |

TS1 and TS0 are two tweak-select bits. They live in the software-reserved upper
bits of the PTE. The OS chooses them, but they only decide which session
registers feed the SID (see below). Because they are part of the tweak, setting
them wrong simply makes the data fail to authenticate.

Each field carries one kind of isolation:

- **PRV** separates privilege levels.
- **PTE** bits stop an OS from remapping a page with other permissions.
- **Range bits and voffset** bind data to the place where it was written inside
  an enclave's address range.
- **SID** separates enclave instances and shared-memory groups from each other.

The package parameter `VA_W` sets the voffset width. At `VA_W = 48` the cached
tweak is 134 bits. At `VA_W = 39` (Sv39) it is 125 bits, about 25 % of a
512-bit line.

## Ranges and the virtual offset (`range_selector`)

Each privilege level owns one range. Each range is a pair of registers, a base
and a mask. An address lies in the range when it equals the base on every bit
the mask sets. The comparison ignores the six line-offset bits.

- Bit 0 of the base register enables the range.
- A disabled range never matches.
- Every range is disabled after reset.

The three match results go into the tweak as a bitmap. Ranges may overlap, for
example a user range nested inside the machine range. When several match, the
rightmost bitmap bit wins: **URange over SRange over MRange**. The winning range
decides two things:

1. **voffset** is `(vaddr − base) >> 6`, the line index relative to the winning
   range's base. Two enclaves can therefore map a shared buffer at different
   virtual addresses. As long as each one's URange base points at the buffer,
   both compute the same tweak.
2. **Which session-identifier registers are used**: the xSID pair of the winning
   level.

When no range matches, voffset is the absolute line address `vaddr >> 6`.

## Session identifiers (`sid_select`)

Each privilege level has two 64-bit session registers, xSID0 and xSID1. The two
TS bits of the PTE pick which of them contribute:

| TS | SID[79:40]   | SID[39:0]    | typical use |
|----|--------------|--------------|-------------|
| 00 | 0            | 0            | no colour |
| 01 | xSID0[39:0]  | 0            | one enclave instance (instance id in MSID0) |
| 10 | 0            | xSID1[39:0]  | all instances of one enclave binary (enclave id in MSID1) |
| 11 | xSID0[39:0]  | xSID1[39:0]  | shared memory: an 80-bit secret split over USID0/USID1 |

Here x is the level of the winning range. With no matching range, both halves are
zero. Every access in machine mode uses SID = 0.

Fixing each register's contribution to one 40-bit half is this design's choice.
It means a single register is always truncated to 40 bits. The "both registers"
case yields exactly 80 bits.

## Page types

The tweak generator also labels each access with the page type the combination
represents. The label is a debug and verification aid; it does not gate anything.

| MRange SRange URange | PRV | PTE condition | TS | page type |
|---|---|---|---|---|
| any | M | R and W | any | monitor (checked first) |
| 0 0 0 | any | any | any | unprotected |
| 1 0 0 | U | any | 01 | regular enclave page |
| 1 0 0 | U | not W | 10 | shared (read-only) enclave page |
| 0 0 1 | U | not X | 11 | shared memory |
| other | | | | none of the above |

The monitor row and the unprotected row overlap for M-mode accesses outside all
ranges. In this design the monitor row wins.

The hardware does not refuse anything here. A "wrong" combination is still
encrypted under its own tweak and simply never matches data written any other
way. In particular, the rule that shared memory is never executable must be
enforced by the software that prepares those pages.

## Tweak override and the per-CPU key (`rvas_csr`, `tweak_gen`)

An enclave page has to be written once, by the security monitor, before the
enclave can use it. The monitor runs in M mode, but the page must carry the
tweak the enclave will later read it with (U mode, enclave PTE bits, enclave
SID). For this the monitor sets an **override**:

- While the core is in M mode and the load (or store) override is enabled, loads
  (or stores) use the 192-bit value of the load (or store) tweak register
  instead of the computed tweak.
- Only the low 134 bits are used. The counter bits cannot be overridden.
- The whole core-side tweak is replaced. To "disable" a field, the monitor
  writes zeros into it.
- Fetches are never overridden.

The monitor also uses the override to reach its own metadata pages under a
tweak that no lower mode can produce.

The per-CPU key is a fused 128-bit constant (parameter `CPU_KEY`). M mode can
read it and nothing can write it. The monitor uses it to decrypt enclave
binaries and to derive sealing keys.

CSR map. All registers are 64 bits wide. Addresses lie in the RISC-V custom
space, and bits [9:8] of an address give the lowest privilege that may access it:

| address | name | access |
|---|---|---|
| 0x800–0x803 | URANGE_BASE, URANGE_MASK, USID0, USID1 | U, S, M |
| 0x5C0–0x5C3 | SRANGE_BASE, SRANGE_MASK, SSID0, SSID1 | S, M |
| 0x7C0–0x7C3 | MRANGE_BASE, MRANGE_MASK, MSID0, MSID1 | M |
| 0x7C4 | MTWCTL: bit 0 load override, bit 1 store override | M |
| 0x7C5–0x7C7 | MLTWEAK0..2: load override tweak, bits 63:0, 127:64, 191:128 | M |
| 0x7C8–0x7CA | MSTWEAK0..2: store override tweak | M |
| 0xFC0–0xFC1 | MCPUKEY0..1: per-CPU key, low and high half | M, read-only |

An access from too low a privilege, or a write to the key, raises `csr_illegal`,
changes nothing and reads zero. The core should turn it into an
illegal-instruction trap. Writes take effect at the next clock edge, and reads
are combinational.

## Caching lines with their tweak (`tweak_l1_cache`)

Data in the cache is plaintext, so the cache has to enforce what the MEE enforces
for DRAM. If the cache answered a hit by address alone, any access to a cached
line would succeed regardless of its tweak. Each cache line therefore stores its
134-bit tweak next to the address tag. The hit logic compares both:

| tag | tweak | outcome |
|---|---|---|
| match | match | **hit**: answered from the cache in the cycle after acceptance |
| match | differs | **tweak miss**: the line is re-read through the MEE under the new tweak and refilled into the same way |
| no match | – | **miss**: line read, placed in the next way of a round-robin pointer |

A tweak miss is normally the sign of an attack or a bug. The re-read fails
authentication unless the new tweak really is the one the line was written with.
A failed read returns `auth_err` and never fills the cache. A line therefore
only ever holds data that authenticated under the tweak stored with it.

Stores are written through, as 64-bit words with byte enables, each carrying its
tweak. There is no write allocate.

- A store that hits updates the cached word once memory has accepted the write,
  so cache and DRAM never disagree.
- A store whose address matches a line held under a different tweak invalidates
  that line.

The cache handles one request at a time. On the memory side it issues one request
(a 64-byte line read or a word write) and waits for the response. The request
stays stable until `mem_req_ready`.

Defaults:

| cache | size | ways | sets | line | address tag | tweak per line | tweak storage |
|---|---|---|---|---|---|---|---|
| D-cache | 32 KB | 8 | 64 | 64 B | 44 b | 134 b | 68,608 b |
| I-cache | 16 KB | 4 | 64 | 64 B | 44 b | 134 b | 34,304 b |

The tweak storage cost is 134/512 = 26 % of the data array. A smaller
alternative is to deduplicate tweaks into a separate small "tweak cache" and
store only an index per line. It is not built here. Every line stores the full
tweak, which keeps the hit path a single wide comparison.

## Memory port and arbitration (`mem_arbiter`)

The two caches share one port towards the MEE. Client 0 is the I-cache and
client 1 the D-cache. One transaction is outstanding at a time. The grant
alternates when both request together, and the `ev_contention` output pulses
when that happens. The request struct carries the tweak next to address, data
and byte enables, where an AXI4 fabric would use its user signals. The response
carries the line and a single `auth_err` flag.

## Authentication exception (`auth_exc_gen`)

Either cache may report an authentication failure. The exception block then
presents `exc_valid` with:

- cause **24**
- the faulting virtual address in `exc_tval`
- the source (fetch, load or store)

It holds them until `exc_ack`. A data failure belongs to an older instruction
than the fetch in flight, so if both fail together the data exception is
presented first and the fetch exception waits. Each source keeps one pending
exception. An error reported in cycle t shows up in cycle t+1.

## Top level (`rvas_top`)

`rvas_top` instantiates the CSRs and two tweak generators: the fetch one without
override, the data one with it. It also holds both caches, the arbiter and the
exception block. Its ports are plain signals and structs:

- **CSR port**: `csr_valid`, `csr_we`, `csr_addr`, `csr_wdata` in;
  `csr_rdata`, `csr_hit`, `csr_illegal` out.
- **Fetch and data ports**: valid/ready requests carrying the virtual address,
  the physical address and the leaf PTE bits (both supplied by the MMU), plus
  write data and byte enables for stores. Each request gets one response with
  data and an `auth_err` flag. `if_page_type`, `d_page_type` and `d_ovr_used`
  describe the request currently presented.
- **Memory port**: `mem_req_t` and `mem_resp_t` from `servas_pkg`.
- **Events**: one-cycle pulses per cache (hit, miss, tweak miss, write-through,
  auth error) and `ev_contention`, for performance counters.

A single `prv` input gives the privilege of both fetch and data accesses.
A core with MPRV-style effective privilege for loads and stores would need to
feed the data generator separately.

## Departures from the published scheme and own choices

These points follow the published description:

- field set, widths and order of the tweak
- rightmost-range precedence
- line-granular voffset relative to the winning base
- 80-bit SID from two registers per level, chosen by two PTE bits
- override registers for loads and stores, the fused key
- inline tweak storage compared in the hit logic, write-through L1
- 64-byte lines, 32 KB data cache
- a new exception for failed authentication

Everything below is this design's own decision, or resolves a point where the
published description is ambiguous:

- **Range format.** Ranges are base+mask (what the register diagram shows). The
  prose describes a base and a *size*. A mask can only express naturally aligned,
  power-of-two regions.
- **Range enable** is bit 0 of the base register.
- **Tweak width bookkeeping.** The tweak diagram labels the counter's top edge
  as bit 192, but a 192-bit tweak ends at bit 191. Bits 191..0 are used.
- **SID split.** xSID0 fills the upper 40 bits and xSID1 the lower 40.
- **M-mode SID is zero.** This comes from the decision table. Because the range
  winner would otherwise pick MSIDx, M-mode accesses never reproduce an
  enclave's tweak without the override.
- **voffset outside every range** is the absolute line address.
- **Override semantics.** The override is active only in M mode, replaces the
  whole computed tweak, and never applies to fetches.
- **CSR addresses, MTWCTL layout, key width (128 bits), exception cause (24),
  physical-address width (56 bits).** The published description gives none of
  these.
- **Cache organisation.** Set associativity (8-way D, 4-way I), I-cache size,
  round-robin replacement, no write allocate, the tweak-miss refill and the
  blocking single-request interface are all this design's choices.
- **Priority between a data and a fetch exception.**
- **Not built:** the MEE, including its counters and integrity tree; the
  separate tweak cache; an encryption bypass for unprotected pages; and a
  write-back cache, which the published prototype also lacked.

## Verification

Each module has a self-checking testbench in `tb/`. Each one ends by printing
`TB_RESULT checks=N failures=M` and has a watchdog.

| testbench | what it checks |
|---|---|
| `tb_range_selector` | 20,000 random range sets, including nested ranges, against a reference model of bitmap, winner and voffset |
| `tb_sid_select` | every range winner × TS combination with random register values |
| `tb_tweak_gen` | field placement, zero SID in M mode, override only in M mode and only for the enabled direction, fetch instance never overridden, page-type labels, the 125-bit Sv39 width |
| `tb_rvas_csr` | every register from every privilege, read-only key, illegal accesses write nothing, reset values |
| `tb_tweak_l1_cache` | a small 1 KB 2-way instance against a shadow model: hits, misses, tweak misses, eviction, write-through merge, invalidation, auth errors, one-cycle hit latency |
| `tb_mem_arbiter` | random traffic from both clients, routing of responses, round-robin fairness, stall handling |
| `tb_auth_exc_gen` | random error streams, ordering, pending and acknowledge behaviour |
| `tb_rvas_top` | end-to-end at full default size (see below) |

`tb/mee_model.sv` stands in for the encryption engine. It stores each 64-byte
block together with the tweak it was last written under and a per-block write
counter. A read succeeds only if the tweak matches. A write to an existing block
must match as well, which models the engine's read-modify-write of a partial
line. A `poke_tamper` task corrupts a stored block, as a physical attacker
would. The model checks authentication semantics only. It does no cryptography
and no timing beyond a configurable latency and random stalls.

`tb_rvas_top` plays an enclave life cycle against the top with its default
parameters:

1. The monitor uses the store override to initialise private, code and
   shared-code pages.
2. The enclave runs from them.
3. A second instance, the OS, remapped pages, wrong PTE bits and tampered DRAM
   are all refused with authentication exceptions.
4. Two enclaves share memory through their user ranges at different virtual
   addresses, and a wrong shared secret fails.
5. A nested user range takes precedence over the machine range.

The testbench counts every mechanism it exercises and fails if any count stays
zero. These include each page type, override loads and stores, hits, misses and
tweak misses in both caches, each exception source, illegal CSR accesses and
memory contention.

### Running

With Verilator 5:

```sh
RTL="rtl/servas_pkg.sv rtl/range_selector.sv rtl/sid_select.sv rtl/tweak_gen.sv \
     rtl/rvas_csr.sv rtl/tweak_l1_cache.sv rtl/mem_arbiter.sv rtl/auth_exc_gen.sv rtl/rvas_top.sv"
for t in tb_range_selector tb_sid_select tb_tweak_gen tb_rvas_csr \
         tb_tweak_l1_cache tb_mem_arbiter tb_auth_exc_gen tb_rvas_top; do
  verilator --binary --timing -j 4 --Mdir obj_$t --top-module $t $RTL tb/mee_model.sv tb/$t.sv \
    && ./obj_$t/V$t | grep TB_RESULT
done
```

The package must come first. Everything builds without warning suppression, and
each run takes well under a second.

### Changing the design

- **Cache sizes and ways**: parameters of `rvas_top` (`DCACHE_BYTES`,
  `DCACHE_WAYS`, `ICACHE_BYTES`, `ICACHE_WAYS`). Sizes must give a power-of-two
  number of sets.
- **Virtual-address width**: `VA_W` in `servas_pkg`. All tweak widths derive
  from it through `tweak_w()`.
- **Physical-address width**: `PA_W` in `servas_pkg`.
- **Exception cause and CSR addresses**: constants in `servas_pkg`.
- **Fused key**: the `CPU_KEY` parameter.

The cache's tweak comparison is one 134-bit equality per way in the lookup cycle.
At high clock rates this is the path to watch. Splitting the comparison, or
adopting the tweak-cache index scheme, are the natural next steps.
