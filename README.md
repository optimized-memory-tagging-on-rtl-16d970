# Memory tagging with tags kept in ECC bits: an RTL model

Arm's Memory Tagging Extension (MTE) gives every 16-byte granule of memory a 4-bit
*allocation tag* and every pointer a 4-bit *address tag* in bits 59:56 (the top byte is ignored
for addressing). An access whose two tags differ is a tag-check fault. In SYNC mode the access is
stopped and reported precisely. In ASYNC mode it completes and a sticky status bit (TFSR) is set.

Tags have to be stored somewhere, and the cost of storing them is what decides whether MTE
can stay switched on in a server. The memory system modelled here stores them **inside the
DRAM ECC bits** instead of in a carve-out of memory. Tags then cost no DRAM capacity and arrive
in the same read burst as their data. From the DRAM up to the load/store unit, a 64-byte line
and its four tags travel and are stored together, as one unit. This design calls that unit a
**bundle**: 512 data bits plus 16 tag bits. No level below the core ever sends a transaction
for tags alone, and no level below the core checks tags.

The RTL covers the memory side of a 192-core SoC:

```
 core ops ──► mte_lsu ──► L1 ──► L2 ─┐   (pe_tile, ×192)
              (tag check,            │
               store buffer)         ▼
                                   mesh (round robin, line-interleaved over channels)
                                     │
                ┌────────────────────┴──── ×8 channels ─────┐
                ▼                                           ▼
           SLC bank (tagged_cache) ──► mcu (4 × SECDED 128+4+9) ──► DRAM port (576 bits/line)
```

`rtl/mte_soc.sv` is the top. Everything is written in plain synthesizable SystemVerilog. The
shared types are in `rtl/mte_pkg.sv`.

## The bundle and how every level treats it

`mte_pkg` defines the request that every link carries, `mem_req_t`:

| field   | width | meaning                                             |
|---------|-------|-----------------------------------------------------|
| `op`    | 1     | `MEM_READ` or `MEM_WRITE`                           |
| `laddr` | 42    | line address (physical address bits 47:6)           |
| `data`  | 512   | line data                                           |
| `bmask` | 64    | byte enables of a write                             |
| `tags`  | 16    | four 4-bit tags, granule *g* in bits `4g+3:4g`      |
| `tmask` | 4     | tag enables of a write, one per granule             |

Responses (`mem_resp_t`) carry data, tags and an `err` bit, which signals an uncorrectable
memory error. Every link uses a valid/ready request handshake and returns exactly one
`resp_valid` pulse per request. This includes writes, so a sender always knows when its write
has landed.

Three kinds of write matter, because they decide what memory must do:

| write                                   | masks                        | at the memory controller |
|-----------------------------------------|------------------------------|--------------------------|
| full bundle (eviction of a cached line) | all bytes, all tags          | 1 DRAM write             |
| data-only (bytes, no tags)              | `tmask == 0`                 | read-modify-write        |
| tag-only (tag store, no data)           | `bmask == 0`                 | read-modify-write        |
| read                                    | –                            | 1 DRAM read              |

Data and tags share one codeword, so writing either half alone means reading the other half
first. This read-modify-write is the price of co-location, and the model counts it (`ev_rmw`).

## Load/store unit: where tags are checked

`mte_lsu` sits between a core and its L1. It accepts 8-byte loads, 8-byte stores and tag stores
(like Arm's STG, which writes one granule's allocation tag) in program order. `tcf` selects the
check mode for each core: none, SYNC or ASYNC.

**Loads.** The tag is checked at the L1 lookup, with the allocation tag that comes back with the
line. No separate tag access or extra stage is needed. `tag_check` takes the granule from
pointer bits 5:4, compares the tags and produces `sync_fault` or `async_flag`. A SYNC-failed
load returns `ld_fault` and zero data. An ASYNC mismatch returns the data and sets `tfsr` until
`tfsr_clr`.

**Stores and the early line fetch.** A store cannot commit until its line's tag has been checked,
and waiting for that at the head of the store buffer would stall every store. So, as soon as a
store with checking on enters the buffer, the LSU reads the store's line from L1 and records the
check result in the entry. This is the "early line fetch", and the read also allocates the line
with its tags. When the store reaches the head, it either drains or, if it failed in SYNC mode,
is dropped and reported on `st_fault_valid`/`st_fault_va`. Tag stores are not checked. At the
head they issue a tag-only write of their granule.

**Override from an older tag store.** The early fetch can run while an older tag store to the
same granule is still waiting in the buffer. The tag in L1 is then stale. The buffer therefore
hands the checker the tag of the youngest older pending tag store to that granule
(`chk_ovr_valid`/`chk_ovr_tag`), and that tag replaces the fetched one (`ev_tag_override`).

**Store-to-load forwarding** (`store_buffer`). Each entry stores the pointer's address tag. A
load may take data from the youngest older store to the same 8-byte word only if:

1. the two address tags are equal. If the store later fails its check, the load would have
   failed too, and the store's fault is the one that is reported.
2. no tag store to the same granule is pending. Forwarding across a tag store could hand a
   load data whose tag is about to change.

A refused load waits until the conflicting entries have drained, then reads L1. The events are
`ev_fwd`, `ev_fwd_tag_block` and `ev_fwd_stg_block`. When checking is off, forwarding ignores
tags.

A load forwarded from a store that later fails SYNC still returns the store's data. In a full
core, the store's precise fault flushes that younger load. This model has no pipeline to flush,
so the testbenches accept such a load when the store's fault is reported.

**One L1 port.** Loads, early fetches and drains share the port with the priority
load > early fetch > drain. A drain waits until its entry has been checked.

Timing, measured by the testbenches:

- A forwarded load answers one cycle after acceptance.
- An L1 hit answers five cycles after the load is presented: acceptance, the L1 request, the
  two-cycle lookup, and the response register.

## Caches (`tagged_cache`)

One module serves as L1, L2 and each SLC bank. It is direct mapped, write back and blocking, with
one request in flight. Each line holds a valid bit, a dirty bit, the address tag of the cache
(not to be confused with MTE tags), 512 data bits and 16 MTE tag bits. A hit answers two cycles
after acceptance.

Write misses are handled so that no half of a bundle is ever invented:

- **Full bundle:** allocated without a fill.
- **Data-only full line, or tag-only:** passed down unallocated (*write around*). The level that
  finally owns the bundle, memory if nobody caches it, merges it.
- **Any other partial write:** the line is filled first, then merged.

A dirty victim always leaves as a full bundle. A fill that comes back with `err` is passed up
and not allocated. Events per level: `hit`, `miss`, `evict`, `around`.

A tag store to a line that no cache holds therefore travels around L1, L2 and the SLC and
becomes a read-modify-write at the controller. The end-to-end test makes this happen.

## Mesh (`mesh`)

The mesh is a switch that carries bundles unchanged. It has NREQ tile ports and NBANK
SLC/memory-channel ports. The channel is chosen by the low `log2(NBANK)` bits of the line
address, and the bank sees the remaining bits as its own dense address. As a result, the top
bits of each bank address are always zero.

Arbitration is round robin, with a two-pass scan starting after the last grant. One transaction
is in flight in the whole mesh, and the response is broadcast on one shared bus with a
per-tile valid. The mesh has **no coherence protocol**: the private L1/L2s are not kept
coherent, so software (here, the testbenches) must give each core its own lines.

## Memory controller and the 128+4+9 code (`mcu`, `secded_codec`)

The usual DDR ECC protects every 64 data bits with 8 check bits (72 bits). That leaves nothing
spare for tags. Protecting 128 data bits at once needs only 9 bits for single-error correction
and double-error detection (SECDED). The 16 bits of two 64+8 words therefore hold 9 check bits
plus room for the granule's 4-bit tag. One codeword is:

```
 141-bit codeword = 128 data bits (one granule) + 4 tag bits + 9 check bits
 line in DRAM     = 4 codewords = 564 bits, inside the 576-bit (72-byte) burst of an ECC DIMM
```

The code is an extended Hamming code:

- The 132 payload bits (data in bits 127:0, tag in bits 131:128) occupy positions 3..140 of a
  140-position Hamming word, skipping powers of two.
- Check bit *i* sits at position 2^i, for positions 1, 2, 4, …, 128.
- Codeword bit 0 is the overall parity.

To decode, compute the syndrome and the overall parity:

- odd parity: a single error at the syndrome position, corrected (`dec_ce`);
- even parity with a non-zero syndrome: a double error (`dec_ue`).

The all-zero word is a valid codeword, so a DRAM that powers up zeroed reads as data 0 with all
tags 0.

The controller runs four codecs in parallel, one per granule. It has a small FSM with the
states idle, read, decode, merge and write:

- read: one DRAM read, decode, correct, return data and tags;
- full bundle write: encode, one DRAM write;
- partial write: read, decode, merge under the byte and tag masks, re-encode, write.

If the read half of a read-modify-write finds an uncorrectable error, the write is cancelled and
the request is answered with `err`. A poisoned line is never re-encoded as good. The 12 spare
bits of the burst are written as zero and ignored on reads. The controller performs no tag
checks.

## Parameters

| parameter         | default | where it comes from                                        |
|-------------------|---------|------------------------------------------------------------|
| `NCORES`          | 192     | the SoC's largest core count                               |
| `NMCU`            | 8       | one channel per DIMM of the evaluated 8 × 64 GB system (assumed) |
| `SB_DEPTH`        | 16      | assumed                                                    |
| `L1_SETS`         | 64      | assumed (64 lines = 4 KB data)                             |
| `L2_SETS`         | 256     | assumed                                                    |
| `SLC_SETS`        | 1024    | assumed, per bank                                          |
| `DRAM_W`          | 576     | 72-byte ECC burst per line (assumed)                       |
| SECDED `K`/`R`    | 132 / 8 | 128 + 4 payload bits, 9 check bits including parity       |
| granule, tag, line | 16 B, 4 b, 64 B | MTE architecture                                  |

The real caches are much larger and set associative. The small direct-mapped defaults keep the
model simple and are not sizes from the design.

## What follows the original design and what does not

The model follows these points of the design:

- tags co-located with data at every level, with no separate tag storage;
- tags stored in DRAM ECC bits with the 128+4+9 SECDED scheme, four codewords per line;
- read-modify-write for data-only and tag-only writes;
- no tag checks in the mesh, SLC or memory controller;
- tag checks at the L1 lookup point;
- early line fetch for tagged stores;
- forwarding only on equal address tags, and never across a pending tag store;
- SYNC and ASYNC modes;
- 192 cores.

These are this design's own choices or simplifications:

- The **core pipeline is absent.** Operations enter at the LSU in program order, one at a time,
  with top-byte-ignore and no address translation.
- The **cache organisation** (direct mapped, blocking, the sizes above) and the write-miss
  policy are this design's own.
- The **mesh is one round-robin switch without coherence.** The real interconnect's topology
  and protocol are not modelled.
- **Only the SECDED scheme is built.** The production systems use a proprietary Reed-Solomon
  symbol code with two parity bits lent to tags. Its construction is not public, so it is not
  modelled. The non-MTE baseline schemes (64+8 and symbol code 64+16) are not part of this
  design.
- The **ECC that protects tag bits in cache arrays** is not modelled.
- The tag check does not model **match-all tags or untagged pages**.
- The **DRAM** is outside the chip. The top brings out one request/response port per channel,
  and the testbenches use a behavioural model.

None of the benchmark programs used to evaluate the real chip (memcached, Redis, nginx, MySQL,
PostgreSQL, vbench, SPEC CPU 2017 rate) can run on this model, because it executes no
instructions. Its 192 tiles match the core counts those runs used, for example 172 memcached
instances plus 20 interrupt cores, or 192 SPEC copies.

## Verification

Each testbench is self-checking and prints `TB_RESULT checks=N failures=M`. Each has a watchdog
and uses `$urandom` with an independent reference model.

| testbench            | covers |
|----------------------|--------|
| `tb_tag_check`       | the pointer/tag example of the MTE architecture, plus random pointers and line tags in all modes |
| `tb_secded_codec`    | encode/decode round trip, every single-bit flip corrected, random double flips detected |
| `tb_tagged_cache`    | hit latency, downstream traffic of each miss case, random traffic against a reference memory |
| `tb_mcu`             | DRAM transaction count of each request type, codeword layout, injected single and double errors, RMW cancellation |
| `tb_mesh`            | round-robin order, data and tag integrity, channel interleaving |
| `tb_store_buffer`    | forwarding rules, override tag, check/drain order, against a reference queue |
| `tb_mte_lsu`         | load checks in every mode, forwarding and both refusals, early fetch, override, SYNC store fault, random programs |
| `tb_pe_tile`         | LSU + L1 + L2: misses, hits, dirty bundle evictions (tags survive), random programs |
| `tb_mte_soc`         | 4 cores, 2 channels, small caches: every mechanism below at least once, parallel random programs on all cores |
| `tb_mte_soc_full`    | the top at its default parameters (192 cores, 8 channels); four cores spread over the mesh run programs whose lines collide in L1, L2 and SLC |

The two end-to-end tests count every mechanism and fail if any count stays zero:

- forwarding, both forwarding refusals, early fetch and tag override;
- SYNC load and store faults, and the ASYNC flag;
- hit, miss, eviction and write-around at L1, L2 and SLC;
- read-modify-write at the controller;
- a corrected single-bit and an uncorrectable double-bit DRAM error;
- mesh transfers.

The behavioural models in `tb/` are `line_mem_model` (a line-bundle memory) and `dram_model`
(576-bit DRAM with fault injection).

To run a test with Verilator, list the package first:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb rtl/mte_pkg.sv tb/tb_mte_soc.sv \
          --top-module tb_mte_soc -o sim
./obj_dir/sim
```

Some figures for the full-size test:

- It builds about 200 C++ files, which takes about 5 minutes on one core.
- It then simulates in under a minute.
- Verilator's `-Wall` lint of the 192-core top takes about 10 seconds.

### Lint notes

The remaining Verilator `-Wall` warnings are intentional. Each module's header explains its
own:

- unused diagnostic outputs of `tag_check` inside the LSU;
- the 12 spare DRAM bits;
- address bits that a narrower consumer ignores;
- `rst_n` used synchronously by assertions while the flops reset asynchronously.
