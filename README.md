# SPOILER-GUARD: a randomized partial-address check for the store buffer

## The problem and the idea

An out-of-order core lets a load run ahead of older stores whose addresses are
not yet fully known. To decide quickly whether a load might read what an older
store writes, the load/store queue compares only a few address bits: first the
12-bit page offset (the "loosenet" check), then a handful of physical-address
bits above it. On the Intel cores attacked by SPOILER that second check looks at
a fixed 8-bit slice, PA[19:12]. Two addresses that agree in their low 20 bits
(they alias modulo 1 MB) therefore look dependent even when they are not. The
load is held or forwarded wrongly, then squashed and re-issued, again and again.
An unprivileged program can time this and learn which of its virtual pages share
physical-address bits 12..19, which speeds up Rowhammer and cache eviction-set
construction.

SPOILER-GUARD keeps the cheap partial compare and makes it unpredictable:

* the compared slice is 12 bits wide, and the bits are picked at random from the
  physical page number by a **mask**;
* the mask is drawn once at start-up and **drawn again after every
  misspeculation**, so an attacker cannot build up a repeatable aliasing pattern;
* every store-buffer entry carries the **PC of the load** that speculated on it
  and a **vulnerability flag** that is set when that speculation turned out wrong.
  While such a flagged store is in the buffer, loads from that PC do not
  speculate on partial matches at all. So one bad guess cannot be replayed into
  a visible chain of squashes.

The RTL here is that slice of a load/store queue: the enhanced store address
buffer, the dependency decision, the mask generator and its controller. The rest
of the core is outside it: the load queue, the store data, the cache and the
pipeline flush. The testbenches model those parts.

## What a load goes through

Each cycle one load can be presented with its PC, virtual and physical address,
byte mask and `sq_ptr`. `sq_ptr` is the store-buffer tail at the time the load was
dispatched. The stores older than the load are the ones between the buffer head
and `sq_ptr`. `sg_dep_predictor` answers in the same cycle, and `spoiler_guard`
registers the answer, so it appears one cycle later on `ld_resp_*`.

1. **Loosenet.** Collect the older stores whose address is known, whose page
   offset matches (`va[11:3]`, i.e. the same 8-byte granule) and whose byte masks
   overlap the load's. Drop any store whose full physical address is already known
   to differ, unless that store still carries an unchecked speculation for this
   very load PC. If nothing is left, the answer is **EXECUTE**: the load reads the
   cache. Otherwise only the youngest remaining store is examined.
2. **Finenet.** If the full virtual addresses match, it is a true dependency:
   **FORWARD** (kind `FINENET`). The core either forwards the store data or blocks
   the load until the data is there.
3. **Full physical address known.** If the full PAs match, it is a true
   dependency through a synonym: **FORWARD** (kind `FULLPA`). If they differ, the
   only way the store survived step 1 is an earlier speculative forward to this
   load PC. That was a misspeculation, so the answer is **SQUASH**. In the same
   clock edge the store's vulnerability flag is set, its "speculation pending" bit
   is cleared, and a new mask is requested.
4. **Full physical address not yet known.** If any buffer entry is flagged with
   this load's PC, the load does not gamble: **REDISPATCH** (try again later).
   Otherwise the masked 12-bit partial addresses are compared. On a match the
   answer is **FORWARD** (kind `PARTIAL`, speculative), and the store is tagged with
   the load's PC. On no match the answer is **REDISPATCH**.

A redispatched or squashed load comes back through step 1. A load forwarded
speculatively has to be presented again once its store's full PA is known; that
is the verification pass. It ends in either FORWARD/`FULLPA` or SQUASH.

The skip rule in step 1 resolves a loop in the published flow chart. Read
literally, a load whose store turns out unrelated would be redispatched forever.
Skipping proven-unrelated stores lets it move on to the next older candidate or
execute.

Because a store entry holds only the 12 gathered bits, a remask does not rewrite
the entries already in the buffer. A store written under the old mask is compared
with the load's bits gathered under the new one. That only makes the guess
noisier. Correctness always rests on the full-address check in step 3.

## Where the 12 bits come from

`sg_pa_extract` gathers the bits of PA[38:12] whose mask bit is set, lowest first,
into a 12-bit field, like a parallel bit-extract instruction. Stores are gathered
when their address is written, and loads at lookup, both with the mask active
in that cycle.

`sg_mask_gen` builds a mask one bit per cycle. It scales a 16-bit slice of a
random word to an index in 0..26. If that bit is taken already, it takes the next
free bit upward, wrapping round. A run therefore always takes exactly 12 cycles
and always leaves exactly 12 ones (an assertion checks this). The probing slightly
favours bits that follow an already-chosen one. That is the price of a fixed
latency.

`sg_remask_ctrl` runs the generator once after reset. It raises `mask_ready` 14
cycles after reset is released, and loads must wait for it. Later, each
misspeculation starts a new run. The finished mask replaces the old one in a
single cycle, 13 cycles after the request edge. Lookups in between keep using the
old mask. A request that arrives during a run is remembered and starts the next
run immediately.

The random words come from `sg_prng`, a 64-bit xorshift that a true random source
seeds through `seed_valid`/`seed`. Xorshift is statistically fine here, but it is
**not** the cryptographically secure generator the published design calls for.
Replace `sg_prng` before trusting the unit against an attacker who can observe
many masks.

## The enhanced store address buffer

`sg_sab` is a 56-entry circular buffer in program order. Its pointers carry a
wrap bit, so a full buffer and an empty one can be told apart. One entry
(`sg_pkg::sab_entry_t`) holds:

| field | bits | origin |
|---|---|---|
| valid, addr_valid | 2 | ordinary store buffer |
| va | 48 | ordinary |
| bmask | 8 | ordinary |
| pa, pa_resolved | 39 + 1 | ordinary (full address, arrives later) |
| partial_pa | 12 | widened from 8: +4 bits |
| pc_tag | 48 | added |
| vuln | 1 | added |
| spec_fwd | 1 | added in this RTL (marks `pc_tag` as live) |

The published design adds 4 + 48 + 1 = 53 bits per entry, which is 2968 bits for
56 entries. This RTL adds 54, because it uses an extra bit to tell a live PC tag
from a stale one.

Ports: `alloc` (takes the tail) and `commit` (frees the head) keep the order.
`addr_wr` writes a store's address and partial PA and clears its speculation
state. `resolve` delivers the full PA. `tag_wr` and `vuln_wr` are driven by the
predictor. All writes happen on the clock edge, and lookups see them from the
next cycle.

## The unit's interface and timing (`spoiler_guard`)

| group | signals | meaning |
|---|---|---|
| entropy | `seed_valid`, `seed[63:0]` | reseed the PRNG |
| store side | `st_alloc` → `st_alloc_ptr`; `st_addr_wr`, `st_addr_idx`, `st_addr_va`, `st_addr_pa`, `st_addr_bmask`; `st_resolve`, `st_res_idx`, `st_res_pa`; `st_commit`; `sab_full`, `sab_empty`, `sab_count` | allocation, address generation, full-PA resolution, retirement |
| load side | `ld_ready`, `ld_valid`, `ld` (`load_req_t`) | one lookup per cycle once `ld_ready` |
| answer (+1 cycle) | `ld_resp_valid`, `ld_resp_action`, `ld_resp_kind`, `ld_resp_idx`, `ld_resp_pc`, `squash` | decision, forward kind, store entry |
| status | `active_mask`, `remask_busy`, `remask_count`, `spec_fwd_count`, `squash_count`, `redispatch_count` | 32-bit wrapping event counters |

A store may be allocated and have its address written in the same cycle. It
stores the `st_alloc_ptr` it received, and loads dispatched after it carry the
new tail. Reset is asynchronous and active low.

`ld_resp_action` uses the `sg_pkg::ld_action_e` enum: EXECUTE, FORWARD,
REDISPATCH or SQUASH. `ld_resp_kind` uses `sg_pkg::fwd_kind_e`: NONE, FINENET,
FULLPA or PARTIAL.

## Sizes and what was assumed

Taken from the published design:

* 56 store-buffer entries;
* a 12-bit partial field, up from 8;
* a 48-bit PC tag and a 1-bit vulnerability flag;
* the initial mask at start-up, and a new mask plus flag plus squash on every
  misspeculation;
* the decision order loosenet → finenet → full PA / partial PA.

Chosen here, because the published design does not say:

* 48-bit virtual and 39-bit physical addresses, with the mask pool being PA[38:12];
* the loosenet and finenet definitions in step 1 and 2;
* examining only the youngest candidate;
* the skip rule;
* treating "flag set for this PC anywhere in the buffer" as the way the flag stops
  repeats;
* the bit-per-cycle mask generator and the queued remask request;
* xorshift in place of a secure PRNG;
* the extra `spec_fwd` bit;
* the one-cycle registered answer.

The whole unit synthesizes to roughly 9.3k flip-flops, almost all of them in the
buffer. The wide part of the logic is the 56-way loosenet/age search and the
56-way flagged-PC search.

## Testbenches and how to run them

Each module has a self-checking testbench in `tb/`. Each one ends with a
`TB_RESULT checks=N failures=M` line.

* `tb_sg_prng`: checks against a software xorshift.
* `tb_sg_pa_extract`: checks against a reference bit-gather.
* `tb_sg_mask_gen`: checks exact masks, popcount and the 12-cycle run.
* `tb_sg_remask_ctrl`: checks start-up latency, the 13-cycle install, the old
  mask held meanwhile, and the queued request.
* `tb_sg_sab`: checks every entry and pointer against a shadow copy under random
  traffic that fills the buffer.
* `tb_sg_dep_predictor`: runs random buffer contents against a reference that
  scans from the youngest store down, and requires every branch of the decision
  to be taken.
* `tb_spoiler_guard`: the unit at full size. It runs a random program with
  1 MB-alias and synonym pages, plus loads crafted to agree with an unresolved
  store on exactly the currently masked bits. Every answer and every counter is
  checked against a reference model. The run fails if any mechanism never
  happens: execute, the three forward kinds, both redispatch kinds, squash,
  remask and a full buffer.
* `tb_spoiler_attack`: the SPOILER timing experiment. An attacker buffer spans
  1024 pages with random frames, including 1 MB aliases of the probe's frame. For
  each page and each of 100 rounds, the store buffer is filled with stores at the
  probe's page offset, then the probe load is timed. It checks that
  misspeculations stay under 1 % of probes and that aliased pages show no latency
  peak. In the reference run the probe took 13.0 cycles on both aliased and other
  pages, and no speculative forward happened. That cost is the 4 KB-aliasing
  wait for the youngest store's full address.

To run one with Verilator 5, from the folder that holds `rtl/` and `tb/`:

    verilator --binary --timing --assert --timescale 1ns/1ps -Wno-fatal \
        -Irtl -y rtl -y tb rtl/sg_pkg.sv tb/tb_spoiler_guard.sv \
        --top-module tb_spoiler_guard -o sim
    ./obj_dir/sim

The slowest testbench, `tb_spoiler_attack`, takes under a minute. The design
has no parameters at the top; the sizes live in `rtl/sg_pkg.sv`. Lower-level
modules take `ENTRIES`, `POOL_BITS` and `SEL_BITS` parameters whose defaults are
those package values.

## Limits

* This is the decision logic only. Store data forwarding, load blocking, the load
  queue and the pipeline flush belong to the surrounding core. A load that gets
  REDISPATCH or SQUASH must be presented again by that core, and so must a load
  forwarded on a partial match, once its store's full address is known.
* No store-buffer rollback after a squash is modelled. A core that also discards
  younger stores must add a tail-restore port to `sg_sab`.
* The random source is not cryptographically strong (see above).
* The performance figures of the original evaluation (SPEC CPU2017 speed-ups,
  misspeculation rates in a full-system simulator) need a whole core and cannot
  be reproduced from this unit.
