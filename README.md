# SEA cache: a randomised last-level cache with per-domain logical associativity

Contention attacks such as Prime+Probe work by building an *eviction set*: lines
that land in the same cache set as a victim's line. Randomised-remapping caches
make this hard by encrypting the set index with a keyed cipher and changing the
key from time to time (re-keying). Against modern profiling (Prime+Prune+Probe)
they must re-key very often, which costs every user of the cache performance.

The SEA (Skewed Elastic-Associativity) cache adds a second knob, **logical
associativity** `H`. A line may be placed in its encrypted *home set* or in any
of the `H-1` sets that follow it, in the same way. Together these `H` sets form
its *logical set*. A larger `H` means an eviction set of a given size covers a
smaller share of the places a victim line may be in. `H` is set **per security
domain**. Every request carries a 1-bit security domain identifier (SDID), and
each domain has its own `H`. Processes that want strong protection run with a
large `H` and pay for the wider search. Everyone else keeps `H = 1` and the
shortest latency. Out of reset the normal domain (SDID 0) has `H = 1` and the
high-protection domain (SDID 1) has `H = 16`.

This repository holds synthesizable SystemVerilog for the cache at its full
default size: 8 MB, 16 ways, 64-byte lines, 8192 sets, 46-bit physical addresses
and 8 tag banks. It also holds a self-checking testbench for every block.

## Address path

* The 40-bit line address (`addr[45:6]`) is encrypted with PRINCE, a 64-bit
  block cipher with a 128-bit key (`prince_core`). The low 13 bits of the
  ciphertext are the home set.
* The cache is **fully skewed**: every way has its own key, so a line has a
  different home set in each of the 16 ways. The per-way keys are derived from
  one 128-bit key (`sea_pkg::way_key`).
* Because the set index is encrypted, the tag must hold the whole 40-bit line
  address. A tag entry is 42 bits: `{valid, dirty, addr[39:0]}`.
* Re-keying follows the CEASER scheme. Each way has two ciphers, one with the
  current key and one with the next key, so `sea_index_unit` holds
  2 × 16 PRINCE instances. A remap pointer `sptr` sweeps the sets. If a line's
  current-key home set is below `sptr`, that set has already been remapped, and
  the next-key home set is used instead.
* PRINCE is pipelined over 3 cycles (stage breaks after rounds 4 and 7). A new
  address can enter every cycle.

## Logical sets and bank rounds

This is the part that sets SEA apart, and it sets the latency.

Sets are interleaved over `NUM_BANKS = 8` tag banks by their low index bits:
`bank = set mod 8`, `row = set / 8`. Each (way, bank) pair is a separate
`sea_tag_bank` of 1024 × 42 bits. Any 8 consecutive sets therefore fall in 8
different banks and can be read in one cycle. For a home set `h` and round `r`,
bank `b` serves this offset:

    k = ((b - h) mod 8) + 8 r        enabled if k < H,   set = (h + k) mod 8192

So a logical set of `H` sets takes `ceil(H / 8)` rounds, one cycle each. All 16
ways search in parallel, with different home sets. Logical sets that run past
set 8191 wrap around to set 0. `sea_bank_addr_gen` computes the per-bank
enables, rows, sets and offsets.

The three cases of an access:

| H | what happens | read-hit latency |
|---|---|---|
| 1 | home set goes straight to its bank (offset stage bypassed) | 7 cycles |
| 2 – 8 | one cycle adds the offsets (registered `sea_bank_addr_gen` output), then one round | 8 cycles |
| 9 – 16 | offset cycle, then 2 rounds | 9 cycles |
| 17 – 24 | offset cycle, then 3 rounds | 10 cycles |

Latency counts cycles from the clock edge that accepts the request to the one
that samples `resp_valid`. The design evaluates with a 43-cycle cache model:
43 cycles for `H = 1`, 44 for `H` up to the bank count, and one more for every
further multiple of 8. The RTL reproduces those increments exactly. Its own
base latency is shorter: 3 cycles of PRINCE, 1 tag round, 1 cycle of hit
resolution, 1 data read and 1 response register.

`sea_hit_collector` compares every tag that was read with the requested
address. It accumulates over the rounds and reports only after the last round,
when it is certain the line is nowhere else. The response carries the
**physical set and way** where the line was found. A line can be stored only
once, so a second match is a coherence error; `multi_hit` and an assertion in
`sea_cache` flag it.

Lookup timeline for a read hit with `H = 16` (cycle 0 is the accepting edge):

    0     request registered, PRINCE starts (all 16 ways, both keys)
    3     home sets ready; offsets for round 0 registered
    4     round 0 tag reads (8 banks x 16 ways)
    5     round 1 tag reads; round 0 compared
    6     round 1 compared, hit/miss known
    7     data array read
    8     response registered -> sampled at edge 9

## Misses and replacement

The replacement is random (`sea_victim_select`). It picks a random way, takes
that way's home set and adds a random offset `0 <= o < H`. Invalid lines get no
preference. A 32-bit LFSR supplies the random numbers, and the offset is
computed as `(rnd16 × H) >> 16`.

If the victim is dirty, it is first written back on `mem_wb_*`. For a read, the
line is then fetched on `mem_rd_*` and installed clean. A full-line write
(`OP_WRITE`, a writeback from the level above) allocates without fetching and
installs the line dirty. A write hit overwrites the line and sets its dirty bit.
The controller is blocking: it serves one request at a time.

## Re-keying

`sea_rekey_ctrl` counts accepted requests. The re-keying period is given as
accesses per full re-key: `RKP_MULT · N` with `N` = 131072 lines. One set is
remapped every `RKP_MULT · N / 8192 = RKP_MULT · 16` accesses (144 for 9N); the
step can be changed at run time.

A **remap step** for pointer `p` works as follows:

1. Read the physical sets `p … p + Hmax − 1` of every way, where `Hmax` is the
   largest `H` of the two domains. A line whose home set is `p` can only be in
   those sets.
2. Re-encrypt each stored line address under its way's current key.
3. Evict every valid line whose home set is `p`, writing it back if it is
   dirty. Lines that were installed under the next key are never evicted,
   because their current-key home set is already below the pointer.
4. Advance `sptr`. Later lookups for these lines use the next key and miss,
   then refill at the new location.

When `sptr` wraps around, every line has been remapped. The next key becomes
the current key, and a fresh key is taken from `key_i`; `key_take` pulses so
that the key source can supply another one. After reset the controller takes
two keys, first the current and then the next. The key source, for example a
TRNG, is outside this design.

This step evicts lines rather than moving them to their new sets: a simpler
choice with the same security effect. Lines are refetched on their next access.

## Changing H, privilege and flushing

`sea_la_config` holds `H` for both domains and the re-keying step. It is
written through the `cfg_*` port, and only when `cfg_priv` is set; other writes
are refused with a `cfg_err` pulse. Valid values are `H` in 1–32 and a non-zero
step.

* **Raising** `H` is always safe: lines placed with a smaller `H` stay inside
  the larger logical set. Nothing else happens.
* **Lowering** `H` could leave lines outside their new logical set, so it
  triggers a **full flush**. Every valid line is invalidated, and dirty lines
  are written back. No request is accepted until the flush is done.

Pages must not be shared between domains. A line looked up with a small `H`
would not find a copy placed with a larger `H`, and the cache would end up
holding two copies of it. The SDID therefore belongs to the page (a
user-defined bit of the page-table entry). The hypervisor duplicates a page
that is used in both domains (copy-on-write). None of this is hardware of the
cache: the SDID simply arrives with each request.

## Top-level interface (`sea_cache`)

| group | signals | protocol |
|---|---|---|
| request | `req_valid/ready`, `req_op` (`OP_READ`/`OP_WRITE`), `req_addr[45:0]`, `req_sdid`, `req_wdata[511:0]` | valid/ready; `req_ready` is low while a request, a remap step or a flush is in progress |
| response | `resp_valid`, `resp_hit`, `resp_set[12:0]`, `resp_way[3:0]`, `resp_rdata[511:0]` | one-cycle pulse, no back-pressure |
| memory read | `mem_rd_valid/ready`, `mem_rd_addr[39:0]`; `mem_rd_resp_valid`, `mem_rd_resp_data` | request valid/ready, response is a pulse |
| writeback | `mem_wb_valid/ready`, `mem_wb_addr[39:0]`, `mem_wb_data` | valid/ready |
| configuration | `cfg_valid`, `cfg_priv`, `cfg_addr` (`CFG_H_DOMAIN0/1`, `CFG_RKP_STEP`), `cfg_wdata[31:0]`, `cfg_err` | single-cycle write |
| keys | `key_i[127:0]`, `key_take` | `key_i` must change after each `key_take` |
| status | `sptr_o`, `remap_busy_o`, `flush_busy_o`, `epoch_end_o` | |

After reset the tag banks are cleared one row per cycle (1024 cycles), and
only then does `req_ready` rise.

Parameters: `INDEX_W` (13), `WAYS` (16), `NUM_BANKS` (8, a power of two),
`RKP_MULT` (9). The address, line and `H` widths are in `sea_pkg`.

## Files

| file | block |
|---|---|
| `rtl/sea_pkg.sv` | shared constants, tag entry struct, opcodes, config map, PRINCE constants, way-key derivation |
| `rtl/prince_core.sv` | PRINCE cipher, 3-stage pipeline |
| `rtl/sea_index_unit.sv` | per-way current/next-key home sets, remap-pointer select |
| `rtl/sea_bank_addr_gen.sv` | logical set → banks, rows, offsets per round |
| `rtl/sea_tag_bank.sv` | one way × one bank of tags |
| `rtl/sea_hit_collector.sv` | hit determination over rounds |
| `rtl/sea_victim_select.sv`, `rtl/sea_lfsr.sv` | random victim (way, offset) |
| `rtl/sea_rekey_ctrl.sv` | access counting, remap pointer, key rotation |
| `rtl/sea_la_config.sv` | per-domain `H`, privilege, flush request |
| `rtl/sea_data_array.sv` | 131072 × 512-bit data store |
| `rtl/sea_cache.sv` | top level and controller state machine |

At the defaults, the storage is 5,505,024 tag bits (672 kB) and 67,108,864 data
bits (8 MB).

## Simulation

Each `tb/tb_<module>.sv` is self-checking. It prints
`TB_RESULT checks=N failures=M` and has a watchdog. With Verilator 5:

    verilator --binary --timing --assert -Irtl -Itb rtl/sea_pkg.sv tb/tb_sea_cache.sv \
              --top-module tb_sea_cache -o sim && obj_dir/sim

* `tb_prince_core`: the five published PRINCE test vectors, back to back, and
  the 3-cycle latency.
* `tb_sea_index_unit`: home sets against an independent PRINCE reference
  model, for several keys and remap-pointer positions.
* `tb_sea_cache`: end to end at 64 sets × 4 ways. It runs random traffic
  against a reference memory, including:
  * latency for every `H` class;
  * raising and lowering `H`, with a check after the flush that memory holds
    every written line;
  * fast re-keying through 16 key epochs;
  * an unprivileged configuration write.

  It also checks that every response reports a set inside the line's logical
  set. Each mechanism is counted, and the test fails if one never happened.
* `tb_sea_prime_probe`: a small Prime+Probe attack on the 64-set, 4-way
  cache. The attacker is in the `H = 1` domain and profiles an eviction set
  by prime, prune and probe against a victim line. The victim's domain has
  `H = 1` in one run and `H = 8` in the other. The victim's accesses are
  detected clearly less often with `H = 8`, even though the attacker's
  eviction set is larger. With different random seeds, the `H = 1` attack
  detects 16–30 of 80 victim accesses and the `H = 8` attack 4–9.
* `tb_sea_cache_full`: the cache at its default size. It runs hits and misses
  in both domains, checks the 7- and 9-cycle latencies, and runs through one
  remap step. It takes about two minutes to build and run.

## Where this design departs from, or goes beyond, the source description

* Absolute latencies (7/8/9 cycles) are this implementation's. Only the
  increments per `H` class follow the described 43/44/45-cycle model.
* A remap step evicts lines instead of relocating them. The sweep over `Hmax`
  physical sets per step is this design's way to find the lines of one home
  set under logical associativity.
* The following are all this implementation's own choices:
  * full partitioning with derived per-way keys;
  * the key-source port;
  * wrap-around of logical sets;
  * the random-number generator and the scaling of the random offset to
    `0 … H−1`;
  * the blocking controller;
  * the handshakes and the configuration register map;
  * the tag clear after reset;
  * `HMAX = 32`.
* Not part of this RTL:
  * the processors;
  * the hypervisor's page duplication;
  * the source of random keys;
  * main memory (testbenches model it);
  * the attack and gem5 performance studies used to evaluate the scheme.
