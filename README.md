# Secure Scattered Memory (SSM) engine in SystemVerilog

Secure enclaves usually protect off-chip memory in three ways. They encrypt each line. They keep a
version counter per line, so an old copy cannot be replayed. They keep a MAC and an integrity
tree over those counters. The tree causes most of the cost: a counter verification can take
tens of extra DRAM accesses when the protected memory is large.

SSM drops all of that metadata. It turns a 64-byte line into points on a polynomial
(secret-sharing style) and scatters the points over memory:

* **Confidentiality.** An attacker cannot tell which of the many stored points belong together.
* **Integrity.** Two coefficients of the polynomial have values that only the chip knows.
* **Freshness.** Every write moves the points to new addresses. Stale copies are simply never
  read again.

This repository has the memory-controller side of that scheme as synthesizable RTL:
- the finite-field datapath (encoder and decoder);
- address mapping;
- the SSM TLB and the shares cache;
- the relocation allocator;
- a top-level engine that serves line reads and writes against a DRAM port.

Each module has a self-checking testbench. There is also an end-to-end testbench with a
behavioural DRAM that also acts as the attacker.

## 1. From a line to a polynomial

All arithmetic is in GF(2^64): addition is XOR, and multiplication is carry-less with
reduction modulo x^64 + x^4 + x^3 + x + 1. A 64-byte line `D` becomes ten coefficients of a
degree-9 polynomial `f(x) = c0 + c1 x + ... + c9 x^9`:

| coefficient | content |
|---|---|
| c0 .. c7 | the eight 64-bit words of the line, `c0 = D[63:0]` |
| c8 | zero (the "padding" coefficient) |
| c9 | check value `seed * (2*line_addr + 1)` in GF(2^64) |

`seed` is one of 16 on-chip 64-bit coefficient seeds, chosen by the low four bits of the line's
group number (see section 2). The seeds are written through the `seed_wr_*` port and never leave
the chip. The odd multiplier `2*line_addr+1` ties the check value to the address. A correct
polynomial moved to another address therefore still fails the check.

**Shares.** The encoder evaluates `f` at ten distinct non-zero 8-bit points `x_i` and emits ten
shares `(x_i, f(x_i))`. Each share is 8 + 64 = 72 bits (9 bytes). The first point comes from a
free-running xorshift64 generator. The other nine follow by stepping a maximal-length 8-bit LFSR,
so the ten points can never collide. The point `x = 0` is never used, because `f(0) = c0` is
plain data.

**Back to the line.** Any ten shares with distinct x give back the unique degree-9 polynomial
through them, by Lagrange interpolation. The decoder checks two things on the result:
- `c8 == 0`;
- `c9 ==` the expected check value.

If any share was altered, swapped with a share of another line, or taken from a stale location,
the interpolated polynomial differs. The check then fails except with negligible probability,
and the engine returns zeros with `rsp_integrity_err` set.

## 2. Where the shares live: groups, blocks and slots

A 72-bit share fits seven times into a 64-byte memory line. Such a line is called a share
block. Slot `s` is at bits `[72*s +: 72]`, and bits `[511:504]` are unused.

**Groups.** Eight share blocks form a group, so each access moves K = 56 shares. Four
consecutive data lines share one group:
- the line address splits into `group = addr[26:2]` and `offset = addr[1:0]`;
- share `m` (0..9) of the line at offset `o` goes to linear slot `L = 10*o + m`, which is block
  `L % 8`, slot `L / 8`;
- the four lines use 40 of the 56 slots;
- the other 16 slots hold fresh random filler on every write, so used slots cannot be told
  apart from unused ones.

As a result, consecutive lines start on rotated blocks (0, 2, 4, 6), and every block holds
shares of several lines. This is what makes the shares cache work for sequential accesses: one
fetch of a group serves four data lines. `ssm_pkg::share_pos` is the single definition of this
placement and is used by both the read side and the write side.

**Page table.** The eight physical block addresses (29-bit, so 32 GB of DRAM) of each group are
in an SSM page table in DRAM. Group `g` has a single 64-byte entry at `PT_BASE + g`, holding
block `b` in bits `[32*b +: 29]`. System software has to initialise the table before use. The
test DRAM model does this implicitly: group `g`, block `b` → `8*g + b`.

## 3. The engine: read and write flows (`ssm_top`)

The engine handles one request at a time. Its FSM steps through these phases:

**Translate.**
1. The SSM TLB is looked up with the group number.
2. On a miss, a page walk reads the group's page-table line from DRAM and fills the TLB.

**Fetch.** The eight share blocks are looked up in the shares cache one after another. Each
miss is read from DRAM, which has one read outstanding, and is filled into the cache.

**Read.**
1. The data processing unit extracts the ten shares of the requested line from the eight
   blocks.
2. It interpolates and checks the result.
3. The response carries the 64-byte line, or zeros plus `rsp_integrity_err`.

**Write.** The group is fetched first, because the other three lines' shares must move with it.
Then:
1. **Encode.** The new line is encoded with fresh random points.
2. **Merge.** Its ten slots are overwritten. The 16 filler slots are refilled with random
   values, and the other lines' shares are copied unchanged.
3. **Relocate.** Eight new block addresses are taken from the free pool, and the eight old ones
   are returned to it.
4. **Store.** The blocks are written to DRAM at the new addresses and also written into the
   shares cache (write-through, write-allocate).
5. **Remap.** The new page-table entry is written to DRAM and into the TLB.
6. A completion pulse is sent on `rsp_valid`.

**Replay protection.** Relocation is what defends against replay. An attacker who saves a
group's blocks and writes them back later writes them to addresses the page table no longer
names, so the engine never reads them. The end-to-end testbench performs exactly this attack,
plus a single-share tamper attack, and checks the outcomes.

**Interfaces** (all synchronous to `clk`, active-low asynchronous `rst_n`):

| group | signals | protocol |
|---|---|---|
| request | `req_valid`, `req_ready`, `req_we`, `req_line_addr[26:0]`, `req_wdata[511:0]` | taken when valid and ready are both high; `req_ready` is high only when idle |
| response | `rsp_valid`, `rsp_rdata[511:0]`, `rsp_integrity_err` | one-cycle pulse; also sent as write completion |
| DRAM | `mem_req_valid/ready/we/addr[28:0]/wdata`, `mem_rsp_valid`, `mem_rsp_rdata` | request held until ready; read data returns as a pulse |
| seeds | `seed_wr_en`, `seed_wr_idx[3:0]`, `seed_wr_seed[63:0]` | one write per cycle |
| events | `events` (`ssm_events_t`) | one-cycle pulses: TLB hit/miss, cache hit/miss/evict, relocation, integrity failure |

**Latency.** A read that hits both the TLB and the cache takes 1024 cycles from request to
response:

| part | cycles |
|---|---|
| TLB | 1 |
| eight cache lookups | 16 |
| decoder start | 1 |
| interpolation | 1005 |
| response | 1 |

Interpolation dominates. A write adds 90 cycles of encoding plus the DRAM writes.

## 4. The finite-field datapath (`ssm_dpu`)

The data processing unit has four parts:

**Coefficient generator** (`coefficient_generator`, combinational). Splits the line into c0..c7,
sets c8 = 0 and computes c9 with one GF multiplier.

**Polynomial evaluator** (`polynomial_evaluator`). Uses Horner's rule with a single GF
multiplier, one step per cycle: 10 points × 9 steps, with `done` 90 cycles after `start`.

**Lagrange interpolator** (`lagrange_interpolator`). This is the hardest block. It produces
coefficients rather than a single value at x = 0, so it computes all ten coefficients of the
polynomial through ten points. It shares one multiplier and one inverter across these steps:
1. Build the master polynomial `M(x) = Π (x - x_j)` (65 cycles).
2. For each point `i` (94 cycles each):
   - synthetic division `M(x)/(x - x_i)`, 9 cycles;
   - the denominator `Π_{j≠i} (x_i - x_j)`, 10 cycles;
   - its inverse, 63 cycles plus one cycle of handover;
   - the weight `y_i / denominator`, 1 cycle;
   - accumulating `weight * quotient` into the result, 10 cycles.

In total `done` comes 65 + 10·94 = 1005 cycles after `start`. The inverter (`gf64_inv`) uses
Fermat's rule, `a^-1 = a^(2^64-2)`, with 62 square-and-multiply steps and a final squaring. It
uses two chained multipliers and takes 63 cycles.

**Reconstructor** (`reconstructor`, combinational). Picks the line's ten shares out of the 56
fetched, and turns the interpolated coefficients into the line and the pass/fail verdict.

The GF multiplier (`gf64_mul`) is one combinational shift-and-XOR 64×64 product with reduction.
The same function (`ssm_pkg::gf_mul`) is used wherever a multiplier is inferred.

## 5. Caches and allocation

**SSM TLB** (`ssm_tlb`). 512 entries, direct-mapped on the low group bits, tagged with the
rest. Each entry holds the eight block addresses of a group. Lookup is combinational, and a
write takes effect at the next edge. Relocation updates the entry in place, so the TLB never
holds a stale mapping. `flush` invalidates everything.

**Shares cache** (`shares_cache`).
- Size and organisation: 128 KB of share blocks, 8-way set associative, 256 sets, physically
  addressed.
- Replacement: true LRU kept as per-way age counters.
- Timing: a lookup answers in the next cycle. A fill writes the block's own way if it is
  present, else the LRU way, and reports an eviction.

**Free pool** (`free_pool`). A FIFO free list of 1024 block addresses, filled with
`POOL_BASE ..` one per cycle after reset; `ready` rises when it is full. Each write pops eight
and pushes eight, so the count stays constant. Because the oldest freed block is reused first,
a freed location is overwritten as late as possible. Underflow and overflow are checked by
assertions.

Storage in all three is a plain SystemVerilog array, standing in for the SRAM macros a chip
would use.

## 6. How far to trust it, and where it departs from the published design

**Verified.** Every module is checked against an independent reference in its testbench:
- `tb/ssm_ref_pkg.sv` computes products as a carry-less product followed by reduction, and
  evaluates polynomials by power sums instead of Horner's rule;
- share positions are recomputed from the formula.

Each testbench has also been run against a deliberately broken copy of its module and reports
failures. Latencies are checked cycle-exactly.

**Tested end to end.** `tb_ssm_top` runs at reduced sizes (4 KB cache, 16-entry TLB, 64-entry
pool) so that every mechanism occurs many times:
- TLB hits, misses and page walks;
- cache hits, misses and evictions;
- relocations;
- integrity failures of never-written lines;
- a replayed group;
- a tampered share.

It checks every read against a reference memory and counts each mechanism. `tb_ssm_top_full`
runs the engine at its default sizes (128 KB cache, 512-entry TLB, 1024-entry pool) through
writes, reads, a relocation check and a latency check. It takes a few seconds.

**Cache-size sweep.** `tb_ssm_cache_sweep` runs six engines side by side, each with a different
shares-cache size and otherwise default parameters. All six get the same irregular trace, a
stand-in for a graph walk:
- the trace first writes a 4096-line region;
- it then issues 1000 requests: half step to the next line, half jump randomly, and one in eight
  is a write;
- every read is checked.

Measured results:

| shares cache | 4 KB | 16 KB | 64 KB | 128 KB | 512 KB | 1 MB |
|---|---|---|---|---|---|---|
| hit rate | 38.4 % | 39.2 % | 43.4 % | 49.6 % | 92.8 % | 100 % |
| DRAM accesses per request | 6.29 | 6.23 | 5.89 | 5.40 | 1.94 | 1.36 |

The large jump at 512 KB is a property of this trace: the whole region's current share blocks
fit in that cache. Larger regions move the knee. This sweep, at up to 1 MB of shares cache, is
the largest configuration simulated.

**Departures and gaps.**
- **Latency.** The published performance numbers assume 40 cycles for segmentation and for
  reconstruction. This RTL is deliberately small and sequential (one multiplier, one inverter),
  and takes 90 and 1005 cycles. Reaching 40 cycles would take a parallel interpolator (several
  multipliers and pipelined inverters); that has not been built.
- **Degree.** Only the main configuration is built: degree 9, ten shares, seven shares per block,
  eight blocks per group. The other degrees studied (2 to 32) are not parameterised.
- **Layout.** How shares are spread across slots is this design's own. The published layout
  rotates one share per block, which cannot hold ten shares of four lines in eight blocks.
  Here the rotation is generalised to the linear-slot rule of section 2.
- **Coefficient layout.** The description leaves the role of the ten coefficients partly open
  (eight data words plus one seed value). Here the extra coefficient is the zero padding c8, and
  the check value is an address-bound product of the seed. The description also speaks of
  padding each 8-byte word with zero bytes, and in one place of one byte per coefficient. Here
  each 64-bit word is one field element, and c8 is the only padding. Only one seed-derived
  coefficient is used, as in the degree-9 example.
- **Page-table protection.** The published text is inconsistent: one place calls the mapping
  metadata in DRAM unprotected, another relies on a secure page table. This RTL stores the page
  table unprotected. An attacker who replays both a group's old page-table entry and its old
  blocks therefore defeats the relocation defence, and a user who needs that protection must
  add it.
- **Share encryption.** The text also says the share blocks are encrypted by the controller,
  but gives no cipher. No block encryption is built. Confidentiality here rests only on the
  scattering and filler.
- **Random numbers.** The generator is xorshift64. It is not a cryptographic RNG, and a
  production design would need a true or cryptographic source.
- **Seed update.** Writing a new seed makes every line under the old seed fail its check. The
  re-encoding of existing data that a seed change requires is not built.
- **Concurrency.** One request at a time, and one DRAM read outstanding. There is no request
  queue and no overlap of DRAM fetches with decoding.
- **Page-table setup.** The page table and the free pool must not overlap, and the table must
  be set up by software. No initialisation engine is built.

## 7. Files and simulation

`rtl/` holds one unit per file:
- `ssm_pkg` (types, sizes, field arithmetic, placement);
- `gf64_mul` and `gf64_inv`;
- `prng` and `seed_store`;
- `address_mapper`;
- `coefficient_generator`, `polynomial_evaluator`, `lagrange_interpolator` and
  `reconstructor`;
- `ssm_dpu`;
- `ssm_tlb`, `shares_cache` and `free_pool`;
- `ssm_top`.

`tb/` holds `tb_<module>` for each module, `tb_ssm_top_full`, `tb_ssm_cache_sweep`, the reference package
`ssm_ref_pkg` and the behavioural `dram_model`. The DRAM model has a fixed latency and sparse
storage, and its `peek`/`poke` give a testbench the attacker's view of memory.

Every testbench prints `TB_RESULT checks=<n> failures=<n>` and stops itself with a watchdog.
With Verilator 5, from the repository root:

```sh
verilator --binary --timing --assert -Wno-fatal \
  rtl/ssm_pkg.sv tb/ssm_ref_pkg.sv $(ls rtl/*.sv | grep -v ssm_pkg) \
  tb/dram_model.sv tb/tb_ssm_top.sv --top-module tb_ssm_top -Mdir obj_tb_ssm_top
./obj_tb_ssm_top/Vtb_ssm_top
```

Replace `tb_ssm_top` with any other testbench name. Packages must come first on the command
line.

**Sizes.** The engine's sizes are parameters of `ssm_top`: `PT_BASE`, `POOL_BASE`, `POOL_DEPTH`,
`TLB_ENTRIES`, `CACHE_BYTES` and `CACHE_WAYS`. The scheme's constants live in `ssm_pkg`;
changing them, for example to another degree, also needs the placement rule and the data
processing unit to be revisited.
