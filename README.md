# Mirage: a last-level cache whose evictions reveal nothing

A shared last-level cache (LLC) leaks information through *set conflicts*.
A line can live only in a small set of locations, so an attacker who fills
the set a victim's line maps to will see its own lines evicted whenever the
victim touches that set (Prime+Probe and its relatives). Randomising the
address-to-set mapping only hides which set is which. An attacker who
watches evictions can still learn a small group of lines that evict a target
(an *eviction set*), because every eviction still comes from a group of only
a few dozen candidates.

Mirage removes that group. Every miss evicts a line chosen uniformly at
random from **the whole cache**. Which line goes is then independent of the
address that came in, so no eviction set exists. A lookup still reads only
two small sets, as in an ordinary set-associative cache. Mirage combines
three mechanisms to do this:

1. **Tags and data are decoupled.** A tag entry points at its data entry
   with a forward pointer (FPTR), and a data entry points back at its tag
   with a reverse pointer (RPTR). The tag-store has many more entries than
   the data-store. Room for a new line is therefore made in the data-store,
   by evicting a random data entry anywhere. Its RPTR finds the tag to
   invalidate, and that tag can be in any set.
2. **The tag-store is skewed and keyed.** It is split into two skews. Each
   skew is indexed by a different keyed cipher of the line address, so a
   line has exactly two candidate sets, one per skew. Those sets cannot be
   predicted without the keys. Each set has 14 ways where a conventional
   two-skew 16-way cache has 8, leaving about 6 invalid tags per set on
   average.
3. **Load-aware skew selection.** A new line goes into whichever of its two
   sets has more invalid tags. This "power of two choices" keeps the invalid
   tags spread so evenly that both candidate sets being full is practically
   impossible. That event would force a *set-associative eviction* (SAE),
   the one kind of eviction that leaks. Its expected rate with 6 extra ways
   per skew is about once in 10^34 installs.

This repository holds synthesizable SystemVerilog for the whole cache: the
PRINCE-based index derivation, the two tag-store skews, the data-store with
its pointer decode, the hit logic, the skew-selection logic, the PRNG and the
controller. It includes optional cuckoo relocation for versions with fewer
extra tags. It also holds self-checking testbenches for each block, for the
whole cache at a reduced size and for the whole cache at its full 16 MB size.

## Default organisation

| Structure | Default | Per entry |
|---|---|---|
| Data-store | 16,384 sets x 16 ways = 262,144 entries (16 MB of 64 B lines) | 512 data bits + 19-bit RPTR |
| Tag-store | 2 skews x 16,384 sets x 14 ways = 458,752 entries (75 % more than data entries) | 40-bit tag, valid, dirty, 18-bit FPTR, 8-bit SDID = 68 bits |

- **Tag.** The tag is the full 40-bit physical line address (46-bit physical
  addresses, 64 B lines). Because the set index is a cipher output, the
  address of a dirty victim cannot be rebuilt from its set number, so it is
  kept whole for write-backs.
- **FPTR.** The 18-bit FPTR names any data entry. Its low 4 bits go through a
  4-to-16 decoder that selects the data-store way (bank). The upper 14 bits
  are the set inside the bank.
- **RPTR.** The 19-bit RPTR is `{skew, set, way}` = 1 + 14 + 4 bits. Way code
  `4'hF` is never a real way (there are 14), so an RPTR whose way field is
  all ones means "this data entry is free". This encoding is a choice of this
  design.
- **SDID.** The SDID (security-domain ID) is stored with the tag, and a hit
  requires both the tag and the SDID to match. Two mutually distrusting
  domains therefore always get separate copies of a shared read-only line,
  and one domain's flush cannot evict the other's copy. The SDID is also
  part of the cipher input, so the two copies usually sit in unrelated sets.

All sizes are module parameters (`SETS`, `WAYS`, `DATA_SETS`, `DATA_WAYS`,
`MAX_RELOC`). The pointer widths follow from them. The one constraint is that
`WAYS` must leave a spare way code for the free-RPTR encoding, for example
14 or 12 ways in 4 bits, or 3 ways in 2 bits.

## Finding a line

`set_index_hash` builds the 64-bit plaintext `{16'b0, SDID, line address}`.
It encrypts the plaintext with 12-round PRINCE, once per skew and each with
that skew's own 128-bit key, and takes the low 14 ciphertext bits as the set
index in that skew. PRINCE is the published lightweight block cipher. It is
pipelined in three register stages of roughly four rounds each, so an index
is ready 3 cycles after the address. The split of rounds over the stages is
this design's own. The cipher is verified against the five published PRINCE
test vectors.

After the cipher, both indexed sets are read in one cycle. `fptr_lookup`
compares all 28 tags with the address and SDID. It selects the hitting way's
FPTR with an AND-OR tree, and the data-store reads that entry in the next
cycle. Timing of a hit, counted from the clock edge that accepts the request:

| cycle | 1-3 | 4 | 5 |
|---|---|---|---|
| work | PRINCE stages | both tag sets read, compare, FPTR select | data entry read, response |

A read or write hit thus answers after 5 cycles. That is 3 cycles of cipher
plus 2 for the serial tag-then-data access. The extra latency over an
ordinary cache is the cipher plus the pointer indirection, as the paper
budgets it (+3 and +1 cycles on a 24-cycle LLC). The SRAM latencies of a real
16 MB array are not modelled: in this RTL each array answers in one cycle.

## Installing a line

This is the part that carries the security argument. On a miss
(`mirage_ctrl`):

1. **The memory read is issued first.** Everything below overlaps the
   memory access.
2. **Skew selection** (`skew_select`). The unit counts the invalid tags of
   both indexed sets with a population count and compares the two counts.
   The line goes to the set with more invalid tags; on a tie, a random bit
   decides. The first invalid way of that set is used.
3. **A data entry is chosen.**
   - **Warm-up.** While the data-store has never been full, a fill counter
     hands out entries 0, 1, 2, ... in turn. No eviction is needed.
   - **Global eviction (GLE).** After warm-up, the PRNG draws one of all
     262,144 entries uniformly at random. Its RPTR names the owning tag. That
     set is read, the tag is invalidated, the line is written back if dirty,
     and the eviction is reported on `evict_*` with kind `EV_GLE`. If the
     RPTR is already free (the entry was released by a flush), the entry is
     simply reused.
4. **Set-associative eviction (SAE).** If neither indexed set has an
   invalid tag, the controller evicts a random valid tag of the two sets and
   reuses that tag's data entry. The eviction is reported as `EV_SAE`, and
   `sae_count` is incremented. In normal operation this never happens, so
   SAEs seen in the field mean the mapping has leaked. System software can
   watch `sae_count` and re-key. Re-keying is done by a reboot with new
   keys: reset invalidates every tag. An in-place re-key with a hardware
   flush of the whole cache is not part of this RTL.
5. **The install** writes the tag entry (tag, valid, dirty, FPTR, SDID). In
   the same cycle it writes the data entry (line and RPTR = `{skew, set,
   way}`). The response carries the line.

A full-line write (a write-back from the level above) that misses allocates
without a memory read. A flush that hits writes the line back if it is
dirty, invalidates the tag, frees the RPTR and reports `EV_FLUSH`.

Both pointers are kept consistent at all times: a valid tag's FPTR names a
data entry whose RPTR names that tag. The controller asserts this every time
it follows an RPTR.

### Cuckoo relocation (optional)

With fewer extra tags, for example 12 ways per skew (50 % extra tags), an
SAE becomes frequent enough to matter: about once in 2x10^8 installs. Setting
`MAX_RELOC` > 0 enables relocation before an SAE:

1. The controller picks a random line of the two full sets.
2. It hashes that line's stored address and SDID again to find the line's
   set in the other skew, and reads that set.
3. If the set has an invalid tag, the line moves there: its tag entry is
   copied (dirty bit and FPTR kept), its data entry's RPTR is rewritten, and
   its old tag is freed for the incoming line.
4. If not, the indexed sets are read again and the next candidate is tried.
   After `MAX_RELOC` failed attempts, the SAE is made.

The paper's estimate is that 3 attempts make an SAE a once-in-22,000-years
event for 12 ways per skew. The default design (14 ways per skew) needs no
relocation, so `MAX_RELOC` defaults to 0. Each attempt costs about 7 cycles
and runs while the memory read is outstanding.

## Interfaces (`mirage_llc`)

| Port group | Protocol |
|---|---|
| `key_skew0`, `key_skew1` (128 b each) | Secret index keys. They should come from a boot-time hardware key generator, which is outside this design. Changing them requires flushing the cache. |
| `req_valid/ready`, `req_op` (`OP_READ`, `OP_WRITE`, `OP_FLUSH`), `req_addr` (40 b), `req_sdid` (8 b), `req_wdata` (512 b) | Valid/ready. One request is served at a time, so `req_ready` is high only when the controller is idle. |
| `resp_valid`, `resp_op`, `resp_hit`, `resp_rdata` | One-cycle pulse per request. It cannot be refused. |
| `mem_rd_valid/ready`, `mem_rd_addr`, `mem_rd_resp_valid`, `mem_rd_resp_data` | Line fill. The address is held until accepted. At most one read is outstanding, and the data returns as a one-cycle pulse. |
| `mem_wb_valid/ready`, `mem_wb_addr`, `mem_wb_data` | Dirty write-back. Held until accepted. |
| `evict_valid`, `evict_kind`, `evict_addr`, `evict_sdid` | One pulse per line removed. An inclusive hierarchy uses it to back-invalidate the upper levels. |
| `sae_count` (32 b) | Number of set-associative evictions since reset. |

`rst_n` is an active-low asynchronous reset. It clears all tag valid bits in
one step (they are flip-flops) and restarts warm-up. Data-store contents and
the other tag fields are not reset and are never read before being written.

## Files

| File | Content |
|---|---|
| `rtl/mirage_pkg.sv` | Widths, request and eviction encodings |
| `rtl/prince_cipher.sv` | 3-stage PRINCE pipeline |
| `rtl/set_index_hash.sv` | One cipher per skew; set-index slicing |
| `rtl/prng.sv` | 64-bit xorshift generator for victim choice and tie breaks |
| `rtl/tag_store_skew.sv` | One skew: entry array plus valid flip-flops, one-cycle set read, one-way write |
| `rtl/data_store.sv` | 16 way banks, FPTR decode, line plus RPTR |
| `rtl/fptr_lookup.sv` | Tag and SDID compare, AND-OR FPTR select |
| `rtl/skew_select.sv` | Invalid-tag counts, load-aware choice, SAE detection |
| `rtl/mirage_ctrl.sv` | Controller state machine (lookup, GLE/SAE, write-back, install, flush, relocation) |
| `rtl/mirage_llc.sv` | Top level |
| `tb/tb_<block>.sv` | Self-checking test of each block |
| `tb/tb_mirage_llc.sv` | Whole cache at reduced size with a reference model |
| `tb/tb_mirage_llc_reloc.sv` | The same with `MAX_RELOC=3` |
| `tb/tb_mirage_llc_sae.sv` | Measured SAE rate against extra ways per skew, with and without relocation |
| `tb/tb_mirage_llc_full.sv` | Whole cache at the default 16 MB size |
| `tb/dram_model.sv` | Behavioural memory: random latency and back-pressure (test only) |

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and stops itself. A
watchdog fails the run if it hangs. With Verilator 5:

    verilator --binary --timing --assert -Irtl -yrtl -ytb rtl/mirage_pkg.sv \
        tb/tb_mirage_llc.sv --top-module tb_mirage_llc -o sim
    ./obj_dir/sim

Replace the testbench name to run another test. The testbenches check the
following:

- **`tb_mirage_llc` and `tb_mirage_llc_reloc`.** Both run 4,000 random reads,
  writes and flushes from three domains on a cache with 2 sets x 3 ways per
  skew and 8 data entries. That size is small enough for the data-store to
  fill, for most misses to be global evictions and for SAEs to occur. A
  reference model tracks the resident lines from the eviction reports and
  predicts every hit and miss. The tests also check:
  - read data;
  - every write-back's address and data;
  - the 5-cycle hit latency;
  - that no more lines are resident than there are data entries;
  - that an eviction always names a resident line and never the incoming
    line;
  - `sae_count`.

  Each mechanism is counted, and the run fails if one never happens: read
  and write hits, warm-up fills, GLE, SAE, dirty write-back, flush hit and
  miss, reuse of a freed entry, skew tie and load-aware choice, memory
  back-pressure, per-domain duplication, and (with relocation) successful
  and failed relocations.
- **`tb_mirage_llc_full`.** It runs the untouched default configuration
  through a cold miss, a hit, a write hit, a second domain's separate copy,
  a dirty flush with write-back and a re-read from memory. It runs in about
  half a minute.
- **`tb_mirage_llc_sae`.** It measures how often an SAE happens. Three
  caches run side by side. Each has 64 sets per skew and 1,024 data entries,
  which equals the 8 base ways per skew. The caches differ in their extra
  ways and relocation:
  - 8+1 ways, no relocation;
  - 8+2 ways, no relocation;
  - 8+2 ways, with 3 relocation attempts.

  Each cache receives 24,000 misses. After warm-up the test counts installs
  per SAE and compares that with the published analysis, which gives about
  4 for 8+1 and about 60 for 8+2. It accepts a factor of 2.5 either way. One
  run measured 6.2 and 71, and relocation cut the 8+2 SAEs from 280 to 1.
  Rarer rates, such as 8+3 at one SAE in 8,000 installs or the default 8+6,
  cannot be reached in simulation.
- **Block tests.** Each block test compares its block with values the
  testbench works out itself: PRINCE test vectors, an xorshift reference,
  array models, and brute-force expected hits and skew choices.

Synthesis of the default-size top is dominated by the storage arrays. They
are written as plain arrays and would be replaced by SRAM macros in a real
implementation.

## Where this RTL departs from, or goes beyond, the description

- **PRINCE.** The cipher algorithm comes from its own specification; the
  cache design only names it. The grouping of rounds into the three stages
  is this design's own.
- **Plaintext and index bits.** The plaintext layout (zero padding, SDID
  above the address) and the use of the low ciphertext bits as the index
  are choices of this design.
- **PRNG.** The generator is an xorshift. It is fast and simple but not
  cryptographically strong, and it could be swapped for a stronger
  generator behind the same port.
- **Choices inside a set.** The install way is the lowest-numbered invalid
  way. An SAE victim is a random skew and way, taken modulo the way count,
  which is slightly non-uniform for 14 ways.
- **Warm-up and freed entries.** During warm-up, free data entries are
  handed out by a counter. After warm-up, an entry freed by a flush is found
  again only when the random draw lands on it. In the meantime a global
  eviction may remove a valid line even though a free entry exists. Whole-
  cache invalidation is not provided.
- **Controller structure.** The controller handles one request at a time,
  with one outstanding memory read. Real LLCs overlap many misses; the
  algorithm does not depend on this.
- **Relocation details.** The relocation candidate is the same random skew
  and way an SAE would take. The indexed sets are read again between
  attempts.
- **Not included.**
  - key generation, key refresh and the flush that must follow it;
  - the cores, L1/L2 caches and DRAM of the evaluated system;
  - the reuse-based replacement variant mentioned as an alternative;
  - the baseline and Scatter-Cache designs used for comparison.
