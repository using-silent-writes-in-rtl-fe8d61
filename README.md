# Traffic-aware ECC (TCC) for a write-back L2 cache

A write-back cache has to protect its dirty lines with an error-correcting
code, because no other copy of them exists. Keeping an 8-byte SEC-DED code next
to every 64-byte line costs 12.5 % more SRAM. The usual fix splits the work in
two:

- a cheap **error-detecting code** (one parity byte) is stored with each line;
- the **correcting code** (the *block-ECC*) is kept in ordinary memory and cached
  in the L2 like any other data. This is called *memory-mapped ECC*.

The cost of that fix is traffic. Every write-back from the L1 now means one L2
write for the data and a second one for its block-ECC.

TCC removes this traffic for **silent writes**. A silent write is a write-back
whose data equals what the L2 already holds. It is found cheaply: the parity
byte a line had when the L2 handed it to the L1 is kept as the line's
**signature**. If the parity of the returning block differs from the signature,
the block has changed. If they are equal, the old block is read and compared to
be sure. A silent write writes nothing: not the data, not the block-ECC, and not
the dirty bit. A line that only ever received silent writes therefore stays
clean and needs no block-ECC at all.

This repository holds synthesizable SystemVerilog for the TCC L2 data cache in
its evaluated size:

| Parameter | Value |
|---|---|
| Capacity | 1 MB |
| Associativity | 8 ways |
| Line size | 64 B |
| Sets | 2048 |
| Replacement | LRU |
| Access latency | 12 cycles |
| Signature cache | 1024 one-byte entries, for a 64 KB L1 with 64 B lines |

It also holds unit testbenches and an end-to-end testbench.

## Parts

| Module | Role |
|---|---|
| `tcc_pkg` | Sizes, address split, ECC-line mapping, parity and SEC-DED functions, event-counter struct |
| `parity_gen` | One-byte interleaved parity of a 64-byte block; the EDC and the signature |
| `ecc_calc` | 8-byte block-ECC: one (72,64) SEC-DED check byte per 64-bit word |
| `error_correction` | Decodes a block against its block-ECC: corrected block, count of fixed words, uncorrectable flag |
| `block_compare` | The single 64-bit comparator, stepped over the eight words of a line, stopping at the first mismatch |
| `signature_cache` | One byte per L1 line, written on every fill, read on every write-back |
| `l2_tag_array` | Valid bits, tags, LRU ages per set; dirty bits stored per adjacent group (see below) |
| `l2_data_array` | 16384 lines of 512 data + 8 parity bits, 12-cycle access |
| `tcc_controller` | The fill and write-back flows as one state machine |
| `tcc_l2_top` | Wires the above together; ports to the L1 and to main memory |

The L1 data cache, the CPU and main memory are outside the design. The
testbenches play the L1. `tb/main_memory_model.sv` stands in for memory:
512 cycles for the first 8-byte chunk and 128 for each further chunk, so a
64-byte line takes 1408 cycles.

## Memory-mapped ECC and adjacent blocks

A block-ECC is 8 bytes, so one 64-byte *ECC line* holds eight of them. The eight
L2 lines that share an ECC line are called **adjacent blocks**: the lines of
the same way in eight consecutive sets `8k … 8k+7`. The ECC region starts at
`ECC_BASE = 0xF000_0000`:

```
ECC line of (set s, way w) = ECC_BASE + ((s / 8) * 8 + w) * 64
block-ECC of (s, w)        = 64-bit word (s mod 8) of that line
```

The whole region is 2048 lines × 64 B = 128 KB. Software must not place data
there.

ECC lines are cached in the same L2 arrays as data, with parity like any line.
They are replaced by the same LRU. When dirty, they are written back to memory
on eviction like data. Only dirty data lines have a meaningful block-ECC. A
clean line's word in its ECC line is stale and is never used.

The dirty bits are kept in a separate memory with one 64-bit row per group of
eight sets. The row holds the dirty bits of all 64 lines in the group; bit
`(s mod 8) * 8 + w` belongs to (s, w). One read of the row tells the controller
two things at once:

- whether the line itself is dirty;
- whether any of its adjacent blocks is dirty.

## Write-back flow (L1 → L2)

1. The tag array and the signature cache are read in the same cycle. The parity
   of the incoming block is computed combinationally.
2. **Signature differs:** the write is not silent. Go to 4.
3. **Signature equal:** the old line is read from the data array and compared
   word by word. All eight words equal means a **silent write**: the response
   carries `l1_resp_silent`, and only the LRU state is updated. Otherwise the
   equal signature was an alias; go to 4.
4. The block and its parity are written, and the line is marked dirty. Its
   block-ECC is computed by `ecc_calc`.
5. The ECC line is looked up:
   - **Hit:** it is read, the block-ECC word is replaced, and it is written
     back. That is two extra data-array accesses.
   - **Miss:** a way is allocated for the ECC line; a dirty victim is written to
     memory first. The ECC line is then filled from one of two sources:
     - if another adjacent block is dirty, the line is read from memory, because
       only then can memory hold live block-ECCs;
     - otherwise it starts as all zeros and no memory read is made.

     The new word is merged in, and the ECC line is written and marked dirty.

A write-back that misses in the L2 allocates a line without reading memory,
then continues at step 4. There is no old signature to trust in that case.

Data-array accesses per write-back:

| Case | Accesses |
|---|---|
| Silent | 1 (the compare read) |
| Signature mismatch, ECC line newly zeroed | 2 |
| Signature mismatch, ECC line hit | 3 |
| Alias, ECC line hit | 4 |

## Fill flow (L2 → L1)

1. The line and its parity are read, and the parity is recomputed.
2. **Parity equal:** the line goes to the L1. Its parity is written into the
   signature cache at the L1 line number given with the request.
3. **Parity differs, line clean:** the line is read again from memory (a
   refetch), written into the L2 and returned.
4. **Parity differs, line dirty:** the ECC line is looked up in the L2. On a
   miss, its block-ECC word is read from memory; the ECC line is not allocated
   in that case. `error_correction` repairs up to one bit per 64-bit word:
   - if the repair succeeds, the corrected line is written back into the L2 and
     returned;
   - if the repair fails, the line is returned with `l1_resp_err` and left
     untouched. Examples of failure are two errors in one word, or a parity
     error in the cached ECC line itself.

A fill that misses reads memory, after evicting the LRU victim. An invalid way
is taken first; a dirty victim is written back first.

## The codes

- **Parity/signature.** Parity bit `i` is the XOR of data bits `i, i+8, i+16,
  …`. Any burst of up to 8 adjacent flipped bits is therefore detected. It is
  also the signature, so the design needs no extra storage or logic to make
  signatures.
- **Block-ECC.** Each 64-bit word gets an extended Hamming (72,64) check byte
  `{P, c6…c0}`:
  - data bits take the codeword positions 3, 5, 6, 7, 9, … (the positions that
    are not powers of two);
  - `c_b` is the XOR of the data bits whose position has bit `b` set;
  - `P` is the parity of the data and `c0…c6`.

  On decode:
  - a non-zero syndrome with odd overall parity marks the flipped position;
  - a non-zero syndrome with even overall parity means a double error.

  The position masks are constant tables, computed at elaboration by functions
  in `tcc_pkg`.

## Interfaces and timing

The top-level ports are:

- **L1 request:** `l1_req_valid/ready`; `l1_req_we` (1 = write-back);
  `l1_req_addr` (32-bit, line aligned); `l1_req_wdata`; `l1_req_line`, the
  10-bit L1 line number that indexes the signature cache.
- **L1 response:** a one-cycle `l1_resp_valid` for every request, with
  `l1_resp_rdata`, `l1_resp_silent` and `l1_resp_err`.
- **Memory:** `mem_req_valid/ready`, `mem_req_we`, `mem_req_addr` and
  `mem_req_wdata`. Exactly one `mem_resp_valid` comes back per request; it
  carries `mem_resp_rdata` for reads and is only an acknowledgement for writes.
  ECC lines use this port at their ECC-region addresses.
- **stats:** fifteen 32-bit event counters (`tcc_pkg::tcc_stats_t`):
  - data-array accesses;
  - fills and write-backs;
  - L2 misses and dirty evictions;
  - signature mismatches, aliases and silent writes;
  - ECC updates, ECC-line misses and ECC-line memory reads;
  - parity errors, refetches, corrections and uncorrectable errors.

Timing:

- After reset, the tag array clears itself for 2048 cycles, and
  `l1_req_ready` is low during that time.
- The controller serves one request at a time.
- A fill that hits answers 18 cycles after the request is accepted. Of those,
  12 are the data array and the rest are the tag read, the parity check and the
  hand-over.
- Each further data-array access adds 12 cycles. A block comparison adds up to
  9 cycles. Each memory access adds the memory's latency.

## Departures from the original description

These are choices the original description leaves open, or points where this
RTL differs from it:

- **Old block read on a write.** The figure caption of the write flow reads the
  old block and its signature in step 1. The prose reads the old block only when
  the signatures match. This design follows the prose, which is what saves the
  access.
- **64-bit comparator on a 64-byte line.** The block comparison is described as
  a single 64-bit comparator. The line is 512 bits wide, so the comparator is
  used once per word, for up to eight cycles.
- **Blocking controller.** One request at a time, with valid/ready handshakes.
  The controller has no miss queue, no write buffer and no overlap of L2 and
  memory accesses. Performance numbers taken from it are therefore pessimistic.
- **Repaired lines are written back.** Refetched and corrected lines are
  written back into the L2. Uncorrectable lines are not written back.
- **ECC lines have parity only.** An ECC line is protected by parity alone. A
  parity error in the ECC line used for a correction makes that correction
  uncorrectable.
- **Victims are not checked.** Dirty victims are written to memory without a
  parity check.
- **Own choices for unspecified details:**
  - the address width (32 bits);
  - the ECC region base;
  - the word order inside an ECC line;
  - the bit-interleaved parity;
  - the exact Hamming construction;
  - the LRU encoding (3-bit ages);
  - the dirty-bit grouping.
- **Signature-cache index.** The signature cache is indexed by an L1 line number
  that the L1 supplies, rather than by an address hash.
- **Sizing the signature cache.** `L1_BYTES` in `tcc_pkg` sets its size. With a
  128 KB L1 it must be raised to 2048 entries.
- **Data array is a plain array.** The L2 data array is written as a plain
  array, not an SRAM macro.
- **Not included:** the L1 caches, the core and main memory.

## Verification

Each block has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M`:

| Testbench | What it checks |
|---|---|
| `tb_tcc_pkg` | Sizes, address split, ECC-line mapping and both codes against hand-worked values |
| `tb_parity_gen`, `tb_ecc_calc`, `tb_error_correction` | Random blocks against reference models; every single-bit error corrected, double errors flagged |
| `tb_block_compare` | Equal and unequal blocks, cycle count (8 for equal, k+1 for a first mismatch in word k) |
| `tb_signature_cache`, `tb_l2_data_array`, `tb_l2_tag_array` | Storage against array models, read latency (1 and 12 cycles), reset sweep, shared dirty-group rows |
| `tb_tcc_controller` | Every branch of both flows, directed, including access counts and the 18-cycle hit latency |
| `tb_tcc_l2_top` | Full-size design, 700 random operations, golden model (see below) |
| `tb_tcc_silent_traffic` | Full-size design, fill/write-back pairs with 37 % unchanged blocks (the average silent share of the evaluated programs): each silent write costs exactly one access and keeps the dirty bit; prints the accesses saved against writing every block and its ECC (about 26 % of write-back accesses with this stream) |

`tb_tcc_l2_top` runs at the full default size. Its traffic goes to 16 sets
(two adjacent groups) and 24 tags, so lines and ECC lines are evicted often.
It mixes these operations:

- fills;
- unchanged write-backs;
- changed write-backs;
- same-parity aliases;
- single-bit error injection, on clean and dirty lines;
- double-bit error injection.

A golden model checks every returned block. The test fails if any mechanism in
the stats never happened.

Simulate a testbench with Verilator 5, from the repository root:

```
verilator --binary --timing --assert -y rtl -y tb rtl/tcc_pkg.sv tb/tb_tcc_l2_top.sv --top-module tb_tcc_l2_top
./obj_dir/Vtb_tcc_l2_top
```

Replace the testbench name for the others. `tb_tcc_l2_top` runs in about ten
seconds.
