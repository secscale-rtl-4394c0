# SecScale controller in SystemVerilog

SGX-style enclaves keep their pages in a small, fully protected region of DRAM
(the EPC). That region is small because its integrity tree of counters grows with
the memory it covers. SecScale keeps the EPC and its counter tree as they are. It
adds a much larger *extended EPC* (eEPC) of up to 512 GB, protected more cheaply:

* **Encryption without counters.** Each eEPC page is encrypted with AES-256 in ECB
  mode. Every 64-byte block of a page has its own key, and every time the page is
  written back it gets a fresh random key, so old ciphertext cannot be replayed.
* **Integrity with a shallow forest.** Instead of one deep tree, the eEPC is
  covered by a forest of three-level MAC subtrees, each covering 512 KB. The roots
  live in the trusted EPC, so checking a page costs at most four extra memory
  reads.
* **Page faults off the critical path.** On an EPC miss, the core gets its block
  back after two memory reads: the page key and the block itself. The rest of the
  page moves in the background, and the page is verified afterwards. Until that
  check passes, the core runs speculatively.

This repository holds RTL for the memory-controller side of that scheme: the
cryptographic datapaths, the MAC forest walker, the page-fault engine and its
status table, and a top level that ties them together. The core, the caches, DRAM
and SGX's own counter tree are not part of it; they connect through ports.

## Data layout

All traffic is in 64-byte lines. A line address is 40 bits: a 3-bit region tag
followed by the index within the region. The layout is this design's own choice;
`secscale_pkg` holds the address functions.

| region | content | one line holds |
|---|---|---|
| eEPC | encrypted pages, line = {page number (27 bits), block (6 bits)} | 1 block |
| key table | wrapped page keys | 4 pages × 16 bytes |
| leaf MACs | one 8-byte MAC per page | 8 pages |
| L1 MACs | one MAC per group of 16 pages | the 8 groups of one subtree |
| roots | one MAC per subtree of 128 pages (512 KB) | 8 subtrees |
| EPC | CTR-encrypted resident pages, line = {frame (15 bits), block} | 1 block |

For 2^27 pages, the sizes work out as follows:
* The key table is 2 GB.
* The forest is 1 GB of leaves, 64 MB of L1 MACs and 8 MB of roots.
* The 2^20 roots are what the EPC must hold.

## Keys

The 256-bit key of block *b* of page *p* is

    k_b = { HW key (64) | enclave ID (31) | random part (128) | p (27) | b (6) }

Only the random part changes over time. It is the only part stored. It is
encrypted under the system-specific key `SSK = {device key 2, boot time}` into
exactly 16 bytes, one key-table slot. The other fields are rebuilt from the
address and enclave at every use.

`key_generator` does three jobs:
* It holds the SSK.
* It draws random parts from a PRNG seeded with the boot time and the HW key.
* It wraps and unwraps key-table entries with one AES-256 core.

The PRNG is an xorshift128. It is a placeholder: a product would use a proper
DRBG, and the interface (`req`, `done`, `rnd`) would not change.

Leaf MACs use the page key with the block field zero. L1 MACs and roots use the
SSK.

## MACs and the verification walk

`mac_engine` hashes a sequence of 64-byte blocks with SHA-256 (`sha256_core`,
one round per cycle). It turns the 256-bit hash H into a 64-bit MAC:

    MAC_key(msg) = AES-256_key( H[255:128] xor H[127:0] )[127:64]

The SHA core takes one 512-bit block every 65 cycles. That is 7.9 bits per
cycle, or 40.6 Gbit/s at 5.15 GHz, which meets the 40 Gbit/s the design
assumes for its MAC unit. The engine keeps that rate while absorbing a page: a
new block starts in the same cycle the previous one ends.

`mac_forest_unit` receives every block of a page in transfer, as plaintext and
in order 0..63. Each block is tagged with its ESHR slot and direction. Hashing
runs while the page is still moving. Each slot keeps its own chaining value,
so several transfers can interleave. After block 63 it walks the forest:

1. Finish the page hash: `leaf' = MAC_pagekey(page)`.
2. Read the two leaf lines of the page's group of 16. Put `leaf'` in its slot.
   Then `L1' = MAC_SSK(group)`.
3. Read the subtree's L1 line. Put `L1'` in its slot. Then
   `root' = MAC_SSK(L1 line)`.
4. **Verify** (page loaded into the EPC): compare `root'` with the stored root.
   The root comes from the 8-entry top-MAC cache or, on a miss, from memory.
   That makes 3 reads on a hit and 4 on a miss. A mismatch sets the sticky
   `violation` output.
   **Update** (page evicted with a new key): write back the leaf line, the L1
   line and the root, which also goes into the cache.

**Clubbing.** The EPCM's LRU names the next page to evict in an *evict
register* (input `next_evict_*`). If that page lies in the same subtree, the
root write is deferred, and the next eviction writes one root for both pages.
A deferred root is written out before any verification, and before an update
of another subtree. So a verification never compares against a stale root.

## Page-fault engine

`page_fault_ctrl` runs one page transfer at a time. A fault supplies:
* the page and its enclave;
* the critical block;
* the EPC frame to fill;
* if that frame is occupied (E bit), the victim page and its enclave.

The job then runs these steps:

1. **Allocate an ESHR.** `eshr_table` has 32 entries of {LPage, EPage,
   64-bit LS vector, V, E}. V stays set until every block is loaded.
2. **Key** (memory read 1). Read the key-table line and unwrap the page's random
   part.
3. **Critical block** (memory read 2). For a read fault, read that eEPC block
   and ECB-decrypt it in the MEE's first stage. Send the plaintext to the core
   at once (`resp_valid`, `resp_in_epc = 0`).
4. **Eviction** (E set). Draw a fresh key for the victim and write its wrapped
   form to the key table. Then, for each block:
   * read it from the EPC;
   * CTR-decrypt it under the EPC key and the block's counter;
   * ECB-encrypt it under the new key;
   * write it to the eEPC;
   * pass the plaintext to the forest unit, which updates the forest.
5. **Load.** For blocks 0..63:
   * read the block from the eEPC;
   * ECB-decrypt it;
   * CTR-encrypt it with counter + 1;
   * write it to the frame;
   * pulse `ctr_inc` and set the LS bit;
   * pass the plaintext to the forest unit, which verifies the page.

   The critical block is fetched again in this pass, so that the hash sees the
   blocks in order.

`mee` follows the two pipelines of the engine: eEPC → ECB decrypt → CTR
encrypt → EPC for loads, and the reverse for evictions. It has one
`line_cipher` per mode, so the EPC's CTR key schedule stays expanded while
the ECB key changes with every block.

**Faults during a transfer:**
* A *read* fault that arrives while a job runs takes over at the next block
  boundary. The running job's context goes on a small stack (4 entries) and
  resumes later.
* A *write* fault waits. It is answered (`resp_in_epc = 1`) once its block has
  been written to the EPC.
* A fault on a page that is already in transfer allocates nothing. The ESHR is
  probed by page number. The fault is answered at once if its block is loaded,
  or when it is.

**Memory port.** The engine and the forest unit share one memory port through
`mem_arbiter`. A pending read is granted before a pending write. Between two
requests of the same kind, the fault engine goes first. Each requester has at
most one request in flight.

**System calls.** While a page is in transfer or awaiting verification, the
core may be running on unverified data. `syscall_grant` therefore stays low
until all of that has drained, so a system call cannot leak speculative state.

## Top level

`secscale_top` connects `key_generator`, `mee`, `eshr_table`,
`mac_forest_unit` (with `top_mac_cache`), `page_fault_ctrl` and `mem_arbiter`.
Its ports:

| group | signals | connects to |
|---|---|---|
| boot | `boot`, `boot_time`, `hw_key`, `dev_key2`, `epc_key`, `ready` | fuses / boot firmware |
| faults | `fault_*` (valid/ready), `resp_*` (pulse) | core + EPCM/LRU |
| evict register | `next_evict_valid`, `next_evict_ppn` | EPCM/LRU |
| memory | `mreq`, `mreq_ready`, `mrsp` (`mem_req_t` / `mem_rsp_t`) | DRAM via the system bus |
| EPC counters | `ctr_frame`, `ctr_blk`, `ctr_val`, `ctr_inc` | SGX counter tree/cache |
| system calls | `syscall_req`, `syscall_grant` | core |
| integrity | `ver_done`, `ver_ok`, `ver_ppn`, `upd_done`, `violation`, `busy` | core / fault handler |
| statistics | `stats` (`stats_t`) | performance counters |

Parameters (defaults are the design point): `ESHR_N = 32` status registers,
`TOP_CACHE = 8` cached roots, `STACK = 4` preempted jobs. Field widths are in
`secscale_pkg`:
* 27-bit page number (512 GB);
* 31-bit enclave ID;
* 64-bit HW key;
* 15-bit EPC frame number.

## Timing at a glance

| operation | cycles |
|---|---|
| AES-256 block (`aes256_core`) | 14 after start; key expansion 13 |
| 64-byte block, one mode (`line_cipher`) | 64 with the same key, 79 with a new key |
| SHA-256 block | 64, one every 65 |
| SSK ready after `boot` | 14 |
| key unwrap / new key | 16 |
| critical block (with 4-cycle memory) | about 120 after the fault is accepted, exactly two memory reads |
| page verification walk | 3 reads (root cached) or 4 reads, plus three MAC finishes |

## Where this departs from, or goes beyond, the source design

* **The published design leaves these choices open.** The following are this
  implementation's own:
  * the memory layout above;
  * the CTR counter block `{frame, block, counter, 0}`;
  * the MAC construction (SHA-256, then AES of the folded hash);
  * the PRNG;
  * the cache organisation (fully associative, LRU, write-through);
  * the stack depth;
  * the arbitration between equal requests;
  * the rule for flushing a deferred root.
* **Key size.** The page key is described both as the whole key minus the block
  field (250 bits) and as a 16-byte table entry. The 16-byte entry is followed.
  Only the random part is stored, and it is encrypted.
* **Victim selection is an input.** The victim and the next victim come from
  outside, so the EPC size only sets the frame field width.
* **Serial transfers.** One transfer runs at a time, with one request in
  flight. Preemption happens only at block boundaries.
* **No grouped verification.** Two waiting faults in the same subtree are not
  grouped into one verification of the upper levels. Each page is verified on
  its own. The second page usually finds its root in the top-MAC cache, which
  saves the same root read.
* **Violations.** A detected violation is only reported. Stopping the enclave
  is left to the core.

## Testbenches

Every module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M`. Expected values come from behavioural
reference models in `tb_ref_pkg`:
* an AES whose S-box is found by brute-force inversion;
* a SHA-256 whose constants come from square and cube roots;
* the MAC, ECB and CTR constructions built on them.

`tb_forest_pkg` builds consistent forests in a memory model. `tb_mem_model` is
the DRAM stand-in.

`tb_secscale_top` runs the whole controller at its default parameters:
* read and write faults with eviction;
* preemption;
* a queued write;
* a fault merged into a running transfer;
* round trips of evicted pages;
* a tampered page.

It counts each mechanism and fails if one never happens. The mechanisms are:
two-read critical return, preemption, queued write, merge, eviction, clubbing,
root-cache hit and miss, system-call stall, verification and violation.

To run one testbench with plain Verilator, compile the packages first, in
dependency order:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_secscale_top \
  rtl/aes_pkg.sv rtl/sha256_pkg.sv rtl/secscale_pkg.sv \
  $(ls rtl/*.sv | grep -v _pkg) \
  tb/tb_ref_pkg.sv tb/tb_forest_pkg.sv tb/tb_mem_model.sv tb/tb_secscale_top.sv
./obj_dir/Vtb_secscale_top
```

Replace the top module and the last file to run another testbench. The
end-to-end run takes about a minute.
