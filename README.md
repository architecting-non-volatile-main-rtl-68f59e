# Self-obscuring non-volatile main memory controller

A phase-change (PCM) main memory keeps its contents when power is removed.
That is good for instant wake-up, but it also means that whatever a program
left in memory can be read back later: after an unclean shutdown, by the next
program that gets the same frames, or by someone who pulls the module out of
a sleeping machine. This controller closes that hole. Everything written into
the non-volatile cells is encrypted with a key that lives only for one power
session, and the key itself is kept in volatile, privileged registers that
the OS wipes before the memory is power-gated. What stays in the cells is
ciphertext under a key that no longer exists.

Doing this naively would put a cipher on every memory access. The design
avoids that by decrypting in the places where data is already held in
bulk (the NVM row buffer, and an optional DRAM cache) and by encrypting
only what is actually written back. It also lets the OS choose, per page,
how strong the protection must be, down to "none".

The SystemVerilog in `rtl/` implements the memory-controller side: key
registers, page flag table, the row-buffer/encryption engine, a write
buffer, the DRAM-cache controller, and the OS register interface that
sequences flush, sleep and page-out. The cipher cores, random-number
source, PCM and DRAM devices, and the disk are outside; the top brings
their interfaces out as plain ports.

## Data path

```
 LLC miss / write-back (64-byte lines)
   |
   v
 dram_cache_ctrl    plaintext DRAM cache, 128 MB, direct mapped; can be
   |                switched off by the OS, then every request bypasses it
   v
 write_buffer       8 lines; merges writes to one line, drains them page by page
   |
   v
 nvm_rowbuf_ctrl    one open 4 KB page per bank, kept decrypted
   |   \            crypt_seq feeds the external cipher engine word by word
   |    `--> disk_*  page-out: decrypted page to a self-encrypting drive
   v
 PCM (ciphertext)   4 GB, 4 banks, 4 KB pages
```

Side blocks: `key_store` (session keys, one per bank), `page_attr_table`
(per-page flags and per-bank algorithm), `mc_csr` (OS registers and the
flush/sleep/page-out sequencer). `snvm_top` wires them together. Every
stage talks to the next through `line_if`: a valid/ready request carrying a
26-bit line address, a write flag and 512 bits of data, answered by one
`resp_valid` pulse (with data for a read). Each stage has one request
outstanding at a time.

## Where plaintext may exist, and where encryption happens

This is the part of the design that is easiest to get wrong, so the rules
are stated once here.

* Plaintext is allowed only in volatile storage: the row buffers, the write
  buffer, the DRAM cache and, in flight, the cipher engine.
* A line goes through the cipher at most twice per stay in the row
  buffer: decrypted when its page is opened, encrypted when the page is
  closed, and the second only if the line was written while the page was
  open. A clean line is not re-encrypted because its old ciphertext in the
  NVM is still correct. This keeps the number of NVM writes exactly the
  number the program caused, which matters for PCM endurance.
* A page is opened (all 64 lines read and decrypted) on the first access
  that misses the bank's open page. Before that, the bank's previous page
  is closed: its dirty lines are encrypted and written back, in line order.
  A page that is merely read and then replaced costs no NVM writes.
* A page the OS marked invalid is never read from the NVM; its row buffer is
  filled with zeros. A page whose level is "none" skips the cipher (one
  cycle per line) and is stored in plaintext, by the OS's choice.
* The key and algorithm used for a line are the bank's at the moment the
  line is processed. If the OS lowers a bank's algorithm (see below) while
  pages encrypted under the stronger one still hold data, those pages read
  back as garbage. The OS must invalidate them first; the hardware does not
  re-encrypt memory.

The row buffer has one dirty bit per line and serves hits with no cipher
work and no NVM access.
With the 64-bit cipher word assumed here, a 64-byte line is 8 cipher
words, so a line costs 8 times the engine's per-word latency: roughly
56-80 cycles for DES, 96-120 for AES and 192-240 for RSA, using the
per-word costs the evaluated system assumed (7-10, 12-15, 24-30 cycles).
Opening a page therefore costs 64 times that plus 64 NVM reads. This is
the price the row buffer and write buffer are there to amortise.

## Keys and sessions

`key_store` holds one key register per bank, as wide as the widest key
supported (521 bits, the RSA size); DES and AES use the low bits. After
reset it pulls 32-bit words from the `rng_*` port until all
`4 x 17` words are filled, then raises `keys_ok`. Until then, and whenever
`keys_ok` is low, the row-buffer controller accepts no request, so no line
can be written with a zero or partial key.

Keys are visible only to privileged accesses (CSR addresses
`0x400 + bank*32 + word`); an unprivileged access is refused with an error
and reads zero. The sleep protocol is:

1. OS reads the keys and keeps them in its kernel state.
2. OS writes `CMD_SLEEP`. The controller flushes the DRAM cache into the
   write buffer, drains the write buffer into the row buffers, writes back
   every dirty row-buffer line (encrypted) and closes all pages, and only
   then clears all key registers. `keys_ok` drops.
3. The NVM can now be gated. Its contents are ciphertext and no key is
   held anywhere in hardware.
4. On wake the OS writes the keys back word by word and writes
   `CMD_RESUME`; `keys_ok` rises and traffic proceeds.

An LLC request that arrives between steps 2 and 4 waits; the controller
does not touch the NVM or the cipher engine meanwhile. A reboot (reset)
draws new keys, so data of the previous session is unreadable by design.

## Security levels per page and per bank

The OS tags each 4 KB page with `{valid, level}`, level being none, DES,
AES or RSA (stronger and slower in that order). A bank uses one algorithm
for all its encrypted pages: the highest level among its valid pages.
`page_attr_table` keeps, per bank and per level, a count of valid pages at
that level, so the bank algorithm is available every cycle without a scan;
an OS update is a two-cycle read-modify-write that moves one count. Pages
are spread across banks by the low two bits of the page number. After
reset every page is valid at AES (`DEFAULT_LEVEL`), which reproduces a
single-algorithm system until the OS says otherwise.

Changing phase, for instance from a sensitive phase under RSA to a relaxed
one under DES, is done by the OS rewriting flags: pages are demoted or
invalidated, the bank counter for RSA reaches zero, and the bank algorithm
falls. Pages still holding RSA ciphertext must be invalidated (or kept at
RSA) before that, as said above.

## Write buffer

Eight line entries in front of the row buffers. A write to a line already
held replaces the entry's data; a read that hits is answered from the
buffer. Entries leave in page groups: the buffer picks the page of the
lowest-numbered valid entry and sends all entries of that page before
choosing another, so one page opening absorbs them all. Draining starts at
half full, after 16 idle cycles, when a write finds the buffer full, or on
flush.

## DRAM buffer cache

Optional, for memory-bound programs. It holds plaintext lines, so a hit
costs neither an NVM access nor a decryption. Direct mapped over 2^21
64-byte lines (128 MB), write-back, write-allocate without a fetch since
the LLC always writes whole lines. Tags (`{valid, dirty, tag}`, 5 bits of
tag) are an on-chip array; data sits in an external DRAM reached through
`dr_*` with a line index. After reset the tags are cleared one per cycle
(2^21 cycles) before the first request is taken.

The OS turns it on or off through `CTRL[0]`. Turning it on is immediate;
turning it off walks every tag, writes dirty lines down to the NVM path
and invalidates everything, then bypasses. A flush (part of sleep and
page-out) does the same walk but leaves the cache on; with the cache
off a flush has nothing to do and completes at once. The walk costs three
cycles per clean line, so at full size a flush or disable takes about
6.3 million cycles plus the dirty write-backs. A controller that tracked
dirty lines in a summary bitmap could skip most of that; this one does not.

## OS register interface (`mc_csr`)

Word addresses, privileged accesses only:

| addr | name | access |
|---|---|---|
| 0x000 | CTRL | bit 0: DRAM cache enable |
| 0x001 | STATUS | bit 0 keys loaded, 1 sequencer busy, 2 DRAM cache active, 3 tables initialised |
| 0x002 | CMD | write 1 flush, 2 sleep, 4 resume |
| 0x003 | PAGE | write: [19:0] page, [20] valid, [22:21] level |
| 0x004 | PAGEOUT | write a page number: flush, then stream the page decrypted to `disk_*` |
| 0x005 | BANKALG | read: 2 bits per bank |
| 0x400 + 32b + w | KEY | word w of bank b's key |

An access completes in the cycle `csr_ready` is high. `csr_ready` stays
low for a command while another is running, for a PAGE write while the
flag table is busy, and for a BANKALG read until a preceding PAGE write has
taken effect.

Page-out serves the case where a page leaves main memory for a
self-encrypting drive: the page is sent decrypted, one line per
`disk_valid`/`disk_ready` handshake, and the drive encrypts it with its own
key. The controller does not model the drive.

## Interfaces to outside parts

| ports | part | protocol |
|---|---|---|
| `llc_*` | last-level cache | valid/ready request, one `resp_valid` per request |
| `csr_*` | CPU register bus | see above, `csr_priv` marks privileged mode |
| `rng_*` | random source | valid/ready, 32 bits per word |
| `ce_*` | cipher engine (DES/AES/RSA) | one 64-bit word per request: algorithm, direction, 521-bit key; answered by `ce_resp_valid` |
| `nvm_*` | PCM | valid/ready request, 26-bit line address, reads answered by `nvm_resp_valid` |
| `dr_*` | DRAM of the buffer cache | valid/ready request with a 21-bit line index |
| `disk_*` | self-encrypting drive | valid/ready, plaintext line and its address |

All are synchronous to `clk`; `rst_n` is an asynchronous, active-low reset.

## Sizes

| parameter | default | meaning |
|---|---|---|
| `NUM_PAGES` | 2^20 | 4 GB of 4 KB pages |
| `NUM_BANKS` | 4 | PCM banks, one row buffer and key each |
| `KEY_W` | 521 | key register width |
| `DC_LINES` | 2^21 | 128 MB DRAM cache |
| `WB_ENTRIES` | 8 | write-buffer lines |
| `DEFAULT_LEVEL` | 2 (AES) | page level after reset |

The line (64 B), page (4 KB) and cipher word (64 bit) are constants in
`snvm_pkg`. The page flag table (2^20 x 3 bits) and the tag array (2^21 x 7
bits) are plain arrays and become memories in synthesis.

## Where this design departs from, or adds to, the evaluated system

* The evaluated system describes the page map as kept by the OS; here the
  controller keeps its own copy that the OS writes, so every access can
  look up its page's flags without a software round trip.
* Re-encryption on page replacement covers dirty lines only.
* One key per bank rather than one per system, since banks may run
  different algorithms.
* The cipher cores are not included. The controller drives a word-serial
  engine interface and relies on the engine for the algorithm's latency;
  the testbench model uses a stand-in cipher with the same per-word
  latencies.
* Write-buffer depth and drain policy, DRAM-cache organisation, the
  register map and the command sequencing are this design's own.
* Nothing in the design measures memory traffic to decide when to enable
  the DRAM cache; the OS does that and writes `CTRL`.

## Verification

Each block has a self-checking testbench in `tb/` that ends by printing
`TB_RESULT checks=N failures=M`; each has a watchdog. Behavioural models
stand in for the outside parts: `tb_cipher_model` (per-word latency drawn
from the algorithm's range; the cipher is an invertible mix of data, key
and algorithm from `tb_ref_pkg`, not a real DES/AES/RSA), `tb_mem_model`
(sparse line memory with read/write latency, used for PCM, DRAM and the
downstream side of single blocks).

* `tb_key_store`: reboot fill from the random source, privilege check,
  clear and resume.
* `tb_page_attr_table`: reset sweep, random flag updates against a
  reference of the highest valid level per bank.
* `tb_crypt_seq`: ciphertext and round trip per algorithm, cycles per line
  within 8 x the per-word range.
* `tb_write_buffer`: merging, read forwarding, page-grouped drain, flush.
* `tb_nvm_rowbuf_ctrl`: NVM holds the expected ciphertext after flush, only
  dirty lines written back, invalid pages zero-filled without NVM reads,
  page-out sends plaintext, fill latency bound.
* `tb_dram_cache_ctrl`: hits, misses, evictions, bypass when off, disable
  flush.
* `tb_mc_csr`: privilege, order of flush/sleep/page-out steps.
* `tb_snvm_top`: end to end at 64 pages and 16 cache lines. It counts and
  requires each mechanism: row-buffer hit and miss, dirty write-back, zero
  fill, write merge and forwarding, DRAM-cache hit, miss, eviction and
  bypass, cache enable and disable, sleep with stalled traffic and resume,
  a phase change that lowers a bank's algorithm, page-out, reboot with new
  keys, plaintext pages, and that no encrypted page's data ever appears in
  plaintext in the PCM.
* `tb_snvm_full`: the top at its default sizes (4 GB, 128 MB cache, 521-bit
  keys, DRAM cache left off): waits for key fill and the tag and flag table
  sweeps (about 2.1 million cycles), writes a line to a high page, reads it
  from the open row buffer, flushes, checks that the PCM holds the AES
  ciphertext under the key read back through the registers, and reads the
  line again through a fresh decryption.

To simulate one, for example:

```
verilator --binary --timing --assert -Irtl -Itb \
  rtl/snvm_pkg.sv tb/tb_ref_pkg.sv tb/tb_snvm_top.sv --top-module tb_snvm_top
./obj_dir/Vtb_snvm_top
```

Verilator finds the other files through `-I` by module name. Randomised
initial state (`+verilator+rand+reset+2`) is supported: every register that
is read is reset.

## Known limits

* One outstanding request per stage; no reordering between reads and
  writes beyond what the write buffer does.
* The algorithm is taken from the flags when a page is opened and again
  when it is closed. If the OS changes the flags of a page, or the bank
  algorithm changes, while the page is open, its dirty lines are written
  under the new algorithm and its clean lines keep the old ciphertext. The
  OS is expected to flush before changing the flags of live pages.
* Tag-walk flush of the DRAM cache is linear in its size (see above).
* Lint notes: the `ev_*` registers in several blocks are one-cycle event
  strobes for statistics counters and tests and drive no logic inside the
  design; assertions use `disable iff (!rst_n)`, which the linter reports
  as an asynchronous net used in a synchronous context.
