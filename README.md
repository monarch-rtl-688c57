# Monarch: a polymorphic, wear-aware in-package memory in SystemVerilog

Monarch is a die-stacked memory built from resistive crosspoint arrays that can
each work as ordinary RAM or as a content-addressable memory (CAM). The same
cells are read by rows (RAM) or searched by columns (CAM). One vault can then
serve three purposes:

- **flat-RAM**: plain addressable storage.
- **flat-CAM**: software loads a key and a mask, then asks for the first
  stored element that matches.
- **cache**: a hardware-managed cache for main memory. Its tags sit in two CAM
  banks of the same vault, and the data sits in the remaining RAM banks.

Resistive cells wear out after a limited number of writes, so the controller
also limits and spreads writes. This RTL models the logic of all of this:
arrays, port selection, bank and vault command timing, the three vault modes,
write limiting and wear levelling. It does not model the analog periphery.

## The XAM subarray (`xam_array`)

A subarray is a 64x64 grid of two-resistor cells. Each cell stores one bit as
a pair of resistances.

- **Writes.** A row or a column is written in two steps. The first step writes
  the 0 bits and the second writes the 1 bits. Each step drives only the
  cells that take that value. A column write may carry a row mask, so only
  the rows whose mask bit is 1 are updated. This gives partial updates of
  stored keys.
- **Row read.** The sense amplifiers return the 64 bits of the addressed row.
- **Search.** Every column is compared, at once, with a 64-bit key. Only the
  rows whose mask bit is 1 take part. A column's output is 1 when all its
  compared bits equal the key.

The RTL keeps the cells as 64 column vectors. It computes search results as a
bitwise XNOR of the column with the key, ORed with the inverted mask, then
reduced with AND.

## Supersets and diagonal sets (`superset`, `port_selector`)

64 subarrays form a *superset*: an 8x8 grid. The grid is split into eight
*sets* along wrapped diagonals. Subarray (i, j) belongs to set
k = (j − i) mod 8. Each set therefore has exactly one subarray in every grid
column, and those eight subarrays together carry a 512-bit block. Grid
column j carries word j (bits 64j+63..64j).

Because a set uses every data path exactly once, a whole block can move
through the superset's shared data tree in one access. A set is then either:

- 64 rows of 512-bit blocks (RAM view), or
- 8 x 64 columns of 64-bit elements (CAM view: 512 searchable elements).

The port selector decides which port the selected set uses. It is a
three-to-eight decoder plus one mode latch. An *activate* command flips the
latch between RowIn and ColumnIn.

Each superset holds three 512-bit buffers: data, key and mask. What a write
does depends on the bank mode and the port:

| bank mode | port     | write goes to                                     |
|-----------|----------|---------------------------------------------------|
| RAM       | RowIn    | row `idx` of the set                              |
| RAM/CAM   | ColumnIn | column `idx` of the eight subarrays (optionally masked by the mask buffer) |
| CAM       | RowIn    | key buffer (even `idx`) or mask buffer (odd `idx`)|

What a read returns also depends on the bank mode:

- In a RAM bank, a read returns the row.
- In a CAM bank, a read returns the 512-bit match vector of the set against
  the key and mask buffers.

Each write step lasts `STEP_CYCLES` = 81 CPU cycles, so a whole write takes
162 cycles, which matches the write time in the timing table. `busy` is high
for that time.

## Banks, vault stack and command timing (`xam_bank`, `vault_stack`, `cmd_timer`)

A bank holds `NUM_SS` supersets and a RAM/CAM mode flag. The flag resets to
RAM, and a *prepare* command toggles it. The flag stands in for the choice of
sensing reference (Ref_R or Ref_S) in the analog periphery.

`vault_stack` is one vault's stack of banks. It takes one command per cycle
(NOP, PREPARE, ACTIVATE, READ or WRITE) and returns read data t_CAS + t_BURST
= 8 cycles later. An assertion flags any command sent to a bank that is still
writing.

`cmd_timer` holds a per-bank count of cycles until the next read or write is
allowed, a per-bank count until the next prepare or activate, and one global
count for t_RRD. The values, in CPU cycles at 3.2 GHz, are:

| parameter | cycles | meaning                     |
|-----------|-------:|-----------------------------|
| t_RP      | 8      | prepare to activate         |
| t_RCD     | 4      | activate to read/write      |
| t_RAS     | 4      | activate to prepare         |
| t_CCD     | 1      | read to read                |
| t_RTP     | 1      | read to prepare             |
| t_RRD     | 1      | command to another bank     |
| t_CWD     | 4      | write to data               |
| t_BURST   | 4      | data burst                  |
| t_WR      | 162    | array write                 |

An array write holds the bank for t_CWD + t_BURST + t_WR. A write that only
fills the key or mask buffer holds it for t_CWD + t_BURST.

## The vault controller (`vault_controller`)

There is one controller per vault. It takes one request at a time from a
small scheduling queue (`sched_queue`). A request is one of READ, WRITE,
KEY_WR, MASK_WR, SEARCH or EVICT. Before every array command the controller
sends prepare and activate as needed to put the bank into the right mode and
the superset into the right port. It also respects `cmd_timer`.

**flat-RAM.** The address fields are:

| bits   | field                 |
|--------|-----------------------|
| [11:6] | row or column index   |
| [14:12]| set                   |
| [22:15]| superset              |
| [28:23]| bank                  |

A read is a RowIn read of a RAM bank. A write is a RowIn write.

**flat-CAM.** Writing data to a CAM set stores each 64-bit element in a
column; the controller uses ColumnIn writes.

- KEY_WR and MASK_WR fill the controller's global key and mask registers.
- A SEARCH works in three steps:
  1. It copies the key and mask into the target superset's buffers, using
     RowIn writes to even and odd rows. This is skipped when the superset
     already has the current key and mask.
  2. It reads the set in CAM mode.
  3. It returns the match vector plus the index of the first match.
- If nothing has changed since the last search, the search is served from the
  controller's match register, without touching the arrays.

**cache.** An address is split as follows:

- Upper tag U = addr[34:17].
- Data bank: (U mod NUM_RAM_BANKS + bank offset) mod NUM_RAM_BANKS.
- Superset: addr[13:6] plus the superset offset.
- Tag location: bit 4 of the data-bank number picks one of the two CAM banks,
  bit 3 picks the 32-bit half of each tag column, and bits 2:0 (plus the set
  offset) pick the CAM set.

A tag is {dirty, valid, 30-bit address}, with two tags per 64-bit column.

A lookup writes a key and a mask into the tag superset and searches. The first
match gives the column, which is also the data block's row in the RAM bank.
On a miss the request goes to main memory.

The L3 cache sends an eviction with a dirty flag D and a was-read flag R:

| D | R | action                                                    |
|---|---|-----------------------------------------------------------|
| 0 | 0 | ignored                                                   |
| 1 | 0 | forwarded to memory; any cached copy is invalidated       |
| x | 1 | installed or updated; dirty data is also written through |

The victim is the first invalid tag at or after a free-running 9-bit counter,
or the counter's own slot if none is invalid. Dirty blocks are always written
through, so no cache line holds the only copy of data.

**Write limiting (t_MWW, `mww_limiter`).** Each superset may take at most
512·M writes (M = 3) in a window of t_MWW cycles. The default window is
30,272,000,000 cycles: 10 years × 3.2 GHz × M / 10⁸ writes of endurance. A
small direct-mapped table of (superset, count, window start) tracks this.

- In flat modes, a write over the limit waits until the window ends.
- In cache mode, the write goes to memory instead, and any stale copy is
  invalidated.

**Wear levelling (`wear_monitor`).** The monitor counts:

- all writes;
- the distinct supersets written (using a superset-written table with W and D
  flags);
- the supersets made dirty.

It asks for a rotation when any of these holds:

- **WR**: the top set bit of the write count is 9 or more places above that of
  the superset count. This means the average superset has taken about 512
  writes.
- **WC**: the write counter overflows.
- **DC**: the dirty count reaches 8192.

On a rotation the controller flushes the cache. It writes zeros into the
valid-bit row of every tag set of every written superset. Then the monitor
clears its tables and steps its offsets by primes:

- bank offset +1;
- set offset +3;
- superset offset +7;
- vault offset +5, once every 8 rotations.

The next round of data and tags therefore lands on different cells.

## Top level (`monarch_top`)

`monarch_top` contains `NUM_VAULTS` vaults. Each vault is one controller and
one vault stack, with its own request port, its own main-memory port and its
own event outputs. Each event output is a one-cycle pulse for one of: prepare,
activate, search, match reuse, key/mask transfer, hit, miss, install, skip,
forward, t_MWW block, rotation and flush.

Outside the design, and left as ports:

- the off-chip memory controller;
- the L3 cache, which supplies the R flag;
- routing of requests to the right vault by address.

## Sizes: what is built and what the paper's design has

| parameter                 | design default | full design |
|---------------------------|---------------:|------------:|
| vaults                    | 8              | 8           |
| banks per vault (top)     | 8              | 32          |
| supersets per bank        | 1              | 256         |
| subarray                  | 64x64          | 64x64       |
| CAM banks per vault       | 2              | 2           |
| t_MWW M                   | 3              | 3           |
| dirty limit               | 8192           | 8192        |

The bank and superset counts are scaled down because lint memory grows by
about 150 MB per superset. The full size, about 65,000 supersets, cannot be
elaborated. `vault_stack` and `vault_controller` keep the full 32 banks as
their own default. Every size is a parameter, and no logic depends on the
scaled values.

## Where this design departs from the paper or fills gaps

- **t_MWW counters.** The write-limit counters live only in a 64-entry on-chip
  table. The paper keeps them in main memory behind a TLB-like buffer. Here a
  replaced entry forgets its count.
- **Dirty data.** Dirty data is always written through. Tags are therefore
  stored clean, and the rotation flush only invalidates.
- **Cache-mode reads of a write-limited superset.** These still hit. The paper
  forwards all accesses of such a superset to memory.
- **One request in flight per vault.** There is no reordering across banks.
- **Invented details.** The paper does not give the tag bit order, the
  flat-mode address layout, the counter widths, the queue depth, the
  mask-buffer reset value (all ones) or the extra `use_mask` command bit for
  masked column writes. The values used here are this design's own choices.
- **Not modelled.** The analog parts (voltage references, sense amplifiers,
  TSV/wide-I/O interface) are not modelled.

## Testbenches and simulation

Every file in `tb/` is self-checking. Each one prints
`TB_RESULT checks=N failures=M` and stops itself with a watchdog.

Block testbenches:

| testbench                | what it checks |
|--------------------------|----------------|
| `tb_xam_array`           | row and column writes (masked and unmasked), row reads, masked searches, against a bit matrix |
| `tb_port_selector`       | diagonal decoding and the mode toggle |
| `tb_superset`            | reads, column writes, key/mask loading and 512-bit searches against a model of all 8 sets; a write keeps the superset busy for 162 cycles |
| `tb_cmd_timer`           | every spacing in the timing table, in cycles |
| `tb_mww_limiter`         | quota, blocking and the window reopening at the exact cycle |
| `tb_wear_monitor`        | WR after 1024 writes to 2 supersets, DC, and the offset steps |
| `tb_cache_addr_mapper`   | random addresses against an independent computation |
| `tb_sched_queue`         | order and full/empty flags |

`tb_monarch_top` runs three vaults, one in each mode, with 3 banks per vault,
M = 1, a 30,000-cycle t_MWW window, 4-bit write counters and an 8-cycle write
time. It runs:

- flat-RAM writes and reads;
- a write held back by t_MWW;
- flat-CAM searches (full, masked, missing key and match-register reuse);
- a cache scenario covering a cold miss, install, hit, update with
  write-through, skip, forward, and a rotation that flushes the cache.

It counts every event type and fails if any never happened. **Known defect:** in the
current state this testbench passes only 55 of its 107 checks. Every mechanism
fires (prepare, activate, search, match reuse, key/mask transfer, hit, miss,
install, skip, forward, t_MWW block, rotation). However, every block read back
through the vault controller differs from what was written. The `superset`
testbench passes on its own, so look first at the controller-to-stack data
path: `st_wdata`/`i_data`, the controller's copy of bank modes and port modes,
and the read capture in `S_WAIT_RD`. `main_mem_model`
is a behavioural main memory used by that testbench.

No testbench runs the top at its default size. The largest end-to-end
simulation is the 3-vault, 3-bank configuration above. Simulating the default
(8 vaults × 8 banks, 64 supersets of 4096 cells each) produces more than a
gigabyte of generated C++.

To simulate a block with Verilator, list the package first, then the modules,
then the testbench:

    verilator --binary --timing --assert \
      rtl/monarch_pkg.sv rtl/xam_array.sv rtl/port_selector.sv rtl/superset.sv \
      tb/tb_superset.sv --top-module tb_superset -o sim
    ./obj_dir/sim

For the top, add every file in `rtl/` plus `tb/main_mem_model.sv`. The build
is large; `-MAKEFLAGS "OPT_FAST=-O0"` shortens the C++ compile.
