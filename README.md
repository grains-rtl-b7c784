# GRAINS query engine: k-mer lookups in a genome graph, inside the SSD

Large genome databases are stored as colored, compacted de Bruijn graphs. Each
graph node is a *unitig*, a DNA string in which every k-mer occurs once. Its
*color* names the genomes (species, samples) that contain it. A typical
analysis asks, for each of millions of k-mers cut from sequencing reads, two
things: is this k-mer in the graph, and if so, what is its color? Answering
means looking up three large structures, each with little reuse. On a
conventional system every lookup moves whole 4 KiB flash pages over the SSD
channels, through the SSD's DRAM and out to the host, only to use a few bytes
of each page.

GRAINS answers the query inside the SSD. The host cuts reads into k-mers,
sorts them and sends them in compact batches. The SSD controller then steers
the lookups. Small processing elements next to each NAND die pick the wanted
bytes out of the page buffer, or compare the k-mer against them there, so
only a 32-bit result crosses the channel. Three ideas keep the hardware small:

* **Predictable placement.** Every structure is spread round-robin over
  channels, dies and planes. A byte address therefore maps to a physical page
  by arithmetic, with no page-level mapping table.
* **Scheduling instead of sorting.** Strings accesses arrive in random order.
  A per-die table with one row per Strings page (the GST) collects them, and
  the rows are then read back in page order. Accesses to one page share a
  single page read, and the dies are kept busy round-robin.
* **Colors by counting.** Unitigs are stored grouped by color. A bitmap with
  one bit per unitig marks where colors change, so a unitig's color index is
  the number of ones in front of it. That count comes from a streaming scan
  held in two 32-bit registers.

This repository holds synthesizable SystemVerilog for the logic of such an
SSD: the controller-side stages, the per-channel flash controllers, the
per-die GSTs and scheduler, and one in-flash processing element per die. It
also holds self-checking testbenches, including an end-to-end test at full
size: 16 channels × 8 dies × 4 planes, 4 KiB pages.

## The data the engine walks

The graph index follows the SSHash/Fulgor layout. Four structures live in flash:

| structure | contents | how it is used here |
|---|---|---|
| Offsets | one 32-bit entry per k-mer candidate | the entry is the Strings *base position* (in bases) of the window that may hold the k-mer |
| Strings | unitig sequences, 2 bits per base | a window of 2K−M bases starting at the base position; the 32-bit column word in front of the window's first word holds the unitig ID |
| Color Bitmap | 1 bit per unitig, unitigs sorted by color | a 1 on the **last** unitig of each color |
| Colors | one 32-bit entry per color | the answer returned for a hit |

A fifth structure, Sizes, is small and stays on the host. The host uses it
(via the minimizer's hash) to find each k-mer's Offsets index, and passes that
index along with the k-mer.

Base encoding: A=0, C=1, G=2, T=3. Base i of a k-mer or window sits in bits
[2i+1:2i]. Page bit b is bit b mod 32 of column word b/32. The defaults are
K = 31 and M = 20 (minimizer length), so a window covers K−M+1 = 12 candidate
positions.

### Placement (`rr_addr_map`)

Each structure starts at a *base page* g0 in a global page numbering. Byte
address A of the structure lies in global page g = g0 + A/4096, at:

```
channel = g mod 16
die     = (g / 16) mod 8
plane   = (g / 128) mod 4
page    = g / 512              (page index inside the plane)
offset  = A mod 4096
```

Consecutive pages therefore go to 16 different channels, and 128 consecutive
pages go to 128 different dies. Pages 512 apart share a die, plane and
neighbouring page index. Pages 128 apart share a die and page index but sit
in different planes, so one multi-plane read can load them together. Strings
must start on a 512-page boundary. A Strings page p then lands in GST row
(p − p0)/512 of its die, where p0 is the first Strings page.

## A batch, stage by stage (`grains_fsm`, `grains_top`)

The host switches the SSD into GRAINS mode with **GRNS_Start**
(`cmd_start`). The firmware then swaps its page-level mapping for the small
GRAINS metadata and reports `prep_done`. After that, each **GRNS_Steps**
(`cmd_step`, with `cmd_last` on the final batch) runs one batch through three
stages:

```
CONV --start--> PREP --prep_done--> WAIT --step--> OFFSETS --> STRINGS --> COLORS --+--> WAIT
                                                                                  +--> CONV (last batch)
```

1. **OFFSETS.** The compacted batch streams in on `q_*`. `kmer_decompact`
   rebuilds each k-mer. Its Offsets entry is placed by `rr_addr_map`, and an
   IFP *select* goes to that die. The returned entry (a Strings base
   position) is turned into a Strings die, plane, page row and bit address.
   The access (bit address, k-mer, query ID, one-hot plane) is then put into
   that die's GST.
2. **STRINGS.** `drain_start` makes every GST walk its rows in page order.
   Per channel, a `light_scheduler` sends the accesses as IFP *compare*
   commands, round-robin over the dies that are free. A miss goes straight to
   the result port. A hit (unitig ID) goes into the unitig-ID buffer.
3. **COLORS.** `color_scan` turns each buffered unitig ID into a Color Index
   by scanning the Color Bitmap stream. The Colors entry is then fetched with
   an IFP select. Each hit leaves as a result with its unitig ID and color.

Each stage ends when its inputs are used up, every channel is idle and no
result is pending. A GRNS_Steps that arrives during a batch is remembered,
one deep, and starts the next batch one cycle after the current batch ends.

### The compacted batch (`kmer_decompact`)

The host sorts the k-mers of a batch by Offsets index. Neighbours then tend
to share a minimizer, so the minimizer is sent once, in a *header word*
(`hdr = 1`). Each following *k-mer word* carries:

* `pre_len`, the number of bases before the minimizer (0…K−M);
* `diff`, the K−M other bases: the prefix first, then the suffix;
* the query ID and the Offsets index.

The k-mer is rebuilt as prefix | minimizer ≪ 2·pre_len |
suffix ≪ 2·(pre_len+M). A header word produces no output. A k-mer word
passes straight through combinationally, one per cycle.

## Getting answers out of a die without moving its pages (`ifp_pe`)

Each die has one PE. The channel controller delivers a `die_cmd_t`: the
operation, page, plane, a plane mask for multi-plane reads, a bit address
and, for compares, the k-mer. The command is held in the PE's parameter
register, and the PE then does the following:

1. **Sense.** If the target plane's page buffer already holds the page, the
   read is skipped (`page_reuse`). Otherwise the PE asks for one page read of
   every plane in `plane_mask`, plus the target plane (`nd_rd`, `nd_mask`),
   and waits for `nd_done`.
2. **Work on the page buffer** through a 32-bit column port, with data one
   cycle after the address. The data are taken as already corrected by the
   die's light ECC.
   * `ifp_select` reads the one or two column words that hold the 32-bit
     entry at the byte offset, and shifts it into place. It takes 2 cycles,
     or 3 when the entry straddles two words.
   * `ifp_compare` loads the window's four column words into a 128-bit
     shift register (5 cycles), aligns it to the bit address (1 cycle), then
     compares the low 2K bits with the k-mer. It shifts by one base per
     cycle, over at most 12 positions, and stops at the first match. From
     start to result this takes 8 + position cycles for a hit and 19 for a
     miss.
   * On a hit, `ifp_select` then fetches the unitig ID from the column word
     in front of the window.
3. **Result.** The PE holds `rsp` (match, position, entry or unitig ID)
   until the controller acknowledges it.

Because the PE remembers which page each plane buffer holds, the accesses of
one GST row need only one page read. The first access of the row brings the
row's plane mask, so a single multi-plane read loads every plane that the row
will touch.

## Putting random Strings accesses in page order (`gst_table`, `light_scheduler`)

This is the core of the design and the least obvious part.

Offsets entries point anywhere in Strings, so Strings accesses come back in
random order. Sorting millions of them inside the SSD would need a sorting
unit and heavy DRAM traffic. GRAINS instead drops each access into a table
indexed by its page, and later reads the table sequentially.

**Row layout.** There is one GST per die, with one row per Strings page of a
plane (`ROWS`, default 256). A row holds up to `SLOTS` accesses (default 4),
the OR of their one-hot planes, and a *full* flag with a pointer. When a
row's last slot is used and another access arrives, a row of the extension
table (`EXT_ROWS`, default 64) is chained behind it. Rows take extension rows
in order. The table keeps a tail pointer per row, so an insert always goes to
the last row of the chain and takes one cycle.

**Drain.** On `drn_start` the table walks rows 0…ROWS−1. An empty row costs
one cycle. A row with accesses presents them one per cycle (with
`drn_ready`), following its chain, and is then cleared. With the consumer
always ready, a drain takes (empty rows) + (stored accesses) cycles. The
table asserts that no insert happens while it drains.

**Scheduling.** There is one `light_scheduler` per channel. It looks at the
heads of its 8 dies' drains and, starting after the die it served last,
picks the first die that has an access and is free (idle, no result
pending). It turns the access into a compare command:

* page = Strings row-0 page + row;
* plane = the access's plane;
* plane mask = the row's mask, on the row's first access only.

The access is popped only when the channel controller takes the command.
Each die thus works through its own rows in page order, while the dies of a
channel take turns on the bus. Across the 16 channels all 128 dies run
concurrently.

The end-to-end test checks the effect directly. During the Strings stage of
a batch, the number of page reads equals the number of non-empty GST rows,
whatever the number of accesses.

## Colors by counting bits (`color_scan`)

Unitigs of one color are stored together. Bit u of the Color Bitmap is 1 when
unitig u is the last of its color, so:

```
color_index(u) = number of ones at bitmap positions 0 … u−1
Colors byte address = colors_base + 4 · color_index(u)
```

The unit holds the current and the incoming 32-bit bitmap chunk, plus a
running Color Index equal to the ones in all chunks before the current one.
For the unitig ID at its input, it does one of three things each cycle:

* **Hit.** If the ID falls in the current chunk, it outputs the running
  index plus the ones of the current chunk below the ID's bit.
* **Retire.** If the ID is beyond the current chunk, it adds the current
  chunk's ones to the index and moves the incoming chunk up, taking a new
  one from the stream.
* **Rewind.** If the ID is behind the scan position, it clears the index and
  pulses `bm_rewind`. The bitmap source must then restart at chunk 0; the
  chunk presented in the cycle after the pulse must be chunk 0.

For IDs in ascending order this is a single pass over the bitmap, with one
cycle per chunk plus one per ID.

## Channels (`flash_channel_ctrl`)

All dies of a channel share one bus. The controller sends a command with its
parameter in `CMD_BEATS` bus cycles (default 16). It reads a result back in
`RSP_BEATS` cycles (default 6) instead of the 4 KiB a page would take.
Reading results back has priority, because it frees a die. Among dies with a
waiting result the choice rotates round-robin.

A die has at most one command in flight, and this is asserted. A request for
a busy die waits at the port; `stall` is high in each such cycle. The request
carries an opaque tag that comes back with the result. The top level uses the
tag to carry the query ID, plus the k-mer (Offsets stage) or the unitig ID
(Colors stage), so no per-request state is kept outside the controller.

## Overflow: reject, don't wait

The GSTs and the unitig-ID buffer are emptied only by later stages of the
same batch. A stage that waited for room would therefore wait forever. The
top level does not wait; it rejects:

* An Offsets result whose die GST has no extension row left is reported at
  once as a result with `res_retry = 1`.
* So is a Strings hit that finds the unitig-ID buffer (`UID_DEPTH`, default
  1024) full.

The host sends rejected k-mers again in a later batch. A batch that never
exceeds one GST's capacity, SLOTS × (EXT_ROWS + 1) = 260 accesses to one die,
and UID_DEPTH hits is never rejected.

## Top-level interface (`grains_top`)

| group | ports | notes |
|---|---|---|
| host control | `cmd_start`, `cmd_step`, `cmd_last`, `prep_done` → `scc_mode`, `phase`, `batch_done` | decoded vendor commands; `prep_done` comes from the firmware |
| mapping metadata | `offsets_base`, `strings_base`, `colors_base` | global page numbers; `strings_base` a multiple of 512 |
| query batch | `q_valid`/`q_ready`, `q_word` (`cq_word_t`), `q_last` | accepted only in the OFFSETS stage |
| results | `res_valid`, `res_qid`, `res_match`, `res_unitig`, `res_color`, `res_retry` | one result per query; no back-pressure |
| Color Bitmap | `bm_valid`/`bm_ready`, `bm_data`, `bm_rewind` | 32-bit chunks in order; restart on `bm_rewind` |
| NAND dies (arrays of 128) | `nd_rd`, `nd_page`, `nd_mask` → `nd_done`; `pb_rd`, `pb_plane`, `pb_col` → `pb_data` | page read and corrected page-buffer port per die |
| event counters | `cnt_stall`, `cnt_reuse`, `cnt_multiplane`, `cnt_ext`, `cnt_rewind`, `cnt_miss`, `cnt_hit`, `cnt_ovf` | free-running since reset |

The clock is a single clock domain (333 MHz in the evaluated design). The
reset is asynchronous and active low.

## Parameters

| parameter | default | origin |
|---|---|---|
| channels, dies/channel, planes/die, page size | 16, 8, 4, 4096 B | evaluated SSD configuration |
| color chunk registers | 2 × 32 bit | from the design |
| K, M | 31, 20 | usual SSHash/Fulgor values; not given by the design |
| column word, entry width | 32 bit, 32 bit | own choice |
| GST rows / slots / extension rows | 256 / 4 / 64 | own choice, sized for simulation |
| unitig-ID buffer | 1024 entries | own choice |
| bus cycles per command / result | 16 / 6 | own choice |
| query ID, Offsets index | 24, 40 bit | own choice |

The geometry parameters sit in `grains_pkg`. The table sizes and bus cycle
counts are parameters of `grains_top` and of the block concerned.

### What the defaults can hold

* **Flash.** The graphs used to evaluate GRAINS (659 GB and 161 GB with
  colors) fit easily. The 24-bit page index gives 32 TiB of address space,
  and the SSD has 4 TB.
* **Strings reach.** With 256 GST rows per die and 32-bit Offsets entries,
  only the first 512 MiB of Strings can be reached. The 659 GB graph would
  need up to about 314,000 rows per die and plane, and Offsets entries of
  about 42 bits.
* **GST storage.** In the intended design the GSTs live in the SSD's 4 GB
  DRAM: a 10-million-read query set needs about 2.9 GB. Here they are arrays
  of 128 × 320 rows × 4 × 105 bits, about 2.15 MB.
* **Query sets.** Reads stream through any number of batches; batch size
  does not limit the number of reads. The limits per batch are the GST
  capacity and the unitig-ID buffer described above.

## Where this RTL departs from the intended design

* **One Offsets entry per k-mer.** In SSHash a minimizer selects a *range*
  of Offsets entries, and every window in the range is checked. Here the host
  supplies one Offsets index per k-mer, and one window is checked.
* **No DRAM staging of the batch.** The intended design keeps two 2 MiB
  chunks of the batch in the SSD's DRAM, one arriving and one being used.
  Here the batch streams straight from the `q_*` port. The Offsets results
  go straight into the GSTs instead of being parked in DRAM first.
* **Full k-mers in the GST.** The GST keeps the full k-mer rather than the
  minimizer plus prefix and suffix. It is the same information.
* **One color scan unit.** The intended design has color registers per
  channel. Here one scan unit serves the whole SSD, fed from the single
  unitig-ID buffer.
* **Unitig ID order.** Hits reach the color scan in the order in which the
  channels return them. That order is page order per die but not ascending
  unitig order overall, so the scan rewinds when an ID is behind it
  (`cnt_rewind`). The results are correct, but the scan is slower than the
  single sequential pass the intended design expects.
* **Color Bitmap convention.** The prose describes the bitmap as marking the
  start of each color. Its worked example (bits 0,0,1,0,1 against the
  colors) has a 1 on the last unitig of each color. The example is followed.
* **Overflow.** Over-full GSTs and unitig-ID buffers reject with
  `res_retry` (see above). The intended design instead holds back whole
  batches on the host when the SSD's DRAM would overflow.
* **Whole-chunk counting.** The color scan counts a whole 32-bit chunk per
  cycle instead of walking the bitmap bit by bit.

## Not built

These parts are outside the logic described here; they show up as ports.

* **NAND arrays and page buffers.** The die side of the `nd_*`/`pb_*`
  ports. `tb/nand_die_model.sv` is a behavioural stand-in with a 20-cycle
  read latency and multi-plane reads.
* **Light on-die ECC** between the page buffer and the PE, taken from prior
  work.
* **The SSD's DRAM.** The GSTs and the unitig-ID buffer are arrays here.
* **The FTL firmware.** Mode switch, block-level mapping, GRNS_Write data
  placement and refresh afterwards. It is represented by `prep_done` and the
  structure base ports.
* **The NVMe/PCIe host interface** and the host software. The host software
  extracts k-mers, looks up Sizes, batches, sorts and compacts; it also runs
  the read-mapping flows that use the lookup results.

## Verification

Every block has a self-checking testbench in `tb/`. Each one compares against
a reference computed in the testbench, ends with a `TB_RESULT checks=…
failures=…` line, and has a watchdog.

| testbench | what it establishes |
|---|---|
| `tb_ifp_select` | entry at 400 offsets of a random page, aligned and straddling; 2/3-cycle latency |
| `tb_ifp_compare` | planted and absent k-mers at random bit addresses against a bit-level search; latency 8 + position cycles |
| `tb_ifp_pe` | 400 mixed selects/compares on a behavioural die; results, page reads vs. buffer reuse, multi-plane loads, latency |
| `tb_flash_channel_ctrl` | 600 requests to 8 stand-in dies; tags and results, 16-cycle command delivery, 6-cycle result read, stalls |
| `tb_rr_addr_map` | 2000 random addresses against the placement formula; spread over all channels and dies |
| `tb_gst_table` | 8 insert/drain rounds on a small table; order, masks, first flags, extension rows, overflow, drain cycle count |
| `tb_light_scheduler` | cycle-by-cycle round-robin choice, command contents, pops |
| `tb_color_scan` | color index and address against a bit count; rewinds; single-pass timing |
| `tb_kmer_decompact` | round trip through a compaction done by the testbench |
| `tb_grains_fsm` | phase sequence, pulses, remembered GRNS_Steps |
| `tb_grains_top` | full size, 128 behavioural dies, three batches (1040 queries) |

`tb_grains_top` checks every result (hit/miss, unitig ID, color) against a
reference computed from the flash contents. It also checks that a batch of
300 k-mers aimed at one die has exactly 40 of them rejected, and that those
40 succeed when resent. It requires one page read per non-empty GST row.
Every mechanism must have happened at least once: channel stall, page-buffer
reuse, multi-plane read, extension row, bitmap rewind, miss, hit and
overflow. The test runs at the default parameters in a few seconds, after
about 15 s of compilation.

Each testbench has also been run against a deliberately broken copy of its
block, and each one catches the fault.

To run a testbench with Verilator 5:

```
verilator --binary --timing --assert -y rtl -y tb \
    rtl/grains_pkg.sv rtl/grains_phase_pkg.sv tb/flash_store_pkg.sv \
    tb/tb_grains_top.sv --top-module tb_grains_top
./obj_dir/Vtb_grains_top
```

The same pattern works for the other testbenches: put the packages first and
name the testbench. `tb/flash_store_pkg.sv` is needed only where
`nand_die_model` is used.

### Lint and synthesis notes

* **Lint.** All files lint with `verilator -Wall`. The remaining warnings
  are:
  * `SYNCASYNCNET`, because the asynchronous reset also appears in the
    `disable iff` of the assertions;
  * unused-signal warnings in `grains_top` for outputs of sub-blocks it
    does not need: the channel's die index, the color index next to the
    color address, the GST empty flags, and the match/position bits of
    select results.
* **Synthesis.** Each block synthesizes on its own. A single GST is about
  7,500 flip-flops plus a 134,400-bit entry memory. The flattened top holds
  128 of them, roughly a million flip-flops, and a generic coarse synthesis
  of it runs for more than ten minutes. With the GST shrunk to 16 rows, 4
  extension rows and a 16-entry unitig-ID buffer, the same top synthesizes
  to about 75,600 cells without errors, so only run time limits the full
  size.
