# TCAM-SSD back end: ternary search inside NAND flash

An SSD normally answers "which records hold value V?" by reading every candidate
page into the controller and comparing there. This design instead asks the flash
array itself. If a data word is stored *down a bitline*, one bit per pair of cells,
then one array operation compares a search key against every word in the block at
once. That operation is a read with a chosen voltage on each wordline. The chip
returns a *match vector* with one bit per bitline. The controller then fetches only
the records, called *data entries*, that belong to the matching words.

The RTL here is the SSD back end that does this:
- the flash dies with the added search command (a behavioural model);
- a controller for each flash channel, with the circuit that drops empty parts of
  match vectors;
- the table that links searchable blocks to their data;
- a search engine that turns host search commands into chip commands and
  returns the matching data entries, packed, to the host.

The front end is not included: the NVMe host interface, the flash translation
firmware and the DRAM.

## 1. Storing words for search

A NAND string is a column of cells in series along one bitline, one cell per
wordline. To read one page, the selected wordline gets `Vread` and every other
wordline gets the higher `Vpass`:

- An **erased cell**, which reads as 1, conducts under both voltages.
- A **programmed cell**, which reads as 0, conducts only under `Vpass`.

The bitline conducts only if every cell on it conducts.

**Two cells per bit.** Bit *i* of a word uses wordlines `2i` and `2i+1` of the
word's bitline. The first cell holds the bit and the second holds its
complement.

**Searching.** A search picks the voltage for each wordline:

| key bit | wordline 2i | wordline 2i+1 | bitline still conducts if |
|---|---|---|---|
| 1 | Vread | Vpass | first cell is erased, i.e. stored bit = 1 |
| 0 | Vpass | Vread | second cell is erased, i.e. stored bit = 0 |
| X (don't care) | Vpass | Vpass | always |

A pair left fully erased matches both 0 and 1, so it stores X.

**Block layout.** A block has 196 wordlines:
- Wordlines 0–193 hold 97 bit pairs, the native element size.
- Wordline 194 is a spare and is always driven with `Vpass`.
- Wordline 195 holds a **valid cell** for every bitline and is always driven with
  `Vread`.

A 16 KB page has 131,072 bitlines, so one search checks 131,072 elements of up to
97 bits.

**Valid cell and Delete.** An element is valid while its valid cell is erased.
Deleting the element programs that cell. This raises its threshold voltage, so
the bitline stops conducting and the element no longer matches. The source text
calls the valid value "0" and the change "0 to 1"; it counts programmed cells as
1. This RTL uses the opposite polarity, because everywhere else the design treats
erased as 1. The physical action is the same.

**Writing search blocks.** The element bits must be transposed: wordline `2i`
gets bit *i* of all 131,072 elements. Firmware does this. Writing the complement
wordline `2i+1` needs no second data transfer. `OP_PROG_INV` programs the
inverse of what the die's page register already holds (*write inversion*), which
halves the data sent to the chip.

## 2. Blocks

| module | role |
|---|---|
| `tcam_pkg` | geometry, latencies, command and record types |
| `srch_encoder` | key + care mask → one Vread/Vpass select bit per wordline |
| `nand_die` | behavioural die: planes of blocks, page register, READ / PROG / PROG_INV / ERASE / SRCH |
| `early_term` | drops all-zero match bursts, tags the rest with the drop count |
| `flash_chan_ctrl` | one channel: dies work in parallel, one shared data bus, READ column windows, match vectors through `early_term` |
| `link_table` | regions (first entry, block count, entry size) and one entry per search block (search block, data block, first data page) |
| `match_decoder` | tagged match bursts → address of each matching data entry |
| `result_compactor` | packs entries into host blocks (compaction), or gives each entry its own padded block |
| `tcam_ssd` | top: 8 channels × 8 dies, the link table and the search engine |

Default sizes:
- 8 channels, 8 dies per channel, 2 planes per die.
- 196 wordlines per block, 16 KB pages.
- 64-bit channel bursts, so 2,048 bursts per page.
- Latencies at a 100 MHz clock: read 22.5 µs (2,250 cycles), search 25 µs
  (2,500), SLC program 200 µs (20,000), erase 3.5 ms (350,000, assumed).

## 3. A search, step by step

A host `SEARCH` command carries:
- a region number;
- a 97-bit key and care mask;
- the host buffer capacity, counted in data entries;
- the compaction mode.

**Rounds.** The region's search blocks are listed in consecutive link-table
entries. The engine handles them in rounds of `NCH × NDIE` blocks (64 by default).

1. **Issue.** Each block of the round gets one `SRCH` chip command with the
   voltage pattern from `srch_encoder`. A channel controller passes the command to
   its die as soon as the die is idle. After that the die works alone, so all dies
   of all channels search in parallel. Blocks that share a die within a round wait
   for each other.
2. **Collect.** When a die finishes, its controller moves the match vector over
   the channel bus, draining results before accepting new commands. A 16 KB vector
   is 2,048 bursts, and most of them are zero. `early_term` drops every all-zero
   burst and counts it. It passes each non-zero burst with the count so far as its
   tag, and always passes the vector's final burst. Kept bursts go into the match
   buffer, which holds a worst-case round. A response arbiter stays on one channel
   until that channel's vector ends, so each vector arrives in one piece.
3. **Decode.** For each kept burst, `match_decoder` finds its position in the
   vector:

       position = tag + number of bursts already kept from this vector

   It then walks the set bits, lowest first, one per cycle. For bit *b*:

       element = position·64 + b
       offset  = element · entry_bursts
       page    = data_page + offset / bursts_per_page
       column  = offset mod bursts_per_page

   All entries of a block's data region have one fixed size, a power of two
   bursts. This is why the link table needs only one base address per search
   block.
4. **Fetch.** Each match becomes a conventional `READ`. It returns only the
   entry's column window, `entry_bursts` bursts, not the whole page.
5. **Pack.** Returned entries pass through `result_compactor`. With compaction
   on, entries are packed back to back into host blocks (one page, 2,048 bursts)
   and only the last block is zero-padded. With compaction off, every entry
   fills a host block of its own.
6. **Complete.** After the last round the completion reports four things: the
   number of matches, the entries delivered, the host blocks written, and an
   *overflow* flag. The flag is set when more matches existed than the host
   buffer could take.

**`CONT` (Search Continue).** This runs the previous search again with a new
capacity. The chip searches are repeated. Matches already delivered are skipped,
so the two deliveries together contain each match exactly once.

**`DELETE`.** Each block of the region gets a `SRCH` whose match vector stays in
the die's page register. Then `OP_PROG_INV` on wordline 195 programs the inverse
of that vector. This programs the valid cell of exactly the matching elements and
leaves all others alone, without moving the vector off the chip.

**Raw port.** While no command runs, `raw_*` gives firmware conventional chip
access: read, program, program-inverse, erase and search on any channel. Firmware
uses it to write search blocks transposed and to fill data regions. The
firmware writes the link table through `lt_*` / `rg_*`.

## 4. Interfaces and timing

The handshakes are valid/ready; a beat moves when both are high on a rising
clock edge. Reset is asynchronous and active low. A command is accepted only
while the engine is idle, and `cpl_valid` pulses once at its end.

`hd_*` carries 64-bit host data, with `hd_last` on the final burst of each host
block.

`stats` counts:
- SRCH commands issued;
- bursts dropped and kept by early termination;
- data-entry reads;
- rounds;
- invalidations;
- the largest number of dies working at once.

A search round costs at least one search latency plus the match-vector
transfers. Each match then costs one read latency plus its transfer. Entry reads
go out in match order, and the engine stalls while the target die is still busy.
Matches come grouped by block, so reads for one block go to one die one after
another. In the full-size test below, 12 matches on 3 dies took 33,225 cycles,
which is about one search plus 12 sequential reads. Issuing reads out of order
across dies would hide most of this. That is the first improvement to make.

## 5. Where this departs from the source design

- **The search manager is hardware.** In the source it is firmware on the SSD
  processor: it issues SRCH, decodes vectors against the link table and issues
  reads. Here it is a state machine. The round structure, the match-buffer size
  and the in-order read issue are this design's choices.
- **Delete uses write inversion.** The source reads and rewrites the valid
  bits through ordinary page commands. Here the valid wordline is programmed from
  the die's own match vector. The effect on the cells is the same.
- **Continue searches again.** The source does not say whether match vectors
  are kept between a search and its continuation. Here they are not.
- **Not built:**
  - elements wider than one block, whose match vectors must be ANDed across
    blocks;
  - AND/OR reductions between several keys;
  - keys longer than 97 bits passed by pointer;
  - the associative update mode;
  - Allocate and Append with their write buffer and transposition (firmware
    work, done here by the testbench through the raw port);
  - the ECC-free, enhanced-SLC programming of search blocks (an analog
    technique).
- **Chosen here, not given by the source:**
  - the 64-bit burst;
  - the 100 MHz clock;
  - the erase time;
  - link-table sizes of 16,384 entries and 64 regions;
  - power-of-two entry sizes;
  - host block = one page.
- **Die model size.** Each die model stores 4 blocks per plane, not 2,048. A
  behavioural die with all its blocks would need about 13 GB of simulator
  memory, and there are 64 dies. Block addresses keep the full width and are
  reduced modulo the stored block count.

## 6. Testbenches and how to run them

Each `tb/tb_<module>.sv` is self-checking. It ends by printing
`TB_RESULT checks=N failures=M` and has a watchdog. With plain Verilator:

    verilator --binary --timing --assert -Wno-fatal --top-module tb_tcam_ssd \
      rtl/tcam_pkg.sv rtl/srch_encoder.sv rtl/nand_die.sv rtl/early_term.sv \
      rtl/flash_chan_ctrl.sv rtl/link_table.sv rtl/match_decoder.sv \
      rtl/result_compactor.sv rtl/tcam_ssd.sv tb/tb_tcam_ssd.sv
    ./obj_dir/Vtb_tcam_ssd

**`tb_tcam_ssd`** runs at reduced size: 2 channels × 2 dies, 1 Kbit pages and
short latencies.
- It writes six search blocks transposed, with 16-bit keys, plus their data
  regions.
- It runs these scenarios:
  - an exact search over two rounds;
  - the same search with compaction off;
  - a 3-entry buffer that overflows, then Continue;
  - a ternary search;
  - Delete, then the same searches again;
  - a raw read.
- It compares every delivered entry with a reference computed in the testbench.
- It fails if any mechanism never occurred: early-termination drops, kept
  bursts, multiple rounds, parallel dies, write inversion, overflow, Continue,
  compaction on and off, Delete, raw read.

**`tb_tcam_ssd_full`** runs the top at its full default size. It programs three
search blocks and one search returns 12 entries in one compacted host block. It
takes about a minute and needs about 1.6 GB of memory.

The unit testbenches use small pages where the module allows it. The die and
channel tests check the read, search and program latencies in cycles.
