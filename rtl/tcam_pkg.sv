// tcam_pkg: sizes, command encodings and record types shared by the TCAM-SSD
// back end.
//
// The flash geometry follows the evaluated 3D NAND configuration: 8 channels,
// 8 dies per channel (1 package x 8 dies), 2 planes per die, 2,048 blocks per
// plane, 196 wordlines (pages) per block and 16 KB pages (131,072 bitlines).
// A searchable data element is stored down one bitline, one bit per pair of
// adjacent wordlines, so a block holds 131,072 elements of 97 bits: 98 pairs
// of wordlines, of which the last pair carries the valid cell.
//
// Chosen here, not taken from the paper: the 64-bit channel data burst, the
// 100 MHz controller clock used to turn the paper's microsecond latencies into
// cycle counts, the erase time, the tag width and the sizes of the link table.
package tcam_pkg;

  // ---------------- flash geometry ----------------
  localparam int CHANNELS         = 8;
  localparam int DIES             = 8;      // dies per channel
  localparam int PLANES           = 2;
  localparam int BLOCKS_PER_PLANE = 2048;   // address space; the die model stores fewer
  localparam int WORDLINES        = 196;    // pages per block
  localparam int PAGE_BITS        = 131072; // 16 KB page = bitlines per block
  localparam int ELEM_BITS        = WORDLINES/2 - 1;  // native element size, 97
  localparam int VALID_WL         = WORDLINES - 1;    // last cell of every bitline
  localparam int BURST_BITS       = 64;
  localparam int PAGE_BURSTS      = PAGE_BITS / BURST_BITS;  // 2048

  localparam int CH_W    = $clog2(CHANNELS);
  localparam int DIE_W   = $clog2(DIES);
  localparam int PLANE_W = $clog2(PLANES);
  localparam int BLK_W   = $clog2(BLOCKS_PER_PLANE);
  localparam int WL_W    = $clog2(WORDLINES);
  localparam int COL_W   = $clog2(PAGE_BURSTS);            // burst column in a page
  localparam int ELEM_W  = $clog2(PAGE_BITS);              // element index in a block

  // ---------------- flash latencies, cycles at 100 MHz ----------------
  localparam int T_READ_CYC  = 2250;    // 22.5 us
  localparam int T_SRCH_CYC  = 2500;    // 25 us
  localparam int T_PROG_CYC  = 20000;   // 200 us, SLC
  localparam int T_ERASE_CYC = 350000;  // 3.5 ms, assumed

  // ---------------- link table sizes ----------------
  localparam int LT_ENTRIES = 16384;    // search blocks tracked
  localparam int LT_W       = $clog2(LT_ENTRIES);
  localparam int REGIONS    = 64;
  localparam int RG_W       = $clog2(REGIONS);
  localparam int EB_W       = 8;        // data entry size, in bursts

  localparam int TAG_W = LT_W + 1;      // MSB set: raw (firmware) transfer

  // ---------------- chip commands ----------------
  typedef enum logic [2:0] {
    OP_NOP      = 3'd0,
    OP_READ     = 3'd1,   // page -> page register
    OP_PROG     = 3'd2,   // page register (loaded over the bus) -> page
    OP_PROG_INV = 3'd3,   // inverse of page register -> page, no data transfer
    OP_ERASE    = 3'd4,
    OP_SRCH     = 3'd5    // per-wordline Vread/Vpass search -> page register
  } flash_op_e;

  typedef struct packed {
    flash_op_e              op;
    logic [PLANE_W-1:0]     plane;
    logic [BLK_W-1:0]       block;
    logic [WL_W-1:0]        wl;
    logic [WORDLINES-1:0]   wl_sel;   // SRCH: 1 = Vread, 0 = Vpass, per wordline
  } die_cmd_t;

  // request to one channel controller
  typedef struct packed {
    die_cmd_t               cmd;
    logic [DIE_W-1:0]       die;
    logic [COL_W-1:0]       col;      // READ: first burst sent back
    logic [COL_W:0]         len;      // READ: bursts sent back
    logic                   xfer;     // READ/SRCH: send the page register back
    logic [TAG_W-1:0]       tag;
  } chan_req_t;

  // beat returned by a channel controller
  typedef struct packed {
    logic [TAG_W-1:0]       tag;
    logic [BURST_BITS-1:0]  data;
    logic [COL_W:0]         idx;      // SRCH: early-termination tag; READ: burst index
    logic                   last;
    logic                   srch;     // beat belongs to a match vector
  } chan_beat_t;

  // physical block address
  typedef struct packed {
    logic [CH_W-1:0]        ch;
    logic [DIE_W-1:0]       die;
    logic [PLANE_W-1:0]     plane;
    logic [BLK_W-1:0]       block;
  } blk_addr_t;

  // one link table entry: a search block and the base of its data entries
  typedef struct packed {
    blk_addr_t              srch_blk;
    blk_addr_t              data_blk;
    logic [WL_W-1:0]        data_page;   // first page of the data entries
  } link_entry_t;

  // one search region
  typedef struct packed {
    logic [LT_W-1:0]        first;       // first link table entry
    logic [LT_W:0]          count;       // number of search blocks
    logic [EB_W-1:0]        entry_bursts;// data entry size, power of two
  } region_t;

  // decoded match: where the matching element's data entry is
  typedef struct packed {
    logic [LT_W-1:0]        entry;
    logic [ELEM_W-1:0]      elem;
    blk_addr_t              blk;
    logic [WL_W-1:0]        page;
    logic [COL_W-1:0]       col;
    logic [EB_W-1:0]        len;
  } match_t;

  // host commands
  typedef enum logic [1:0] {
    HC_SEARCH = 2'd0,
    HC_CONT   = 2'd1,   // Search Continue
    HC_DELETE = 2'd2
  } host_op_e;

  typedef struct packed {
    host_op_e               op;
    logic [RG_W-1:0]        region;
    logic [ELEM_BITS-1:0]   key;
    logic [ELEM_BITS-1:0]   care;       // 0 = don't care (X)
    logic [31:0]            capacity;   // host buffer, in data entries
    logic                   compact;    // data result compaction on
  } host_cmd_t;

  typedef struct packed {
    logic [31:0]            n_match;    // matches seen by this command
    logic [31:0]            delivered;  // entries written to the host buffer
    logic [31:0]            blocks;     // host blocks written
    logic                   overflow;   // host buffer too small: Search Continue
  } cpl_t;

  // a tagged match burst as kept in the match buffer
  typedef struct packed {
    logic [LT_W-1:0]        entry;      // link table entry = search block
    logic [BURST_BITS-1:0]  data;
    logic [COL_W:0]         zcount;     // early-termination tag
    logic                   last;
  } mburst_t;

  // event counters of the back end
  typedef struct packed {
    logic [31:0]            srch_cmds;     // SRCH chip commands issued
    logic [31:0]            bursts_dropped;// all-zero bursts dropped
    logic [31:0]            bursts_kept;   // non-zero bursts kept
    logic [31:0]            entry_reads;   // data-entry reads issued
    logic [31:0]            rounds;        // search rounds
    logic [31:0]            invalidations; // valid-wordline programs (Delete)
    logic [7:0]             max_dies_busy; // most dies working at once
  } stats_t;

endpackage
