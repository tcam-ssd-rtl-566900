// link_table: firmware-controlled table that ties search regions to their
// data regions.
//
// Two arrays. The region array holds, per search region, the range of link
// entries that make up the region and the size of its data entries (given by
// the Allocate command and needed for result compaction). The entry array
// holds, per search block of a region, the block's physical address and the
// base physical address (block and first page) of the linked data entries.
// Because data elements and data entries have fixed sizes, the data entry of
// element i of a search block lies at base + i x entry size; that sum is
// formed by match_decoder.
//
// Interface: one write port per array (firmware fills the table on Allocate
// and Append), one region read port and two entry read ports, all reads
// combinational (asynchronous), so the scheduler and the decoder can look up
// entries in the same cycle. No reset: entries are written before use.
// The contents follow the paper (one base address per block, entry size kept
// in the table); the per-region range of entries and the port structure are
// this design's. The paper's pointer to a firmware buffer of updated values
// is not kept: nothing in this back end uses it.
module link_table
  import tcam_pkg::*;
#(
  parameter int NENT = LT_ENTRIES,
  parameter int NREG = REGIONS
) (
  input  logic                      clk,
  input  logic                      e_we,
  input  logic [$clog2(NENT)-1:0]   e_waddr,
  input  link_entry_t               e_wdata,
  input  logic                      r_we,
  input  logic [$clog2(NREG)-1:0]   r_waddr,
  input  region_t                   r_wdata,
  input  logic [$clog2(NREG)-1:0]   r_raddr,
  output region_t                   r_rdata,
  input  logic [$clog2(NENT)-1:0]   a_raddr,
  output link_entry_t               a_rdata,
  input  logic [$clog2(NENT)-1:0]   b_raddr,
  output link_entry_t               b_rdata
);
  link_entry_t ent [NENT];
  region_t     reg_tab [NREG];

  always_ff @(posedge clk) begin
    if (e_we) ent[e_waddr] <= e_wdata;
    if (r_we) reg_tab[r_waddr] <= r_wdata;
  end

  assign r_rdata = reg_tab[r_raddr];
  assign a_rdata = ent[a_raddr];
  assign b_rdata = ent[b_raddr];

  // a region must lie inside the entry array
  always_ff @(posedge clk)
    if (r_we) assert (int'(r_wdata.first) + int'(r_wdata.count) <= NENT) else $error("region outside link table");
endmodule
