// match_decoder: the decode step of the search manager. It turns the tagged,
// early-terminated match bursts of one search into the physical addresses of
// the matching data entries.
//
// Input beats (mburst_t) come in the order the channel sent them, one match
// vector after another. For each vector the position of a burst is its
// early-termination tag (zero bursts dropped before it) plus the number of
// bursts of the same vector that came before it; the count restarts after a
// beat marked last. Each set bit b of a burst at position p is the match of
// element i = 64p + b of the search block. The block's link table entry (read
// through lt_addr/lt_data) gives the data block and first page; the entry
// lies at burst offset o = i x entry_bursts from there: page = first page +
// o / NB, column = o mod NB, length entry_bursts. entry_bursts must be a power
// of two so that no entry crosses a page.
//
// Timing: one match per cycle (lowest set bit first, m_valid/m_ready); a burst
// is taken when the previous one is used up, so an empty final beat costs one
// cycle. busy is high while a burst is held. Mapping matches to addresses by
// base + offset follows the paper; the burst-serial decoder is this design's.
module match_decoder
  import tcam_pkg::*;
#(
  parameter int NB = PAGE_BURSTS
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               mb_valid,
  output logic               mb_ready,
  input  mburst_t            mb,
  input  logic [EB_W-1:0]    entry_bursts,
  output logic [LT_W-1:0]    lt_addr,
  input  link_entry_t        lt_data,
  output logic               m_valid,
  input  logic               m_ready,
  output match_t             m,
  output logic               busy
);
  localparam int CB = $clog2(NB);
  localparam int OW = ELEM_W + EB_W;

  logic                  cur_v;
  logic [BURST_BITS-1:0] bits;
  logic [ELEM_W-1:0]     pos;       // burst position in the vector (units of 64)
  logic [LT_W-1:0]       entry_q;
  logic [COL_W:0]        nz;        // bursts of this vector already taken

  logic [5:0]            low;
  always_comb begin
    low = '0;
    for (int b = BURST_BITS - 1; b >= 0; b--) if (bits[b]) low = 6'(b);
  end

  logic [ELEM_W-1:0] elem;
  logic [OW-1:0]     off;
  assign elem = ELEM_W'({pos, 6'b0}) | ELEM_W'(low);
  assign off  = OW'(elem) * OW'(entry_bursts);

  assign lt_addr  = entry_q;
  assign m_valid  = cur_v && (bits != '0);
  assign mb_ready = !cur_v || (bits == '0);
  assign busy     = cur_v && (bits != '0);

  always_comb begin
    m       = '0;
    m.entry = entry_q;
    m.elem  = elem;
    m.blk   = lt_data.data_blk;
    m.page  = lt_data.data_page + WL_W'(off >> CB);
    m.col   = COL_W'(off % NB);
    m.len   = entry_bursts;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cur_v   <= 1'b0;
      bits    <= '0;
      pos     <= '0;
      entry_q <= '0;
      nz      <= '0;
    end else begin
      if (m_valid && m_ready) bits[low] <= 1'b0;
      if (mb_ready) begin
        cur_v <= mb_valid;
        if (mb_valid) begin
          bits    <= mb.data;
          pos     <= ELEM_W'(mb.zcount) + ELEM_W'(nz);
          entry_q <= mb.entry;
          if (mb.last)              nz <= '0;
          else if (mb.data != '0)   nz <= nz + 1'b1;
        end
      end
    end
  end

  always_ff @(posedge clk)
    if (rst_n && mb_valid && mb_ready)
      assert ($onehot(entry_bursts)) else $error("entry size must be a power of two");
endmodule
