// tcam_ssd: SSD back end with in-flash ternary search.
//
// Contents: NCH flash channels, each a flash_chan_ctrl with NDIE nand_die
// models behind it; the link_table; and the search manager / transaction
// scheduler of this module, which runs the host's search commands:
//
//   SEARCH  key, care mask, region, host buffer capacity (in data entries) and
//           the compaction mode. The region's search blocks (link entries
//           first .. first+count-1) are handled in rounds of at most NCH x NDIE
//           blocks. In a round every block gets one SRCH chip command, with
//           the wordline voltages from srch_encoder; the dies search in
//           parallel and their match vectors come back early-terminated and
//           are kept, tagged, in the match buffer (ROUND x NB bursts, the
//           worst case of a round). Then match_decoder turns every match into
//           the address of its data entry, and for each one a column-addressed
//           READ fetches exactly the entry; the returned entries pass through
//           result_compactor to the host data port. After the last round the
//           completion reports the number of matches, the entries delivered,
//           the host blocks written and whether the host buffer overflowed.
//   CONT    Search Continue: repeats the previous search with a new capacity
//           and skips the matches already delivered. The SRCH commands are
//           issued again; only the entry transfers resume where they stopped.
//   DELETE  every search block of the region gets a SRCH whose result stays in
//           the die (xfer=0), then OP_PROG_INV on the valid wordline: the
//           inverse of the match vector is programmed there, which turns the
//           valid cell of every matching element off and leaves the others.
//
// While no command runs, a raw port gives the firmware conventional chip
// access (read, program with data, program-inverse, erase, search) on any
// channel; the firmware uses it to fill data regions and to write search
// blocks transposed (wordline 2i by OP_PROG, 2i+1 by OP_PROG_INV). Channel
// results return through one arbiter that stays on a channel until the
// channel's beat marked last; raw results (tag MSB set) go to raw_rd_*.
//
// Follows the paper: the flow of a search (SRCH per block, match vectors back
// to the search manager, link table decode, reads of only the matching
// entries, return to the host), Search Continue with an overflow flag,
// Delete by programming the valid cells, early termination, write inversion,
// compaction, and the evaluated geometry (8 channels x 8 dies, 196 wordlines,
// 16 KB pages, 97-bit elements). This design's own: the search manager is
// hardware rather than firmware, the round structure and match buffer, the
// re-search on Continue, the raw port, the 100 MHz cycle counts. Matches of
// multi-block elements are not ANDed and there is no associative update; see
// the documentation. The dies keep NBLOCKS (4) blocks per plane, not 2,048.
module tcam_ssd
  import tcam_pkg::*;
#(
  parameter int NCH     = CHANNELS,
  parameter int NDIE    = DIES,
  parameter int PBITS   = PAGE_BITS,
  parameter int NBLOCKS = 4,
  parameter int T_READ  = T_READ_CYC,
  parameter int T_SRCH  = T_SRCH_CYC,
  parameter int T_PROG  = T_PROG_CYC,
  parameter int T_ERASE = T_ERASE_CYC,
  parameter int NLT     = LT_ENTRIES,
  parameter int NRG     = REGIONS
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // link table (firmware writes)
  input  logic                   lt_we,
  input  logic [$clog2(NLT)-1:0] lt_waddr,
  input  link_entry_t            lt_wdata,
  input  logic                   rg_we,
  input  logic [$clog2(NRG)-1:0] rg_waddr,
  input  region_t                rg_wdata,
  // host commands and completions
  input  logic                   cmd_valid,
  output logic                   cmd_ready,
  input  host_cmd_t              cmd,
  output logic                   cpl_valid,
  output cpl_t                   cpl,
  // returned data, in host blocks
  output logic                   hd_valid,
  input  logic                   hd_ready,
  output logic [BURST_BITS-1:0]  hd_data,
  output logic                   hd_last,
  // raw chip access, only while no command runs
  input  logic                   raw_valid,
  output logic                   raw_ready,
  input  logic [CH_W-1:0]        raw_ch,
  input  chan_req_t              raw_req,
  input  logic                   raw_wd_valid,
  output logic                   raw_wd_ready,
  input  logic [CH_W-1:0]        raw_wd_ch,
  input  logic [BURST_BITS-1:0]  raw_wd_data,
  output logic                   raw_rd_valid,
  input  logic                   raw_rd_ready,
  output chan_beat_t             raw_rd,
  // status
  output logic                   idle,
  output stats_t                 stats
);
  localparam int NB    = PBITS / BURST_BITS;
  localparam int ROUND = NCH * NDIE;
  localparam int MBD   = ROUND * NB;          // match buffer depth, bursts
  localparam int MBW   = $clog2(MBD + 1);
  localparam int CHW   = (NCH > 1) ? $clog2(NCH) : 1;

  // ------------------------------------------------------------------
  // channels and dies
  // ------------------------------------------------------------------
  logic [NCH-1:0]   c_req_valid, c_req_ready, c_wd_valid, c_wd_ready;
  chan_req_t        c_req   [NCH];
  logic [NCH-1:0]   c_rsp_valid, c_rsp_ready, c_idle, c_disc, c_fwd;
  chan_beat_t       c_rsp   [NCH];
  logic [$clog2(NDIE+1)-1:0] c_busy [NCH];

  for (genvar c = 0; c < NCH; c++) begin : g_ch
    logic [NDIE-1:0]       d_cmd_valid, d_cmd_ready, d_din_valid, d_dout_avail, d_release, d_busy;
    die_cmd_t              d_cmd;
    logic [BURST_BITS-1:0] d_din;
    logic [COL_W-1:0]      d_dout_sel;
    logic [BURST_BITS-1:0] d_dout [NDIE];

    flash_chan_ctrl #(.NDIES(NDIE), .NB(NB)) u_ch (
      .clk, .rst_n,
      .req_valid (c_req_valid[c]), .req_ready(c_req_ready[c]), .req(c_req[c]),
      .wd_valid  (c_wd_valid[c]),  .wd_ready (c_wd_ready[c]),  .wd_data(raw_wd_data),
      .rsp_valid (c_rsp_valid[c]), .rsp_ready(c_rsp_ready[c]), .rsp(c_rsp[c]),
      .d_cmd_valid, .d_cmd_ready, .d_cmd, .d_din_valid, .d_din,
      .d_dout_avail, .d_dout_sel, .d_dout, .d_release,
      .idle      (c_idle[c]), .et_discard(c_disc[c]), .et_forward(c_fwd[c]),
      .dies_busy (c_busy[c])
    );

    for (genvar d = 0; d < NDIE; d++) begin : g_die
      nand_die #(.PBITS(PBITS), .NBLOCKS(NBLOCKS), .T_READ(T_READ), .T_SRCH(T_SRCH),
                 .T_PROG(T_PROG), .T_ERASE(T_ERASE)) u_die (
        .clk, .rst_n,
        .cmd_valid (d_cmd_valid[d]), .cmd_ready(d_cmd_ready[d]), .cmd(d_cmd),
        .din_valid (d_din_valid[d]), .din(d_din),
        .dout_avail(d_dout_avail[d]), .dout_sel(d_dout_sel), .dout(d_dout[d]),
        .release_i (d_release[d]), .busy(d_busy[d])
      );
    end
  end

  // ------------------------------------------------------------------
  // link table
  // ------------------------------------------------------------------
  logic [$clog2(NRG)-1:0] rg_raddr;
  region_t                rg_rdata;
  logic [LT_W-1:0]        e_ptr, dec_lt_addr;
  link_entry_t            ent_a, ent_b;

  link_table #(.NENT(NLT), .NREG(NRG)) u_lt (
    .clk,
    .e_we(lt_we), .e_waddr(lt_waddr), .e_wdata(lt_wdata),
    .r_we(rg_we), .r_waddr(rg_waddr), .r_wdata(rg_wdata),
    .r_raddr(rg_raddr), .r_rdata(rg_rdata),
    .a_raddr($clog2(NLT)'(e_ptr)), .a_rdata(ent_a),
    .b_raddr($clog2(NLT)'(dec_lt_addr)), .b_rdata(ent_b)
  );

  // ------------------------------------------------------------------
  // search manager state
  // ------------------------------------------------------------------
  typedef enum logic [2:0] {T_IDLE, T_ISSUE, T_WAIT, T_DECODE, T_DRAIN, T_FLUSH, T_CPL} tstate_e;
  tstate_e state;

  host_op_e             op_q;
  region_t              rg_q;
  logic [ELEM_BITS-1:0] key_q, care_q;
  logic [31:0]          cap_q, skip_q;
  logic                 compact_q;
  logic [LT_W:0]        e_end, round_end;
  logic                 sub;               // DELETE: 0 = SRCH, 1 = PROG_INV
  logic [LT_W:0]        round_n, vec_done;
  logic [31:0]          n_match, delivered, reads_out, entries_back;
  logic                 overflow;
  // kept for Search Continue
  logic [ELEM_BITS-1:0] last_key, last_care;
  logic [RG_W-1:0]      last_region;
  logic [31:0]          last_done;

  logic [WORDLINES-1:0] wl_sel;
  srch_encoder #(.NBITS(ELEM_BITS)) u_enc (.key(key_q), .care(care_q), .wl_sel(wl_sel));

  assign rg_raddr  = (state == T_IDLE) ? $clog2(NRG)'(cmd.op == HC_CONT ? last_region : cmd.region)
                                       : $clog2(NRG)'(last_region);
  assign cmd_ready = (state == T_IDLE);

  // ------------------------------------------------------------------
  // match buffer and decoder
  // ------------------------------------------------------------------
  mburst_t          mbuf [MBD];
  logic [MBW-1:0]   mb_wr, mb_rd;
  logic             mb_in_valid, dec_mb_ready, dec_busy;
  mburst_t          mb_in;
  logic             m_valid, m_ready;
  match_t           m;

  match_decoder #(.NB(NB)) u_dec (
    .clk, .rst_n,
    .mb_valid    ((state == T_DECODE) && (mb_rd != mb_wr)),
    .mb_ready    (dec_mb_ready),
    .mb          (mbuf[mb_rd[$clog2(MBD)-1:0]]),
    .entry_bursts(rg_q.entry_bursts),
    .lt_addr     (dec_lt_addr),
    .lt_data     (ent_b),
    .m_valid, .m_ready, .m,
    .busy        (dec_busy)
  );

  // ------------------------------------------------------------------
  // requests to the channels
  // ------------------------------------------------------------------
  chan_req_t       eng_req;
  logic [CHW-1:0]  eng_ch;
  logic            eng_valid;
  logic            do_read;          // current match is fetched
  logic            m_skip;

  assign m_skip  = (n_match < skip_q);
  assign do_read = m_valid && !m_skip && (delivered < cap_q);

  always_comb begin
    eng_req   = '0;
    eng_valid = 1'b0;
    eng_ch    = '0;
    if (state == T_ISSUE) begin
      eng_valid           = 1'b1;
      eng_ch              = CHW'(ent_a.srch_blk.ch);
      eng_req.die         = ent_a.srch_blk.die;
      eng_req.cmd.plane   = ent_a.srch_blk.plane;
      eng_req.cmd.block   = ent_a.srch_blk.block;
      eng_req.tag         = TAG_W'(e_ptr);
      if (op_q == HC_DELETE && sub) begin
        eng_req.cmd.op = OP_PROG_INV;
        eng_req.cmd.wl = WL_W'(VALID_WL);
      end else begin
        eng_req.cmd.op     = OP_SRCH;
        eng_req.cmd.wl_sel = wl_sel;
        eng_req.xfer       = (op_q != HC_DELETE);
      end
    end else if (state == T_DECODE && do_read) begin
      eng_valid         = 1'b1;
      eng_ch            = CHW'(m.blk.ch);
      eng_req.die       = m.blk.die;
      eng_req.cmd.op    = OP_READ;
      eng_req.cmd.plane = m.blk.plane;
      eng_req.cmd.block = m.blk.block;
      eng_req.cmd.wl    = m.page;
      eng_req.col       = m.col;
      eng_req.len       = (COL_W+1)'(m.len);
      eng_req.xfer      = 1'b1;
      eng_req.tag       = TAG_W'(m.entry);
    end
  end

  logic eng_active, eng_fire;
  assign eng_active = (state != T_IDLE);
  assign eng_fire   = eng_valid && c_req_ready[eng_ch];
  assign m_ready    = (state == T_DECODE) && (!do_read || c_req_ready[eng_ch]);

  always_comb begin
    for (int c = 0; c < NCH; c++) begin
      c_req[c]       = eng_active ? eng_req : raw_req;
      c_req_valid[c] = eng_active ? (eng_valid && eng_ch == CHW'(c))
                                  : (raw_valid && raw_ch == CH_W'(c));
      c_wd_valid[c]  = raw_wd_valid && raw_wd_ch == CH_W'(c);
    end
  end
  assign raw_ready    = !eng_active && c_req_ready[CHW'(raw_ch)];
  assign raw_wd_ready = c_wd_ready[CHW'(raw_wd_ch)];

  // ------------------------------------------------------------------
  // returned beats: one arbiter, held on a channel until its last beat
  // ------------------------------------------------------------------
  logic            arb_lock;
  logic [CHW-1:0]  arb_sel, arb_rr, arb_pick;
  chan_beat_t      beat;
  logic            beat_valid, beat_ready;
  logic            cp_in_valid, cp_in_ready, cp_flush, cp_busy;
  logic [31:0]     cp_blocks;

  always_comb begin
    arb_pick = arb_rr;
    for (int k = NCH - 1; k >= 0; k--) begin
      automatic int c = (int'(arb_rr) + k) % NCH;
      if (c_rsp_valid[c]) arb_pick = CHW'(c);
    end
  end

  logic [CHW-1:0] arb_cur;
  assign arb_cur    = arb_lock ? arb_sel : arb_pick;
  assign beat       = c_rsp[arb_cur];
  assign beat_valid = c_rsp_valid[arb_cur];

  logic to_raw, to_mbuf;
  assign to_raw  = beat.tag[TAG_W-1];
  assign to_mbuf = !to_raw && beat.srch;
  assign beat_ready = to_raw ? raw_rd_ready : (to_mbuf ? 1'b1 : cp_in_ready);

  always_comb begin
    c_rsp_ready = '0;
    c_rsp_ready[arb_cur] = beat_ready;
  end

  assign raw_rd_valid = beat_valid && to_raw;
  assign raw_rd       = beat;
  assign mb_in_valid  = beat_valid && to_mbuf;
  always_comb begin
    mb_in        = '0;
    mb_in.entry  = beat.tag[LT_W-1:0];
    mb_in.data   = beat.data;
    mb_in.zcount = beat.idx;
    mb_in.last   = beat.last;
  end
  assign cp_in_valid = beat_valid && !to_raw && !beat.srch;

  result_compactor #(.HB(NB)) u_cp (
    .clk, .rst_n,
    .compact (compact_q), .clear(state == T_IDLE && cmd_valid), .flush(cp_flush),
    .in_valid(cp_in_valid), .in_ready(cp_in_ready), .in_data(beat.data), .in_last(beat.last),
    .out_valid(hd_valid), .out_ready(hd_ready), .out_data(hd_data), .out_last(hd_last),
    .busy(cp_busy), .blocks(cp_blocks)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      arb_lock <= 1'b0;
      arb_sel  <= '0;
      arb_rr   <= '0;
    end else if (beat_valid && beat_ready) begin
      arb_lock <= !beat.last;
      arb_sel  <= arb_cur;
      if (beat.last) arb_rr <= (arb_cur == CHW'(NCH - 1)) ? '0 : arb_cur + 1'b1;
    end
  end

  always_ff @(posedge clk)
    if (mb_in_valid) mbuf[mb_wr[$clog2(MBD)-1:0]] <= mb_in;

  // ------------------------------------------------------------------
  // statistics
  // ------------------------------------------------------------------
  logic [7:0] busy_now;
  logic [7:0] disc_now;
  always_comb begin
    busy_now = '0;
    disc_now = '0;
    for (int c = 0; c < NCH; c++) begin
      busy_now = busy_now + 8'(c_busy[c]);
      disc_now = disc_now + 8'(c_disc[c]);
    end
  end

  assign idle = (state == T_IDLE) && (&c_idle);

  // ------------------------------------------------------------------
  // scheduler
  // ------------------------------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= T_IDLE;
      op_q         <= HC_SEARCH;
      rg_q         <= '0;
      key_q        <= '0;
      care_q       <= '0;
      cap_q        <= '0;
      skip_q       <= '0;
      compact_q    <= 1'b1;
      e_ptr        <= '0;
      e_end        <= '0;
      round_end    <= '0;
      sub          <= 1'b0;
      round_n      <= '0;
      vec_done     <= '0;
      n_match      <= '0;
      delivered    <= '0;
      reads_out    <= '0;
      entries_back <= '0;
      overflow     <= 1'b0;
      last_key     <= '0;
      last_care    <= '0;
      last_region  <= '0;
      last_done    <= '0;
      mb_wr        <= '0;
      mb_rd        <= '0;
      cp_flush     <= 1'b0;
      cpl_valid    <= 1'b0;
      cpl          <= '0;
      stats        <= '0;
    end else begin
      cpl_valid <= 1'b0;
      cp_flush  <= 1'b0;

      // beats into the match buffer and entries back from the data region
      if (mb_in_valid) begin
        mb_wr <= mb_wr + 1'b1;
        if (beat.last) vec_done <= vec_done + 1'b1;
        if (beat.data != '0) stats.bursts_kept <= stats.bursts_kept + 1;
      end
      if (cp_in_valid && cp_in_ready && beat.last) entries_back <= entries_back + 1;
      if (dec_mb_ready && state == T_DECODE && mb_rd != mb_wr) mb_rd <= mb_rd + 1'b1;
      stats.bursts_dropped <= stats.bursts_dropped + 32'(disc_now);
      if (busy_now > stats.max_dies_busy) stats.max_dies_busy <= busy_now;

      case (state)
        T_IDLE: if (cmd_valid) begin
          op_q         <= cmd.op;
          rg_q         <= rg_rdata;
          cap_q        <= cmd.capacity;
          compact_q    <= cmd.compact;
          n_match      <= '0;
          delivered    <= '0;
          reads_out    <= '0;
          entries_back <= '0;
          overflow     <= 1'b0;
          e_ptr        <= rg_rdata.first;
          e_end        <= (LT_W+1)'(rg_rdata.first) + rg_rdata.count;
          round_end    <= (LT_W+1)'(rg_rdata.first) +
                          (((int'(rg_rdata.count) < ROUND) ? rg_rdata.count : (LT_W+1)'(ROUND)));
          sub          <= 1'b0;
          round_n      <= '0;
          vec_done     <= '0;
          mb_wr        <= '0;
          mb_rd        <= '0;
          if (cmd.op == HC_CONT) begin
            key_q  <= last_key;
            care_q <= last_care;
            skip_q <= last_done;
          end else begin
            key_q       <= cmd.key;
            care_q      <= cmd.care;
            skip_q      <= '0;
            last_key    <= cmd.key;
            last_care   <= cmd.care;
            last_region <= cmd.region;
          end
          stats.rounds <= stats.rounds + 1;
          state <= (rg_rdata.count == '0) ? T_DRAIN : T_ISSUE;
        end

        T_ISSUE: if (eng_fire) begin
          if (op_q == HC_DELETE && !sub) begin
            sub <= 1'b1;
            stats.srch_cmds <= stats.srch_cmds + 1;
          end else begin
            sub     <= 1'b0;
            e_ptr   <= e_ptr + 1'b1;
            round_n <= round_n + 1'b1;
            if (op_q == HC_DELETE) stats.invalidations <= stats.invalidations + 1;
            else                   stats.srch_cmds <= stats.srch_cmds + 1;
            if ((LT_W+1)'(e_ptr) + 1'b1 == round_end) state <= T_WAIT;
          end
        end

        T_WAIT: begin
          if (op_q == HC_DELETE) begin
            if (&c_idle) begin
              if ((LT_W+1)'(e_ptr) == e_end) state <= T_CPL;
              else begin
                round_n   <= '0;
                round_end <= ((e_end - (LT_W+1)'(e_ptr)) > (LT_W+1)'(ROUND)) ?
                             (LT_W+1)'(e_ptr) + (LT_W+1)'(ROUND) : e_end;
                stats.rounds <= stats.rounds + 1;
                state <= T_ISSUE;
              end
            end
          end else if (vec_done == round_n && !(mb_in_valid && beat.last)) begin
            state <= T_DECODE;
          end
        end

        T_DECODE: begin
          if (m_valid && m_ready) begin
            n_match <= n_match + 1;
            if (do_read) begin
              delivered <= delivered + 1;
              reads_out <= reads_out + 1;
              stats.entry_reads <= stats.entry_reads + 1;
            end else if (!m_skip) begin
              overflow <= 1'b1;
            end
          end
          if (mb_rd == mb_wr && !dec_busy && !(dec_mb_ready && mb_rd != mb_wr)) begin
            if ((LT_W+1)'(e_ptr) == e_end) state <= T_DRAIN;
            else begin
              round_n   <= '0;
              vec_done  <= '0;
              mb_wr     <= '0;
              mb_rd     <= '0;
              round_end <= ((e_end - (LT_W+1)'(e_ptr)) > (LT_W+1)'(ROUND)) ?
                           (LT_W+1)'(e_ptr) + (LT_W+1)'(ROUND) : e_end;
              stats.rounds <= stats.rounds + 1;
              state <= T_ISSUE;
            end
          end
        end

        T_DRAIN: if (entries_back == reads_out && !cp_in_valid) begin
          cp_flush <= 1'b1;
          state    <= T_FLUSH;
        end

        T_FLUSH: if (!cp_busy && !cp_flush) state <= T_CPL;

        T_CPL: begin
          cpl_valid     <= 1'b1;
          cpl.n_match   <= n_match;
          cpl.delivered <= delivered;
          cpl.blocks    <= cp_blocks;
          cpl.overflow  <= overflow;
          if (op_q != HC_DELETE) last_done <= skip_q + delivered;
          state <= T_IDLE;
        end

        default: state <= T_IDLE;
      endcase
    end
  end

  // The match buffer holds a whole round; it can never overflow.
  always_ff @(posedge clk)
    if (rst_n && mb_in_valid) assert (int'(mb_wr) < MBD) else $error("match buffer overflow");

endmodule
