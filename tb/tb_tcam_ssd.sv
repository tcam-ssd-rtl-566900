// tb_tcam_ssd: end-to-end test of the back end at reduced size (2 channels x
// 2 dies, 1 Kbit pages, short flash latencies). The testbench plays the
// firmware: through the raw port it writes six search blocks transposed
// (wordline 2i by program, 2i+1 by write inversion, valid wordline last) and
// their data regions (entries of 2 bursts that name their block and element),
// and fills the link table. Then, through the host command port:
//   1. an exact search, compaction on: every matching entry, and nothing else,
//      reaches the host, packed into ceil(2n/16) host blocks; two rounds are
//      needed because the region has more blocks than dies;
//   2. the same search, compaction off: one host block per entry;
//   3. a search with a 3-entry host buffer: overflow flag, 3 entries; then
//      Search Continue: the remaining entries, no overflow, no repeats;
//   4. a ternary search (don't-care bits): matches equal the reference;
//   5. Delete, then the exact search again: no matches, other keys intact;
//   6. a conventional raw read of a data page.
// Each mechanism is counted and must occur at least once: early-termination
// drops, kept bursts, search rounds > 1, dies searching in parallel, write
// inversion, overflow, continue, compaction on and off, delete, raw read.
module tb_tcam_ssd;
  import tcam_pkg::*;
  localparam int NCH = 2, NDIE = 2, PB = 1024, NB = PB / 64, NBLK = 2;
  localparam int TR = 20, TS = 220, TP = 30, TE = 40;
  localparam int NLT = 64, NRG = 8;
  localparam int NSB = 6;             // search blocks in region 0
  localparam int EB = 2;              // data entry size, bursts
  localparam int NVALID = 1000;       // valid elements per search block
  localparam int KBITS = 16;          // programmed key bits; the rest stay X
  localparam logic [15:0] K1 = 16'hBEEF;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic lt_we, rg_we, cmd_valid, cmd_ready, cpl_valid, hd_valid, hd_ready, hd_last;
  logic [$clog2(NLT)-1:0] lt_waddr;
  link_entry_t lt_wdata;
  logic [$clog2(NRG)-1:0] rg_waddr;
  region_t rg_wdata;
  host_cmd_t cmd;
  cpl_t cpl;
  logic [63:0] hd_data;
  logic raw_valid, raw_ready, raw_wd_valid, raw_wd_ready, raw_rd_valid, raw_rd_ready, idle;
  logic [CH_W-1:0] raw_ch, raw_wd_ch;
  chan_req_t raw_req;
  logic [63:0] raw_wd_data;
  chan_beat_t raw_rd;
  stats_t stats;

  tcam_ssd #(.NCH(NCH), .NDIE(NDIE), .PBITS(PB), .NBLOCKS(NBLK), .T_READ(TR), .T_SRCH(TS),
             .T_PROG(TP), .T_ERASE(TE), .NLT(NLT), .NRG(NRG)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // ---------------- placement ----------------
  function automatic blk_addr_t sblk(int s);   // search block s
    blk_addr_t a;
    a = '0; a.ch = CH_W'(s % NCH); a.die = DIE_W'((s / NCH) % NDIE); a.plane = 1'b1;
    a.block = BLK_W'(s / (NCH * NDIE));
    return a;
  endfunction
  function automatic blk_addr_t dblk(int s);   // its data block
    blk_addr_t a;
    a = sblk(s); a.plane = 1'b0;
    return a;
  endfunction

  logic [15:0] elem [NSB][PB];
  function automatic logic [63:0] entry_burst(int s, int i, int b);
    return {16'hDA7A, 8'(s), 8'(b), 32'(i)};
  endfunction

  // ---------------- host data collector ----------------
  logic [63:0] hq [$];
  int          hblocks_seen = 0, hlast_ok = 1;
  always @(posedge clk) begin
    hd_ready <= ($urandom_range(0, 4) != 0);
    if (hd_valid && hd_ready) begin
      hq.push_back(hd_data);
      if (hd_last) begin
        hblocks_seen++;
        if (hq.size() % NB != 0) hlast_ok = 0;
      end
    end
  end
  logic [63:0] rawq [$];
  always @(posedge clk) if (raw_rd_valid && raw_rd_ready) rawq.push_back(raw_rd.data);

  // ---------------- raw port ----------------
  task automatic raw_cmd(input blk_addr_t a, input flash_op_e op, input int wl, input bit xfer,
                         input int col, input int len);
    @(negedge clk);
    raw_req = '0; raw_req.cmd.op = op; raw_req.cmd.plane = a.plane; raw_req.cmd.block = a.block;
    raw_req.cmd.wl = WL_W'(wl); raw_req.die = a.die; raw_req.xfer = xfer;
    raw_req.col = COL_W'(col); raw_req.len = (COL_W+1)'(len); raw_req.tag = {1'b1, LT_W'(0)};
    raw_ch = a.ch; raw_valid = 1;
    #1; while (!raw_ready) begin @(negedge clk); #1; end
    @(negedge clk); raw_valid = 0;
  endtask

  task automatic raw_prog(input blk_addr_t a, input int wl, input logic [PB-1:0] p);
    fork
      raw_cmd(a, OP_PROG, wl, 0, 0, 0);
      begin
        for (int b = 0; b < NB; b++) begin
          @(negedge clk); raw_wd_valid = 1; raw_wd_ch = a.ch; raw_wd_data = p[b*64 +: 64];
          #1; while (!raw_wd_ready) begin @(negedge clk); #1; end
        end
        @(negedge clk); raw_wd_valid = 0;
      end
    join
  endtask

  task automatic wait_idle();
    @(negedge clk); #1; while (!idle) begin @(negedge clk); #1; end
  endtask

  // ---------------- host commands ----------------
  int t_start, t_end;
  task automatic host(input host_op_e op, input logic [15:0] key, input logic [15:0] care,
                      input int cap, input bit comp);
    @(negedge clk);
    cmd = '0; cmd.op = op; cmd.region = '0; cmd.key = ELEM_BITS'(key); cmd.care = ELEM_BITS'(care);
    cmd.capacity = cap; cmd.compact = comp; cmd_valid = 1;
    #1; while (!cmd_ready) begin @(negedge clk); #1; end
    t_start = $time / 10;
    @(negedge clk); cmd_valid = 0;
    #1; while (!cpl_valid) begin @(negedge clk); #1; end
    t_end = $time / 10;
    repeat (5) @(negedge clk);
  endtask

  // entries in the host stream, as (s << 16 | i); zero bursts are padding
  task automatic take_entries(output int ents [$]);
    ents.delete();
    for (int k = 0; k + 1 < hq.size(); ) begin
      if (hq[k] == 64'd0) begin k++; continue; end
      if (hq[k][63:48] == 16'hDA7A && hq[k][39:32] == 8'd0 &&
          hq[k+1] == entry_burst(int'(hq[k][47:40]), int'(hq[k][31:0]), 1))
        ents.push_back(int'(hq[k][47:40]) << 16 | int'(hq[k][31:0]));
      else begin
        failures++; $display("FAIL malformed entry at burst %0d: %h %h", k, hq[k], hq[k+1]);
      end
      k += 2;
    end
    hq.delete();
  endtask

  function automatic bit elem_match(int s, int i, logic [15:0] key, logic [15:0] care, bit deleted_k1);
    if (i >= NVALID) return 0;
    if (deleted_k1 && elem[s][i] == K1) return 0;
    return (elem[s][i] & care) == (key & care);
  endfunction

  task automatic expect_set(input int got [$], input logic [15:0] key, input logic [15:0] care,
                            input bit del, input string what);
    int exp [$];
    for (int s = 0; s < NSB; s++)
      for (int i = 0; i < PB; i++)
        if (elem_match(s, i, key, care, del)) exp.push_back(s << 16 | i);
    got.sort(); exp.sort();
    check(got.size() == exp.size(), $sformatf("%s: %0d entries, expected %0d", what, got.size(), exp.size()));
    if (got.size() == exp.size())
      for (int k = 0; k < got.size(); k++)
        if (got[k] != exp[k]) begin
          check(0, $sformatf("%s: entry %0d is %h, expected %h", what, k, got[k], exp[k]));
          break;
        end
  endtask

  int n_overflow = 0, n_cont = 0, n_compact = 0, n_nocompact = 0, n_delete = 0, n_raw = 0, n_inv = 0;
  int nk1;
  int ents [$];
  int ents2 [$];

  initial begin
    lt_we = 0; rg_we = 0; lt_waddr = '0; lt_wdata = '0; rg_waddr = '0; rg_wdata = '0;
    cmd_valid = 0; cmd = '0; raw_valid = 0; raw_req = '0; raw_ch = '0; raw_wd_valid = 0;
    raw_wd_ch = '0; raw_wd_data = '0; raw_rd_ready = 1;
    repeat (3) @(negedge clk);
    rst_n = 1;

    // ---- elements: random, never K1 except planted copies ----
    nk1 = 0;
    for (int s = 0; s < NSB; s++)
      for (int i = 0; i < PB; i++) begin
        elem[s][i] = 16'($urandom());
        if (elem[s][i] == K1) elem[s][i] = 16'h0001;
        if (i % 89 == 7 || (s == 3 && i == NVALID + 2)) elem[s][i] = K1;   // one invalid copy
        if (i < NVALID && elem[s][i] == K1) nk1++;
      end

    // ---- firmware: write search blocks transposed, with write inversion ----
    for (int s = 0; s < NSB; s++) begin
      logic [PB-1:0] p;
      for (int j = 0; j < KBITS; j++) begin
        for (int i = 0; i < PB; i++) p[i] = elem[s][i][j];
        raw_prog(sblk(s), 2 * j, p);
        raw_cmd(sblk(s), OP_PROG_INV, 2 * j + 1, 0, 0, 0);
        n_inv++;
      end
      for (int i = 0; i < PB; i++) p[i] = (i < NVALID);
      raw_prog(sblk(s), VALID_WL, p);
      // data region: entry i at burst offset 2i
      for (int pg = 0; pg < PB * EB / NB; pg++) begin
        for (int b = 0; b < NB; b++) begin
          automatic int off = pg * NB + b;
          p[b*64 +: 64] = entry_burst(s, off / EB, off % EB);
        end
        raw_prog(dblk(s), pg, p);
      end
      // link table
      @(negedge clk);
      lt_we = 1; lt_waddr = 6'(s);
      lt_wdata = '0; lt_wdata.srch_blk = sblk(s); lt_wdata.data_blk = dblk(s); lt_wdata.data_page = '0;
      @(negedge clk); lt_we = 0;
    end
    @(negedge clk);
    rg_we = 1; rg_waddr = '0; rg_wdata = '0; rg_wdata.first = '0; rg_wdata.count = (LT_W+1)'(NSB);
    rg_wdata.entry_bursts = EB_W'(EB);
    @(negedge clk); rg_we = 0;
    wait_idle();
    $display("firmware load done at cycle %0d, %0d K1 copies", $time / 10, nk1);

    // ---- 1. exact search, compaction on ----
    hq.delete(); hblocks_seen = 0;
    host(HC_SEARCH, K1, 16'hFFFF, 100000, 1);
    repeat (50) @(negedge clk);
    take_entries(ents);
    expect_set(ents, K1, 16'hFFFF, 0, "exact search");
    check(cpl.n_match == nk1 && cpl.delivered == nk1 && !cpl.overflow, "exact search completion");
    check(cpl.blocks == (nk1 * EB + NB - 1) / NB, $sformatf("compacted blocks %0d", cpl.blocks));
    check(hblocks_seen == int'(cpl.blocks) && hlast_ok, "host block boundaries");
    check(t_end - t_start >= 2 * TS, $sformatf("two search rounds take >= 2 x T_SRCH (%0d cycles)", t_end - t_start));
    n_compact++;
    $display("exact search: %0d matches, %0d host blocks, %0d cycles", cpl.n_match, cpl.blocks, t_end - t_start);

    // ---- 2. compaction off ----
    hblocks_seen = 0;
    host(HC_SEARCH, K1, 16'hFFFF, 100000, 0);
    repeat (50) @(negedge clk);
    take_entries(ents);
    expect_set(ents, K1, 16'hFFFF, 0, "uncompacted search");
    check(cpl.blocks == nk1, $sformatf("one block per entry without compaction (%0d)", cpl.blocks));
    n_nocompact++;

    // ---- 3. overflow, then Search Continue ----
    host(HC_SEARCH, K1, 16'hFFFF, 3, 1);
    repeat (50) @(negedge clk);
    take_entries(ents);
    check(cpl.overflow && cpl.delivered == 3 && ents.size() == 3, "overflow with 3-entry buffer");
    if (cpl.overflow) n_overflow++;
    host(HC_CONT, 16'h0, 16'h0, 100000, 1);
    repeat (50) @(negedge clk);
    take_entries(ents2);
    check(!cpl.overflow && cpl.delivered == nk1 - 3, $sformatf("continue delivered %0d", cpl.delivered));
    n_cont++;
    foreach (ents2[k]) ents.push_back(ents2[k]);
    expect_set(ents, K1, 16'hFFFF, 0, "search + continue");

    // ---- 4. ternary search ----
    host(HC_SEARCH, 16'hB0E0, 16'hF0F3, 100000, 1);
    repeat (50) @(negedge clk);
    take_entries(ents);
    expect_set(ents, 16'hB0E0, 16'hF0F3, 0, "ternary search");
    $display("ternary search: %0d matches", cpl.n_match);

    // ---- 5. delete ----
    host(HC_DELETE, K1, 16'hFFFF, 0, 1);
    n_delete++;
    host(HC_SEARCH, K1, 16'hFFFF, 100000, 1);
    repeat (50) @(negedge clk);
    take_entries(ents);
    check(cpl.n_match == 0 && ents.size() == 0, "nothing left after delete");
    host(HC_SEARCH, 16'hB0E0, 16'hF0F3, 100000, 1);
    repeat (50) @(negedge clk);
    take_entries(ents);
    expect_set(ents, 16'hB0E0, 16'hF0F3, 1, "ternary search after delete");

    // ---- 6. conventional read ----
    rawq.delete();
    raw_cmd(dblk(4), OP_READ, 3, 1, 2, 5);
    wait_idle();
    repeat (10) @(negedge clk);
    check(rawq.size() == 5, "raw read length");
    for (int b = 0; b < 5 && b < rawq.size(); b++) begin
      automatic int off = 3 * NB + 2 + b;
      check(rawq[b] == entry_burst(4, off / EB, off % EB), "raw read data");
    end
    n_raw++;

    // ---- mechanisms ----
    $display("stats: srch=%0d dropped=%0d kept=%0d reads=%0d rounds=%0d inval=%0d max_dies=%0d",
             stats.srch_cmds, stats.bursts_dropped, stats.bursts_kept, stats.entry_reads,
             stats.rounds, stats.invalidations, stats.max_dies_busy);
    $display("mechanisms: write_inversion=%0d overflow=%0d continue=%0d compact=%0d no_compact=%0d delete=%0d raw_read=%0d",
             n_inv, n_overflow, n_cont, n_compact, n_nocompact, n_delete, n_raw);
    check(stats.bursts_dropped > 0, "early termination dropped bursts");
    check(stats.bursts_kept > 0, "tagged bursts kept");
    check(stats.rounds > 7, "multi-round searches");
    check(stats.max_dies_busy >= 2, "dies searched in parallel");
    check(stats.invalidations == NSB, "one invalidation per search block");
    check(n_inv > 0 && n_overflow > 0 && n_cont > 0 && n_compact > 0 && n_nocompact > 0 &&
          n_delete > 0 && n_raw > 0, "every mechanism exercised");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
