// tb_tcam_ssd_full: the back end at its full default size (8 channels x 8
// dies, 16 KB pages of 131,072 bitlines, 196 wordlines, 97-bit elements, the
// evaluated flash latencies in 100 MHz cycles), with a short scenario:
// three search blocks on three dies, each holding 64 valid 4-bit elements
// (value = index mod 16) in wordlines 0..7 written by program plus write
// inversion, the remaining 89 bit pairs left erased (stored don't-care), and
// one data page of 1-burst entries per block. One exact search must return
// the 12 matching entries, in one compacted host block of 2,048 bursts, after
// at least one search latency, with early termination dropping the empty
// bursts of the 16 KB match vectors (all but the first, which holds the
// matches, and the last, which always leaves) and the three dies searching
// together.
module tb_tcam_ssd_full;
  import tcam_pkg::*;
  localparam int NB = PAGE_BURSTS;
  localparam int NSB = 3;
  localparam int NVALID = 64;
  localparam int KBITS = 4;
  localparam logic [3:0] KEY = 4'hA;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic lt_we, rg_we, cmd_valid, cmd_ready, cpl_valid, hd_valid, hd_ready, hd_last;
  logic [LT_W-1:0] lt_waddr;
  link_entry_t lt_wdata;
  logic [RG_W-1:0] rg_waddr;
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

  tcam_ssd dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic blk_addr_t sblk(int s);
    blk_addr_t a;
    a = '0; a.ch = CH_W'(s % 2); a.die = DIE_W'(s / 2); a.plane = 1'b1;
    return a;
  endfunction
  function automatic blk_addr_t dblk(int s);
    blk_addr_t a;
    a = sblk(s); a.plane = 1'b0;
    return a;
  endfunction
  function automatic logic [63:0] entry_burst(int s, int i);
    return {16'hDA7A, 16'(s), 32'(i)};
  endfunction

  logic [63:0] hq [$];
  int hblocks = 0;
  always @(posedge clk) begin
    hd_ready <= 1'b1;
    if (hd_valid && hd_ready) begin
      hq.push_back(hd_data);
      if (hd_last) hblocks++;
    end
  end

  task automatic raw_cmd(input blk_addr_t a, input flash_op_e op, input int wl);
    @(negedge clk);
    raw_req = '0; raw_req.cmd.op = op; raw_req.cmd.plane = a.plane; raw_req.cmd.block = a.block;
    raw_req.cmd.wl = WL_W'(wl); raw_req.die = a.die; raw_req.tag = {1'b1, LT_W'(0)};
    raw_ch = a.ch; raw_valid = 1;
    #1; while (!raw_ready) begin @(negedge clk); #1; end
    @(negedge clk); raw_valid = 0;
  endtask

  // program one page; p holds bit b of element e at p[e]
  task automatic raw_prog(input blk_addr_t a, input int wl, input logic [PAGE_BITS-1:0] p);
    fork
      raw_cmd(a, OP_PROG, wl);
      begin
        for (int b = 0; b < NB; b++) begin
          @(negedge clk); raw_wd_valid = 1; raw_wd_ch = a.ch; raw_wd_data = p[b*64 +: 64];
          #1; while (!raw_wd_ready) begin @(negedge clk); #1; end
        end
        @(negedge clk); raw_wd_valid = 0;
      end
    join
  endtask

  logic [PAGE_BITS-1:0] pg;
  int t0, t1;
  int exp_n;
  initial begin
    lt_we = 0; rg_we = 0; lt_waddr = '0; lt_wdata = '0; rg_waddr = '0; rg_wdata = '0;
    cmd_valid = 0; cmd = '0; raw_valid = 0; raw_req = '0; raw_ch = '0; raw_wd_valid = 0;
    raw_wd_ch = '0; raw_wd_data = '0; raw_rd_ready = 1;
    repeat (3) @(negedge clk);
    rst_n = 1;

    // search blocks, bit by bit across the three dies so that they program together
    for (int j = 0; j < KBITS; j++)
      for (int s = 0; s < NSB; s++) begin
        pg = '1;
        for (int i = 0; i < NVALID; i++) pg[i] = 1'((i % 16) >> j);
        raw_prog(sblk(s), 2 * j, pg);
        raw_cmd(sblk(s), OP_PROG_INV, 2 * j + 1);
      end
    for (int s = 0; s < NSB; s++) begin
      pg = '0;
      for (int i = 0; i < NVALID; i++) pg[i] = 1'b1;
      raw_prog(sblk(s), VALID_WL, pg);
    end
    for (int s = 0; s < NSB; s++) begin
      for (int b = 0; b < NB; b++) pg[b*64 +: 64] = entry_burst(s, b);
      raw_prog(dblk(s), 0, pg);
      @(negedge clk);
      lt_we = 1; lt_waddr = LT_W'(s);
      lt_wdata = '0; lt_wdata.srch_blk = sblk(s); lt_wdata.data_blk = dblk(s);
      @(negedge clk); lt_we = 0;
    end
    @(negedge clk);
    rg_we = 1; rg_waddr = '0; rg_wdata = '0; rg_wdata.count = (LT_W+1)'(NSB); rg_wdata.entry_bursts = 8'd1;
    @(negedge clk); rg_we = 0;
    @(negedge clk); #1; while (!idle) begin @(negedge clk); #1; end
    $display("load done at cycle %0d", $time / 10);

    @(negedge clk);
    cmd = '0; cmd.op = HC_SEARCH; cmd.key = ELEM_BITS'(KEY); cmd.care = ELEM_BITS'(4'hF);
    cmd.capacity = 1000; cmd.compact = 1'b1; cmd_valid = 1;
    #1; while (!cmd_ready) begin @(negedge clk); #1; end
    t0 = $time / 10;
    @(negedge clk); cmd_valid = 0;
    #1; while (!cpl_valid) begin @(negedge clk); #1; end
    t1 = $time / 10;
    repeat (20) @(negedge clk);

    exp_n = NSB * (NVALID / 16);
    $display("search: %0d matches, %0d host blocks, %0d cycles, %0d bursts dropped, %0d dies at once",
             cpl.n_match, cpl.blocks, t1 - t0, stats.bursts_dropped, stats.max_dies_busy);
    check(cpl.n_match == exp_n && cpl.delivered == exp_n && !cpl.overflow, "match count");
    check(cpl.blocks == 1 && hblocks == 1 && hq.size() == NB, "one compacted host block");
    begin
      int k = 0;
      for (int s = 0; s < NSB; s++)
        for (int i = 0; i < NVALID; i++)
          if ((i % 16) == int'(KEY)) begin
            check(k < hq.size() && hq[k] == entry_burst(s, i), $sformatf("entry %0d", k));
            k++;
          end
      for (; k < hq.size(); k++) if (hq[k] != 64'd0) begin check(0, "padding is zero"); break; end
    end
    check(t1 - t0 >= T_SRCH_CYC + T_READ_CYC, "search and entry read latencies");
    check(stats.bursts_dropped == NSB * (NB - 2), "early termination dropped empty bursts");
    check(stats.max_dies_busy >= NSB, "dies searched in parallel");
    check(stats.rounds == 1, "one round");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
