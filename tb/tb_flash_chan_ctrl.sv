// tb_flash_chan_ctrl: one channel controller with NDIES small nand_die models.
// Elements are written transposed into a block of every die through PROG
// (with program data on the bus) and PROG_INV (write inversion). Then:
//  - SRCH on all dies back to back: the dies must search at the same time
//    (dies_busy reaches NDIES, total time well under NDIES x T_SRCH), and the
//    match vector rebuilt from the early-terminated beats (position = tag +
//    bursts already forwarded) must equal the reference ternary match;
//    all-zero bursts must have been dropped;
//  - READ with a column window returns exactly those bursts;
//  - SRCH with xfer=0 followed by PROG_INV on the valid wordline deletes the
//    matches.
module tb_flash_chan_ctrl;
  import tcam_pkg::*;
  localparam int ND = 4, PB = 1024, NB = PB / 64, NBITS = 12;
  localparam int TR = 30, TS = 300, TP = 40, TE = 60;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic req_valid, req_ready, wd_valid, wd_ready, rsp_valid, rsp_ready, idle, et_discard, et_forward;
  chan_req_t req;
  logic [63:0] wd_data;
  chan_beat_t rsp;
  logic [ND-1:0] d_cmd_valid, d_cmd_ready, d_din_valid, d_dout_avail, d_release, d_busy;
  die_cmd_t d_cmd;
  logic [63:0] d_din;
  logic [COL_W-1:0] d_dout_sel;
  logic [63:0] d_dout [ND];
  logic [$clog2(ND+1)-1:0] dies_busy;

  flash_chan_ctrl #(.NDIES(ND), .NB(NB)) dut (.*);

  for (genvar d = 0; d < ND; d++) begin : g_die
    nand_die #(.PBITS(PB), .NBLOCKS(2), .T_READ(TR), .T_SRCH(TS), .T_PROG(TP), .T_ERASE(TE)) u_die (
      .clk, .rst_n, .cmd_valid(d_cmd_valid[d]), .cmd_ready(d_cmd_ready[d]), .cmd(d_cmd),
      .din_valid(d_din_valid[d]), .din(d_din), .dout_avail(d_dout_avail[d]), .dout_sel(d_dout_sel),
      .dout(d_dout[d]), .release_i(d_release[d]), .busy(d_busy[d]));
  end

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // ---------------- response collector ----------------
  logic [PB-1:0] mv [ND];          // rebuilt match vectors, by tag
  int            fwd [ND];         // bursts forwarded so far in the vector
  bit            vdone [ND];
  logic [63:0]   rd_data [$];
  int            n_disc = 0, max_busy = 0;
  always @(posedge clk) begin
    rsp_ready <= ($urandom_range(0, 3) != 0);
    if (et_discard) n_disc++;
    if (int'(dies_busy) > max_busy) max_busy = int'(dies_busy);
    if (rsp_valid && rsp_ready) begin
      if (rsp.srch) begin
        automatic int t = int'(rsp.tag);
        automatic int pos = int'(rsp.idx) + fwd[t];
        mv[t][pos*64 +: 64] = rsp.data;
        if (rsp.data != 0) fwd[t]++;
        if (rsp.last) vdone[t] = 1;
      end else begin
        rd_data.push_back(rsp.data);
      end
    end
  end

  task automatic send(input chan_req_t r);
    @(negedge clk);
    req = r; req_valid = 1;
    #1; while (!req_ready) begin @(negedge clk); #1; end
    @(negedge clk); req_valid = 0;
  endtask

  task automatic prog(input int die, input int wl, input logic [PB-1:0] p);
    chan_req_t r;
    r = '0; r.cmd.op = OP_PROG; r.cmd.wl = WL_W'(wl); r.die = DIE_W'(die);
    fork
      send(r);
      begin
        for (int b = 0; b < NB; b++) begin
          @(negedge clk); wd_valid = 1; wd_data = p[b*64 +: 64];
          #1; while (!wd_ready) begin @(negedge clk); #1; end
        end
        @(negedge clk); wd_valid = 0;
      end
    join
  endtask

  task automatic simple(input flash_op_e op, input int die, input int wl, input logic [WORDLINES-1:0] sel,
                        input bit xfer, input int tag, input int col, input int len);
    chan_req_t r;
    r = '0; r.cmd.op = op; r.cmd.wl = WL_W'(wl); r.cmd.wl_sel = sel; r.die = DIE_W'(die);
    r.xfer = xfer; r.tag = TAG_W'(tag); r.col = COL_W'(col); r.len = (COL_W+1)'(len);
    send(r);
  endtask

  function automatic logic [WORDLINES-1:0] enc(logic [NBITS-1:0] key, logic [NBITS-1:0] care);
    logic [WORDLINES-1:0] s;
    s = '0;
    for (int j = 0; j < NBITS; j++) begin
      s[2*j] = care[j] & key[j]; s[2*j+1] = care[j] & ~key[j];
    end
    s[WORDLINES-1] = 1'b1;
    return s;
  endfunction

  task automatic wait_idle();
    @(negedge clk); #1; while (!idle) begin @(negedge clk); #1; end
  endtask

  logic [NBITS-1:0] elem [ND][PB];
  logic [PB-1:0]    valid [ND];
  logic [PB-1:0]    expv;
  logic [PB-1:0]    page;
  int t0, t1;

  initial begin
    req_valid = 0; req = '0; wd_valid = 0; wd_data = '0;
    for (int d = 0; d < ND; d++) begin fwd[d] = 0; vdone[d] = 0; mv[d] = '0; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    // sparse data: most elements differ from the searched key
    for (int d = 0; d < ND; d++) begin
      for (int i = 0; i < PB; i++) elem[d][i] = NBITS'($urandom_range(0, 4095));
      for (int k = 0; k < 5; k++) elem[d][$urandom_range(0, PB-1)] = 12'hABC;
      for (int i = 0; i < PB; i++) valid[d][i] = 1'b1;
      for (int i = PB - 40; i < PB; i++) valid[d][i] = 1'b0;   // unused tail
      elem[d][PB - 3] = 12'hABC;                               // invalid copy
      for (int j = 0; j < NBITS; j++) begin
        for (int i = 0; i < PB; i++) page[i] = elem[d][i][j];
        prog(d, 2*j, page);
        simple(OP_PROG_INV, d, 2*j + 1, '0, 0, 0, 0, 0);
      end
      prog(d, WORDLINES - 1, valid[d]);
    end
    wait_idle();

    // parallel exact search on all dies
    t0 = $time / 10;
    for (int d = 0; d < ND; d++) simple(OP_SRCH, d, 0, enc(12'hABC, 12'hFFF), 1, d, 0, 0);
    wait_idle();
    t1 = $time / 10;
    for (int d = 0; d < ND; d++) begin
      for (int i = 0; i < PB; i++) expv[i] = valid[d][i] && elem[d][i] == 12'hABC;
      check(vdone[d], $sformatf("vector %0d complete", d));
      check(mv[d] == expv, $sformatf("match vector die %0d", d));
    end
    check(max_busy == ND, $sformatf("all dies searched at once (max %0d)", max_busy));
    check(t1 - t0 < 2 * TS, $sformatf("parallel search time %0d cycles", t1 - t0));
    check(n_disc > 0, "zero bursts dropped");
    $display("parallel search of %0d dies: %0d cycles, %0d bursts dropped", ND, t1 - t0, n_disc);

    // ternary search, one die
    for (int t = 0; t < 6; t++) begin
      logic [NBITS-1:0] key, care;
      key = NBITS'($urandom()); care = NBITS'($urandom()) & NBITS'($urandom()) | 12'h800;
      fwd[1] = 0; vdone[1] = 0; mv[1] = '0;
      simple(OP_SRCH, 1, 0, enc(key, care), 1, 1, 0, 0);
      wait_idle();
      for (int i = 0; i < PB; i++) expv[i] = valid[1][i] && ((elem[1][i] & care) == (key & care));
      check(mv[1] == expv, "ternary match vector");
    end

    // column-windowed read of the inverse page of bit 2 on die 3
    rd_data.delete();
    simple(OP_READ, 3, 5, '0, 1, 9, 3, 4);
    wait_idle();
    for (int i = 0; i < PB; i++) page[i] = ~elem[3][i][2];
    check(rd_data.size() == 4, "read window length");
    for (int b = 0; b < 4 && b < rd_data.size(); b++) check(rd_data[b] == page[(3+b)*64 +: 64], "read window data");

    // delete on die 2
    simple(OP_SRCH, 2, 0, enc(12'hABC, 12'hFFF), 0, 2, 0, 0);
    simple(OP_PROG_INV, 2, WORDLINES - 1, '0, 0, 0, 0, 0);
    wait_idle();
    fwd[2] = 0; vdone[2] = 0; mv[2] = '0;
    simple(OP_SRCH, 2, 0, enc(12'hABC, 12'hFFF), 1, 2, 0, 0);
    wait_idle();
    check(vdone[2] && mv[2] == '0, "delete invalidated matches");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
