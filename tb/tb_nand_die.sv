// tb_nand_die: drives one nand_die (small page, short latencies) through the
// commands the search path needs and compares against a model kept in the
// testbench:
//  - an erased page reads as all ones; PROG then READ returns the data;
//    programming twice gives the AND of both (cells only go 1 -> 0);
//  - a block of random elements is written transposed: wordline 2i gets bit i
//    of every element by OP_PROG, wordline 2i+1 gets its inverse by
//    OP_PROG_INV (write inversion, no data sent), the valid wordline marks the
//    used bitlines;
//  - random ternary SRCH commands return match vectors equal to the reference
//    ternary comparison, and take T_SRCH cycles from command to result;
//  - SRCH followed by OP_PROG_INV on the valid wordline invalidates exactly
//    the matching elements;
//  - OP_ERASE returns the block to all ones.
module tb_nand_die;
  import tcam_pkg::*;
  localparam int PB = 1024, NB = PB / 64, NBITS = 16;
  localparam int TR = 30, TS = 260, TP = 40, TE = 70;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cmd_valid, cmd_ready, din_valid, dout_avail, release_i, busy;
  die_cmd_t cmd;
  logic [63:0] din, dout;
  logic [COL_W-1:0] dout_sel;

  nand_die #(.PBITS(PB), .NBLOCKS(2), .T_READ(TR), .T_SRCH(TS), .T_PROG(TP), .T_ERASE(TE)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  logic [PB-1:0] page;
  int lat;

  task automatic issue(input flash_op_e op, input int blk, input int wl, input logic [WORDLINES-1:0] sel);
    @(negedge clk);
    cmd = '0; cmd.op = op; cmd.plane = 1'b1; cmd.block = BLK_W'(blk); cmd.wl = WL_W'(wl); cmd.wl_sel = sel;
    cmd_valid = 1;
    #1; while (!cmd_ready) begin @(negedge clk); #1; end
    @(negedge clk); cmd_valid = 0;
  endtask

  task automatic load(input logic [PB-1:0] d);
    for (int b = 0; b < NB; b++) begin
      din_valid = 1; din = d[b*64 +: 64];
      @(negedge clk);
    end
    din_valid = 0;
  endtask

  task automatic wait_idle();
    #1; while (!cmd_ready) begin @(negedge clk); #1; end
  endtask

  // wait for a result and read the whole page register; lat = cycles waited
  task automatic fetch(output logic [PB-1:0] d);
    lat = 0;
    #1; while (!dout_avail) begin @(negedge clk); lat++; #1; end
    for (int b = 0; b < NB; b++) begin
      dout_sel = COL_W'(b); #1;
      d[b*64 +: 64] = dout;
    end
    @(negedge clk);
    release_i = 1; @(negedge clk); release_i = 0;
  endtask

  task automatic prog(input int blk, input int wl, input logic [PB-1:0] d);
    issue(OP_PROG, blk, wl, '0);
    load(d);
    wait_idle();
  endtask

  function automatic logic [PB-1:0] rndp();
    logic [PB-1:0] r;
    for (int i = 0; i < PB; i += 32) r[i +: 32] = $urandom();
    return r;
  endfunction

  logic [NBITS-1:0] elem [PB];
  logic [PB-1:0]    valid;
  logic [PB-1:0]    a, b, expm;

  initial begin
    cmd_valid = 0; cmd = '0; din_valid = 0; din = '0; release_i = 0; dout_sel = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;

    // erased page
    issue(OP_READ, 0, 5, '0); fetch(page);
    check(page == '1, "erased page reads ones");
    // program and read back, then program again: AND
    a = rndp(); b = rndp();
    prog(0, 5, a);
    issue(OP_READ, 0, 5, '0); fetch(page);
    check(page == a, "program/read");
    check(lat >= TR - 2 && lat <= TR + 2, $sformatf("read latency %0d", lat));
    prog(0, 5, b);
    issue(OP_READ, 0, 5, '0); fetch(page);
    check(page == (a & b), "second program ANDs");

    // transposed search block in block 1
    for (int i = 0; i < PB; i++) elem[i] = NBITS'($urandom());
    for (int i = 0; i < PB; i++) if (i % 7 == 0) elem[i] = 16'h1234;   // duplicates
    valid = rndp() | rndp();
    for (int j = 0; j < NBITS; j++) begin
      logic [PB-1:0] p;
      for (int i = 0; i < PB; i++) p[i] = elem[i][j];
      prog(1, 2*j, p);
      issue(OP_PROG_INV, 1, 2*j + 1, '0);      // write inversion
      wait_idle();
    end
    prog(1, WORDLINES - 1, valid);
    // check one inverse page directly
    issue(OP_READ, 1, 7, '0); fetch(page);
    begin
      logic [PB-1:0] p;
      for (int i = 0; i < PB; i++) p[i] = ~elem[i][3];
      check(page == p, "write inversion stored the inverse");
    end

    for (int t = 0; t < 30; t++) begin
      logic [NBITS-1:0] key, care;
      logic [WORDLINES-1:0] sel;
      key  = (t % 2 == 0) ? 16'h1234 : NBITS'($urandom());
      care = (t % 3 == 0) ? 16'hffff : NBITS'($urandom() & $urandom());
      sel = '0;
      for (int j = 0; j < NBITS; j++) begin
        sel[2*j]   = care[j] & key[j];
        sel[2*j+1] = care[j] & ~key[j];
      end
      sel[WORDLINES-1] = 1'b1;
      for (int i = 0; i < PB; i++) expm[i] = valid[i] && ((elem[i] & care) == (key & care));
      issue(OP_SRCH, 1, 0, sel); fetch(page);
      check(page == expm, $sformatf("search %0d key=%h care=%h", t, key, care));
      check(lat >= TS - 2 && lat <= TS + 2, $sformatf("search latency %0d", lat));
    end

    // delete: search for 1234 then program the inverse of the match vector
    // into the valid wordline
    begin
      logic [WORDLINES-1:0] sel;
      sel = '0;
      for (int j = 0; j < NBITS; j++) begin
        sel[2*j] = 16'h1234 >> j; sel[2*j+1] = ~(16'h1234 >> j);
      end
      sel[WORDLINES-1] = 1'b1;
      issue(OP_SRCH, 1, 0, sel); fetch(page);
      check(page != '0, "something to delete");
      issue(OP_SRCH, 1, 0, sel);
      #1; while (!dout_avail) begin @(negedge clk); #1; end
      release_i = 1; @(negedge clk); release_i = 0;
      issue(OP_PROG_INV, 1, WORDLINES - 1, '0); wait_idle();
      issue(OP_SRCH, 1, 0, sel); fetch(page);
      check(page == '0, "deleted elements no longer match");
      // a don't-care search now returns only the surviving valid elements
      sel = '0; sel[WORDLINES-1] = 1'b1;
      for (int i = 0; i < PB; i++) expm[i] = valid[i] && (elem[i] != 16'h1234);
      issue(OP_SRCH, 1, 0, sel); fetch(page);
      check(page == expm, "survivors after delete");
    end

    // erase
    issue(OP_ERASE, 1, 0, '0); wait_idle();
    issue(OP_READ, 1, 0, '0); fetch(page);
    check(page == '1, "erase");
    issue(OP_READ, 0, 5, '0); fetch(page);
    check(page == (a & b), "other block untouched by erase");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
