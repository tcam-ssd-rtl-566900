// tb_result_compactor: sends random entries of 1, 2 or 4 bursts, first with
// compaction on, then off, with random back-pressure. With compaction the
// output must be the entries back to back, padded with zeroes to a whole
// number of host blocks; without, every entry must start a new block. The
// number of host blocks and the out_last positions are checked too.
module tb_result_compactor;
  import tcam_pkg::*;
  localparam int HB = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic compact, clear, flush, in_valid, in_ready, in_last, out_valid, out_ready, out_last, busy;
  logic [63:0] in_data, out_data;
  logic [31:0] blocks;

  result_compactor #(.HB(HB)) dut (.*);

  logic [63:0] got [$];
  bit          got_last [$];
  int checks = 0, failures = 0;

  always @(posedge clk) begin
    out_ready <= ($urandom_range(0, 3) != 0);
    if (out_valid && out_ready) begin got.push_back(out_data); got_last.push_back(out_last); end
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic run(input bit mode);
    logic [63:0] exp [$];
    int nent = 15;
    got.delete(); got_last.delete();
    @(negedge clk); compact = mode; clear = 1; @(negedge clk); clear = 0;
    for (int e = 0; e < nent; e++) begin
      automatic int len = 1 << $urandom_range(0, 2);
      for (int b = 0; b < len; b++) begin
        automatic logic [63:0] d = {16'(e + 1), 16'(b), $urandom()};
        exp.push_back(d);
        in_valid = 1; in_data = d; in_last = (b == len - 1);
        #1; while (!in_ready) begin @(negedge clk); #1; end
        @(negedge clk);
      end
      in_valid = 0;
      if (!mode) while (exp.size() % HB != 0) exp.push_back('0);
      repeat ($urandom_range(0, 2)) @(negedge clk);
    end
    // wait for the stream to drain, then flush the last block
    repeat (40) @(negedge clk);
    flush = 1; @(negedge clk); flush = 0;
    repeat (40) @(negedge clk);
    while (exp.size() % HB != 0) exp.push_back('0);
    check(got.size() == exp.size(), $sformatf("mode %0d: %0d bursts, expected %0d", mode, got.size(), exp.size()));
    for (int i = 0; i < exp.size() && i < got.size(); i++) begin
      check(got[i] == exp[i], $sformatf("mode %0d burst %0d", mode, i));
      check(got_last[i] == (i % HB == HB - 1), "out_last position");
    end
    check(int'(blocks) == exp.size() / HB, $sformatf("mode %0d blocks %0d", mode, blocks));
    $display("compact=%0d: %0d host blocks", mode, blocks);
  endtask

  initial begin
    compact = 1; clear = 0; flush = 0; in_valid = 0; in_data = '0; in_last = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(1);
    run(0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
