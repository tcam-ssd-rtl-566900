// tb_early_term: streams random match vectors, most bursts zero, through
// early_term with random back-pressure and checks that exactly the non-zero
// bursts (and every final burst) come out, in order, each tagged with the
// number of zero bursts dropped before it in its vector.
module tb_early_term;
  import tcam_pkg::*;
  localparam int W = 64, CW = 12, NVEC = 40, LEN = 32;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, in_ready, in_last, out_valid, out_ready, out_last, discard, forward;
  logic [W-1:0] in_data, out_data;
  logic [CW-1:0] out_tag;

  early_term #(.W(W), .CW(CW)) dut (.*);

  int checks = 0, failures = 0;
  // expected output beats
  logic [W-1:0]  exp_data [$];
  logic [CW-1:0] exp_tag  [$];
  logic          exp_last [$];
  int n_disc = 0, n_disc_seen = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // consumer with random back-pressure
  always @(posedge clk) begin
    out_ready <= ($urandom_range(0, 3) != 0);
    if (discard) n_disc_seen++;
    if (out_valid && out_ready) begin
      check(exp_data.size() > 0, "unexpected beat");
      if (exp_data.size() > 0) begin
        check(out_data == exp_data.pop_front(), "data");
        check(out_tag  == exp_tag.pop_front(),  "tag");
        check(out_last == exp_last.pop_front(), "last");
      end
    end
  end

  initial begin
    in_valid = 0; in_data = '0; in_last = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int v = 0; v < NVEC; v++) begin
      automatic int zc = 0;
      for (int b = 0; b < LEN; b++) begin
        automatic logic [W-1:0] d;
        d = ($urandom_range(0, 5) == 0) ? (64'(1) << $urandom_range(0, 63)) | {$urandom(), $urandom()} & {32'h0, 32'h0000_00ff} : '0;
        if (v == 0) d = '0;                       // an empty vector
        if (d != '0 || b == LEN - 1) begin
          exp_data.push_back(d); exp_tag.push_back(CW'(zc)); exp_last.push_back(b == LEN - 1);
        end else begin
          zc++; n_disc++;
        end
        // drive on the falling edge; out_ready, and so in_ready, only
        // change on the rising edge
        @(negedge clk);
        in_valid = 1; in_data = d; in_last = (b == LEN - 1);
        #1;
        while (!in_ready) begin @(negedge clk); #1; end
      end
      @(negedge clk);
      in_valid = 0;
      repeat ($urandom_range(0, 2)) @(negedge clk);
    end
    in_valid = 0;
    repeat (20) @(posedge clk);
    check(exp_data.size() == 0, "all beats delivered");
    check(n_disc == n_disc_seen, "discard count");
    $display("discarded %0d forwarded-or-final %0d", n_disc, NVEC * LEN - n_disc);
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
