// tb_link_table: fills a small link table with random region and entry
// records, overwrites some, and checks every read port against a shadow copy.
module tb_link_table;
  import tcam_pkg::*;
  localparam int NE = 256, NR = 16;
  logic clk = 0;
  always #5 clk = ~clk;

  logic e_we, r_we;
  logic [$clog2(NE)-1:0] e_waddr, a_raddr, b_raddr;
  logic [$clog2(NR)-1:0] r_waddr, r_raddr;
  link_entry_t e_wdata, a_rdata, b_rdata;
  region_t r_wdata, r_rdata;

  link_table #(.NENT(NE), .NREG(NR)) dut (.*);

  link_entry_t se [NE];
  region_t     sr [NR];
  int checks = 0, failures = 0;

  function automatic link_entry_t rnd_e();
    link_entry_t e;
    e = {$urandom(), $urandom()};
    return e;
  endfunction

  initial begin
    e_we = 0; r_we = 0; e_waddr = '0; r_waddr = '0; e_wdata = '0; r_wdata = '0;
    a_raddr = '0; b_raddr = '0; r_raddr = '0;
    for (int pass = 0; pass < 2; pass++) begin
      for (int i = 0; i < NE; i++) begin
        if (pass == 1 && $urandom_range(0, 1) == 0) continue;
        @(negedge clk);
        e_we = 1; e_waddr = 8'(i); e_wdata = rnd_e(); se[i] = e_wdata;
      end
      for (int i = 0; i < NR; i++) begin
        @(negedge clk);
        e_we = 0;
        r_we = 1; r_waddr = 4'(i);
        r_wdata = '0;
        r_wdata.first = LT_W'(i * 16); r_wdata.count = (LT_W+1)'($urandom_range(0, 16));
        r_wdata.entry_bursts = EB_W'(1 << $urandom_range(0, 3));
        sr[i] = r_wdata;
      end
      @(negedge clk); r_we = 0; e_we = 0;
    end
    for (int t = 0; t < 500; t++) begin
      a_raddr = 8'($urandom()); b_raddr = 8'($urandom()); r_raddr = 4'($urandom());
      #1;
      checks += 3;
      if (a_rdata != se[a_raddr]) begin failures++; $display("FAIL port a %0d", a_raddr); end
      if (b_rdata != se[b_raddr]) begin failures++; $display("FAIL port b %0d", b_raddr); end
      if (r_rdata != sr[r_raddr]) begin failures++; $display("FAIL region %0d", r_raddr); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
