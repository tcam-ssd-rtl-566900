// tb_match_decoder: random sparse match vectors for several search blocks are
// cut into bursts and early-terminated by the testbench itself (zero bursts
// dropped, tag = zero bursts dropped so far, final burst always sent). The
// decoder's matches must list every set bit, in order, with the right element
// index and the data-entry address base + index x entry size taken from a
// link table model.
module tb_match_decoder;
  import tcam_pkg::*;
  localparam int NB = 16, NV = 12;   // 1024-bit vectors
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic mb_valid, mb_ready, m_valid, m_ready, busy;
  mburst_t mb;
  logic [EB_W-1:0] entry_bursts;
  logic [LT_W-1:0] lt_addr;
  link_entry_t lt_data;
  match_t m;

  match_decoder #(.NB(NB)) dut (.*);

  // link table model: entry e -> data block e, first page 3*e
  always_comb begin
    lt_data = '0;
    lt_data.data_blk.ch = CH_W'(lt_addr);
    lt_data.data_blk.block = BLK_W'(lt_addr * 5);
    lt_data.data_page = WL_W'(3 * lt_addr);
  end

  match_t  exp_q [$];
  mburst_t in_q  [$];
  int checks = 0, failures = 0;

  always @(posedge clk) begin
    m_ready <= ($urandom_range(0, 2) != 0);
    if (m_valid && m_ready) begin
      checks++;
      if (exp_q.size() == 0) begin failures++; $display("FAIL extra match"); end
      else begin
        automatic match_t e = exp_q.pop_front();
        if (m != e) begin
          failures++;
          $display("FAIL match entry %0d elem %0d page %0d col %0d (exp %0d %0d %0d %0d)",
                   m.entry, m.elem, m.page, m.col, e.entry, e.elem, e.page, e.col);
        end
      end
    end
  end

  initial begin
    mb_valid = 0; mb = '0; entry_bursts = 8'd2;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int v = 0; v < NV; v++) begin
      automatic int zc = 0;
      logic [NB*64-1:0] vec;
      vec = '0;
      if (v != 3)
        for (int k = 0; k < $urandom_range(0, 20); k++) vec[$urandom_range(0, NB*64-1)] = 1'b1;
      if (v == 5) vec[NB*64-64 +: 64] = '1;   // a full final burst
      for (int i = 0; i < NB*64; i++)
        if (vec[i]) begin
          automatic match_t e = '0;
          automatic int off = i * 2;
          e.entry = LT_W'(v); e.elem = ELEM_W'(i);
          e.blk.ch = CH_W'(v); e.blk.block = BLK_W'(v * 5);
          e.page = WL_W'(3 * v + off / NB); e.col = COL_W'(off % NB); e.len = 8'd2;
          exp_q.push_back(e);
        end
      for (int b = 0; b < NB; b++) begin
        automatic logic [63:0] d = vec[b*64 +: 64];
        if (d != 0 || b == NB - 1) begin
          automatic mburst_t x = '0;
          x.entry = LT_W'(v); x.data = d; x.zcount = (COL_W+1)'(zc); x.last = (b == NB - 1);
          in_q.push_back(x);
        end else zc++;
      end
    end
    while (in_q.size() > 0) begin
      @(negedge clk);
      mb_valid = 1; mb = in_q.pop_front();
      #1; while (!mb_ready) begin @(negedge clk); #1; end
    end
    @(negedge clk); mb_valid = 0;
    repeat (200) @(negedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL %0d matches missing", exp_q.size()); end
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
