// tb_srch_encoder: checks the wordline vector of srch_encoder two ways. First,
// bit by bit against the Vread/Vpass rule (look for 1: Vread on the first
// cell; look for 0: Vread on the second; don't care: Vpass on both; valid cell
// always Vread). Second, functionally: random elements are laid out as cell
// pairs (value, inverse) with a valid cell, a string is evaluated as "every
// cell conducts" (a 1 cell always conducts, a 0 cell only under Vpass), and
// the result must equal the ternary comparison (key & care) == (elem & care)
// for valid elements and 0 for invalid ones. Includes the 1X0 example.
module tb_srch_encoder;
  import tcam_pkg::*;
  localparam int N = ELEM_BITS;
  logic [N-1:0]   key, care;
  logic [2*N+1:0] wl_sel;
  int checks = 0, failures = 0;

  srch_encoder dut (.key(key), .care(care), .wl_sel(wl_sel));

  function automatic logic [N-1:0] rnd();
    logic [N-1:0] r;
    for (int i = 0; i < N; i += 32) r[i +: 32] = N'($urandom()) ;
    return r;
  endfunction

  function automatic bit string_conducts(logic [N-1:0] elem, bit valid, logic [2*N+1:0] sel);
    logic [2*N+1:0] cells;
    for (int i = 0; i < N; i++) begin
      cells[2*i]   = elem[i];
      cells[2*i+1] = ~elem[i];
    end
    cells[2*N]   = 1'b1;        // spare cell, erased
    cells[2*N+1] = valid;       // valid cell: erased (1) while valid
    for (int w = 0; w < 2*N+2; w++)
      if (sel[w] && !cells[w]) return 0;   // Vread on a programmed cell: off
    return 1;
  endfunction

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s key=%h care=%h", what, key, care); end
  endtask

  initial begin
    // the 1X0 example over three elements 101, 110, 010 (bit 0 first)
    key = '0; care = '0;
    key[0] = 1; care[0] = 1; care[1] = 0; key[2] = 0; care[2] = 1;
    #1;
    check(wl_sel[5:0] == 6'b10_00_01, "1X0 wordlines");
    check(!string_conducts(N'(3'b101), 1, wl_sel), "1X0 vs 101");
    check( string_conducts(N'(3'b011), 1, wl_sel), "1X0 vs bits 1,1,0");
    check(!string_conducts(N'(3'b010), 1, wl_sel), "1X0 vs 010");
    for (int t = 0; t < 2000; t++) begin
      automatic logic [N-1:0] elem = rnd();
      automatic bit valid = ($urandom_range(0, 7) != 0);
      key  = rnd();
      care = rnd() & rnd();
      if (t % 3 == 0) key = (elem & care) | (key & ~care);   // force many matches
      #1;
      for (int i = 0; i < N; i++) begin
        check(wl_sel[2*i]   == (care[i] &&  key[i]), "first cell select");
        check(wl_sel[2*i+1] == (care[i] && !key[i]), "second cell select");
      end
      check(wl_sel[2*N+1] == 1'b1, "valid cell gets Vread");
      check(string_conducts(elem, valid, wl_sel) == (valid && ((elem & care) == (key & care))),
            "string evaluation equals ternary match");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
