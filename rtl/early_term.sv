// early_term: early (conditional) termination of match-vector transfers, one
// per flash channel controller.
//
// A match vector leaves the die as a stream of bursts. Most searches find
// nothing, so most bursts are all zeroes. This circuit looks at each burst as
// it arrives: an all-zero burst is dropped and a counter is incremented; a
// burst holding at least one match is passed on, tagged with the counter
// value. The consumer recovers the position of a forwarded burst in the vector
// as tag + (number of bursts forwarded before it in the same vector). The last
// burst of a vector is always passed on, with out_last set, so that the
// consumer learns that the vector is complete; if it is all zero it carries no
// match. The counter clears at the end of every vector.
//
// Interface: valid/ready streams in and out; zero bursts are accepted in the
// cycle they arrive, forwarded bursts when out_ready is high (combinational
// pass-through, no added latency). discard/forward pulse once per burst for
// statistics. The zero test, the counter and the tag follow the paper; the
// end-of-vector beat and the reset of the counter per vector are this design's.
module early_term
  import tcam_pkg::*;
#(
  parameter int W  = BURST_BITS,
  parameter int CW = COL_W + 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  output logic          in_ready,
  input  logic [W-1:0]  in_data,
  input  logic          in_last,
  output logic          out_valid,
  input  logic          out_ready,
  output logic [W-1:0]  out_data,
  output logic [CW-1:0] out_tag,
  output logic          out_last,
  output logic          discard,
  output logic          forward
);
  logic          zero;
  logic [CW-1:0] cnt;

  assign zero      = (in_data == '0);
  assign out_valid = in_valid && (!zero || in_last);
  assign in_ready  = (zero && !in_last) ? 1'b1 : out_ready;
  assign out_data  = in_data;
  assign out_tag   = cnt;
  assign out_last  = in_last;
  assign discard   = in_valid && zero && !in_last;
  assign forward   = in_valid && !zero && out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                    cnt <= '0;
    else if (in_valid && in_ready) begin
      if (in_last)   cnt <= '0;
      else if (zero) cnt <= cnt + 1'b1;
    end
  end
endmodule
