// result_compactor: data result compaction. Returned data entries are written
// into host logical blocks of HB bursts (one 16 KB page by default).
//
// With compact=1 the entries are packed back to back, so N small entries fill
// about N x size / block bytes host blocks; an entry may run over into the
// next block. With compact=0 every entry starts a new host block and the rest
// of that block is padded with zero bursts, which is what the host receives
// without the optimisation. A flush pulse after the last entry pads the
// partly filled final block. out_last marks the final burst of each host
// block; blocks counts the blocks sent since clear.
//
// Interface: valid/ready streams, in_last marks the final burst of an entry.
// Pass-through is combinational; while padding, in_ready is low. busy is high
// while padding is pending. The packing follows the paper; the zero padding
// and the flush/clear controls are this design's.
module result_compactor
  import tcam_pkg::*;
#(
  parameter int HB = PAGE_BURSTS
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   compact,
  input  logic                   clear,
  input  logic                   flush,
  input  logic                   in_valid,
  output logic                   in_ready,
  input  logic [BURST_BITS-1:0]  in_data,
  input  logic                   in_last,
  output logic                   out_valid,
  input  logic                   out_ready,
  output logic [BURST_BITS-1:0]  out_data,
  output logic                   out_last,
  output logic                   busy,
  output logic [31:0]            blocks
);
  localparam int PW = $clog2(HB + 1);
  logic [PW-1:0] pos;     // bursts already in the current host block
  logic          pad;

  assign out_valid = pad || in_valid;
  assign out_data  = pad ? '0 : in_data;
  assign out_last  = (pos == PW'(HB - 1));
  assign in_ready  = !pad && out_ready;
  assign busy      = pad;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pos    <= '0;
      pad    <= 1'b0;
      blocks <= '0;
    end else begin
      if (clear) blocks <= '0;
      if (out_valid && out_ready) begin
        if (out_last) begin
          pos    <= '0;
          pad    <= 1'b0;
          blocks <= (clear ? 32'd0 : blocks) + 32'd1;
        end else begin
          pos <= pos + 1'b1;
          if (!pad && in_last && !compact) pad <= 1'b1;
        end
      end
      if (flush && pos != '0 && !(out_valid && out_ready && out_last)) pad <= 1'b1;
    end
  end
endmodule
