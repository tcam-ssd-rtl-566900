// srch_encoder: builds the wordline voltage vector of a SRCH chip command from
// a ternary search key.
//
// Each data bit of an element is held by two adjacent cells of one bitline:
// the first cell (even wordline 2i) holds the bit, the second (odd wordline
// 2i+1) its inverse. A cell under Vpass always conducts; under Vread it
// conducts only when it holds a 1. So to look for a 1 in bit i the first
// wordline gets Vread and the second Vpass, to look for a 0 the other way
// round, and a don't-care bit gets Vpass on both (the "1X0" example of the
// paper). Wordline 2*NBITS+1, the last cell of the bitline, holds the valid
// cell and always gets Vread so that invalid elements never match; wordline
// 2*NBITS is unused and gets Vpass.
//
// Interface: key/care in, wl_sel out, 1 = Vread, 0 = Vpass. Purely
// combinational. The bit pairing and the valid cell follow the paper; the use
// of the spare wordline 2*NBITS is this design's choice.
module srch_encoder
  import tcam_pkg::*;
#(
  parameter int NBITS = ELEM_BITS
) (
  input  logic [NBITS-1:0]     key,
  input  logic [NBITS-1:0]     care,   // 0 = don't care
  output logic [2*NBITS+1:0]   wl_sel
);
  always_comb begin
    for (int i = 0; i < NBITS; i++) begin
      wl_sel[2*i]   = care[i] &  key[i];   // looking for a 1: Vread on first cell
      wl_sel[2*i+1] = care[i] & ~key[i];   // looking for a 0: Vread on second cell
    end
    wl_sel[2*NBITS]   = 1'b0;              // spare wordline: Vpass
    wl_sel[2*NBITS+1] = 1'b1;              // valid cell: Vread
  end
endmodule
