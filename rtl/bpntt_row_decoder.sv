// bpntt_row_decoder: row address decoder of a BP-NTT subarray.
//
// Turns a row address into a one-hot wordline vector. A subarray has two of
// them (Decoder0 and Decoder1, as in the paper) so that two rows can be
// activated together for bitline computing, plus one for the write-back row
// (this design's choice, the paper does not say how results are written).
// Purely combinational: wl follows en/addr in the same cycle. When en is low
// no wordline is raised.
module bpntt_row_decoder #(
  parameter int unsigned ROWS   = 256,
  parameter int unsigned ADDR_W = $clog2(ROWS)
) (
  input  logic              en,
  input  logic [ADDR_W-1:0] addr,
  output logic [ROWS-1:0]   wl
);
  always_comb begin
    for (int unsigned r = 0; r < ROWS; r++)
      wl[r] = en && (addr == ADDR_W'(r));
  end
endmodule
