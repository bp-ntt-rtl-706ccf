// bpntt_sa_slice: one column of the modified BP-NTT sense amplifier.
//
// Two sense amplifiers read the bitline pair. The BL amplifier gives the AND
// of all activated cells in the column, the BLB amplifier their NOR. As in
// the paper, an inverter turns NOR into OR and a NOR gate of AND and NOR
// gives XOR. A first MUX picks AND, OR or XOR; a second MUX picks that
// result, the left neighbour's latch output Dout(n-1) (shift left), the right
// neighbour's Dout(n+1) (shift right), or the tile broadcast bit (this
// design's addition, used by the Check command). A clocked latch with enable
// holds Dout(n). d is the value the latch takes at the next clock edge; the
// subarray also writes d back to a row.
module bpntt_sa_slice
  import bpntt_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  input  logic    bl,        // AND of activated cells
  input  logic    blb,       // NOR of activated cells
  input  sa_sel_e sel,
  input  logic    latch_en,
  input  logic    dout_lo,   // Dout(n-1)
  input  logic    dout_hi,   // Dout(n+1)
  input  logic    bcast,     // tile broadcast bit
  output logic    d,
  output logic    dout       // Dout(n)
);
  logic or_o, xor_o, mux1;

  assign or_o  = ~blb;
  assign xor_o = ~(bl | blb);

  always_comb begin
    unique case (sel)
      SA_OR:   mux1 = or_o;
      SA_XOR:  mux1 = xor_o;
      default: mux1 = bl;
    endcase
  end

  always_comb begin
    unique case (sel)
      SA_SHL:              d = dout_lo;
      SA_SHR:              d = dout_hi;
      SA_BC_LSB, SA_BC_MSB: d = bcast;
      default:             d = mux1;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        dout <= 1'b0;
    else if (latch_en) dout <= d;
  end
endmodule
