// bpntt_sa_row: the row of modified sense amplifiers under a BP-NTT subarray.
//
// One bpntt_sa_slice per column. The slices are chained so that the latch of
// column j can take the latch of column j-1 (shift left, towards the MSB of a
// tile) or j+1 (shift right); 0 enters at the two ends. The chain crosses
// tile boundaries, as the paper's figure draws it; the command sequences keep
// the bit that crosses a boundary zero (the two observations behind the
// paper's n-column modular multiplication, or an explicit mask).
//
// tile_lsb marks the least significant column of each tile (column 0 always
// counts as one). For SA_BC_LSB every column takes the latched bit of its
// tile's least significant column, for SA_BC_MSB that of its tile's most
// significant column (the column below the next tile_lsb). This per-tile
// broadcast is this design's addition: it implements the data-dependent
// choice m = LSB(Sum) ? M : 0 of the modular multiplication, which the paper
// requires but does not describe in hardware.
//
// Timing: d is combinational from bl/blb/sel/q; q updates at the clock edge
// when latch_en is high.
module bpntt_sa_row
  import bpntt_pkg::*;
#(
  parameter int unsigned COLS = 256
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic [COLS-1:0] bl,
  input  logic [COLS-1:0] blb,
  input  sa_sel_e         sel,
  input  logic            latch_en,
  input  logic [COLS-1:0] tile_lsb,
  output logic [COLS-1:0] d,
  output logic [COLS-1:0] q
);
  logic [COLS-1:0] bc_lsb, bc_msb, bcast;

  // Segmented broadcast of each tile's LSB upwards and MSB downwards.
  always_comb begin
    logic run;
    run = 1'b0;
    for (int unsigned j = 0; j < COLS; j++) begin
      if (j == 0 || tile_lsb[j]) run = q[j];
      bc_lsb[j] = run;
    end
    run = 1'b0;
    for (int j = COLS - 1; j >= 0; j--) begin
      if (j == COLS - 1 || tile_lsb[(j == COLS - 1) ? j : j+1]) run = q[j];
      bc_msb[j] = run;
    end
  end

  assign bcast = (sel == SA_BC_MSB) ? bc_msb : bc_lsb;

  for (genvar j = 0; j < COLS; j++) begin : g_col
    bpntt_sa_slice u_slice (
      .clk     (clk),
      .rst_n   (rst_n),
      .bl      (bl[j]),
      .blb     (blb[j]),
      .sel     (sel),
      .latch_en(latch_en),
      .dout_lo ((j == 0)        ? 1'b0 : q[(j == 0) ? 0 : j-1]),
      .dout_hi ((j == COLS - 1) ? 1'b0 : q[(j == COLS - 1) ? j : j+1]),
      .bcast   (bcast[j]),
      .d       (d[j]),
      .dout    (q[j])
    );
  end
endmodule
