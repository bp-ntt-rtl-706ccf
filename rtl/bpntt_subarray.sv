// bpntt_subarray: one BP-NTT compute subarray (ROWS x COLS SRAM with
// bitline computing and the modified sense-amplifier row).
//
// Each cycle the controller sends one micro-operation. Decoder0 and Decoder1
// raise up to two wordlines. The bitline of a column then reads the AND of
// all activated cells and the complement bitline their NOR (with no row
// activated both stay precharged at 1). The sense-amplifier row turns these
// into AND/OR/XOR, or shifts/broadcasts its latch, and the result d is loaded
// into the latch and, if wr_en, written into row wr_addr at the same clock
// edge. A command that reads the row written by the previous one therefore
// sees the new value; there is no pipeline hazard.
//
// Polynomial coefficients sit in rows (one coefficient per row and tile), so
// selecting operands is only a matter of row addresses.
//
// The cells are modelled as a register array and the analog sensing as the
// logic it produces (AND on BL, NOR on BLB), as the paper describes it. The
// host port is the normal memory use of the array: a row write (host_we)
// and an asynchronous row read. The host must not write while a
// micro-operation is valid (checked by an assertion).
module bpntt_subarray
  import bpntt_pkg::*;
#(
  parameter int unsigned ROWS   = 256,
  parameter int unsigned COLS   = 256,
  parameter int unsigned ADDR_W = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  input  sa_uop_t           uop,
  input  logic [COLS-1:0]   tile_lsb,
  input  logic              host_we,
  input  logic [ADDR_W-1:0] host_row,
  input  logic [COLS-1:0]   host_wdata,
  input  logic [ADDR_W-1:0] host_rrow,
  output logic [COLS-1:0]   host_rdata,
  output logic [COLS-1:0]   latch_q
);
  logic [COLS-1:0] mem [ROWS];
  logic [ROWS-1:0] wl0, wl1, wwl;
  logic [COLS-1:0] bl, blb, d;

  bpntt_row_decoder #(.ROWS(ROWS), .ADDR_W(ADDR_W)) u_dec0 (
    .en(uop.valid && uop.wl0_en), .addr(uop.wl0_addr), .wl(wl0));
  bpntt_row_decoder #(.ROWS(ROWS), .ADDR_W(ADDR_W)) u_dec1 (
    .en(uop.valid && uop.wl1_en), .addr(uop.wl1_addr), .wl(wl1));
  bpntt_row_decoder #(.ROWS(ROWS), .ADDR_W(ADDR_W)) u_decw (
    .en(uop.valid && uop.wr_en), .addr(uop.wr_addr), .wl(wwl));

  // Bitline computing: wired AND on BL, wired NOR on BLB.
  always_comb begin
    bl  = '1;
    blb = '1;
    for (int unsigned r = 0; r < ROWS; r++) begin
      if (wl0[r] || wl1[r]) begin
        bl  = bl & mem[r];
        blb = blb & ~mem[r];
      end
    end
  end

  bpntt_sa_row #(.COLS(COLS)) u_sa (
    .clk     (clk),
    .rst_n   (rst_n),
    .bl      (bl),
    .blb     (blb),
    .sel     (uop.sel),
    .latch_en(uop.valid && uop.latch_en),
    .tile_lsb(tile_lsb),
    .d       (d),
    .q       (latch_q)
  );

  always_ff @(posedge clk) begin
    for (int unsigned r = 0; r < ROWS; r++) begin
      if (wwl[r])                                     mem[r] <= d;
      else if (host_we && host_row == ADDR_W'(r))     mem[r] <= host_wdata;
    end
  end

  assign host_rdata = mem[host_rrow];

  a_no_host_write_during_op: assert property (
    @(posedge clk) disable iff (!rst_n) !(host_we && uop.valid))
    else $error("host write while a micro-operation is executing");
endmodule
