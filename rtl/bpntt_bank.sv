// bpntt_bank: a BP-NTT bank, the top of this design.
//
// One bank holds a CTRL/CMD subarray (bpntt_cmd_buffer) and N_SUB compute
// subarrays (bpntt_subarray), as in the paper's bank of four subarrays. The
// host (the processor, through the last-level cache) pushes 32-bit commands;
// the controller (bpntt_ctrl) decodes them and all compute subarrays execute
// each one in lock step on their own data, so every tile of every subarray
// runs the same program on a different polynomial. Banks that run the same
// operations can share one CTRL/CMD subarray; raising N_SUB (e.g. to 6 for
// two banks) models that.
//
// Host ports (this design's choice, the paper only says the commands are
// memory-mapped and the arrays serve as normal cache when idle):
//   cmd_*      command push with valid/ready; cmd_ready is low when the
//              command buffer is full
//   cfg_*      tile boundaries: bit j of cfg_tile_lsb set marks column j as
//              the least significant bit of a tile (e.g. every 16th column
//              for sixteen 16-bit tiles)
//   host_*     row write to subarray host_sub; allowed only while busy is low
//   host_r*    asynchronous row read of subarray host_rsub
//   busy       commands are queued or executing
//   cmd_count  commands waiting in the command buffer
module bpntt_bank
  import bpntt_pkg::*;
#(
  parameter int unsigned N_SUB     = 3,
  parameter int unsigned ROWS      = 256,
  parameter int unsigned COLS      = 256,
  parameter int unsigned CMD_DEPTH = 2048,
  localparam int unsigned SUB_W    = (N_SUB > 1) ? $clog2(N_SUB) : 1
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     cmd_valid,
  output logic                     cmd_ready,
  input  logic [CMD_W-1:0]         cmd_data,
  input  logic                     cfg_we,
  input  logic [COLS-1:0]          cfg_tile_lsb,
  input  logic                     host_we,
  input  logic [SUB_W-1:0]         host_sub,
  input  logic [CMD_AW-1:0]        host_row,
  input  logic [COLS-1:0]          host_wdata,
  input  logic [SUB_W-1:0]         host_rsub,
  input  logic [CMD_AW-1:0]        host_rrow,
  output logic [COLS-1:0]          host_rdata,
  output logic                     busy,
  output logic [$clog2(CMD_DEPTH):0] cmd_count
);
  logic             q_valid, q_ready;
  logic [CMD_W-1:0] q_data;
  sa_uop_t          uop;
  logic [COLS-1:0]  tile_lsb;
  logic [COLS-1:0]  rdata [N_SUB];

  bpntt_cmd_buffer #(.CMD_W(CMD_W), .DEPTH(CMD_DEPTH)) u_cmd (
    .clk, .rst_n,
    .push_valid(cmd_valid), .push_ready(cmd_ready), .push_data(cmd_data),
    .pop_valid(q_valid), .pop_ready(q_ready), .pop_data(q_data),
    .count(cmd_count));

  bpntt_ctrl u_ctrl (
    .clk, .rst_n,
    .cmd_valid(q_valid), .cmd_ready(q_ready), .cmd(cmd_t'(q_data)),
    .uop(uop), .busy(busy));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      tile_lsb <= COLS'(1);
    else if (cfg_we) tile_lsb <= cfg_tile_lsb;
  end

  for (genvar s = 0; s < N_SUB; s++) begin : g_sub
    bpntt_subarray #(.ROWS(ROWS), .COLS(COLS), .ADDR_W(CMD_AW)) u_sub (
      .clk, .rst_n,
      .uop       (uop),
      .tile_lsb  (tile_lsb),
      .host_we   (host_we && host_sub == SUB_W'(s)),
      .host_row  (host_row),
      .host_wdata(host_wdata),
      .host_rrow (host_rrow),
      .host_rdata(rdata[s]),
      .latch_q   ());
  end

  assign host_rdata = (int'(host_rsub) < N_SUB) ? rdata[host_rsub] : '0;

  a_host_idle: assert property (@(posedge clk) disable iff (!rst_n)
    host_we |-> !busy) else $error("host row write while the bank is busy");
endmodule
