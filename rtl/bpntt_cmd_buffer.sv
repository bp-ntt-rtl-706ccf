// bpntt_cmd_buffer: the CTRL/CMD subarray of a BP-NTT bank.
//
// The paper re-purposes one subarray of the bank to hold memory-mapped
// commands. Here it is a DEPTH x CMD_W memory (256x256 bits = 2048 32-bit
// commands) used as a first-in first-out ring: the host pushes commands with
// a valid/ready handshake (push_ready is low when full) and the controller
// pops them in order (pop_valid while not empty, pop_data is the oldest
// command, read asynchronously; it leaves when pop_ready is high). A push and
// a pop may happen in the same cycle. Using the subarray as a ring that the
// host refills, rather than holding a whole NTT program, is this design's
// choice: one NTT needs far more than 2048 commands.
module bpntt_cmd_buffer #(
  parameter int unsigned CMD_W = 32,
  parameter int unsigned DEPTH = 2048
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             push_valid,
  output logic             push_ready,
  input  logic [CMD_W-1:0] push_data,
  output logic             pop_valid,
  input  logic             pop_ready,
  output logic [CMD_W-1:0] pop_data,
  output logic [$clog2(DEPTH):0] count
);
  localparam int unsigned PW = $clog2(DEPTH);

  logic [CMD_W-1:0] mem [DEPTH];
  logic [PW-1:0]    wr_ptr, rd_ptr;
  logic             do_push, do_pop;

  assign push_ready = (count != (PW+1)'(DEPTH));
  assign pop_valid  = (count != '0);
  assign do_push    = push_valid && push_ready;
  assign do_pop     = pop_valid && pop_ready;
  assign pop_data   = mem[rd_ptr];

  always_ff @(posedge clk) begin
    if (do_push) mem[wr_ptr] <= push_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
      count  <= '0;
    end else begin
      if (do_push) wr_ptr <= (wr_ptr == PW'(DEPTH-1)) ? '0 : wr_ptr + 1'b1;
      if (do_pop)  rd_ptr <= (rd_ptr == PW'(DEPTH-1)) ? '0 : rd_ptr + 1'b1;
      count <= count + (PW+1)'(do_push) - (PW+1)'(do_pop);
    end
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    count <= (PW+1)'(DEPTH));
endmodule
