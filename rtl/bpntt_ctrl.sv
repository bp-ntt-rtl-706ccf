// bpntt_ctrl: command decoder of a BP-NTT bank.
//
// Takes 32-bit commands (bpntt_pkg::cmd_t) from the CTRL/CMD buffer and
// turns each into the control signals of the compute subarrays: decoder
// enables and row addresses, the sense-amplifier MUX select, the latch
// enable and the write-back enable and row.
//
//   Check  : latch <- per-tile broadcast of its LSB (or MSB); write to waddr
//   Unary  : activate op0;            latch <- AND (the row);  write to waddr
//   Binary : activate op0 and op1;    latch <- AND/XOR/OR;     write to waddr
//   Shift  : cycle 1 activate op0, latch <- row (no write);
//            cycle 2 latch <- Dout(n-1) (left) or Dout(n+1) (right); write
//
// The four formats are the paper's; which cycle does what is this design's
// reading of the sense-amplifier figure (the shift MUX takes the neighbours'
// latch outputs, so the operand must be latched first).
//
// Timing: a command is accepted (cmd_ready) in the cycle it is decoded and
// its micro-operation is registered, so it reaches the subarrays one cycle
// later. Throughput is one command per cycle, except Shift which takes two.
// busy is high while a command is waiting or a micro-operation is in flight.
module bpntt_ctrl
  import bpntt_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  input  logic    cmd_valid,
  output logic    cmd_ready,
  input  cmd_t    cmd,
  output sa_uop_t uop,
  output logic    busy
);
  logic    shift_ph;   // 1: second cycle of a Shift
  sa_uop_t nxt;

  always_comb begin
    nxt       = UOP_NOP;
    cmd_ready = 1'b0;
    if (cmd_valid) begin
      nxt.valid   = 1'b1;
      nxt.wr_addr = cmd.waddr;
      unique case (cmd.typ)
        OP_CHECK: begin
          nxt.sel      = cmd.f_msb ? SA_BC_MSB : SA_BC_LSB;
          nxt.latch_en = 1'b1;
          nxt.wr_en    = 1'b1;
          cmd_ready    = 1'b1;
        end
        OP_UNARY: begin
          nxt.wl0_en   = 1'b1;
          nxt.wl0_addr = cmd.op0;
          nxt.sel      = SA_AND;
          nxt.latch_en = 1'b1;
          nxt.wr_en    = 1'b1;
          cmd_ready    = 1'b1;
        end
        OP_BINARY: begin
          nxt.wl0_en   = 1'b1;
          nxt.wl0_addr = cmd.op0;
          nxt.wl1_en   = 1'b1;
          nxt.wl1_addr = cmd.op1;
          nxt.sel      = cmd.f_or ? SA_OR : (cmd.xa ? SA_XOR : SA_AND);
          nxt.latch_en = 1'b1;
          nxt.wr_en    = 1'b1;
          cmd_ready    = 1'b1;
        end
        OP_SHIFT: begin
          nxt.latch_en = 1'b1;
          if (!shift_ph) begin
            nxt.wl0_en   = 1'b1;
            nxt.wl0_addr = cmd.op0;
            nxt.sel      = SA_AND;
          end else begin
            nxt.sel   = cmd.op1[CMD_AW-1] ? SA_SHL : SA_SHR;
            nxt.wr_en = 1'b1;
            cmd_ready = 1'b1;
          end
        end
        default: ;
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      shift_ph <= 1'b0;
      uop      <= UOP_NOP;
    end else begin
      uop <= nxt;
      if (cmd_valid && cmd.typ == OP_SHIFT) shift_ph <= !shift_ph;
    end
  end

  assign busy = cmd_valid || shift_ph || uop.valid;
endmodule
