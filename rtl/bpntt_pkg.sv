// bpntt_pkg: types and constants shared by the BP-NTT bank.
//
// A BP-NTT subarray is a 256x256 SRAM array whose sense amplifiers can form
// AND, OR and XOR of two activated rows, shift the latched row by one bit,
// and (this design's addition) broadcast a tile's LSB or MSB across the tile.
// The host drives it with 32-bit commands. The four command formats and
// their field widths (Type 2, Written address 8, Operand 0 8, Left/Right 1,
// Operand 1 8, XOR/AND 1, 5 spare) follow the paper; the numeric type codes,
// the bit order (Type in the top bits) and the use of two spare bits (OR
// select, Check MSB/LSB select) are this design's choices.
package bpntt_pkg;

  localparam int unsigned CMD_AW = 8;    // row address width in a command
  localparam int unsigned CMD_W  = 32;   // command word width

  // Command type (bits 31:30).
  typedef enum logic [1:0] {
    OP_CHECK  = 2'd0,  // latch <- per-tile LSB/MSB broadcast of latch; write it
    OP_UNARY  = 2'd1,  // row[waddr] <- row[op0]
    OP_SHIFT  = 2'd2,  // row[waddr] <- row[op0] shifted 1 bit left/right
    OP_BINARY = 2'd3   // row[waddr] <- row[op0] AND/XOR/OR row[op1]
  } op_type_e;

  // Command word. For OP_SHIFT the Left/Right flag is bit 13, the first bit
  // after Operand 0 (i.e. op1[7]); 1 = left (towards the tile MSB).
  typedef struct packed {
    op_type_e          typ;    // 31:30
    logic [CMD_AW-1:0] waddr;  // 29:22 written address
    logic [CMD_AW-1:0] op0;    // 21:14 operand 0
    logic [CMD_AW-1:0] op1;    // 13:6  operand 1 (bit 13 = Left/Right for Shift)
    logic              xa;     // 5     Binary: 1 = XOR, 0 = AND
    logic              f_or;   // 4     Binary: 1 = OR (overrides xa)
    logic              f_msb;  // 3     Check: 1 = broadcast MSB, 0 = LSB
    logic [2:0]        rsv;    // 2:0   unused
  } cmd_t;

  // Sense-amplifier output select (the two MUXes of the modified SA).
  typedef enum logic [2:0] {
    SA_AND    = 3'd0,  // BL sense amplifier
    SA_OR     = 3'd1,  // inverted BLB (NOR) sense amplifier
    SA_XOR    = 3'd2,  // NOR(AND, NOR)
    SA_SHL    = 3'd3,  // Dout(n-1): latch shifted towards higher columns
    SA_SHR    = 3'd4,  // Dout(n+1): latch shifted towards lower columns
    SA_BC_LSB = 3'd5,  // per-tile broadcast of the latch's tile LSB
    SA_BC_MSB = 3'd6   // per-tile broadcast of the latch's tile MSB
  } sa_sel_e;

  // One micro-operation for a compute subarray (one clock cycle).
  typedef struct packed {
    logic              valid;
    logic              wl0_en;    // Decoder0 enable
    logic [CMD_AW-1:0] wl0_addr;
    logic              wl1_en;    // Decoder1 enable
    logic [CMD_AW-1:0] wl1_addr;
    sa_sel_e           sel;
    logic              latch_en;  // latch En
    logic              wr_en;     // write SA result back
    logic [CMD_AW-1:0] wr_addr;
  } sa_uop_t;

  localparam sa_uop_t UOP_NOP = '{valid: 1'b0, wl0_en: 1'b0, wl0_addr: '0,
                                  wl1_en: 1'b0, wl1_addr: '0, sel: SA_AND,
                                  latch_en: 1'b0, wr_en: 1'b0, wr_addr: '0};

endpackage
