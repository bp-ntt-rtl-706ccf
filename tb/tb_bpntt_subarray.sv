// tb_bpntt_subarray: random micro-operations on one compute subarray,
// compared with a software copy of the array.
// The host first fills every row. Then random micro-operations activate one
// or two rows (or none), select an SA function, load the latch and write the
// result back; the model computes AND / NOR bitlines, the SA output, shifts
// and 16-bit tile broadcasts of the latch. After each operation the latch
// and the written row are compared, and at the end every row is read back.
module tb_bpntt_subarray;
  import bpntt_pkg::*;
  localparam int ROWS = 256, COLS = 256;
  logic clk = 0, rst_n = 0;
  sa_uop_t uop;
  logic [COLS-1:0] tile_lsb;
  logic host_we;
  logic [7:0] host_row, host_rrow;
  logic [COLS-1:0] host_wdata, host_rdata, latch_q;
  int checks = 0, failures = 0;

  bpntt_subarray #(.ROWS(ROWS), .COLS(COLS), .ADDR_W(8)) dut (.*);
  always #5 clk = ~clk;

  logic [COLS-1:0] m [ROWS];
  logic [COLS-1:0] mq;

  initial begin : watchdog
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [COLS-1:0] rnd();
    logic [COLS-1:0] r;
    for (int i = 0; i < COLS / 32; i++) r[i*32 +: 32] = $urandom;
    return r;
  endfunction

  task automatic chk(bit ok, string s);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", s); end
  endtask

  initial begin
    logic [COLS-1:0] bl, blb, d;
    uop = UOP_NOP; host_we = 0; host_row = 0; host_rrow = 0; host_wdata = '0;
    tile_lsb = '0;
    for (int j = 0; j < COLS; j += 16) tile_lsb[j] = 1'b1;
    repeat (2) @(negedge clk);
    rst_n = 1;
    mq = '0;
    for (int r = 0; r < ROWS; r++) begin
      m[r] = rnd();
      host_we = 1; host_row = 8'(r); host_wdata = m[r];
      @(negedge clk);
    end
    host_we = 0;
    for (int it = 0; it < 4000; it++) begin
      uop = UOP_NOP;
      uop.valid = 1;
      uop.wl0_en = ($urandom_range(9) != 0);
      uop.wl1_en = ($urandom_range(1) != 0);
      uop.wl0_addr = 8'($urandom); uop.wl1_addr = 8'($urandom);
      uop.sel = sa_sel_e'($urandom_range(6));
      uop.latch_en = ($urandom_range(4) != 0);
      uop.wr_en = ($urandom_range(2) != 0);
      uop.wr_addr = 8'($urandom);
      bl = '1; blb = '1;
      if (uop.wl0_en) begin bl &= m[uop.wl0_addr]; blb &= ~m[uop.wl0_addr]; end
      if (uop.wl1_en) begin bl &= m[uop.wl1_addr]; blb &= ~m[uop.wl1_addr]; end
      case (uop.sel)
        SA_AND: d = bl;
        SA_OR:  d = ~blb;
        SA_XOR: d = ~(bl | blb);
        SA_SHL: d = mq << 1;
        SA_SHR: d = mq >> 1;
        SA_BC_LSB: for (int j = 0; j < COLS; j++) d[j] = mq[(j / 16) * 16];
        default:   for (int j = 0; j < COLS; j++) d[j] = mq[(j / 16) * 16 + 15];
      endcase
      @(negedge clk);
      if (uop.latch_en) mq = d;
      if (uop.wr_en) m[uop.wr_addr] = d;
      chk(latch_q == mq, $sformatf("latch it=%0d sel=%s", it, uop.sel.name()));
      host_rrow = uop.wr_addr; #1;
      chk(host_rdata == m[uop.wr_addr], $sformatf("row it=%0d", it));
    end
    uop = UOP_NOP;
    for (int r = 0; r < ROWS; r++) begin
      host_rrow = 8'(r); #1;
      chk(host_rdata == m[r], $sformatf("final row %0d", r));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
