// tb_bpntt_sa_row: random test of the modified sense-amplifier row.
// A reference model computes, from BL (AND) and BLB (NOR) patterns that a
// real array can produce (bl & blb never both 1 for a read of one or two
// rows), the AND/OR/XOR results, one-bit left/right shifts of the latch and
// the per-tile LSB/MSB broadcasts for random tile widths, and the latch must
// follow at each enabled clock edge and hold otherwise.
module tb_bpntt_sa_row;
  import bpntt_pkg::*;
  localparam int COLS = 256;
  logic clk = 0, rst_n = 0;
  logic [COLS-1:0] bl, blb, tile_lsb, d, q;
  sa_sel_e sel;
  logic latch_en;
  int checks = 0, failures = 0;

  bpntt_sa_row #(.COLS(COLS)) dut (.*);
  always #5 clk = ~clk;

  initial begin : watchdog
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [COLS-1:0] rnd();
    logic [COLS-1:0] r;
    for (int i = 0; i < COLS / 32; i++) r[i*32 +: 32] = $urandom;
    return r;
  endfunction

  function automatic logic [COLS-1:0] model(sa_sel_e s, logic [COLS-1:0] a,
                                            logic [COLS-1:0] n, logic [COLS-1:0] qq,
                                            int w);
    logic [COLS-1:0] r = '0;
    case (s)
      SA_AND: r = a;
      SA_OR:  r = ~n;
      SA_XOR: r = ~(a | n);
      SA_SHL: r = qq << 1;
      SA_SHR: r = qq >> 1;
      SA_BC_LSB: for (int j = 0; j < COLS; j++) r[j] = qq[(j / w) * w];
      SA_BC_MSB: for (int j = 0; j < COLS; j++) begin
                   int top = (j / w) * w + w - 1;
                   r[j] = qq[(top > COLS - 1) ? COLS - 1 : top];
                 end
      default: r = 'x;
    endcase
    return r;
  endfunction

  initial begin
    logic [COLS-1:0] x, y, exp_d, q_before;
    int w;
    sel = SA_AND; latch_en = 0; bl = '1; blb = '1; tile_lsb = 1;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int it = 0; it < 3000; it++) begin
      @(negedge clk);
      w = (it % 7 == 0) ? 14 : (2 << (it % 6));    // 4..128 and 14 bit tiles
      tile_lsb = '0;
      for (int j = 0; j < COLS; j += w) tile_lsb[j] = 1'b1;
      x = rnd(); y = rnd();
      bl  = x & y;           // two rows activated
      blb = ~x & ~y;
      sel = sa_sel_e'($urandom_range(6));
      latch_en = ($urandom_range(3) != 0);
      #1;
      exp_d = model(sel, bl, blb, q, w);
      checks++;
      if (d !== exp_d) begin
        failures++;
        if (failures < 10) $display("FAIL d sel=%s w=%0d", sel.name(), w);
      end
      q_before = q;
      @(posedge clk); #1;
      checks++;
      if (q !== (latch_en ? exp_d : q_before)) begin
        failures++;
        if (failures < 10) $display("FAIL q sel=%s en=%0d", sel.name(), latch_en);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
