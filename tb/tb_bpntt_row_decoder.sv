// tb_bpntt_row_decoder: exhaustive test of the row decoder. Every address
// with en high must raise exactly its own wordline; with en low none.
module tb_bpntt_row_decoder;
  logic en;
  logic [7:0] addr;
  logic [255:0] wl;
  int checks = 0, failures = 0;

  bpntt_row_decoder #(.ROWS(256), .ADDR_W(8)) dut (.en, .addr, .wl);

  initial begin : watchdog
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int e = 0; e < 2; e++)
      for (int a = 0; a < 256; a++) begin
        logic [255:0] exp_wl;
        en = e[0]; addr = 8'(a);
        #1;
        exp_wl = '0;
        if (e == 1) exp_wl[a] = 1'b1;
        checks++;
        if (wl !== exp_wl) begin
          failures++;
          $display("FAIL en=%0d addr=%0d", e, a);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
