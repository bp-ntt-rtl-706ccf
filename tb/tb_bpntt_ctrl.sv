// tb_bpntt_ctrl: the command decoder against an independent decode table.
// Random commands of all four types are offered with random gaps. For each
// accepted command the micro-operations that appear one cycle later must be
// exactly the expected ones (two for Shift: sense, then shift and write).
// The cycles a back-to-back burst takes must equal the number of commands
// plus the number of Shift commands.
module tb_bpntt_ctrl;
  import bpntt_pkg::*;
  logic clk = 0, rst_n = 0;
  logic cmd_valid, cmd_ready, busy;
  cmd_t cmd;
  sa_uop_t uop;
  int checks = 0, failures = 0;
  sa_uop_t expq[$];

  bpntt_ctrl dut (.*);
  always #5 clk = ~clk;

  initial begin : watchdog
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string s);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", s); end
  endtask

  // Expected micro-operations of one command, written out per type.
  function automatic void expect_uops(logic [31:0] w);
    sa_uop_t u;
    logic [1:0] t = w[31:30];
    u = UOP_NOP; u.valid = 1; u.wr_addr = w[29:22]; u.latch_en = 1;
    if (t == 2'd0) begin
      u.sel = w[3] ? SA_BC_MSB : SA_BC_LSB; u.wr_en = 1; expq.push_back(u);
    end else if (t == 2'd1) begin
      u.wl0_en = 1; u.wl0_addr = w[21:14]; u.sel = SA_AND; u.wr_en = 1; expq.push_back(u);
    end else if (t == 2'd3) begin
      u.wl0_en = 1; u.wl0_addr = w[21:14]; u.wl1_en = 1; u.wl1_addr = w[13:6];
      u.sel = w[4] ? SA_OR : (w[5] ? SA_XOR : SA_AND); u.wr_en = 1; expq.push_back(u);
    end else begin
      u.wl0_en = 1; u.wl0_addr = w[21:14]; u.sel = SA_AND; u.wr_en = 0; expq.push_back(u);
      u = UOP_NOP; u.valid = 1; u.wr_addr = w[29:22]; u.latch_en = 1; u.wr_en = 1;
      u.sel = w[13] ? SA_SHL : SA_SHR; expq.push_back(u);
    end
  endfunction

  always @(posedge clk) if (rst_n && uop.valid) begin
    if (expq.size() == 0) chk(0, "unexpected micro-op");
    else begin
      sa_uop_t e;
      e = expq.pop_front();
      chk(uop == e, $sformatf("t=%0t uop got %h exp %h", $time, uop, e));
    end
  end

  initial begin
    int n, nsh;
    bit acc;
    longint t0, t1;
    cmd_valid = 0; cmd = '0; acc = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int it = 0; it < 3000; it++) begin
      bit hold;
      hold = cmd_valid && !acc;         // valid/ready: keep an offered command
      if (!hold) begin
        cmd_valid = ($urandom_range(3) != 0);
        cmd = cmd_t'($urandom);
      end
      #1;
      if (cmd_valid && !hold) expect_uops(cmd);   // expected from first offer on
      acc = cmd_ready;                  // sampled before the clock edge
      @(negedge clk);
    end
    cmd_valid = 0;
    repeat (3) @(negedge clk);
    chk(!busy && expq.size() == 0, "drained");
    // back-to-back burst timing
    n = 0; nsh = 0; t0 = $time;
    for (int i = 0; i < 200; i++) begin
      cmd_valid = 1; cmd = cmd_t'($urandom);
      n++; if (cmd.typ == OP_SHIFT) nsh++;
      expect_uops(cmd);
      forever begin
        #1;
        acc = cmd_ready;
        @(negedge clk);
        if (acc) break;
      end
    end
    cmd_valid = 0;
    while (busy) @(negedge clk);
    t1 = $time;
    chk((t1 - t0) / 10 == longint'(n + nsh + 1),
        $sformatf("burst took %0d cycles, expected %0d", (t1 - t0) / 10, n + nsh + 1));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
