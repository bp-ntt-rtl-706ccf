// tb_bpntt_cmd_buffer: the CTRL/CMD command buffer against a queue model.
// Random push/pop traffic at full size (2048 entries): order, full and
// empty flags and the count are checked every cycle; a phase of pushes only
// fills it so that back-pressure (push_ready low) is seen, then it drains.
module tb_bpntt_cmd_buffer;
  localparam int DEPTH = 2048;
  logic clk = 0, rst_n = 0;
  logic push_valid, push_ready, pop_valid, pop_ready;
  logic [31:0] push_data, pop_data;
  logic [11:0] count;
  int checks = 0, failures = 0, full_seen = 0;
  logic [31:0] model[$];

  bpntt_cmd_buffer #(.CMD_W(32), .DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;

  initial begin : watchdog
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string s);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", s); end
  endtask

  initial begin
    push_valid = 0; pop_ready = 0; push_data = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int it = 0; it < 20000; it++) begin
      int phase;
      phase = it / 5000;       // 0 random, 1 fill, 2 random, 3 drain
      push_valid = (phase == 1) ? 1'b1 : (phase == 3) ? 1'b0 : ($urandom_range(1) == 1);
      pop_ready  = (phase == 1) ? 1'b0 : (phase == 3) ? 1'b1 : ($urandom_range(1) == 1);
      push_data  = $urandom;
      #1;
      chk(push_ready == (model.size() < DEPTH), "push_ready");
      chk(pop_valid == (model.size() > 0), "pop_valid");
      chk(count == 12'(model.size()), "count");
      if (pop_valid && model.size() > 0) chk(pop_data == model[0], "order");
      if (!push_ready) full_seen++;
      @(posedge clk);
      if (pop_valid && pop_ready) void'(model.pop_front());
      if (push_valid && push_ready) model.push_back(push_data);
      @(negedge clk);
    end
    chk(full_seen > 0, "buffer became full");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
