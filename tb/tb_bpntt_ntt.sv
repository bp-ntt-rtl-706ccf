// tb_bpntt_ntt: full-size workload test of the BP-NTT bank (default
// parameters: three 256x256 subarrays, 2048-entry command buffer).
//
// Runs a complete 128-point negacyclic NTT (Cooley-Tukey, in place, output
// in bit-reversed order) on every tile of every subarray for three tile
// configurations:
//   16-bit tiles, q = 12289,     16 tiles x 3 subarrays = 48 polynomials
//   14-bit tiles, q = 7681,      18 tiles x 3 subarrays = 54 polynomials
//   32-bit tiles, q = 998244353,  8 tiles x 3 subarrays = 24 polynomials
// Each result is compared with a software NTT, and the cycle count of each
// run is printed and checked against the command count of the program.
module tb_bpntt_ntt;
  import bpntt_pkg::*;
  import bpntt_prog_pkg::*;

  localparam int NPTS = 128;

  logic clk = 0, rst_n = 0;
  logic cmd_valid = 0, cmd_ready;
  logic [31:0] cmd_data = '0;
  logic cfg_we = 0;
  logic [255:0] cfg_tile_lsb = '0;
  logic host_we = 0;
  logic [1:0] host_sub = 0, host_rsub = 0;
  logic [7:0] host_row = 0, host_rrow = 0;
  logic [255:0] host_wdata = '0, host_rdata;
  logic busy;
  logic [11:0] cmd_count;

  bpntt_bank dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc++;

  initial begin : watchdog
    repeat (6_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  task automatic wr_row(int s, int r, logic [255:0] v);
    @(negedge clk);
    host_we = 1; host_sub = 2'(s); host_row = 8'(r); host_wdata = v;
    @(negedge clk);
    host_we = 0;
  endtask

  task automatic rd_row(int s, int r, output logic [255:0] v);
    host_rsub = 2'(s); host_rrow = 8'(r);
    #1;
    v = host_rdata;
  endtask

  task automatic run_prog(output longint elapsed);
    longint t0;
    @(negedge clk);
    t0 = cyc;
    while (prog.size() != 0) begin
      cmd_valid = 1; cmd_data = prog[0];
      @(posedge clk);
      if (cmd_ready) void'(prog.pop_front());
      @(negedge clk);
    end
    cmd_valid = 0;
    while (busy) @(negedge clk);
    elapsed = cyc - t0;
  endtask

  longint unsigned a [3][32][NPTS];

  task automatic run_config(int unsigned w, longint unsigned q, longint unsigned gen);
    longint unsigned psi, zm, tt, mask;
    longint el;
    logic [255:0] v;
    int ntiles, k;
    W = w;
    ntiles = 256 / w;
    mask = (64'd1 << w) - 1;
    @(negedge clk);
    cfg_we = 1; cfg_tile_lsb = tile_lsb_vec();
    @(negedge clk);
    cfg_we = 0;
    for (int r = R_ONES; r <= R_M; r++)
      for (int sa = 0; sa < 3; sa++) wr_row(sa, r, const_row(r, q));
    for (int sa = 0; sa < 3; sa++)
      for (int r = 0; r < NPTS; r++) begin
        v = '0;
        for (int t = 0; t < ntiles; t++) begin
          a[sa][t][r] = {$urandom, $urandom} % q;
          for (int b = 0; b < int'(w); b++) v[t*w + b] = a[sa][t][r][b];
        end
        wr_row(sa, r, v);
      end
    psi = powmod(gen, (q - 1) / (2 * NPTS), q);
    prog_cycles = 0;
    k = 0;
    for (int len = NPTS / 2; len > 0; len >>= 1)
      for (int idx = 0; idx < NPTS; idx += 2 * len) begin
        longint unsigned zt;
        k++;
        zt = zeta(k, NPTS, psi, q);
        zm = ((zt << (w / 2)) % q << (w - w / 2)) % q;   // zt * 2^w mod q
        for (int j = idx; j < idx + len; j++) begin
          butterfly(j, j + len, zm);
          for (int sa = 0; sa < 3; sa++)
            for (int t = 0; t < ntiles; t++) begin
              tt = (zt * a[sa][t][j + len]) % q;
              a[sa][t][j + len] = (a[sa][t][j] + q - tt) % q;
              a[sa][t][j] = (a[sa][t][j] + tt) % q;
            end
        end
      end
    begin
      longint unsigned expect_cycles;
      expect_cycles = prog_cycles;
      run_prog(el);
      $display("W=%0d q=%0d N=%0d: %0d polynomials, %0d cycles (%0d commands' cycles)",
               w, q, NPTS, 3 * ntiles, el, expect_cycles);
      check(el >= longint'(expect_cycles) + 2 && el <= longint'(expect_cycles) + 4,
            $sformatf("cycle count %0d for program of %0d cycles", el, expect_cycles));
    end
    for (int sa = 0; sa < 3; sa++)
      for (int r = 0; r < NPTS; r++) begin
        rd_row(sa, r, v);
        for (int t = 0; t < ntiles; t++) begin
          longint unsigned got;
          got = 0;
          for (int b = 0; b < int'(w); b++) got[b] = v[t*w + b];
          check(got == a[sa][t][r],
                $sformatf("W=%0d sub %0d tile %0d coef %0d: got %0d exp %0d", w, sa, t, r,
                          got, a[sa][t][r]));
        end
      end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    run_config(16, 12289, 11);
    run_config(14, 7681, 17);
    run_config(32, 998244353, 3);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
