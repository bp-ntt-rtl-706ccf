// tb_bpntt_ntt2048: 2048-point NTTs on the BP-NTT bank at its default size,
// the largest order the bank holds: each polynomial is split over all
// g = 16 tiles of a subarray: tile m of a group holds a[128*m .. 128*m + 127]
// in rows 0..127.
// Stages whose butterflies span tiles move the upper operand down with
// one-bit shifts and the result back up; the other stages run each row pair
// once per tile position (bpntt_prog_pkg::ntt_group). Configurations, 16-bit
// tiles, q = 12289: 1 group of 16 tiles x 3 subarrays = 3 polynomials.
// tb_bpntt_ntt_group runs the same program for 512 and 1024 points.
// Results are compared with a software NTT; the cycle count is checked
// against the command count of the program and printed.
module tb_bpntt_ntt2048;
  import bpntt_pkg::*;
  import bpntt_prog_pkg::*;

  localparam int NMAX = 2048;

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
    repeat (12_000_000) @(posedge clk);
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

  longint unsigned a [3][4][NMAX];

  task automatic run_config(int unsigned w, longint unsigned q, longint unsigned gen, int NPTS,
                            int g);
    longint unsigned psi, tt, zmt[];
    longint el;
    logic [255:0] v;
    int ngroups, k, h;
    W = w;
    ngroups = (256 / w) / g;
    h = NPTS / g;
    @(negedge clk);
    cfg_we = 1; cfg_tile_lsb = tile_lsb_vec();
    @(negedge clk);
    cfg_we = 0;
    for (int r = R_ONES; r <= R_M; r++)
      for (int sa = 0; sa < 3; sa++) wr_row(sa, r, const_row(r, q));
    for (int sa = 0; sa < 3; sa++)
      for (int m = 0; m < g; m++) wr_row(sa, R_MK0 - m, group_mask(g, m));
    for (int sa = 0; sa < 3; sa++) begin
      for (int p = 0; p < ngroups; p++)
        for (int i = 0; i < NPTS; i++) a[sa][p][i] = {$urandom, $urandom} % q;
      for (int r = 0; r < h; r++) begin
        v = '0;
        for (int p = 0; p < ngroups; p++)
          for (int m = 0; m < g; m++)
            for (int b = 0; b < int'(w); b++) v[(g*p + m) * w + b] = a[sa][p][m*h + r][b];
        wr_row(sa, r, v);
      end
    end
    psi = powmod(gen, (q - 1) / (2 * NPTS), q);
    zmt = new[NPTS];
    for (int i = 1; i < NPTS; i++)
      zmt[i] = ((zeta(i, NPTS, psi, q) << (w / 2)) % q << (w - w / 2)) % q;
    // software reference (Algorithm 1)
    k = 0;
    for (int len = NPTS / 2; len > 0; len >>= 1)
      for (int idx = 0; idx < NPTS; idx += 2 * len) begin
        longint unsigned zt;
        k++;
        zt = zeta(k, NPTS, psi, q);
        for (int j = idx; j < idx + len; j++)
          for (int sa = 0; sa < 3; sa++)
            for (int p = 0; p < ngroups; p++) begin
              tt = (zt * a[sa][p][j + len]) % q;
              a[sa][p][j + len] = (a[sa][p][j] + q - tt) % q;
              a[sa][p][j] = (a[sa][p][j] + tt) % q;
            end
      end
    prog_cycles = 0;
    ntt_group(NPTS, g, zmt);
    begin
      longint unsigned expect_cycles;
      expect_cycles = prog_cycles;
      run_prog(el);
      $display("W=%0d q=%0d N=%0d: %0d polynomials, %0d cycles (%0d commands' cycles)",
               w, q, NPTS, 3 * ngroups, el, expect_cycles);
      check(el >= longint'(expect_cycles) + 2 && el <= longint'(expect_cycles) + 4,
            $sformatf("cycle count %0d for program of %0d cycles", el, expect_cycles));
    end
    for (int sa = 0; sa < 3; sa++)
      for (int r = 0; r < h; r++) begin
        rd_row(sa, r, v);
        for (int p = 0; p < ngroups; p++)
          for (int m = 0; m < g; m++) begin
            longint unsigned got;
            got = 0;
            for (int b = 0; b < int'(w); b++) got[b] = v[(g*p + m) * w + b];
            check(got == a[sa][p][m*h + r],
                  $sformatf("N=%0d sub %0d group %0d coef %0d: got %0d exp %0d", NPTS, sa, p,
                            m*h + r, got, a[sa][p][m*h + r]));
          end
      end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    run_config(16, 12289, 11, 2048, 16);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
