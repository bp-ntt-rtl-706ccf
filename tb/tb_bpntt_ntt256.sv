// tb_bpntt_ntt256: 256-point NTTs on the BP-NTT bank at its default size.
//
// 256 coefficients do not fit one tile next to the scratch rows, so each
// polynomial is split over a pair of adjacent tiles: a[0..127] in the even
// tile and a[128..255] in the odd tile, rows 0..127. The first NTT stage
// moves the odd tile's operand into the even tile with one-bit shifts and
// moves the result back (bpntt_prog_pkg::ntt_split). Configurations:
//   16-bit tiles, q = 12289: 8 tile pairs x 3 subarrays = 24 polynomials
//   14-bit tiles, q = 7681:  9 tile pairs x 3 subarrays = 27 polynomials
//   32-bit tiles, q = 998244353: 4 tile pairs x 3 subarrays = 12 polynomials
// Results are compared with a software NTT; the cycle count is checked
// against the command count of the program and printed.
module tb_bpntt_ntt256;
  import bpntt_pkg::*;
  import bpntt_prog_pkg::*;

  localparam int NPTS = 256;

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
    repeat (8_000_000) @(posedge clk);
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

  longint unsigned a [3][9][NPTS];

  task automatic run_config(int unsigned w, longint unsigned q, longint unsigned gen);
    longint unsigned psi, tt, zmt[];
    longint el;
    logic [255:0] v;
    int npairs, k;
    W = w;
    npairs = (256 / w) / 2;
    @(negedge clk);
    cfg_we = 1; cfg_tile_lsb = tile_lsb_vec();
    @(negedge clk);
    cfg_we = 0;
    for (int r = R_ONES; r <= R_M; r++)
      for (int sa = 0; sa < 3; sa++) wr_row(sa, r, const_row(r, q));
    for (int sa = 0; sa < 3; sa++) begin
      wr_row(sa, R_ME, pair_mask(1'b0));
      wr_row(sa, R_MO, pair_mask(1'b1));
    end
    for (int sa = 0; sa < 3; sa++) begin
      for (int p = 0; p < npairs; p++)
        for (int i = 0; i < NPTS; i++) a[sa][p][i] = {$urandom, $urandom} % q;
      for (int r = 0; r < NPTS / 2; r++) begin
        v = '0;
        for (int p = 0; p < npairs; p++)
          for (int b = 0; b < int'(w); b++) begin
            v[(2*p) * w + b]     = a[sa][p][r][b];
            v[(2*p + 1) * w + b] = a[sa][p][r + NPTS/2][b];
          end
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
            for (int p = 0; p < npairs; p++) begin
              tt = (zt * a[sa][p][j + len]) % q;
              a[sa][p][j + len] = (a[sa][p][j] + q - tt) % q;
              a[sa][p][j] = (a[sa][p][j] + tt) % q;
            end
      end
    prog_cycles = 0;
    ntt_split(NPTS, zmt);
    begin
      longint unsigned expect_cycles;
      expect_cycles = prog_cycles;
      run_prog(el);
      $display("W=%0d q=%0d N=%0d: %0d polynomials, %0d cycles (%0d commands' cycles)",
               w, q, NPTS, 3 * npairs, el, expect_cycles);
      check(el >= longint'(expect_cycles) + 2 && el <= longint'(expect_cycles) + 4,
            $sformatf("cycle count %0d for program of %0d cycles", el, expect_cycles));
    end
    for (int sa = 0; sa < 3; sa++)
      for (int r = 0; r < NPTS / 2; r++) begin
        rd_row(sa, r, v);
        for (int p = 0; p < npairs; p++)
          for (int hf = 0; hf < 2; hf++) begin
            longint unsigned got;
            got = 0;
            for (int b = 0; b < int'(w); b++) got[b] = v[(2*p + hf) * w + b];
            check(got == a[sa][p][r + hf * NPTS/2],
                  $sformatf("W=%0d sub %0d pair %0d coef %0d: got %0d exp %0d", w, sa, p,
                            r + hf * NPTS/2, got, a[sa][p][r + hf * NPTS/2]));
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
