// tb_bpntt_bank: end-to-end test of the BP-NTT bank at its default size
// (three 256x256 compute subarrays, 2048-entry command buffer).
//
// Sixteen 16-bit tiles per subarray, q = 12289, so 48 independent
// polynomials are processed at once.
//  1. Bit-parallel modular multiplication: rows 0..7 hold random b < q; for a
//     random Montgomery constant z each row is multiplied and the carry-save
//     result S + 2C is checked against z*b*2^-16 mod q (and S + 2C < 2q).
//     The execution time is checked against the command count (one cycle per
//     command, two per Shift, plus a fixed pipeline latency).
//  2. A negacyclic NTT of N = NPTS points (the paper's Algorithm 1) on all 48
//     polynomials, compared with a software NTT.
//  3. Normal memory use: rows written and read back by the host.
// Every mechanism is counted (AND, XOR, OR, copy, left and right shift, LSB
// and MSB checks, command-buffer back-pressure) and must occur.
module tb_bpntt_bank;
  import bpntt_pkg::*;
  import bpntt_prog_pkg::*;

  localparam int NPTS = 16;
  localparam longint unsigned Q = 12289;

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

  // mechanism counters
  int n_and, n_xor, n_or, n_cpy, n_shl, n_shr, n_chk_lsb, n_chk_msb, n_full;
  always @(posedge clk) if (rst_n) begin
    if (dut.uop.valid && dut.uop.wr_en) begin
      case (dut.uop.sel)
        SA_AND:    if (dut.uop.wl1_en) n_and++; else n_cpy++;
        SA_XOR:    n_xor++;
        SA_OR:     n_or++;
        SA_SHL:    n_shl++;
        SA_SHR:    n_shr++;
        SA_BC_LSB: n_chk_lsb++;
        SA_BC_MSB: n_chk_msb++;
        default: ;
      endcase
    end
    if (cmd_valid && !cmd_ready) n_full++;
  end

  initial begin : watchdog
    repeat (3_000_000) @(posedge clk);
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

  // Push the queued program and wait until the bank is idle; returns cycles.
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

  function automatic longint unsigned tile(logic [255:0] row, int t);
    return longint'(row[t*16 +: 16]);
  endfunction

  longint unsigned a [3][16][NPTS];   // [subarray][tile][coef]
  longint unsigned b0 [3][16][8];

  initial begin
    longint el;
    longint unsigned z, zm, rinv, psi, p, s, c;
    logic [255:0] v;
    W = 16;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    cfg_we = 1; cfg_tile_lsb = tile_lsb_vec();
    @(negedge clk);
    cfg_we = 0;
    for (int r = R_ONES; r <= R_M; r++)
      for (int sa = 0; sa < 3; sa++) wr_row(sa, r, const_row(r, Q));

    // ---- 1. modular multiplication ----
    rinv = powmod(64'd1 << 16, Q - 2, Q);
    for (int sa = 0; sa < 3; sa++)
      for (int r = 0; r < 8; r++) begin
        v = '0;
        for (int t = 0; t < 16; t++) begin
          b0[sa][t][r] = $urandom_range(int'(Q) - 1);
          v[t*16 +: 16] = 16'(b0[sa][t][r]);
        end
        wr_row(sa, r, v);
      end
    for (int r = 0; r < 8; r++) begin
      z = (r == 0) ? Q - 1 : $urandom_range(int'(Q) - 1);
      prog_cycles = 0;
      modmul(r, z);
      begin
        int unsigned expect_cycles;
        expect_cycles = prog_cycles;
        run_prog(el);
        check(el == longint'(expect_cycles) + 2,
              $sformatf("modmul cycles %0d expected %0d", el, expect_cycles + 2));
      end
      for (int sa = 0; sa < 3; sa++)
        for (int t = 0; t < 16; t++) begin
          rd_row(sa, R_S, v); s = tile(v, t);
          rd_row(sa, R_C, v); c = tile(v, t);
          p = s + 2 * c;
          check(p < 2 * Q && (p % Q) == (((z * b0[sa][t][r]) % Q) * rinv) % Q,
                $sformatf("modmul sub %0d tile %0d row %0d: z=%0d b=%0d got %0d", sa, t, r,
                          z, b0[sa][t][r], p));
        end
    end

    // ---- 2. NTT ----
    psi = powmod(11, (Q - 1) / (2 * NPTS), Q);
    for (int sa = 0; sa < 3; sa++)
      for (int r = 0; r < NPTS; r++) begin
        v = '0;
        for (int t = 0; t < 16; t++) begin
          a[sa][t][r] = $urandom_range(int'(Q) - 1);
          v[t*16 +: 16] = 16'(a[sa][t][r]);
        end
        wr_row(sa, r, v);
      end
    begin
      int k = 0;
      for (int len = NPTS / 2; len > 0; len >>= 1)
        for (int idx = 0; idx < NPTS; idx += 2 * len) begin
          k++;
          zm = (zeta(k, NPTS, psi, Q) << 16) % Q;
          for (int j = idx; j < idx + len; j++) begin
            longint unsigned tt;
            butterfly(j, j + len, zm);
            for (int sa = 0; sa < 3; sa++)
              for (int t = 0; t < 16; t++) begin
                tt = (zeta(k, NPTS, psi, Q) * a[sa][t][j + len]) % Q;
                a[sa][t][j + len] = (a[sa][t][j] + Q - tt) % Q;
                a[sa][t][j] = (a[sa][t][j] + tt) % Q;
              end
          end
        end
      run_prog(el);   // the whole NTT in one go: the command buffer fills up
    end
    for (int sa = 0; sa < 3; sa++)
      for (int r = 0; r < NPTS; r++) begin
        rd_row(sa, r, v);
        for (int t = 0; t < 16; t++)
          check(tile(v, t) == a[sa][t][r],
                $sformatf("ntt sub %0d tile %0d coef %0d: got %0d exp %0d", sa, t, r,
                          tile(v, t), a[sa][t][r]));
      end

    // ---- 3. normal memory use ----
    for (int sa = 0; sa < 3; sa++) begin
      v = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
      wr_row(sa, 200 + sa, v);
      begin
        logic [255:0] rb;
        rd_row(sa, 200 + sa, rb);
        check(rb == v, "host row write/read");
      end
    end

    $display("mechanisms: and=%0d xor=%0d or=%0d copy=%0d shl=%0d shr=%0d chk_lsb=%0d chk_msb=%0d buffer_full=%0d",
             n_and, n_xor, n_or, n_cpy, n_shl, n_shr, n_chk_lsb, n_chk_msb, n_full);
    check(n_and > 0, "AND used");       check(n_xor > 0, "XOR used");
    check(n_or > 0, "OR used");         check(n_cpy > 0, "copy used");
    check(n_shl > 0, "left shift used"); check(n_shr > 0, "right shift used");
    check(n_chk_lsb > 0, "LSB check used"); check(n_chk_msb > 0, "MSB check used");
    check(n_full > 0, "command buffer back-pressure seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
