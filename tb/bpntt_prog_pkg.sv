// bpntt_prog_pkg: host-side program generator and reference arithmetic for
// the BP-NTT bank testbenches.
//
// BP-NTT has no arithmetic units: modular multiplication, addition and the
// NTT butterfly are sequences of row-wise AND/XOR/OR, one-bit shifts and
// per-tile checks. This package writes those sequences as 32-bit commands
// into the queue `prog`, which a testbench then pushes into the bank.
//
// Row map (per subarray, every tile holds the same kind of value):
//   0 .. 239   polynomial coefficients, coefficient i in row i
//   240 .. 255 scratch and constant rows (R_* below)
// Tiles are W bits wide; the modulus q must satisfy q < 2^(W-1) so that the
// Montgomery result S + 2C < 2q fits in W bits.
//
// modmul(b, z): bit-parallel Montgomery multiplication (the paper's
//   Algorithm 2) of row b by the constant z, which is not stored anywhere:
//   its bits decide which commands are emitted. Result in carry-save form
//   P = S + 2*C = z * b * 2^-W mod q, P < 2q.
// ripple_add(x, y): x <- x + y mod 2^W per tile by repeated
//   carry = (x & y) masked to drop the tile MSB carry-out, shifted left.
//   W iterations always suffice. y is consumed.
// condsub(x): x <- x - q if x >= q, for x < 2q (sign of x - q taken from the
//   tile MSB with a Check MSB and used as a select mask).
// butterfly(j, k, z): Cooley-Tukey butterfly of the paper's Algorithm 1,
//   t = z*a[k], a[k] = a[j] - t, a[j] = a[j] + t, all mod q, with z given
//   in Montgomery form (z * 2^W mod q).
package bpntt_prog_pkg;

  localparam int R_M = 255, R_NQ = 254, R_Q1 = 253, R_NMSB = 252, R_ONES = 251;
  localparam int R_S = 250, R_C = 249, R_C1 = 248, R_S1 = 247, R_C2 = 246;
  localparam int R_T = 245, R_X = 244, R_Y = 243, R_D = 242, R_U = 241, R_V = 240;
  // Extra rows for polynomials split over a pair of tiles (ntt_split).
  localparam int R_P = 239, R_U2 = 238, R_V2 = 237, R_ME = 236, R_MO = 235;

  localparam int F_AND = 0, F_XOR = 1, F_OR = 2;

  logic [31:0] prog[$];
  int unsigned prog_cycles;   // cycles the queued program takes to execute
  int unsigned W = 16;        // tile width in bits

  function automatic void c_bin(int w, int a, int b, int f);
    logic [31:0] c;
    c = {2'd3, 8'(w), 8'(a), 8'(b), (f == F_XOR), (f == F_OR), 4'd0};
    prog.push_back(c); prog_cycles++;
  endfunction
  function automatic void c_un(int w, int a);
    prog.push_back({2'd1, 8'(w), 8'(a), 14'd0}); prog_cycles++;
  endfunction
  function automatic void c_sh(int w, int a, bit left);
    prog.push_back({2'd2, 8'(w), 8'(a), left, 13'd0}); prog_cycles += 2;
  endfunction
  function automatic void c_chk(int w, bit msb);
    prog.push_back({2'd0, 8'(w), 16'd0, 2'd0, msb, 3'd0}); prog_cycles++;
  endfunction

  function automatic void modmul(int b, longint unsigned z);
    c_bin(R_S, R_S, R_S, F_XOR);               // Sum = 0
    c_bin(R_C, R_C, R_C, F_XOR);               // Carry = 0
    for (int i = 0; i < int'(W); i++) begin
      if (z[i]) begin                          // P = P + a_i * B
        c_bin(R_C1, R_S, b, F_AND);            // c1 = Sum & B
        c_bin(R_S1, R_S, b, F_XOR);            // s1 = Sum ^ B
        c_sh (R_C, R_C, 1'b1);                 // Carry << 1
        c_bin(R_C2, R_C, R_S1, F_AND);         // c2 = Carry & s1
        c_bin(R_S, R_C, R_S1, F_XOR);          // Sum = Carry ^ s1
        c_bin(R_C, R_C1, R_C2, F_OR);          // Carry = c1 | c2
      end
      c_un (R_T, R_S);                         // latch Sum
      c_chk(R_T, 1'b0);                        // T = LSB(Sum) per tile
      c_bin(R_T, R_T, R_M, F_AND);             // m = LSB ? M : 0
      c_bin(R_C1, R_S, R_T, F_AND);            // c1 = Sum & m
      c_bin(R_S1, R_S, R_T, F_XOR);            // s1 = Sum ^ m
      c_sh (R_S1, R_S1, 1'b0);                 // s1 >> 1
      c_bin(R_C2, R_S1, R_C1, F_AND);          // c2 = s1 & c1
      c_bin(R_S1, R_S1, R_C1, F_XOR);          // s2 = s1 ^ c1
      c_bin(R_C1, R_C, R_S1, F_AND);           // c3 = Carry & s2
      c_bin(R_S, R_C, R_S1, F_XOR);            // Sum = Carry ^ s2
      c_bin(R_C, R_C2, R_C1, F_OR);            // Carry = c2 | c3
    end
  endfunction

  function automatic void ripple_add(int x, int y);
    for (int i = 0; i < int'(W); i++) begin
      c_bin(R_T, x, y, F_AND);
      c_bin(x, x, y, F_XOR);
      c_bin(R_T, R_T, R_NMSB, F_AND);
      c_sh (y, R_T, 1'b1);
    end
  endfunction

  function automatic void condsub(int x);
    c_un(R_D, x);
    c_un(R_Y, R_NQ);
    ripple_add(R_D, R_Y);                      // D = x - q mod 2^W
    c_un(R_T, R_D);
    c_chk(R_T, 1'b1);                          // T = sign(D) per tile
    c_bin(R_Y, R_D, x, F_XOR);
    c_bin(R_Y, R_Y, R_T, F_AND);
    c_bin(x, R_D, R_Y, F_XOR);                 // x = sign ? x : D
  endfunction

  function automatic void butterfly(int j, int k, longint unsigned zm);
    butterfly_core(j, k, zm);
    c_un (j, R_U);
    c_un (k, R_V);
  endfunction

  // Butterfly that leaves a[j] + t in R_U and a[j] - t in R_V.
  function automatic void butterfly_core(int j, int k, longint unsigned zm);
    modmul(k, zm);
    c_sh (R_Y, R_C, 1'b1);                     // t = Sum + Carry << 1
    c_un (R_X, R_S);
    ripple_add(R_X, R_Y);
    condsub(R_X);
    c_un (R_U, j);                             // u = a[j] + t
    c_un (R_Y, R_X);
    ripple_add(R_U, R_Y);
    condsub(R_U);
    c_bin(R_V, R_X, R_ONES, F_XOR);            // v = a[j] + ~t + (q + 1)
    c_un (R_Y, R_Q1);
    ripple_add(R_V, R_Y);
    c_un (R_Y, j);
    ripple_add(R_V, R_Y);
    condsub(R_V);
  endfunction

  // dst <- src moved by one whole tile (W one-bit shifts).
  function automatic void shift_tile(int dst, int src, bit left);
    c_sh(dst, src, left);
    for (int i = 1; i < int'(W); i++) c_sh(dst, dst, left);
  endfunction

  // dst <- (a & R_ME) | (b & R_MO): even tiles from a, odd tiles from b.
  function automatic void merge(int dst, int a, int b);
    c_bin(R_T, a, R_ME, F_AND);
    c_bin(R_Y, b, R_MO, F_AND);
    c_bin(dst, R_T, R_Y, F_OR);
  endfunction

  // NTT of n points (n = 2 * rows) split over tile pairs: the even tile of a
  // pair holds a[0 .. n/2-1] in rows 0 .. n/2-1, the odd tile a[n/2 .. n-1].
  // Stage 1 pairs a[r] with a[r + n/2]: the odd tile's row is moved one tile
  // down with one-bit shifts, the butterfly runs, and a[r + n/2] is moved
  // back and merged. Later stages stay inside one tile but the two halves
  // need different twiddles, so each row pair is run once per twiddle and the
  // results are merged with the even/odd tile masks.
  // zm_of(k) must be the Montgomery form of zeta[k]; it is passed as a table.
  function automatic void ntt_split(int n, longint unsigned zmt[]);
    int h = n / 2;
    for (int r = 0; r < h; r++) begin
      shift_tile(R_P, r, 1'b0);                // a[r + n/2] into the even tile
      butterfly_core(r, R_P, zmt[1]);
      shift_tile(R_P, R_V, 1'b1);              // a[r + n/2]' back to the odd tile
      merge(r, R_U, R_P);
    end
    for (int len = h / 2; len > 0; len >>= 1)
      for (int j0 = 0; j0 < h; j0 += 2 * len)
        for (int j = j0; j < j0 + len; j++) begin
          int ke, ko;
          ke = n / (2 * len) + j / (2 * len);
          ko = n / (2 * len) + (h + j) / (2 * len);
          butterfly_core(j, j + len, zmt[ke]);
          c_un(R_U2, R_U);
          c_un(R_V2, R_V);
          butterfly_core(j, j + len, zmt[ko]);
          merge(j, R_U2, R_U);
          merge(j + len, R_V2, R_V);
        end
  endfunction

  // ---- reference arithmetic -------------------------------------------
  function automatic longint unsigned powmod(longint unsigned b, longint unsigned e,
                                             longint unsigned q);
    longint unsigned r = 1;
    b = b % q;
    while (e != 0) begin
      if (e[0]) r = (r * b) % q;
      b = (b * b) % q;
      e = e >> 1;
    end
    return r;
  endfunction

  function automatic int unsigned brv(int unsigned x, int unsigned bits);
    int unsigned r = 0;
    for (int unsigned i = 0; i < bits; i++) r |= ((x >> i) & 1) << (bits - 1 - i);
    return r;
  endfunction

  // zeta[k] = psi^brv(k), psi a primitive 2n-th root of unity mod q.
  function automatic longint unsigned zeta(int unsigned k, int unsigned n,
                                           longint unsigned psi, longint unsigned q);
    return powmod(psi, brv(k, $clog2(n)), q);
  endfunction

  // Tile-position masks for ntt_group: row R_MK0 - m has ones in every tile
  // whose index within its group of tiles is m.
  localparam int R_MK0 = 236;

  // acc <- acc | (src & mask of tile position m).
  function automatic void acc_masked(int acc, int src, int m);
    c_bin(R_T, src, R_MK0 - m, F_AND);
    c_bin(acc, acc, R_T, F_OR);
  endfunction

  // NTT of n points split over a group of g tiles (n = g * rows): tile m of a
  // group holds a[m*h .. m*h + h-1] in rows 0 .. h-1, h = n / g. A stage with
  // distance len >= h pairs tile m with tile m + len/h: the upper operand is
  // moved down by len/h tiles, the butterfly runs once per twiddle of the
  // stage, and the lower/upper results are collected with the tile masks,
  // the upper ones moved back up. Stages inside a tile run each row pair once
  // per tile position, each with that position's twiddle.
  function automatic void ntt_group(int n, int g, longint unsigned zmt[]);
    int h = n / g;
    for (int len = n / 2; len >= h; len >>= 1) begin
      int d = len / h;
      for (int r = 0; r < h; r++) begin
        shift_tile(R_P, r, 1'b0);                  // upper operand down
        for (int i = 1; i < d; i++) shift_tile(R_P, R_P, 1'b0);
        c_bin(R_U2, R_U2, R_U2, F_XOR);
        c_bin(R_V2, R_V2, R_V2, F_XOR);
        for (int b = 0; b < g / (2 * d); b++) begin
          butterfly_core(r, R_P, zmt[n / (2 * len) + b]);
          for (int m = 2 * d * b; m < 2 * d * b + d; m++) begin
            acc_masked(R_U2, R_U, m);
            acc_masked(R_V2, R_V, m);
          end
        end
        for (int i = 0; i < d; i++) shift_tile(R_V2, R_V2, 1'b1);
        c_bin(r, R_U2, R_V2, F_OR);
      end
    end
    for (int len = h / 2; len > 0; len >>= 1)
      for (int j0 = 0; j0 < h; j0 += 2 * len)
        for (int j = j0; j < j0 + len; j++) begin
          c_bin(R_U2, R_U2, R_U2, F_XOR);
          c_bin(R_V2, R_V2, R_V2, F_XOR);
          for (int m = 0; m < g; m++) begin
            butterfly_core(j, j + len, zmt[n / (2 * len) + (m * h + j) / (2 * len)]);
            acc_masked(R_U2, R_U, m);
            acc_masked(R_V2, R_V, m);
          end
          c_un(j, R_U2);
          c_un(j + len, R_V2);
        end
  endfunction

  // Mask row for ntt_group: ones in every whole tile at position m of a group
  // of g tiles, for the groups that fit the row.
  function automatic logic [255:0] group_mask(int g, int m);
    logic [255:0] r = '0;
    int ntiles;
    ntiles = (256 / W) / g * g;
    for (int t = 0; t < ntiles; t++)
      if (t % g == m)
        for (int unsigned b = 0; b < W; b++) r[t * W + b] = 1'b1;
    return r;
  endfunction

  // Replicate a W-bit value into every whole tile of a COLS-bit row.
  function automatic logic [255:0] rep(longint unsigned v);
    logic [255:0] r = '0;
    for (int unsigned t = 0; t + W <= 256; t += W)
      for (int unsigned b = 0; b < W; b++) r[t + b] = v[b];
    return r;
  endfunction

  // Mask row with ones in every even (odd = 0) or odd (odd = 1) whole tile.
  function automatic logic [255:0] pair_mask(bit odd);
    logic [255:0] r = '0;
    int t = 0;
    for (int unsigned c = 0; c + W <= 256; c += W) begin
      if (t[0] == odd)
        for (int unsigned b = 0; b < W; b++) r[c + b] = 1'b1;
      t++;
    end
    return r;
  endfunction

  function automatic logic [255:0] tile_lsb_vec();
    logic [255:0] r = '0;
    for (int unsigned t = 0; t < 256; t += W) r[t] = 1'b1;
    return r;
  endfunction

  // The five constant rows for modulus q.
  function automatic logic [255:0] const_row(int r, longint unsigned q);
    longint unsigned mw = (64'd1 << W) - 1;
    case (r)
      R_M:    return rep(q);
      R_NQ:   return rep(((64'd1 << W) - q) & mw);
      R_Q1:   return rep(q + 1);
      R_NMSB: return rep(mw >> 1);
      default: return rep(mw);
    endcase
  endfunction

endpackage
