# BP-NTT: number theoretic transforms inside an SRAM subarray

Lattice-based cryptography spends most of its time multiplying polynomials,
and the number theoretic transform (NTT) is the standard way to do that in
O(N log N). BP-NTT runs the NTT inside an ordinary 256x256 6T SRAM subarray
instead of in a separate arithmetic unit. It needs almost no extra hardware.
The sense amplifiers under the array are extended so that, when two rows are
read at once, they produce the bitwise AND, OR or XOR of the two rows. A
one-bit left/right shift of the latched result is also added. Everything else
is a program: modular multiplication, modular addition and subtraction, and
the butterfly are sequences of these row-wide bitwise operations. The host
issues them as 32-bit commands.

Two ideas make this fast enough:

* **Bit-parallel, carry-save Montgomery multiplication.** A product is
  kept as two rows, `Sum` and `Carry`, that are never added with carry
  propagation. Every step is a bitwise operation on a whole row, so all bits
  of all coefficients in the row advance together. The twiddle factor never
  sits in memory. Its bits decide which commands the host emits.
* **Coefficients in rows, not in columns.** A polynomial lives in a *tile*,
  a group of adjacent columns one coefficient wide. Its coefficients are
  stacked in consecutive rows. The two operands of a butterfly are therefore
  always in the same columns, and choosing them only takes two row
  addresses. Many tiles sit side by side (sixteen 16-bit tiles in 256
  columns), so one command works on that many independent polynomials at
  once.

The design follows "BP-NTT: Fast and Compact in-SRAM Number Theoretic
Transform with Bit-Parallel Modular Multiplication" (J. Zhang, M. Imani,
E. Sadredini, DAC 2023). This is an independent RTL rendering of it, not the
authors' code. It gives synthesizable SystemVerilog for a BP-NTT bank, a
command-program generator that runs Algorithm-2-style multiplication and
complete NTTs on it, and self-checking testbenches.

## Organisation of a bank

```
             host: commands, row reads/writes, tile configuration
                    |
    +---------------v----------------+
    | bpntt_cmd_buffer  (CTRL/CMD    |   2048 x 32-bit command ring
    |   subarray, 256x256 bits)      |
    +---------------+----------------+
                    | one command per cycle (Shift: two)
    +---------------v----------------+
    | bpntt_ctrl  command decoder    |   -> sa_uop_t (decoder enables and
    +---------------+----------------+      addresses, SA select, latch, write)
          +---------+----------+----------------+
          v                    v                v
   bpntt_subarray       bpntt_subarray    bpntt_subarray     (lock step)
   256 rows x 256 cols  each: Decoder0, Decoder1, write decoder,
                        cell array, bpntt_sa_row (256 x bpntt_sa_slice)
```

A bank has four subarrays. One is used as the command store and three are
compute units. All three run every command together, each on its own data.
`bpntt_bank` is the top module.

## Data layout: tiles and rows

Column `j` of a row is one bit. A tile of width `W` occupies columns
`t*W .. t*W+W-1`, with its least significant bit in the lowest column. Tile
boundaries are not fixed. The host writes a 256-bit vector `cfg_tile_lsb`
with a 1 in the lowest column of every tile. Any width works, including
widths that do not divide 256 (14-bit tiles give 18 tiles, with 4 columns
unused).

Inside a tile, row `i` holds coefficient `i`. All tiles share the row map.
The test programs use:

| rows       | content                                                        |
|------------|----------------------------------------------------------------|
| 0 .. 239   | coefficients (at most 240 per tile)                            |
| 240 .. 250 | scratch: V, U, D, Y, X, T, C2, S1, C1, C (Carry), S (Sum)      |
| 251        | all ones                                                       |
| 252        | all ones except each tile's MSB (carry mask)                   |
| 253        | q + 1                                                          |
| 254        | 2^W - q                                                        |
| 255        | q (the modulus M)                                              |

Each constant row holds the same value in every tile. The row map belongs
to the program, not the hardware. `tb/bpntt_prog_pkg.sv` defines it.

## The modified sense amplifier

`bpntt_sa_slice` is one column. When rows are activated, the true bitline
stays high only if every activated cell holds 1, so its amplifier reads the
**AND** of the cells. The complement bitline stays high only if every cell
holds 0, so it reads their **NOR**. The slice builds the other functions
from these two:

* OR = NOT(NOR), through an inverter;
* XOR = NOR(AND, NOR): for two rows it is 1 exactly when one of them is 1.

A first multiplexer picks AND, OR or XOR. A second picks that result, the
latch output of the column below (`Dout(n-1)`, a left shift), the latch
output of the column above (`Dout(n+1)`, a right shift), or a tile broadcast
bit (see Check below). A clocked latch with enable holds the column's
output. The value going into the latch is also written back into the
destination row at the same clock edge.

Reading one row gives AND = the row itself, so one-row reads copy. Reading
the same row through both decoders gives XOR = 0, which the programs use to
clear a row.

`bpntt_sa_row` chains 256 slices. The shift chain runs straight across tile
boundaries, as in the original circuit. A bit that leaves one tile enters
its neighbour. The programs keep that bit zero:

* In the multiplication, the top bit of `Carry` is always 0 before its left
  shift, and the lowest bit of `s1` is always 0 before its right shift. These
  are the same two facts that let the multiplication fit in `W` columns
  instead of `W+1`.
* In additions, the carry row is ANDed with the carry-mask row (row 252)
  before it is shifted. This drops the carry out of each tile's MSB, so
  additions are modulo 2^W per tile.

## Command set

Commands are 32 bits. The field widths come from the original design; the
bit positions and codes are this implementation's.

| bits  | Check            | Unary          | Shift                  | Binary                   |
|-------|------------------|----------------|------------------------|--------------------------|
| 31:30 | `00`             | `01`           | `10`                   | `11`                     |
| 29:22 | written address  | written address| written address        | written address          |
| 21:14 | -                | operand 0      | operand 0              | operand 0                |
| 13    | -                | -              | 1 = left, 0 = right    | operand 1 (13:6)         |
| 5     | -                | -              | -                      | 1 = XOR, 0 = AND         |
| 4     | -                | -              | -                      | 1 = OR (overrides bit 5) |
| 3     | 1 = MSB, 0 = LSB | -              | -                      | -                        |

* **Unary** copies row `op0` to the written row.
* **Binary** activates `op0` and `op1` together and writes AND, XOR or OR.
* **Shift** takes two cycles. The first senses `op0` into the latch. The
  second moves the latch one column left (towards the MSB) or right, and
  writes it.
* **Check** does not read the array. Every column's latch takes the latched
  LSB (or MSB) of its own tile, and the result is written. The result is an
  all-ones/all-zeros mask per tile, which lets each tile make its own
  data-dependent choice. The multiplication needs this for the
  `m = LSB(Sum) ? M : 0` step, and the conditional subtraction needs it for
  the sign test. The original design needs such a choice but does not say
  how the hardware makes it. This broadcast is this implementation's answer, and the
  only sense-amplifier input the original circuit does not show.

Timing: `bpntt_ctrl` registers the decoded micro-operation, so a command
reaches the subarrays one cycle after it is accepted. One command executes
per cycle (Shift: two). A command always sees the result of the previous
one, so there are no hazards. Check reads the latch, so it sees the value
the previous command produced.

## Bit-parallel Montgomery multiplication

The hardest part to follow is how a multiplication by a constant becomes
a stream of row operations. For a `W`-bit tile and odd modulus `M < 2^(W-1)`,
the program computes `P = z*B*2^-W mod M`. Here `B` is a coefficient row and
`z` a twiddle factor held only in the program. `P` stays in carry-save form,
`P = Sum + 2*Carry`.

Pass `z*2^W mod M` instead of `z`, and the `2^-W` cancels. The twiddle
factors are converted once, on the host, before the program is built.

```
Sum = 0; Carry = 0                         (XOR a row with itself)
for i = 0 .. W-1:
  if bit i of z is 1:                      (decided when the program is built)
    c1 = Sum & B ;  s1 = Sum ^ B
    Carry = Carry << 1                     (Carry's MSB is 0: nothing leaks)
    c2 = Carry & s1 ;  Sum = Carry ^ s1
    Carry = c1 | c2                        (c1 and c2 never both 1)
  T = Sum ; T = Check-LSB(T) ; m = T & M   (m = M where Sum is odd, else 0)
  c1 = Sum & m ;  s1 = Sum ^ m
  s1 = s1 >> 1                             (s1's LSB is 0: nothing leaks)
  c2 = s1 & c1 ;  s2 = s1 ^ c1
  c3 = Carry & s2 ;  Sum = Carry ^ s2
  Carry = c2 | c3
```

Each round adds `z_i*B`, then adds `M` if the running value is odd, and
halves the result. This is Montgomery's algorithm. Two details make it work
in carry-save form:

* `Sum + 2*Carry` is odd exactly when `Sum` is odd, so the parity test
  needs only the LSB of `Sum`.
* Halving `s1 + 2*c1 + 2*Carry` gives `(s1>>1) + c1 + Carry` exactly, because
  the LSB of `s1` is 0. Right-shifting `s1` alone is therefore enough.

With `B < M`, the result satisfies `P < 2M < 2^W`. A round costs 12 cycles,
plus 7 more when the twiddle bit is 1.

## Modular addition, subtraction and the butterfly

The original description only says that the product is added to a
coefficient with the help of one-bit shifts. The programs here use these steps, all built from the commands
above:

* **ripple_add(x, y):** repeat `W` times:
  `T = x & y; x = x ^ y; T = T & carry_mask; y = T << 1`.
  After `W` rounds no carry is left. The result is `x + y mod 2^W`.
* **condsub(x)** for `x < 2q`:
  1. Compute `D = x + (2^W - q)`. Its MSB is 1 exactly when `x < q`.
  2. Run Check-MSB on `D` to get a per-tile mask.
  3. Select `x = D ^ ((D ^ x) & mask)`.
* **butterfly(j, k, z)** (Cooley-Tukey, in place):
  1. `t` = multiply row `k` by `z`, then resolve `Sum + (Carry << 1)` with
     ripple_add, then condsub.
  2. `a[j] = condsub(a[j] + t)`.
  3. `a[k] = condsub(a[j] + ~t + (q+1))`. This equals `a[j] - t + q`, which
     keeps the value non-negative.

A full NTT is the usual triple loop: `log2 N` stages, twiddle `zeta[k]`
taken in bit-reversed order. The program generator in
`tb/bpntt_prog_pkg.sv` emits it. Measured cycle counts (three subarrays in
parallel):

| tiles                  | polynomials per bank | 128-point NTT cycles |
|------------------------|----------------------|----------------------|
| 16 x 16 bit, q = 12289 | 48                   | 371,772              |
| 18 x 14 bit, q = 7681  | 54                   | 329,415              |
| 8 x 32 bit, q = 998244353 | 24                | 736,150              |

## Polynomials larger than a tile

A 256-point polynomial needs 256 rows plus scratch rows, more than a
subarray has. It is therefore split over a pair of neighbouring tiles. The
even tile holds `a[0..127]` and the odd tile `a[128..255]`, both in rows
0..127. Two extra constant rows hold even-tile and odd-tile masks (all ones
in the columns of the even, or the odd, tiles).

* **First stage.** Each butterfly pairs `a[r]` with `a[r+128]`. These sit
  in the same row but in different tiles.
  1. `W` one-bit right shifts move the odd tile's row into the even tile's
     columns of a scratch row.
  2. The butterfly runs.
  3. `W` left shifts move the new `a[r+128]` back.
  4. A masked merge (`(U & even) | (V' & odd)`) writes the row.

  This is the shift overhead that grows with the polynomial order.
* **Later stages.** Each butterfly stays inside one tile. The two halves
  need different twiddle factors, though, and a twiddle is part of the
  command stream and so is the same for every tile. Each row pair is
  therefore processed twice, once per twiddle, and the two results are
  merged with the masks.

`ntt_split` in `tb/bpntt_prog_pkg.sv` generates this program.
`tb/tb_bpntt_ntt256.sv` runs it.

`ntt_group` generalises the split to a group of g = 4, 8 or 16 tiles. Tile m
of the group holds coefficients 128m to 128m + 127. A stage whose partners
lie len/128 tiles apart moves the upper operand down by that many tiles. It
then runs the butterfly once for each twiddle the stage needs. It keeps each
result only in the tiles that twiddle belongs to, using one mask row per tile
position, and moves the upper results back up. Stages inside a tile run each
row pair once per tile position. The programs use 4, 8 or 16 mask rows
(rows 236 downwards), and 128 coefficient rows in each case.

| order | tiles per polynomial | polynomials per bank (16 bit) | cycles    |
|-------|----------------------|-------------------------------|-----------|
| 512   | 4                    | 12                            | 1,839,296 |
| 1024  | 8                    | 6                             | 3,796,433 |
| 2048  | 16                   | 3                             | 7,709,165 |

| tiles                         | polynomials per bank | 256-point NTT cycles |
|-------------------------------|----------------------|----------------------|
| 8 pairs of 16 bit, q = 12289  | 24                   | 859,930              |
| 9 pairs of 14 bit, q = 7681   | 27                   | 762,090              |
| 4 pairs of 32 bit, q = 998244353 | 12              | 1,700,603            |

These are this implementation's numbers. The original evaluation reports
about 235,000 cycles (61.9 us at 3.8 GHz) for a 256-point, 16-bit NTT, and
does not publish its add/subtract sequence. The ripple additions here, seven
per butterfly, cost about as much as the multiplication, and the split
doubles the butterfly runs. The hardware's cycle timing is exact and
checked: one cycle per command, two per Shift. The gap lies in the programs.

## Host interface of `bpntt_bank`

| port                                          | use                                                                      |
|-----------------------------------------------|--------------------------------------------------------------------------|
| `cmd_valid`, `cmd_ready`, `cmd_data[31:0]`    | push a command; `cmd_ready` is low while the 2048-entry buffer is full    |
| `cmd_count`                                   | commands waiting                                                         |
| `busy`                                        | commands waiting or executing                                            |
| `cfg_we`, `cfg_tile_lsb[255:0]`               | set tile boundaries (reset: one 256-bit tile)                            |
| `host_we`, `host_sub`, `host_row`, `host_wdata` | write a row of subarray `host_sub`; only while `busy` is low (asserted) |
| `host_rsub`, `host_rrow`, `host_rdata`        | asynchronous row read                                                    |

The row port is also how the arrays work as ordinary memory when no NTT is
running. Parameters: `N_SUB = 3`, `ROWS = 256`, `COLS = 256`,
`CMD_DEPTH = 2048`. Banks that run the same program can share one command
subarray. Setting `N_SUB` to 6, 9 and so on models that (`host_sub` widens
to match). The host, or the cache controller in front of the bank,
must keep the buffer filled. A 128-point NTT is about 330,000 commands.

## Files

`rtl/`:

* `bpntt_pkg.sv`: command and micro-operation types.
* `bpntt_row_decoder.sv`
* `bpntt_sa_slice.sv`
* `bpntt_sa_row.sv`
* `bpntt_subarray.sv`
* `bpntt_cmd_buffer.sv`
* `bpntt_ctrl.sv`
* `bpntt_bank.sv`

`tb/`:

* `bpntt_prog_pkg.sv`: the program generator and reference arithmetic.
* One testbench per block, `tb_<module>.sv`.
* `tb_bpntt_bank.sv`: end to end. It runs modular multiplication with
  cycle-exact timing, a 16-point NTT and normal memory access. It also
  checks that every mechanism occurs: AND, XOR, OR, copy, both shifts, both
  Checks, and buffer back-pressure.
* `tb_bpntt_ntt.sv`: the three 128-point NTT configurations above, at full
  size (about 30 s).
* `tb_bpntt_ntt256.sv`: 256-point NTTs on tile pairs, at 16, 14 and 32 bits
  (about 80 s).
* `tb_bpntt_ntt_group.sv`: 512- and 1024-point NTTs on groups of 4 and 8
  tiles (about 110 s).
* `tb_bpntt_ntt2048.sv`: 2048-point NTTs over all 16 tiles of each
  subarray (about 150 s).

Every testbench prints `TB_RESULT checks=N failures=M`. To run one with
Verilator:

```
verilator --binary --timing --assert -Irtl -Itb rtl/bpntt_pkg.sv \
    tb/bpntt_prog_pkg.sv tb/tb_bpntt_ntt.sv --top-module tb_bpntt_ntt
./obj_dir/Vtb_bpntt_ntt
```

The unit testbenches need only `rtl/bpntt_pkg.sv` and their own file.
Verilator finds the other modules through `-Irtl`.

## Where this departs from the original design, and what is missing

* **Check broadcast.** The per-tile LSB/MSB broadcast behind Check is an
  addition. The original names a Check command but not what it does.
* **Field encodings.** The command type codes, the bit order, the
  XOR/AND and Left/Right polarities, and the use of two of the five spare
  bits are choices made here. The spare bits select OR and Check-MSB.
* **Shift timing.** Shift takes two cycles because the shift multiplexer
  feeds from the neighbours' latches.
* **Write-back.** Results are written through a third (write) row decoder,
  in the same cycle as the read.
* **Scratch rows.** The programs use 16 scratch and constant rows (21 for
  split polynomials) where the original quotes 6. A tile therefore holds at
  most 240 coefficients.
* **Largest order.** `ntt_group` splits a polynomial over at most all the
  tiles of one subarray: 2048 points at 16 bits. Larger orders would need
  polynomials spread over several subarrays, which the programs do not do.
* **Modular arithmetic programs.** The modular add/subtract and
  conditional-subtract programs are this implementation's. Only the
  multiplication follows a published sequence.
* **Shared command subarray.** Several banks sharing one command subarray
  are modelled only as one bank with more compute subarrays (`N_SUB`).
* **No processor or cache.** The processor core and cache hierarchy that
  would host the bank are not part of the RTL. The testbenches play the
  host.
* **Idealised cells.** The cells and the analog sensing are ideal: AND on
  the bitline, NOR on its complement, no timing or disturb effects.
