# Partitioned Dadda multiplier with a hybrid final adder

An N x N column-compression multiplier spends most of its delay in two
places: the partial-product summation tree, whose depth is set by the tallest
column (column N-1, holding N bits), and the final carry-propagate adder that
turns the tree's two remaining rows into the product. This design attacks
both:

1. **Partitioned tree.** The partial-product matrix is cut vertically into
   two halves that are reduced by two independent Dadda trees running side by
   side: *part0* takes columns 0..N-1, *part1* takes columns N..2N-2. Each
   tree ends in its own one-row result, `p0` and `p1`.
2. **Hybrid final adder.** `p0` and `p1` overlap in only log2(N) bit
   positions. Those few bits go through a short ripple-carry adder; every bit
   above them only ever needs "+1 if a carry arrives", which is computed ahead
   of time by binary-to-excess-1 converters (BEC) and picked by multiplexers
   once the carry is known.

The RTL is unsigned, purely combinational and parameterised by the operand
width `N` (default 64; 8, 16 and 32 are the other sizes it was designed and
tested for).

```
 a[N-1:0] b[N-1:0]
      |      |
 partial_product_gen     pp[j][i] = a[i] & b[j]          (N*N AND gates)
      |
      +-------------------------------+
      |                               |
 dadda_part PART=0               dadda_part PART=1
 columns 0..N-1                  columns N..2N-2
      |                               |
 p0[N+L-1:0]                     p1[2N-1:N]            L = log2 N
      |                               |
      |  p0[N-1:0] ----------------------------------> p[N-1:0]
      |  p0[N+L-1:N]                  |
      +---------> hybrid_final_adder <+
                         |
                         +---------------------------> p[2N-1:N]
```

## Splitting the partial products

Number the partial products as `a_i b_j -> j*N + i` (so for N = 8, column 7
holds 7, 14, 21, 28, 35, 42, 49, 56). Column `c` holds every product with
`i + j = c`. Heights rise 1, 2, ..., N over columns 0..N-1 and fall N-1, ..., 1
over columns N..2N-2.

Part0 gets the rising half, part1 the falling half. The two trees share no
signal and are reduced side by side. Carries that part0's tall middle columns
generate no longer have to be absorbed by the upper columns inside one big
tree: they leave part0 as a short carry word and are merged later by the
final adder, which is designed for exactly this uneven arrival.

The sums of the two parts overlap:

* part0's value is at most `sum_{c<N} (c+1) 2^c = (N-1) 2^N + 1 < 2^(N+L)`,
  so part0 produces `N + L` bits: `p0[N-1:0]` is already the low half of the
  product, and `p0[N+L-1:N]` is an L-bit carry word spilling into the upper
  half (for N = 8: `p0[10:8]`).
* part1's value, scaled by 2^N, is below the product, so N bits suffice:
  `p1[2N-1:N]`.

Hence `p = p0 + (p1 << N)`, and the only real addition left is
`p[2N-1:N] = p1 + p0[N+L-1:N]`.

## The two Dadda trees (`dadda_part`)

Each part is a regular Dadda reduction. The height targets are the sequence
`d1 = 2, d(k+1) = floor(1.5 d(k))`: 2, 3, 4, 6, 9, 13, 19, 28, 42, 63, ...
A tree whose tallest column is `h` runs one stage per target below `h`, from
the largest down (4 stages for N = 8, 10 stages for part0 at N = 64).

In a stage with target `d`, columns are visited from the least significant
up. If a column's height plus the carries arriving from the column below in
this stage exceeds `d` by `e`, it receives `floor(e/2)` full adders (3:2
counters) and `e mod 2` half adders (2:2 counters); otherwise it is left
alone. For the 8 x 8 case this places, in the first stage, a half adder on
products 6 and 13, a full adder on 7, 14, 21 and a half adder on 28, 35 in
part0, and half adders on 15, 22 and on 23, 30 in part1.

All of this is computed at elaboration time: `dadda_part` evaluates constant
functions that tabulate, per stage and column, the height and the number of
full and half adders, and a generate loop instantiates them. Within a column
the counters take bits from the bottom: first the original products in
ascending index, then sums, untouched bits and incoming carries in that
order. Elaboration stops with an error if the schedule would overflow a
column or push a carry out of the part's top column.

After the last stage every column holds at most two bits. A ripple chain
finishes the job: nothing at column 0 (a single bit), a half adder at the
first two-bit column, full adders above, and a half adder or a wire where a
column holds one bit plus the chain's carry.

## The hybrid final adder (`hybrid_final_adder`)

`p1` and the carry word `p0[N+L-1:N]` share only the low L bit positions of
the upper half. Those go through an L-bit ripple-carry adder (`rca`). Its
carry out is the only unknown for the rest: all higher bits of `p1` are
either kept or incremented.

The upper bits are cut into blocks. Each block holds two versions of its
bits, as they are and plus one, and a multiplexer chooses between them with
the carry from the block below:

* an **MBECWC** block (`mbecwc`, built around `becwc`) also produces a
  carry out: the multiplexer chooses between `{0, d}` and the W+1 bit result
  `{cout, d + 1}`, and the top bit of its output selects the next block. The
  carry out is one only when the carry came in and the block's bits are all
  ones.
* the topmost block is an **MBEC** (`mbec`, built around `bec`), without a
  carry out: the product fits in 2N bits.

Block sizes grow as powers of two, starting at 4, so that each block's
increment is ready by the time the carry from the shorter blocks below
arrives:

| N  | ripple adder | MBECWC blocks | MBEC block | product bits covered |
|----|--------------|---------------|------------|----------------------|
| 8  | 3 (8..10)    | none          | 5 (11..15) | 8..15                |
| 16 | 4 (16..19)   | 4 (20..23)    | 8 (24..31) | 16..31               |
| 32 | 5 (32..36)   | 4, 8 (37..48) | 15 (49..63)| 32..63               |
| 64 | 6 (64..69)   | 4, 8, 16 (70..97) | 30 (98..127) | 64..127        |

For other N, `dadda_pkg` applies a rule that reproduces this table: after the
L-bit ripple adder, add an MBECWC block of 2^k bits (k = 2, 3, ...) while at
least 2^(k+1) bits remain; the rest is the MBEC block.

The binary-to-excess-1 converters compute `b + 1` with a chain of two-input
ANDs (`t[i] = b[0] & ... & b[i-1]`) and one XOR per bit (`x[i] = b[i] ^ t[i]`);
the carry-out version extends the chain by one AND.

## Modules and parameters

| file | module | role | parameters (default) |
|------|--------|------|----------------------|
| `rtl/dadda_pkg.sv` | package | Dadda targets, stage count, final-adder layout | - |
| `rtl/half_adder.sv` | `half_adder` | 2:2 counter | - |
| `rtl/full_adder.sv` | `full_adder` | 3:2 counter | - |
| `rtl/partial_product_gen.sv` | `partial_product_gen` | AND array | `N` (64) |
| `rtl/dadda_part.sv` | `dadda_part` | one Dadda tree + final ripple chain | `N` (64), `PART` (0) |
| `rtl/rca.sv` | `rca` | ripple-carry adder, no carry in | `W` (6) |
| `rtl/bec.sv` | `bec` | x = b + 1 mod 2^W | `W` (5) |
| `rtl/becwc.sv` | `becwc` | {cout, x} = b + 1 | `W` (4) |
| `rtl/mbec.sv` | `mbec` | select d or d + 1 | `W` (30) |
| `rtl/mbecwc.sv` | `mbecwc` | select {0, d} or d + 1 with carry | `W` (4) |
| `rtl/hybrid_final_adder.sv` | `hybrid_final_adder` | upper half of the product | `N` (64) |
| `rtl/dadda_hybrid_mult.sv` | `dadda_hybrid_mult` | top: `a`, `b` in, `p = a*b` out | `N` (64) |

The top has three ports: `a[N-1:0]`, `b[N-1:0]`, `p[2N-1:0]`. There is no
clock, no reset and no handshake; `p` is valid one combinational delay after
`a` and `b` settle. Register the inputs and outputs outside if the multiplier
is to sit in a pipeline. `N` must be at least 4; the testbenches cover
8, 16, 32 and 64. At N = 64 the design is about 4,000 full adders and 4,096
AND gates (coarse synthesis: roughly 28,000 single-bit cells).

## Verification

Every module has a self-checking testbench in `tb/` that ends by printing
`TB_RESULT checks=<n> failures=<m>`:

* `tb_half_adder`, `tb_full_adder`, `tb_rca` (3 and 6 bits), `tb_becwc`
  (4 and 5 bits), `tb_mbec` (5 bits), `tb_mbecwc` (4 and 8 bits): exhaustive.
  `tb_bec` is exhaustive at 5 bits, i.e. it covers the whole b -> b + 1
  table, and random at 30 bits.
* `tb_partial_product_gen`: every product bit at N = 8 and 64.
* `tb_dadda_part`: both parts at N = 8, 16, 64, driven with arbitrary bit
  matrices (not only AND products) and compared with a weighted column count.
* `tb_hybrid_final_adder`: all four layouts, with runs of ones forced into
  `p1` so the carry reaches every block; fails if any block select was never
  seen both 0 and 1.
* `tb_dadda_hybrid_mult`: the whole multiplier, exhaustive at N = 8 and
  30,000 random and directed pairs at 16, 32 and 64, against `a * b`; it
  also counts part0 carry words and block-select activity at each size and
  fails if a mechanism never occurred. The directed pairs
  `a = 2^64 - (2^34 - 2^20 - d)`, `b = 2^64 - (2^20 + d)` make the upper
  half of the product `2^64 - 2^34`, so the carry crosses all MBECWC blocks.
* `tb_dadda_hybrid_mult_full`: the top at its default N = 64 without
  parameter overrides, 20,000 products plus the same mechanism counts.

Running a testbench with Verilator (5.x), from the directory holding `rtl/`
and `tb/`:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_dadda_hybrid_mult \
    -y rtl -Irtl rtl/dadda_pkg.sv tb/tb_dadda_hybrid_mult.sv
./obj_dir/Vtb_dadda_hybrid_mult
```

The N = 64 instances take about a minute and a half to compile; the
simulations themselves take seconds. Lint with
`verilator --lint-only -Wall -y rtl rtl/dadda_pkg.sv rtl/dadda_hybrid_mult.sv`;
the remaining warning (unused bits of the ripple chain's carry vector in
`dadda_part`) is explained in that file's header.

## Where this RTL departs from, or fills in, the published description

* **Unsigned, not Baugh-Wooley.** The design is named after Baugh-Wooley
  (signed) multiplication, but the description and worked example use only
  plain AND-gate products `a_i b_j`, with no inverted products and no
  correction ones in columns N and 2N-1. The RTL follows the example and is
  unsigned. Signed operation would need the Baugh-Wooley modifications to the
  partial-product matrix, which would also change the column heights.
* **Ripple chains instead of CLAs.** The text says the last two rows of each
  tree, and the low bits of the final adder, are added by a carry look-ahead
  adder; the drawings of the same circuits show ripple chains labelled RCA.
  The RTL uses ripple chains. The function is identical; only the delay
  differs.
* **Counter wiring after the first stage.** The Dadda rule fixes how many
  counters each column gets. Which bits feed which counter in later stages is
  this design's choice (bottom of the column first). It affects timing, not
  the result.
* **Final-adder layouts for other N.** The four layouts in the table above
  are taken as published; the rule generalising them is not.
* **No pipeline registers.** The architecture is specified as a
  combinational multiplier; clocking is left to the user.

No timing, area or power figure of this RTL has been measured; the speed
claim of the architecture (a 64-bit version markedly faster than an
unpartitioned Dadda multiplier with a single look-ahead final adder) depends
on a technology library and physical design that are not part of it.
