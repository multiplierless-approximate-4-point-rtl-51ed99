# Multiplierless approximate 4-point DCT-II and DCT-IV, 1-D and 4x4 2-D

Video codecs such as HEVC transform each block of prediction residuals with a
DCT of type II, and some also need type IV. An exact 4-point DCT needs real
multiplications by cosines. This design uses two 4x4 matrices whose entries are
all -1, 0 or +1. They approximate the DCT-II and the DCT-IV closely, so the
transform reduces to a few additions and subtractions: no multipliers, and not
even shifts. The RTL implements the approximations published in *"Multiplierless
Approximate 4-point DCT VLSI Architectures for Transform Block Coding"* (Bayer,
Cintra, Madanayake, Potluri):

- a 1-D 4-point core for each approximation;
- a 4x4 separable 2-D engine built from two such cores and a transposition
  buffer;
- a top level that runs a 2-D DCT-II engine and a 2-D DCT-IV engine side by
  side on one stream of 8-bit blocks.

## The two approximations

```
          [ 1  1  1  1 ]                  [ 1  1  1  0 ]
 C*_II =  [ 1  0  0 -1 ]         C*_IV =  [ 1  0 -1 -1 ]
          [ 1 -1 -1  1 ]                  [ 1 -1  0  1 ]
          [ 0 -1  1  0 ]                  [ 0 -1  1 -1 ]
```

The rows of each matrix are mutually orthogonal, but they are not of unit
length. The DCT-II rows have lengths 2 and sqrt2, and all DCT-IV rows have
length sqrt3. Scaling the rows turns them into truly orthogonal transforms:

- DCT-II: multiply by `D_II = diag(1/2, 1/sqrt2, 1/2, 1/sqrt2)`;
- DCT-IV: multiply by `D_IV = I/sqrt3`.

The hardware does **not** apply these scale factors. In a codec they fold into
the quantiser step sizes at no cost. So every output of this RTL is an exact
integer product with `C*`, and the quantiser (not included) must supply the
scaling. The orthogonality means the inverse is just the transpose. The
end-to-end testbench uses this to rebuild every input block exactly from the
outputs:

- DCT-II: `16 X = C^T (E Y E) C`, with `E = diag(1,2,1,2)`;
- DCT-IV: `9 X = C^T Y C`.

## 1-D cores

`dct2_4pt` computes `C*_II x` as a two-stage butterfly:

```
stage 1:  s03 = x0 + x3    s12 = x1 + x2    d03 = x0 - x3    d21 = x2 - x1
stage 2:  X0 = s03 + s12   X2 = s03 - s12   X1 = d03         X3 = d21
```

That is six adders. `dct4_4pt` computes `C*_IV x`. Each of its outputs is a
signed sum of three inputs, and no two rows share a partial sum, so it uses
eight adders:

```
X0 = x0 + x1 + x2    X1 = x0 - x2 - x3    X2 = x0 - x1 + x3    X3 = x2 - x1 - x3
```

Both cores take one vector per clock (`in_valid`, `x[0:3]`) and register their
result. `X[0:3]` and `out_valid` appear one clock later. The cores have no
back-pressure. Every output is a sum of at most four inputs with coefficients
of magnitude 1, so two bits of growth make it exact. `OUT_W` defaults to
`IN_W + 2`, which is 10 bits for 8-bit samples.

## The 2-D engine and its eight-clock block rhythm

`dct2d_4x4` computes `Y = C X C^T` for a 4x4 block `X`. The parameter
`KIND = DCT_II | DCT_IV` selects `C`. The engine is the usual row-column
arrangement:

```
 in_row ──► row core ──► transposition buffer ──► column core ──► out_col
 (row r of X)   (row r of Z = X C^T)   (column k of Z)   (column k of Y = C Z)
```

The input takes one row of four samples per clock. The output gives one column
of `Y` per clock, with `out_col[m] = Y[m][k]` and `k = out_idx`. `out_last`
marks `k = 3`.

`transpose4x4`, the transposition buffer, has a single bank of 16 words. It
fills row by row. After the fourth row it *drains* for exactly four clocks,
presenting one column per clock. Because there is only one bank, the buffer
cannot take a row while it drains. The engine therefore stalls its input:
after each fourth row, `in_ready` stays low for four clocks. The fourth row
still needs one clock in the row core before it reaches the buffer, and the
drain then takes four clocks. So four stall clocks are the fewest that prevent
a collision, and `in_ready` rises just in time for the next block's first row
to arrive once the drain ends. An assertion in the engine checks this timing.
A continuous input stream therefore runs at:

```
clock     0   1   2   3   4   5   6   7   8   9  10  11  12 ...
in_ready  1   1   1   1   0   0   0   0   1   1   1   1   0
row taken r0  r1  r2  r3  -   -   -   -   r0' r1' r2' r3'
buffer        w0  w1  w2  w3  rd0 rd1 rd2 rd3 w0' ...
out_valid                         Y:0 Y:1 Y:2 Y:3
```

That is one 4x4 block every eight clocks. At a 1 GHz clock this gives 125
million blocks per second, the block rate the publication reports for its 2-D
designs at 1 GHz. The single bank and the stall were chosen because they match
that figure exactly. A double-buffered transposer would reach four clocks per
block at twice the storage. Column 0 of `Y` appears three clocks after the
fourth row is taken, and columns 1 to 3 follow on consecutive clocks. The
output cannot be stalled. Idle clocks are allowed anywhere in the input,
including inside a block.

Word widths: the rows leave the row core at `ROW_W = IN_W + 2` bits, and the
coefficients leave the column core at `OUT_W = IN_W + 4` bits (10 and 12 bits
by default). Nothing is rounded or truncated between stages.

- DCT-II: the largest magnitude is `16 * 128 = 2048`. An all-`-128` block gives
  `Y00 = -2048`, which is exactly the bottom of the 12-bit range. An all-`+127`
  block gives `Y00 = 2032`.
- DCT-IV: the bound is `9 * 128 = 1152`.

## Top level

`approx_dct_top` feeds one input stream to a DCT-II engine and a DCT-IV engine
(`ii_*` and `iv_*` outputs). The two engines have identical timing. They share
`in_ready` and produce their columns on the same clocks, and an assertion
checks that they stay in step.

Ports (all synchronous to `clk`; `rst_n` is an asynchronous active-low reset):

| port | dir | width | meaning |
|---|---|---|---|
| `in_valid`, `in_ready` | in, out | 1 | a row is taken on a clock where both are high |
| `in_row[0:3]` | in | 4 x `IN_W` signed | row `r` of the block; rows 0..3 in order |
| `ii_valid`, `ii_last`, `ii_idx` | out | 1, 1, 2 | DCT-II column valid, last column, column index |
| `ii_col[0:3]` | out | 4 x `OUT_W` signed | column `ii_idx` of `C*_II X C*_II^T` |
| `iv_*` | out | same | same for `C*_IV` |

## What follows the publication and what is this design's own

Taken from the publication:

- the two matrices;
- the adder structure of the 1-D cores and their 6 and 8 additions;
- 8-bit inputs;
- the choice to leave the orthogonalising scale to the quantiser;
- the 125 MHz block rate at 1 GHz, which the RTL meets in clock cycles.

Not described there, and chosen here:

- the pipelining (one register per 1-D core);
- the valid/ready interface and the reset;
- the full-precision word widths;
- the row-column organisation of the 2-D transform, the single-bank
  transposition buffer and its stall.

The publication treats the four designs (1-D and 2-D, DCT-II and DCT-IV) as
separate circuits. Combining the two 2-D engines behind one input is this
RTL's choice. The publication's FPGA and 45 nm results (for example 76 and 132
flip-flops for the 1-D cores) come from implementations whose register
placement is not described. This RTL's register count differs: a 1-D core
here has 41 flip-flops (four 10-bit outputs and a valid bit), and the 2-D
engine 103 flip-flops plus the 160-bit transposition buffer. Its timing at
1 GHz has not been established. The critical path is two adders in a core,
plus a 4:1 column multiplexer in front of the column core.

## Verification

Each module has a self-checking testbench in `tb/`. Each one computes its
expected values independently of the RTL (the transform testbenches from the
matrices typed in as integers). Each checks cycle timing, has a watchdog,
and ends with a `TB_RESULT checks=N failures=M` line.

- `tb_dct2_4pt`, `tb_dct4_4pt`: corner vectors (all +127, all -128,
  alternating signs) and 4000 random vectors with random gaps. They check the
  one-clock latency on every clock.
- `tb_transpose4x4`: 300 random matrices written with random gaps. Each column
  must appear on the four clocks right after the last write, with `rd_last` on
  the fourth.
- `tb_dct2d_4x4`: 600 blocks through a DCT-II and a DCT-IV engine. It checks
  every coefficient, the index and last flags, the 3-clock latency, the
  8-clock period of back-to-back blocks, and that stalls happened.
- `tb_approx_dct_top`: 3000 blocks through the top at its default parameters.
  It checks every coefficient and also the exact inverse through the
  orthogonalising scale. It counts stall clocks, idle clocks inside blocks,
  full-rate block pairs and blocks reaching the end of the coefficient range,
  and fails if any of these never happened.

## Simulating and changing it

With Verilator 5:

```
verilator --binary --timing --assert -y rtl rtl/approx_dct_pkg.sv \
          tb/tb_approx_dct_top.sv --top tb_approx_dct_top
./obj_dir/Vtb_approx_dct_top
```

Replace the testbench name to run another one. The package
`approx_dct_pkg` holds the transform length, the default sample width and the
`kind_e` type.

To change the sample width, set `IN_W` on the top. `OUT_W` follows as
`IN_W + 4`, and a smaller `OUT_W` makes the coefficients wrap (an elaboration
warning says so). To get one transform only, instantiate `dct2d_4x4` directly
with the `KIND` you need, or use a 1-D core on its own.
