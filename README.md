# Floor-free address generator for the IEEE 802.16 (WiMAX) deinterleaver

A WiMAX receiver collects the coded bits of one OFDM symbol, a block of
`Ncpbs` bits, and has to undo the transmitter's interleaver before decoding.
In hardware this is done with a block memory: received bit `n` is written to
address `k(n)`, and the bits are then read out in order 0, 1, 2, … The
interleaver, and so the address sequence, depends on the modulation (QPSK,
16-QAM, 64-QAM) and on the interleaving depth `Ncpbs`. The standard defines
`k(n)` with floor divisions by `Ncpbs`:

    s    = max(1, bits_per_subcarrier / 2)        -- 1, 2, 3 for QPSK, 16-QAM, 64-QAM
    m(n) = s*floor(n/s) + (n + floor(d*n/Ncpbs)) mod s
    k(n) = d*m(n) - (Ncpbs - 1)*floor(d*m(n)/Ncpbs)

Here `d` is the number of rows of the block interleaver (16 here; the
standard also allows 12). Evaluated directly, these formulas need dividers
by a run-time value. This RTL produces the same sequence, one address per
clock, from two small counters and a few adders and multiplexers. The
division by a run-time value disappears, and `Ncpbs` can be any suitable
depth, not only one from a fixed list.

## The row/column view

Write the block as `d` rows of `C = Ncpbs/d` columns and the bit index as
`n = j*C + i`, with row `j` in `0..d-1` and column `i` in `0..C-1`. Bits
arrive row by row, so `i` runs fastest. Two facts then remove the floors:

* `floor(d*n/Ncpbs) = j`, because `d*C = Ncpbs` and `i < C`.
* If `C` is a multiple of `s`, every group of `s` consecutive bits lies
  within one row. Then `m(n) = j*C + i'` with
  `i' = s*floor(i/s) + (i + j) mod s`, and the second formula collapses to

      k = d*i' + j

So the address is just the permuted column times `d` plus the row. With
`d = 16` that is `{i', j}`, a concatenation. What is left per modulation is
the column permutation `i'`:

| modulation | s | rows `j` | column used `i'` |
|---|---|---|---|
| QPSK   | 1 | all          | `i` |
| 16-QAM | 2 | `j mod 2 = 0` | `i` |
|        |   | `j mod 2 = 1` | `i+1` if `i` even, `i-1` if `i` odd |
| 64-QAM | 3 | `j mod 3 = 0` | `i` |
|        |   | `j mod 3 = 1` | `i+1` if `i mod 3` ≠ 2, `i-2` if `i mod 3` = 2 |
|        |   | `j mod 3 = 2` | `i+2` if `i mod 3` = 0, `i-1` otherwise |

For example, with 16-QAM and `Ncpbs = 192` (`C = 12`), the first addresses of
row 1 are 17, 1, 49, 33, 81. With 64-QAM and `Ncpbs = 576` (`C = 36`), row 1
starts 17, 33, 1, 65, 81 and row 2 starts 34, 2, 18, 82, 50.

The condition "`C` is a multiple of `s`" is the only restriction. The
generator works for any `Ncpbs` that is a multiple of `d` (QPSK), `2d`
(16-QAM) or `3d` (64-QAM). All depths of IEEE 802.16 meet it, since they are
multiples of 96, 192 and 288 respectively.

## Structure

```
            ncpbs ──► [ ÷ d ] ──► [ −1 ] ── col_last ──┐          ncpbs_div_sub
                                                        ▼
   en ──►  column counter i ◄── reset ── [ i == col_last ] ─┐     row_col_counter
           row counter j    ◄── reset ── [ j == d-1 ]       │
                 ▲ steps when the column comparator matches ┘
                 │
           i, j ─┼──► QPSK   : d*i  + j ──────────────┐           qpsk_addr_gen
                 ├──► 16-QAM : d*i' + j ──────────────┤ mux ──► addr   qam16_addr_gen
                 └──► 64-QAM : d*i' + j ──────────────┘ (mod_sel)      qam64_addr_gen
```

* `ncpbs_div_sub` turns the depth into the last column index `Ncpbs/d - 1`.
  This single input stage is what makes arbitrary depths possible. One copy
  serves all three modulations.
* `row_col_counter` holds the only state: an 8-bit column counter and a
  4-bit row counter. Each has a comparator that resets it. The column
  counter steps on every enabled clock. The row counter steps when the
  column counter wraps.
* `qpsk_addr_gen`, `qam16_addr_gen` and `qam64_addr_gen` are combinational
  datapaths from `(i, j)` to `k`. The 16-QAM one has an incrementer and a
  decrementer on `i`. A first multiplexer, steered by `i mod 2`, picks one of
  them. A second multiplexer, steered by `j mod 2`, picks between that and
  `i`. The 64-QAM one works the same way with `+1, +2, −1, −2`, `i mod 3` and
  `j mod 3`.
* `wimax_deint_addr_gen` is the top. It shares the input stage and the
  counters, and picks the address of the selected modulation.

Synthesised at the defaults, the whole generator has 12 flip-flops and about
30 word-level cells.

## Interface and timing (`wimax_deint_addr_gen`)

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock; asynchronous active-low reset |
| `en` | in | 1 | accept the current address and move to the next bit |
| `mod_sel` | in | `deint_pkg::mod_e` (2) | `MOD_QPSK` = 0, `MOD_16QAM` = 1, `MOD_64QAM` = 2 |
| `ncpbs` | in | `NCPBS_W` (12) | interleaving depth |
| `addr` | out | `NCPBS_W` | deinterleaver address `k` of the current bit |
| `row`, `col` | out | 4 / 8 | current `j` and `i` |
| `block_last` | out | 1 | `addr` is the last address of the block |

After reset, `addr` shows `k(0) = 0`. `addr` is combinational from the
counter registers. On each rising edge with `en` high, the generator moves to
the next bit. A block of `Ncpbs` bits therefore takes exactly `Ncpbs` enabled
clocks, and the next block follows on the next clock. With `en` low, the
address holds. Keep `mod_sel` and `ncpbs` steady during a block, and change
them only together with the clock that accepts `block_last`. Two assertions
in the top check this rule and check that `addr < ncpbs`.

Parameters: `D` (rows, default 16) and `NCPBS_W` (depth width, default 12,
so depths up to 4080). The column width is derived as
`clog2(2**NCPBS_W / D)`. With `D = 12`, the divider and multiplier become
real arithmetic rather than wiring, and the design still works.

## Where this RTL makes its own choices

The floor-free rules above and the overall structure come from the source
design. That source is the shared divide-by-`d`/minus-one input stage, the
row and column counters with their comparators, and the QPSK and 16-QAM
datapaths with their adders, `mod 2` units and multiplexers. The following
points are this implementation's own:

* **Counting order.** The original drawings show both counters clocked and
  reset by comparators, but no enable between them. Here the row counter
  steps only when the column counter wraps. That is the order needed for
  bit `n` to receive `k(n)` as the standard defines it.
* **64-QAM datapath.** Only the five rules of the table were available, not
  a drawing. The mod-3 units and the multiplexer tree follow the style of
  the 16-QAM datapath.
* **Combining the three modulations.** The three datapaths run in parallel
  behind shared counters, with an output multiplexer. For `d = 16`, keeping a
  separate `×d` and `+j` in each datapath costs nothing, because both are
  wiring.
* **Control and widths.** The `en` input, the asynchronous reset,
  `block_last`, the `mod_sel` encoding and the 12-bit depth are all choices
  of this implementation. There is no "code rate" input: the depth is given
  directly as a number, and that number is what the code rate would
  otherwise select.
* **Not included.** This is only the address generator. The bit memory it
  addresses, and the rest of the receiver, are outside this RTL.

Two slips in the source material were resolved against the standard:

* `s` is `max(1, bits_per_subcarrier/2)`, not `max(1, Ncpbs/2)`.
* The 64-QAM example addresses belong to `Ncpbs = 576`, not the printed 596.
  596 is not a multiple of 16.

## Files

* `rtl/deint_pkg.sv`: default `D` and width, the `mod_e` type, width helpers.
* `rtl/ncpbs_div_sub.sv`, `rtl/row_col_counter.sv`, `rtl/qpsk_addr_gen.sv`,
  `rtl/qam16_addr_gen.sv`, `rtl/qam64_addr_gen.sv`: the blocks.
* `rtl/wimax_deint_addr_gen.sv`: the top.
* `tb/deint_ref_pkg.sv`: the standard's interleaver and deinterleaver
  formulas, written with plain floor divisions. The testbenches use them as
  the reference.
* `tb/tb_<block>.sv`: one self-checking testbench per block.
  `tb_wimax_deint_addr_gen` is the end-to-end test at default parameters.
  `tb_deint_addr_gen_d12` runs the top with `D = 12`.

## Verification

Each testbench prints `TB_RESULT checks=N failures=M` and has a watchdog.

* **Datapath testbenches.** For a range of depths, each one sweeps every
  `(j, i)` of the block. It compares `k` with the standard's formula for
  `n = j*C + i`, checks that the block's addresses are a permutation of
  `0..Ncpbs-1`, and checks the first 5×5 addresses of the example tables.
* **Counter testbench.** Runs two blocks per column count with random stalls.
* **End-to-end testbench.** Covers the example depths (QPSK 96, 16-QAM 192,
  64-QAM 576), standard depths (768, 1536, 2304) and twelve random legal
  depths. It checks every address and `block_last`. It checks that a block
  takes `Ncpbs` clocks when `en` is held high, and that the address holds
  during stalls. It also performs an actual deinterleave: random bits go
  through the standard's interleaver, then are written back at `addr`, and
  the original order must come back. It counts modulation switches, depth
  switches, stalls, column wraps, row steps and block wraps, and fails if
  any of them never happened.

To run one with Verilator, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
  rtl/deint_pkg.sv tb/deint_ref_pkg.sv tb/tb_wimax_deint_addr_gen.sv \
  --top-module tb_wimax_deint_addr_gen -o sim && obj_dir/sim
```

The two packages are named first so that they are compiled before their
users; `-y` lets Verilator find every module in the file of its name. All testbenches finish in well under a second.
