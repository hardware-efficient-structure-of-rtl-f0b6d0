# A four-multiplier Winograd F(2,3) module for the convolution step of a CNN

The inner loop of a convolutional layer is a sliding inner product: a short
filter `h` (here three taps) is moved along a stream of samples `x`, and each
position gives one output `y_l = x_l*h0 + x_{l+1}*h1 + x_{l+2}*h2`. Two
neighbouring outputs computed directly cost six multiplications:

    y0 = x0*h0 + x1*h1 + x2*h2
    y1 = x1*h0 + x2*h1 + x3*h2

Winograd's minimal filtering algorithm F(2,3) produces the same two outputs
from the same four samples with four multiplications. The filter is known in
advance, so it is folded once into four weights

    s0 = h0    s1 = (h0 + h1 + h2)/2    s2 = (h0 - h1 + h2)/2    s3 = h2

and each tile of four samples then costs

    mu1 = (x0 - x2)*s0     mu2 = (x1 + x2)*s1
    mu3 = (x2 - x1)*s2     mu4 = (x1 - x3)*s3
    y0  = mu1 + mu2 + mu3
    y1  = mu2 - mu3 - mu4

that is four multipliers, four two-input adders in front of them and two
three-input adders behind them. Since a multiplier grows with the square of
the word length and an adder only linearly, trading two multipliers for
additions is a net saving in area and power, and it matters when a network
holds tens or hundreds of such modules. This RTL builds that module as the
structure intended for an ASIC: adders, multipliers and a small register
memory holding the four weights.

## Structure

In matrix form the module computes `y = A2 * diag(s) * A1 * x`, and each
factor is one block:

| layer | block | hardware | function |
|---|---|---|---|
| A1 | `input_adders` | 4 two-input adders | `a = [x0-x2, x1+x2, x2-x1, x1-x3]` |
| diag(s) | `multiplier_bank` | 4 multipliers | `p_i = a_i * s_i` |
| A2 | `output_adders` | 2 three-input adders | `z0 = p0+p1+p2`, `z1 = p1-p2-p3` |
| weights | `coef_regmem` | 4-entry register memory | holds `s0..s3` |
| weight folding | `coef_precompute` | 3 adders, 1 negation | `s` from `h` |

`wino_module` is the top and wires them together:

```
 h[0..2] --> coef_precompute --(all four, on h_load)--+
                                                       v
 s_wdata, s_addr, s_we --(one entry)-----------> coef_regmem --s0..s3--+
                                                                       v
 x[0..3] --> input_adders --a0..a3--> multiplier_bank --p0..p3--> output_adders --> y[0..1], y_half
```

The weight folding follows the factorisation `s = D4 * B2 * B1 * h` in three
layers: `B1` fans out the taps into `[h0, h1, h0+h2, -h1, h2]`, `B2` adds pairs
into `[h0, h0+h1+h2, h0-h1+h2, h2]`, and `D4 = diag(1, 1/2, 1/2, 1)` halves
the middle two. The sum `h0+h2` is formed once and shared.

## Number format: where the halves go

The two weights `s1` and `s2` are halves of integer sums, so with integer
taps they can end in .5. Rounding them would make the module inexact. Instead
every weight is held in signed fixed point with one fractional bit ("Q.1"):
the stored bit pattern is `2*s`. The halving in `D4` is then free — `s1` is
the integer `h0+h1+h2` read with its binary point one place to the left —
and `s0`, `s3` are `h0`, `h2` shifted left once.

The products and sums keep that fractional bit. For weights folded from
integer taps the final sums `z0`, `z1` are always even (the halves cancel:
`mu2 + mu3 = x1*h1 + x2*(h0+h2)` exactly), so `y = z/2` is exact. The module
outputs `y = floor(z/2)` and reports the dropped bit as `y_half`. `y_half` can
only be 1 when weights are written by hand with a Q.1 pattern that no integer
filter produces; an assertion in `wino_module` checks that it stays 0 while
the weights come from the folding path.

Widths grow so that nothing can overflow, for any sample and any weight:

| signal | width (defaults 16/16) |
|---|---|
| sample `x` | `DATA_W` = 16 |
| tap `h` | `COEF_W` = 16 |
| weight `s` (Q.1) | `COEF_W+2` = 18 |
| pre-adder output `a` | `DATA_W+1` = 17 |
| product `p` (Q.1) | `DATA_W+COEF_W+3` = 35 |
| sum `z` (Q.1) | `DATA_W+COEF_W+5` = 37 |
| output `y` | `DATA_W+COEF_W+4` = 36 |

The width functions are in `wino_pkg`; changing `DATA_W` and `COEF_W` on
`wino_module` resizes everything.

## Interface and timing of `wino_module`

| port | dir | width | meaning |
|---|---|---|---|
| `clk` | in | 1 | clock of the weight memory |
| `rst_n` | in | 1 | synchronous, active low; clears the weights to 0 |
| `h_load` | in | 1 | fold `h` and write all four weights |
| `h` | in | 3 x `COEF_W` | taps `h0..h2`, signed |
| `s_we` | in | 1 | write one weight |
| `s_addr` | in | 2 | which weight (0..3) |
| `s_wdata` | in | `COEF_W+2` | weight in Q.1 (bit pattern `2*s`), signed |
| `x` | in | 4 x `DATA_W` | tile `x0..x3`, signed |
| `y` | out | 2 x `Y_W` | `y0`, `y1`, signed |
| `y_half` | out | 2 | fractional bits of `y0`, `y1` |

- Weight writes take effect at the rising edge of `clk`; the new weights are
  used from then on. If `h_load` and `s_we` coincide, `h_load` wins.
- The datapath from `x` to `y` is purely combinational, as drawn for the
  module: there are no pipeline registers, so a new tile can be applied every
  cycle and `y` is valid after the combinational delay (two adder levels and a
  multiplier). A design that needs a higher clock rate should register `x`
  and/or `y` around the module, or retime the multipliers.
- Weights are meant to be written before a run and then left alone; the
  module does not stop a tile from being computed during a write.

### Convolving a stream

One module covers two outputs per tile. To convolve a stream, step the tile by
two samples: tile `k` is `x[2k .. 2k+3]` and gives `y[2k]`, `y[2k+1]`. A stream
of `N` samples gives `N-2` outputs in `(N-2)/2` tiles, one per clock. Higher
throughput is obtained by placing several modules side by side, each fed its
own tile; the arrangement of such clusters is left to the user.

## Where this RTL departs from, or fills in, the source description

- **Fourth product.** One printed formula for `mu4` reads `(x1 - x2)*h2`. The
  data-flow graph and the module diagram both feed `x1` and `x3` into the
  fourth adder, and only `x1 - x3` gives `y1 = x1*h0 + x2*h1 + x3*h2`. The RTL
  uses `x1 - x3`.
- **Matrix A1.** The printed pre-addition matrix is incomplete; the adder
  operands are taken from the `mu` formulas and the diagrams, which agree with
  each other once the point above is corrected.
- **Word lengths, reset, write ports, Q.1 format, `y_half`.** Not specified
  in the source; all are this design's choices, described above.
- **Weight folding on chip.** The source assumes the weights are computed
  beforehand and written into the register memory. Both are offered: a
  single-entry write port for precomputed weights, and the folding network
  (`coef_precompute`) in front of the memory for loading taps directly.
- **Not built.** The source also sketches a mapping onto an FPGA whose DSP
  blocks contain four multipliers and some adders, with the pre-adders and
  two post-adders in general logic. That mapping depends on a vendor hard
  block whose configuration is not given, so it is not provided; the ASIC
  structure above computes the same function. Cascading modules into
  clusters is only mentioned there and is likewise not provided.

## Verification

Every block has a self-checking testbench in `tb/` that compares it with
values computed independently in 64-bit integers, prints
`TB_RESULT checks=N failures=M` and has a watchdog.

- `tb_coef_precompute`: extreme and random taps against the closed formulas
  for `2*s`.
- `tb_coef_regmem`: reset, parallel load, single writes, load-over-write
  priority and hold, against a shadow copy.
- `tb_input_adders`, `tb_multiplier_bank`, `tb_output_adders`: extreme and
  random operands against the formulas of each layer.
- `tb_wino_module` (all parameters at their defaults): compares the
  four-multiplier module with the direct six-multiplier formula. It checks
  reset, the folding path with extreme and random taps and samples, that new
  taps take effect exactly at the loading edge, hand-written weights
  (including odd Q.1 weights, checking `y` and `y_half`), and a 130-sample
  stream convolved as 64 stride-two tiles at one tile per clock. It counts
  each of these mechanisms and fails if one never occurred.

Each testbench was also run against a deliberately broken copy of its block
(for example the printed `x1 - x2` for the fourth pre-adder) and fails on it.

## Simulating

All files are SystemVerilog-2017. With Verilator 5, from the folder that
holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Irtl -y rtl \
    rtl/wino_pkg.sv tb/tb_wino_module.sv --top-module tb_wino_module
./obj_dir/Vtb_wino_module
```

Replace `tb_wino_module` with any other testbench in `tb/`. The package
`wino_pkg` must be read first; `-y rtl` finds the other modules by name.

## Files

- `rtl/wino_pkg.sv` — default widths, tile geometry, width functions.
- `rtl/coef_precompute.sv` — folding of `h` into `s` (Q.1).
- `rtl/coef_regmem.sv` — four-entry weight register memory.
- `rtl/input_adders.sv` — pre-addition layer A1.
- `rtl/multiplier_bank.sv` — the four multipliers.
- `rtl/output_adders.sv` — post-addition layer A2.
- `rtl/wino_module.sv` — the complete module (top).
- `tb/tb_*.sv` — one testbench per module.
