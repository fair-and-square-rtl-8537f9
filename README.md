# Square-based engines for matrix products, linear transforms and convolutions

A squaring circuit needs roughly half the logic of a multiplier of the same
width, because the partial-product matrix of `x*x` is symmetric and each
off-diagonal pair can be counted once and doubled. This design exploits that
by building matrix multipliers, tensor cores, linear transforms and FIR
convolutions, real and complex, in which **every multiplier is replaced by a
squarer**. It rests on one identity:

    a*b = ( (a+b)^2 - a^2 - b^2 ) / 2

In a sum of products such as `c_ij = sum_k a_ik * b_kj` the terms `-a_ik^2`
depend only on row `i` of A and the terms `-b_kj^2` only on column `j` of B.
They are gathered into *correction terms*

    Sa_i = -sum_k a_ik^2          Sb_j = -sum_k b_kj^2

which are computed once and reused for every output, so that

    2*c_ij = sum_k (a_ik + b_kj)^2 + Sa_i + Sb_j

For an M x N by N x P product this costs `MNP + MN + NP` squares instead of
`MNP` multiplications, a ratio of `1 + 1/P + 1/M` that tends to one square
per multiplication. The square of a sum, `(a+b)^2`, is called a *partial
multiplication* below.

Complex products work the same way. With four squares per complex product
("CPM"):

    Re: (a+c)^2 + (b-s)^2        Im: (b+c)^2 + (a+s)^2

and with three squares per complex product ("CPM3", one square shared):

    Re: (c+a+b)^2 - (b+c+s)^2    Im: (c+a+b)^2 + (a+s-c)^2

each followed by operand-only correction terms (listed below). Asymptotically
a complex multiplication costs 4 or 3 squares.

**Every engine produces twice the true result.** The final right shift by one
bit is left to whatever reads the result, so that no precision is lost inside
the engine.

## Building blocks

### Squarer (`fs_square`)

`y = x*x` for a signed W-bit `x`, output 2W bits unsigned. The operand is
first made non-negative (`|x|` always fits W unsigned bits). The square is
then the sum of W rows; row `i`, present when bit `m_i` of `|x|` is set, has
the diagonal term at bit `2i` and the products `m_i*m_j` (`j > i`) at bits
`i+j+1`, i.e. the symmetric half of a multiplier's partial products, shifted
one place to double it. It is combinational. Any other squarer, including an
approximate one, can replace it: every engine only instantiates
`fs_square`.

Widths used inside the engines: an operand sum `a+b` has DW+1 bits and its
square 2DW+2 bits; a three-operand sum (CPM3) has DW+2 bits.

### Correction terms (`fs_corr`)

Which term each engine needs, and which mode of `fs_corr` produces it from a
stream of elements `p + jq` (one per cycle):

| engine | term(s) | formula | `fs_corr` mode |
|---|---|---|---|
| PMA, systolic array, tensor core | `Sa_i`, `Sb_j` | `-sum a^2`, `-sum b^2` | `CORR_REAL` |
| real transform | `Sw_k` | `-sum_i w_ki^2` | `CORR_REAL` |
| real convolution | `Sw` | `-sum_i w_i^2` | `CORR_REAL` |
| complex transform (CPM) | `S_k` (used as `S_k(1+j)`) | `-sum_i (c_ki^2 + s_ki^2)` | `CORR_CPLX4` |
| complex convolution (CPM) | `Sw` (used as `Sw(1+j)`) | `-sum_i (c_i^2 + s_i^2)` | `CORR_CPLX4` |
| CPM3 accumulator, row side | `Sab_h + jSba_h` | `sum(-(a+b)^2 + b^2) + j sum(-(a+b)^2 - a^2)` | `CORR_CPLX3_SAMPLE` |
| CPM3 accumulator, column side | `Scs_k + jSsc_k` | `sum(-c^2 + (c+s)^2) + j sum(-c^2 - (s-c)^2)` | `CORR_CPLX3_WEIGHT` |
| complex transform (CPM3) | `Sx_k + jSy_k` | as the line above, over `c_ki + js_ki` | `CORR_CPLX3_WEIGHT` |
| complex convolution (CPM3) | `Sw` (complex) | as the line above, over the kernel | `CORR_CPLX3_WEIGHT` |

For unit complex coefficients (for example DFT twiddles) the four-square
terms reduce to `-N`. In transforms and convolutions the sample-side term
(`-x^2`, `-(x^2+y^2)(1+j)`, or the CPM3 sample term) depends on the current
sample only, so it is computed once per cycle inside the engine and shared by
all lanes; only the coefficient-side term has to be supplied.

`fs_corr` restarts a sum on `clear` (with `clear` and `en` together it
restarts with the current element). `mode` must be held for the length of a
sum; an assertion reports a change. Whether correction terms are produced on
the fly with this unit or computed in advance (the usual case for constant
weights) is up to the system.

## The engines

All engines are synchronous to `clk`, reset by a synchronous active-low
`rst_n`, take signed DW-bit operands (default 8) and keep signed AW-bit
accumulators (default 32). Strobes: `init` loads the correction terms and has
priority over `en`; `en` marks a valid operand set. Accumulator outputs are
the registers themselves, so an input taken in cycle t shows from cycle t+1.

### Partial multiplication accumulator (`fs_pma`)

The multiply-accumulator with its multiplier replaced by
`(a+b)^2`. Load `Sa_i + Sb_j` with `init`, present one pair per `en` cycle;
after the last pair `acc = 2*c_ij`.

### Stationary systolic array (`fs_sys_array`, PE `fs_sys_pe`)

A ROWS x COLS grid (default 4 x 4) computing C = A*B with A held stationary.
This is the engine whose timing needs the most care.

Each PE has three registers: RA (the stationary `a`), RB (the `b` passing to
the right) and RC (the partial column sum). Every cycle
`RC <= top_in + (RA + RB)^2` and `RB <= left_in`. The down output is a mux:
`sel = 0` gives RA, `sel = 1` gives RC. RA loads `top_in` only while
`sel = 0`.

Array column `i` holds row `i` of A, so COLS is the number of rows of A and
ROWS its inner dimension; PE(k,i) ends up holding `a_ik`.

1. **Load**, `sel = 0`, ROWS cycles: column input `i` presents
   `a_i,ROWS-1` first and `a_i0` last. The values shift down through RA.
2. **Compute**, `sel = 1`: column input `i` presents `Sa_i` and keeps it;
   it becomes the starting value of every column sum. Row `k` presents
   `b_k0, b_k1, ...` starting `k` cycles after row 0 (zeros otherwise), the
   usual diagonal skew.
3. **Drain**: the column sums `Sa_i + sum_k (a_ik + b_kj)^2` leave the
   bottom row, and `Sb_j` is added there. `Sb` enters at `sb_in` and passes
   one register per column, so it meets the results, which leave column `i`
   one cycle after column `i-1`.

Timing, counting cycles from the one in which `b_00` is presented at row 0:

- `col_out[i]` carries `2*c_ij` during cycle `j + i + ROWS + 1`;
- `sb_in` must carry `Sb_j` during cycle `j + ROWS + 1`.

The bottom adders are combinational. Any number P of B columns can be
streamed through one load; a new A needs a new load phase.

### Tensor core (`fs_tensor_core`, PE `fs_tc_pe`)

A TM x TP grid of PEs (default 4 x 4 with inner tile size TN = 4) computing
`C <= A_tile * B_tile + C` in one cycle per step. PE(i,j) receives row `i` of
the A tile, column `j` of the B tile, `Sa_i`, `Sb_j` and the shared `init`.
It sums TN partial multiplications `(a_ik + b_kj)^2` in an adder tree and
accumulates them. Two muxes steered by `init` choose what is added: with
`init` the register gets `Sa + Sb`, otherwise register plus partial dot
product.

When a large product is tiled, a row of tiles of A is multiplied by a column
of tiles of B. `Sa_i` and `Sb_j` must then be the correction terms of the
**whole** row `i` and column `j` (over the full inner dimension), not of one
tile. Initialise once, step through the tiles, and read `o = 2*C`.

### Real linear transform (`fs_ltr`)

`X_k = sum_i w_ki x_i` for N outputs (default 8). Accumulator `k` is loaded
with `Sw_k`. Each `en` cycle takes one sample `x_i` and its coefficient
column `w_0i .. w_N-1,i`; lane `k` adds `(w_ki + x_i)^2 - x_i^2`, with one
shared squarer for `x_i^2`, so the engine has N+1 squarers. `done` rises
after N samples since `init`; then `acc[k] = 2*X_k`. The coefficients are
inputs; where they are stored is left to the system. With complex
coefficients and real samples, two instances (real and imaginary
coefficients) do the job.

### Real convolution (`fs_conv`)

An N-tap FIR filter (default 8) in transposed form. Each sample goes to all
taps at once; tap `i` produces `(w_i + x)^2 - x^2 = 2 w_i x + w_i^2`, again
with one shared `x^2`. The partial sums move along a chain of N registers.
The `w_i^2` parts ride along and are cancelled once at the output by adding
`Sw`: `y2 = last register + Sw`.

Tap order: `w_{N-1}` feeds the first register and `w_0` the last, so after
sample `x_t`

    y2 = 2 * sum_{i=0}^{N-1} w_i * x_{t-i}

This is the convolution form. For the correlation form
`y_k = sum_i w_i x_{i+k}`, load the weights in reverse order. The chain
advances only on `en`. `y_valid` is high once N samples have entered since
reset.

### 2-D convolution (`fs_conv2d`)

A KH x KW kernel (default 3 x 3) slides over an image streamed in raster
order, IMG_W samples per row (default 16). The engine is the 1-D transposed
chain stretched to two dimensions: one chain of `D+1` registers,
`D = (KH-1)*IMG_W + KW-1`. The stage at distance `d = r*IMG_W + c` from the
output end (with `c < KW`) is fed by tap `(r,c)`. The `IMG_W-KW` stages
between two kernel rows have no tap and only pass the sum on, acting as line
delays. As in 1-D, every sample's square is computed once and subtracted at
every tap, and `Sw = -sum w_rc^2` is added at the output. After the sample at
row `h`, column `k`:

    y2 = 2 * sum_{r,c} w[r][c] * x[h-r][k-c]

`sof` marks the first sample of a frame. `y_valid` is high only when the
window lies wholly inside the frame (`h >= KH-1`, `k >= KW-1`). Outputs
between those, whose windows wrap around a row edge, must be discarded. The
source gives the 2-D case only as equations, together with the remark that
each sample's square can be shared by all kernel positions covering it. The
chain arrangement here is this design's way of realising that.

### Complex engines

`fs_cpm` (four squares) and `fs_cpm3` (three squares) are combinational
complex partial multipliers. Both take the sample (or row operand) as
`a + jb` and the coefficient as `c + js`.

- `fs_cpm3_acc`: complex multiply-accumulator on CPM3. It is initialised with
  `(Sab_h + Scs_k) + j(Sba_h + Ssc_k)` and ends at `2 z_hk`.
- `fs_cltr` / `fs_cltr3`: complex N-point linear transform (default 8), the
  complex counterpart of `fs_ltr`. CPM version: load `S_k` into both halves
  of every accumulator and subtract the shared `(x^2 + y^2)(1+j)` each
  cycle. CPM3 version: load `Sx_k + jSy_k` and add the shared sample term
  `(-(x+y)^2 + y^2) + j(-(x+y)^2 - x^2)` (module `fs_cpm3_term`).
- `fs_cconv` / `fs_cconv3`: complex N-tap convolution (default 8), the
  complex counterpart of `fs_conv`. The same sample terms are used per tap.
  `Sw(1+j)` (CPM) or the complex `Sw` (CPM3) is added at the output.

**Sign of the CPM3 sample term.** The published description of the CPM3
transform and convolution calls this sample term one "to be subtracted", and
its diagrams draw a subtractor. Its own equations add it, and only adding it
gives correct results (the tests check this, and a copy with the subtraction
fails them). The RTL adds it.

**Sign in `Sy_k`.** One printed formula for the CPM3 transform's
coefficient term reads `sum(-c^2 + (s-c)^2)`. The expansion it is derived
from, and the matching matrix-product term `Ssc_k`, both give
`sum(-c^2 - (s-c)^2)`. The RTL and the tests use the minus sign, which is the
one that gives the right imaginary part.

## Top level (`fs_top`)

The source describes these engines as alternatives for different problems,
not as one chip. `fs_top` places one instance of each on a common clock and
reset, with separate port groups (`pma_*`, `sys_*`, `tc_*`, `ltr_*`, `conv_*`,
`cltr_*`, `cconv_*`, `cacc_*`, `cltr3_*`, `cconv3_*`, `c2d_*`, `corr_*`). Nothing is
shared between the groups. A product would normally keep only the engines it
needs. Parameters: `DW`, `AW`, `SYS_ROWS`, `SYS_COLS`, `TC_M`, `TC_N`,
`TC_P`, `TR_N` (all transforms), `CV_N` (all 1-D convolutions), `C2_KH`,
`C2_KW`, `C2_IMG_W` (2-D convolution).

## Number ranges

Nothing saturates; keep AW large enough. At DW = 8 one real partial product
is at most 65,536 and the correction terms are negative. A 32-bit
accumulator therefore holds real dot products up to about 32,000 terms. The
CPM engines hold about 16,000 complex terms (two squares per part), the CPM3
engines about 7,000 (their three-operand sums reach 384^2).

## Choices made here, not taken from the source

- Operand and accumulator widths (8 and 32) and all sizes: 4 x 4 systolic
  array, 4 x 4 x 4 tensor-core tile, 8-point transforms, 8-tap
  convolutions, and a 3 x 3 kernel over 16-sample rows. The source gives no
  numbers.
- The `init`/`en` strobes, the `done` and `*_valid` flags, and the
  synchronous active-low reset.
- In the systolic PE, RA holds its value while `sel = 1`, and the vertical
  path is AW bits wide because it carries both `a` values and partial sums.
- The folded-row squarer.
- The correction-term unit `fs_corr` and the 2-D convolution chain: the
  source gives only their formulas.
- Gathering all engines in one top.

The baseline multiplier-based designs (an ordinary MAC, a MAC tensor-core PE,
multiplier-based transform and convolution, and a complex multiplier with
three real multipliers) serve only for comparison and are not included. IIR
filters are mentioned in the source as possible with the same idea but not
worked out, so none is provided.

## Verification

Each module in `rtl/` has a self-checking testbench `tb/tb_<module>.sv` that
compares against integer arithmetic done in the testbench. These are not
reference models of the hardware. Each ends by printing
`TB_RESULT checks=N failures=M`.

- `fs_square`: exhaustive at 9 and 4 bits, random at 12 bits.
- `fs_cpm`, `fs_cpm3`: 3,000 operand sets including all extremes. Each is
  checked both against the defining squares and, with the correction terms,
  against twice the complex product.
- Sequential engines: random data, extreme values (-128), idle cycles that
  must hold state, and exact cycle timing. That covers the systolic array's
  output cycle `j + i + ROWS + 1`, the one-step-per-cycle tensor core, and
  the `done`/`valid` flags after N samples.
- `tb_fs_top`: runs the whole design at its default parameters. Every
  correction term comes from the design's own `fs_corr`, and the test counts
  that each mechanism occurred: every correction mode, the systolic
  load-to-compute switch, multi-tile tensor-core accumulation, hold cycles,
  the done flags, and full convolution windows.
- `tb_fs_dft`: an application run. It computes 8-point DFTs with 8-bit
  twiddles `round(127 cos(2πki/8))` and `round(-127 sin(2πki/8))`. Complex
  samples go through both complex transforms (four-square and three-square).
  Real samples go through two real transforms, one holding the cosine row and
  one the sine row. The results must equal the integer DFT with the same
  quantised twiddles, and lie within 8.1 of the floating-point DFT. That
  bound follows from the twiddle rounding error.

To run a testbench with Verilator (5.x):

    verilator --binary --timing --assert -Irtl -Itb rtl/fs_pkg.sv \
        tb/tb_fs_top.sv --top-module tb_fs_top -Mdir obj_top
    ./obj_top/Vtb_fs_top

Replace `tb_fs_top` by any other testbench name. Every testbench runs in
well under a second.

## Files

`rtl/fs_pkg.sv` holds the default widths and the correction-mode enum.
There is one module per file: `fs_square`, `fs_pma`, `fs_sys_pe`,
`fs_sys_array`, `fs_tc_pe`, `fs_tensor_core`, `fs_ltr`, `fs_conv`, `fs_cpm`,
`fs_cltr`, `fs_cconv`, `fs_cpm3`, `fs_cpm3_term`, `fs_cpm3_acc`, `fs_cltr3`,
`fs_cconv3`, `fs_conv2d`, `fs_corr` and `fs_top`. Each file opens with a description of
its function, interface and timing.
