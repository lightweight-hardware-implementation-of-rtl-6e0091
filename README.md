# A 1-D inverse VVC transform core with 32 shared multipliers

VVC's multiple transform selection (MTS) gives a decoder three inverse transforms: DCT-II at
4, 8, 16, 32 and 64 points, and DST-VII and DCT-VIII at 4, 8, 16 and 32 points. The horizontal
and vertical directions can use different types. This core computes any one of these 1-D
transforms with a single datapath of 32 ordinary multipliers and a coefficient ROM. Every size
and type runs at the same rate, two output samples per clock, and with the same latency. That
makes the core's timing easy to predict in a decoder pipeline. It also makes blocks of any size
easy to chain without stalls.

The RTL follows the regular-multiplier ("RM") architecture of Farhat, Hamidouche, Grill, Menard
and Déforges, *Lightweight hardware implementation of VVC transform block for ASIC decoder*.
Some parts are that paper's: the interface, the 32 multipliers, the use of zero-out to halve the
input rate, the coefficient ROM, DCT-VIII derived from DST-VII, and the output delay line. The
paper leaves several things open: the ROM layout, the multiplier wiring, the bit widths, the
rounding and the delay-line organisation. These are filled in here and marked as such below.
Results are bit-exact with the VVC (and HEVC) integer inverse transforms. The same datapath
also runs the H.264 4×4 inverse transform, bit-exact; the H.264 8×8 one is not supported.

## The idea: accumulate outer products, one input row per cycle

An inverse transform of an N-point vector is `x[j] = sum_i B[i][j] * y[i]`. Here `y` holds the
coefficients, `x` the samples, and row `i` of `B` is basis function `i`. The core computes this
input-serially and output-in-parallel. In each cycle, one or two coefficients `y[i]` arrive.
Each one is multiplied by the whole of its basis row `B[i][*]`, one ROM coefficient per
multiplier. The products are added into a bank of accumulators, one accumulator per output.
When the last coefficient of the vector is in, the accumulators hold the result.

To get two outputs per cycle, an N-point vector must take N/2 cycles. That means N/2 cycles to
bring in its N coefficients, and N/2 cycles to read out its N results. The multiplier count
follows from this:

| transform | coefficients per vector | cycles | coefficients per cycle | products per cycle |
|---|---|---|---|---|
| DCT-II 4/8/16/32 (even/odd split) | N | N/2 | 2 | 2 x N/2 = N ≤ 32 |
| DST-VII, DCT-VIII 4/8/16 | N | N/2 | 2 | 2 x N ≤ 32 |
| DST-VII, DCT-VIII 32 | 16 (zero-out) | 16 | 1 | 32 |
| DCT-II 64 (even/odd split) | 32 (zero-out) | 32 | 1 | 32 |

Two things keep the count at 32:

* **Zero-out.** VVC keeps only the lower 32 coefficients of a 64-point DCT-II and the lower 16
  of a 32-point DST-VII or DCT-VIII; the rest are always zero. These two largest sizes send only
  one coefficient per cycle, and the zero half is never sent. Both multiplier inputs, X0 and X1,
  then carry the same coefficient. In the paper's terms, the `sel` routing is "disabled".
* **Even/odd split of DCT-II.** For `k < N/2`, `x[k] = E[k] + O[k]` and
  `x[N-1-k] = E[k] - O[k]`. Here E sums the even-indexed coefficients and O the odd ones, both
  over the first N/2 columns of the basis. So DCT-II needs only N/2 products per coefficient.
  DST-VII has no such symmetry. That is why the 32-point DST and the 64-point DCT-II both fill
  exactly 32 multipliers.

## Datapath

```
data_in ─► input stage ─► X0,X1 ─► 32 multipliers ─► E/O accumulators ─► output stage ─► delay line ─► data_out_*
             (sel, DCT-VIII          ▲                 (2 x 32)          (butterfly,      (32 words)
              sign change)           │                                    reversal,
input_enable ─► controller ─► ROM address ─► coefficient ROM (256-bit word = 32 x 8-bit)      round, clip)
```

| stage | module | what it does |
|---|---|---|
| control | `mts_ctrl` | Starts a block on `input_enable`. Counts N rows of N/2 cycles. Emits per-cycle control and the ROM address. |
| coefficients | `mts_coef_rom` | One 256-bit word per input cycle: 32 signed 8-bit coefficients, slot m feeding multiplier m. |
| input | `mts_input_stage` | Routes lane 0 to X0 and lane 1 to X1, or lane 0 to both (zero-out sizes). Applies the DCT-VIII sign change. |
| multiply | `mts_mult_array` | 32 signed 17 x 8 multipliers. m0..m15 use X0 and m16..m31 use X1. Registered. |
| accumulate | `mts_accum` | Two banks of 32 accumulators (E, O). The mode decides which products go where (table below). |
| recombine | `mts_out_stage` | DCT-II butterfly, DCT-VIII output reversal, rounding shift and clipping. |
| align | `mts_delay_line` | Holds each finished row so that all sizes leave with the same latency. |
| top | `mts_core` | Wires the stages together. |

How the products are routed into the accumulators (`c` is the cycle within the row):

| mode | X0 / X1 | ROM word (slots) | accumulation |
|---|---|---|---|
| DCT-II 64 | `y[c]` / `y[c]` | `C64[c][0..31]` | c even: `E[m] += p[m]`; c odd: `O[m] += p[m]` |
| DCT-II N ≤ 32 | `y[2c]` / `y[2c+1]` | 0..15: `CN[2c][0..N/2-1]`, 16..31: `CN[2c+1][0..N/2-1]` | `E[m] += p[m]`, `O[m] += p[16+m]` |
| DST/DCT-VIII 32 | `y[c]` / `y[c]` | `S32[c][0..31]` | `E[m] += p[m]` |
| DST/DCT-VIII N ≤ 16 | `y[2c]` / `y[2c+1]` | 0..15: `SN[2c][*]`, 16..31: `SN[2c+1][*]` | `E[m] += p[m] + p[16+m]` |

Slots a size does not use hold zero coefficients. The first cycle of a row adds into zero instead
of into the fed-back value, so rows follow each other with no clearing cycle.

### DCT-VIII on the DST-VII kernel

The two bases are related by `C8[i][j] = (-1)^i * S7[i][N-1-j]`. In matrix form this is
`C8^T = Λ · S7^T · Γ`, where Γ is the sign matrix `diag((-1)^i)` and Λ is the order reversal.
Γ acts on the input, so the input stage negates the odd-indexed coefficients. In two-coefficient
mode that is lane 1. In the one-coefficient 32-point mode it is every odd cycle. Λ acts on the
output, so the output stage reads the E bank in reverse. No DCT-VIII coefficients are stored.

The paper's block diagram draws the reversal before the kernel and the sign change after it.
Its equation puts them the other way round. The equation's order is the one that gives the
DCT-VIII matrix, and that is the order built here.

## Coefficient ROM

The ROM is a constant array computed at elaboration (`mts_pkg::rom_word`), so no data file is
needed. Its 94 words are laid out as follows:

| words | contents |
|---|---|
| 0–31 | DCT-II 64, row c |
| 32–47, 48–55, 56–59, 60–61 | DCT-II 32, 16, 8, 4: even/odd row pair c, first N/2 columns |
| 62–77 | DST-VII 32, row c |
| 78–85, 86–89, 90–91 | DST-VII 16, 8, 4: row pair c |
| 92–93 | H.264 4×4 (times 2): row pair c |

The entries are the VVC integer matrices, generated from the standard's tables of distinct
magnitudes:

* DCT-II of N points: `C[i][j]` takes the tabulated value of `cos(k·π/128)` with
  `k = i·(64/N)·(2j+1) mod 256`, folded into 0..64. The sign follows the quadrant. Row 0 is 64.
  The N-point DCT-II is rows `i·64/N` of the 64-point one, first N columns.
* DST-VII of N points: `S[i][j]` takes the tabulated value of `sin(k·π/(2N+1))`, for
  `k = (2i+1)(j+1) mod 2(2N+1)`, folded into 0..N, with the sign of the sine.

The paper's ROM is smaller: 68 words of 256 bits (17408 bits), storing butterfly sub-matrices
of the 64-point DCT-II with one of them replicated. Its exact layout is not published. The
layout used here (92 words, 23552 bits, for VVC) keeps one ROM read per cycle with no second port. It stores
the small DCT-II sizes separately rather than deriving them from the 64-point words at run time.

## Interface and timing

Parameters: `N_BI` (coefficient and intermediate width, default 16), `N_BO` (final result
width, 16) and `BIT_DEPTH` (video bit depth, 10). Ports follow the paper's interface table, plus
one extra output, `data_valid`.

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock; asynchronous reset, active low |
| `input_enable` | in | 1 | one-cycle pulse starting a block |
| `avc_vvc` | in | 1 | 0 AVC (H.264 4×4 only, see below), 1 HEVC/VVC |
| `tr_type` | in | 2 | 0 DCT-II, 1 DCT-VIII, 2 DST-VII |
| `tr_size` | in | 3 | 0..4 = 4, 8, 16, 32, 64 points |
| `tr_dir` | in | 1 | 0 horizontal, 1 vertical |
| `data_in` | in | 2·N_BI | two coefficients, `y[2c]` in the low half; one coefficient (low half) for DCT-II 64 and DST/DCT-VIII 32 |
| `data_out_inter` | out | 2·N_BI | vertical-pass result, two samples, lower index in the low half |
| `data_out_fin` | out | 2·N_BO | horizontal-pass result |
| `data_enable` | out | 1 | high with the last output pair of every N-point vector |
| `data_valid` | out | 1 | high while an output pair is present (not in the paper) |

**Block protocol.** `tr_type`, `tr_size`, `tr_dir` and `avc_vvc` are sampled with the `input_enable` pulse.
From the next cycle on, `data_in` must carry the block without gaps: N vectors, each of N/2
cycles, so N²/2 cycles in all. That is 8, 32, 128, 512 and 2048 cycles for 4 to 64 points. The
next `input_enable` may come in the last data cycle of the current block, which gives
back-to-back blocks of any sizes. An earlier pulse is a protocol error, flagged by an assertion
in `mts_ctrl`.

**Latency.** The first output pair of a vector appears `LATENCY` = 36 cycles after the vector's
first data cycle, for every type and size. Its N/2 pairs follow on consecutive cycles. So the
output stream is the input stream delayed by 36 cycles, at two samples per cycle. The pipeline
is input register and ROM read (1), multipliers (1), accumulators (N/2 cycles for the row),
output stage (1), then the delay line.

**Delay line.** A short row (4 points, 2 cycles) is finished long before a 64-point row that
started at the same time would be. The delay line is a shift register of 32 two-sample words,
the output of one 64-point row. A finished row of N points is written into its top N/2 words,
so it leaves after `32 - N/2` more shifts. That brings every size to the latency of the largest.

Consider a row loaded exactly N/2 cycles after the previous load. Since the previous load, that
earlier row has shifted down by exactly N/2 words, so the places the new row needs are always
free. A larger row following a smaller one, or a smaller row following a larger one, therefore
never collide. An assertion in `mts_delay_line` checks this.

**Rounding.**

* The vertical pass (`tr_dir = 1`) produces the intermediate result: `(sum + 64) >> 7`, clipped
  to N_BI bits, on `data_out_inter`.
* The horizontal pass produces the final residual: `(sum + 2^(s-1)) >> s` with
  `s = 20 - BIT_DEPTH`, clipped to N_BO bits, on `data_out_fin`.

These are the VVC/HEVC inverse-transform stages, with the vertical pass first. The port that
does not match the block's direction is driven to zero.

### H.264 4×4 mode

With `avc_vvc = 0` (and `tr_size = 0`; `tr_type` is ignored) the core runs the H.264 4×4
inverse core transform. The ROM holds that transform times 2, so that its halves become
integers: basis rows {2,2,2,2}, {2,1,−1,−2}, {2,−2,−2,2} and {1,−2,2,−1}. It is run as a
4-point direct kernel, like DST-VII 4. What needs care is the rounding. The standard computes
each output with a butterfly that contains exactly one halved input, `d >> 1`. Outputs 0 and 1
add that term, so the standard's result is `floor(sum / 2)`. Outputs 2 and 3 subtract it, and
`−floor(d / 2) = floor((1 − d) / 2)`, so there the result is `(sum + 1) >> 1`. Taking this into
account, the two passes are bit-exact with the standard:

* H.264 transforms rows first, so here the **horizontal** pass is the intermediate one: `(sum +
  [j ≥ 2]) >> 1`, clipped to N_BI bits, on `data_out_inter`.
* The vertical pass is the final one. The standard's `(h + 32) >> 6` of the halved column sum
  equals `(sum + 64 + [j ≥ 2]) >> 7`, clipped to N_BO bits, on `data_out_fin`.

The H.264 8×8 transform is not built (see the limits).

### Building a 2-D inverse transform

The core is 1-D. A 2-D N×N inverse transform is two passes with a transpose between them:

1. Send the N columns of the coefficient block as a vertical pass.
2. Store `data_out_inter` and transpose it.
3. Send its N rows as a horizontal pass.

For a 64×64 DCT-II, the vertical pass sends 64 columns of 32 coefficients each (columns 32..63
are all zero but are still sent). The horizontal pass then again sends 32 coefficients per row,
because the intermediate result is zero in columns 32..63.

The transpose memory is not part of this RTL. `tb/tb_mts_2d.sv` shows the procedure with a
behavioural transpose.

### Throughput

Two samples per cycle per 1-D pass means a 2-D transform of W×H samples costs W·H cycles.

| video | clock | needed | built |
|---|---|---|---|
| 3840×2160 4:2:0 at 48 fps | 600 MHz | 3840·2160·1.5 = 12.44 M cycles per frame, × 48 = 597 M cycles/s | 600 M cycles/s |
| 1920×1080 4:2:0 at 50 fps | 165 MHz | 3.11 M cycles per frame, × 50 = 156 M cycles/s | 165 M cycles/s |

These figures assume the clock is reached. The RTL here has not been through timing closure.
Its longest combinational paths are the accumulator update and the butterfly plus rounding in `mts_out_stage`.

## Departures and limits

* **AVC only in part.** The paper lists AVC among the supported standards but gives nothing of
  how. The H.264 4×4 transform is built (above). The H.264 8×8 inverse transform is not: its
  butterfly shifts sums that already hold shifted terms (`a7 >> 2` with `d1 >> 1` inside it),
  which a multiply-accumulate with one final rounding cannot reproduce bit-exactly. The DC
  Hadamard transforms are not built either. The HEVC transforms (DCT-II 4 to 32, DST-VII 4) are
  the same integer transforms as VVC's, so HEVC is covered.
* **Square blocks only.** One `input_enable` always means N vectors of N points. A rectangular
  block needs a vector count, and the interface has no field for it.
* **ROM size.** 94 × 256 bits (92 for VVC) instead of the paper's 68 × 256 (see above).
* **Own choices:**
  * bit widths: 16-bit coefficients, 8-bit ROM entries, 32-bit accumulators;
  * the multiplier split X0 → m0..15 and X1 → m16..31;
  * the E/O accumulator routing;
  * the latency value (36);
  * the back-to-back rule;
  * which direction is the intermediate one (vertical for VVC, horizontal for H.264);
  * the H.264 4×4 matrix scaling and rounding offsets;
  * clipping of the final result;
  * the `data_valid` port;
  * asynchronous reset.
* The paper's target is 600 MHz in a 28 nm process. This RTL keeps the paper's structure but
  has only five pipeline stages. Reaching that clock would likely need the adders split further.

## Files

* `rtl/mts_pkg.sv`: enums (`tr_type_e`, `tr_size_e`), the `ctl_t` control word, constants
  (`LATENCY`, ROM size), the integer kernels `dct2_coef` and `dst7_coef`, and the ROM layout.
* `rtl/mts_core.sv`: the top. The other `rtl/mts_*.sv` files are the stages listed above.
* `tb/mts_ref_pkg.sv`: reference model. It builds each matrix entry from real-valued `$cos` and
  `$sin` of the transform definitions (DCT-VIII from its own cosine, not via DST-VII), looks up
  the VVC magnitude, and computes rounded 1-D transforms. The H.264 4×4 reference is the
  standard's butterfly itself, not a matrix.
* `tb/tb_mts_<stage>.sv`: one self-checking testbench per stage.
* `tb/tb_mts_core.sv`: end to end at default parameters. It covers every type and size, both
  directions, and size changes both ways, and checks the exact output cycle of every pair, plus
  `data_enable` and `data_valid`. It counts the zero-out mode, DCT-VIII, H.264 4×4 blocks, a
  smaller row after a larger one, and clipping, and fails if any of them never happened.
* `tb/tb_mts_2d.sv`: 2-D transforms through two passes. It covers all DCT-II sizes up to 64×64
  and all four DST-VII/DCT-VIII pairings up to 32×32, plus 40 H.264 4×4 blocks (rows first),
  and checks that each pass streams N² outputs in N²/2 consecutive cycles.
* `tb/tb_mts_random.sv`: 10⁵ random vectors of random type (H.264 4×4 included), size,
  direction and amplitude, back to back.

Every testbench prints `TB_RESULT checks=<n> failures=<n>`.

To simulate with Verilator (5.x), from the directory holding `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Wno-fatal -y rtl \
    rtl/mts_pkg.sv tb/mts_ref_pkg.sv rtl/mts_core.sv tb/tb_mts_core.sv --top-module tb_mts_core
./obj_dir/Vtb_mts_core
```

Replace `mts_core`/`tb_mts_core` with a stage and its testbench (for example `mts_accum` and
`tb_mts_accum`), or with `tb_mts_2d` or `tb_mts_random`. All testbenches run in seconds. Lint with
`verilator --lint-only -Wall -y rtl rtl/mts_pkg.sv rtl/mts_core.sv`.

To change the design:

* `N_BI`, `N_BO` and `BIT_DEPTH` are parameters of `mts_core`.
* The pipeline depth is reflected in `mts_pkg::LATENCY`, which the testbenches use. Update it if
  you add a stage.
* Supporting a different transform set means editing `rom_word`, `rom_base` and the routing case
  in `mts_accum`.
