# Skewed-pipeline Bfloat16 systolic array

This is synthesizable SystemVerilog for a weight-stationary systolic array. The array multiplies
Bfloat16 matrices and reduces each column in FP32. Its processing elements (PEs) use a *skewed*
two-stage floating-point multiply-add pipeline, so that a partial sum moves down a column at
one row per clock cycle instead of one row every two cycles.

## The problem: a chain of two-stage multiply-adds

In a weight-stationary array each column computes a long chain `s_i = s_{i-1} + a_i * w_i`,
with one term per row. A reduced-precision floating-point multiply-add fits in two pipeline stages:

1. Multiply the significands and compute the product exponent.
2. Align the two addends, add them, count the leading zeros of the sum and normalize it.

The exponent work in stage 1 needs the *final* exponent of the row above, and that exponent is
only known after the row above has normalized its sum (end of its stage 2). So row `i+1` cannot
start until row `i` has finished both stages. A column of `R` rows then needs about `2R` cycles.

## The idea: speculate on the exponent, fix it one stage later

Row `i+1` starts its stage 1 while row `i` is still in stage 2. It uses the exponent row `i`
*has* at that point, the unnormalized exponent `ê_i`. That exponent is too large by `L_i`, the
number of leading zeros of row `i`'s sum. When row `i+1` reaches its own stage 2, `L_i` is a
register output, and a small fix block corrects the speculation:

* stage 1 of row `i` computes `e_M = e_a + e_w`, `d' = |e_M − ê_{i-1}|` and whether
  `e_M ≥ ê_{i-1}`;
* stage 2 of row `i` knows `L_{i-1}`. The true exponent of the incoming sum is
  `e_{i-1} = ê_{i-1} − L_{i-1}`, and the true alignment distance is

  | speculative case   | corrected distance `d`                 | larger addend |
  |--------------------|----------------------------------------|---------------|
  | `e_M ≥ ê_{i-1}`    | `d' + L_{i-1}`                          | product       |
  | `e_M < ê_{i-1}`    | `L_{i-1} − d'` (signed)                 | product if `L_{i-1} ≥ d'`, else the incoming sum |

* the fix block hands `ê_i = max(e_M, e_{i-1})` straight to stage 1 of row `i+1`, in the same
  cycle. This is the only combinational path between rows: register → fix (row `i`) →
  exponent compare (row `i+1`) → register.

Normalization is retimed too. Row `i` never normalizes its own sum. Row `i+1` receives that sum
unnormalized and must shift it left by `L_i` (to normalize it) and right by the alignment distance.
Only the net shift is needed, so two shifters (`<<` and `>>`) run side by side and a
multiplexer picks one. The product only ever shifts right, or not at all. The sum of the last
row is normalized by the rounding stage at the bottom of the column. That stage also applies
the last exponent correction (`e = ê − L`) and rounds once to FP32.

Per column, the skewed arrangement takes `R` cycles through the PEs, plus one extra addition
stage (stage 2 of the last row) and one rounding stage.

## Partial-sum format (the part to read before changing the datapath)

Partial sums are never rounded on their way down a column. Each one is carried as:

| field   | width | meaning |
|---------|-------|---------|
| `mag`   | `SUM_W = ACC_W+1 = 29` | magnitude: 28 operand bits plus one carry bit |
| `sign`  | 1     | sign (a zero is positive) |
| `lz`    | 5     | `L`, the leading zeros of `mag` (29 when `mag` is zero) |
| `e_hat` | 12, signed | `ê`, the weight of `mag`'s top (carry) bit |

The value is `mag · 2^(e_hat − 28)`, and `e_hat − lz` is the weight of its leading one. Inside
stage 2, both addends become 28-bit operands whose MSB has the weight `max(e_M, e_{i-1})`, and
bits that fall off the bottom are dropped. The product of two `1.f` significands lies in
`[1, 4)`, so its 16 bits sit at the top of the operand.

Because `ê` here names the carry bit, it is the ideal formulation's `ê` plus one. This
convention is the design's own. It is why the incoming sum's net shift is `L − 1 − d` when the
product is larger and `L − 1` otherwise (negative values mean a right shift). `rtl/exp_fix.sv`
spells out the three cases.

Special values:
* Subnormal inputs are flushed to zero.
* A zero product carries the exponent `−1024`, so it never wins an exponent comparison.
* A zero incoming sum (`lz = 29`) is bypassed.
* Inf/NaN input codes are not treated specially.
* At the rounding stage, FP32 overflow gives ±infinity and results below the smallest normal
  become a signed zero.

Twenty-eight operand bits give four bits below the FP32 significand. A result therefore differs
from an exactly rounded dot product by at most a small multiple of `2^-24` times the sum of the
magnitudes of the terms. The testbenches allow `2^-20` of that sum. Dot products of small
integers are exact and must match bit for bit.

## Pipeline and PE boundary

The PE in `rtl/skewed_pe.sv` contains two parts:
* stage 2 of row `i−1`: `exp_fix`, `norm_align` (the shifters) and `add_lza`, grouped in
  `pe_add_stage`;
* stage 1 of row `i`: `pe_mult_exp`, which uses the PE's own stationary weight.

Every signal that passes to the PE below comes from a register:
* the stage-1 bundle (`s1_t`: product, sign, `e_M`, `ê_{i-1}`, `d'`, comparison);
* the partial sum (`psum_t`).

Activations pass West to East through one register per PE. Under each column sit an extra
`pe_add_stage` (stage 2 of the last row) and a `round_stage`.

Timing in `systolic_array`:
* Element `k` of an activation vector must be on `a_in[k]` `k` cycles after element 0.
* Column `j`'s FP32 result appears on `result[j]` exactly `ROWS + 2 + j` cycles after element 0.
* One vector can enter every cycle.

The two-stage reference PE would need about `2·ROWS` cycles per column instead of `ROWS + 2`.
That baseline is not part of this RTL.

## The tile around the array (`sa_top`)

| block | module | role |
|-------|--------|------|
| weight buffer | `buffer_mem` | 128 words of 128 Bfloat16, one row of `W` per word (North edge) |
| input buffer  | `buffer_mem` | 256 words of 128 Bfloat16, one row of `A` per word (West edge) |
| West skew     | `skew_buffer` | delays lane `k` by `k` cycles |
| array         | `systolic_array` | 128×128 `skewed_pe`, plus the extra add and rounding stage per column |
| South de-skew | `skew_buffer` (`REVERSE=1`) | delays column `j` by `127−j` cycles, giving one result row |
| output buffer | `buffer_mem` | 256 words of 128 FP32 values |
| controller    | `sa_controller` | preload, stream, collect |

How a host uses it:
1. Write `W` through `wb_*` and the rows of `A` through `ib_*`.
2. Pulse `start` with `num_vec` (1 to 256).
3. Wait for `done`.
4. Read row `n` of `O = A·W` from output word `n`. The data arrives one cycle after `ob_re`.

The controller does the following:
* It shifts the weights in through the columns, bottom row first, in `ROWS` cycles.
* It then reads one input row per cycle.
* Each read starts a token down a `ROWS+COLS+2`-cycle delay line. The token marks the cycle in
  which the matching de-skewed result row is ready, and the controller writes that row to the
  output buffer.

From the cycle in which `start` is high to the cycle in which `done` is high takes
`ROWS + num_vec + (ROWS+COLS+2) + 2` cycles. For a full tile with 256 rows that is
128 + 256 + 258 + 2 = 644 cycles.

The de-skewed result row and its strobe also leave the tile as `col_result`/`col_valid`. The
published block diagram draws an adder with a feedback register below each column, but nothing
describes what it accumulates. Those accumulators are not built. Because of that, a layer whose
reduction dimension exceeds 128 needs its per-tile FP32 results added outside the tile. The
same holds for im2col and tiling of convolutions. For example, a 3×3×512 ResNet-50 convolution
has 36 row tiles.

## What follows the published design and what is added

The following come from the published design:
* the 128×128 size;
* Bfloat16 inputs with an FP32 reduction, rounded once at the bottom of each column;
* the weight-stationary dataflow;
* the speculative exponent compare, the fix equations and the retimed normalize/align shifters;
* the PE boundary;
* the extra addition and rounding stages.

The following are this design's own choices:
* The exponent bookkeeping (the carry-bit convention, 12-bit exponents, zero handling).
* The 28-bit operand width and truncation between rows.
* Round-to-nearest-even, flush-to-zero and overflow-to-infinity at the column end.
* The leading-zero *count* on the adder output. The published design uses a leading-zero
  *anticipator* working in parallel with the adder. Both give the same value, but the count
  puts the counter after the adder in the timing path.
* The weight shift chain, the buffers' organization and depths, the skew networks, the
  controller and the host interface.
* Asynchronous active-low reset of all pipeline registers. The buffers are not reset.
* The FP8 formats mentioned alongside Bfloat16 are not supported. The input format is fixed in
  `sa_pkg`.

## Simulating

Every testbench checks itself and ends with a line `TB_RESULT checks=N failures=M`. Each one has
a cycle watchdog. A testbench is built with the package files first, for example:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb \
  rtl/sa_pkg.sv tb/tb_fp_pkg.sv tb/tb_sa_top.sv --top-module tb_sa_top
./obj_dir/Vtb_sa_top
```

The packages are named explicitly; `-y` finds every module by its file name.

| testbench | checks |
|-----------|--------|
| `tb_pe_mult_exp` | product value and `d'` against real arithmetic; zero handling |
| `tb_exp_fix` | fix outputs against the direct definition `max(e_M, ê−L)`; all four cases |
| `tb_norm_align` | shifters against 64-bit reference shifts |
| `tb_add_lza` | sign-magnitude sum and leading-zero count against integer arithmetic |
| `tb_pe_add_stage` | registered sum = product + incoming (within truncation); `lz`; `ê` forwarding |
| `tb_skewed_pe` | weight preload and hold, activation forwarding, two chained PEs |
| `tb_round_stage` | nearest-even rounding, ties, overflow, flush, latency |
| `tb_systolic_array` | 6×4 array: every result in its exact cycle, bit-exact integer cases |
| `tb_skew_buffer`, `tb_buffer_mem`, `tb_sa_controller` | delays; memory timing; the controller's cycle-by-cycle schedule |
| `tb_sa_top` | 8×8 tile, three runs through the host ports, cycle count, counts of each pipeline mechanism (all fix cases, left/right shifts, product alignment, exact cancellation, round-up, overflow, preload) |
| `tb_sa_mid` | a 32×32 tile: one complete multiplication of 48 rows, every result and the cycle count |

The largest size simulated is 32×32 (`tb_sa_mid`, about 1.5 minutes to build on four cores).
The default 128×128 tile passes verilator lint and slang elaboration. Verilator, however, turns
its 16,384 PEs into about 1,100 C++ files (1.8 GB), which would take an estimated 20 minutes or
more to compile, so no simulation at the default size is included. The array is parameterized
only by `ROWS`/`COLS`. The 6×4, 8×8 and 32×32 runs exercise the same RTL. The small
testbenches build in seconds.
