# Exact and approximate systolic matrix multiplier with fused MAC processing elements

A systolic array multiplies matrices by letting operands flow through a grid
of multiply-accumulate (MAC) processing elements (PEs). The PEs dominate the
array's area and energy, so this design attacks the PE itself in two ways:

1. **Fused MAC.** Instead of a multiplier followed by an accumulator adder,
   each PE is a single carry-ripple array of one-bit *partial-product cells*.
   The running sum enters the top of that array and is reduced together with
   the partial products, so `r_out = a*b + r_in` comes out of one structure.
2. **Approximate low columns.** The cells that produce the `k` least
   significant result columns can be replaced by much smaller approximate
   cells that are wrong in 5 of their 16 input cases (each time by one unit of
   that column). The error lands in low-order bits, which image and vision
   workloads tolerate well.

The RTL here is an 8 x 8 output-stationary array of 8-bit two's-complement
PEs with approximation factor `k = N-1 = 7`. Setting `K = 0` gives the exact
design. Array size, operand width, signedness and `k` are all parameters.

## The two partial-product cells

Every cell has the same four inputs: a multiplicand bit `a_i`, a multiplier
bit `b_j`, a sum bit `s_in` from the cell above (same bit weight) and a carry
`c_in` from the cell on its right (one weight lower). It produces `s_out`
(down) and `c_out` (left).

| cell | adds | exact form | approximate form |
|------|------|------------|------------------|
| PPC (`ppc.sv`)  | `a_i & b_j`     | full adder of `a_i&b_j`, `s_in`, `c_in` | `s_out = (s_in \| c_in) & ~(a_i&b_j)`, `c_out = a_i&b_j` |
| NPPC (`nppc.sv`) | `~(a_i & b_j)` | full adder of `~(a_i&b_j)`, `s_in`, `c_in` | `s_out = ~((s_in \| c_in) & ~(a_i&b_j))`, `c_out = (s_in \| c_in) & ~(a_i&b_j)` |

The NPPC supplies the negatively weighted partial products of a signed
product (below). Both approximate cells ignore the difference between "one
of `s_in`, `c_in` is set" and "both are set", and the PPC also drops the
sum when the product bit is set. The result is off by one column unit for
inputs `(a,b,c_in,s_in)` = `0011`, `0111`, `1011`, `1111` (one too small) and
`1100` (one too large). With uniformly random inputs that is an error
probability of 25/256 per cell.

The exact cells are written as their arithmetic function; the gate netlist
is left to synthesis. The `APPROX` parameter selects the form at elaboration
time; there is no run-time switch.

## Inside the PE: one array for multiply and accumulate

`mac_pe.sv` places cell `(i, j)` (bit `a_i` times bit `b_j`) in row `j` at
bit weight (column) `i+j`:

```
 column:   2N ... N+1  N   N-1 ...  2   1   0
 row 0:              [E0] (N-1,0) ... (1,0) (0,0)   <- r_in[N-1:0] enter from above
 row 1:          [E1] (N-1,1) ... (0,1)
 ...
 row N-1: [edge] (N-1,N-1) ... (0,N-1)
```

* Carries ripple leftwards along a row; the right-most cell of every row has
  `c_in = 0`.
* Sums fall straight down to the cell of equal weight in the next row.
* `r_in[N-1:0]` are the sum inputs of row 0. The upper accumulator bits
  `r_in[N+j]` enter the **edge adder** `Ej` at the left end of row `j`
  (column `N+j`), which also takes the carry out of the row's left-most cell
  and the carry of the edge adder above. Its sum is the sum input of the
  next row's left-most cell.
* Output bits: `r_out[j]` for `j < N-1` is the right-most sum of row `j`;
  `r_out[N-1 .. 2N-2]` are the sums of the last row; the top bits come from
  the last edge adders.

**Unsigned PE** (`SIGNED = 0`): all `N^2` cells are PPCs, `E0` is a half
adder, the rest full adders. `r_in`/`r_out` are `2N` bits and
`r_out = (a*b + r_in) mod 2^(2N)`.

**Signed PE** (`SIGNED = 1`, the default): two's-complement operands are
handled Baugh-Wooley style. The partial products with exactly one operand
bit equal to the sign bit (`i = N-1` xor `j = N-1`) carry negative weight;
they are produced complemented by NPPCs, and the constants that complement
introduces are added as fixed `1` inputs: one into `E0` (weight `2^N`) and
one into a half adder at column `2N-1` that, with two full adders at columns
`2N-1` and `2N`, closes the last row. That is `2N-2` NPPCs and `N^2-2N+2`
PPCs (14 and 50 for `N = 8`). `r_in`/`r_out` are `2N+1` bits (17 for
`N = 8`) and `r_out = (a*b + r_in) mod 2^(2N+1)`.

Those two constants alone would make bit `2N` come out inverted (the array
would compute `a*b + r_in + 2^(2N)`). The third Baugh-Wooley constant, weight
`2^(2N)`, is added by inverting the column-`2N` sum, so all 17 bits are the
true sign-extended result and the accumulator can be fed back indefinitely.

**Approximation.** Every PPC and NPPC in a column below `K` (`i + j < K`)
uses its approximate form; the edge adders always stay exact. With
`K = N-1` only PPCs are approximated (the first NPPC sits in column `N-1`);
a larger `K` (up to `2N-1`) also reaches NPPCs. `K = 0` is exact.

The PE is purely combinational; the registers are in `sa_pe`.

## The systolic array and its timing

```
             B[.][0]   B[.][1]    B[.][2]
               |       [d]        [d][d]         [d] = one skew register
 A[0][.] ---> PE00 ---> PE01 ---> PE02 --->
               |         |          |
 A[1][.] [d]> PE10 ---> PE11 ---> PE12 --->      A moves right, B moves down,
               |         |          |            P_ij stays in PE ij
 A[2][.] [d][d]> PE20 -> PE21 ---> PE22 --->
```

`sa_pe.sv` wraps one `mac_pe` with registers: each cycle it forwards its A
operand to the right and its B operand downwards, and updates its result
register `p <= a*b + p`. Results never move; `p[i][j]` is read from every PE
in parallel. `systolic_array.sv` builds the `N_DIM x N_DIM` grid and
`sa_top.sv` adds the input skew (`skew_buffer.sv`): row `i` of A and column
`j` of B are delayed by `i` and `j` cycles, so that `A[i][t]` and `B[t][j]`
meet in PE `(i, j)` in cycle `t + i + j`.

**Beat control.** A two-bit control word (`beat_ctl_t`: `valid`, `first`)
travels with every A operand through the skew registers and along the row.
A PE adds to its accumulator only on a valid beat, so idle cycles leave
results alone (an approximate cell is not guaranteed to pass a zero product
through unchanged, so zero-padding would not be safe). On a `first` beat the
MAC adds to zero instead of `p`, which starts a new product without a clear
cycle.

**Latency.** With the `N` beats of an `N x N` product presented back to back,
the last beat reaches PE `(N-1, N-1)` after `2(N-1)` further cycles: the
whole product takes `3N-2` cycles (22 for `N = 8`), counting the cycle that
presents the first beat as cycle 1. `done` is produced by a `2N-1` stage delay
line on the last-beat flag and rises at the clock edge that ends cycle
`3N-2`. A new product may begin at the earliest in the cycle `done` is high
(its first beat overwrites PE `(0,0)` one edge later), so back-to-back
products of inner length `T` take `T + 2N - 2` cycles each.

## Interface of `sa_top`

| port | dir | width | meaning |
|------|-----|-------|---------|
| `clk` | in | 1 | clock |
| `rst_n` | in | 1 | asynchronous active-low reset, clears all registers |
| `in_valid` | in | 1 | this cycle carries a beat |
| `in_first` | in | 1 | beat 0 of a product (only with `in_valid`) |
| `in_last` | in | 1 | final beat of a product (only with `in_valid`) |
| `a_col[i]` | in | `N_DIM` x `N_BITS` | `A[i][t]`: column `t` of A |
| `b_row[j]` | in | `N_DIM` x `N_BITS` | `B[t][j]`: row `t` of B |
| `done` | out | 1 | one-cycle pulse: all `p[i][j]` hold `sum_t A[i][t]*B[t][j]` |
| `p[i][j]` | out | `N_DIM` x `N_DIM` x `ACC_W` | accumulators, two's complement, `ACC_W = 2*N_BITS+1` (signed) |

Protocol: present beats `t = 0 .. T-1` with `in_valid = 1`, `in_first` on the
first and `in_last` on the last; `in_valid` may drop between beats. `T` is
free: a product with inner dimension larger than the array (for example the
9 taps of a 3 x 3 convolution) simply streams more beats. Read `p` while
`done` is high; the next product's first beat may be presented in that same
cycle. Results wrap modulo `2^ACC_W`: eight products of `(-128)*(-128)` do
not fit the 17-bit accumulator. An assertion flags `in_first`/`in_last`
without `in_valid`.

## Parameters

| parameter | default | meaning |
|-----------|---------|---------|
| `N_DIM` (`sa_pkg::SA_DIM`) | 8 | array is `N_DIM x N_DIM` |
| `N_BITS` (`sa_pkg::OPERAND_BITS`) | 8 | operand width `N` |
| `SIGNED` | 1 | two's-complement PE (0: unsigned PE, `2N`-bit accumulator) |
| `K` (`sa_pkg::APPROX_K`) | 7 | approximate cells in columns `0 .. K-1`; 0 = exact |

Every PE in an array uses the same `K`.

## How much accuracy the approximation costs

Measured with the RTL over all 65536 operand pairs of one 8-bit PE with
`r_in = 0` (`tb/pe_error_tb.sv`). NMED is the mean absolute error over the
largest exact product magnitude; MRED is the mean relative error over
non-zero products. In brackets are the values published for this PE
architecture. The MRED figures agree closely, except the signed MRED at
`k = 8`. The NMED figures differ by up to a factor of four, probably because
of a different normalisation, which the publication does not state.

| k | unsigned NMED | unsigned MRED | signed NMED | signed MRED |
|---|---------------|---------------|-------------|-------------|
| 2 | 0.00001 (0.0001) | 0.00055 (0.0011) | 0.00005 (0.0001) | 0.0019 (0.0037) |
| 4 | 0.00009 (0.0004) | 0.0027 (0.0033) | 0.00034 (0.0004) | 0.0107 (0.0130) |
| 5 | 0.00020 (0.0006) | 0.0054 (0.0075) | 0.00078 (0.0006) | 0.0226 (0.0286) |
| 6 | 0.00043 (0.0018) | 0.0101 (0.0108) | 0.00169 (0.0022) | 0.0460 (0.0481) |
| 8 | 0.00191 (0.0077) | 0.0322 (0.0328) | 0.00574 (0.0081) | 0.137 (0.2418) |

Application-level tests on the full 8 x 8 array, all on synthetic data:

* `tb/dct_tb.sv`: two-dimensional 8 x 8 integer DCT (HEVC coefficients) of
  six image-like blocks, first pass rescaled to 8 bits between passes. With
  `k = 2`, the reconstructed blocks differ from the exact array's
  reconstruction by a PSNR of about 63 dB. The exact path itself reaches
  about 44 dB against the original pixels, limited by the 8-bit
  intermediate.
* `tb/edge_tb.sv`: 3 x 3 Laplacian filtering via im2col (9-beat products).
  With `k = 4`, the edge map is about 23 dB PSNR from the exact one.

These numbers come from small synthetic inputs and are indications only.
They are not a reproduction of published image results.

## What follows the source design and what is added

Taken from the source description: the exact and approximate PPC/NPPC
functions (truth table and Boolean equations), the PE array geometry, the
NPPC placement, the correction-constant positions and the FA/HA edge cells
for 4- and 8-bit signed and unsigned PEs, the column rule for approximate
cells, the output-stationary 2-D array with input skew buffers, the
`3N-2` latency, and the default sizes (8-bit, 8 x 8, `k = N-1`).

Decided here, where the description is silent or inconsistent:

* **Bit 2N of the signed PE** is inverted (third Baugh-Wooley constant), as
  explained above. Without it only the low `2N` bits would equal `a*b + r_in`.
* **Cell count.** A general formula of `N^2-2N-2` PPCs appears alongside the
  statement of 50 PPCs for the 8-bit PE; the array here has `N^2-2N+2` PPCs
  (50 for `N = 8`), matching the count and the cell diagrams.
* **Signed or unsigned** is chosen when the design is built (`SIGNED`),
  since the signed and unsigned PEs are different structures; there is no
  run-time mode.
* **Exact cells** are written as full-adder functions, not as a specific
  gate netlist.
* **PE registers, beat control (`valid`/`first`), accumulate-on-valid,
  streaming interface, `done` pulse, asynchronous reset**: none of these is
  described; they are the simplest choices that make the array usable and
  testable.
* **No operand memories or host interface**: the caller streams operands
  every cycle and reads the 64 accumulators in parallel.
* Silicon results (area, power, delay at 90 nm, 250 MHz) are outside the
  RTL.

## Files

| file | content |
|------|---------|
| `rtl/sa_pkg.sv` | default sizes, `beat_ctl_t`, `acc_bits()` |
| `rtl/ppc.sv`, `rtl/nppc.sv` | partial-product cells, exact/approximate |
| `rtl/full_adder.sv`, `rtl/half_adder.sv` | edge cells |
| `rtl/mac_pe.sv` | fused MAC PE (combinational) |
| `rtl/sa_pe.sv` | PE with operand pipeline registers and accumulator |
| `rtl/skew_buffer.sv` | input delay line |
| `rtl/systolic_array.sv` | `N_DIM x N_DIM` grid |
| `rtl/sa_top.sv` | top: skew buffers, array, `done` |
| `tb/mac_ref_pkg.sv` | reference models: cell truth tables, cell-by-cell PE model, exact MAC |
| `tb/<block>_tb.sv` | one self-checking testbench per module |
| `tb/sa_top_tb.sv` | end-to-end test at default size |
| `tb/pe_error_tb.sv`, `tb/dct_tb.sv`, `tb/edge_tb.sv` | workload tests |
| `tb/sa_sizes_tb.sv`, `tb/sa_size_check.sv` | 3 x 3 and 4 x 4 arrays, 4- and 8-bit, exact and `k = N-1` |

## Simulating

Every testbench prints `TB_RESULT checks=<n> failures=<m>` and stops; each
has a watchdog. With Verilator 5:

```
verilator --binary --timing --assert -y rtl -y tb \
    rtl/sa_pkg.sv tb/mac_ref_pkg.sv tb/sa_top_tb.sv --top-module sa_top_tb
./obj_dir/Vsa_top_tb
```

Replace `sa_top_tb` by any other testbench name. `--lint-only -Wall` with the
same file list lints the RTL. All testbenches finish in about a second once
built; building `sa_sizes_tb` (eight arrays) takes about a minute.

## How far it has been checked

* Cells and adders: exhaustively, against arithmetic and the cell truth table.
* `mac_pe`: exhaustively for the 4-bit signed and unsigned PEs with `k = 3`
  (every `a`, `b`, `r_in`). For 8-bit PEs, 20 000 random operand triples plus
  corner values: the exact signed and unsigned PEs against plain arithmetic,
  the `k = 7` PE against an independent cell-by-cell model built from the
  truth tables.
* `sa_pe`, `systolic_array`, `sa_top`: cycle-accurate against the same
  model, including idle cycles between beats, products started in the `done`
  cycle, inner lengths from 1 to 16, extreme operands, one `done` per product
  and the `3N-2` latency. The same checks run on 3 x 3 and 4 x 4 arrays with
  4-bit and 8-bit PEs; a 16 x 16 array passes lint but has not been simulated.
* Each testbench was shown to fail on a deliberately broken copy of its
  module.
* Not checked: gate-level timing, power and area, and the BDCN neural-network
  edge detector, which needs far more storage than this design has.
