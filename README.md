# Multi-precision systolic array with in-array result reconstruction

AI matrix engines multiply 8-bit integers. Fully homomorphic encryption needs
products of 30- to 64-bit residues, mostly inside number-theoretic transforms
(NTTs) that are computed as matrix products. The usual workaround splits every
wide number into 8-bit digits, runs one big low-precision matrix product, and
then rebuilds the wide results by shifting and adding neighbouring output
columns and propagating carries between them. On a TPU-style chip that rebuild
step runs on the vector unit, outside the systolic array, and costs as much time
as a large part of the matrix work.

This design moves the rebuild into the array at almost no cost. Only the last
row of processing elements changes: each of these *reconstruction PEs* (RPEs)
gets one more adder and a multiplexer, and passes the upper bits of its column
sum to the RPE on its right. Because a systolic wavefront reaches column j+1
exactly one cycle after column j, every carry arrives in the same cycle as the
column sum it belongs to. The carry chain runs in step with the normal vertical
reduction, adds no cycles, and the array emits finished full-precision numbers
written in radix 2^8.

The RTL is SystemVerilog 2017, synthesizable, parameterised, with defaults for a
128 x 128 array of 8-bit multipliers and 32-bit column adders.

## 1. The arithmetic the array has to do

Take a left matrix A whose entries are k-digit numbers (radix 2^8) and a right
matrix T. Write each left entry as a row of its k digits, least significant
first, so A becomes k times wider. Each right entry t is written as a small
block of digits so that one dot product produces the digit products at the
right positional weights.

*Toeplitz layout (exact product).* For right entry t with digits t_0..t_{k-1},
the block has k rows and 2k-1 columns; row i holds t_0..t_{k-1} shifted right by
i columns. Multiplying the digit row of a by this block gives the 2k-1
coefficients of the schoolbook product a*t, column m weighing 2^(8m).

*BAT-folded layout (product mod q).* When only a*t mod q is needed, as in an
NTT, row i of the block can instead hold the k digits of (t * 2^(8i) mod q).
The block is then k x k, and the group of k output columns represents a number
congruent to a*t mod q. This folding is done offline, once per transform, since
the twiddle matrix is constant.

With either layout, a single ordinary 8-bit matrix product yields, in each row
of the output, groups of G adjacent columns (G = 2k-1 or k). Column m of a group
holds an integer s_m, usually much wider than 8 bits, and the wanted result is
sum_m s_m * 2^(8m). Turning that into proper digits is the carry propagation the
RPE row performs:

    r_0 = s_0,   r_m = s_m + floor(r_{m-1} / 2^8),   digit_m = r_m mod 2^8

with the carry forced to zero at the first column of every group, so carries
never cross from one result into the next. The last column of a group keeps
its whole r value (its top digit plus everything above it), so the result is
exact and still needs a reduction mod q afterwards.

Worked example (a two-digit decimal example redone in radix 256, every decimal
digit becoming one base-256 digit): A = [[0x0102, 0x0407], [0x0305, 0x0608]] times
T = [[0x0504, 0x0203], [0x0701, 0x0809]] gives, in row 0, column sums
15, 67, 33 | 69, 99, 34 and in row 1 28, 99, 57 | 87, 137, 54; each group of three
is one 24-bit product sum, e.g. 0x21430F for row 0, column 0.

## 2. Array organisation

    west (8-bit digits, skewed)          north (32-bit partial sums, skewed)
            |                                         |
            v                                         v
       +---------+   +---------+        +---------+
       |   PE    |-->|   PE    |--> ... |   PE    |      rows 0 .. ROWS-2
       +---------+   +---------+        +---------+
            |             |                  |
       +---------+   +---------+        +---------+
  c -->|  RPE    |-->|  RPE    |--> ... |  RPE    |--> c  row ROWS-1
       +---------+   +---------+        +---------+
            | [7:0]       | [7:0]            |
            v             v                  v

`pe` (rows 0..ROWS-2) holds one weight b and computes every cycle
`s_out <= s_in + a_in*b`, `a_out <= a_in`. The weight stays; digits move east,
sums move south (weight-stationary dataflow).

`rpe` (last row) computes `s_out <= s_in + (carry_sel ? c_in : 0) + a_in*b`.
The array then splits the registered sum: bits [7:0] are the digit this column
keeps, bits [31:8] go east as the next RPE's `c_in`. The multiplexer select
`carry_sel` comes from the configuration; it is 0 at the first column of each
group, which is how carries are kept inside one result.

`recon_cfg` derives the selects from two run-time settings: `recon_en` (0 makes
the whole array a plain 8-bit matrix unit with 32-bit sums) and `group_cols`
(columns per result). Groups start at column 0 and repeat every `group_cols`
columns; column j carries in when `j mod group_cols != 0`. A chain of small
wrapping counters computes this without a divider, and the result is registered,
so the chain is a static path while the array runs.

`mxu_top` wraps the array into a usable unit: triangular input skew (row i
delayed i cycles) and the matching north-edge skew (column j delayed j cycles),
digit extraction, output de-skew (column j delayed COLS-1-j cycles) so that a
whole output row appears in one cycle, and a valid pipeline. `delay_line` is the
register chain used for all of these. Sizes and widths live in `mxu_pkg`.

## 3. Timing

* A left-matrix row presented with `in_valid` in cycle t leaves on `out_data`
  with `out_valid` in cycle t + ROWS + COLS - 1 (255 cycles at 128 x 128).
* One row per cycle, back to back, no stalls. A product with R left rows
  takes R + ROWS + COLS - 1 cycles after the weights are loaded.
* Inside the array, a row entering row 0 in cycle 0 is in RPE column j's
  register at the end of cycle ROWS-1+j; the carry of column j is consumed by
  column j+1 in the next cycle, together with that column's own sum. In a
  4-row array the first RPE output therefore appears in cycle 3.
* Weight loading: hold `w_shift` for ROWS cycles and present one weight row per
  cycle on `w_in`, the row meant for the RPE row first. Weights shift down the
  columns. There is a single weight register per PE (no double buffering), so
  loading and streaming alternate.
* Configuration (`cfg_we`) and weight loading are legal only when no row is in
  flight; assertions in `mxu_top` check this.

## 4. Output encoding

With `recon_en = 1`, `out_data[j]` is the 8-bit digit of column j zero-extended
to 32 bits, except in the last column of a group (`out_group_end[j] = 1`), which
carries its full 32-bit sum. The full-precision value of the group that starts
at column g is

    V = sum_{m < group_cols} out_data[g+m] * 2^(8m)

With `recon_en = 0` every column returns its plain 32-bit column sum.

Larger products are tiled. Column tiles are independent as long as groups do
not straddle a tile edge (128 is a multiple of k = 4 and k = 8). K tiles are
chained through `psum_in`: feeding the previous tile's `out_data` row back as
the north-edge partial sums adds the two partial results, because the
digit-plus-top-column form is linear. The 32-bit column registers have room for
this: a 128-row column adds at most 2^23 per tile.

## 5. Running an NTT on it

The 4-step NTT of size N = r x c becomes two matrix products (sqrt(N)-point
transforms), a twiddle multiply and a transpose. On this unit each transform
matrix is BAT-folded (k x k digit blocks) and preloaded as weights; the data
enter as digit rows; every group of k output columns is one residue before
reduction. Reduction mod q, the twiddle multiply and the transpose remain the
vector unit's job and are done in the testbench here.

A k*sqrt(N) x k*sqrt(N) digit matrix fills the array exactly for N = 1024 with
32-bit residues (k = 4) and N = 256 with 64-bit residues (k = 8). The FHE sizes
N = 2^12..2^16 need 4 to 256 weight tiles per stage (for example 2^16 at 64
bits: two 2048 x 2048 digit matrices) and an outside sequencer that is not part
of this RTL. `tb_ntt_full` runs, on the default 128 x 128 unit, the two
single-tile transforms and N = 4096 at both precisions (4 and 16 tiles per
stage, K tiles accumulated through `psum_in`), acting itself as sequencer and
vector unit, and compares every output with a directly computed NTT.

Streaming cycles on the unit (weight loading not counted, tiles run one after
the other without overlap):

| transform | tiles per stage | cycles |
|-----------|-----------------|--------|
| N = 1024, 32-bit | 1 | 574 |
| N = 256, 64-bit | 1 | 542 |
| N = 4096, 32-bit | 4 | 2552 |
| N = 4096, 64-bit | 16 | 10208 |

Each tile costs (rows streamed) + 255 cycles: the 255-cycle fill and drain of
the array is paid once per tile.

## 6. Where this RTL departs from, or adds to, the published description

* **Digit width in the RPE split.** The published array drawing labels the RPE
  outputs [15:0] (kept) and [31:16] (carry), while the text says each RPE keeps
  the least significant byte. For 8-bit digits only the byte split gives correct
  results, so `DIGIT_W = 8`; the carry is all 24 bits above the byte, not a
  single byte, since a 128-row column sum can reach 23 bits.
* **Decomposition figure.** In the published decomposition example the printed
  2 x 6 intermediate matrix lists row 0 as 15 67 33 28 99 57; the product of the
  printed digit matrices gives 15 67 33 69 99 34 for row 0 (3985 and 4459) and
  28 99 57 87 137 54 for row 1. The testbench checks the latter.
* **Own choices** where the description is silent: the weight shift-in path,
  unsigned digits, asynchronous active-low reset, the `recon_en`/`group_cols`
  configuration and its counter-chain decoder, input/output skew registers,
  the valid signal, the full-width last column of each group, and the use of
  the array's north-edge inputs for K-tile accumulation.
* **Not included**: the 8 MB input, weight and output buffers and the 128-lane
  vector unit of the host accelerator, which the design only connects to (their
  data paths are the top-level ports), and the offline digit decomposition,
  which is software (it appears as testbench code).

## 7. Files and simulation

| file | contents |
|------|----------|
| `rtl/mxu_pkg.sv` | default widths and sizes |
| `rtl/pe.sv` | processing element |
| `rtl/rpe.sv` | reconstruction processing element |
| `rtl/recon_cfg.sv` | carry-select configuration |
| `rtl/systolic_array.sv` | PE grid with RPE row and carry chain |
| `rtl/delay_line.sv` | register chain for skew and de-skew |
| `rtl/mxu_top.sv` | complete matrix unit |
| `tb/tb_pe.sv`, `tb/tb_rpe.sv`, `tb/tb_recon_cfg.sv`, `tb/tb_systolic_array.sv` | unit tests |
| `tb/tb_mxu_top.sv` | 12 x 12 end-to-end test: plain mode, exact Toeplitz products, two K tiles, BAT modular product, the worked example, mode switches, latency |
| `tb/tb_ntt_full.sv` | complete 32-bit and 64-bit 4-step NTTs (N = 256, 1024, 4096) on the default 128 x 128 unit |

Every testbench checks its results against values it computes itself and ends
by printing `TB_RESULT checks=<n> failures=<n>`. To run one with Verilator:

    verilator --binary --timing --assert rtl/mxu_pkg.sv rtl/*.sv tb/tb_mxu_top.sv \
              --top-module tb_mxu_top -Mdir obj_mxu && obj_mxu/Vtb_mxu_top

The default-size build (`tb_ntt_full`) takes several minutes to compile
(add `-j 4`) and about ten seconds to run. Array size is set with the
`ROWS`/`COLS` parameters of `mxu_top`; the tests have been run at 5 x 7,
12 x 12 and 128 x 128.
