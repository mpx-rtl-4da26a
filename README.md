# MPX: one systolic array for matrix and polynomial multiplication

A weight-stationary systolic array already moves data in a diagonal wavefront:
the operand that reaches processing element PE(i,j) arrives i+j cycles after
the wave started. Polynomial multiplication has the same shape. In
`C(x) = A(x)·B(x)` the coefficient `c_k` is the sum of all `a_i·b_j` with
`i + j = k`, so the products that belong together lie on one diagonal of the
(i, j) grid. MPX adds a second, diagonal partial-sum path to every PE. With
it, the array can let each product flow into the running sum of its
diagonal neighbour instead of its vertical one. The same fabric then computes
either a matrix product (vertical accumulation) or a polynomial product
(diagonal accumulation), chosen by a single mode bit.

This repository holds synthesizable SystemVerilog for that array. Around it
sit the parts needed to use it as an engine: operand and result buffers, the
edge skew and de-skew registers, a controller, and a vector accumulator. The
accumulator builds long polynomial products out of array-sized blocks. The
design follows the paper *MPX: A Unified Systolic Array for Matrix and
Polynomial Multiplication* (Alexakis, Schoinianakis, Dimitrakopoulos). That
paper defines the PE, the two dataflows and the blocking scheme. The engine
around the array is this implementation's own, and the section "What is
this design's own" says where.

## The dual-mode PE

```
 a_i (West) ─► [a_q] ──────────────┬──────────────────────────► a to PE(i,j+1)
                                   │
 w / b_j (North) ─► [w_q] ──┬──────┼──────────────────────────► w to PE(i+1,j)
                            │      │
                            └─► ( × ) ──┐
                                        ▼
 psum from PE(i-1,j)   ──► mux ──────► ( + ) ─► [psum_q] ─┬───► psum to PE(i+1,j)
 psum from PE(i-1,j-1) ──►  ▲                             │
                          mode                            └─► [diag_q] ─► to PE(i+1,j+1)
                                                               enable = poly mode
```

`mpx_pe` has four registers:

* `a_q` holds the West operand. It feeds the multiplier and the East
  neighbour, so operands move one column per cycle.
* `w_q` holds the weight in matrix mode. It loads only while `w_shift` is
  high. In polynomial mode `w_shift` stays high, so `w_q` becomes a pipeline
  stage that carries the coefficients of the second polynomial one row down
  per cycle. This is the same register that matrix mode uses to shift
  weights in.
* `psum_q` holds `a_q·w_q` (signed 8 × 8 bits) plus one incoming partial sum.
  In matrix mode that sum comes from the PE above. In polynomial mode it
  comes from the PE up and to the left. The adder is 32 bits wide and wraps
  on overflow.
* `diag_q` is the one extra pipeline register on the diagonal path. It
  copies `psum_q` and drives the diagonal output. Its load enable is
  `mode == MODE_POLY`, so in matrix mode it holds still. A synthesis flow
  turns this enable into the clock gate that keeps the diagonal path from
  switching while the array multiplies matrices.

Only the mux and `diag_q` are new compared with a plain weight-stationary PE.

## Why the diagonal needs the extra register

In polynomial mode the coefficients enter as follows:

* Row i gets a coefficient of A. It enters i cycles after row 0's.
* Column j gets `b_j`. It enters j cycles after column 0's.

Both kinds of operand move one PE per cycle. So the `a` and `b` of one
multiplication meet in PE(i,j) i+j cycles after the wave began.

A partial sum that leaves PE(i-1,j-1) must reach PE(i,j) in the same cycle
as that PE's operands. Those operands arrive two cycles
after the operands of PE(i-1,j-1): one extra row plus one extra column. The
partial sum already passes through one register, `psum_q`. `diag_q` adds the
second. Leave it out, and every diagonal sum would arrive one cycle early and
be added to the products of a different wave.

### Feeding order and where the coefficients come out

For one N×N block product `A(x)·B(x)` (N coefficients each):

| where                    | what                                                   |
|--------------------------|--------------------------------------------------------|
| West, row i              | `a_(N-1-i)`: the highest coefficient enters row 0      |
| North, column j          | `b_j`                                                  |
| PE(i,j) multiplies       | `a_(N-1-i) · b_j`, which belongs to `c_(N-1-i+j)`      |
| diagonal out, bottom row | PE(N-1,j) delivers `c_j`, for j = 0 … N-1              |
| diagonal out, right col. | PE(i,N-1) delivers `c_(2N-2-i)`, for i = 0 … N-2       |

Along any diagonal (i+1, j+1) the index `N-1-i+j` stays the same. Each
diagonal therefore sums exactly the products of one coefficient.

Here is the paper's worked example on a 3×3 array,
`(2+3x+4x²)(1+5x+2x²)`. The partial sums build up step by step:

| step | PE computing | partial sum             |
|------|--------------|-------------------------|
| 1    | PE00         | 1·4 = 4                 |
| 2    | PE01, PE10   | 5·4 = 20, 1·3 = 3       |
| 3    | PE02, PE11, PE20 | 2·4 = 8, 4 + 5·3 = 19, 1·2 = 2 |
| 4    | PE12, PE21   | 20 + 2·3 = 26, 3 + 5·2 = 13 |
| 5    | PE22         | 19 + 2·2 = 23           |

The result is `2 + 13x + 23x² + 26x³ + 8x⁴`. `tb_mpx_array` checks each of
these intermediate values in the cycle where it is due.

### Output alignment

The coefficients of one product leave at different times. `c_j` leaves the
bottom row N-1-j cycles before `c_(N-1)`. `c_(2N-2-i)` leaves the right
column N-1-i cycles before it. `mpx_out_align` delays each of those outputs
by that many cycles, so all 2N-1 coefficients come out in the same cycle
(`poly_vec`). The same staircase, applied to the South-edge vertical sums,
turns matrix results into whole rows (`mat_row`).

## Long polynomials: blocks streamed back to back

A polynomial with K·N coefficients is cut into K blocks of N,
`A(x) = Σ A_i(x)·x^(iN)`. Then

```
A(x)·B(x) = Σ_i Σ_j  A_i(x)·B_j(x) · x^((i+j)N)
```

The array computes every block product `A_i·B_j`, K² of them. The
accumulator adds each one into the result, shifted by `(i+j)·N`. The
products of different pairs never mix inside the array. Every wave carries
its own operands, and its partial sums travel in step with it. So a new pair
can enter **every cycle**, with no gap between pairs. The controller streams
the pairs in the order (0,0), (0,1), …, (0,K-1), (1,0), … (K-1,K-1).

`mpx_poly_acc` keeps the result as rows of N words. A block product of 2N-1
coefficients always covers two rows:

* its low N coefficients are added into row i+j;
* its high N-1 coefficients are added into row i+j+1.

The unit adds one whole block product per cycle, which matches the array's
rate.

## Matrix mode

This is an ordinary weight-stationary array:

1. **Preload.** For N cycles the weight rows are read from the weight buffer
   in the order N-1 down to 0 and shifted down through the `w_q` registers.
   The first row read ends up in the bottom PE row.
2. **Stream.** Activation row m is read in one cycle. Element r enters array
   row r, r cycles late. Column j's vertical sum leaves the bottom row as
   `Y[m][j] = Σ_r X[m][r]·W[r][j]`.
3. **Collect.** The alignment registers turn the results into whole rows.
   Each row is written to the output buffer 2N+1 cycles after its input row
   was read.

`diag_q` holds its value throughout, and the mux selects the vertical path.

## The engine (`mpx_top`)

```
 host ──► input buffer  ──► West skew ──────────────► ┌──────────────┐
 host ──► weight buffer ──► North skew (poly only) ─► │  N×N MPX     │
                                                      │  array       │
            mpx_ctrl (mode, reads, w_shift, tags)     └──────┬───────┘
                                                   South/East edges
                                                             ▼
                                                   output alignment
                                             ┌───────────────┴──────────────┐
                                   output buffer (matrix)      poly accumulator (poly)
                                             └──────────► host reads ◄──────┘
```

### Host interface and data layout

The host writes the operand buffers one byte at a time (bank, address). It
starts an operation with `start`, `op_mode` and either `m_rows` or
`k_blocks`, then waits for the one-cycle `done` pulse. Results are read one
word at a time, one cycle after the address is given.

| operand              | buffer bank | address | content          |
|----------------------|-------------|---------|------------------|
| matrix X (m × N)     | input r     | m       | `X[m][r]`        |
| matrix W (N × N)     | weight c    | r       | `W[r][c]`        |
| polynomial A (K·N)   | input r     | i       | `a[i·N + N-1-r]` |
| polynomial B (K·N)   | weight c    | j       | `b[j·N + c]`     |

Matrix results: output buffer bank c, address m holds `Y[m][c]`. Polynomial
results: `res_rd_idx = k` returns `c_k`, for k = 0 … 2KN-2.

Both operand buffers output zeros on cycles with no read. Once the operands
have gone through, zeros therefore flow into the array. The North skew is
bypassed in matrix mode, because there the weights shift in unskewed.

### Timing

The count runs from the clock edge that samples `start` to the cycle in which
`done` is high:

| operation                         | cycles         |
|-----------------------------------|----------------|
| matrix, m activation rows         | `3N + m + 3`   |
| polynomial, K blocks per operand  | `K² + 2N + 3`  |

After the first result, the array finishes one block pair (or one matrix
row) per cycle.

These are the numbers from simulation, next to the MPX column of the
paper's cycle table. The 32×32 rows are the default engine; the 16×16 and
64×64 rows are the same RTL built with `N = 16` (32-block buffers) and
`N = 64`:

| coefficients | array | K  | this RTL | paper |
|--------------|-------|----|----------|-------|
| 128          | 16×16 | 8  | 99       | 159   |
| 256          | 16×16 | 16 | 291      | 543   |
| 512          | 16×16 | 32 | 1059     | 2079  |
| 128          | 32×32 | 4  | 83       | 95    |
| 256          | 32×32 | 8  | 131      | 191   |
| 512          | 32×32 | 16 | 323      | 575   |
| 128          | 64×64 | 2  | 135      | 135   |
| 256          | 64×64 | 4  | 147      | 159   |
| 512          | 64×64 | 8  | 195      | 255   |

The paper's figures come from a simulator model, not from RTL. All nine of
its MPX entries fit `2·K² + 2N - 1` exactly, so its model charges two cycles
per block pair. The RTL here takes one cycle per pair, as in the paper's
back-to-back figure. This RTL also accumulates at full width, where the
paper models a 16-lane vector unit. These two differences explain the gap.
"Degree" in that table is read as the number of coefficients, since only that
reading reproduces the paper's numbers.

## Parameters

| parameter    | default | meaning                                                                |
|--------------|---------|------------------------------------------------------------------------|
| `N`          | 32      | array size; the paper evaluates 16, 32 and 64                          |
| `BUF_DEPTH`  | 64      | words per operand/output bank (activation rows, or blocks)             |
| `MAX_BLOCKS` | 16      | largest K; 16 × 32 = 512 coefficients, the paper's largest polynomial  |
| `DATA_W`, `ACC_W` (package) | 8, 32 | multiplier and adder widths, as in the paper                |

To run the paper's 64×64 configuration, set `N = 64`. Keep
`MAX_BLOCKS × N` at 512 or more, and `BUF_DEPTH ≥ max(N, MAX_BLOCKS)`.

## What is this design's own

The paper gives the PE, the grid with its three kinds of links, the two
dataflows, the feeding order of the example, and the blocking scheme. The
following are choices made here, where the paper says nothing:

* **Arithmetic:** signed two's-complement operands, with a product that
  wraps modulo 2³². The paper says only "8-bit integer multipliers and 32-bit
  adders". Modular reduction, which a cryptographic use would need, is not
  part of the paper's array and is not done here.
* **Weight hold:** a `w_shift` enable decides when the weight register
  loads.
* **Clock gating:** the diagonal register's clock gate is written as a
  register enable. A real integrated clock-gating cell is a library cell.
* **Buffers:** organisation of the three buffers: one bank per lane, a
  shared row address, a registered read, zero fill, and the layout in the
  table above. Buffers are plain arrays, not SRAM macros.
* **Alignment staircases:** the skew and alignment staircases of arbitrary
  N. The paper draws them for 2×2 and 3×3 arrays.
* **Accumulator:** a full-width accumulator that takes one block product per
  cycle. The paper accumulates in "vector units" and models a 16-lane SIMD
  unit.
* **Controller:** the controller, the command interface, and the rule that
  preload and streaming do not overlap.
* **Reset:** a synchronous active-low reset on every register.
* **One product per operation:** each polynomial operation computes one
  product, made of up to `MAX_BLOCKS²` block pairs streamed without gaps.
  Two independent products run as two operations, and the second starts only
  after the first has drained (2N+3 cycles). Likewise, the weights for the
  next matrix operation are loaded only after the current one ends.

The paper's area and power numbers (about 20 % more area, about 3 % more
power in matrix mode) come from place-and-route in a 7 nm library. They are
not reproduced here.

## Files

| file | content |
|------|---------|
| `rtl/mpx_pkg.sv` | widths, `data_t`, `acc_t`, `mode_e` |
| `rtl/mpx_pe.sv` | dual-mode PE |
| `rtl/mpx_array.sv` | N×N grid |
| `rtl/mpx_skew.sv` | staircase delay lines (input skew, output de-skew) |
| `rtl/mpx_out_align.sv` | output alignment for both modes |
| `rtl/mpx_operand_buffer.sv` | input / weight buffer |
| `rtl/mpx_output_buffer.sv` | matrix result buffer |
| `rtl/mpx_poly_acc.sv` | block-product accumulator |
| `rtl/mpx_ctrl.sv` | controller |
| `rtl/mpx_top.sv` | the engine |
| `tb/tb_*.sv` | one self-checking testbench per module, plus `tb_mpx_top_full` and `tb_mpx_poly_sizes` |
| `tb/mpx_poly_size_runner.sv` | test helper: one engine of a given size running three polynomial products |

## Simulating

Every testbench checks its results against a reference it computes itself,
counts checks and failures, and ends with a line
`TB_RESULT checks=<n> failures=<m>`. A watchdog stops it if it hangs. To
build and run one with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb rtl/mpx_pkg.sv tb/tb_mpx_top.sv \
          --top-module tb_mpx_top -o sim
./obj_dir/sim
```

What each testbench covers:

* `tb_mpx_pe`: random stimulus against a cycle model of one PE.
* `tb_mpx_array`: the 3×3 worked example, step by step, and random
  back-to-back matrix rows and block pairs on a 4×4 array. Every output is
  checked in the cycle it is due.
* `tb_mpx_skew`, `tb_mpx_out_align`: exact delays and lane mapping.
* `tb_mpx_operand_buffer`, `tb_mpx_output_buffer`, `tb_mpx_poly_acc`: the
  memories and the accumulator, against models.
* `tb_mpx_ctrl`: every read, write and accumulate strobe of both schedules,
  cycle by cycle.
* `tb_mpx_top`: end to end on a 4×4 engine, and on a 3×3 engine for the
  worked example. Matrix and polynomial operations are interleaved, so the
  mode switches both ways. It counts each mechanism it exercises and fails if
  one never happened: preload, both mode switches, multi-block products, and
  diagonal registers holding still in matrix mode.
* `tb_mpx_top_full`: the engine at its default parameters. It runs a
  64×32 by 32×32 matrix product and polynomial products of 128, 256 and 512
  coefficients, checking every result word and the cycle counts. Building it
  takes about a minute; simulating it takes well under a second.
* `tb_mpx_poly_sizes`: the same three polynomial sizes on a 16×16 and a
  64×64 engine running side by side, with every coefficient and cycle
  count checked. Building it takes about two minutes.
