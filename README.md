# X-Poly tile: polynomial modular multiplication in binary crossbars

The tile multiplies two polynomials in the ring Z_Q[x]/(x^N + 1), the core
operation of lattice cryptography. It does this in crossbar compute-in-memory
instead of with an NTT. A product of polynomials is a 1-D convolution. A
convolution can be written as a Toeplitz matrix of one operand times a vector
holding the other. So polynomial A is stored once as its Toeplitz matrix in
binary (1 bit per cell) crossbars. Polynomial B is then streamed onto the word
lines one bit at a time. Each crossbar column adds up its cells whose word line
is active, which is a popcount. A column ADC digitises that count. Digital
shift-and-add logic then builds the full-precision coefficients. A digital
reduction stage folds the 2N-1 product coefficients modulo x^N + 1 and reduces
them modulo Q.

Defaults: N = 256 coefficients, K = 16-bit coefficients, 128x128 crossbars,
8 columns share one ADC, 8-bit ADCs, Q = 65521.

## Bit mapping: one processing engine per bit of A

Every crossbar cell stores one bit. Bit w of every coefficient of A goes to
processing engine (PE) w, so the K PEs hold A from MSB to LSB. All PEs receive
the same word-line input, which is one bit plane of B per cycle, MSB first.
PE w therefore computes

    S_w[j] = sum_i  a_{j-i}[w] * b_i

by shifting and adding over the K bits of B. The tile accumulator then forms
C[j] = sum_w 2^w S_w[j], shifting and adding over the PE outputs from the MSB
plane down. Nothing in the array needs more than one bit per cell or one bit
per word line.

## Toeplitz tiling onto crossbars (block diagonals)

The Toeplitz matrix of one bit plane has N rows (one per b_i) and 2N-1 columns
(one per c_j). Cell (i, j) holds bit w of a_{j-i}, or 0 when j-i is outside
0..N-1. With X x X crossbars (X = 128), the rows form N/X input blocks I and
the columns form 2N/X output blocks J. Block (I, J) is non-zero only when
D = J - I is in 0..N/X. Every block on the same diagonal D holds the same
pattern: cell (r, c) = a_{D*X + c - r}. So a PE needs (N/X)*(N/X + 1)
crossbars. At the default size that is 6 arrays per PE and 96 in the tile.

- Diagonals D = 0 and D = 1 give the low half c_0..c_{N-1}.
- The other arrays give the high half c_N..c_{2N-2}, which the ring fold
  needs.

`poly_mapper` builds the patterns with a shift register of length N + 2X.
S[m] = a_{m-X}, with zeros outside the polynomial. Each cycle it emits one
row of every diagonal pattern and then shifts by one. All arrays are
programmed in X cycles, one row per cycle. PE w takes bit w of each pattern
row.

## Shared ADCs and column groups

Each crossbar has X/MUX ADCs, and each ADC serves MUX neighbouring columns
through a column multiplexer. One column-group setting g (0..MUX-1) selects
columns m*MUX + g of every array. The adder tree of output block J adds the
ADC codes of the (up to N/X) arrays feeding that block. With an 8-bit ADC and
128 rows the conversion is exact: the count is at most 128.

## Three-stage pipeline in K-cycle slots

`tile_ctrl` runs the work as slots of K cycles. Each slot handles one column
group:

1. **PE computation.** K cycles of bit-serial B input. Each PE shifter holds
   its S_w for the group's outputs.
2. **Tile accumulation.** K cycles, one bit plane of A per cycle, MSB first.
3. **Tile reduction.** RED_LANES results per cycle.

The three stages work on consecutive groups at the same time. One PMM
(polynomial modular multiplication) occupies the PE stage for MUX*K = 128
cycles. If the next B has been committed, the following PMM starts with no
gap. The last result of a PMM leaves 2K + 1 cycles after its PE stage ends.

## Reduction

For the ring x^N + 1, p_j = C_j - C_{j+N}. Both terms are reduced modulo Q
first, and Q is added when the difference is negative. Reduction uses Barrett:

- MU = floor(2^XW / Q)
- qhat = (x * MU) >> XW
- r = x - qhat*Q, then one conditional subtraction of Q.

XW is the width of an accumulated coefficient (41 bits at the defaults).
MU and Q are fixed when the design is built, so both products are
multiplications by constants. They reduce to fixed shift-and-add networks,
and there is no divider and no general multiplier.
Setting NEGACYCLIC = 0 selects x^N - 1 (p_j = C_j + C_{j+N}).

## Interface (`xpoly_tile`)

| Signal | Meaning |
|---|---|
| `a_wr_en`, `a_wr_idx`, `a_wr_data` | write one coefficient of A |
| `prog_start`, `prog_busy` | programme A into all crossbars (X cycles); accepted only while the tile is idle |
| `b_wr_en`, `b_wr_addr`, `b_wr_data` | write B_LANES coefficients of B into the free bank of the double buffer |
| `b_commit`, `b_ready` | submit the written B; `b_ready` is low when both banks are full |
| `res_valid[l]`, `res_idx[l]`, `res_data[l]` | result coefficients, RED_LANES per cycle, in column-group order (J*X + m*MUX + g), not ascending |
| `res_last` | final result of a PMM |
| `busy`, `stall` | pipeline activity; the PE stage is waiting for a B |
| `corr_event`, `wrap_event` | a Barrett correction or a negative ring fold happened (for observability) |

Parameters: N, K, X, MUX, ADC_BITS, Q, B_LANES, RED_LANES, NEGACYCLIC. The
constraints are:

- X divides N.
- MUX divides X.
- Q < 2^K.
- The accumulated width must stay under 64 bits. This allows K up to about
  27.

## Design choices that differ from the published description

- **Arrays per PE.** The published PE figure shows 3 arrays: the
  lower-triangular low half of the product. This design also maps the upper
  half (6 arrays per PE at N = 256), so the ring fold can be done in one
  pass. The alternative was a second pass through the arrays, which is not
  described.
- **Modulus.** The modulus is not given. This design uses Q = 65521, the
  largest 16-bit prime, as a parameter.
- **Ring.** The ring x^N + 1 is assumed, as in the usual lattice schemes.
- **Array reuse not built.** Degrees above the built N (512 to 4096 in the
  published results) are handled there by reusing a fixed set of arrays. The
  reuse schedule is not specified, so it is not built. A larger N has to be
  elaborated with more arrays.
- **Throughput and latency.** At the published 400 MHz clock, 128 cycles per
  PMM is 3.125 million PMMs/s. This is close to the reported 3.1 MOP/s. The
  first-result latency of this schedule is 161 cycles (0.40 us). The reported
  latency is 0.32 us.
- **Analog parts.** Crossbars and SAR ADCs are ideal behavioural models: an
  exact popcount and a saturating quantiser. Word-line and bit-line drivers,
  device variation and ADC timing are not modelled.
- **Own choices.** The host interface, the double-buffered B input and the
  lane counts are this design's own choices.

## Files

`rtl/`:

- `xpoly_pkg.sv` holds the constants and the Barrett constant.
- `xpoly_tile.sv` is the top.
- `poly_mapper.sv`
- `input_buffer.sv`
- `pe.sv`, built from `xba.sv`, `sar_adc.sv`, `pe_adder_tree.sv` and
  `pe_shifter.sv`.
- `tile_accumulator.sv`
- `reduction_unit.sv`, built from `barrett_reducer.sv`.
- `tile_ctrl.sv`

`tb/` holds one self-checking testbench per module:

- `tb_xpoly_tile.sv` runs a small tile end to end.
- `tb_xpoly_full.sv` runs the full default size (N = 256, K = 16, 96
  crossbars) against a software model. This includes back-to-back PMMs,
  stalls and back-pressure.

Each testbench prints `TB_RESULT checks=... failures=...`.

Example with Verilator:

    verilator --binary --timing --assert -y rtl --top-module tb_xpoly_full \
        rtl/xpoly_pkg.sv tb/tb_xpoly_full.sv
    ./obj_dir/Vtb_xpoly_full
