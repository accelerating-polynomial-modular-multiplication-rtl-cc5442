// pe - processing engine: one bit plane of polynomial A in crossbar arrays.
//
// Bit mapping: PE w holds bit w of every coefficient of A, so K PEs hold A
// from MSB to LSB, all PEs sharing the same input.  Inside the PE the Conv1D
// (Toeplitz) matrix of that bit plane is tiled onto X x X crossbars.  The
// matrix has N input rows (coefficients b_i of B) and 2N-1 output columns
// (coefficients c_j of the linear product), cell (i, j) = bit w of a_{j-i},
// zero outside 0..N-1.  Input block I (rows I*X..I*X+X-1) and output block J
// meet in a non-zero block only for D = J - I in 0..N/X, so the PE has
// (N/X) * (N/X + 1) crossbars; all blocks on one diagonal D are identical and
// receive the same programming data.  For N = 256, X = 128 that is 6 arrays:
// D = 0 and D = 1 form the lower-triangular low half of the product (the
// three arrays printed for a PE in the design's figure), the other three hold
// the high half needed by the ring reduction.
//
// Per cycle the word lines of input block I carry one bit of b_{I*X..I*X+X-1};
// the column MUX setting col_sel picks X/MUX columns of every array; the
// adder tree of output block J adds the arrays that feed it; the shifter
// shift-adds over the input bits.  After the K bit cycles of one column group
// (first .. last), pe_out[J][m] holds
//     sum_i  a_{j-i}[w] * b_i   for output j = J*X + m*MUX + col_sel
// and keeps it until the next 'last'.
module pe #(
  parameter int unsigned N        = xpoly_pkg::N_DEF,
  parameter int unsigned K        = xpoly_pkg::K_DEF,
  parameter int unsigned X        = xpoly_pkg::X_DEF,
  parameter int unsigned MUX      = xpoly_pkg::MUX_DEF,
  parameter int unsigned ADC_BITS = xpoly_pkg::ADC_BITS_DEF,
  localparam int unsigned NI   = N / X,          // input blocks
  localparam int unsigned ND   = NI + 1,         // block diagonals
  localparam int unsigned NJ   = 2 * NI,         // output blocks
  localparam int unsigned NC   = X / MUX,        // lanes per output block
  localparam int unsigned RW   = (X > 1) ? $clog2(X) : 1,
  localparam int unsigned SW   = (MUX > 1) ? $clog2(MUX) : 1,
  localparam int unsigned SUMW = ADC_BITS + ((NI > 1) ? $clog2(NI) : 0),
  localparam int unsigned PEW  = SUMW + K
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // programming: row prog_row of every array, contents per block diagonal
  input  logic                          prog_en,
  input  logic [RW-1:0]                 prog_row,
  input  logic [ND-1:0][X-1:0]          prog_diag,
  // computation
  input  logic [N-1:0]                  wl_bits,
  input  logic [SW-1:0]                 col_sel,
  input  logic                          en,
  input  logic                          first,
  input  logic                          last,
  output logic [NJ-1:0][NC-1:0][PEW-1:0] pe_out
);
  // ADC results of array (I, D)
  logic [NI-1:0][ND-1:0][NC-1:0][ADC_BITS-1:0] adc;

  for (genvar gi = 0; gi < NI; gi++) begin : g_in
    for (genvar gd = 0; gd < ND; gd++) begin : g_diag
      xba #(.ROWS(X), .COLS(X), .MUX(MUX), .ADC_BITS(ADC_BITS)) u_xba (
        .clk       (clk),
        .prog_en   (prog_en),
        .prog_row  (prog_row),
        .prog_data (prog_diag[gd]),
        .wl        (wl_bits[gi*X +: X]),
        .col_sel   (col_sel),
        .adc_out   (adc[gi][gd])
      );
    end
  end

  for (genvar gj = 0; gj < NJ; gj++) begin : g_out
    for (genvar gm = 0; gm < NC; gm++) begin : g_lane
      // Arrays feeding output block J: input block I with D = J - I in 0..NI.
      logic [NI-1:0][ADC_BITS-1:0] tree_in;
      logic [SUMW-1:0]             tree_sum;
      always_comb begin
        for (int i = 0; i < NI; i++) begin
          if (gj - i >= 0 && gj - i <= int'(NI)) tree_in[i] = adc[i][gj-i][gm];
          else                                    tree_in[i] = '0;
        end
      end
      pe_adder_tree #(.NIN(NI), .IN_W(ADC_BITS)) u_tree (
        .in_vals (tree_in),
        .sum     (tree_sum)
      );
      pe_shifter #(.IN_W(SUMW), .K(K)) u_shift (
        .clk    (clk),
        .rst_n  (rst_n),
        .en     (en),
        .first  (first),
        .last   (last),
        .sum    (tree_sum),
        .result (pe_out[gj][gm])
      );
    end
  end

  initial begin
    assert (N % X == 0) else $fatal(1, "N must be a multiple of X");
  end
endmodule
