// poly_mapper - polynomial mapping: programs polynomial A into the crossbars.
//
// Conv1D mapping turns A into a matrix by shifting its coefficients across
// successive rows and filling the gaps with zeros.  Cell (row i, column j) of
// the crossbar on block diagonal D (D = output block - input block) holds
//     bit w of a_{D*X + j - i}      (0 outside 0..N-1)
// in the PE of bit w.  Row i+1 of such a Toeplitz block is row i moved by one
// column, so the mapper keeps the zero-padded coefficient sequence
//     S[m] = a_{m-X} for X <= m < X+N, 0 otherwise   (L = N + 2X entries)
// in a shift register R, starts with R = S and shifts R up by one entry per
// row.  Row i of diagonal D is then R[D*X + X + j], j = 0..X-1, for all K bit
// planes and all diagonals at once; X cycles program every crossbar of every
// PE.
//
// Interface and timing: a_wr_en/a_wr_idx/a_wr_data store coefficients of A
// (kept for reprogramming).  A start pulse while idle loads R and raises
// busy; for X cycles prog_en = 1, prog_row = 0..X-1 and prog_diag carries the
// row contents; busy falls after the last row.  The mapping rule follows the
// design description; doing it on chip with this shift register is this
// design's choice.
module poly_mapper #(
  parameter int unsigned N  = xpoly_pkg::N_DEF,
  parameter int unsigned K  = xpoly_pkg::K_DEF,
  parameter int unsigned X  = xpoly_pkg::X_DEF,
  localparam int unsigned ND = N / X + 1,
  localparam int unsigned L  = N + 2 * X,
  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1,
  localparam int unsigned RW = (X > 1) ? $clog2(X) : 1
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic                           a_wr_en,
  input  logic [IW-1:0]                  a_wr_idx,
  input  logic [K-1:0]                   a_wr_data,
  input  logic                           start,
  output logic                           busy,
  output logic                           prog_en,
  output logic [RW-1:0]                  prog_row,
  output logic [K-1:0][ND-1:0][X-1:0]    prog_diag
);
  logic [K-1:0] a_mem [N];
  logic [K-1:0] r     [L];
  logic [RW-1:0] row;

  always_ff @(posedge clk) begin
    if (a_wr_en) a_mem[a_wr_idx] <= a_wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      row  <= '0;
      for (int m = 0; m < L; m++) r[m] <= '0;
    end else if (!busy) begin
      if (start) begin
        busy <= 1'b1;
        row  <= '0;
        for (int m = 0; m < L; m++)
          r[m] <= (m >= int'(X) && m < int'(X + N)) ? a_mem[m - X] : '0;
      end
    end else begin
      for (int m = L - 1; m > 0; m--) r[m] <= r[m-1];
      r[0] <= '0;
      row  <= row + 1'b1;
      if (int'(row) == int'(X) - 1) busy <= 1'b0;
    end
  end

  assign prog_en  = busy;
  assign prog_row = row;

  always_comb begin
    for (int w = 0; w < K; w++)
      for (int d = 0; d < ND; d++)
        for (int j = 0; j < X; j++)
          prog_diag[w][d][j] = r[d*X + X + j][w];
  end
endmodule
