// xba - behavioural model of one binary ReRAM crossbar array with its
// word-line drivers, column multiplexer and shared column ADCs.
//
// Behavioural model: the real part is an analog ReRAM array.  Every cell
// holds one bit G (high or low conductance).  When binary voltages V drive the
// ROWS word lines, each column carries the current I = sum_r G[r] * V[r]; with
// binary cells and inputs this is the number of rows where both are 1, which
// the model computes exactly (no noise, no non-linearity).  One ADC serves MUX
// columns through a MUX: ADC a converts column a*MUX + col_sel, so one MUX
// setting yields COLS/MUX results and all columns take MUX settings.
//
// Interface and timing:
//   * prog_en / prog_row / prog_data program one whole row (word line) on the
//     rising clock edge; cells are non-volatile and have no reset.
//   * wl and col_sel select a read; adc_out follows combinationally (one
//     conversion per ADC per clock).
// Array size, the binary cells, the current-summing read and the 8-column ADC
// sharing follow the design description; the programming port, the
// interleaved column-to-ADC assignment and the single-cycle read are this
// model's own choices.
module xba #(
  parameter int unsigned ROWS     = xpoly_pkg::X_DEF,
  parameter int unsigned COLS     = xpoly_pkg::X_DEF,
  parameter int unsigned MUX      = xpoly_pkg::MUX_DEF,
  parameter int unsigned ADC_BITS = xpoly_pkg::ADC_BITS_DEF,
  localparam int unsigned NADC    = COLS / MUX,
  localparam int unsigned RW      = (ROWS > 1) ? $clog2(ROWS) : 1,
  localparam int unsigned SW      = (MUX > 1) ? $clog2(MUX) : 1,
  localparam int unsigned LW      = $clog2(ROWS + 1)
) (
  input  logic                             clk,
  input  logic                             prog_en,
  input  logic [RW-1:0]                    prog_row,
  input  logic [COLS-1:0]                  prog_data,
  input  logic [ROWS-1:0]                  wl,
  input  logic [SW-1:0]                    col_sel,
  output logic [NADC-1:0][ADC_BITS-1:0]    adc_out
);
  // Cells stored column-wise: cells[c][r] is the cell at row r, column c.
  logic [ROWS-1:0] cells [COLS];

  always_ff @(posedge clk) begin
    if (prog_en) begin
      for (int c = 0; c < COLS; c++) cells[c][prog_row] <= prog_data[c];
    end
  end

  logic [NADC-1:0][LW-1:0] level;

  always_comb begin
    for (int a = 0; a < NADC; a++) begin
      level[a] = LW'($countones(cells[a*MUX + int'(col_sel)] & wl));
    end
  end

  for (genvar a = 0; a < NADC; a++) begin : g_adc
    sar_adc #(.IN_W(LW), .ADC_BITS(ADC_BITS)) u_adc (
      .level (level[a]),
      .code  (adc_out[a])
    );
  end

  initial begin
    assert (COLS % MUX == 0) else $fatal(1, "COLS must be a multiple of MUX");
  end
endmodule
