// xpoly_tile - one X-Poly tile: polynomial modular multiplication in
// binary crossbar compute-in-memory.
//
// The tile computes P(x) = A(x) * B(x) mod (x^N + 1, Q) for N-coefficient,
// K-bit polynomials.  A is programmed once into the crossbars; many B can then
// be streamed through it.
//   * poly_mapper turns A into its Conv1D (Toeplitz) matrix and writes it,
//     bit plane w into PE w (bit mapping), X rows in X cycles.
//   * input_buffer holds B (double-buffered) and slices it into bit planes.
//   * K PEs, each with (N/X)*(N/X+1) X-by-X crossbars, an adder tree and a
//     shifter per output lane, multiply one bit slice of B per cycle and
//     shift-add over the bits of B.
//   * tile_accumulator shift-adds the K PE results over the bits of A.
//   * reduction_unit folds modulo x^N + 1 and reduces modulo Q (Barrett).
//   * tile_ctrl runs these as a three-stage pipeline (PE computation, tile
//     accumulation, tile reduction) in K-cycle slots, one slot per column
//     group of the crossbars' shared ADCs.
//
// Interface and timing (defaults N=256, K=16, X=128, MUX=8):
//   * A: a_wr_en/a_wr_idx/a_wr_data store one coefficient per cycle; a
//     prog_start pulse while busy = 0 programs the crossbars (prog_busy high
//     for X cycles).
//   * B: while b_ready, b_wr_en/b_wr_addr/b_wr_data write B_LANES coefficients
//     (b_wr_addr*B_LANES + l); b_commit submits the polynomial.
//   * results: RED_LANES coefficients per cycle on res_valid/res_idx/res_data,
//     in column-group order (index J*X + m*MUX + g), not ascending; res_last
//     flags the final one of a PMM.  A PMM occupies the PE stage for MUX*K =
//     128 cycles; PMMs submitted in time run back to back, one per 128 cycles,
//     and the last result of a PMM appears 2*K + 1 cycles after its PE stage
//     ends.
// The hierarchy (tile, PEs, crossbars, adder tree, shifter, accumulator,
// reduction), the bit mapping, the polynomial mapping and the three-stage
// pipeline follow the design description; the modulus, the ring polynomial,
// the schedule, the host interface and the double buffering are this
// design's own choices.
module xpoly_tile #(
  parameter int unsigned N          = xpoly_pkg::N_DEF,
  parameter int unsigned K          = xpoly_pkg::K_DEF,
  parameter int unsigned X          = xpoly_pkg::X_DEF,
  parameter int unsigned MUX        = xpoly_pkg::MUX_DEF,
  parameter int unsigned ADC_BITS   = xpoly_pkg::ADC_BITS_DEF,
  parameter int unsigned Q          = xpoly_pkg::Q_DEF,
  parameter int unsigned B_LANES    = xpoly_pkg::B_LANES_DEF,
  parameter int unsigned RED_LANES  = xpoly_pkg::RED_LANES_DEF,
  parameter bit          NEGACYCLIC = 1'b1,
  localparam int unsigned NI   = N / X,
  localparam int unsigned ND   = NI + 1,
  localparam int unsigned NJ   = 2 * NI,
  localparam int unsigned NC   = X / MUX,
  localparam int unsigned SUMW = ADC_BITS + ((NI > 1) ? $clog2(NI) : 0),
  localparam int unsigned PEW  = SUMW + K,
  localparam int unsigned XW   = PEW + K,
  localparam int unsigned QW   = $clog2(Q),
  localparam int unsigned IW   = (N > 1) ? $clog2(N) : 1,
  localparam int unsigned BAW  = (N / B_LANES > 1) ? $clog2(N / B_LANES) : 1,
  localparam int unsigned RW   = (X > 1) ? $clog2(X) : 1,
  localparam int unsigned BW   = (K > 1) ? $clog2(K) : 1,
  localparam int unsigned GW   = (MUX > 1) ? $clog2(MUX) : 1
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // polynomial A
  input  logic                          a_wr_en,
  input  logic [IW-1:0]                 a_wr_idx,
  input  logic [K-1:0]                  a_wr_data,
  input  logic                          prog_start,
  output logic                          prog_busy,
  // polynomial B
  input  logic                          b_wr_en,
  input  logic [BAW-1:0]                b_wr_addr,
  input  logic [B_LANES-1:0][K-1:0]     b_wr_data,
  input  logic                          b_commit,
  output logic                          b_ready,
  // results
  output logic [RED_LANES-1:0]          res_valid,
  output logic [RED_LANES-1:0][IW-1:0]  res_idx,
  output logic [RED_LANES-1:0][QW-1:0]  res_data,
  output logic                          res_last,
  // status
  output logic                          busy,
  output logic                          stall,      // PE stage waiting for a B
  output logic                          corr_event, // a Barrett correction step was taken
  output logic                          wrap_event  // the ring fold needed +Q
);
  // programming
  logic                        prog_en, prog_go;
  logic [RW-1:0]               prog_row;
  logic [K-1:0][ND-1:0][X-1:0] prog_diag;
  // input buffer
  logic          b_full, b_next_full, b_release;
  logic [N-1:0]  slice;
  // control
  logic          pe_en, pe_first, pe_last;
  logic [BW-1:0] pe_bit, acc_plane, red_step;
  logic [GW-1:0] pe_group, red_group;
  logic          acc_en, acc_first, acc_last;
  logic          red_en, red_batch_last;
  logic          ctrl_busy;
  // datapath
  logic [K-1:0][NJ-1:0][NC-1:0][PEW-1:0] pe_vals;
  logic [NJ-1:0][NC-1:0][XW-1:0]         acc_vals;
  logic [RED_LANES-1:0]                  corr_seen, wrap_seen;

  assign prog_go = prog_start && !ctrl_busy && !prog_busy;

  poly_mapper #(.N(N), .K(K), .X(X)) u_mapper (
    .clk       (clk),
    .rst_n     (rst_n),
    .a_wr_en   (a_wr_en),
    .a_wr_idx  (a_wr_idx),
    .a_wr_data (a_wr_data),
    .start     (prog_go),
    .busy      (prog_busy),
    .prog_en   (prog_en),
    .prog_row  (prog_row),
    .prog_diag (prog_diag)
  );

  input_buffer #(.N(N), .K(K), .LANES(B_LANES)) u_inbuf (
    .clk          (clk),
    .rst_n        (rst_n),
    .wr_en        (b_wr_en),
    .wr_addr      (b_wr_addr),
    .wr_data      (b_wr_data),
    .commit       (b_commit),
    .ready        (b_ready),
    .rd_full      (b_full),
    .rd_next_full (b_next_full),
    .rd_bit       (pe_bit),
    .rd_release   (b_release),
    .slice        (slice)
  );

  tile_ctrl #(.K(K), .MUX(MUX)) u_ctrl (
    .clk            (clk),
    .rst_n          (rst_n),
    .hold           (prog_busy || prog_go),
    .b_full         (b_full),
    .b_next_full    (b_next_full),
    .b_release      (b_release),
    .pe_en          (pe_en),
    .pe_first       (pe_first),
    .pe_last        (pe_last),
    .pe_bit         (pe_bit),
    .pe_group       (pe_group),
    .acc_en         (acc_en),
    .acc_first      (acc_first),
    .acc_last       (acc_last),
    .acc_plane      (acc_plane),
    .red_en         (red_en),
    .red_step       (red_step),
    .red_group      (red_group),
    .red_batch_last (red_batch_last),
    .busy           (ctrl_busy),
    .stall          (stall)
  );

  // PE w holds bit w of A (bit mapping); all PEs share the input slice.
  for (genvar gw = 0; gw < K; gw++) begin : g_pe
    pe #(.N(N), .K(K), .X(X), .MUX(MUX), .ADC_BITS(ADC_BITS)) u_pe (
      .clk       (clk),
      .rst_n     (rst_n),
      .prog_en   (prog_en),
      .prog_row  (prog_row),
      .prog_diag (prog_diag[gw]),
      .wl_bits   (slice),
      .col_sel   (pe_group),
      .en        (pe_en),
      .first     (pe_first),
      .last      (pe_last),
      .pe_out    (pe_vals[gw])
    );
  end

  tile_accumulator #(.K(K), .NJ(NJ), .NC(NC), .IN_W(PEW)) u_acc (
    .clk     (clk),
    .rst_n   (rst_n),
    .en      (acc_en),
    .first   (acc_first),
    .last    (acc_last),
    .plane   (acc_plane),
    .pe_vals (pe_vals),
    .result  (acc_vals)
  );

  reduction_unit #(.N(N), .K(K), .X(X), .MUX(MUX), .XW(XW), .Q(Q),
                   .LANES(RED_LANES), .NEGACYCLIC(NEGACYCLIC)) u_red (
    .clk        (clk),
    .rst_n      (rst_n),
    .en         (red_en),
    .step       (red_step),
    .group      (red_group),
    .batch_last (red_batch_last),
    .acc_vals   (acc_vals),
    .res_valid  (res_valid),
    .res_idx    (res_idx),
    .res_data   (res_data),
    .res_last   (res_last),
    .corr_seen  (corr_seen),
    .wrap_seen  (wrap_seen)
  );

  assign busy       = ctrl_busy || prog_busy;
  assign corr_event = |corr_seen;
  assign wrap_event = |wrap_seen;

  initial begin
    assert (N % X == 0 && X % MUX == 0) else $fatal(1, "N/X/MUX mismatch");
    assert (Q <= (1 << K)) else $fatal(1, "Q must fit the coefficient width");
  end
endmodule
