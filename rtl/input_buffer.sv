// input_buffer - double-buffered store of polynomial B with bit slicing.
//
// Input processing: the coefficients of B are fed to the crossbars one bit
// position at a time.  The buffer holds two banks of N coefficients of K bits.
// The host fills the write bank (LANES coefficients per cycle) and commits it;
// the processing engines read the other bank, one bit slice per cycle:
// slice[i] = bit rd_bit of coefficient i.  When they are done they release the
// bank and the banks swap roles, so the next B can be loaded while the
// current one is being multiplied.
//
// Interface and timing:
//   * write side: wr_en/wr_addr/wr_data write coefficients wr_addr*LANES ..
//     wr_addr*LANES+LANES-1 on the clock edge; commit marks the write bank full
//     and moves to the other bank; it may come with the last write.  Writes
//     and commits are allowed only while ready = 1 (the write bank is not
//     full).
//   * read side: rd_full says the read bank holds a committed B, rd_next_full
//     that the other bank does too (including a commit into it in this very
//     cycle, so back-to-back operation needs no gap); rd_release frees the
//     read bank.  slice is
//     combinational on rd_bit.
// Bit slicing follows the design description; the double buffering, the
// write width and the handshake are this design's choices.
module input_buffer #(
  parameter int unsigned N     = xpoly_pkg::N_DEF,
  parameter int unsigned K     = xpoly_pkg::K_DEF,
  parameter int unsigned LANES = xpoly_pkg::B_LANES_DEF,
  localparam int unsigned AW   = (N / LANES > 1) ? $clog2(N / LANES) : 1,
  localparam int unsigned BW   = (K > 1) ? $clog2(K) : 1
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        wr_en,
  input  logic [AW-1:0]               wr_addr,
  input  logic [LANES-1:0][K-1:0]     wr_data,
  input  logic                        commit,
  output logic                        ready,
  output logic                        rd_full,
  output logic                        rd_next_full,
  input  logic [BW-1:0]               rd_bit,
  input  logic                        rd_release,
  output logic [N-1:0]                slice
);
  logic [K-1:0] mem [2][N];
  logic [1:0]   full;
  logic         wr_bank, rd_bank;

  assign ready        = !full[wr_bank];
  assign rd_full      = full[rd_bank];
  // A commit arriving this cycle into the other bank counts already, so the
  // processing engines can move on to it without a gap (bypass).
  assign rd_next_full = full[!rd_bank] || (commit && ready && (wr_bank != rd_bank));

  always_ff @(posedge clk) begin
    if (wr_en && ready) begin
      for (int l = 0; l < LANES; l++) mem[wr_bank][int'(wr_addr) * LANES + l] <= wr_data[l];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      full    <= '0;
      wr_bank <= 1'b0;
      rd_bank <= 1'b0;
    end else begin
      if (commit && ready) begin
        full[wr_bank] <= 1'b1;
        wr_bank       <= !wr_bank;
      end
      if (rd_release && rd_full) begin
        full[rd_bank] <= 1'b0;
        rd_bank       <= !rd_bank;
      end
    end
  end

  always_comb begin
    for (int i = 0; i < N; i++) slice[i] = mem[rd_bank][i][rd_bit];
  end

  // Handshake rules: no write or commit into a full bank, no release of an
  // empty one.
  // (Checked in a clocked block with the same asynchronous reset as the
  // registers, so rst_n stays a purely asynchronous net.)
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
    end else begin
      a_no_write_full:    assert (!(wr_en || commit) || ready);
      a_no_release_empty: assert (!rd_release || rd_full);
    end
  end

  initial begin
    assert (N % LANES == 0) else $fatal(1, "N must be a multiple of LANES");
  end
endmodule
