// barrett_reducer - x mod Q by Barrett reduction.
//
// The quotient is estimated as qhat = floor(x * MU / 2^XW) with the constant
// MU = floor(2^XW / Q) precomputed at elaboration, so the division becomes a
// shift.  For x < 2^XW the estimate is at most one short, so r = x - qhat*Q
// lies in [0, 2Q) and one conditional subtraction finishes the reduction
// ('corr' reports when it was taken).  Combinational.
//
// The use of a Barrett variant with precomputed constants follows the design
// description; the exact variant and the modulus Q are this design's choices.
module barrett_reducer #(
  parameter int unsigned XW = 41,
  parameter int unsigned Q  = xpoly_pkg::Q_DEF,
  localparam int unsigned QW  = $clog2(Q),
  localparam int unsigned MUW = XW - QW + 1
) (
  input  logic [XW-1:0] x,
  output logic [QW-1:0] r,
  output logic          corr
);
  localparam logic [63:0]    MU64 = xpoly_pkg::barrett_mu(XW, Q);
  localparam logic [MUW-1:0] MU   = MUW'(MU64);

  logic [XW+MUW-1:0] prod;
  logic [XW-1:0]     qhat;
  logic [XW-1:0]     rem;

  always_comb begin
    prod = (XW+MUW)'(x) * (XW+MUW)'(MU);
    qhat = XW'(prod >> XW);
    rem  = x - XW'(qhat * XW'(Q));
    corr = (rem >= XW'(Q));
    r    = corr ? QW'(rem - XW'(Q)) : QW'(rem);
  end

  initial begin
    assert (Q > 1 && XW < 64) else $fatal(1, "unsupported Barrett parameters");
  end
endmodule
