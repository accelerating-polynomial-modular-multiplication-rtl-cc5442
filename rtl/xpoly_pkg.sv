// xpoly_pkg - shared constants and helper functions of the X-Poly tile.
//
// The tile multiplies two polynomials of degree N-1 with K-bit coefficients
// modulo (x^N + 1, Q).  Polynomial A is held bit-plane by bit-plane in binary
// crossbar arrays (one processing engine per bit of A); polynomial B is fed in
// bit-serially on the word lines.  The defaults below are the main
// configuration evaluated for the design (N = 256, K = 16, 128 x 128 arrays,
// one ADC per 8 columns).  The modulus Q is this design's own choice: only its
// bit width (16) is given for the design.
// Each module uses only the defaults of its own parameters, so a lint run of
// one module on its own reports the other package constants as unused; that
// is expected and harmless.
package xpoly_pkg;

  // Polynomial degree (number of coefficients) and coefficient bit width.
  localparam int unsigned N_DEF        = 256;
  localparam int unsigned K_DEF        = 16;
  // Crossbar size (rows = word lines = columns) and columns per ADC.
  localparam int unsigned X_DEF        = 128;
  localparam int unsigned MUX_DEF      = 8;
  // ADC resolution: lossless for a 128-row binary column (0..128).
  localparam int unsigned ADC_BITS_DEF = 8;
  // Coefficient modulus: largest prime below 2^16 (assumed).
  localparam int unsigned Q_DEF        = 65521;
  // Coefficients of B written per cycle, results emitted per cycle.
  localparam int unsigned B_LANES_DEF   = 2;
  localparam int unsigned RED_LANES_DEF = 2;

  // Barrett constant mu = floor(2^xw / q), computed at elaboration.
  function automatic logic [63:0] barrett_mu(input int unsigned xw, input int unsigned q);
    logic [127:0] num;
    num = 128'd1 << xw;
    return 64'(num / 128'(q));
  endfunction

endpackage
