// sar_adc - behavioural model of one column ADC of a crossbar array.
//
// Behavioural model (the real part is an analog successive-approximation ADC).
// It converts the ideal column current of a binary crossbar, given here as the
// integer count of conducting cells, into an ADC_BITS-bit code.  Counts above
// the ADC's range saturate at 2^ADC_BITS - 1, which is how a too-coarse ADC
// loses information.  One conversion per clock is assumed; the conversion is
// modelled combinationally and the successive-approximation steps and
// device noise are not modelled.
//
// The ADC is named (a "p-bit ADC", SAR type, shared by 8 columns) but its
// resolution is not given; the default resolution is lossless for 128 rows.
// When IN_W <= ADC_BITS (as at the defaults) the conversion is exact and the
// model reduces to wires, so it synthesises to no cells.
module sar_adc #(
  parameter int unsigned IN_W     = 8,
  parameter int unsigned ADC_BITS = 8
) (
  input  logic [IN_W-1:0]     level,  // number of conducting cells on the column
  output logic [ADC_BITS-1:0] code    // digital code
);
  // The saturation compare exists only when the column count can exceed the
  // code range; otherwise the conversion is exact.
  if (IN_W > ADC_BITS) begin : g_sat
    localparam logic [IN_W-1:0] FULL = IN_W'((1 << ADC_BITS) - 1);
    always_comb begin
      if (level > FULL) code = '1;
      else              code = ADC_BITS'(level);
    end
  end else begin : g_exact
    assign code = ADC_BITS'(level);
  end
endmodule
