// pe_shifter - PE-level shift-add over the bit-serial input.
//
// Polynomial B enters the crossbars one bit plane per cycle, most significant
// bit first.  For every output column the shifter accumulates
//     acc = 2 * acc + sum
// so after the K input bits acc = sum_t 2^t * sum_t.  With bit mapping this
// one shift-add per PE output column replaces the per-array shift-adders of a
// conventional mapping.
//
// Timing: 'en' marks a valid bit cycle; 'first' (MSB) restarts the
// accumulation, 'last' (LSB) loads the finished value into 'result' on the
// same clock edge.  'result' then stays constant until the next 'last', so the
// next pipeline stage can read it for a whole slot while this PE works on the
// next column group.  MSB-first order and the held result register are this
// design's choices.
module pe_shifter #(
  parameter int unsigned IN_W  = 9,
  parameter int unsigned K     = xpoly_pkg::K_DEF,
  localparam int unsigned OUT_W = IN_W + K
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             en,
  input  logic             first,
  input  logic             last,
  input  logic [IN_W-1:0]  sum,
  output logic [OUT_W-1:0] result
);
  logic [OUT_W-1:0] acc, nxt;

  always_comb begin
    nxt = (first ? '0 : (acc << 1)) + OUT_W'(sum);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc    <= '0;
      result <= '0;
    end else if (en) begin
      acc <= nxt;
      if (last) result <= nxt;
    end
  end
endmodule
