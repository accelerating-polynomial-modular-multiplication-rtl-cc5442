// tile_accumulator - tile-level accumulation of the PE results.
//
// PE w delivers, for one column group, sum_i a_{j-i}[w] * b_i for every lane
// j.  The accumulator forms the full product coefficient
//     C_j = sum_w 2^w * P_w[j]
// by shift-adding one PE per cycle, the MSB plane first:
//     acc = 2 * acc + P_plane[j],  plane = K-1 .. 0.
// K cycles make one slot, the same length as a PE slot, so this stage keeps
// pace with the PEs in the three-stage pipeline.
//
// Timing: 'en' marks an active cycle, 'plane' selects the PE; 'first'
// restarts, 'last' loads 'result', which then holds for the next slot while
// the reduction unit reads it.  The accumulator is part of the design as
// described; the serial one-plane-per-cycle structure is this design's choice.
module tile_accumulator #(
  parameter int unsigned K     = xpoly_pkg::K_DEF,
  parameter int unsigned NJ    = 4,
  parameter int unsigned NC    = 16,
  parameter int unsigned IN_W  = 25,
  localparam int unsigned OUT_W = IN_W + K,
  localparam int unsigned PW    = (K > 1) ? $clog2(K) : 1
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic                              en,
  input  logic                              first,
  input  logic                              last,
  input  logic [PW-1:0]                     plane,
  input  logic [K-1:0][NJ-1:0][NC-1:0][IN_W-1:0] pe_vals,
  output logic [NJ-1:0][NC-1:0][OUT_W-1:0]  result
);
  logic [NJ-1:0][NC-1:0][OUT_W-1:0] acc, nxt;

  always_comb begin
    for (int j = 0; j < NJ; j++)
      for (int m = 0; m < NC; m++)
        nxt[j][m] = (first ? '0 : (acc[j][m] << 1)) + OUT_W'(pe_vals[plane][j][m]);
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
