// pe_adder_tree - adder tree of a processing engine (PE).
//
// Within a PE, several crossbars hold different input sections (different
// groups of coefficients of B) of the same output columns.  For one output
// column the adder tree adds the ADC results of those crossbars.  It is a
// combinational balanced binary tree: level 0 holds the NIN inputs
// (zero-padded to a power of two) and each level adds neighbouring pairs.
// Result width OUT_W = IN_W + clog2(NIN) cannot overflow.  The adder tree
// itself is part of the PE as described; its tree shape is this design's
// choice.
module pe_adder_tree #(
  parameter int unsigned NIN   = 2,
  parameter int unsigned IN_W  = 8,
  localparam int unsigned LVL  = (NIN > 1) ? $clog2(NIN) : 0,
  localparam int unsigned OUT_W = IN_W + LVL
) (
  input  logic [NIN-1:0][IN_W-1:0] in_vals,
  output logic [OUT_W-1:0]         sum
);
  localparam int unsigned NP = 1 << LVL;

  // node[l][i]: partial sum i of level l (only the first NP >> l are used)
  logic [OUT_W-1:0] node [LVL+1][NP];

  always_comb begin
    for (int l = 0; l <= LVL; l++)
      for (int i = 0; i < NP; i++) node[l][i] = '0;
    for (int i = 0; i < NIN; i++) node[0][i] = OUT_W'(in_vals[i]);
    for (int l = 1; l <= LVL; l++)
      for (int i = 0; i < (NP >> l); i++)
        node[l][i] = node[l-1][2*i] + node[l-1][2*i+1];
    sum = node[LVL][0];
  end
endmodule
