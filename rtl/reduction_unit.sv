// reduction_unit - tile reduction: ring fold and coefficient reduction mod Q.
//
// The accumulator delivers, for one column group, the linear-product
// coefficients C_j of 2N/X output blocks (NC lanes each).  The ring
// polynomial x^N + 1 folds coefficient j + N back onto j with a minus sign:
//     p_j = (C_j - C_{j+N}) mod Q        (NEGACYCLIC = 1)
//     p_j = (C_j + C_{j+N}) mod Q        (NEGACYCLIC = 0, ring x^N - 1)
// Because N is a multiple of X, C_{j+N} sits in the same lane of the same
// column group as C_j, so every batch is self-contained: NI*NC results per
// column group.  LANES results are produced per cycle; each lane reduces C_j
// and C_{j+N} with a Barrett reducer and combines them with one conditional
// add or subtract of Q.
//
// Timing: in cycle 'step' (0..K-1) of a slot, lane l handles batch item
// step*LANES + l, i.e. output block J = item / NC, lane m = item % NC, whose
// coefficient index is J*X + m*MUX + group.  Results appear one clock later
// on res_valid/res_idx/res_data; res_last marks the final result of a
// polynomial when 'batch_last' was set for its batch.  The Barrett reduction
// and the tile-level reduction stage follow the design description; the ring
// polynomial, the lane count and the result order are this design's choices.
module reduction_unit #(
  parameter int unsigned N          = xpoly_pkg::N_DEF,
  parameter int unsigned K          = xpoly_pkg::K_DEF,
  parameter int unsigned X          = xpoly_pkg::X_DEF,
  parameter int unsigned MUX        = xpoly_pkg::MUX_DEF,
  parameter int unsigned XW         = 41,
  parameter int unsigned Q          = xpoly_pkg::Q_DEF,
  parameter int unsigned LANES      = xpoly_pkg::RED_LANES_DEF,
  parameter bit          NEGACYCLIC = 1'b1,
  localparam int unsigned NI = N / X,
  localparam int unsigned NJ = 2 * NI,
  localparam int unsigned NC = X / MUX,
  localparam int unsigned QW = $clog2(Q),
  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1,
  localparam int unsigned SW = (K > 1) ? $clog2(K) : 1,
  localparam int unsigned GW = (MUX > 1) ? $clog2(MUX) : 1
) (
  input  logic                            clk,
  input  logic                            rst_n,
  input  logic                            en,
  input  logic [SW-1:0]                   step,
  input  logic [GW-1:0]                   group,
  input  logic                            batch_last,
  input  logic [NJ-1:0][NC-1:0][XW-1:0]   acc_vals,
  output logic [LANES-1:0]                res_valid,
  output logic [LANES-1:0][IW-1:0]        res_idx,
  output logic [LANES-1:0][QW-1:0]        res_data,
  output logic                            res_last,
  output logic [LANES-1:0]                corr_seen,   // Barrett correction taken
  output logic [LANES-1:0]                wrap_seen    // fold needed the extra +/-Q
);
  localparam int unsigned ITEMS     = NI * NC;
  localparam int unsigned LAST_STEP = (ITEMS + LANES - 1) / LANES - 1;

  for (genvar gl = 0; gl < LANES; gl++) begin : g_lane
    int unsigned item, jb, lane;
    logic            live;
    logic [XW-1:0]   lo, hi;
    logic [QW-1:0]   rlo, rhi;
    logic            clo, chi;
    logic [QW:0]     comb_v;
    logic [QW-1:0]   p;
    logic            wrap;

    always_comb begin
      item = int'(step) * LANES + gl;
      live = en && (item < ITEMS);
      jb   = (item < ITEMS) ? item / NC : 0;
      lane = (item < ITEMS) ? item % NC : 0;
      lo   = acc_vals[jb][lane];
      hi   = acc_vals[jb + NI][lane];
    end

    barrett_reducer #(.XW(XW), .Q(Q)) u_lo (.x(lo), .r(rlo), .corr(clo));
    barrett_reducer #(.XW(XW), .Q(Q)) u_hi (.x(hi), .r(rhi), .corr(chi));

    always_comb begin
      if (NEGACYCLIC) begin
        wrap   = (rlo < rhi);
        comb_v = {1'b0, rlo} - {1'b0, rhi} + (wrap ? (QW+1)'(Q) : '0);
      end else begin
        comb_v = {1'b0, rlo} + {1'b0, rhi};
        wrap   = (comb_v >= (QW+1)'(Q));
        comb_v = comb_v - (wrap ? (QW+1)'(Q) : '0);
      end
      p = QW'(comb_v);
    end

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        res_valid[gl] <= 1'b0;
        res_idx[gl]   <= '0;
        res_data[gl]  <= '0;
        corr_seen[gl] <= 1'b0;
        wrap_seen[gl] <= 1'b0;
      end else begin
        res_valid[gl] <= live;
        corr_seen[gl] <= live && (clo || chi);
        wrap_seen[gl] <= live && wrap;
        if (live) begin
          res_idx[gl]  <= IW'(jb * X + lane * MUX + int'(group));
          res_data[gl] <= p;
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) res_last <= 1'b0;
    else        res_last <= en && batch_last && (int'(step) == LAST_STEP);
  end

  initial begin
    assert (LAST_STEP < K) else $fatal(1, "LANES too small to finish a batch in one slot");
  end
endmodule
