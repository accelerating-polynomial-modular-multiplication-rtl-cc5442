// tile_ctrl - sequencer of the three-stage tile pipeline.
//
// The tile pipeline has three stages: PE computation, tile accumulation and
// tile reduction.  Work is cut into slots of K cycles, one slot per column
// group (MUX setting), MUX groups per polynomial multiplication (PMM).
//   * PE stage: for group g it runs input bits K-1 .. 0 (MSB first), one per
//     cycle.  It starts when the input buffer holds a complete B and the
//     crossbars are not being programmed; after the last group it releases the
//     B bank and, if the other bank is already full, continues with the next
//     PMM without a gap.  Otherwise it waits (stall).
//   * accumulation stage: runs the K planes of a group in the slot after the
//     PE stage finished that group.
//   * reduction stage: runs the slot after accumulation; batch_last marks the
//     last group of a PMM.
// A PMM therefore occupies the PE stage for MUX*K cycles and its last result
// leaves the reduction unit 2*K + 1 cycles after the PE stage finished.
// The three stages follow the design description; the slot schedule, the
// start and stall rules are this design's choices.
module tile_ctrl #(
  parameter int unsigned K   = xpoly_pkg::K_DEF,
  parameter int unsigned MUX = xpoly_pkg::MUX_DEF,
  localparam int unsigned BW = (K > 1) ? $clog2(K) : 1,
  localparam int unsigned GW = (MUX > 1) ? $clog2(MUX) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          hold,          // crossbars being programmed
  input  logic          b_full,        // read bank holds a complete B
  input  logic          b_next_full,   // the other bank does too
  output logic          b_release,
  // PE stage
  output logic          pe_en,
  output logic          pe_first,
  output logic          pe_last,
  output logic [BW-1:0] pe_bit,
  output logic [GW-1:0] pe_group,
  // accumulation stage
  output logic          acc_en,
  output logic          acc_first,
  output logic          acc_last,
  output logic [BW-1:0] acc_plane,
  // reduction stage
  output logic          red_en,
  output logic [BW-1:0] red_step,
  output logic [GW-1:0] red_group,
  output logic          red_batch_last,
  // status
  output logic          busy,
  output logic          stall          // PE stage idle while reduction still drains
);
  logic          pe_busy, acc_busy, red_busy;
  logic [BW-1:0] pe_t, acc_u, red_u;
  logic [GW-1:0] pe_g, acc_g, red_g;
  logic          acc_tag_last, red_tag_last;
  logic          pe_slot_end, pe_job_end, acc_slot_end, red_slot_end;

  assign pe_slot_end  = pe_busy && (int'(pe_t) == int'(K) - 1);
  assign pe_job_end   = pe_slot_end && (int'(pe_g) == int'(MUX) - 1);
  assign acc_slot_end = acc_busy && (int'(acc_u) == int'(K) - 1);
  assign red_slot_end = red_busy && (int'(red_u) == int'(K) - 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pe_busy      <= 1'b0;
      pe_t         <= '0;
      pe_g         <= '0;
      acc_busy     <= 1'b0;
      acc_u        <= '0;
      acc_g        <= '0;
      acc_tag_last <= 1'b0;
      red_busy     <= 1'b0;
      red_u        <= '0;
      red_g        <= '0;
      red_tag_last <= 1'b0;
    end else begin
      // PE stage
      if (!pe_busy) begin
        if (b_full && !hold) begin
          pe_busy <= 1'b1;
          pe_t    <= '0;
          pe_g    <= '0;
        end
      end else if (pe_slot_end) begin
        pe_t <= '0;
        if (pe_job_end) begin
          pe_g    <= '0;
          pe_busy <= b_next_full && !hold;
        end else begin
          pe_g <= pe_g + 1'b1;
        end
      end else begin
        pe_t <= pe_t + 1'b1;
      end
      // accumulation stage: starts when the PE stage finishes a group
      if (pe_slot_end) begin
        acc_busy     <= 1'b1;
        acc_u        <= '0;
        acc_g        <= pe_g;
        acc_tag_last <= pe_job_end;
      end else if (acc_slot_end) begin
        acc_busy <= 1'b0;
        acc_u    <= '0;
      end else if (acc_busy) begin
        acc_u <= acc_u + 1'b1;
      end
      // reduction stage: starts when accumulation finishes a group
      if (acc_slot_end) begin
        red_busy     <= 1'b1;
        red_u        <= '0;
        red_g        <= acc_g;
        red_tag_last <= acc_tag_last;
      end else if (red_slot_end) begin
        red_busy <= 1'b0;
        red_u    <= '0;
      end else if (red_busy) begin
        red_u <= red_u + 1'b1;
      end
    end
  end

  assign b_release      = pe_job_end;
  assign pe_en          = pe_busy;
  assign pe_first       = pe_busy && (pe_t == '0);
  assign pe_last        = pe_slot_end;
  assign pe_bit         = BW'(int'(K) - 1 - int'(pe_t));
  assign pe_group       = pe_g;
  assign acc_en         = acc_busy;
  assign acc_first      = acc_busy && (acc_u == '0);
  assign acc_last       = acc_slot_end;
  assign acc_plane      = BW'(int'(K) - 1 - int'(acc_u));
  assign red_en         = red_busy;
  assign red_step       = red_u;
  assign red_group      = red_g;
  assign red_batch_last = red_tag_last;
  assign busy           = pe_busy || acc_busy || red_busy;
  assign stall          = !pe_busy && (acc_busy || red_busy) && !b_full;

  // A new accumulation slot may only start when the previous one ends.
  // (Checked in a clocked block with the same asynchronous reset as the
  // registers, so rst_n stays a purely asynchronous net.)
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
    end else begin
      a_acc_aligned: assert (!(pe_slot_end && acc_busy) || acc_slot_end);
      a_red_aligned: assert (!(acc_slot_end && red_busy) || red_slot_end);
    end
  end
endmodule
