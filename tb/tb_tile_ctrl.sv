// tb_tile_ctrl - checks the pipeline sequencer (K = 4, MUX = 2): a PMM keeps
// the PE stage busy for MUX*K cycles with bits K-1..0 in every group;
// accumulation and reduction slots follow one and two slots later; two
// submitted PMMs run back to back without a gap; the PE stage does not start
// while 'hold' is set; the stall flag rises while the pipeline drains with no
// B waiting; batch_last marks the final group.
module tb_tile_ctrl;
  localparam int K = 4, MUX = 2;
  int checks = 0, failures = 0;
  int cyc = 0;
  logic clk = 0;
  always #5 clk = !clk;
  always @(posedge clk) cyc++;

  logic rst_n, hold, b_full, b_next_full, b_release;
  logic pe_en, pe_first, pe_last, acc_en, acc_first, acc_last, red_en, red_batch_last, busy, stall;
  logic [1:0] pe_bit, acc_plane, red_step;
  logic [0:0] pe_group, red_group;

  tile_ctrl #(.K(K), .MUX(MUX)) dut (
    .clk(clk), .rst_n(rst_n), .hold(hold), .b_full(b_full), .b_next_full(b_next_full),
    .b_release(b_release), .pe_en(pe_en), .pe_first(pe_first), .pe_last(pe_last),
    .pe_bit(pe_bit), .pe_group(pe_group), .acc_en(acc_en), .acc_first(acc_first),
    .acc_last(acc_last), .acc_plane(acc_plane), .red_en(red_en), .red_step(red_step),
    .red_group(red_group), .red_batch_last(red_batch_last), .busy(busy), .stall(stall));

  // bank model: number of committed B polynomials waiting
  int pending = 0;
  assign b_full      = pending > 0;
  assign b_next_full = pending > 1;
  always @(posedge clk) if (b_release) pending <= pending - 1;

  // event log: pe cycles, accumulation/reduction activity
  int pe_cycles = 0, releases = 0, stalls = 0, pe_first_cyc [$], red_last_groups = 0;
  int exp_bit = K - 1;
  always @(posedge clk) if (rst_n) begin
    if (pe_en) begin
      pe_cycles++;
      checks++;
      if (int'(pe_bit) != exp_bit) begin failures++; $display("pe bit %0d exp %0d", pe_bit, exp_bit); end
      exp_bit = (exp_bit == 0) ? K - 1 : exp_bit - 1;
      if (pe_first && pe_group == 0) pe_first_cyc.push_back(cyc);
      checks++;
      if (hold) begin failures++; $display("PE ran during hold"); end
    end
    if (b_release) releases++;
    if (stall) stalls++;
    if (acc_en) begin
      checks++;
      if (int'(acc_plane) != K - 1 - int'(dut.acc_u)) failures++;
    end
    if (red_en && red_batch_last && int'(red_step) == K - 1) begin
      red_last_groups++;
      checks++;
      if (int'(red_group) != MUX - 1) begin failures++; $display("batch_last on group %0d", red_group); end
    end
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 0; hold = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    // held: nothing may start
    hold = 1; pending = 1;
    repeat (5) @(posedge clk);
    #1;
    checks++;
    if (pe_cycles != 0) begin failures++; $display("started under hold"); end
    hold = 0;
    pending = 2;               // two polynomials waiting: back to back
    wait (releases == 2);
    repeat (3 * K) @(posedge clk);
    #1;
    // one more after an idle period
    pending = 1;
    wait (releases == 3);
    wait (!busy);
    @(posedge clk); #1;
    checks++;
    if (pe_cycles != 3 * MUX * K) begin failures++; $display("pe cycles %0d", pe_cycles); end
    checks++;
    if (pe_first_cyc.size() != 3 || pe_first_cyc[1] - pe_first_cyc[0] != MUX * K) begin
      failures++; $display("back-to-back spacing wrong");
    end
    checks++;
    if (red_last_groups != 3) begin failures++; $display("batch_last count %0d", red_last_groups); end
    checks++;
    if (stalls == 0) begin failures++; $display("stall never seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // slot alignment: accumulation starts the cycle after a PE slot ends
  logic pe_last_d, acc_last_d;
  always @(posedge clk) begin
    pe_last_d  <= pe_last;
    acc_last_d <= acc_last;
    if (rst_n && pe_last_d) begin
      checks++;
      if (!(acc_en && acc_first)) begin failures++; $display("acc did not follow PE slot"); end
    end
    if (rst_n && acc_last_d) begin
      checks++;
      if (!(red_en && red_step == 0)) begin failures++; $display("red did not follow acc slot"); end
    end
  end
endmodule
