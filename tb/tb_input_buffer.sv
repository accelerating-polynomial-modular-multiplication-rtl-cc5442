// tb_input_buffer - checks the double-buffered B store (N = 16, K = 8,
// 2 coefficients per write): slices equal the bits of the written
// coefficients, ready falls when both banks are full, banks are read in
// commit order, a released bank can be refilled, and a commit into the
// other bank is visible on rd_next_full in the same cycle.
module tb_input_buffer;
  localparam int N = 16, K = 8, L = 2;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #50 clk = !clk;   // long period: the #1 steps below stay clear of edges

  logic rst_n, wr_en, commit, ready, rd_full, rd_next_full, rd_release;
  logic [2:0]          wr_addr;
  logic [L-1:0][K-1:0] wr_data;
  logic [2:0]          rd_bit;
  logic [N-1:0]        slice;

  input_buffer #(.N(N), .K(K), .LANES(L)) dut (
    .clk(clk), .rst_n(rst_n), .wr_en(wr_en), .wr_addr(wr_addr), .wr_data(wr_data),
    .commit(commit), .ready(ready), .rd_full(rd_full), .rd_next_full(rd_next_full),
    .rd_bit(rd_bit), .rd_release(rd_release), .slice(slice));

  int polys [4][N];

  task automatic fill(int p);
    for (int a = 0; a < N / L; a++) begin
      wr_en = 1; wr_addr = 3'(a);
      for (int l = 0; l < L; l++) wr_data[l] = K'(polys[p][a*L+l]);
      @(posedge clk); #1;
    end
    wr_en = 0; commit = 1;
    @(posedge clk); #1;
    commit = 0;
  endtask

  task automatic check_bank(int p);
    for (int bt = 0; bt < K; bt++) begin
      rd_bit = 3'(bt);
      #1;
      for (int i = 0; i < N; i++) begin
        checks++;
        if (slice[i] != 1'(polys[p][i] >> bt)) begin
          failures++;
          if (failures < 10) $display("poly %0d bit %0d coef %0d wrong", p, bt, i);
        end
      end
    end
  endtask

  task automatic expect_flags(logic r, logic f, logic nf, string what);
    #1;
    checks++;
    if (ready !== r || rd_full !== f || rd_next_full !== nf) begin
      failures++;
      $display("%s: ready %0d full %0d next %0d", what, ready, rd_full, rd_next_full);
    end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int p = 0; p < 4; p++)
      for (int i = 0; i < N; i++) polys[p][i] = int'($urandom % 256);
    rst_n = 0; wr_en = 0; commit = 0; rd_release = 0; wr_addr = 0; wr_data = 0; rd_bit = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    expect_flags(1, 0, 0, "after reset");
    fill(0);
    expect_flags(1, 1, 0, "one bank full");
    // bypass: a commit into the other bank shows on rd_next_full at once
    commit = 1;
    expect_flags(1, 1, 1, "commit in flight");
    commit = 0;
    expect_flags(1, 1, 0, "commit withdrawn");
    fill(1);
    expect_flags(0, 1, 1, "both banks full");
    check_bank(0);
    rd_release = 1; @(posedge clk); #1; rd_release = 0;
    expect_flags(1, 1, 0, "after first release");
    check_bank(1);
    fill(2);
    expect_flags(0, 1, 1, "refilled");
    rd_release = 1; @(posedge clk); #1; rd_release = 0;
    check_bank(2);
    rd_release = 1; @(posedge clk); #1; rd_release = 0;
    expect_flags(1, 0, 0, "all released");
    fill(3);
    check_bank(3);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
