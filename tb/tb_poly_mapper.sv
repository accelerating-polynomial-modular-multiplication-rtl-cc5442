// tb_poly_mapper - checks the Conv1D programming sequence (N = 16, K = 4,
// X = 8): after a start pulse the mapper emits exactly X rows, row i of block
// diagonal D carrying bit w of a_{D*X + j - i} (zero outside 0..N-1), and
// busy falls after the last row.  Run twice with different polynomials.
module tb_poly_mapper;
  localparam int N = 16, K = 4, X = 8, ND = N / X + 1;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = !clk;

  logic rst_n, a_wr_en, start, busy, prog_en;
  logic [3:0] a_wr_idx;
  logic [K-1:0] a_wr_data;
  logic [2:0] prog_row;
  logic [K-1:0][ND-1:0][X-1:0] prog_diag;

  poly_mapper #(.N(N), .K(K), .X(X)) dut (
    .clk(clk), .rst_n(rst_n), .a_wr_en(a_wr_en), .a_wr_idx(a_wr_idx), .a_wr_data(a_wr_data),
    .start(start), .busy(busy), .prog_en(prog_en), .prog_row(prog_row), .prog_diag(prog_diag));

  int a [N];

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 0; a_wr_en = 0; start = 0; a_wr_idx = 0; a_wr_data = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int trial = 0; trial < 3; trial++) begin
      automatic int rows = 0;
      for (int i = 0; i < N; i++) begin
        a[i] = (trial == 0) ? i : int'($urandom % 16);
        a_wr_en = 1; a_wr_idx = 4'(i); a_wr_data = K'(a[i]);
        @(posedge clk); #1;
      end
      a_wr_en = 0;
      start = 1; @(posedge clk); #1; start = 0;
      while (busy) begin
        checks++;
        if (!prog_en || int'(prog_row) != rows) begin failures++; $display("row sequence"); end
        for (int w = 0; w < K; w++)
          for (int d = 0; d < ND; d++)
            for (int j = 0; j < X; j++) begin
              automatic int idx = d * X + j - rows;
              automatic logic e = (idx >= 0 && idx < N) ? 1'(a[idx] >> w) : 1'b0;
              checks++;
              if (prog_diag[w][d][j] != e) begin
                failures++;
                if (failures < 10) $display("w%0d d%0d row%0d col%0d", w, d, rows, j);
              end
            end
        rows++;
        @(posedge clk); #1;
      end
      checks++;
      if (rows != X || prog_en) begin failures++; $display("rows %0d", rows); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
