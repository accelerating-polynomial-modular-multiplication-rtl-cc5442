// tb_pe - checks one processing engine at a reduced size (N = 16, X = 8,
// MUX = 2, K = 4, 4-bit ADC; 6 crossbars).  A random bit plane of A is
// programmed with the Conv1D rule cell(D, i, j) = a_{D*X + j - i}; then for
// each column group the PE runs K input-bit cycles of a random B and every
// lane is compared with sum_i a_{j-i} * b_i computed directly.  The result
// must be ready after exactly K enabled cycles per group.
module tb_pe;
  localparam int N = 16, K = 4, X = 8, MUX = 2, AB = 4;
  localparam int NI = N / X, ND = NI + 1, NJ = 2 * NI, NC = X / MUX;
  localparam int PEW = AB + 1 + K;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = !clk;

  logic rst_n, prog_en, en, first, last;
  logic [2:0]                    prog_row;
  logic [ND-1:0][X-1:0]          prog_diag;
  logic [N-1:0]                  wl_bits;
  logic [0:0]                    col_sel;
  logic [NJ-1:0][NC-1:0][PEW-1:0] pe_out;

  pe #(.N(N), .K(K), .X(X), .MUX(MUX), .ADC_BITS(AB)) dut (
    .clk(clk), .rst_n(rst_n), .prog_en(prog_en), .prog_row(prog_row), .prog_diag(prog_diag),
    .wl_bits(wl_bits), .col_sel(col_sel), .en(en), .first(first), .last(last), .pe_out(pe_out));

  logic abit [N];
  int   b [N];

  function automatic int a_at(int d);
    return (d >= 0 && d < N) ? int'(abit[d]) : 0;
  endfunction

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 0; prog_en = 0; en = 0; first = 0; last = 0; prog_row = 0; prog_diag = 0;
    wl_bits = 0; col_sel = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int trial = 0; trial < 12; trial++) begin
      for (int i = 0; i < N; i++) abit[i] = (trial == 0) ? 1'b1 : 1'($urandom);
      for (int i = 0; i < N; i++) b[i] = (trial == 0) ? (1 << K) - 1 : int'($urandom % (1 << K));
      // program
      for (int r = 0; r < X; r++) begin
        prog_en = 1; prog_row = 3'(r);
        for (int d = 0; d < ND; d++)
          for (int j = 0; j < X; j++) prog_diag[d][j] = 1'(a_at(d*X + j - r));
        @(posedge clk); #1;
      end
      prog_en = 0;
      // compute every column group
      for (int g = 0; g < MUX; g++) begin
        automatic int cyc = 0;
        for (int t = 0; t < K; t++) begin
          en = 1; first = (t == 0); last = (t == K - 1); col_sel = 1'(g);
          for (int i = 0; i < N; i++) wl_bits[i] = 1'(b[i] >> (K - 1 - t));
          @(posedge clk); #1;
          cyc++;
        end
        en = 0; first = 0; last = 0;
        checks++;
        if (cyc != K) failures++;
        for (int jb = 0; jb < NJ; jb++)
          for (int m = 0; m < NC; m++) begin
            automatic int j = jb * X + m * MUX + g;
            automatic int e = 0;
            for (int i = 0; i < N; i++) e += a_at(j - i) * b[i];
            checks++;
            if (int'(pe_out[jb][m]) != e) begin
              failures++;
              if (failures < 10) $display("trial %0d j %0d: got %0d exp %0d", trial, j, pe_out[jb][m], e);
            end
          end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
