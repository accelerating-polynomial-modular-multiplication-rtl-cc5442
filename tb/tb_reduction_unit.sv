// tb_reduction_unit - checks the tile reduction at a reduced size (N = 16,
// X = 8, MUX = 2, K = 4, Q = 97, 2 lanes): for random linear-product
// batches every emitted coefficient j must equal (C_j - C_{j+N}) mod Q, each
// of the N/MUX coefficients of a column group appears exactly once with
// the right index, results come one cycle after their step, and res_last
// marks the final result of a batch flagged as last.  A cyclic instance
// (x^N - 1) is checked the same way with (C_j + C_{j+N}) mod Q.
module tb_reduction_unit;
  localparam int N = 16, K = 4, X = 8, MUX = 2, XW = 20, Q = 97, L = 2;
  localparam int NI = N / X, NJ = 2 * NI, NC = X / MUX;
  int checks = 0, failures = 0, wraps = 0;
  logic clk = 0;
  always #5 clk = !clk;

  logic rst_n, en, batch_last;
  logic [1:0] step;
  logic [0:0] group;
  logic [NJ-1:0][NC-1:0][XW-1:0] acc_vals;
  logic [L-1:0] v0, v1, c0, c1, w0, w1;
  logic [L-1:0][3:0] i0, i1;
  logic [L-1:0][6:0] d0, d1;
  logic last0, last1;

  reduction_unit #(.N(N), .K(K), .X(X), .MUX(MUX), .XW(XW), .Q(Q), .LANES(L), .NEGACYCLIC(1)) u0 (
    .clk(clk), .rst_n(rst_n), .en(en), .step(step), .group(group), .batch_last(batch_last),
    .acc_vals(acc_vals), .res_valid(v0), .res_idx(i0), .res_data(d0), .res_last(last0),
    .corr_seen(c0), .wrap_seen(w0));
  reduction_unit #(.N(N), .K(K), .X(X), .MUX(MUX), .XW(XW), .Q(Q), .LANES(L), .NEGACYCLIC(0)) u1 (
    .clk(clk), .rst_n(rst_n), .en(en), .step(step), .group(group), .batch_last(batch_last),
    .acc_vals(acc_vals), .res_valid(v1), .res_idx(i1), .res_data(d1), .res_last(last1),
    .corr_seen(c1), .wrap_seen(w1));

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint cval(int j);
    automatic int jb = j / X, m = (j % X) / MUX;
    return longint'(acc_vals[jb][m]);
  endfunction

  initial begin
    rst_n = 0; en = 0; step = 0; group = 0; batch_last = 0; acc_vals = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int batch = 0; batch < 60; batch++) begin
      int seen [N];
      automatic int lasts = 0;
      automatic int g = batch % MUX;
      for (int j = 0; j < N; j++) seen[j] = 0;
      for (int jb = 0; jb < NJ; jb++)
        for (int m = 0; m < NC; m++) acc_vals[jb][m] = XW'($urandom);
      group = 1'(g); batch_last = (batch % 3 == 2);
      for (int s = 0; s <= K; s++) begin
        en = (s < K); step = 2'(s % K);
        @(posedge clk); #1;
        lasts += last0 ? 1 : 0;
        if (s < K) begin
          for (int l = 0; l < L; l++) begin
            checks++;
            if (!v0[l] || !v1[l]) begin failures++; $display("lane %0d not valid at step %0d", l, s); end
            else begin
              automatic int j = int'(i0[l]);
              automatic longint lo = cval(j) % Q, hi = cval(j + N) % Q;
              automatic longint en_neg = (lo - hi + Q) % Q, en_cyc = (lo + hi) % Q;
              if (lo < hi) wraps++;
              seen[j]++;
              checks += 3;
              if ((j % MUX) != g) begin failures++; $display("index %0d not in group %0d", j, g); end
              if (longint'(d0[l]) != en_neg) begin failures++; $display("neg j %0d: %0d vs %0d", j, d0[l], en_neg); end
              if (i1[l] != i0[l] || longint'(d1[l]) != en_cyc) begin failures++; $display("cyc j %0d", j); end
            end
          end
        end
      end
      en = 0;
      @(posedge clk); #1;
      checks++;
      if (v0 != '0) begin failures++; $display("valid while idle"); end
      for (int j = 0; j < N; j++) if ((j % MUX) == g) begin
        checks++;
        if (seen[j] != 1) begin failures++; $display("coef %0d seen %0d times", j, seen[j]); end
      end
      checks++;
      if (lasts != (batch_last ? 1 : 0)) begin failures++; $display("res_last count %0d", lasts); end
    end
    checks++;
    if (wraps == 0) begin failures++; $display("negacyclic wrap never exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
