// tb_xpoly_tile - end-to-end test of the tile at a reduced size (N = 32,
// K = 8, 8 x 8 crossbars, 2 columns per ADC, Q = 251, 4-bit ADCs).
// It programmes a random A, streams several random B polynomials back to
// back, lets the pipeline drain, submits one more from idle, then
// reprogrammes an all-ones A and multiplies an all-ones B (largest values).
// Every result coefficient is compared with A*B mod (x^N + 1, Q) computed
// directly; the test also checks the programming time (X cycles), the
// back-to-back rate (one PMM per MUX*K cycles), the latency from commit to
// the last result (MUX*K + 2K + 1 cycles after the commit edge) and that each mechanism occurred:
// reprogramming, back-to-back PMMs, stall, input back-pressure, Barrett
// correction and the ring-fold wrap.
module tb_xpoly_tile;
  localparam int N = 32, K = 8, X = 8, MUX = 2, ADC_BITS = 4, Q = 251, BL = 2, RL = 2;
  localparam int JOBS = 6, WATCHDOG = 20000;
`define DUT_INST xpoly_tile #(.N(N), .K(K), .X(X), .MUX(MUX), .ADC_BITS(ADC_BITS), .Q(Q), .B_LANES(BL), .RED_LANES(RL)) dut
  localparam int NI = N / X, NC = X / MUX;
  localparam int IW = $clog2(N), QW = $clog2(Q), BAW = $clog2(N / BL);
  localparam int SLOT = K, PMM_CYCLES = MUX * K;

  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = !clk;
  int cyc = 0;
  always @(negedge clk) cyc++;   // stable when sampled on posedge

  logic                   rst_n, a_wr_en, prog_start, prog_busy, b_wr_en, b_commit, b_ready;
  logic [IW-1:0]          a_wr_idx;
  logic [K-1:0]           a_wr_data;
  logic [BAW-1:0]         b_wr_addr;
  logic [BL-1:0][K-1:0]   b_wr_data;
  logic [RL-1:0]          res_valid;
  logic [RL-1:0][IW-1:0]  res_idx;
  logic [RL-1:0][QW-1:0]  res_data;
  logic                   res_last, busy, stall, corr_event, wrap_event;

  `DUT_INST (
    .clk(clk), .rst_n(rst_n), .a_wr_en(a_wr_en), .a_wr_idx(a_wr_idx), .a_wr_data(a_wr_data),
    .prog_start(prog_start), .prog_busy(prog_busy), .b_wr_en(b_wr_en), .b_wr_addr(b_wr_addr),
    .b_wr_data(b_wr_data), .b_commit(b_commit), .b_ready(b_ready), .res_valid(res_valid),
    .res_idx(res_idx), .res_data(res_data), .res_last(res_last), .busy(busy), .stall(stall),
    .corr_event(corr_event), .wrap_event(wrap_event));

  // ---- reference: A*B mod (x^N + 1, Q) ----
  int a_cur [N];
  int b_job [JOBS][N];
  int ref_p [JOBS][N];
  int a_of_job [JOBS];          // which A programme a job used
  int a_set [2][N];

  task automatic reference(int job, int aset);
    for (int j = 0; j < N; j++) begin
      longint s = 0;
      for (int i = 0; i < N; i++) begin
        int l = j - i;
        if (l >= 0) s += longint'(a_set[aset][i]) * longint'(b_job[job][l]);
        else        s -= longint'(a_set[aset][i]) * longint'(b_job[job][l + N]);
        s = s % longint'(Q);
      end
      if (s < 0) s += longint'(Q);
      ref_p[job][j] = int'(s);
    end
  endtask

  // ---- mechanism counters ----
  int n_prog = 0, n_back_to_back = 0, n_stall = 0, n_backpressure = 0, n_corr = 0, n_wrap = 0;
  int n_idle_start = 0;
  always @(posedge clk) if (rst_n) begin
    if (stall) n_stall++;
    if (corr_event) n_corr++;
    if (wrap_event) n_wrap++;
  end

  // ---- result collection ----
  int got [N];
  int seen [N];
  int job_done = 0;
  int last_cyc [JOBS];
  int commit_cyc [JOBS];
  logic job_from_idle [JOBS];

  always @(posedge clk) if (rst_n) begin
    for (int l = 0; l < RL; l++) if (res_valid[l]) begin
      got[res_idx[l]] = int'(res_data[l]);
      seen[res_idx[l]]++;
    end
    if (res_last) begin
      int bad;
      bad = 0;
      for (int j = 0; j < N; j++) begin
        checks++;
        if (seen[j] != 1 || got[j] != ref_p[job_done][j]) begin
          failures++; bad++;
          if (bad < 5) $display("job %0d coef %0d: got %0d (seen %0d) exp %0d",
                                job_done, j, got[j], seen[j], ref_p[job_done][j]);
        end
        seen[j] = 0;
      end
      last_cyc[job_done] = cyc - 1;   // edge that registered res_last
      job_done++;
    end
  end

  // ---- stimulus ----
  task automatic program_a(int aset);
    int t0;
    for (int i = 0; i < N; i++) begin
      a_wr_en = 1; a_wr_idx = IW'(i); a_wr_data = K'(a_set[aset][i]);
      @(posedge clk); #1;
    end
    a_wr_en = 0;
    prog_start = 1; @(posedge clk); #1; prog_start = 0;
    t0 = cyc;
    while (prog_busy) begin @(posedge clk); #1; end
    n_prog++;
    checks++;
    if (cyc - t0 != X) begin failures++; $display("programming took %0d cycles, expected %0d", cyc - t0, X); end
  endtask

  task automatic submit(int job);
    job_from_idle[job] = !busy;
    while (!b_ready) begin n_backpressure++; @(posedge clk); #1; end
    for (int w = 0; w < N / BL; w++) begin
      b_wr_en = 1; b_wr_addr = BAW'(w);
      for (int l = 0; l < BL; l++) b_wr_data[l] = K'(b_job[job][w*BL + l]);
      // commit together with the last write
      if (w == N / BL - 1) begin
        b_commit = 1; commit_cyc[job] = cyc + 1;   // edge that samples the commit
        job_from_idle[job] = job_from_idle[job] && !busy;
      end
      @(posedge clk); #1;
    end
    b_wr_en = 0; b_commit = 0;
  endtask

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("watchdog expired after %0d jobs", job_done);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 0; a_wr_en = 0; prog_start = 0; b_wr_en = 0; b_commit = 0;
    a_wr_idx = 0; a_wr_data = 0; b_wr_addr = 0; b_wr_data = 0;
    for (int j = 0; j < N; j++) seen[j] = 0;
    // operands: A programme 0 random, programme 1 all-ones (largest values)
    for (int i = 0; i < N; i++) begin
      a_set[0][i] = int'($urandom % (1 << K));
      a_set[1][i] = (1 << K) - 1;
    end
    for (int jb = 0; jb < JOBS; jb++)
      for (int i = 0; i < N; i++)
        b_job[jb][i] = (jb == JOBS - 1) ? (1 << K) - 1 : int'($urandom % (1 << K));
    for (int jb = 0; jb < JOBS; jb++) a_of_job[jb] = (jb == JOBS - 1) ? 1 : 0;
    for (int jb = 0; jb < JOBS; jb++) reference(jb, a_of_job[jb]);
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    @(posedge clk); #1;

    // phase 1: programme A0, stream JOBS-2 polynomials back to back
    program_a(0);
    for (int jb = 0; jb < JOBS - 2; jb++) submit(jb);
    // phase 2: let the pipeline drain (stall), then one more from idle
    wait (job_done == JOBS - 2);
    repeat (3) @(posedge clk); #1;
    submit(JOBS - 2);
    wait (job_done == JOBS - 1);
    wait (!busy);
    @(posedge clk); #1;
    // phase 3: reprogramme with A1 (all ones) and run the all-ones B
    program_a(1);
    submit(JOBS - 1);
    wait (job_done == JOBS);
    repeat (2) @(posedge clk); #1;

    // ---- timing: back-to-back throughput and latency from idle ----
    for (int jb = 1; jb < JOBS - 2; jb++) begin
      checks++;
      if (last_cyc[jb] - last_cyc[jb-1] == PMM_CYCLES) n_back_to_back++;
      else begin failures++; $display("job %0d finished %0d cycles after job %0d, expected %0d",
                                       jb, last_cyc[jb] - last_cyc[jb-1], jb - 1, PMM_CYCLES); end
    end
    for (int jb = 0; jb < JOBS; jb++) if (job_from_idle[jb]) begin
      n_idle_start++;
      checks++;
      if (last_cyc[jb] - commit_cyc[jb] != PMM_CYCLES + 2 * SLOT + 1) begin
        failures++;
        $display("job %0d latency %0d cycles, expected %0d", jb, last_cyc[jb] - commit_cyc[jb],
                 PMM_CYCLES + 2 * SLOT + 1);
      end
    end
    $display("mechanisms: programme=%0d back_to_back=%0d idle_start=%0d stall_cycles=%0d backpressure_cycles=%0d barrett_corr=%0d ring_wrap=%0d",
             n_prog, n_back_to_back, n_idle_start, n_stall, n_backpressure, n_corr, n_wrap);
    checks += 7;
    if (n_prog < 2)         begin failures++; $display("reprogramming not exercised"); end
    if (n_back_to_back < 1) begin failures++; $display("back-to-back PMMs not exercised"); end
    if (n_idle_start < 1)   begin failures++; $display("start from idle not exercised"); end
    if (n_stall < 1)        begin failures++; $display("stall not exercised"); end
    if (n_backpressure < 1) begin failures++; $display("input back-pressure not exercised"); end
    if (n_corr < 1)         begin failures++; $display("Barrett correction not exercised"); end
    if (n_wrap < 1)         begin failures++; $display("ring fold wrap not exercised"); end
    checks++;
    if (job_done != JOBS) begin failures++; $display("jobs done %0d", job_done); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
