// tb_pe_shifter - checks the MSB-first shift-add over K = 16 input bits: the
// result equals sum_t 2^t * sum_t, appears on the clock edge of the last bit,
// and is held unchanged while the next accumulation runs.
module tb_pe_shifter;
  localparam int K = 16, IW = 9;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = !clk;
  logic rst_n, en, first, last;
  logic [IW-1:0]   sum;
  logic [IW+K-1:0] result;

  pe_shifter #(.IN_W(IW), .K(K)) dut (.clk(clk), .rst_n(rst_n), .en(en), .first(first),
                                      .last(last), .sum(sum), .result(result));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint exp_v, prev;
    rst_n = 0; en = 0; first = 0; last = 0; sum = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    prev = 0;
    for (int run = 0; run < 200; run++) begin
      exp_v = 0;
      for (int t = 0; t < K; t++) begin     // bit K-1-t of the input
        en = 1; first = (t == 0); last = (t == K - 1);
        sum = (run == 0) ? 9'd256 : IW'($urandom % 257);
        exp_v += longint'(sum) << (K - 1 - t);
        // the previous result must hold during the whole accumulation
        checks++;
        if (longint'(result) != prev) begin failures++; $display("hold broken run %0d", run); end
        @(posedge clk); #1;
        // idle cycles with en = 0 change nothing
        if (t == 5 && run % 3 == 0) begin en = 0; @(posedge clk); #1; end
      end
      en = 0; first = 0; last = 0;
      checks++;
      if (longint'(result) != exp_v) begin
        failures++; $display("run %0d: got %0d exp %0d", run, result, exp_v);
      end
      prev = exp_v;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
