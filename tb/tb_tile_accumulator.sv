// tb_tile_accumulator - checks the tile accumulation (K = 16 planes, 4 x 4
// lanes of 25-bit PE results): after one K-cycle slot, MSB plane first,
// every lane holds sum_w 2^w * P_w, and the result stays constant during the
// next slot.
module tb_tile_accumulator;
  localparam int K = 16, NJ = 4, NC = 4, IW = 25, OW = IW + K;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = !clk;

  logic rst_n, en, first, last;
  logic [3:0] plane;
  logic [K-1:0][NJ-1:0][NC-1:0][IW-1:0] pe_vals;
  logic [NJ-1:0][NC-1:0][OW-1:0]        result;

  tile_accumulator #(.K(K), .NJ(NJ), .NC(NC), .IN_W(IW)) dut (
    .clk(clk), .rst_n(rst_n), .en(en), .first(first), .last(last), .plane(plane),
    .pe_vals(pe_vals), .result(result));

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [NJ-1:0][NC-1:0][OW-1:0] prev;
    rst_n = 0; en = 0; first = 0; last = 0; plane = 0; pe_vals = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    prev = '0;
    for (int run = 0; run < 40; run++) begin
      logic [NJ-1:0][NC-1:0][OW-1:0] e;
      for (int w = 0; w < K; w++)
        for (int j = 0; j < NJ; j++)
          for (int m = 0; m < NC; m++)
            pe_vals[w][j][m] = (run == 0) ? IW'(256 * 65535) : IW'($urandom % (256 * 65536));
      for (int j = 0; j < NJ; j++)
        for (int m = 0; m < NC; m++) begin
          e[j][m] = '0;
          for (int w = 0; w < K; w++) e[j][m] += OW'(pe_vals[w][j][m]) << w;
        end
      for (int u = 0; u < K; u++) begin
        en = 1; first = (u == 0); last = (u == K - 1); plane = 4'(K - 1 - u);
        checks++;
        if (result != prev) begin failures++; $display("result not held, run %0d", run); end
        @(posedge clk); #1;
      end
      en = 0; first = 0; last = 0;
      for (int j = 0; j < NJ; j++)
        for (int m = 0; m < NC; m++) begin
          checks++;
          if (result[j][m] != e[j][m]) begin
            failures++;
            if (failures < 10) $display("run %0d lane %0d/%0d: %0d vs %0d", run, j, m, result[j][m], e[j][m]);
          end
        end
      prev = result;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
