// tb_barrett_reducer - checks x mod Q for 41-bit x with Q = 65521 (the
// default) and Q = 3329, on edge values (0, Q-1, Q, multiples of Q, 2^41-1)
// and random values, against the % operator; also counts that the
// correction step occurs.
module tb_barrett_reducer;
  localparam int XW = 41;
  int checks = 0, failures = 0, corr_hits = 0;
  logic [XW-1:0] x;
  logic [15:0]   r1;
  logic [11:0]   r2;
  logic          c1, c2;

  barrett_reducer #(.XW(XW), .Q(65521)) u1 (.x(x), .r(r1), .corr(c1));
  barrett_reducer #(.XW(XW), .Q(3329))  u2 (.x(x), .r(r2), .corr(c2));

  initial begin
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(longint unsigned v);
    x = XW'(v);
    #1;
    checks += 2;
    if (longint'(r1) != longint'(v % 65521)) begin failures++; $display("65521: %0d -> %0d", v, r1); end
    if (longint'(r2) != longint'(v % 3329))  begin failures++; $display("3329: %0d -> %0d", v, r2); end
    if (c1 || c2) corr_hits++;
  endtask

  initial begin
    automatic longint unsigned maxv = (64'd1 << XW) - 1;
    check(0); check(65520); check(65521); check(65522); check(3328); check(3329);
    check(maxv); check(maxv - 1); check(64'd65521 * 33554431); check(64'd3329 * 660000000);
    for (int t = 0; t < 20000; t++) begin
      automatic longint unsigned v = {$urandom, $urandom} & maxv;
      if (t % 4 == 0) v = v >> ($urandom % 40);
      check(v);
    end
    checks++;
    if (corr_hits == 0) begin failures++; $display("correction step never taken"); end
    $display("corrections: %0d", corr_hits);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
