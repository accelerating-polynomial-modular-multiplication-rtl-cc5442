// tb_pe_adder_tree - checks the adder tree with 2, 3 and 6 inputs against a
// plain sum, on random and on all-ones inputs.
module tb_pe_adder_tree;
  int checks = 0, failures = 0;
  logic [1:0][7:0] in2;  logic [8:0]  s2;
  logic [2:0][7:0] in3;  logic [9:0]  s3;
  logic [5:0][7:0] in6;  logic [10:0] s6;

  pe_adder_tree #(.NIN(2), .IN_W(8)) u2 (.in_vals(in2), .sum(s2));
  pe_adder_tree #(.NIN(3), .IN_W(8)) u3 (.in_vals(in3), .sum(s3));
  pe_adder_tree #(.NIN(6), .IN_W(8)) u6 (.in_vals(in6), .sum(s6));

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 500; t++) begin
      automatic int e2 = 0, e3 = 0, e6 = 0;
      for (int i = 0; i < 2; i++) begin in2[i] = (t == 0) ? 8'hff : 8'($urandom); e2 += int'(in2[i]); end
      for (int i = 0; i < 3; i++) begin in3[i] = (t == 0) ? 8'hff : 8'($urandom); e3 += int'(in3[i]); end
      for (int i = 0; i < 6; i++) begin in6[i] = (t == 0) ? 8'hff : 8'($urandom); e6 += int'(in6[i]); end
      #1;
      checks += 3;
      if (int'(s2) != e2) begin failures++; $display("2: %0d vs %0d", s2, e2); end
      if (int'(s3) != e3) begin failures++; $display("3: %0d vs %0d", s3, e3); end
      if (int'(s6) != e6) begin failures++; $display("6: %0d vs %0d", s6, e6); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
