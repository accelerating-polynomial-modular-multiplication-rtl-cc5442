// tb_sar_adc - checks the ADC model: codes equal the column count within
// range and saturate at 2^ADC_BITS - 1 above it (lossless 8-bit instance and
// a 4-bit instance).
module tb_sar_adc;
  int checks = 0, failures = 0;
  logic [7:0] level;
  logic [7:0] code8;
  logic [3:0] code4;

  sar_adc #(.IN_W(8), .ADC_BITS(8)) u8 (.level(level), .code(code8));
  sar_adc #(.IN_W(8), .ADC_BITS(4)) u4 (.level(level), .code(code4));

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 256; v++) begin
      level = 8'(v);
      #1;
      checks++;
      if (code8 != 8'(v)) begin failures++; $display("8-bit: level %0d code %0d", v, code8); end
      checks++;
      if (code4 != ((v > 15) ? 4'd15 : 4'(v))) begin failures++; $display("4-bit: level %0d code %0d", v, code4); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
