// tb_xba - checks the crossbar model at its default size (128 x 128, 8
// columns per ADC): programs random cells row by row, applies random
// word-line patterns and checks every ADC output for every MUX setting
// against an independent count of the conducting cells.  A second phase
// reprograms some rows and checks again.
module tb_xba;
  localparam int R = 128, C = 128, MUX = 8, NADC = C / MUX;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = !clk;

  logic                 prog_en;
  logic [6:0]           prog_row;
  logic [C-1:0]         prog_data;
  logic [R-1:0]         wl;
  logic [2:0]           col_sel;
  logic [NADC-1:0][7:0] adc_out;
  logic [C-1:0]         model [R];   // model[r][c]

  xba dut (.clk(clk), .prog_en(prog_en), .prog_row(prog_row), .prog_data(prog_data),
           .wl(wl), .col_sel(col_sel), .adc_out(adc_out));

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic program_row(int r, logic [C-1:0] d);
    prog_en = 1; prog_row = 7'(r); prog_data = d;
    @(posedge clk); #1;
    prog_en = 0;
    model[r] = d;
  endtask

  task automatic check_reads(int n);
    for (int t = 0; t < n; t++) begin
      for (int i = 0; i < R; i++) wl[i] = ($urandom % 4) != 0;  // dense inputs
      if (t == 0) wl = '1;                                       // full column counts
      for (int s = 0; s < MUX; s++) begin
        col_sel = 3'(s);
        #1;
        for (int a = 0; a < NADC; a++) begin
          automatic int exp_v = 0;
          for (int r = 0; r < R; r++) exp_v += (model[r][a*MUX+s] && wl[r]) ? 1 : 0;
          checks++;
          if (int'(adc_out[a]) != exp_v) begin
            failures++;
            if (failures < 10) $display("adc %0d sel %0d: got %0d exp %0d", a, s, adc_out[a], exp_v);
          end
        end
      end
    end
  endtask

  initial begin
    prog_en = 0; prog_row = 0; prog_data = 0; wl = 0; col_sel = 0;
    @(posedge clk); #1;
    for (int r = 0; r < R; r++) begin
      logic [C-1:0] d;
      for (int c = 0; c < C; c++) d[c] = $urandom % 2;
      if (r < 4) d = '1;
      program_row(r, d);
    end
    check_reads(6);
    for (int k = 0; k < 16; k++) begin
      logic [C-1:0] d;
      for (int c = 0; c < C; c++) d[c] = $urandom % 2;
      program_row($urandom % R, d);
    end
    check_reads(4);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
