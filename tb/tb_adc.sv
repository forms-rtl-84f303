// tb_adc: random held column levels (0..24, the range of 8 rows of 2-bit
// cells) and column selects; each code must equal the selected level clipped
// to 15, one clock after the select.
module tb_adc;
  logic clk = 0;
  logic [4:0] col_held [32];
  logic [4:0] sel = '0;
  logic [3:0] code;
  int checks = 0, failures = 0, sat = 0;
  adc #(.NCOL(32), .CUR_W(5), .ADC_BITS(4)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    int e;
    for (int c = 0; c < 32; c++) col_held[c] = 5'($urandom_range(0, 24));
    for (int t = 0; t < 500; t++) begin
      @(negedge clk);
      sel = 5'($urandom);
      e = (col_held[sel] > 15) ? 15 : int'(col_held[sel]);
      if (col_held[sel] > 15) sat++;
      @(negedge clk);
      checks++; if (int'(code) != e) begin failures++; $display("FAIL %0d %0d", code, e); end
      if (t % 50 == 0) for (int c = 0; c < 32; c++) col_held[c] = 5'($urandom_range(0, 24));
    end
    checks++; if (sat == 0) begin failures++; $display("FAIL no saturation exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
