// tb_maxpool: windows of 4 random values, with gaps between values; checks
// the maximum and that 'done' pulses exactly once per window.
module tb_maxpool;
  logic clk = 0, rst_n = 0, valid = 0, first = 0; logic [15:0] x = '0, max; logic done;
  int checks = 0, failures = 0, ndone = 0;
  maxpool #(.W(16), .WIN(4)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) if (done && rst_n) ndone++;
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    int m;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      m = 0;
      for (int i = 0; i < 4; i++) begin
        x = 16'($urandom); if (x > m) m = x;
        valid = 1; first = (i == 0); @(negedge clk);
        valid = 0; if ($urandom_range(0, 2) == 0) @(negedge clk);
      end
      checks++; if (int'(max) != m) begin failures++; $display("FAIL max %0d exp %0d", max, m); end
    end
    @(negedge clk);
    checks++; if (ndone != 300) begin failures++; $display("FAIL done count %0d", ndone); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
