// tb_sign_indicator: checks reset to all-positive, then random row writes
// followed by reads of every row against a copy.
module tb_sign_indicator;
  logic clk = 0, rst_n = 0, wr_en = 0;
  logic [3:0] wr_sub = '0, rd_sub = '0;
  logic [31:0] wr_bits = '0, rd_bits;
  logic [31:0] m [16];
  int checks = 0, failures = 0;
  sign_indicator #(.NSUB(16), .NWCOL(32)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int i = 0; i < 16; i++) begin
      m[i] = '0; rd_sub = 4'(i); #1; checks++; if (rd_bits != 0) failures++;
    end
    for (int t = 0; t < 200; t++) begin
      @(negedge clk); wr_en = 1; wr_sub = 4'($urandom); wr_bits = $urandom; m[wr_sub] = wr_bits;
      @(negedge clk); wr_en = 0;
      rd_sub = 4'($urandom); #1;
      checks++; if (rd_bits != m[rd_sub]) begin failures++; $display("FAIL row %0d", rd_sub); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
