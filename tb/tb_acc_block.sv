// tb_acc_block: streams random codes with random column, bit position and
// sign into the accumulation block and compares all 32 registers with a
// software sum of +/- code*2^bit; also checks 'clear'.
module tb_acc_block;
  logic clk = 0, rst_n = 0, clear = 0, valid = 0, neg = 0;
  logic [4:0] col = '0; logic [3:0] code = '0, bitpos = '0;
  logic signed [23:0] acc [32];
  int checks = 0, failures = 0;
  acc_block #(.NCOL(32), .ADC_BITS(4), .IN_BITS(16), .ACC_W(24)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    int m [32];
    repeat (2) @(negedge clk); rst_n = 1;
    for (int rep = 0; rep < 3; rep++) begin
      @(negedge clk); clear = 1; @(negedge clk); clear = 0;
      for (int c = 0; c < 32; c++) m[c] = 0;
      for (int t = 0; t < 600; t++) begin
        valid = 1'($urandom); col = 5'($urandom); code = 4'($urandom);
        bitpos = 4'($urandom); neg = 1'($urandom);
        if (valid) m[col] += (neg ? -1 : 1) * (int'(code) << bitpos);
        @(negedge clk);
      end
      valid = 0; @(negedge clk);
      for (int c = 0; c < 32; c++) begin
        checks++;
        if (int'(acc[c]) != m[c]) begin failures++; $display("FAIL col %0d %0d vs %0d", c, acc[c], m[c]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
