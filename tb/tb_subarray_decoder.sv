// tb_subarray_decoder: exhaustive check of the one-hot decode with and
// without enable.
module tb_subarray_decoder;
  logic en; logic [3:0] sel; logic [15:0] onehot;
  int checks = 0, failures = 0;
  subarray_decoder #(.NSUB(16)) dut (.*);
  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int e = 0; e < 2; e++)
      for (int i = 0; i < 16; i++) begin
        en = e[0]; sel = 4'(i); #1;
        checks++;
        if (onehot != (e ? (16'd1 << i) : 16'd0)) begin failures++; $display("FAIL e=%0d i=%0d %h", e, i, onehot); end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
