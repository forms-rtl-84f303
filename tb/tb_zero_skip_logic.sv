// tb_zero_skip_logic: exhaustive check of the fragment AND over all 256
// combinations of the 8 per-register NOR outputs.
module tb_zero_skip_logic;
  logic [7:0] reg_zero; logic frag_done;
  int checks = 0, failures = 0;
  zero_skip_logic #(.FRAG(8)) dut (.*);
  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int i = 0; i < 256; i++) begin
      reg_zero = 8'(i); #1;
      checks++; if (frag_done != (i == 255)) begin failures++; $display("FAIL %0d", i); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
