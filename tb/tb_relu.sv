// tb_relu: random signed sums and shifts; output must be 0 for negative sums,
// (x >> shamt) when that fits in 16 bits, and 65535 otherwise.
module tb_relu;
  logic signed [31:0] x; logic [4:0] shamt; logic [15:0] y;
  int checks = 0, failures = 0;
  relu #(.IN_W(32), .OUT_BITS(16)) dut (.*);
  initial begin
    #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    longint e;
    for (int t = 0; t < 3000; t++) begin
      x = $signed($urandom) >>> $urandom_range(0, 20);
      shamt = 5'($urandom_range(0, 12));
      #1;
      if (x < 0) e = 0;
      else begin e = longint'(x) >> shamt; if (e > 65535) e = 65535; end
      checks++; if (longint'(y) != e) begin failures++; $display("FAIL x=%0d sh=%0d y=%0d e=%0d", x, shamt, y, e); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
