// tb_input_shift_reg: loads random activations of random effective width,
// shifts them out and checks the serial bits (LSB first) and the NOR output
// against a software copy; also checks that the NOR turns 1 after exactly the
// effective number of bits (the position of the highest 1).
module tb_input_shift_reg;
  logic clk = 0, rst_n = 0, load = 0, shift = 0;
  logic [15:0] din = '0;
  logic bit_out, is_zero;
  int checks = 0, failures = 0;
  input_shift_reg #(.IN_BITS(16)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic chk(input logic c, input string what);
    checks++; if (!c) begin failures++; $display("FAIL %s", what); end
  endtask
  initial begin
    logic [15:0] v, m; int eff, n;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      n = $urandom_range(0, 16);
      v = (n == 0) ? 16'd0 : (16'($urandom) | (16'd1 << (n - 1))) & 16'((32'd1 << n) - 1);
      eff = 0; for (int b = 0; b < 16; b++) if (v[b]) eff = b + 1;
      @(negedge clk); din = v; load = 1; @(negedge clk); load = 0;
      m = v; n = 0;
      while (1) begin
        chk(is_zero == (m == 0), "is_zero");
        if (is_zero) break;
        chk(bit_out == m[0], "bit_out");
        shift = 1; @(negedge clk); shift = 0; m = m >> 1; n++;
      end
      chk(n == eff, $sformatf("effective bits %0d vs %0d", n, eff));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
