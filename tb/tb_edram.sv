// tb_edram: random full-row and single-word writes followed by reads of
// random rows, compared with a copy; checks the one-clock read latency and
// that a word write leaves the other words of the row alone.
module tb_edram;
  localparam int D = 2048;
  logic clk = 0, req = 0; logic [10:0] addr = '0; logic [31:0] we = '0;
  logic [511:0] wdata = '0, rdata;
  logic [511:0] m [int];
  int checks = 0, failures = 0;
  edram #(.BYTES(128*1024), .ROW_BITS(512), .WORD(16)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  function automatic logic [511:0] rnd();
    for (int i = 0; i < 16; i++) rnd[i*32 +: 32] = $urandom;
  endfunction
  initial begin
    int a;
    for (int t = 0; t < 64; t++) begin
      @(negedge clk); req = 1; addr = 11'(t * 31 % D); we = '1; wdata = rnd(); m[int'(addr)] = wdata;
    end
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      a = (t * 31 % 64) * 31 % D;
      if ($urandom_range(0, 1)) begin
        int w; w = $urandom_range(0, 31);
        req = 1; addr = 11'(a); we = 32'd1 << w; wdata = rnd();
        m[a][w*16 +: 16] = wdata[w*16 +: 16];
      end else begin
        req = 1; addr = 11'(a); we = '0;
        @(negedge clk); req = 0;
        checks++; if (rdata != m[a]) begin failures++; $display("FAIL row %0d", a); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
