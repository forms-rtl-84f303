// tb_crossbar_array: programs random 2-bit levels into all cells, then drives
// random wordline bits with one or several sub-array rows enabled, strobes the
// sample-and-hold and compares every held column sum with a sum computed from
// the testbench's own copy of the levels. Also checks that the hold registers
// keep their value while the wordlines change without a strobe.
module tb_crossbar_array;
  localparam int R = 128, C = 128, F = 8;
  logic clk = 0, wr_en = 0, sample = 0;
  logic [6:0] wr_row = '0;
  logic [C*2-1:0] wr_data = '0;
  logic [R-1:0] wl = '0;
  logic [R/F-1:0] sub_en = '0;
  logic [4:0] col_held [C];
  logic [1:0] ref_lvl [R][C];
  int checks = 0, failures = 0;
  crossbar_array #(.ROWS(R), .COLS(C), .CELL_BITS(2), .FRAG(F)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    int exp [C];
    for (int r = 0; r < R; r++) begin
      @(negedge clk);
      for (int c = 0; c < C; c++) begin
        ref_lvl[r][c] = 2'($urandom);
        wr_data[c*2 +: 2] = ref_lvl[r][c];
      end
      wr_en = 1; wr_row = 7'(r);
    end
    @(negedge clk); wr_en = 0;
    for (int t = 0; t < 40; t++) begin
      for (int r = 0; r < R; r++) wl[r] = 1'($urandom);
      sub_en = (t % 4 == 3) ? 16'($urandom) : (16'd1 << $urandom_range(0, 15));
      sample = 1; @(negedge clk); sample = 0;
      for (int c = 0; c < C; c++) begin
        exp[c] = 0;
        for (int r = 0; r < R; r++)
          if (sub_en[r / F] && wl[r]) exp[c] += ref_lvl[r][c];
      end
      // change the inputs, no strobe: held values must not move
      wl = ~wl; @(negedge clk);
      for (int c = 0; c < C; c++) begin
        if (t % 4 == 3) continue;        // several rows can exceed the 5-bit range
        checks++;
        if (int'(col_held[c]) != exp[c]) begin
          failures++; if (failures < 10) $display("FAIL t=%0d c=%0d %0d vs %0d", t, c, col_held[c], exp[c]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
