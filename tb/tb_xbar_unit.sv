// tb_xbar_unit: one crossbar plane end to end. Programs random 2-bit levels
// and random fragment signs, then runs input vectors whose fragments have
// mixed effective widths (some all-zero, some full 16-bit) with zero skipping
// on and off. Every one of the 128 column sums is compared with a reference
//   sum_g (-1)^sign * sum_b 2^b * min(15, sum_{r in g} bit_b(x_r) * level[r][c])
// computed here, and the run time with 32*(1 + bits fed) + 4 clocks, where the
// bits fed per fragment are its effective width (skip on) or 16 (skip off).
// Counts ADC saturations, negative fragments and skipped fragments.
module tb_xbar_unit;
  import forms_pkg::*;
  logic clk = 0, rst_n = 0, start = 0, skip_en = 1;
  logic [15:0] in_vec [128];
  logic xb_wr_en = 0; logic [6:0] xb_wr_row = '0; logic [255:0] xb_wr_data = '0;
  logic sg_wr_en = 0; logic [3:0] sg_wr_sub = '0; logic [31:0] sg_wr_bits = '0;
  logic signed [ACC_W-1:0] psum [128];
  logic busy, done; logic [15:0] bit_slots;
  logic [1:0] lvl [128][128];
  logic [31:0] sgn [16];
  int checks = 0, failures = 0, n_sat = 0, n_neg = 0, n_skipfrag = 0;
  xbar_unit dut (.*);
  always #5 clk = ~clk;
  task automatic chk(input logic c, input string what);
    checks++; if (!c) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask
  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    int eff [16]; int total, cyc, e, s, code;
    longint exp [128];
    for (int r = 0; r < 128; r++) in_vec[r] = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int r = 0; r < 128; r++) begin
      for (int c = 0; c < 128; c++) begin
        // mostly small levels, some rows dense to provoke ADC saturation
        lvl[r][c] = (r < 8) ? 2'd3 : 2'($urandom);
        xb_wr_data[c*2 +: 2] = lvl[r][c];
      end
      xb_wr_en = 1; xb_wr_row = 7'(r); @(negedge clk);
    end
    xb_wr_en = 0;
    for (int g = 0; g < 16; g++) begin
      sgn[g] = $urandom; sg_wr_en = 1; sg_wr_sub = 4'(g); sg_wr_bits = sgn[g]; @(negedge clk);
    end
    sg_wr_en = 0;
    for (int t = 0; t < 4; t++) begin
      skip_en = (t != 2);
      for (int g = 0; g < 16; g++) begin
        int w; w = (g == 3 || (t == 1 && g > 10)) ? 0 : $urandom_range(1, 16);
        if (t == 3) w = $urandom_range(0, 6);
        for (int i = 0; i < 8; i++)
          in_vec[g*8 + i] = (w == 0) ? 16'd0 : 16'($urandom) & 16'((32'd1 << w) - 1);
        if (w > 0) in_vec[g*8 + $urandom_range(0, 7)][w - 1] = 1'b1;
      end
      // reference
      total = 0;
      for (int g = 0; g < 16; g++) begin
        eff[g] = 0;
        for (int i = 0; i < 8; i++) for (int b = 0; b < 16; b++) if (in_vec[g*8+i][b] && b + 1 > eff[g]) eff[g] = b + 1;
        total += skip_en ? eff[g] : 16;
        if (skip_en && eff[g] == 0) n_skipfrag++;
      end
      for (int c = 0; c < 128; c++) begin
        exp[c] = 0;
        for (int g = 0; g < 16; g++) begin
          longint part; part = 0;
          for (int b = 0; b < 16; b++) begin
            s = 0;
            for (int i = 0; i < 8; i++) if (in_vec[g*8+i][b]) s += int'(lvl[g*8+i][c]);
            code = (s > 15) ? 15 : s;
            if (s > 15) n_sat++;
            part += longint'(code) << b;
          end
          if (sgn[g][c / 4]) begin exp[c] -= part; if (part != 0) n_neg++; end
          else exp[c] += part;
        end
      end
      start = 1; @(negedge clk); start = 0; cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      e = (total == 0) ? 4 : 32 * (total + 1) + 4;
      chk(cyc == e, $sformatf("run %0d cycles %0d exp %0d", t, cyc, e));
      chk(int'(bit_slots) == total, "bit_slots");
      for (int c = 0; c < 128; c++)
        chk(longint'(psum[c]) == exp[c], $sformatf("run %0d col %0d %0d vs %0d", t, c, psum[c], exp[c]));
      $display("run %0d skip=%0d bits fed %0d of %0d, cycles %0d", t, skip_en, total, 256, cyc);
    end
    chk(n_sat > 0, "no ADC saturation exercised");
    chk(n_neg > 0, "no negative fragment exercised");
    chk(n_skipfrag > 0, "no all-zero fragment exercised");
    $display("saturated conversions %0d, negative fragment terms %0d, skipped fragments %0d", n_sat, n_neg, n_skipfrag);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
