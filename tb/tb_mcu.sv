// tb_mcu: eight crossbars programmed with different random levels and signs
// and fed different input vectors; all 8 x 128 column sums are compared with
// the reference dot products (ADC clipping included) and 'done' must come
// when the slowest crossbar finishes: 32*(1 + its bits fed) + 5 clocks.
module tb_mcu;
  import forms_pkg::*;
  localparam int NX = 8;
  logic clk = 0, rst_n = 0, start = 0, skip_en = 1;
  logic [15:0] in_vec [NX][128];
  logic [2:0] wr_xb = '0;
  logic xb_wr_en = 0; logic [6:0] xb_wr_row = '0; logic [255:0] xb_wr_data = '0;
  logic sg_wr_en = 0; logic [3:0] sg_wr_sub = '0; logic [31:0] sg_wr_bits = '0;
  logic signed [ACC_W-1:0] psum [NX][128];
  logic busy, done; logic [15:0] bit_slots [NX];
  logic [1:0] lvl [NX][128][128];
  logic [31:0] sgn [NX][16];
  int checks = 0, failures = 0;
  mcu #(.NXB(NX)) dut (.*);
  always #5 clk = ~clk;
  task automatic chk(input logic c, input string what);
    checks++; if (!c) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    int maxbits, tot, cyc, s, w;
    longint e;
    for (int x = 0; x < NX; x++) for (int r = 0; r < 128; r++) in_vec[x][r] = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int x = 0; x < NX; x++) begin
      for (int r = 0; r < 128; r++) begin
        for (int c = 0; c < 128; c++) begin lvl[x][r][c] = 2'($urandom); xb_wr_data[c*2 +: 2] = lvl[x][r][c]; end
        wr_xb = 3'(x); xb_wr_en = 1; xb_wr_row = 7'(r); @(negedge clk);
      end
      xb_wr_en = 0;
      for (int g = 0; g < 16; g++) begin
        sgn[x][g] = $urandom; sg_wr_en = 1; sg_wr_sub = 4'(g); sg_wr_bits = sgn[x][g]; @(negedge clk);
      end
      sg_wr_en = 0;
    end
    maxbits = 0;
    for (int x = 0; x < NX; x++) begin
      tot = 0;
      for (int g = 0; g < 16; g++) begin
        w = $urandom_range(0, 2 + x);
        for (int i = 0; i < 8; i++) in_vec[x][g*8+i] = 16'($urandom) & 16'((32'd1 << w) - 1);
        if (w > 0) in_vec[x][g*8][w-1] = 1'b1;
        tot += w;
      end
      if (tot > maxbits) maxbits = tot;
    end
    start = 1; @(negedge clk); start = 0; cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    chk(cyc == 32 * (maxbits + 1) + 5, $sformatf("cycles %0d exp %0d", cyc, 32 * (maxbits + 1) + 5));
    for (int x = 0; x < NX; x++)
      for (int c = 0; c < 128; c++) begin
        e = 0;
        for (int g = 0; g < 16; g++) begin
          longint part; part = 0;
          for (int b = 0; b < 16; b++) begin
            s = 0;
            for (int i = 0; i < 8; i++) if (in_vec[x][g*8+i][b]) s += int'(lvl[x][g*8+i][c]);
            part += longint'((s > 15) ? 15 : s) << b;
          end
          e += sgn[x][g][c / 4] ? -part : part;
        end
        chk(longint'(psum[x][c]) == e, $sformatf("xb %0d col %0d %0d vs %0d", x, c, psum[x][c], e));
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
