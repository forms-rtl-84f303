// tb_xbar_ctrl: drives the controller with a model of 16 fragments, each
// needing a chosen number of input bits (0..16), and checks: every sample is
// tagged with the right row and bit in order, each fed row sees exactly its
// bit count (or 16 with skipping off), rows with no work get no slot, the ADC
// sweep covers all 32 columns of every sample, and the run takes
// 32*S + 4 clocks with S = 1 + bits fed (S = 0 if nothing is fed).
module tb_xbar_ctrl;
  localparam int NS = 16, NB = 16, NC = 32;
  logic clk = 0, rst_n = 0, start = 0, skip_en = 1;
  logic [NS-1:0] frag_done, shift;
  logic load, clear, drive_en, sample, acc_valid, busy, done;
  logic [3:0] drive_sub, acc_sub, acc_bit;
  logic [4:0] adc_sel, acc_col;
  logic [15:0] bit_slots;
  int rem [NS];
  int checks = 0, failures = 0;
  xbar_ctrl #(.NSUB(NS), .IN_BITS(NB), .NCOL(NC)) dut (.*);
  always #5 clk = ~clk;
  always_comb for (int g = 0; g < NS; g++) frag_done[g] = (rem[g] == 0);
  task automatic chk(input logic c, input string what);
    checks++; if (!c) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask
  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    int eic [NS]; int total, slots, cyc, exp_sub, exp_bit, nacc, skipped_rows;
    for (int g = 0; g < NS; g++) rem[g] = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 12; t++) begin
      skip_en = (t % 3 != 2);
      total = 0; skipped_rows = 0;
      for (int g = 0; g < NS; g++) begin
        eic[g] = (t == 0) ? 0 : (($urandom_range(0, 3) == 0) ? 0 : $urandom_range(1, 16));
        total += skip_en ? eic[g] : NB;
        if (skip_en && eic[g] == 0) skipped_rows++;
      end
      @(negedge clk); start = 1;
      @(posedge clk); #1 start = 0;
      for (int g = 0; g < NS; g++) rem[g] = eic[g];   // registers now loaded
      cyc = 1; exp_sub = -1; exp_bit = 0; nacc = 0;
      while (!done) begin
        @(posedge clk);
        // model the shift registers: shifting removes one effective bit
        if (sample) begin
          int g; g = int'(drive_sub);
          if (skip_en) begin
            // next row with work
            if (exp_sub < 0 || exp_bit == eic[exp_sub]) begin
              exp_sub++; while (exp_sub < NS && eic[exp_sub] == 0) exp_sub++; exp_bit = 0;
            end
          end else if (exp_sub < 0 || exp_bit == NB) begin
            exp_sub++; exp_bit = 0;
          end
          chk(g == exp_sub, $sformatf("t%0d sample row %0d exp %0d", t, g, exp_sub));
          chk(shift == (16'd1 << g), "shift one-hot");
          exp_bit++;
        end
        if (acc_valid) nacc++;
        #1;
        for (int g = 0; g < NS; g++) if (shift[g] && rem[g] > 0) rem[g]--;
        cyc++;
      end
      slots = (total == 0) ? 0 : total + 1;
      chk(cyc == NC * slots + 4, $sformatf("t%0d cycles %0d exp %0d", t, cyc, NC * slots + 4));
      chk(int'(bit_slots) == total, "bit_slots");
      chk(nacc == NC * total, $sformatf("t%0d conversions %0d exp %0d", t, nacc, NC * total));
      $display("run %0d skip=%0d bits fed %0d, rows skipped %0d, cycles %0d", t, skip_en, total, skipped_rows, cyc);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
