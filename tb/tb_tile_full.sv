// tb_tile_full: end-to-end test of the tile at its default size (12 MCUs of 8 crossbars, 128 KB eDRAM).
// Programs random 2-bit levels (the first rows of some crossbars at the top
// level, to drive the ADCs into clipping) and random fragment signs into every
// crossbar, writes input activations with fragments of mixed effective widths
// (including all-zero fragments) into the eDRAM, runs layer operations and
// reads the results back through the eDRAM port. Each output is compared with
// a reference computed here:
//   psum(k,c) = sum_g (-1)^sign * sum_b 2^b * min(15, sum_{r in g} bit_b(x_r)*level)
//   out(o,j)  = sum over the G crossbars of group o, sum_s psum(k,4j+s)*4^s
//   act       = ReLU, shift right by shamt, saturate to 16 bits
// and, with pooling, word w = max(act[4w .. 4w+3]). The run time is checked
// against 4*n_xb (input reads) + 32*(1 + most bits fed to one crossbar)
// (crossbars) + G*outputs (shift-and-add) + 6 per pooled word + a fixed
// overhead of 14 clocks. Every mechanism is counted and must occur: zero-skipped
// bits, all-zero fragments, ADC clipping, negative fragments, ReLU clamping
// to zero and to the top, multi-crossbar groups, pooling, and a run with
// zero skipping off.
module tb_tile_full;
  import forms_pkg::*;
  localparam int NM = 12, NXB = 8, NXT = NM * NXB;
  logic clk = 0, rst_n = 0, start = 0;
  layer_cfg_t cfg;
  logic busy, done;
  logic ext_req = 0; logic [10:0] ext_addr = '0; logic [31:0] ext_we = '0;
  logic [511:0] ext_wdata = '0, ext_rdata;
  logic [$clog2(NXT)-1:0] prog_xb = '0;
  logic prog_xb_wr = 0; logic [6:0] prog_row = '0; logic [255:0] prog_levels = '0;
  logic prog_sg_wr = 0; logic [3:0] prog_sub = '0; logic [31:0] prog_signs = '0;
  logic [15:0] bit_slots [NXT];
  logic [15:0] n_outputs, n_pooled;
  logic [1:0]  lvl [NXT][128][128];
  logic [31:0] sgn [NXT][16];
  logic [15:0] xin [4][128];
  longint      psum_ref [NXT][128];
  int checks = 0, failures = 0;
  int m_skipbits = 0, m_zerofrag = 0, m_clip = 0, m_neg = 0, m_relu0 = 0, m_relusat = 0,
      m_group = 0, m_pool = 0, m_noskip = 0;

  tile  dut (.*);

  always #5 clk = ~clk;
  task automatic chk(input logic c, input string what);
    checks++; if (!c) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask
  initial begin
    repeat (3000000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic ext_write(input int row, input logic [511:0] d);
    @(negedge clk); ext_req = 1; ext_addr = 11'(row); ext_we = '1; ext_wdata = d;
    @(negedge clk); ext_req = 0; ext_we = '0;
  endtask
  task automatic ext_read_word(input int waddr, output logic [15:0] v);
    @(negedge clk); ext_req = 1; ext_addr = 11'(waddr >> 5); ext_we = '0;
    @(negedge clk); ext_req = 0; v = ext_rdata[(waddr & 31) * 16 +: 16];
  endtask

  task automatic run_op(input int G, input int nxb, input bit skip, input bit pool,
                        input int shamt, input int in_base, input int out_base);
    int total [NXT]; int maxbits, cyc, nout, nw, s, e, eff;
    longint o; logic [15:0] v;
    logic [15:0] act [];
    // inputs: G segments of 128 activations, fragment widths 0..16
    for (int sg = 0; sg < G; sg++) begin
      for (int f = 0; f < 16; f++) begin
        int w; w = $urandom_range(0, 5) == 0 ? 0 : $urandom_range(1, 16);
        if (f == 1) w = 0;
        if (f == 2) w = 16;
        for (int i = 0; i < 8; i++) xin[sg][f*8+i] = (w == 0) ? 16'd0 : 16'($urandom) & 16'((32'd1 << w) - 1);
        if (w > 0) xin[sg][f*8 + $urandom_range(0, 7)][w-1] = 1'b1;
      end
      for (int p = 0; p < 4; p++) begin
        logic [511:0] d;
        for (int wd = 0; wd < 32; wd++) d[wd*16 +: 16] = xin[sg][p*32 + wd];
        ext_write(in_base + 4*sg + p, d);
      end
    end
    // reference partial sums
    maxbits = 0;
    for (int k = 0; k < nxb; k++) begin
      int sgi; sgi = k % G; total[k] = 0;
      for (int f = 0; f < 16; f++) begin
        eff = 0;
        for (int i = 0; i < 8; i++) for (int b = 0; b < 16; b++) if (xin[sgi][f*8+i][b] && b + 1 > eff) eff = b + 1;
        total[k] += skip ? eff : 16;
        if (skip) m_skipbits += 16 - eff;
        if (skip && eff == 0) m_zerofrag++;
      end
      if (total[k] > maxbits) maxbits = total[k];
      for (int c = 0; c < 128; c++) begin
        psum_ref[k][c] = 0;
        for (int f = 0; f < 16; f++) begin
          longint part; part = 0;
          for (int b = 0; b < 16; b++) begin
            s = 0;
            for (int i = 0; i < 8; i++) if (xin[sgi][f*8+i][b]) s += int'(lvl[k][f*8+i][c]);
            if (s > 15) begin s = 15; m_clip++; end
            part += longint'(s) << b;
          end
          if (sgn[k][f][c / 4]) begin psum_ref[k][c] -= part; if (part != 0) m_neg++; end
          else psum_ref[k][c] += part;
        end
      end
    end
    nout = (nxb / G) * 32; nw = pool ? nout / 4 : 0;
    act = new[nout];
    for (int og = 0; og < nxb / G; og++)
      for (int j = 0; j < 32; j++) begin
        o = 0;
        for (int g = 0; g < G; g++) for (int sl = 0; sl < 4; sl++) o += psum_ref[og*G + g][4*j + sl] <<< (2*sl);
        if (o < 0) begin act[og*32 + j] = 0; m_relu0++; end
        else if ((o >>> shamt) > 65535) begin act[og*32 + j] = 16'hffff; m_relusat++; end
        else act[og*32 + j] = 16'(o >>> shamt);
      end
    // run
    cfg = '{in_base: 16'(in_base), out_base: 16'(out_base), group: 8'(G), n_xb: 8'(nxb),
            shamt: 5'(shamt), skip_en: skip, pool_en: pool};
    @(negedge clk); start = 1; @(negedge clk); start = 0; cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    e = 4 * nxb + 32 * (maxbits + 1) + G * nout + 6 * nw + 14;
    chk(cyc == e, $sformatf("op G=%0d cycles %0d exp %0d", G, cyc, e));
    chk(int'(n_outputs) == nout, "output count");
    chk(int'(n_pooled) == nw, "pooled count");
    for (int k = 0; k < nxb; k++) chk(int'(bit_slots[k]) == total[k], $sformatf("bits fed xb %0d", k));
    // results
    for (int i = 0; i < nout; i++) begin
      logic [15:0] ev;
      if (pool && i < nw) ev = (act[4*i] > act[4*i+1] ? act[4*i] : act[4*i+1]) > (act[4*i+2] > act[4*i+3] ? act[4*i+2] : act[4*i+3])
                               ? (act[4*i] > act[4*i+1] ? act[4*i] : act[4*i+1]) : (act[4*i+2] > act[4*i+3] ? act[4*i+2] : act[4*i+3]);
      else ev = act[i];
      ext_read_word(out_base + i, v);
      chk(v == ev, $sformatf("G=%0d pool=%0d word %0d: %0d vs %0d", G, pool, i, v, ev));
    end
    if (G > 1) m_group++;
    if (pool) m_pool += nw;
    if (!skip) m_noskip++;
    $display("op G=%0d n_xb=%0d skip=%0d pool=%0d: %0d outputs, most bits fed %0d of 256, %0d clocks",
             G, nxb, skip, pool, nout, maxbits, cyc);
  endtask

  initial begin
    cfg = '0;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int k = 0; k < NXT; k++) begin
      prog_xb = $clog2(NXT)'(k);
      for (int r = 0; r < 128; r++) begin
        for (int c = 0; c < 128; c++) begin
          lvl[k][r][c] = (r >= 16 && r < 24 && k % 2 == 0) ? 2'd3 : 2'($urandom);
          prog_levels[c*2 +: 2] = lvl[k][r][c];
        end
        prog_xb_wr = 1; prog_row = 7'(r); @(negedge clk);
      end
      prog_xb_wr = 0;
      for (int g = 0; g < 16; g++) begin
        sgn[k][g] = $urandom;
        prog_sg_wr = 1; prog_sub = 4'(g); prog_signs = sgn[k][g]; @(negedge clk);
      end
      prog_sg_wr = 0;
    end
    run_op(4, 96, 1, 1, 8, 0, 8192);
    run_op(1, 96, 0, 0, 4, 64, 16384);

    chk(m_skipbits > 0, "zero skipping never skipped a bit");
    chk(m_zerofrag > 0, "no all-zero fragment");
    chk(m_clip > 0, "no ADC clipping");
    chk(m_neg > 0, "no negative fragment");
    chk(m_relu0 > 0, "ReLU never clamped a negative sum");
    chk(m_relusat > 0, "ReLU never saturated");
    chk(m_group > 0, "no multi-crossbar group");
    chk(m_pool > 0, "no pooling");
    chk(m_noskip > 0, "no run with skipping off");
    $display("skipped bits %0d, zero fragments %0d, clipped conversions %0d, negative fragment terms %0d",
             m_skipbits, m_zerofrag, m_clip, m_neg);
    $display("ReLU zero %0d, ReLU saturated %0d, grouped ops %0d, pooled words %0d, runs without skipping %0d",
             m_relu0, m_relusat, m_group, m_pool, m_noskip);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
