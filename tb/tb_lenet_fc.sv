// tb_lenet_fc: runs the three fully connected layers of a LeNet-5 classifier
// (400 -> 120 -> 84 -> 10) on a tile of 2 MCUs x 8 crossbars, one layer
// operation per layer, with the crossbars reprogrammed between layers. Each
// layer's outputs stay in the eDRAM and are the next layer's inputs, so the
// run covers the layer-to-layer dataflow through the activation buffer.
//
// Weights are signed 8-bit values built the way the training flow leaves
// them: every fragment (8 consecutive inputs feeding one output) has one sign,
// many weights and whole fragments are pruned to zero, and magnitudes lean
// towards small values. Crossbar k = og*G + seg holds inputs seg*128 .. +127
// and outputs og*32 .. +31, and each magnitude is split into four 2-bit cells.
// First-layer activations are small non-negative values, as after a ReLU.
//
// Every output word is compared with a reference that models the crossbar
// bit by bit, including the 4-bit ADC clipping. Each layer's run time is
// checked against the tile's cycle formula. The testbench also reports how many
// outputs equal the ideal integer result sum(w*x), i.e. were not changed by
// clipping, and how many input bits zero skipping saved.
module tb_lenet_fc;
  import forms_pkg::*;
  localparam int NM = 2, NXB = 8, NXT = NM * NXB;
  localparam int NL = 3;
  localparam int N_IN  [NL] = '{400, 120, 84};
  localparam int N_OUT [NL] = '{120, 84, 10};
  localparam int SHAMT [NL] = '{7, 7, 6};
  localparam int BASE  [NL+1] = '{0, 32, 64, 96};   // eDRAM row of each layer's input
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
  logic [15:0] x [512];          // current layer input, zero padded to 4 segments
  logic [15:0] y [128];          // current layer reference output
  int          wt [128][512];    // signed weights of the current layer
  int checks = 0, failures = 0;
  int n_ideal = 0, n_outs = 0, n_saved = 0, n_bits = 0, n_pruned_frag = 0, n_neg_frag = 0, n_nz;

  tile #(.NM(NM), .NXB(NXB)) dut (.*);

  always #5 clk = ~clk;
  task automatic chk(input logic c, input string what);
    checks++; if (!c) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask
  initial begin
    repeat (200000) @(posedge clk);
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

  // polarized, pruned weights for layer l
  task automatic make_weights(input int l);
    for (int o = 0; o < 128; o++)
      for (int f = 0; f < 64; f++) begin
        bit neg, pruned;
        neg = 1'($urandom); pruned = ($urandom_range(0, 2) == 0);
        if (o < N_OUT[l] && f * 8 < N_IN[l]) begin
          if (pruned) n_pruned_frag++;
          else if (neg) n_neg_frag++;
        end
        for (int i = 0; i < 8; i++) begin
          int m; m = $urandom_range(0, 255) >> $urandom_range(0, 5);
          if (pruned || $urandom_range(0, 1) == 0 || o >= N_OUT[l] || f * 8 + i >= N_IN[l]) m = 0;
          wt[o][f*8 + i] = neg ? -m : m;
        end
      end
  endtask

  // program crossbar k with its slice of the weight matrix
  task automatic program_xb(input int k, input int G);
    int seg, og;
    seg = k % G; og = k / G;
    prog_xb = $clog2(NXT)'(k);
    for (int r = 0; r < 128; r++) begin
      @(negedge clk);
      for (int j = 0; j < 32; j++) begin
        int m; m = wt[og*32 + j][seg*128 + r]; if (m < 0) m = -m;
        for (int s = 0; s < 4; s++) prog_levels[(4*j + s)*2 +: 2] = 2'(m >> (2*s));
      end
      prog_row = 7'(r); prog_xb_wr = 1;
    end
    for (int f = 0; f < 16; f++) begin
      @(negedge clk); prog_xb_wr = 0;
      for (int j = 0; j < 32; j++) begin
        bit ng; ng = 0;
        for (int i = 0; i < 8; i++) if (wt[og*32 + j][seg*128 + f*8 + i] < 0) ng = 1;
        prog_signs[j] = ng;
      end
      prog_sub = 4'(f); prog_sg_wr = 1;
    end
    @(negedge clk); prog_sg_wr = 0;
  endtask

  task automatic run_layer(input int l);
    int G, ngrp, nxb, maxbits, cyc, e;
    int bits [NXT];
    logic [15:0] v;
    G = (N_IN[l] + 127) / 128; ngrp = (N_OUT[l] + 31) / 32; nxb = G * ngrp;
    make_weights(l);
    for (int k = 0; k < nxb; k++) program_xb(k, G);
    // reference: bit-serial crossbar with ADC clipping, then ReLU and shift
    maxbits = 0;
    for (int k = 0; k < nxb; k++) begin
      bits[k] = 0;
      for (int f = 0; f < 16; f++) begin
        int eff; eff = 0;
        for (int i = 0; i < 8; i++) for (int b = 0; b < 16; b++)
          if (x[(k % G)*128 + f*8 + i][b] && b + 1 > eff) eff = b + 1;
        bits[k] += eff; n_saved += 16 - eff; n_bits += 16;
      end
      if (bits[k] > maxbits) maxbits = bits[k];
    end
    for (int o = 0; o < ngrp * 32; o++) begin
      longint acc, ideal;
      acc = 0; ideal = 0;
      for (int n = 0; n < G * 128; n++) ideal += longint'(wt[o][n]) * longint'(x[n]);
      for (int seg = 0; seg < G; seg++)
        for (int f = 0; f < 16; f++) begin
          bit ng; ng = 0;
          for (int i = 0; i < 8; i++) if (wt[o][seg*128 + f*8 + i] < 0) ng = 1;
          for (int s = 0; s < 4; s++) begin
            longint part; part = 0;
            for (int b = 0; b < 16; b++) begin
              int sum; sum = 0;
              for (int i = 0; i < 8; i++) begin
                int m; m = wt[o][seg*128 + f*8 + i]; if (m < 0) m = -m;
                if (x[seg*128 + f*8 + i][b]) sum += (m >> (2*s)) & 3;
              end
              if (sum > 15) sum = 15;
              part += longint'(sum) << b;
            end
            acc += (ng ? -part : part) <<< (2*s);
          end
        end
      if (o < N_OUT[l]) begin n_outs++; if (acc == ideal) n_ideal++; end
      if (acc < 0) y[o] = 0;
      else if ((acc >>> SHAMT[l]) > 65535) y[o] = 16'hffff;
      else y[o] = 16'(acc >>> SHAMT[l]);
    end
    cfg = '{in_base: 16'(BASE[l]), out_base: 16'(BASE[l+1] * 32), group: 8'(G), n_xb: 8'(nxb),
            shamt: 5'(SHAMT[l]), skip_en: 1'b1, pool_en: 1'b0};
    @(negedge clk); start = 1; @(negedge clk); start = 0; cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    e = 4 * nxb + 32 * (maxbits + 1) + G * ngrp * 32 + 14;
    chk(cyc == e, $sformatf("layer %0d cycles %0d exp %0d", l, cyc, e));
    for (int k = 0; k < nxb; k++) chk(int'(bit_slots[k]) == bits[k], $sformatf("layer %0d bits fed xb %0d", l, k));
    n_nz = 0;
    for (int o = 0; o < ngrp * 32; o++) begin
      if (y[o] != 0) n_nz++;
      ext_read_word(BASE[l+1] * 32 + o, v);
      chk(v == y[o], $sformatf("layer %0d out %0d: %0d vs %0d", l, o, v, y[o]));
    end
    chk(n_nz > 0, $sformatf("layer %0d: all outputs zero", l));
    $display("layer %0d: %0d -> %0d, %0d crossbars in groups of %0d, most bits fed %0d of 256, %0d clocks, %0d non-zero outputs",
             l, N_IN[l], N_OUT[l], nxb, G, maxbits, cyc, n_nz);
    // next layer's input: this layer's outputs, padded with zeros
    for (int n = 0; n < 512; n++) x[n] = (n < ngrp * 32) ? y[n] : 16'd0;
  endtask

  initial begin
    logic [511:0] d;
    cfg = '0;
    repeat (3) @(negedge clk); rst_n = 1;
    // clear the activation area, then write the 400 first-layer inputs
    for (int n = 0; n < 512; n++)
      x[n] = (n < N_IN[0]) ? 16'($urandom_range(0, 255) >> $urandom_range(0, 7)) : 16'd0;
    for (int r = 0; r < 128; r++) begin
      for (int w = 0; w < 32; w++) d[w*16 +: 16] = (r < 16) ? x[r*32 + w] : 16'd0;
      ext_write(r, d);
    end
    for (int l = 0; l < NL; l++) run_layer(l);
    chk(n_saved > 0, "zero skipping never saved a bit");
    chk(n_pruned_frag > 0 && n_neg_frag > 0, "no pruned or no negative fragment");
    $display("outputs equal to the ideal dot product: %0d of %0d; input bits skipped: %0d of %0d",
             n_ideal, n_outs, n_saved, n_bits);
    $display("pruned fragments %0d, negative fragments %0d", n_pruned_frag, n_neg_frag);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
