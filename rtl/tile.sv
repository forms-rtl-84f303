// tile: one tile of the fine-grained polarized ReRAM accelerator, the top of
// this RTL. It holds the eDRAM activation buffer, the input buffers of its
// crossbars, NMCU MAC units of NXB_MCU crossbars each, and the digital unit
// (shift-and-add, ReLU, output register, max pooling), run by tile_ctrl.
// One operation ('start' with a layer configuration 'cfg') multiplies the
// input activations stored in eDRAM by the signed 8-bit weights programmed
// into the crossbars and sign indicators, and writes the ReLU outputs (and
// optionally their 4-to-1 max pool) back into eDRAM; see tile_ctrl for the
// mapping of inputs and outputs. All MCUs start together; crossbars beyond
// cfg.n_xb are fed zeros so that they end after the first slot check.
// Ports: the ext_* port gives access to the eDRAM while the tile is idle, and
// the prog_* ports program crossbar cells (one row of 128 2-bit levels) and
// fragment signs (one sub-array row of 32 bits) of crossbar prog_xb. They take
// the place of the mesh network and chip controller, which are not part of
// this RTL. The tile contents (12 MCUs of 8 crossbars, 128 KB eDRAM, 512-bit
// rows) follow the paper; the port set is this design's.
module tile
  import forms_pkg::*;
#(
  parameter int NM  = NMCU,
  parameter int NXB = NXB_MCU
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          start,
  input  layer_cfg_t                    cfg,
  output logic                          busy,
  output logic                          done,
  // eDRAM access while idle
  input  logic                          ext_req,
  input  logic [$clog2(EDRAM_BYTES*8/ROW_BITS)-1:0] ext_addr,
  input  logic [WORDS_ROW-1:0]          ext_we,
  input  logic [ROW_BITS-1:0]           ext_wdata,
  output logic [ROW_BITS-1:0]           ext_rdata,
  // crossbar and sign-indicator programming while idle
  input  logic [$clog2(NM*NXB)-1:0]     prog_xb,
  input  logic                          prog_xb_wr,
  input  logic [$clog2(XB_ROWS)-1:0]    prog_row,
  input  logic [XB_COLS*CELL_BITS-1:0]  prog_levels,
  input  logic                          prog_sg_wr,
  input  logic [$clog2(NSUB)-1:0]       prog_sub,
  input  logic [NWCOL-1:0]              prog_signs,
  // counters of the last operation
  output logic [15:0]                   bit_slots [NM*NXB],
  output logic [15:0]                   n_outputs,
  output logic [15:0]                   n_pooled
);
  localparam int NXT = NM * NXB;
  localparam int AW  = $clog2(EDRAM_BYTES * 8 / ROW_BITS);

  // ---------------------------------------------------------------- control
  logic                   ed_req_c, ed_wr_c, ib_we, mcu_start;
  logic [15:0]            ed_word_addr, du_addr, n_out_c, n_pool_c;
  logic [$clog2(NXT)-1:0] ib_xb, du_xb;
  logic [1:0]             ib_part;
  logic                   du_valid, du_first, du_last, mp_valid, mp_first;
  logic [$clog2(NWCOL)-1:0] du_wcol;
  logic [4:0]             mp_word;
  logic [NM-1:0]          mcu_done;

  tile_ctrl #(.NXT(NXT), .NM(NM)) u_ctrl (
    .clk, .rst_n, .start, .cfg, .mcu_done,
    .ed_req(ed_req_c), .ed_word_addr, .ed_wr(ed_wr_c),
    .ib_we_d(ib_we), .ib_xb_d(ib_xb), .ib_part_d(ib_part),
    .mcu_start, .du_valid, .du_first, .du_last, .du_xb, .du_wcol, .du_addr,
    .mp_valid_d(mp_valid), .mp_first_d(mp_first), .mp_word_d(mp_word),
    .busy, .done, .n_outputs(n_out_c), .n_pooled(n_pool_c));
  assign n_outputs = n_out_c;
  assign n_pooled  = n_pool_c;

  // ------------------------------------------------------------------ eDRAM
  logic                 ed_req;
  logic [AW-1:0]        ed_addr;
  logic [WORDS_ROW-1:0] ed_we;
  logic [ROW_BITS-1:0]  ed_wdata, ed_rdata;
  logic                 ow_pend;          // output register waiting to be written
  logic [15:0]          ow_addr;
  logic [IN_BITS-1:0]   out_reg, pool_max;

  always_comb begin
    if (ow_pend) begin                    // digital-unit output write
      ed_req = 1'b1; ed_addr = AW'(ow_addr >> 5);
      ed_we = '0; ed_we[ow_addr[4:0]] = 1'b1;
      ed_wdata = {WORDS_ROW{out_reg}};
    end else if (ed_req_c) begin          // controller reads, pooled writes
      ed_req = 1'b1; ed_addr = AW'(ed_word_addr >> 5);
      ed_we = '0;
      if (ed_wr_c) ed_we[ed_word_addr[4:0]] = 1'b1;
      ed_wdata = {WORDS_ROW{pool_max}};
    end else begin                        // external access while idle
      ed_req = ext_req && !busy; ed_addr = ext_addr; ed_we = ext_we;
      ed_wdata = ext_wdata;
    end
  end

  edram #(.BYTES(EDRAM_BYTES), .ROW_BITS(ROW_BITS), .WORD(IN_BITS)) u_edram (
    .clk, .req(ed_req), .addr(ed_addr), .we(ed_we), .wdata(ed_wdata), .rdata(ed_rdata));
  assign ext_rdata = ed_rdata;

  // ----------------------------------------------------------- input buffers
  logic [IN_BITS-1:0] in_buf [NXT][XB_ROWS];
  always_ff @(posedge clk) begin
    if (ib_we)
      for (int w = 0; w < WORDS_ROW; w++)
        in_buf[ib_xb][int'(ib_part) * WORDS_ROW + w] <= ed_rdata[w*IN_BITS +: IN_BITS];
  end

  // -------------------------------------------------------------------- MCUs
  logic signed [ACC_W-1:0] psum [NXT][XB_COLS];
  for (genvar m = 0; m < NM; m++) begin : g_mcu
    logic [IN_BITS-1:0]      mvec [NXB][XB_ROWS];
    logic signed [ACC_W-1:0] mps  [NXB][XB_COLS];
    logic [15:0]             mbs  [NXB];
    for (genvar x = 0; x < NXB; x++) begin : g_x
      // crossbars beyond n_xb see all-zero inputs, so stale buffer contents
      // cannot lengthen the operation (with zero skipping they finish at once)
      for (genvar r = 0; r < XB_ROWS; r++) begin : g_r
        assign mvec[x][r] = (m*NXB + x < int'(cfg.n_xb)) ? in_buf[m*NXB + x][r] : '0;
      end
      assign psum[m*NXB + x] = mps[x];
      assign bit_slots[m*NXB + x] = mbs[x];
    end
    mcu #(.NXB(NXB)) u_mcu (
      .clk, .rst_n, .start(mcu_start), .skip_en(cfg.skip_en), .in_vec(mvec),
      .wr_xb($clog2(NXB)'(prog_xb % NXB)),
      .xb_wr_en(prog_xb_wr && !busy && (int'(prog_xb) / NXB == m)),
      .xb_wr_row(prog_row), .xb_wr_data(prog_levels),
      .sg_wr_en(prog_sg_wr && !busy && (int'(prog_xb) / NXB == m)),
      .sg_wr_sub(prog_sub), .sg_wr_bits(prog_signs),
      .psum(mps), .busy(), .done(mcu_done[m]), .bit_slots(mbs));
  end

  // ------------------------------------------------------------ digital unit
  logic signed [ACC_W-1:0] slices [CELLS];
  always_comb
    for (int s = 0; s < CELLS; s++)
      slices[s] = psum[du_xb][int'(du_wcol) * CELLS + s];

  logic                    sa_valid;
  logic signed [OUT_W-1:0] sa_sum;
  logic [15:0]             addr_d1, addr_d2;
  logic [IN_BITS-1:0]      act;

  shift_add #(.CELLS(CELLS), .CELL_BITS(CELL_BITS), .ACC_W(ACC_W), .OUT_W(OUT_W)) u_sa (
    .clk, .rst_n, .valid(du_valid), .first(du_first), .last(du_last),
    .slice_in(slices), .out_valid(sa_valid), .sum(sa_sum));

  relu #(.IN_W(OUT_W), .OUT_BITS(IN_BITS)) u_relu (.x(sa_sum), .shamt(cfg.shamt), .y(act));

  // Output register: holds one activation until it is written to eDRAM.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      addr_d1 <= '0; addr_d2 <= '0; ow_pend <= 1'b0; ow_addr <= '0; out_reg <= '0;
    end else begin
      addr_d1 <= du_addr;
      addr_d2 <= addr_d1;
      ow_pend <= sa_valid;
      if (sa_valid) begin
        out_reg <= act;
        ow_addr <= addr_d2;
      end
    end
  end

  maxpool #(.W(IN_BITS), .WIN(4)) u_pool (
    .clk, .rst_n, .valid(mp_valid), .first(mp_first),
    .x(ed_rdata[int'(mp_word) * IN_BITS +: IN_BITS]), .max(pool_max), .done());
endmodule
