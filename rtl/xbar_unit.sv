// xbar_unit: one crossbar with everything around it, one plane of an MCU.
// It computes, for one vector of ROWS 16-bit inputs, the signed sum
//   psum[c] = sum over sub-array rows g of (-1)^sign[g][c/CELLS] *
//             sum over input bits b of 2^b * ADC(g, c, b)
// where ADC(g, c, b) is the 4-bit code of column c when bit b of the 8 inputs
// of sub-array row g drives the wordlines. With exact (unsaturated) codes this
// is the dot product of the inputs with the cell levels of column c, each
// fragment taken with its stored sign.
// Parts: ROWS input shift registers (parallel in, serial out, LSB first), one
// zero-skipping AND per fragment of FRAG registers, the sub-array decoder, the
// crossbar model with its sample-and-hold, NADC ADCs each serving COLS/NADC
// adjacent columns, one accumulation block per ADC, the sign indicator and the
// controller. The composition follows the MCU plane drawing of the paper; see
// xbar_ctrl for timing. Cells and signs are programmed through the wr ports
// while idle. in_vec is sampled on the 'start' clock.
module xbar_unit
  import forms_pkg::*;
#(
  parameter int ROWS = XB_ROWS,
  parameter int COLS = XB_COLS
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          start,
  input  logic                          skip_en,
  input  logic [IN_BITS-1:0]            in_vec [ROWS],
  // crossbar programming: one row of cell levels
  input  logic                          xb_wr_en,
  input  logic [$clog2(ROWS)-1:0]       xb_wr_row,
  input  logic [COLS*CELL_BITS-1:0]     xb_wr_data,
  // sign indicator programming: one sub-array row of fragment signs
  input  logic                          sg_wr_en,
  input  logic [$clog2(ROWS/FRAG)-1:0]  sg_wr_sub,
  input  logic [COLS/CELLS-1:0]         sg_wr_bits,
  output logic signed [ACC_W-1:0]       psum [COLS],
  output logic                          busy,
  output logic                          done,
  output logic [15:0]                   bit_slots
);
  localparam int NS  = ROWS / FRAG;
  localparam int NCA = COLS / NADC;        // columns per ADC
  localparam int NWC = COLS / CELLS;       // weight columns

  logic                 load, clear, sample, drive_en, acc_valid;
  logic [NS-1:0]        shift_row, frag_done, sub_en;
  logic [$clog2(NS)-1:0]  drive_sub, acc_sub;
  logic [$clog2(NCA)-1:0] adc_sel, acc_col;
  logic [$clog2(IN_BITS)-1:0] acc_bit;
  logic [ROWS-1:0]      wl, reg_zero;
  logic [CUR_W-1:0]     held [COLS];
  logic [NWC-1:0]       sgn_row;

  // Input shift registers and zero-skipping logic, one group per fragment.
  for (genvar r = 0; r < ROWS; r++) begin : g_isr
    input_shift_reg #(.IN_BITS(IN_BITS)) u_isr (
      .clk, .rst_n, .load, .din(in_vec[r]), .shift(shift_row[r / FRAG]),
      .bit_out(wl[r]), .is_zero(reg_zero[r]));
  end
  for (genvar g = 0; g < NS; g++) begin : g_zs
    zero_skip_logic #(.FRAG(FRAG)) u_zs (
      .reg_zero(reg_zero[g*FRAG +: FRAG]), .frag_done(frag_done[g]));
  end

  xbar_ctrl #(.NSUB(NS), .IN_BITS(IN_BITS), .NCOL(NCA)) u_ctrl (
    .clk, .rst_n, .start, .skip_en, .frag_done, .load, .clear,
    .shift(shift_row), .drive_en, .drive_sub, .sample, .adc_sel,
    .acc_valid, .acc_col, .acc_bit, .acc_sub, .busy, .done, .bit_slots);

  subarray_decoder #(.NSUB(NS)) u_dec (.en(drive_en), .sel(drive_sub), .onehot(sub_en));

  crossbar_array #(.ROWS(ROWS), .COLS(COLS), .CELL_BITS(CELL_BITS), .FRAG(FRAG), .CUR_W(CUR_W)) u_xb (
    .clk, .wr_en(xb_wr_en), .wr_row(xb_wr_row), .wr_data(xb_wr_data),
    .wl, .sub_en, .sample, .col_held(held));

  sign_indicator #(.NSUB(NS), .NWCOL(NWC)) u_sign (
    .clk, .rst_n, .wr_en(sg_wr_en), .wr_sub(sg_wr_sub), .wr_bits(sg_wr_bits),
    .rd_sub(acc_sub), .rd_bits(sgn_row));

  for (genvar a = 0; a < NADC; a++) begin : g_adc
    logic [CUR_W-1:0]    held_a [NCA];
    logic [ADC_BITS-1:0] code;
    logic                neg;
    logic signed [ACC_W-1:0] acc [NCA];
    for (genvar c = 0; c < NCA; c++) begin : g_c
      assign held_a[c] = held[a*NCA + c];
      assign psum[a*NCA + c] = acc[c];
    end
    adc #(.NCOL(NCA), .CUR_W(CUR_W), .ADC_BITS(ADC_BITS)) u_adc (
      .clk, .col_held(held_a), .sel(adc_sel), .code);
    // The CELLS columns of one weight share the fragment's sign bit.
    assign neg = sgn_row[(a*NCA + int'(acc_col)) / CELLS];
    acc_block #(.NCOL(NCA), .ADC_BITS(ADC_BITS), .IN_BITS(IN_BITS), .ACC_W(ACC_W)) u_acc (
      .clk, .rst_n, .clear, .valid(acc_valid), .col(acc_col), .code,
      .bitpos(acc_bit), .neg, .acc);
  end
endmodule
