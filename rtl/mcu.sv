// mcu: MAC unit made of NXB crossbar units that work in parallel, each on its
// own 128-input vector. The accumulation registers of the crossbar units are
// the MCU's output registers and are read by the tile's digital unit through
// 'psum'. All crossbars start together on 'start'; each one's finish time
// depends on how many input bits its fragments need, so 'done' pulses once
// the last of them has finished. Programming ports address one crossbar with
// 'wr_xb'. Eight crossbars per MCU and four ADCs per crossbar follow the paper;
// the common start and the done rule are this design's.
module mcu
  import forms_pkg::*;
#(
  parameter int NXB = NXB_MCU
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          start,
  input  logic                          skip_en,
  input  logic [IN_BITS-1:0]            in_vec [NXB][XB_ROWS],
  input  logic [$clog2(NXB)-1:0]        wr_xb,
  input  logic                          xb_wr_en,
  input  logic [$clog2(XB_ROWS)-1:0]    xb_wr_row,
  input  logic [XB_COLS*CELL_BITS-1:0]  xb_wr_data,
  input  logic                          sg_wr_en,
  input  logic [$clog2(NSUB)-1:0]       sg_wr_sub,
  input  logic [NWCOL-1:0]              sg_wr_bits,
  output logic signed [ACC_W-1:0]       psum [NXB][XB_COLS],
  output logic                          busy,
  output logic                          done,
  output logic [15:0]                   bit_slots [NXB]
);
  logic [NXB-1:0] xb_busy, xb_done, fin;

  for (genvar x = 0; x < NXB; x++) begin : g_xb
    xbar_unit u_xb (
      .clk, .rst_n, .start, .skip_en, .in_vec(in_vec[x]),
      .xb_wr_en(xb_wr_en && (wr_xb == x)), .xb_wr_row, .xb_wr_data,
      .sg_wr_en(sg_wr_en && (wr_xb == x)), .sg_wr_sub, .sg_wr_bits,
      .psum(psum[x]), .busy(xb_busy[x]), .done(xb_done[x]), .bit_slots(bit_slots[x]));
  end

  // Remember which crossbars have finished since the last start.
  logic run;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fin <= '0; run <= 1'b0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start) begin
        fin <= '0; run <= 1'b1;
      end else if (run) begin
        if (&(fin | xb_done)) begin
          run <= 1'b0; done <= 1'b1;
        end
        fin <= fin | xb_done;
      end
    end
  end
  assign busy = run | (|xb_busy);
endmodule
