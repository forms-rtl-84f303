// input_shift_reg: parallel-in, serial-out register holding one activation.
// Loaded in parallel, it presents its least significant bit to the 1-bit DAC
// of its crossbar row and shifts right by one on each 'shift'. 'is_zero' is the
// NOR of all remaining bits: it is 1 once only zero bits are left, which is the
// per-register term of the zero-skipping logic. Feeding LSB first is this
// design's reading of the skipping rule (the upper zero bits are the ones left
// out); the NOR per register follows the paper. Load has priority over shift.
// Timing: one register stage, outputs follow the register combinationally.
module input_shift_reg #(
  parameter int IN_BITS = 16
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               load,
  input  logic [IN_BITS-1:0] din,
  input  logic               shift,
  output logic               bit_out,
  output logic               is_zero
);
  logic [IN_BITS-1:0] q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      q <= '0;
    else if (load)   q <= din;
    else if (shift)  q <= q >> 1;
  end

  assign bit_out = q[0];
  assign is_zero = ~|q;
endmodule
