// acc_block: accumulation block behind one ADC. For each code it receives it
// shifts the code left by the input bit position the code belongs to, then a
// mux picks the shifted value or its bitwise inverse according to the
// fragment's sign bit, and the adder adds it, with carry-in equal to the sign
// bit (so inverse + 1 is the two's complement), into the register of the
// column the code came from. The mux/inverter/adder/register chain and the
// sign-controlled add/subtract follow the paper; the carry-in, the placement
// of the bit shift before the mux and one register per column served by the
// shared ADC are this design's. 'clear' zeroes all registers. One code per
// clock; the register updates on the clock edge after 'valid'.
module acc_block #(
  parameter int NCOL     = 32,
  parameter int ADC_BITS = 4,
  parameter int IN_BITS  = 16,
  parameter int ACC_W    = 24
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        clear,
  input  logic                        valid,
  input  logic [$clog2(NCOL)-1:0]     col,
  input  logic [ADC_BITS-1:0]         code,
  input  logic [$clog2(IN_BITS)-1:0]  bitpos,
  input  logic                        neg,
  output logic signed [ACC_W-1:0]     acc [NCOL]
);
  logic [ACC_W-1:0] shifted, muxed, sum;

  always_comb begin
    shifted = ACC_W'(code) << bitpos;
    muxed   = neg ? ~shifted : shifted;
    sum     = acc[col] + muxed + ACC_W'(neg);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NCOL; i++) acc[i] <= '0;
    end else if (clear) begin
      for (int i = 0; i < NCOL; i++) acc[i] <= '0;
    end else if (valid) begin
      acc[col] <= sum;
    end
  end
endmodule
