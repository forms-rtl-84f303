// relu: activation function of the digital unit. Negative sums become zero;
// positive sums are shifted right by 'shamt' and saturated to the unsigned
// OUT_BITS-bit activation format that the next layer feeds bit-serially.
// ReLU is the paper's activation; the requantising shift and the saturation
// are this design's, since the paper does not say how wide sums are brought
// back to 16 bits. Purely combinational.
module relu #(
  parameter int IN_W     = 32,
  parameter int OUT_BITS = 16
) (
  input  logic signed [IN_W-1:0]  x,
  input  logic [4:0]              shamt,
  output logic [OUT_BITS-1:0]     y
);
  logic signed [IN_W-1:0] s;
  always_comb begin
    s = x >>> shamt;
    if (x[IN_W-1])                              y = '0;
    else if (s > IN_W'((1 << OUT_BITS) - 1))    y = '1;
    else                                        y = s[OUT_BITS-1:0];
  end
endmodule
