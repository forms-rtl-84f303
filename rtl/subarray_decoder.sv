// subarray_decoder: selects the sub-array row whose wordlines are driven.
// A fragment-sized group of rows is active at a time; the decoder turns the
// binary index from the controller into a one-hot enable, all zero when 'en'
// is low. The binary-to-one-hot form is this design's choice; the paper only
// names the block. Purely combinational.
module subarray_decoder #(
  parameter int NSUB = 16
) (
  input  logic                    en,
  input  logic [$clog2(NSUB)-1:0] sel,
  output logic [NSUB-1:0]         onehot
);
  always_comb begin
    onehot = '0;
    if (en) onehot[sel] = 1'b1;
  end
endmodule
