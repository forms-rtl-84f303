// shift_add: shift-and-add unit of the digital unit. An 8-bit weight is held
// in CELLS adjacent 2-bit cell columns, so the signed partial sums of those
// columns are combined as sum_s slice[s] * 2^(CELL_BITS*s) (stage 1, slice 0
// least significant). When a weight column is longer than one crossbar, the
// crossbars holding its pieces produce partial outputs that stage 2 adds up:
// 'first' starts a new sum, 'last' marks its final piece. Both stages are
// registered, matching the two shift-and-add cycles of the reference
// pipeline; which work goes to which stage is this design's choice.
// Timing: inputs with 'valid' at clock t; with 'last', 'out_valid' and 'sum'
// appear at clock t+2. One input per clock.
module shift_add #(
  parameter int CELLS     = 4,
  parameter int CELL_BITS = 2,
  parameter int ACC_W     = 24,
  parameter int OUT_W     = 32
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    valid,
  input  logic                    first,
  input  logic                    last,
  input  logic signed [ACC_W-1:0] slice_in [CELLS],
  output logic                    out_valid,
  output logic signed [OUT_W-1:0] sum
);
  logic signed [OUT_W-1:0] merged, merged_q, acc_q;
  logic                    v1, f1, l1;

  always_comb begin
    merged = '0;
    for (int s = 0; s < CELLS; s++)
      merged += OUT_W'(slice_in[s]) <<< (CELL_BITS * s);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      merged_q <= '0; v1 <= 1'b0; f1 <= 1'b0; l1 <= 1'b0;
      acc_q <= '0; out_valid <= 1'b0;
    end else begin
      v1 <= valid; f1 <= first; l1 <= last;
      if (valid) merged_q <= merged;
      if (v1) acc_q <= f1 ? merged_q : acc_q + merged_q;
      out_valid <= v1 && l1;
    end
  end
  assign sum = acc_q;
endmodule
