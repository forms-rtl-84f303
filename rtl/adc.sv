// adc: behavioural model of one 4-bit ADC shared by NCOL crossbar columns.
// Analog in the real chip; this model gives its digital equivalent. Each clock
// it converts the held current of the column chosen by 'sel' and presents the
// code one clock later. Column sums above the top code saturate at
// 2^ADC_BITS-1: with 8 rows of 2-bit cells a column can reach 24 levels while
// the converter has 16, and how that case is handled is this design's choice.
// The clock is the ADC sample clock (2.1 GHz in the reference design), so the
// ADC visits all NCOL columns in one input-bit slot of NCOL clocks.
module adc #(
  parameter int NCOL     = 32,
  parameter int CUR_W    = 5,
  parameter int ADC_BITS = 4
) (
  input  logic                    clk,
  input  logic [CUR_W-1:0]        col_held [NCOL],
  input  logic [$clog2(NCOL)-1:0] sel,
  output logic [ADC_BITS-1:0]     code
);
  localparam int MAXC = (1 << ADC_BITS) - 1;

  always_ff @(posedge clk) begin
    if (int'(col_held[sel]) > MAXC) code <= ADC_BITS'(MAXC);
    else                            code <= ADC_BITS'(col_held[sel]);
  end
endmodule
