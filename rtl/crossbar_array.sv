// crossbar_array: behavioural model of one 128x128 ReRAM crossbar of 2-bit
// cells with its per-column sample-and-hold. It is not synthesizable logic in
// the real chip (analog array); this model gives its digital equivalent.
// The array is split into NSUB = ROWS/FRAG sub-array rows; only rows of
// enabled sub-arrays conduct. With the 1-bit DAC outputs on the wordlines,
// each column's current is the sum over conducting rows of wordline bit times
// the cell's conductance level (0..3); the model computes that exact integer
// (no noise, no IR drop). On 'sample' the sums of all columns are captured in
// the hold registers read by the ADCs, so the array can take the next input
// bit while the ADCs convert the previous one.
// Programming (the global driver's job) writes one full row of cell levels per
// clock; that port is this design's. Level 0 is the highest resistance state.
module crossbar_array #(
  parameter int ROWS      = 128,
  parameter int COLS      = 128,
  parameter int CELL_BITS = 2,
  parameter int FRAG      = 8,
  parameter int CUR_W     = $clog2(FRAG * ((1 << CELL_BITS) - 1) + 1)
) (
  input  logic                        clk,
  input  logic                        wr_en,
  input  logic [$clog2(ROWS)-1:0]     wr_row,
  input  logic [COLS*CELL_BITS-1:0]   wr_data,   // cell c in bits [c*CELL_BITS +: CELL_BITS]
  input  logic [ROWS-1:0]             wl,        // wordline bits from the DACs
  input  logic [ROWS/FRAG-1:0]        sub_en,    // sub-array row enables
  input  logic                        sample,    // sample-and-hold strobe
  output logic [CUR_W-1:0]            col_held [COLS]
);
  localparam int NSUB = ROWS / FRAG;

  logic [CELL_BITS-1:0] lvl [ROWS][COLS];
  logic [CUR_W-1:0]     held [COLS];

  always_ff @(posedge clk) begin
    if (wr_en)
      for (int c = 0; c < COLS; c++)
        lvl[wr_row][c] <= wr_data[c*CELL_BITS +: CELL_BITS];
  end

  // Column currents, only evaluated at the sampling edge.
  always_ff @(posedge clk) begin
    if (sample) begin
      for (int c = 0; c < COLS; c++) begin
        int unsigned s;
        s = 0;
        for (int g = 0; g < NSUB; g++)
          if (sub_en[g])
            for (int r = g * FRAG; r < (g + 1) * FRAG; r++)
              if (wl[r]) s += int'(lvl[r][c]);
        held[c] <= CUR_W'(s);
      end
    end
  end

  assign col_held = held;
endmodule
