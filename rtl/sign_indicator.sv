// sign_indicator: one sign bit per fragment, the digital stand-in for the
// array of 1R cells that holds the polarity of each fragment. A fragment is
// one weight column of one sub-array row (8 weights that all share a sign);
// a 1 marks a negative fragment, so its column results are subtracted.
// Written one sub-array row (NWCOL bits) per clock; read one sub-array row
// combinationally, as the accumulation blocks need the sign of the row whose
// ADC codes are arriving. Reset clears all signs (all positive).
module sign_indicator #(
  parameter int NSUB  = 16,
  parameter int NWCOL = 32
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    wr_en,
  input  logic [$clog2(NSUB)-1:0] wr_sub,
  input  logic [NWCOL-1:0]        wr_bits,
  input  logic [$clog2(NSUB)-1:0] rd_sub,
  output logic [NWCOL-1:0]        rd_bits
);
  logic [NWCOL-1:0] sgn [NSUB];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NSUB; i++) sgn[i] <= '0;
    end else if (wr_en) begin
      sgn[wr_sub] <= wr_bits;
    end
  end

  assign rd_bits = sgn[rd_sub];
endmodule
