// edram: the tile's activation buffer, written as a synchronous array. It
// holds BYTES bytes in rows of ROW_BITS bits, the width of the tile's data
// path, with a write enable per 16-bit word. Reads return the addressed row
// one clock after the request. Size (128 KB) and width (512 bits) follow the
// paper; single-port operation and the one-clock latency are this design's,
// and eDRAM refresh is not modelled.
module edram #(
  parameter int BYTES    = 128 * 1024,
  parameter int ROW_BITS = 512,
  parameter int WORD     = 16
) (
  input  logic                                   clk,
  input  logic                                   req,
  input  logic [$clog2(BYTES*8/ROW_BITS)-1:0]    addr,
  input  logic [ROW_BITS/WORD-1:0]               we,
  input  logic [ROW_BITS-1:0]                    wdata,
  output logic [ROW_BITS-1:0]                    rdata
);
  localparam int DEPTH = BYTES * 8 / ROW_BITS;
  localparam int NW    = ROW_BITS / WORD;
  logic [ROW_BITS-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (req) begin
      for (int w = 0; w < NW; w++)
        if (we[w]) mem[addr][w*WORD +: WORD] <= wdata[w*WORD +: WORD];
      rdata <= mem[addr];
    end
  end
endmodule
