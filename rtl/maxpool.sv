// maxpool: max of WIN activations read one per clock from the eDRAM (2x2
// pooling takes the maximum of 4 values, as in the paper). 'first' marks the
// first value of a window; 'done' pulses in the clock after the WIN-th value,
// with the window maximum on 'max'. Values are unsigned (they follow ReLU).
module maxpool #(
  parameter int W   = 16,
  parameter int WIN = 4
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          valid,
  input  logic          first,
  input  logic [W-1:0]  x,
  output logic [W-1:0]  max,
  output logic          done
);
  logic [$clog2(WIN+1)-1:0] n;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      max <= '0; n <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (valid) begin
        if (first) begin
          max <= x; n <= 1;
          done <= (WIN == 1);
        end else begin
          if (x > max) max <= x;
          n <= n + 1'b1;
          done <= (n == $clog2(WIN+1)'(WIN - 1));
        end
      end
    end
  end
endmodule
