// tb_shift_add: random groups of 1..4 pieces of four signed slice sums; the
// result appearing two clocks after the 'last' piece must equal
// sum over pieces of sum_s slice[s]*4^s. Checks the latency as well.
module tb_shift_add;
  logic clk = 0, rst_n = 0, valid = 0, first = 0, last = 0;
  logic signed [23:0] slice_in [4];
  logic out_valid; logic signed [31:0] sum;
  int checks = 0, failures = 0;
  shift_add #(.CELLS(4), .CELL_BITS(2), .ACC_W(24), .OUT_W(32)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  longint q [$];
  int lat [$];
  int cyc = 0;
  always @(posedge clk) begin
    cyc++;
    if (out_valid && rst_n) begin
      checks++;
      if (q.size() == 0 || longint'(sum) != q[0] || cyc - lat[0] != 2) begin
        failures++; $display("FAIL sum %0d exp %0d lat %0d", sum, q.size() ? q[0] : 0, cyc - (lat.size() ? lat[0] : 0));
      end
      if (q.size()) begin void'(q.pop_front()); void'(lat.pop_front()); end
    end
  end
  initial begin
    longint acc; int n;
    for (int s = 0; s < 4; s++) slice_in[s] = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      n = $urandom_range(1, 4); acc = 0;
      for (int p = 0; p < n; p++) begin
        for (int s = 0; s < 4; s++) begin
          slice_in[s] = 24'($signed($urandom_range(0, 400000)) - 200000);
          acc += longint'(slice_in[s]) <<< (2 * s);
        end
        valid = 1; first = (p == 0); last = (p == n - 1);
        if (last) begin q.push_back(acc); lat.push_back(cyc + 1); end
        @(negedge clk);
        if ($urandom_range(0, 3) == 0) begin valid = 0; @(negedge clk); end
      end
    end
    valid = 0; repeat (5) @(negedge clk);
    checks++; if (q.size() != 0) begin failures++; $display("FAIL %0d results missing", q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
