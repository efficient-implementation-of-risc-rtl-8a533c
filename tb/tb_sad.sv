// tb_sad: exhaustive test of the sum-addressed decoder (N = 32, W = 6).
//
// For every a, b and carry-in, the output must be the one-hot code of
// (a + b + cin) mod 64 when that sum is below 32, and all zeros otherwise.
module tb_sad;
  localparam int unsigned N = 32, W = 6;
  logic clk = 0;
  int   checks = 0, failures = 0, cycles = 0;
  logic [W-1:0] a, b;
  logic         cin;
  logic [N-1:0] oh, exp;

  sad dut (.a(a), .b(b), .cin(cin), .onehot(oh));

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;
  initial begin
    wait (cycles == 100000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int ia = 0; ia < 64; ia++)
      for (int ib = 0; ib < 64; ib++)
        for (int ic = 0; ic < 2; ic++) begin
          int sum;
          a = W'(ia); b = W'(ib); cin = ic[0];
          sum = (ia + ib + ic) % 64;
          exp = (sum < N) ? (N'(1) << sum) : '0;
          #1;
          checks++;
          if (oh != exp) begin
            failures++;
            if (failures < 10) $display("FAIL a=%0d b=%0d cin=%0d got %h exp %h", ia, ib, ic, oh, exp);
          end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
