// tb_prefix_count: self-checking test of the two prefix sums.
//
// First the 8-element worked example: mask 1 0 0 1 1 0 1 1 (element 7 down
// to 0) must give ones = 1 1 1 2 3 3 4 5 and zeros = 3 3 2 1 1 1 0 0. Then
// random 32-bit masks against counts taken with $countones.
module tb_prefix_count;
  logic clk = 0;
  int   checks = 0, failures = 0, cycles = 0;

  logic [7:0]           m8;
  logic [7:0][3:0]      o8a, o8b, z8a, z8b;
  logic [31:0]          m32;
  logic [31:0][5:0]     o32a, o32b, z32a, z32b;

  prefix_count #(.N(8)) dut8 (.mask(m8), .ones_a(o8a), .ones_b(o8b), .zeros_a(z8a), .zeros_b(z8b));
  prefix_count dut32 (.mask(m32), .ones_a(o32a), .ones_b(o32b), .zeros_a(z32a), .zeros_b(z32b));

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;
  initial begin
    wait (cycles == 100000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input int got, input int exp, input string what, input int pos);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s[%0d]: got %0d expected %0d", what, pos, got, exp);
    end
  endtask

  // Example values listed from element 7 down to element 0.
  int ex_ones[8]  = '{1, 1, 1, 2, 3, 3, 4, 5};
  int ex_zeros[8] = '{3, 3, 2, 1, 1, 1, 0, 0};

  initial begin
    m8 = 8'b1001_1011;
    #1;
    for (int i = 0; i < 8; i++) begin
      check(int'(4'(o8a[i] + o8b[i])), ex_ones[7-i], "example ones", i);
      check(int'(4'(z8a[i] + z8b[i])), ex_zeros[7-i], "example zeros", i);
    end
    for (int t = 0; t < 400; t++) begin
      m32 = $urandom;
      if (t == 0) m32 = '0;
      if (t == 1) m32 = '1;
      #1;
      for (int i = 0; i < 32; i++) begin
        logic [31:0] hi, lo;
        hi = m32 >> i;               // mask[31:i]
        lo = ~m32 << (31 - i);       // inverted mask[i:0]
        check(int'(6'(o32a[i] + o32b[i])), $countones(hi), "ones", i);
        check(int'(6'(z32a[i] + z32b[i])), $countones(lo), "zeros", i);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
