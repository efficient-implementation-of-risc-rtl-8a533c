// tb_cs_counter: self-checking test of the carry-save population counter.
//
// Checks that the two rows add up (mod 2^W) to the number of ones, for every
// 8-bit input (the size of the 8-input counting example), every 11-bit
// input (an odd size, which exercises the full-adder leaves) and random
// 32-bit inputs, plus the all-zero and all-one corners. The reference is
// $countones.
module tb_cs_counter;
  localparam int unsigned W8 = 4, W32 = 6;
  logic clk = 0;
  int   checks = 0, failures = 0, cycles = 0;

  logic [7:0]     b8;
  logic [W8-1:0]  a8, c8;
  logic [10:0]    b11;
  logic [3:0]     a11, c11;
  logic [31:0]    b32;
  logic [W32-1:0] a32, c32;

  cs_counter #(.N(8))  dut8  (.bits(b8),  .row_a(a8),  .row_b(c8));
  cs_counter #(.N(11)) dut11 (.bits(b11), .row_a(a11), .row_b(c11));
  cs_counter           dut32 (.bits(b32), .row_a(a32), .row_b(c32));

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;
  initial begin
    wait (cycles == 100000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input int got, input int exp, input string what);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    for (int v = 0; v < 256; v++) begin
      b8 = 8'(v);
      #1;
      check(int'(W8'(a8 + c8)), $countones(b8), "N=8");
    end
    for (int v = 0; v < 2048; v++) begin
      b11 = 11'(v);
      #1;
      check(int'(4'(a11 + c11)), $countones(b11), "N=11");
    end
    for (int t = 0; t < 3000; t++) begin
      b32 = $urandom;
      if (t == 0) b32 = '0;
      if (t == 1) b32 = '1;
      if (t % 3 == 2) b32 = b32 & $urandom & $urandom;
      #1;
      check(int'(W32'(a32 + c32)), $countones(b32), "N=32");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
