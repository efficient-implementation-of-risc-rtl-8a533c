// tb_dest_gen: self-checking test of the per-input destination logic.
//
// 8 elements: the worked vcompress example (mask 1 0 0 1 1 0 1 1 gives
// destinations 4 7 6 3 2 5 1 0, element 7 down to 0), a slide up by 1 and a
// slide down by 2. 32 elements: random masks and offsets. The reference
// computes each destination by walking the mask (selected elements packed
// at the bottom in order, the others above them in order) or by adding the
// offset, and expects no destination outside 0..N-1.
module tb_dest_gen;
  logic clk = 0;
  int   checks = 0, failures = 0, cycles = 0;

  logic            ms8, sd8, ms32, sd32;
  logic [3:0]      off8;
  logic [5:0]      off32;
  logic [7:0]      m8;
  logic [31:0]     m32;
  logic [7:0][7:0]   col8;
  logic [31:0][31:0] col32;

  dest_gen #(.N(8)) dut8 (.mode_slide(ms8), .slide_down(sd8), .offset(off8), .mask(m8), .dest_col(col8));
  dest_gen dut32 (.mode_slide(ms32), .slide_down(sd32), .offset(off32), .mask(m32), .dest_col(col32));

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;
  initial begin
    wait (cycles == 100000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Expected one-hot column from a destination (-1: none).
  function automatic logic [31:0] oh(int d, int n);
    return (d >= 0 && d < n) ? (32'd1 << d) : 32'd0;
  endfunction

  task automatic check(input logic [31:0] got, input logic [31:0] exp, input string what, input int i);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s input %0d: got %h expected %h", what, i, got, exp);
    end
  endtask

  int ex_dest[8] = '{4, 7, 6, 3, 2, 5, 1, 0};  // element 7 down to 0

  initial begin
    // Worked vcompress example.
    ms8 = 0; sd8 = 0; off8 = 0; m8 = 8'b1001_1011;
    #1;
    for (int i = 0; i < 8; i++) check(32'(col8[i]), oh(ex_dest[7-i], 8), "compress example", i);
    // Slide up by 1 and down by 2.
    ms8 = 1; sd8 = 0; off8 = 1;
    #1;
    for (int i = 0; i < 8; i++) check(32'(col8[i]), oh(i + 1, 8), "slideup 1", i);
    sd8 = 1; off8 = 2;
    #1;
    for (int i = 0; i < 8; i++) check(32'(col8[i]), oh(i - 2, 8), "slidedown 2", i);

    for (int t = 0; t < 600; t++) begin
      int below_one, below_zero, total_one;
      ms32  = t[0];
      sd32  = $urandom_range(0, 1);
      off32 = 6'($urandom_range(0, 32));
      m32   = $urandom;
      #1;
      if (!ms32) begin
        total_one = $countones(m32);
        below_one = 0; below_zero = 0;
        for (int i = 0; i < 32; i++) begin
          int d;
          d = m32[i] ? below_one : total_one + below_zero;
          if (m32[i]) below_one++; else below_zero++;
          check(col32[i], oh(d, 32), "compress", i);
        end
      end else begin
        for (int i = 0; i < 32; i++)
          check(col32[i], oh(sd32 ? i - int'(off32) : i + int'(off32), 32), "slide", i);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
