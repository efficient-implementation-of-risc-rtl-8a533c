// tb_cs_count8: exhaustive test of the 8-input carry-save counting cell.
//
// For all 256 inputs: row_a + row_b must equal the number of ones, the top
// bit of row_a must be 0, and the least significant bit of row_b must be the
// parity of bits 4..2 (the sum of the second full adder, which goes straight
// to the output).
module tb_cs_count8;
  logic clk = 0;
  int   checks = 0, failures = 0, cycles = 0;
  logic [7:0] b;
  logic [2:0] ra, rb;

  cs_count8 dut (.bits(b), .row_a(ra), .row_b(rb));

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;
  initial begin
    wait (cycles == 10000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 256; v++) begin
      b = 8'(v);
      #1;
      checks++;
      if (int'(ra) + int'(rb) != $countones(b)) begin
        failures++;
        if (failures < 10) $display("FAIL bits=%b: %0d + %0d != %0d", b, ra, rb, $countones(b));
      end
      checks++;
      if (ra[2] != 1'b0) failures++;
      checks++;
      if (rb[0] != ^b[4:2]) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
