// tb_csa: self-checking test of the 3:2 carry-save adder.
//
// Random and corner words; the reference is the modular sum x+y+z+cin.
// It also checks that the rows are a true carry-save split: the sum row is
// the bitwise XOR of the three inputs.
module tb_csa;
  localparam int unsigned W = 6;
  logic clk = 0;
  int   checks = 0, failures = 0, cycles = 0;
  logic [W-1:0] x, y, z, s, c;
  logic         cin;

  csa dut (.x(x), .y(y), .z(z), .cin(cin), .s(s), .c(c));

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;
  initial begin
    wait (cycles == 100000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 4000; t++) begin
      {x, y, z, cin} = (t < 2) ? {(3*W+1){t[0]}} : (3*W+1)'($urandom);
      #1;
      checks++;
      if (W'(s + c) != W'(x + y + z + W'(cin))) begin
        failures++;
        if (failures < 10) $display("FAIL sum x=%0d y=%0d z=%0d cin=%0d s=%0d c=%0d", x, y, z, cin, s, c);
      end
      checks++;
      if (s != (x ^ y ^ z)) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
