// tb_xbar_andor: self-checking test of the AND-OR crossbar.
//
// Random data and random select rows, each row one-hot or all zero; the
// expected output element is the selected input, or 0 for an empty row.
module tb_xbar_andor;
  localparam int unsigned N = 32, EW = 8;
  logic clk = 0;
  int   checks = 0, failures = 0, cycles = 0;

  logic [N-1:0][EW-1:0] din, dout;
  logic [N-1:0][N-1:0]  sel;
  int                   src [N];

  xbar_andor dut (.din(din), .sel(sel), .dout(dout));

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;
  initial begin
    wait (cycles == 100000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 500; t++) begin
      for (int i = 0; i < N; i++) begin
        din[i] = EW'($urandom);
        src[i] = $urandom_range(0, N);   // N means: no source
        sel[i] = (src[i] < N) ? (N'(1) << src[i]) : '0;
      end
      #1;
      for (int o = 0; o < N; o++) begin
        logic [EW-1:0] exp;
        exp = (src[o] < N) ? din[src[o]] : '0;
        checks++;
        if (dout[o] != exp) begin
          failures++;
          if (failures < 10) $display("FAIL out %0d src %0d: got %h exp %h", o, src[o], dout[o], exp);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
