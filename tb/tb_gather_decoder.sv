// tb_gather_decoder: self-checking test of the vrgather select decoders.
//
// Random index vectors at SEW 8, 16 and 32 (indices partly out of range)
// and the scalar-index form. The reference works element by element: output
// element e copies input element idx[e] (or nothing when idx[e] is not below
// VLEN/SEW), so its byte b must select input byte idx*SEW/8 + b.
module tb_gather_decoder;
  import perm_pkg::*;
  localparam int unsigned VLEN = 256, N = 32;
  logic clk = 0;
  int   checks = 0, failures = 0, cycles = 0;

  sew_e              sew;
  logic              use_scalar;
  logic [31:0]       scalar;
  logic [VLEN-1:0]   idx_vec;
  logic [N-1:0][N-1:0] rows;

  gather_decoder dut (.sew(sew), .use_scalar(use_scalar), .scalar(scalar), .idx_vec(idx_vec), .rows(rows));

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;
  initial begin
    wait (cycles == 100000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 900; t++) begin
      int sb, ne;
      sew = sew_e'(t % 3);
      sb  = 1 << (t % 3);
      ne  = N / sb;
      use_scalar = (t % 7 == 0);
      // Indices mostly in range, some out of range, some huge.
      for (int e = 0; e < ne; e++) begin
        logic [31:0] v;
        v = $urandom_range(0, ne + ne / 2);
        if ($urandom_range(0, 20) == 0) v = $urandom;
        idx_vec[e*sb*8 +: 32] = v;  // upper bits are overwritten by the next element
      end
      scalar = (t % 14 == 0) ? $urandom : 32'($urandom_range(0, ne));
      #1;
      for (int e = 0; e < ne; e++) begin
        logic [31:0] idx;
        idx = 0;
        for (int k = 0; k < sb * 8; k++) idx[k] = idx_vec[e*sb*8 + k];
        if (use_scalar) idx = scalar;
        for (int b = 0; b < sb; b++) begin
          logic [N-1:0] exp;
          exp = (idx < 32'(ne)) ? (N'(1) << (int'(idx) * sb + b)) : '0;
          checks++;
          if (rows[e*sb + b] != exp) begin
            failures++;
            if (failures < 10) $display("FAIL sew=%0d elem %0d byte %0d idx %0d: got %h exp %h", sb*8, e, b, idx, rows[e*sb+b], exp);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
