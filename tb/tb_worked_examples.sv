// tb_worked_examples: the four 8-element permutation examples, end to end.
//
// A 64-bit unit (eight byte elements) runs the worked examples with byte
// elements named 'a'..'h' (element 7 holds 'a', element 0 holds 'h'):
//   vrgather  with indices 6 3 7 2 4 1 0 5         -> b e a f d g h c
//   vcompress with mask    1 0 0 1 1 0 1 1 on
//             a b c d f e g h                       -> b c e a d f g h
//   vslideup by 1                                   -> b c d e f g h 0
//   vslidedown by 2 on a b c d f e g h              -> 0 0 a b c d f e
// (all vectors listed from element 7 down to element 0). Each result must
// arrive one cycle after issue.
module tb_worked_examples;
  import perm_pkg::*;
  localparam int unsigned VLEN = 64;

  logic clk = 0, rst_ni = 0;
  int   checks = 0, failures = 0, cycle = 0;

  logic            in_valid = 0, out_valid, illegal;
  perm_op_e        op;
  sew_e            sew = SEW8;
  logic            vm = 1;
  logic [VLEN-1:0] vs1, vs2, v0 = '0, vd_old = '0, vd;
  logic [31:0]     scalar;

  vperm_unit #(.VLEN(VLEN)) dut (
    .clk, .rst_ni, .in_valid, .op, .sew, .vm, .vs1, .vs2, .v0, .vd_old, .scalar,
    .out_valid, .vd, .illegal
  );

  always #5 clk = ~clk;
  always @(posedge clk) cycle++;
  initial begin
    wait (cycle == 1000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Pack a string written element 7 first ("abcdefgh") into a register.
  function automatic logic [63:0] vec(string s);
    logic [63:0] r = '0;
    for (int k = 0; k < 8; k++) r[(7-k)*8 +: 8] = (s[k] == "0") ? 8'h00 : 8'(s[k]);
    return r;
  endfunction

  task automatic run(input perm_op_e o, input logic [63:0] d, input logic [63:0] c,
                     input int sc, input string expect_s, input string name);
    int t0;
    @(negedge clk);
    op = o; vs1 = d; vs2 = c; scalar = 32'(sc); in_valid = 1;
    t0 = cycle;
    @(negedge clk);
    in_valid = 0;
    checks++;
    if (!out_valid || cycle - t0 != 1) begin
      failures++; $display("FAIL %s: result not valid one cycle after issue", name);
    end
    checks++;
    if (vd !== vec(expect_s)) begin
      failures++; $display("FAIL %s: got %h expected %h", name, vd, vec(expect_s));
    end else $display("%s: %s", name, expect_s);
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_ni = 1;
    run(OP_VRGATHER,   vec("abcdefgh"), 64'h06_03_07_02_04_01_00_05, 0, "beafdghc", "vrgather");
    run(OP_VCOMPRESS,  vec("abcdfegh"), 64'b1001_1011,               0, "bceadfgh", "vcompress");
    run(OP_VSLIDEUP,   vec("abcdefgh"), '0,                          1, "bcdefgh0", "vslideup 1");
    run(OP_VSLIDEDOWN, vec("abcdfegh"), '0,                          2, "00abcdfe", "vslidedown 2");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
