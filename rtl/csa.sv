// csa: W-bit 3:2 carry-save adder.
//
// Adds three W-bit words without carry propagation and returns a sum row s
// and a carry row c, so that x + y + z + cin == s + c (mod 2^W). The carry
// row is already shifted left by one place; its free least significant bit
// takes cin, which the destination logic uses for two's-complement
// subtraction. In the permutation unit one operand is the fixed element
// index, so after synthesis most of this adder folds into inverters and
// wires. Purely combinational.
//
// The paper names the CSA between the prefix counters and the sum-addressed
// decoder; the row of full adders and the use of the carry-in are this
// design's own choices.
module csa #(
  parameter int unsigned W = 6
) (
  input  logic [W-1:0] x,
  input  logic [W-1:0] y,
  input  logic [W-1:0] z,
  input  logic         cin,
  output logic [W-1:0] s,
  output logic [W-1:0] c
);

  logic [W-2:0] maj;  // the carry out of the top bit is dropped (mod 2^W)

  always_comb begin
    s   = x ^ y ^ z;
    maj = (x[W-2:0] & y[W-2:0]) | (x[W-2:0] & z[W-2:0]) | (y[W-2:0] & z[W-2:0]);
    c   = {maj, cin};
  end

endmodule
