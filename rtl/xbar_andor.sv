// xbar_andor: N x N crossbar with one AND-OR multiplexer per output.
//
// Output o is the OR of every input i ANDed with its select bit sel[o][i].
// The select row of an output is expected to be one-hot or all zero; an
// all-zero row gives a zero output, which is how elements with no source
// are cleared. The same crossbar serves output-driven permutations (rows
// from per-output decoders) and input-driven ones (transposed per-input
// destination columns). Purely combinational.
//
// The AND-OR structure follows the paper; the element width EW is a
// parameter (8 bits for byte-granular permutation).
module xbar_andor #(
  parameter int unsigned N  = 32,
  parameter int unsigned EW = 8
) (
  input  logic [N-1:0][EW-1:0] din,
  input  logic [N-1:0][N-1:0]  sel,   // [output][input]
  output logic [N-1:0][EW-1:0] dout
);

  always_comb begin
    for (int unsigned o = 0; o < N; o++) begin
      dout[o] = '0;
      for (int unsigned i = 0; i < N; i++)
        dout[o] |= din[i] & {EW{sel[o][i]}};
    end
  end

endmodule
