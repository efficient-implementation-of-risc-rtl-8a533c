// sad: sum-addressed decoder.
//
// Decodes the sum a + b + cin (mod 2^W) straight into a one-hot vector of N
// lines without first adding a and b. Line j is set when, for every bit k,
// a[k] ^ b[k] ^ j[k] equals the carry that bit k must receive if the sum is
// j; that carry depends only on bit k-1 of a, b and j, so each line is a
// wide AND of local terms and no carry runs along the word. Sums from N to
// 2^W - 1 select no line: with W = log2(N) + 1 this makes elements that
// slide past either end of the register go nowhere. Purely combinational.
//
// The paper uses a sum-addressed decoder and cites it; the equations are the
// standard ones for such a decoder.
module sad #(
  parameter int unsigned N = 32,
  parameter int unsigned W = $clog2(N) + 1
) (
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  input  logic         cin,
  output logic [N-1:0] onehot
);

  logic [W-1:0] p, g, k;
  assign p = a ^ b;
  assign g = a & b;
  assign k = a | b;

  for (genvar j = 0; j < N; j++) begin : g_line
    localparam logic [W-1:0] J = W'(j);
    logic [W-1:0] creq;  // carry each bit must receive for the sum to be J
    always_comb begin
      creq[0] = cin;
      for (int unsigned q = 1; q < W; q++)
        creq[q] = g[q-1] | (k[q-1] & ~J[q-1]);
    end
    assign onehot[j] = ((p ^ J) == creq);
  end

endmodule
