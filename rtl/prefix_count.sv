// prefix_count: the two carry-save prefix sums of a vcompress mask.
//
// For every element position i (0 = least significant element) it produces
//   ones[i]  = number of 1s in mask[N-1:i]  (counted from the top down)
//   zeros[i] = number of 0s in mask[i:0]    (counted from the bottom up)
// both inclusive of position i and both in carry-save form (two rows each).
// With these, an input with mask 1 moves to i - zeros[i] and an input with
// mask 0 moves to i + ones[i]; the result is a permutation of 0..N-1.
//
// Every position has its own cs_counter for each direction, so all 2N counts
// are formed in parallel with no carry propagation. Purely combinational.
// The inclusive counting and the two directions follow the paper's worked
// example; one independent counter per position is this design's reading of
// the paper's per-position counters.
module prefix_count #(
  parameter int unsigned N = 32,
  parameter int unsigned W = $clog2(N) + 1
) (
  input  logic [N-1:0]        mask,
  output logic [N-1:0][W-1:0] ones_a,
  output logic [N-1:0][W-1:0] ones_b,
  output logic [N-1:0][W-1:0] zeros_a,
  output logic [N-1:0][W-1:0] zeros_b
);

  for (genvar i = 0; i < N; i++) begin : g_pos
    cs_counter #(.N(N - i), .W(W)) u_ones (
      .bits (mask[N-1:i]),
      .row_a(ones_a[i]),
      .row_b(ones_b[i])
    );
    cs_counter #(.N(i + 1), .W(W)) u_zeros (
      .bits (~mask[i:0]),
      .row_a(zeros_a[i]),
      .row_b(zeros_b[i])
    );
  end

endmodule
