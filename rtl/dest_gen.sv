// dest_gen: per-input destination logic of the input-driven permutations.
//
// For every input element i it works out the output element the input moves
// to and delivers it already decoded, as a one-hot column dest_col[i]
// (dest_col[i][j] = 1: input i goes to output j; all zero: it goes nowhere).
//
//  * vcompress (mode_slide = 0): the prefix sums of the mask give
//      mask[i] = 1 : dest = i - zeros[i]   (zeros in mask[i:0])
//      mask[i] = 0 : dest = i + ones[i]    (ones in mask[N-1:i])
//    so the selected elements pack at the bottom in order and the others
//    fill the top in order; no two inputs share a destination.
//  * vslideup / vslidedown (mode_slide = 1): dest = i + offset or
//    i - offset; the prefix sums are bypassed. Sums outside 0..N-1 select
//    nothing, so those elements slide out.
//
// Datapath per element: a mux picks the carry-save pair (zeros or ones, or
// offset and 0 for slides), the pair is inverted when it is subtracted, a
// csa adds the constant index i, and a sad decodes the two rows. Subtraction
// uses x - (a + b) = x + ~a + ~b + 2, the +2 being the csa carry-in and the
// sad carry-in, so nothing propagates a carry anywhere. Purely combinational.
//
// The algorithm, the carry-save form and the csa + sad chain follow the
// paper; the +2 trick and the W = log2(N) + 1 word width are this design's.
module dest_gen #(
  parameter int unsigned N = 32,
  parameter int unsigned W = $clog2(N) + 1
) (
  input  logic                mode_slide,  // 1: slide, 0: compress
  input  logic                slide_down,  // slides only: 1 subtracts offset
  input  logic [W-1:0]        offset,      // slide amount in units, at most N
  input  logic [N-1:0]        mask,        // vcompress mask, one bit per unit
  output logic [N-1:0][N-1:0] dest_col     // [input][output]
);

  logic [N-1:0][W-1:0] ones_a, ones_b, zeros_a, zeros_b;

  prefix_count #(.N(N), .W(W)) u_prefix (
    .mask   (mask),
    .ones_a (ones_a),
    .ones_b (ones_b),
    .zeros_a(zeros_a),
    .zeros_b(zeros_b)
  );

  for (genvar i = 0; i < N; i++) begin : g_elem
    logic         sub;
    logic [W-1:0] x, y, xs, ys, s, c;

    always_comb begin
      if (mode_slide) begin
        sub = slide_down;
        x   = offset;
        y   = '0;
      end else begin
        sub = mask[i];
        x   = mask[i] ? zeros_a[i] : ones_a[i];
        y   = mask[i] ? zeros_b[i] : ones_b[i];
      end
      xs = sub ? ~x : x;
      ys = sub ? ~y : y;
    end

    csa #(.W(W)) u_csa (.x(xs), .y(ys), .z(W'(i)), .cin(sub), .s(s), .c(c));
    sad #(.N(N), .W(W)) u_sad (.a(s), .b(c), .cin(sub), .onehot(dest_col[i]));
  end

endmodule
