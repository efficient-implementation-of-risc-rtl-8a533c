// gather_decoder: per-output source decoders of vrgather.
//
// vrgather names, for each output element, the input element it copies. Each
// output unit o of the crossbar gets a decoder that turns that index into a
// one-hot select row rows[o] (rows[o][i] = 1: output o copies input i).
//
// The crossbar moves units of UNIT_BYTES bytes; an element of SEW bits is
// R = SEW / (8 * UNIT_BYTES) consecutive units. Output unit o belongs to
// element e = o / R and is its unit b = o % R; if the index idx of element e
// (from vs2 at SEW bits, or the scalar for vrgather.vx) is below the number
// of elements N / R, the row selects unit idx * R + b, otherwise the row is
// all zero and the crossbar outputs 0. Purely combinational.
//
// The decoder per output follows the paper; the unit expansion for wider
// elements follows the paper's "series of consecutive bytes"; the zero for
// an out-of-range index is the RISC-V rule, which the paper does not state.
module gather_decoder
  import perm_pkg::*;
#(
  parameter int unsigned VLEN       = 256,
  parameter int unsigned UNIT_BYTES = 1,
  parameter int unsigned N          = VLEN / (8 * UNIT_BYTES)
) (
  input  sew_e                sew,
  input  logic                use_scalar,  // vrgather.vx: one index for all
  input  logic [31:0]         scalar,
  input  logic [VLEN-1:0]     idx_vec,     // vs2: SEW-wide indices
  output logic [N-1:0][N-1:0] rows         // [output][input]
);

  localparam int unsigned NB = $clog2(N);

  always_comb begin
    int unsigned r_log;   // log2 of units per element
    int unsigned e;
    logic [NB-1:0] b;
    logic [NB-1:0] src;
    logic [31:0] idx;
    logic [32:0] n_elem;

    r_log = 0;
    if (sew_log2(sew) > $clog2(UNIT_BYTES)) r_log = sew_log2(sew) - $clog2(UNIT_BYTES);
    n_elem = 33'(N >> r_log);

    for (int unsigned o = 0; o < N; o++) begin
      e = o >> r_log;
      b = NB'(o & ((1 << r_log) - 1));
      case (sew)
        SEW8:    idx = 32'(idx_vec[e*8  +: 8]);
        SEW16:   idx = 32'(idx_vec[e*16 +: 16]);
        default: idx = idx_vec[e*32 +: 32];
      endcase
      if (use_scalar) idx = scalar;
      rows[o] = '0;
      if (33'(idx) < n_elem) begin
        src = (idx[NB-1:0] << r_log) | b;
        rows[o][src] = 1'b1;
      end
    end
  end

endmodule
