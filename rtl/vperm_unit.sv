// vperm_unit: unified RISC-V vector permutation unit.
//
// Executes vrgather (.vv and .vx), vcompress, vslideup and vslidedown on one
// VLEN-bit register with a fixed latency that does not depend on the data,
// the indices, the mask or the offset.
//
// All classes share one AND-OR crossbar (xbar_andor) whose N = VLEN / (8 *
// UNIT_BYTES) outputs each pick one input unit through a one-hot select row.
//  * Output-driven vrgather: gather_decoder decodes the index of every
//    output into its select row.
//  * Input-driven vcompress and slides: dest_gen computes, for every input,
//    the one-hot column of the output it goes to (prefix sums + csa + sum-
//    addressed decoder, no carry propagation). Reading that matrix by rows
//    (pure wiring) gives the select rows; a 2:1 mux per select bit chooses
//    between the two sources according to the class.
// Elements wider than one unit are handled as groups of consecutive units:
// the compress mask bit and the v0 bit of an element are repeated over its
// units, slide offsets are scaled to units, gather indices are expanded.
// Units that no input reaches read 0. With vm = 0, outputs whose v0 bit is 0
// keep vd_old (mask undisturbed).
//
// Interface and timing: an operation is presented with in_valid for one
// cycle; out_valid, vd and illegal follow exactly LATENCY cycles later. A new
// operation may start every cycle; there is no back-pressure.
//   LATENCY = 1: index logic and crossbar in one cycle, result registered.
//   LATENCY = 2: a register between index logic and crossbar as well.
// illegal is set when SEW is narrower than the movable unit or the SEW code
// is unused; vd is then undefined. rst_ni resets only the valid pipeline.
//
// Follows the paper: the unified crossbar, the per-output decoders, the
// prefix-sum destination logic, the class mux in front of the crossbar, the
// 256-bit vector, the 1-byte movable unit (2 bytes as an option) and a
// latency of one or two cycles. This design's own choices: operand naming
// (vs1 data, vs2 indices or mask, like the paper rather than the RISC-V
// specification), the zero fill of slid-in elements, the compress result
// holding the unselected elements above the selected ones, the saturation of
// offsets at VLMAX, vl taken as VLMAX, and the valid-only handshake.
module vperm_unit
  import perm_pkg::*;
#(
  parameter int unsigned VLEN       = 256,
  parameter int unsigned UNIT_BYTES = 1,
  parameter int unsigned LATENCY    = 1
) (
  input  logic            clk,
  input  logic            rst_ni,
  input  logic            in_valid,
  input  perm_op_e        op,
  input  sew_e            sew,
  input  logic            vm,       // 1: unmasked, 0: masked by v0
  input  logic [VLEN-1:0] vs1,      // data to permute
  input  logic [VLEN-1:0] vs2,      // vrgather indices or vcompress mask
  input  logic [VLEN-1:0] v0,       // mask register
  input  logic [VLEN-1:0] vd_old,   // destination before the operation
  input  logic [31:0]     scalar,   // slide offset or vrgather.vx index
  output logic            out_valid,
  output logic [VLEN-1:0] vd,
  output logic            illegal
);

  localparam int unsigned EW = 8 * UNIT_BYTES;
  localparam int unsigned N  = VLEN / EW;
  localparam int unsigned W  = $clog2(N) + 1;

  initial begin
    assert (LATENCY == 1 || LATENCY == 2)
      else $error("vperm_unit: LATENCY must be 1 or 2");
    assert (N >= 2 && (N & (N - 1)) == 0)
      else $error("vperm_unit: VLEN / (8*UNIT_BYTES) must be a power of two");
  end

  // ---------------------------------------------------------------------
  // Operand preparation: units per element, unit masks, offset in units.
  // ---------------------------------------------------------------------
  int unsigned     r_log;
  logic            bad_sew;
  logic [N-1:0]    cmask_u, v0_u;
  logic [W-1:0]    offset_u;
  logic [32:0]     n_elem;

  always_comb begin
    bad_sew = (sew == 2'd3) || (sew_bytes(sew) < UNIT_BYTES);
    r_log   = 0;
    if (sew_log2(sew) > $clog2(UNIT_BYTES)) r_log = sew_log2(sew) - $clog2(UNIT_BYTES);
    for (int unsigned u = 0; u < N; u++) begin
      cmask_u[u] = vs2[u >> r_log];
      v0_u[u]    = vm | v0[u >> r_log];
    end
    // Offsets of VLMAX elements or more all behave like VLMAX.
    n_elem = 33'(N >> r_log);
    if (33'(scalar) >= n_elem) offset_u = W'(N);
    else                       offset_u = W'(scalar << r_log);
  end

  // ---------------------------------------------------------------------
  // Select generation for both classes.
  // ---------------------------------------------------------------------
  logic [N-1:0][N-1:0] dest_col;   // input-driven: [input][output]
  logic [N-1:0][N-1:0] gather_row; // output-driven: [output][input]
  logic [N-1:0][N-1:0] sel;        // crossbar rows: [output][input]
  logic                in_drv;

  dest_gen #(.N(N), .W(W)) u_dest (
    .mode_slide(op == OP_VSLIDEUP || op == OP_VSLIDEDOWN),
    .slide_down(op == OP_VSLIDEDOWN),
    .offset    (offset_u),
    .mask      (cmask_u),
    .dest_col  (dest_col)
  );

  gather_decoder #(.VLEN(VLEN), .UNIT_BYTES(UNIT_BYTES), .N(N)) u_gdec (
    .sew       (sew),
    .use_scalar(op == OP_VRGATHER_VX),
    .scalar    (scalar),
    .idx_vec   (vs2),
    .rows      (gather_row)
  );

  assign in_drv = is_input_driven(op);

  // Class mux in front of the crossbar; the transpose is wiring only.
  always_comb begin
    for (int unsigned o = 0; o < N; o++)
      for (int unsigned i = 0; i < N; i++)
        sel[o][i] = in_drv ? dest_col[i][o] : gather_row[o][i];
  end

  // ---------------------------------------------------------------------
  // Optional stage between index logic and crossbar (LATENCY = 2).
  // ---------------------------------------------------------------------
  logic                x_valid, x_bad;
  logic [N-1:0][N-1:0] x_sel;
  logic [N-1:0][EW-1:0] x_din, x_old;
  logic [N-1:0]        x_keep;

  if (LATENCY == 2) begin : g_pipe
    always_ff @(posedge clk or negedge rst_ni) begin
      if (!rst_ni) x_valid <= 1'b0;
      else         x_valid <= in_valid;
    end
    always_ff @(posedge clk) begin
      x_sel  <= sel;
      x_din  <= vs1;
      x_old  <= vd_old;
      x_keep <= v0_u;
      x_bad  <= bad_sew;
    end
  end else begin : g_comb
    assign x_valid = in_valid;
    assign x_sel   = sel;
    assign x_din   = vs1;
    assign x_old   = vd_old;
    assign x_keep  = v0_u;
    assign x_bad   = bad_sew;
  end

  // ---------------------------------------------------------------------
  // Crossbar, v0 masking and result register.
  // ---------------------------------------------------------------------
  logic [N-1:0][EW-1:0] x_out, res;

  xbar_andor #(.N(N), .EW(EW)) u_xbar (.din(x_din), .sel(x_sel), .dout(x_out));

  always_comb begin
    for (int unsigned u = 0; u < N; u++)
      res[u] = x_keep[u] ? x_out[u] : x_old[u];
  end

  always_ff @(posedge clk or negedge rst_ni) begin
    if (!rst_ni) out_valid <= 1'b0;
    else         out_valid <= x_valid;
  end

  always_ff @(posedge clk) begin
    vd      <= res;
    illegal <= x_bad;
  end

  // Every crossbar row must select at most one input.
  always_ff @(posedge clk) begin
    if (x_valid && !x_bad)
      for (int unsigned o = 0; o < N; o++)
        assert ($onehot0(x_sel[o])) else $error("vperm_unit: crossbar row %0d not one-hot", o);
  end

endmodule
