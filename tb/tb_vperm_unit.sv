// tb_vperm_unit: end-to-end test of the unified permutation unit.
//
// Two units are driven with the same random operation stream:
//   dut_a  with every parameter at its default (VLEN 256, 1-byte units,
//          latency 1), the full-size configuration;
//   dut_b  with 2-byte units and latency 2 (the relaxed-granularity and
//          pipelined options).
// Each cycle an operation is issued with some probability, so back-to-back
// issue and idle gaps both occur. Results are compared with an element-level
// model written directly from the RISC-V semantics (plus the unit's own
// conventions: zero fill, unselected vcompress elements above the selected
// ones, offsets saturating at VLMAX), and each result must appear exactly
// LATENCY cycles after its issue. SEW 8 on dut_b must be flagged illegal.
//
// Mechanisms counted, each of which must occur: every operation class, each
// SEW, out-of-range gather indices, slides that push every element out, v0
// masking, back-to-back issue and the illegal flag.
module tb_vperm_unit;
  import perm_pkg::*;
  localparam int unsigned VLEN = 256;
  localparam int unsigned NOPS = 3000;

  logic clk = 0, rst_ni = 0;
  int   checks = 0, failures = 0, cycle = 0;

  logic            in_valid;
  perm_op_e        op;
  sew_e            sew;
  logic            vm;
  logic [VLEN-1:0] vs1, vs2, v0, vd_old;
  logic [31:0]     scalar;
  logic            a_valid, b_valid, a_ill, b_ill;
  logic [VLEN-1:0] a_vd, b_vd;

  vperm_unit dut_a (
    .clk, .rst_ni, .in_valid, .op, .sew, .vm, .vs1, .vs2, .v0, .vd_old, .scalar,
    .out_valid(a_valid), .vd(a_vd), .illegal(a_ill)
  );
  vperm_unit #(.UNIT_BYTES(2), .LATENCY(2)) dut_b (
    .clk, .rst_ni, .in_valid, .op, .sew, .vm, .vs1, .vs2, .v0, .vd_old, .scalar,
    .out_valid(b_valid), .vd(b_vd), .illegal(b_ill)
  );

  always #5 clk = ~clk;
  always @(posedge clk) cycle++;

  initial begin
    wait (cycle == 50000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- reference model ----------------
  typedef struct {
    logic [VLEN-1:0] vd;
    logic            sew8;
    int              issue;
  } exp_t;
  exp_t qa[$], qb[$];

  function automatic logic [31:0] getel(logic [VLEN-1:0] v, int e, int sb);
    logic [31:0] r = 0;
    for (int k = 0; k < sb * 8; k++) r[k] = v[e*sb*8 + k];
    return r;
  endfunction

  function automatic logic [VLEN-1:0] model(perm_op_e o, int sb, logic m, logic [VLEN-1:0] d,
                                            logic [VLEN-1:0] ix, logic [VLEN-1:0] msk,
                                            logic [VLEN-1:0] old, logic [31:0] sc);
    int ne = VLEN / (8 * sb);
    logic [31:0] el [64];
    int n = 0;
    logic [VLEN-1:0] r = old;
    for (int e = 0; e < ne; e++) el[e] = 0;
    case (o)
      OP_VRGATHER, OP_VRGATHER_VX:
        for (int e = 0; e < ne; e++) begin
          logic [31:0] idx = (o == OP_VRGATHER_VX) ? sc : getel(ix, e, sb);
          el[e] = (idx < 32'(ne)) ? getel(d, int'(idx), sb) : 0;
        end
      OP_VCOMPRESS: begin
        for (int e = 0; e < ne; e++) if (ix[e])  el[n++] = getel(d, e, sb);
        for (int e = 0; e < ne; e++) if (!ix[e]) el[n++] = getel(d, e, sb);
      end
      OP_VSLIDEUP:
        for (int e = 0; e < ne; e++)
          el[e] = (64'(e) >= 64'(sc)) ? getel(d, e - int'(sc), sb) : 0;
      default:
        for (int e = 0; e < ne; e++)
          el[e] = (64'(e) + 64'(sc) < 64'(ne)) ? getel(d, e + int'(sc), sb) : 0;
    endcase
    for (int e = 0; e < ne; e++)
      if (m || msk[e])
        for (int k = 0; k < sb * 8; k++) r[e*sb*8 + k] = el[e][k];
    return r;
  endfunction

  // ---------------- mechanism counters ----------------
  int n_op [5];
  int n_sew [3];
  int n_oob = 0, n_slide_out = 0, n_masked = 0, n_b2b = 0, n_illegal = 0;
  logic prev_valid = 0;

  // ---------------- stimulus ----------------
  task automatic drive_one();
    int sb, ne;
    op  = perm_op_e'($urandom_range(0, 4));
    sew = sew_e'($urandom_range(0, 2));
    sb  = sew_bytes(sew);
    ne  = VLEN / (8 * sb);
    vm  = ($urandom_range(0, 2) != 0);
    if (op == OP_VCOMPRESS) vm = 1'b1;  // vcompress is always unmasked
    for (int w = 0; w < VLEN / 32; w++) begin
      vs1[w*32 +: 32]    = $urandom;
      v0[w*32 +: 32]     = $urandom;
      vd_old[w*32 +: 32] = $urandom;
      vs2[w*32 +: 32]    = $urandom;
    end
    if (op == OP_VRGATHER)
      for (int e = 0; e < ne; e++) begin
        logic [31:0] v = 32'($urandom_range(0, ne + ne / 4));
        if ($urandom_range(0, 30) == 0) v = $urandom;
        for (int k = 0; k < sb * 8; k++) vs2[e*sb*8 + k] = v[k];
      end
    case ($urandom_range(0, 9))
      0:       scalar = $urandom;
      1:       scalar = 32'(ne);
      default: scalar = 32'($urandom_range(0, ne - 1));
    endcase

    // Count what this operation exercises.
    n_op[op]++;
    n_sew[sew]++;
    if (!vm && ($countones(v0) < VLEN)) n_masked++;
    if (op == OP_VRGATHER)
      for (int e = 0; e < ne; e++) if (getel(vs2, e, sb) >= 32'(ne)) begin n_oob++; break; end
    if (op == OP_VRGATHER_VX && scalar >= 32'(ne)) n_oob++;
    if ((op == OP_VSLIDEUP || op == OP_VSLIDEDOWN) && scalar >= 32'(ne)) n_slide_out++;
    if (prev_valid) n_b2b++;
    if (sew == SEW8) n_illegal++;

    qa.push_back('{model(op, sb, vm, vs1, vs2, v0, vd_old, scalar), sew == SEW8, cycle});
    qb.push_back('{model(op, sb, vm, vs1, vs2, v0, vd_old, scalar), sew == SEW8, cycle});
  endtask

  initial begin
    automatic int issued = 0;
    in_valid = 0;
    repeat (3) @(posedge clk);
    rst_ni = 1;
    while (issued < NOPS) begin
      @(negedge clk);
      prev_valid = in_valid;
      in_valid = ($urandom_range(0, 3) != 0);
      if (in_valid) begin
        drive_one();
        issued++;
      end
    end
    @(negedge clk);
    in_valid = 0;
    repeat (5) @(posedge clk);

    // Every mechanism must have happened.
    for (int i = 0; i < 5; i++) begin
      checks++;
      if (n_op[i] == 0) begin failures++; $display("FAIL op class %0d never issued", i); end
    end
    for (int i = 0; i < 3; i++) begin
      checks++;
      if (n_sew[i] == 0) begin failures++; $display("FAIL SEW code %0d never used", i); end
    end
    checks += 5;
    if (n_oob == 0)       begin failures++; $display("FAIL no out-of-range gather index"); end
    if (n_slide_out == 0) begin failures++; $display("FAIL no slide-out-all"); end
    if (n_masked == 0)    begin failures++; $display("FAIL no masked operation"); end
    if (n_b2b == 0)       begin failures++; $display("FAIL no back-to-back issue"); end
    if (n_illegal == 0)   begin failures++; $display("FAIL illegal never raised"); end
    checks++;
    if (qa.size() != 0 || qb.size() != 0) begin failures++; $display("FAIL results missing"); end
    $display("mechanisms: gather=%0d gather_vx=%0d compress=%0d slideup=%0d slidedown=%0d sew8=%0d sew16=%0d sew32=%0d oob=%0d slide_out=%0d masked=%0d back_to_back=%0d illegal=%0d",
             n_op[0], n_op[1], n_op[2], n_op[3], n_op[4], n_sew[0], n_sew[1], n_sew[2],
             n_oob, n_slide_out, n_masked, n_b2b, n_illegal);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- result checking ----------------
  // Sampled at the falling edge, half a cycle after the outputs change.
  always @(negedge clk) begin
    if (rst_ni && a_valid) begin
      exp_t x;
      checks++;
      if (qa.size() == 0) begin failures++; $display("FAIL dut_a: unexpected result"); end
      else begin
        x = qa.pop_front();
        if (cycle - x.issue != 1) begin failures++; $display("FAIL dut_a latency %0d", cycle - x.issue); end
        if (a_vd != x.vd || a_ill) begin
          failures++;
          if (failures < 10) $display("FAIL dut_a cycle %0d\n got %h\n exp %h", cycle, a_vd, x.vd);
        end
      end
    end
    if (rst_ni && b_valid) begin
      exp_t x;
      checks++;
      if (qb.size() == 0) begin failures++; $display("FAIL dut_b: unexpected result"); end
      else begin
        x = qb.pop_front();
        if (cycle - x.issue != 2) begin failures++; $display("FAIL dut_b latency %0d", cycle - x.issue); end
        if (b_ill != x.sew8 || (!x.sew8 && b_vd != x.vd)) begin
          failures++;
          if (failures < 10) $display("FAIL dut_b cycle %0d ill=%0d\n got %h\n exp %h", cycle, b_ill, b_vd, x.vd);
        end
      end
    end
  end
endmodule
