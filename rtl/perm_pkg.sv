// perm_pkg: types and helpers shared by the unified vector permutation unit.
//
// The unit executes the RISC-V vector permutations vrgather, vcompress,
// vslideup and vslidedown on one AND-OR crossbar. The operation and element
// width encodings below are this design's own; they are not RVV opcodes and
// are expected to come from a vector instruction decoder.
package perm_pkg;

  // Permutation class. OP_VRGATHER uses per-output indices taken from vs2,
  // OP_VRGATHER_VX uses the scalar operand as the index of every output.
  // OP_VCOMPRESS and the two slides are input-driven.
  typedef enum logic [2:0] {
    OP_VRGATHER    = 3'd0,
    OP_VRGATHER_VX = 3'd1,
    OP_VCOMPRESS   = 3'd2,
    OP_VSLIDEUP    = 3'd3,
    OP_VSLIDEDOWN  = 3'd4
  } perm_op_e;

  // Selected element width (SEW).
  typedef enum logic [1:0] {
    SEW8  = 2'd0,
    SEW16 = 2'd1,
    SEW32 = 2'd2
  } sew_e;

  // Element width in bytes for a SEW encoding.
  function automatic int unsigned sew_bytes(sew_e s);
    case (s)
      SEW8:    return 1;
      SEW16:   return 2;
      default: return 4;
    endcase
  endfunction

  // log2 of the element width in bytes.
  function automatic int unsigned sew_log2(sew_e s);
    case (s)
      SEW8:    return 0;
      SEW16:   return 1;
      default: return 2;
    endcase
  endfunction

  // True for the input-driven classes, whose select matrix comes from the
  // per-input destination logic and is transposed onto the crossbar rows.
  function automatic logic is_input_driven(perm_op_e op);
    return (op == OP_VCOMPRESS) || (op == OP_VSLIDEUP) || (op == OP_VSLIDEDOWN);
  endfunction

endpackage
