// tpfpu_pkg: types and constants shared by the transprecision FP unit.
//
// The unit handles four floating-point formats, each packed as sign,
// exponent and mantissa like IEEE 754:
//   FP32    binary32     1 + 8 + 23 bits
//   FP16    binary16     1 + 5 + 10 bits
//   FP16ALT binary16alt  1 + 8 + 7 bits  (binary32's exponent range)
//   FP8     binary8      1 + 5 + 2 bits  (binary16's exponent range)
// The format widths are those of the formats the unit was proposed for; the
// operation and format encodings below are this design's own.
package tpfpu_pkg;

  typedef enum logic [1:0] {
    FP32    = 2'd0,
    FP16    = 2'd1,
    FP16ALT = 2'd2,
    FP8     = 2'd3
  } fp_fmt_e;

  typedef enum logic [1:0] {
    INT32 = 2'd0,
    INT16 = 2'd1,
    INT8  = 2'd2
  } int_fmt_e;

  typedef enum logic [2:0] {
    OP_ADD = 3'd0,  // Res = OpA + OpB            (fmt = src_fmt)
    OP_SUB = 3'd1,  // Res = OpA - OpB            (fmt = src_fmt)
    OP_MUL = 3'd2,  // Res = OpA * OpB            (fmt = src_fmt)
    OP_F2F = 3'd3,  // Res = (dst_fmt) OpA        (OpA in src_fmt)
    OP_F2I = 3'd4,  // Res = (int_fmt) OpA        (OpA in src_fmt)
    OP_I2F = 3'd5   // Res = (dst_fmt) OpA        (OpA in int_fmt)
  } op_e;

  // One request to the unit.
  typedef struct packed {
    op_e      op;
    fp_fmt_e  src_fmt;
    fp_fmt_e  dst_fmt;
    int_fmt_e int_fmt;
    logic     int_signed;  // integer side of F2I/I2F is signed
    logic     vectorial;   // use every lane of the selected slice width
  } fpu_req_t;

  // Slices of the unit.
  typedef enum logic [1:0] {
    SL_NONE = 2'd0,
    SL_32   = 2'd1,
    SL_16   = 2'd2,
    SL_8    = 2'd3
  } slice_e;

  // Control that reaches one slice lane (zero when the lane is idle).
  typedef struct packed {
    logic     valid;
    op_e      op;
    fp_fmt_e  src_fmt;
    fp_fmt_e  dst_fmt;
    logic     int_signed;
  } lane_ctrl_t;

  function automatic int unsigned exp_bits(fp_fmt_e f);
    case (f)
      FP32:    return 8;
      FP16:    return 5;
      FP16ALT: return 8;
      default: return 5;
    endcase
  endfunction

  function automatic int unsigned man_bits(fp_fmt_e f);
    case (f)
      FP32:    return 23;
      FP16:    return 10;
      FP16ALT: return 7;
      default: return 2;
    endcase
  endfunction

  // Arithmetic in binary32, binary16 and binary16alt has one pipeline stage.
  function automatic logic is_pipelined(op_e op, fp_fmt_e f);
    return (op inside {OP_ADD, OP_SUB, OP_MUL}) && (f != FP8);
  endfunction

endpackage
