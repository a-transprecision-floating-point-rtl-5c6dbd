// operand_distribution: decodes a request and distributes the operands to
// the slices, with operand isolation.
//
// The unit has one 32-bit slice, two 16-bit slices and four 8-bit slices
// that all see the same 32-bit OpA/OpB. This block chooses the slice width
// an operation belongs to and hands each lane of that width its sub-word:
// 16-bit lane j gets bits [16j+15:16j], 8-bit lane k gets bits [8k+7:8k].
// A scalar operation uses lane 0 only; a vectorial one every lane of the
// width (vectorial has no effect on the 32-bit slice). Every other slice
// gets zero operands and an all-zero control word, so its logic does not
// switch. Combinational.
//
// Slice choice (this design's encoding of the paper's unit list):
//   ADD/SUB/MUL        by format: FP32 -> 32, FP16/FP16alt -> 16, FP8 -> 8
//   F2I/I2F            by integer width: int32 -> 32 (any FP format),
//                      int16 -> 16 (FP16, FP16alt), int8 -> 8 (FP8)
//   F2F                32 if either side is FP32, otherwise 16
// Other combinations (FP8 <-> int16, FP32 <-> int16, a cast to the same
// format, ...) have no unit: legal_o is low and no slice is enabled.
// pipelined_o tells the issue logic that the result comes one cycle later.
module operand_distribution
  import tpfpu_pkg::*;
#(
  parameter bit PIPE_WIDE = 1'b1
) (
  input  logic        valid_i,
  input  fpu_req_t    req_i,
  input  logic [31:0] opa_i,
  input  logic [31:0] opb_i,
  // decode
  output slice_e      slice_o,
  output logic        legal_o,
  output logic        pipelined_o,
  // slice32
  output lane_ctrl_t  ctrl32_o,
  output logic [31:0] a32_o,
  output logic [31:0] b32_o,
  // 2 x slice16
  output lane_ctrl_t  ctrl16_o [2],
  output logic [15:0] a16_o    [2],
  output logic [15:0] b16_o    [2],
  // 4 x slice8
  output lane_ctrl_t  ctrl8_o  [4],
  output logic [7:0]  a8_o     [4],
  output logic [7:0]  b8_o     [4]
);
  fp_fmt_e    ffmt;  // the FP side of an int cast
  lane_ctrl_t ctrl;

  always_comb begin
    ffmt    = (req_i.op == OP_F2I) ? req_i.src_fmt : req_i.dst_fmt;
    slice_o = SL_NONE;
    case (req_i.op)
      OP_ADD, OP_SUB, OP_MUL:
        case (req_i.src_fmt)
          FP32:          slice_o = SL_32;
          FP16, FP16ALT: slice_o = SL_16;
          default:       slice_o = SL_8;
        endcase
      OP_F2I, OP_I2F:
        case (req_i.int_fmt)
          INT32:   slice_o = SL_32;
          INT16:   slice_o = (ffmt inside {FP16, FP16ALT}) ? SL_16 : SL_NONE;
          INT8:    slice_o = (ffmt == FP8) ? SL_8 : SL_NONE;
          default: slice_o = SL_NONE;
        endcase
      OP_F2F:
        if (req_i.src_fmt == req_i.dst_fmt)                          slice_o = SL_NONE;
        else if (req_i.src_fmt == FP32 || req_i.dst_fmt == FP32)     slice_o = SL_32;
        else                                                         slice_o = SL_16;
      default: slice_o = SL_NONE;
    endcase
    legal_o     = (slice_o != SL_NONE);
    pipelined_o = legal_o && PIPE_WIDE && is_pipelined(req_i.op, req_i.src_fmt);

    ctrl.valid      = valid_i;
    ctrl.op         = req_i.op;
    ctrl.src_fmt    = req_i.src_fmt;
    ctrl.dst_fmt    = req_i.dst_fmt;
    ctrl.int_signed = req_i.int_signed;
  end

  always_comb begin
    ctrl32_o = '0;
    a32_o    = '0;
    b32_o    = '0;
    if (valid_i && slice_o == SL_32) begin
      ctrl32_o = ctrl;
      a32_o    = opa_i;
      b32_o    = opb_i;
    end
    for (int j = 0; j < 2; j++) begin
      ctrl16_o[j] = '0;
      a16_o[j]    = '0;
      b16_o[j]    = '0;
      if (valid_i && slice_o == SL_16 && (j == 0 || req_i.vectorial)) begin
        ctrl16_o[j] = ctrl;
        a16_o[j]    = opa_i[16*j +: 16];
        b16_o[j]    = opb_i[16*j +: 16];
      end
    end
    for (int k = 0; k < 4; k++) begin
      ctrl8_o[k] = '0;
      a8_o[k]    = '0;
      b8_o[k]    = '0;
      if (valid_i && slice_o == SL_8 && (k == 0 || req_i.vectorial)) begin
        ctrl8_o[k] = ctrl;
        a8_o[k]    = opa_i[8*k +: 8];
        b8_o[k]    = opb_i[8*k +: 8];
      end
    end
  end
endmodule
