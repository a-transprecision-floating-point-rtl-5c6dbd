// slice32: the 32-bit slice of the transprecision FP unit.
//
// Holds every operation whose widest operand or result is 32 bits:
//   FP32 ADD/SUB and FP32 MULT                  (pipelined when PIPE = 1)
//   FP32, FP16, FP16alt, FP8  <-> int32 casts   (one fp_int_conv each)
//   FP32 <-> FP16, FP32 <-> FP16alt, FP32 <-> FP8 casts (one fp_fp_conv each)
// This is the unit list of the slice as the paper draws it. The slice
// decodes the lane control it receives, enables exactly one unit and feeds
// zeros to all others (operand isolation), then selects the unit's output.
//
// Timing: ctrl_i/a_i/b_i are taken in the cycle ctrl_i.valid is high. A
// cast (and, with PIPE = 0, any operation) appears on res_o in that same
// cycle, combinationally; an add/sub/mult appears one cycle later, from the
// unit's pipeline register. valid_o marks a result on res_o. The caller must
// not start a single-cycle operation in the cycle after a pipelined one, as
// both would then complete together (the unit's issue logic prevents this).
// Narrow results are right-aligned with zeros above. Casts between FP and
// int take the FP side in the low bits of a_i.
module slice32
  import tpfpu_pkg::*;
#(
  parameter bit PIPE = 1'b1
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  lane_ctrl_t  ctrl_i,
  input  logic [31:0] a_i,
  input  logic [31:0] b_i,
  output logic [31:0] res_o,
  output logic        valid_o
);
  logic       is_arith;
  logic       en_add, en_mul;
  logic [3:0] en_i;      // FP32, FP16, FP16ALT, FP8 <-> int32
  logic [2:0] en_f;      // FP32 <-> FP16, FP16ALT, FP8
  fp_fmt_e    ifmt, ofmt;

  always_comb begin
    is_arith = ctrl_i.op inside {OP_ADD, OP_SUB, OP_MUL};
    en_add = ctrl_i.valid && (ctrl_i.op inside {OP_ADD, OP_SUB});
    en_mul = ctrl_i.valid && (ctrl_i.op == OP_MUL);
    ifmt   = (ctrl_i.op == OP_F2I) ? ctrl_i.src_fmt : ctrl_i.dst_fmt;
    ofmt   = (ctrl_i.src_fmt == FP32) ? ctrl_i.dst_fmt : ctrl_i.src_fmt;
    en_i   = '0;
    en_f   = '0;
    if (ctrl_i.valid && (ctrl_i.op inside {OP_F2I, OP_I2F}))
      en_i[ifmt] = 1'b1;
    if (ctrl_i.valid && ctrl_i.op == OP_F2F && ofmt != FP32)
      en_f[ofmt - 2'd1] = 1'b1;
  end

  // operand isolation: a disabled unit sees zeros
  function automatic logic [31:0] gate(logic en, logic [31:0] v);
    return en ? v : 32'd0;
  endfunction

  logic [31:0] r_add, r_mul;
  logic [31:0] r_i [4];
  logic [31:0] r_f [3];

  fp_addsub #(.EXP(8), .MAN(23), .PIPE(PIPE)) u_add (
    .clk_i, .rst_ni, .valid_i(en_add), .sub_i(en_add & (ctrl_i.op == OP_SUB)),
    .a_i(gate(en_add, a_i)), .b_i(gate(en_add, b_i)), .res_o(r_add));

  fp_mul #(.EXP(8), .MAN(23), .PIPE(PIPE)) u_mul (
    .clk_i, .rst_ni, .valid_i(en_mul),
    .a_i(gate(en_mul, a_i)), .b_i(gate(en_mul, b_i)), .res_o(r_mul));

  fp_int_conv #(.WIDTH(32), .EXP(8), .MAN(23), .IW(32)) u_fp32_i32 (
    .i2f_i(en_i[0] & (ctrl_i.op == OP_I2F)), .signed_i(en_i[0] & ctrl_i.int_signed),
    .op_i(gate(en_i[0], a_i)), .res_o(r_i[0]));
  fp_int_conv #(.WIDTH(32), .EXP(5), .MAN(10), .IW(32)) u_fp16_i32 (
    .i2f_i(en_i[1] & (ctrl_i.op == OP_I2F)), .signed_i(en_i[1] & ctrl_i.int_signed),
    .op_i(gate(en_i[1], a_i)), .res_o(r_i[1]));
  fp_int_conv #(.WIDTH(32), .EXP(8), .MAN(7), .IW(32)) u_fp16alt_i32 (
    .i2f_i(en_i[2] & (ctrl_i.op == OP_I2F)), .signed_i(en_i[2] & ctrl_i.int_signed),
    .op_i(gate(en_i[2], a_i)), .res_o(r_i[2]));
  fp_int_conv #(.WIDTH(32), .EXP(5), .MAN(2), .IW(32)) u_fp8_i32 (
    .i2f_i(en_i[3] & (ctrl_i.op == OP_I2F)), .signed_i(en_i[3] & ctrl_i.int_signed),
    .op_i(gate(en_i[3], a_i)), .res_o(r_i[3]));

  // format A is FP32; b2a means "into FP32"
  fp_fp_conv #(.WIDTH(32), .EA(8), .MA(23), .EB(5), .MB(10)) u_fp32_fp16 (
    .b2a_i(en_f[0] & (ctrl_i.dst_fmt == FP32)), .op_i(gate(en_f[0], a_i)), .res_o(r_f[0]));
  fp_fp_conv #(.WIDTH(32), .EA(8), .MA(23), .EB(8), .MB(7)) u_fp32_fp16alt (
    .b2a_i(en_f[1] & (ctrl_i.dst_fmt == FP32)), .op_i(gate(en_f[1], a_i)), .res_o(r_f[1]));
  fp_fp_conv #(.WIDTH(32), .EA(8), .MA(23), .EB(5), .MB(2)) u_fp32_fp8 (
    .b2a_i(en_f[2] & (ctrl_i.dst_fmt == FP32)), .op_i(gate(en_f[2], a_i)), .res_o(r_f[2]));

  // ---- completion and output selection ----
  logic pipe_op, pipe_vld_q, pipe_mul_q;
  logic [31:0] r_single;

  assign pipe_op = PIPE && is_arith;

  always_ff @(posedge clk_i or negedge rst_ni)
    if (!rst_ni) begin
      pipe_vld_q <= 1'b0;
      pipe_mul_q <= 1'b0;
    end else begin
      pipe_vld_q <= ctrl_i.valid && pipe_op;
      if (ctrl_i.valid && pipe_op) pipe_mul_q <= en_mul;
    end

  always_comb begin
    r_single = '0;
    if (en_add) r_single = r_add;
    if (en_mul) r_single = r_mul;
    for (int k = 0; k < 4; k++) if (en_i[k]) r_single = r_i[k];
    for (int k = 0; k < 3; k++) if (en_f[k]) r_single = r_f[k];
  end

  always_comb begin
    if (pipe_vld_q) begin
      res_o   = pipe_mul_q ? r_mul : r_add;
      valid_o = 1'b1;
    end else if (ctrl_i.valid && !pipe_op) begin
      res_o   = r_single;
      valid_o = 1'b1;
    end else begin
      res_o   = '0;
      valid_o = 1'b0;
    end
  end

  // a single-cycle operation must not collide with a pipelined one
  a_no_collision: assert property (@(posedge clk_i) disable iff (!rst_ni)
    !(pipe_vld_q && ctrl_i.valid && !pipe_op));
endmodule
