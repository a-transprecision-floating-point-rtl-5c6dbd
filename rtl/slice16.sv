// slice16: one 16-bit lane of the transprecision FP unit (the unit has two).
//
// Holds every operation whose widest operand or result is 16 bits:
//   FP16 ADD/SUB, FP16alt ADD/SUB, FP16 MULT, FP16alt MULT (pipelined when
//   PIPE = 1)
//   FP16 <-> int16 and FP16alt <-> int16 casts
//   FP16 <-> FP16alt, FP16 <-> FP8 and FP16alt <-> FP8 casts
// This is the unit list of the slice as the paper draws it. Decoding,
// operand isolation, timing and alignment are as in slice32: casts complete
// combinationally in the issue cycle, arithmetic one cycle later, and a
// narrow (FP8) result is right-aligned in res_o with zeros above.
module slice16
  import tpfpu_pkg::*;
#(
  parameter bit PIPE = 1'b1
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  lane_ctrl_t  ctrl_i,
  input  logic [15:0] a_i,
  input  logic [15:0] b_i,
  output logic [15:0] res_o,
  output logic        valid_o
);
  logic       is_arith;
  logic [1:0] en_add, en_mul;  // [0] FP16, [1] FP16ALT
  logic [1:0] en_i;            // FP16, FP16ALT <-> int16
  logic [2:0] en_f;            // FP16<->FP16ALT, FP16<->FP8, FP16ALT<->FP8
  fp_fmt_e    ifmt, wfmt;

  always_comb begin
    is_arith = ctrl_i.op inside {OP_ADD, OP_SUB, OP_MUL};
    en_add = '0;
    en_mul = '0;
    en_i   = '0;
    en_f   = '0;
    ifmt   = (ctrl_i.op == OP_F2I) ? ctrl_i.src_fmt : ctrl_i.dst_fmt;
    // the 16-bit side of a cast that involves FP8
    wfmt   = (ctrl_i.src_fmt == FP8) ? ctrl_i.dst_fmt : ctrl_i.src_fmt;
    if (ctrl_i.valid) begin
      case (ctrl_i.op)
        OP_ADD, OP_SUB: en_add[ctrl_i.src_fmt == FP16ALT] = 1'b1;
        OP_MUL:         en_mul[ctrl_i.src_fmt == FP16ALT] = 1'b1;
        OP_F2I, OP_I2F: en_i[ifmt == FP16ALT] = 1'b1;
        OP_F2F: begin
          if (ctrl_i.src_fmt != FP8 && ctrl_i.dst_fmt != FP8) en_f[0] = 1'b1;
          else if (wfmt == FP16)                               en_f[1] = 1'b1;
          else                                                 en_f[2] = 1'b1;
        end
        default: ;
      endcase
    end
  end

  function automatic logic [15:0] gate(logic en, logic [15:0] v);
    return en ? v : 16'd0;
  endfunction

  logic [15:0] r_add [2];
  logic [15:0] r_mul [2];
  logic [15:0] r_i [2];
  logic [15:0] r_f [3];
  logic        is_sub;

  assign is_sub = (ctrl_i.op == OP_SUB);

  fp_addsub #(.EXP(5), .MAN(10), .PIPE(PIPE)) u_add16 (
    .clk_i, .rst_ni, .valid_i(en_add[0]), .sub_i(en_add[0] & is_sub),
    .a_i(gate(en_add[0], a_i)), .b_i(gate(en_add[0], b_i)), .res_o(r_add[0]));
  fp_addsub #(.EXP(8), .MAN(7), .PIPE(PIPE)) u_add16alt (
    .clk_i, .rst_ni, .valid_i(en_add[1]), .sub_i(en_add[1] & is_sub),
    .a_i(gate(en_add[1], a_i)), .b_i(gate(en_add[1], b_i)), .res_o(r_add[1]));
  fp_mul #(.EXP(5), .MAN(10), .PIPE(PIPE)) u_mul16 (
    .clk_i, .rst_ni, .valid_i(en_mul[0]),
    .a_i(gate(en_mul[0], a_i)), .b_i(gate(en_mul[0], b_i)), .res_o(r_mul[0]));
  fp_mul #(.EXP(8), .MAN(7), .PIPE(PIPE)) u_mul16alt (
    .clk_i, .rst_ni, .valid_i(en_mul[1]),
    .a_i(gate(en_mul[1], a_i)), .b_i(gate(en_mul[1], b_i)), .res_o(r_mul[1]));

  fp_int_conv #(.WIDTH(16), .EXP(5), .MAN(10), .IW(16)) u_fp16_i16 (
    .i2f_i(en_i[0] & (ctrl_i.op == OP_I2F)), .signed_i(en_i[0] & ctrl_i.int_signed),
    .op_i(gate(en_i[0], a_i)), .res_o(r_i[0]));
  fp_int_conv #(.WIDTH(16), .EXP(8), .MAN(7), .IW(16)) u_fp16alt_i16 (
    .i2f_i(en_i[1] & (ctrl_i.op == OP_I2F)), .signed_i(en_i[1] & ctrl_i.int_signed),
    .op_i(gate(en_i[1], a_i)), .res_o(r_i[1]));

  // b2a means "into format A"
  fp_fp_conv #(.WIDTH(16), .EA(5), .MA(10), .EB(8), .MB(7)) u_fp16_fp16alt (
    .b2a_i(en_f[0] & (ctrl_i.dst_fmt == FP16)), .op_i(gate(en_f[0], a_i)), .res_o(r_f[0]));
  fp_fp_conv #(.WIDTH(16), .EA(5), .MA(10), .EB(5), .MB(2)) u_fp16_fp8 (
    .b2a_i(en_f[1] & (ctrl_i.dst_fmt == FP16)), .op_i(gate(en_f[1], a_i)), .res_o(r_f[1]));
  fp_fp_conv #(.WIDTH(16), .EA(8), .MA(7), .EB(5), .MB(2)) u_fp16alt_fp8 (
    .b2a_i(en_f[2] & (ctrl_i.dst_fmt == FP16ALT)), .op_i(gate(en_f[2], a_i)), .res_o(r_f[2]));

  // ---- completion and output selection ----
  logic       pipe_op, pipe_vld_q, pipe_mul_q, pipe_alt_q;
  logic [15:0] r_single;

  assign pipe_op = PIPE && is_arith;

  always_ff @(posedge clk_i or negedge rst_ni)
    if (!rst_ni) begin
      pipe_vld_q <= 1'b0;
      pipe_mul_q <= 1'b0;
      pipe_alt_q <= 1'b0;
    end else begin
      pipe_vld_q <= ctrl_i.valid && pipe_op;
      if (ctrl_i.valid && pipe_op) begin
        pipe_mul_q <= |en_mul;
        pipe_alt_q <= en_add[1] | en_mul[1];
      end
    end

  always_comb begin
    r_single = '0;
    for (int k = 0; k < 2; k++) begin
      if (en_add[k]) r_single = r_add[k];
      if (en_mul[k]) r_single = r_mul[k];
      if (en_i[k])   r_single = r_i[k];
    end
    for (int k = 0; k < 3; k++) if (en_f[k]) r_single = r_f[k];
  end

  always_comb begin
    if (pipe_vld_q) begin
      res_o   = pipe_mul_q ? r_mul[pipe_alt_q] : r_add[pipe_alt_q];
      valid_o = 1'b1;
    end else if (ctrl_i.valid && !pipe_op) begin
      res_o   = r_single;
      valid_o = 1'b1;
    end else begin
      res_o   = '0;
      valid_o = 1'b0;
    end
  end

  a_no_collision: assert property (@(posedge clk_i) disable iff (!rst_ni)
    !(pipe_vld_q && ctrl_i.valid && !pipe_op));
endmodule
