// slice8: one 8-bit lane of the transprecision FP unit (the unit has four).
//
// Holds the binary8 operations: FP8 ADD/SUB, FP8 MULT and FP8 <-> int8
// casts, as the paper draws the slice. binary8 arithmetic is not pipelined,
// so every operation completes combinationally in the cycle it is issued
// (one clock of latency once the unit's output register is counted).
// Decoding and operand isolation are as in slice32.
module slice8
  import tpfpu_pkg::*;
(
  input  lane_ctrl_t ctrl_i,
  input  logic [7:0] a_i,
  input  logic [7:0] b_i,
  output logic [7:0] res_o,
  output logic       valid_o
);
  logic en_add, en_mul, en_i;

  assign en_add = ctrl_i.valid && (ctrl_i.op inside {OP_ADD, OP_SUB});
  assign en_mul = ctrl_i.valid && (ctrl_i.op == OP_MUL);
  assign en_i   = ctrl_i.valid && (ctrl_i.op inside {OP_F2I, OP_I2F});

  function automatic logic [7:0] gate(logic en, logic [7:0] v);
    return en ? v : 8'd0;
  endfunction

  logic [7:0] r_add, r_mul, r_i;

  // with PIPE = 0 the clock and valid inputs are unused
  fp_addsub #(.EXP(5), .MAN(2), .PIPE(1'b0)) u_add8 (
    .clk_i(1'b0), .rst_ni(1'b1), .valid_i(en_add), .sub_i(en_add & (ctrl_i.op == OP_SUB)),
    .a_i(gate(en_add, a_i)), .b_i(gate(en_add, b_i)), .res_o(r_add));
  fp_mul #(.EXP(5), .MAN(2), .PIPE(1'b0)) u_mul8 (
    .clk_i(1'b0), .rst_ni(1'b1), .valid_i(en_mul),
    .a_i(gate(en_mul, a_i)), .b_i(gate(en_mul, b_i)), .res_o(r_mul));
  fp_int_conv #(.WIDTH(8), .EXP(5), .MAN(2), .IW(8)) u_fp8_i8 (
    .i2f_i(en_i & (ctrl_i.op == OP_I2F)), .signed_i(en_i & ctrl_i.int_signed),
    .op_i(gate(en_i, a_i)), .res_o(r_i));

  always_comb begin
    res_o = '0;
    if (en_add) res_o = r_add;
    if (en_mul) res_o = r_mul;
    if (en_i)   res_o = r_i;
  end
  assign valid_o = ctrl_i.valid;
endmodule
