// tb_slice8: self-checking test of slice8.
//
// slice8 is combinational: FP8 add/sub/mult and FP8<->int8 casts (signed and
// unsigned) must appear on res_o with valid_o in the same cycle. Every
// operation is swept exhaustively over both 8-bit operands (casts over the
// one operand) and compared with the reference model; an idle slice must
// output zero with valid_o low.
module tb_slice8;
  import tpfpu_pkg::*;
  import tb_fp_ref_pkg::*;
  import tb_fpu_ref_pkg::*;

  int checks = 0, failures = 0;

  lane_ctrl_t ctrl;
  logic [7:0] a, b, res;
  logic       valid;

  slice8 dut (.ctrl_i(ctrl), .a_i(a), .b_i(b), .res_o(res), .valid_o(valid));

  task automatic check(string what, longint unsigned got, longint unsigned exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s op=%s a=%h b=%h got=%h exp=%h", what, ctrl.op.name(), a, b, got, exp);
    end
  endtask

  initial begin
    #100000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    fpu_req_t r;
    op_e ops[5] = '{OP_ADD, OP_SUB, OP_MUL, OP_F2I, OP_I2F};
    ctrl = '0; a = '0; b = '0;
    #1 check("idle output", {valid, res}, '0);
    foreach (ops[k])
      for (int s = 0; s < 2; s++)
        for (int x = 0; x < 256; x++)
          for (int y = 0; y < ((ops[k] inside {OP_F2I, OP_I2F}) ? 1 : 256); y++) begin
            r = '0;
            r.op = ops[k]; r.src_fmt = FP8; r.dst_fmt = FP8; r.int_fmt = INT8;
            r.int_signed = s[0];
            ctrl.valid = 1; ctrl.op = r.op; ctrl.src_fmt = FP8; ctrl.dst_fmt = FP8;
            ctrl.int_signed = s[0];
            a = 8'(x); b = 8'(y);
            #1;
            check("valid", valid, 1);
            check("result", res, 8'(ref_lane(r, 8, a, b)));
          end
    ctrl = '0;
    #1 check("idle output", {valid, res}, '0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
