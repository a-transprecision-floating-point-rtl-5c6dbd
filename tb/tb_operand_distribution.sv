// tb_operand_distribution: self-checking test of operand_distribution.
//
// Applies random requests (legal and illegal, scalar and vectorial, with
// and without valid) and checks the decode outputs against the reference
// model, and that each lane of each slice gets either its own sub-word of
// OpA/OpB and the request's control, or zeros (operand isolation).
module tb_operand_distribution;
  import tpfpu_pkg::*;
  import tb_fpu_ref_pkg::*;

  int checks = 0, failures = 0;

  logic        valid;
  fpu_req_t    req;
  logic [31:0] opa, opb;
  slice_e      slice;
  logic        legal, pipelined;
  lane_ctrl_t  c32, c16[2], c8[4];
  logic [31:0] a32, b32;
  logic [15:0] a16[2], b16[2];
  logic [7:0]  a8[4], b8[4];

  operand_distribution dut (
    .valid_i(valid), .req_i(req), .opa_i(opa), .opb_i(opb),
    .slice_o(slice), .legal_o(legal), .pipelined_o(pipelined),
    .ctrl32_o(c32), .a32_o(a32), .b32_o(b32),
    .ctrl16_o(c16), .a16_o(a16), .b16_o(b16),
    .ctrl8_o(c8), .a8_o(a8), .b8_o(b8));

  task automatic check(string what, longint unsigned got, longint unsigned exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s req=%p got=%h exp=%h", what, req, got, exp);
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
    int sw, n, n_illegal;
    lane_ctrl_t c;
    n_illegal = 0;
    for (int i = 0; i < 20000; i++) begin
      valid = ($urandom_range(0, 7) != 0);
      req   = fpu_req_t'($urandom);
      if (req.int_fmt == 2'd3) req.int_fmt = INT8;
      if (req.op > OP_I2F) req.op = OP_ADD;
      opa = $urandom; opb = $urandom;
      #1;
      sw = slice_of(req);
      if (sw == 0) n_illegal++;
      check("slice", slice, (sw == 32) ? SL_32 : (sw == 16) ? SL_16 : (sw == 8) ? SL_8 : SL_NONE);
      check("legal", legal, sw != 0);
      check("pipelined", pipelined, pipelined_of(req));
      c = '0;
      c.valid = 1; c.op = req.op; c.src_fmt = req.src_fmt; c.dst_fmt = req.dst_fmt;
      c.int_signed = req.int_signed;
      n = (sw == 32 || !req.vectorial) ? 1 : 32 / sw;
      if (valid && sw == 32) check("slice32", {c32, a32, b32}, {c, opa, opb});
      else                   check("slice32 isolated", {c32, a32, b32}, '0);
      for (int j = 0; j < 2; j++)
        if (valid && sw == 16 && j < n) check("slice16", {c16[j], a16[j], b16[j]}, {c, opa[16*j +: 16], opb[16*j +: 16]});
        else                            check("slice16 isolated", {c16[j], a16[j], b16[j]}, '0);
      for (int k = 0; k < 4; k++)
        if (valid && sw == 8 && k < n) check("slice8", {c8[k], a8[k], b8[k]}, {c, opa[8*k +: 8], opb[8*k +: 8]});
        else                           check("slice8 isolated", {c8[k], a8[k], b8[k]}, '0);
    end
    if (n_illegal == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
