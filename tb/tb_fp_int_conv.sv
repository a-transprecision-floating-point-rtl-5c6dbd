// tb_fp_int_conv: self-checking test of fp_int_conv for the seven pairs of
// the unit: FP32, FP16, FP16alt, FP8 <-> int32; FP16, FP16alt <-> int16;
// FP8 <-> int8; signed and unsigned, both directions. 16-bit and 8-bit
// inputs are swept exhaustively, 32-bit ones are random with extra weight
// on values near the integer limits and on special values. Checks rounding
// to nearest even, saturation, NaN handling and the zero upper bits.
module tb_fp_int_conv;
  import tb_fp_ref_pkg::*;

  int checks = 0, failures = 0;

  logic        i2f, sgn;
  logic [31:0] o32, r0, r1, r2, r3;
  logic [15:0] o16, r4, r5;
  logic [7:0]  o8, r6;

  fp_int_conv #(.WIDTH(32), .EXP(8), .MAN(23), .IW(32)) c0 (.i2f_i(i2f), .signed_i(sgn), .op_i(o32), .res_o(r0));
  fp_int_conv #(.WIDTH(32), .EXP(5), .MAN(10), .IW(32)) c1 (.i2f_i(i2f), .signed_i(sgn), .op_i(o32), .res_o(r1));
  fp_int_conv #(.WIDTH(32), .EXP(8), .MAN(7),  .IW(32)) c2 (.i2f_i(i2f), .signed_i(sgn), .op_i(o32), .res_o(r2));
  fp_int_conv #(.WIDTH(32), .EXP(5), .MAN(2),  .IW(32)) c3 (.i2f_i(i2f), .signed_i(sgn), .op_i(o32), .res_o(r3));
  fp_int_conv #(.WIDTH(16), .EXP(5), .MAN(10), .IW(16)) c4 (.i2f_i(i2f), .signed_i(sgn), .op_i(o16), .res_o(r4));
  fp_int_conv #(.WIDTH(16), .EXP(8), .MAN(7),  .IW(16)) c5 (.i2f_i(i2f), .signed_i(sgn), .op_i(o16), .res_o(r5));
  fp_int_conv #(.WIDTH(8),  .EXP(5), .MAN(2),  .IW(8))  c6 (.i2f_i(i2f), .signed_i(sgn), .op_i(o8),  .res_o(r6));

  task automatic check(string what, longint unsigned got, longint unsigned exp, longint unsigned a);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s signed=%0d in=%h got=%h exp=%h", what, sgn, a, got, exp);
    end
  endtask

  function automatic longint unsigned rand_int32();
    case ($urandom_range(0, 5))
      0: return longint'($urandom_range(0, 300));
      1: return longint'(32'h7FFF_FFFF - $urandom_range(0, 300));
      2: return longint'(32'h8000_0000 + $urandom_range(0, 300));
      3: return longint'(32'hFFFF_FFFF - $urandom_range(0, 300));
      default: return longint'($urandom);
    endcase
  endfunction

  initial begin
    #100000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint unsigned x;
    o32 = 0; o16 = 0; o8 = 0; i2f = 0; sgn = 0;
    for (int s = 0; s < 2; s++) begin
      sgn = s[0];
      // float -> int and int -> float with 16/8-bit inputs, exhaustive
      for (int v = 0; v < 65536; v++) begin
        x = longint'(v);
        i2f = 0; o32 = 32'(x); o16 = 16'(x); o8 = 8'(x);
        #1;
        check("fp16->i32", r1, ref_f2i(x, 5, 10, 32, sgn), x);
        check("fp16alt->i32", r2, ref_f2i(x, 8, 7, 32, sgn), x);
        check("fp16->i16", r4, ref_f2i(x, 5, 10, 16, sgn), x);
        check("fp16alt->i16", r5, ref_f2i(x, 8, 7, 16, sgn), x);
        if (v < 256) begin
          check("fp8->i32", r3, ref_f2i(x, 5, 2, 32, sgn), x);
          check("fp8->i8", r6, ref_f2i(x, 5, 2, 8, sgn), x);
        end
        i2f = 1;
        #1;
        check("i16->fp16", r4, ref_i2f(x, 16, sgn, 5, 10), x);
        check("i16->fp16alt", r5, ref_i2f(x, 16, sgn, 8, 7), x);
        if (v < 256) check("i8->fp8", r6, ref_i2f(x, 8, sgn, 5, 2), x);
      end
      // 32-bit inputs, random
      for (int i = 0; i < 50000; i++) begin
        i2f = 0;
        x = rand_fp(8, 23);
        if (i % 3 == 0) x = (x & 32'h807F_FFFF) | (32'(8'd150 + 8'($urandom_range(0, 12))) << 23);
        o32 = 32'(x);
        #1 check("fp32->i32", r0, ref_f2i(x, 8, 23, 32, sgn), x);
        i2f = 1;
        x = rand_int32();
        o32 = 32'(x);
        #1;
        check("i32->fp32", r0, ref_i2f(x, 32, sgn, 8, 23), x);
        check("i32->fp16", r1, ref_i2f(x, 32, sgn, 5, 10), x);
        check("i32->fp16alt", r2, ref_i2f(x, 32, sgn, 8, 7), x);
        check("i32->fp8", r3, ref_i2f(x, 32, sgn, 5, 2), x);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
