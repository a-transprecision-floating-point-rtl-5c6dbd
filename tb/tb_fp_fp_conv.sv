// tb_fp_fp_conv: self-checking test of fp_fp_conv for the six format pairs
// of the unit (FP32<->FP16, FP32<->FP16alt, FP32<->FP8, FP16<->FP16alt,
// FP16<->FP8, FP16alt<->FP8), both directions. The narrow side of each pair
// is swept exhaustively where it has 16 bits or fewer; binary32 inputs are
// random with special values and denormals. Checks rounding, overflow to
// infinity, denormal results, NaN canonicalisation and zero upper bits.
module tb_fp_fp_conv;
  import tb_fp_ref_pkg::*;

  int checks = 0, failures = 0;

  logic        d[6];
  logic [31:0] o0, o1, o2, r0, r1, r2;
  logic [15:0] o3, o4, o5, r3, r4, r5;

  fp_fp_conv #(.WIDTH(32), .EA(8), .MA(23), .EB(5), .MB(10)) c0 (.b2a_i(d[0]), .op_i(o0), .res_o(r0));
  fp_fp_conv #(.WIDTH(32), .EA(8), .MA(23), .EB(8), .MB(7))  c1 (.b2a_i(d[1]), .op_i(o1), .res_o(r1));
  fp_fp_conv #(.WIDTH(32), .EA(8), .MA(23), .EB(5), .MB(2))  c2 (.b2a_i(d[2]), .op_i(o2), .res_o(r2));
  fp_fp_conv #(.WIDTH(16), .EA(5), .MA(10), .EB(8), .MB(7))  c3 (.b2a_i(d[3]), .op_i(o3), .res_o(r3));
  fp_fp_conv #(.WIDTH(16), .EA(5), .MA(10), .EB(5), .MB(2))  c4 (.b2a_i(d[4]), .op_i(o4), .res_o(r4));
  fp_fp_conv #(.WIDTH(16), .EA(8), .MA(7),  .EB(5), .MB(2))  c5 (.b2a_i(d[5]), .op_i(o5), .res_o(r5));

  task automatic check(string what, longint unsigned got, longint unsigned exp, longint unsigned a);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s in=%h got=%h exp=%h", what, a, got, exp);
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
    longint unsigned x;
    foreach (d[i]) d[i] = 0;
    o0 = 0; o1 = 0; o2 = 0; o3 = 0; o4 = 0; o5 = 0;
    // narrow -> wide and narrow -> narrow, exhaustive
    for (int v = 0; v < 65536; v++) begin
      x = longint'(v);
      d[0] = 1; o0 = 32'(x);
      d[1] = 1; o1 = 32'(x);
      d[3] = 0; o3 = 16'(x);
      d[4] = 0; o4 = 16'(x);
      d[5] = 0; o5 = 16'(x);
      #1;
      check("fp16->fp32", r0, ref_f2f(x, 5, 10, 8, 23), x);
      check("fp16alt->fp32", r1, ref_f2f(x, 8, 7, 8, 23), x);
      check("fp16->fp16alt", r3, ref_f2f(x, 5, 10, 8, 7), x);
      check("fp16->fp8", r4, ref_f2f(x, 5, 10, 5, 2), x);
      check("fp16alt->fp8", r5, ref_f2f(x, 8, 7, 5, 2), x);
      d[3] = 1;
      #1 check("fp16alt->fp16", r3, ref_f2f(x, 8, 7, 5, 10), x);
      if (v < 256) begin
        d[2] = 1; o2 = 32'(x); d[4] = 1; d[5] = 1;
        #1;
        check("fp8->fp32", r2, ref_f2f(x, 5, 2, 8, 23), x);
        check("fp8->fp16", r4, ref_f2f(x, 5, 2, 5, 10), x);
        check("fp8->fp16alt", r5, ref_f2f(x, 5, 2, 8, 7), x);
      end
    end
    // wide -> narrow, random binary32
    for (int i = 0; i < 100000; i++) begin
      x = rand_fp(8, 23);
      d[0] = 0; d[1] = 0; d[2] = 0;
      o0 = 32'(x); o1 = 32'(x); o2 = 32'(x);
      #1;
      check("fp32->fp16", r0, ref_f2f(x, 8, 23, 5, 10), x);
      check("fp32->fp16alt", r1, ref_f2f(x, 8, 23, 8, 7), x);
      check("fp32->fp8", r2, ref_f2f(x, 8, 23, 5, 2), x);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
