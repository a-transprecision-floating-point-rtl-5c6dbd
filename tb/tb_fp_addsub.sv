// tb_fp_addsub: self-checking test of fp_addsub in the four formats.
//
// binary32, binary16 and binary16alt instances are pipelined (result one
// clock after the operands), the binary8 one is combinational, as in the
// unit. Every cycle each instance gets random operands (special values,
// denormals and near-cancelling pairs included) with valid high most of the
// time; results are compared bit for bit with the reference model one clock
// later (pipelined) or in the same cycle (binary8). While valid is low the
// pipelined result must hold. Exhaustive binary8 add and subtract run at
// the end.
module tb_fp_addsub;
  import tb_fp_ref_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  logic        v32, v16, v16a, s32, s16, s16a, s8;
  logic [31:0] a32, b32, r32;
  logic [15:0] a16, b16, r16, a16a, b16a, r16a;
  logic [7:0]  a8, b8, r8;

  fp_addsub #(.EXP(8), .MAN(23), .PIPE(1)) u32 (.clk_i(clk), .rst_ni(rst_n), .valid_i(v32),
    .sub_i(s32), .a_i(a32), .b_i(b32), .res_o(r32));
  fp_addsub #(.EXP(5), .MAN(10), .PIPE(1)) u16 (.clk_i(clk), .rst_ni(rst_n), .valid_i(v16),
    .sub_i(s16), .a_i(a16), .b_i(b16), .res_o(r16));
  fp_addsub #(.EXP(8), .MAN(7), .PIPE(1)) u16a (.clk_i(clk), .rst_ni(rst_n), .valid_i(v16a),
    .sub_i(s16a), .a_i(a16a), .b_i(b16a), .res_o(r16a));
  fp_addsub #(.EXP(5), .MAN(2), .PIPE(0)) u8 (.clk_i(clk), .rst_ni(rst_n), .valid_i(1'b1),
    .sub_i(s8), .a_i(a8), .b_i(b8), .res_o(r8));

  task automatic check(string what, longint unsigned got, longint unsigned exp,
                       longint unsigned a, longint unsigned b);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20)
        $display("FAIL %s a=%h b=%h got=%h exp=%h", what, a, b, got, exp);
    end
  endtask

  function automatic longint unsigned pick(int e, int m, longint unsigned other);
    if ($urandom_range(0, 3) == 0) return near(other, e, m);
    return rand_fp(e, m);
  endfunction

  longint unsigned e32, e16, e16a, x32a, x32b, x16a, x16b, xaa, xab;

  initial begin
    #100000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    v32 = 0; v16 = 0; v16a = 0; s32 = 0; s16 = 0; s16a = 0; s8 = 0;
    a32 = 0; b32 = 0; a16 = 0; b16 = 0; a16a = 0; b16a = 0; a8 = 0; b8 = 0;
    e32 = 0; e16 = 0; e16a = 0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 20000; i++) begin
      @(negedge clk);
      // results of the previous cycle's pipelined operations (or held values)
      if (i > 0) begin
        check("fp32", r32, e32, x32a, x32b);
        check("fp16", r16, e16, x16a, x16b);
        check("fp16alt", r16a, e16a, xaa, xab);
      end
      v32  = ($urandom_range(0, 9) != 0);
      v16  = ($urandom_range(0, 9) != 0);
      v16a = ($urandom_range(0, 9) != 0);
      s32 = $urandom_range(0, 1); s16 = $urandom_range(0, 1); s16a = $urandom_range(0, 1);
      a32  = 32'(rand_fp(8, 23)); b32  = 32'(pick(8, 23, a32));
      a16  = 16'(rand_fp(5, 10)); b16  = 16'(pick(5, 10, a16));
      a16a = 16'(rand_fp(8, 7));  b16a = 16'(pick(8, 7, a16a));
      if (v32)  begin e32  = ref_add(a32, b32, s32, 8, 23);   x32a = a32;  x32b = b32;  end
      if (v16)  begin e16  = ref_add(a16, b16, s16, 5, 10);   x16a = a16;  x16b = b16;  end
      if (v16a) begin e16a = ref_add(a16a, b16a, s16a, 8, 7); xaa  = a16a; xab  = b16a; end
      // binary8: combinational
      s8 = $urandom_range(0, 1);
      a8 = 8'(rand_fp(5, 2)); b8 = 8'(pick(5, 2, a8));
      #1 check("fp8", r8, ref_add(a8, b8, s8, 5, 2), a8, b8);
    end
    // exhaustive binary8
    for (int a = 0; a < 256; a++)
      for (int b = 0; b < 256; b++)
        for (int s = 0; s < 2; s++) begin
          a8 = 8'(a); b8 = 8'(b); s8 = s[0];
          #1 check("fp8 exhaustive", r8, ref_add(a8, b8, s8, 5, 2), a8, b8);
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
