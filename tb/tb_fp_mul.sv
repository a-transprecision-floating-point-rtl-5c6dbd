// tb_fp_mul: self-checking test of fp_mul in the four formats.
//
// Same scheme as tb_fp_addsub: random operands with special values and
// denormals, pipelined binary32/binary16/binary16alt instances checked one
// clock after the operands (and holding while valid is low), binary8
// checked combinationally and then exhaustively.
module tb_fp_mul;
  import tb_fp_ref_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  logic        v32, v16, v16a;
  logic [31:0] a32, b32, r32;
  logic [15:0] a16, b16, r16, a16a, b16a, r16a;
  logic [7:0]  a8, b8, r8;

  fp_mul #(.EXP(8), .MAN(23), .PIPE(1)) u32 (.clk_i(clk), .rst_ni(rst_n), .valid_i(v32),
    .a_i(a32), .b_i(b32), .res_o(r32));
  fp_mul #(.EXP(5), .MAN(10), .PIPE(1)) u16 (.clk_i(clk), .rst_ni(rst_n), .valid_i(v16),
    .a_i(a16), .b_i(b16), .res_o(r16));
  fp_mul #(.EXP(8), .MAN(7), .PIPE(1)) u16a (.clk_i(clk), .rst_ni(rst_n), .valid_i(v16a),
    .a_i(a16a), .b_i(b16a), .res_o(r16a));
  fp_mul #(.EXP(5), .MAN(2), .PIPE(0)) u8 (.clk_i(clk), .rst_ni(rst_n), .valid_i(1'b1),
    .a_i(a8), .b_i(b8), .res_o(r8));

  task automatic check(string what, longint unsigned got, longint unsigned exp,
                       longint unsigned a, longint unsigned b);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20)
        $display("FAIL %s a=%h b=%h got=%h exp=%h", what, a, b, got, exp);
    end
  endtask

  longint unsigned e32, e16, e16a, x32a, x32b, x16a, x16b, xaa, xab;

  initial begin
    #100000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    v32 = 0; v16 = 0; v16a = 0;
    a32 = 0; b32 = 0; a16 = 0; b16 = 0; a16a = 0; b16a = 0; a8 = 0; b8 = 0;
    e32 = 0; e16 = 0; e16a = 0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 20000; i++) begin
      @(negedge clk);
      if (i > 0) begin
        check("fp32", r32, e32, x32a, x32b);
        check("fp16", r16, e16, x16a, x16b);
        check("fp16alt", r16a, e16a, xaa, xab);
      end
      v32  = ($urandom_range(0, 9) != 0);
      v16  = ($urandom_range(0, 9) != 0);
      v16a = ($urandom_range(0, 9) != 0);
      a32  = 32'(rand_fp(8, 23)); b32  = 32'(rand_fp(8, 23));
      a16  = 16'(rand_fp(5, 10)); b16  = 16'(rand_fp(5, 10));
      a16a = 16'(rand_fp(8, 7));  b16a = 16'(rand_fp(8, 7));
      if (v32)  begin e32  = ref_mul(a32, b32, 8, 23);   x32a = a32;  x32b = b32;  end
      if (v16)  begin e16  = ref_mul(a16, b16, 5, 10);   x16a = a16;  x16b = b16;  end
      if (v16a) begin e16a = ref_mul(a16a, b16a, 8, 7);  xaa  = a16a; xab  = b16a; end
      a8 = 8'(rand_fp(5, 2)); b8 = 8'(rand_fp(5, 2));
      #1 check("fp8", r8, ref_mul(a8, b8, 5, 2), a8, b8);
    end
    for (int a = 0; a < 256; a++)
      for (int b = 0; b < 256; b++) begin
        a8 = 8'(a); b8 = 8'(b);
        #1 check("fp8 exhaustive", r8, ref_mul(a8, b8, 5, 2), a8, b8);
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
