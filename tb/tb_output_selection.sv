// tb_output_selection: self-checking test of output_selection.
//
// Drives random data on every slice output with the valid pattern of one
// slice width at a time (32-bit slice, one or both 16-bit lanes, one or all
// four 8-bit lanes, or nothing) and checks the assembled 32-bit word:
// the 32-bit result whole, lanes at their positions, zeros elsewhere.
module tb_output_selection;
  int checks = 0, failures = 0;

  logic [31:0] r32, res;
  logic        v32, valid;
  logic [15:0] r16[2];
  logic        v16[2];
  logic [7:0]  r8[4];
  logic        v8[4];

  output_selection dut (.res32_i(r32), .v32_i(v32), .res16_i(r16), .v16_i(v16),
                        .res8_i(r8), .v8_i(v8), .res_o(res), .valid_o(valid));

  task automatic check(string what, longint unsigned got, longint unsigned exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s got=%h exp=%h", what, got, exp);
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
    int mode;
    logic [31:0] exp;
    for (int i = 0; i < 5000; i++) begin
      r32 = $urandom;
      foreach (r16[j]) r16[j] = 16'($urandom);
      foreach (r8[k])  r8[k]  = 8'($urandom);
      v32 = 0; foreach (v16[j]) v16[j] = 0; foreach (v8[k]) v8[k] = 0;
      mode = $urandom_range(0, 5);
      case (mode)
        0: ;
        1: begin v32 = 1; exp = r32; end
        2: begin v16[0] = 1; exp = {16'd0, r16[0]}; end
        3: begin v16[0] = 1; v16[1] = 1; exp = {r16[1], r16[0]}; end
        4: begin v8[0] = 1; exp = {24'd0, r8[0]}; end
        default: begin foreach (v8[k]) v8[k] = 1; exp = {r8[3], r8[2], r8[1], r8[0]}; end
      endcase
      if (mode == 0) exp = '0;
      #1;
      check("valid", valid, mode != 0);
      check("result", res, exp);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
