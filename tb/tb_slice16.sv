// tb_slice16: self-checking test of slice32.
//
// Issues a random stream of every operation the slice holds (FP16 and
// FP16alt add/sub/mult, FP16/FP16alt<->int16 casts, signed and unsigned,
// FP16<->FP16alt, FP16<->FP8 and FP16alt<->FP8 casts), with idle cycles in
// between. Casts must appear on res_o with valid_o in the issue cycle;
// add/sub/mult exactly one clock later. No cast is issued in the cycle after
// an arithmetic operation, as in the unit.
module tb_slice16;
  import tpfpu_pkg::*;
  import tb_fp_ref_pkg::*;
  import tb_fpu_ref_pkg::*;

  localparam int SW = 16;

  logic clk = 1'b0, rst_n = 1'b0;
  int checks = 0, failures = 0;
  int n_pipe = 0, n_single = 0;
  always #5 clk = ~clk;

  lane_ctrl_t      ctrl;
  logic [SW-1:0]   a, b, res;
  logic            valid;

  slice16 dut (.clk_i(clk), .rst_ni(rst_n), .ctrl_i(ctrl), .a_i(a), .b_i(b),
               .res_o(res), .valid_o(valid));

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
    fpu_req_t r;
    bit pend, last_pipe;
    logic [SW-1:0] pend_exp;
    ctrl = '0; a = '0; b = '0;
    pend = 0; last_pipe = 0; pend_exp = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 30000; i++) begin
      @(negedge clk);
      if (pend) begin
        check("valid of pipelined result", valid, 1);
        check("pipelined result", res, pend_exp);
      end
      pend = 0;
      ctrl = '0; a = '0; b = '0;
      if ($urandom_range(0, 7) != 0) begin
        r = rand_req(SW);
        if (last_pipe) while (!pipelined_of(r)) r = rand_req(SW);
        a = SW'(rand_opnd(r, SW, '0, 0));
        b = SW'(rand_opnd(r, SW, a, 1));
        ctrl.valid = 1; ctrl.op = r.op; ctrl.src_fmt = r.src_fmt;
        ctrl.dst_fmt = r.dst_fmt; ctrl.int_signed = r.int_signed;
        if (pipelined_of(r)) begin
          pend = 1; pend_exp = SW'(ref_lane(r, SW, a, b)); n_pipe++;
          #1 if (!last_pipe) check("no result in issue cycle", valid, 0);
        end else begin
          n_single++;
          #1;
          check("valid of single-cycle result", valid, 1);
          check("single-cycle result", res, SW'(ref_lane(r, SW, a, b)));
        end
        last_pipe = pend;
      end else begin
        #1 if (!last_pipe) check("idle output", {valid, res}, '0);
        last_pipe = 0;
      end
    end
    if (n_pipe == 0 || n_single == 0) failures++;
    $display("pipelined ops %0d, single-cycle ops %0d", n_pipe, n_single);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
