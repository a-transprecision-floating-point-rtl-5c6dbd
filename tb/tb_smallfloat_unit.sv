// tb_smallfloat_unit: end-to-end test of the transprecision FP unit at its
// default parameters.
//
// Streams random requests through the request/result handshake: every
// operation of every slice, scalar and vectorial, signed and unsigned
// casts, requests that have no unit, and idle cycles. A scoreboard indexed
// by cycle holds the expected result of each accepted request at its
// completion cycle (issue + 1 for casts and binary8, issue + 2 for
// binary32/16/16alt arithmetic) and checks res_o, out_valid_o and
// out_illegal_o in every cycle. in_ready_o is checked against the stall
// rule. Operand isolation is checked by looking inside: every slice lane
// not used by the accepted request must see zero operands.
// Each mechanism is counted and must occur at least once: pipelined and
// single-cycle operations, back-to-back pipelined issue, the stall, 16-bit
// and 8-bit vectorial operations, scalar operations in every slice width,
// illegal requests and operand isolation.
module tb_smallfloat_unit;
  import tpfpu_pkg::*;
  import tb_fp_ref_pkg::*;
  import tb_fpu_ref_pkg::*;

  localparam int N = 200000;

  logic clk = 1'b0, rst_n = 1'b0;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  logic        in_valid, in_ready, out_valid, out_illegal;
  fpu_req_t    req;
  logic [31:0] opa, opb, res;

  smallfloat_unit dut (
    .clk_i(clk), .rst_ni(rst_n), .in_valid_i(in_valid), .in_ready_o(in_ready),
    .req_i(req), .opa_i(opa), .opb_i(opb),
    .out_valid_o(out_valid), .out_illegal_o(out_illegal), .res_o(res));

  // scoreboard by cycle
  bit          sb_v  [N + 4];
  bit          sb_il [N + 4];
  logic [31:0] sb_r  [N + 4];

  // mechanism counters
  int n_pipe, n_single, n_b2b, n_stall, n_vec16, n_vec8, n_sc32, n_sc16, n_sc8;
  int n_illegal, n_isolated;

  task automatic check(string what, longint unsigned got, longint unsigned exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s @%0t got=%h exp=%h", what, $time, got, exp);
    end
  endtask

  task automatic need(string what, int n);
    $display("  %-28s %0d", what, n);
    if (n == 0) begin
      failures++;
      $display("FAIL mechanism never exercised: %s", what);
    end
  endtask

  initial begin
    #50000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int sw, lat, ws, n;
    bit prev_pipe, exp_ready;
    {n_pipe, n_single, n_b2b, n_stall, n_vec16, n_vec8, n_sc32, n_sc16, n_sc8} = '0;
    n_illegal = 0; n_isolated = 0;
    foreach (sb_v[i]) begin sb_v[i] = 0; sb_il[i] = 0; sb_r[i] = '0; end
    in_valid = 0; req = '0; opa = '0; opb = '0;
    prev_pipe = 0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int c = 0; c < N; c++) begin
      @(negedge clk);
      // outputs of this cycle
      check("out_valid", out_valid, sb_v[c]);
      check("out_illegal", out_illegal, sb_il[c]);
      if (sb_v[c]) check("res", res, sb_r[c]);
      // next request
      in_valid = ($urandom_range(0, 9) != 0);
      if ($urandom_range(0, 19) == 0) begin
        req = fpu_req_t'($urandom);                      // anything, often illegal
        if (req.int_fmt == 2'd3) req.int_fmt = INT8;
        if (req.op > OP_I2F) req.op = OP_F2F;
      end else begin
        ws  = $urandom_range(0, 2);
        req = rand_req((ws == 0) ? 32 : (ws == 1) ? 16 : 8);
      end
      sw  = slice_of(req);
      opa = rand_opnd(req, (sw == 0) ? 32 : sw, '0, 0);
      opb = rand_opnd(req, (sw == 0) ? 32 : sw, opa, 1);
      #1;
      exp_ready = !(prev_pipe && !pipelined_of(req));
      check("in_ready", in_ready, exp_ready);
      if (in_valid && !in_ready) n_stall++;
      // operand isolation: lanes the request does not use see zeros
      if (in_valid && in_ready) begin
        n = (sw == 32 || sw == 0 || !req.vectorial) ? 1 : 32 / sw;
        if (sw != 32) begin check("isolation 32", {dut.a32, dut.b32}, '0); n_isolated++; end
        for (int j = 0; j < 2; j++)
          if (!(sw == 16 && j < n)) check("isolation 16", {dut.a16[j], dut.b16[j]}, '0);
        for (int k = 0; k < 4; k++)
          if (!(sw == 8 && k < n)) check("isolation 8", {dut.a8[k], dut.b8[k]}, '0);
      end
      if (in_valid && in_ready) begin
        lat = pipelined_of(req) ? 2 : 1;
        sb_v[c + lat]  = 1;
        sb_il[c + lat] = (sw == 0);
        sb_r[c + lat]  = ref_unit(req, opa, opb);
        if (sw == 0) n_illegal++;
        if (pipelined_of(req)) begin n_pipe++; if (prev_pipe) n_b2b++; end
        else n_single++;
        if (sw == 16 && req.vectorial) n_vec16++;
        if (sw == 8 && req.vectorial) n_vec8++;
        if (sw == 32) n_sc32++;
        if (sw == 16 && !req.vectorial) n_sc16++;
        if (sw == 8 && !req.vectorial) n_sc8++;
        prev_pipe = pipelined_of(req);
      end else begin
        prev_pipe = 0;
      end
    end
    @(negedge clk);
    in_valid = 0;
    $display("mechanisms:");
    need("pipelined operations", n_pipe);
    need("single-cycle operations", n_single);
    need("back-to-back pipelined", n_b2b);
    need("stalls", n_stall);
    need("vectorial 16-bit", n_vec16);
    need("vectorial 8-bit", n_vec8);
    need("32-bit slice operations", n_sc32);
    need("scalar 16-bit", n_sc16);
    need("scalar 8-bit", n_sc8);
    need("illegal requests", n_illegal);
    need("isolated 32-bit slice", n_isolated);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
