// tb_svm: prediction stage of a linear support vector machine run through
// the transprecision FP unit.
//
// Support-vector weights and feature vectors are binary16 (a choice of
// this test; binary8 would use the same lanes four-wide), two features
// per 32-bit word. Each decision value w.x + b is computed with vectorial
// binary16 multiplications and additions (two partial sums, one per lane),
// the two lanes are then combined with one scalar binary16 addition, the
// bias is added, and the result is cast to binary32 for the comparison
// with zero. NSAMP samples of NFEAT features are classified. Every unit
// result is checked bit-exactly against the reference model; each decision
// value must lie close to the double-precision one, and the predicted class
// must agree wherever the double-precision margin is larger than the
// binary16 error bound.
module tb_svm;
  import tpfpu_pkg::*;
  import tb_fp_ref_pkg::*;
  import tb_fpu_ref_pkg::*;

  localparam int NFEAT = 16;
  localparam int NSAMP = 24;

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


  task automatic check(string what, longint unsigned got, longint unsigned exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s got=%h exp=%h", what, got, exp);
    end
  endtask

  // issue one request and return its result (waits for out_valid)
  int issued = 0, busy_cycles = 0;
  task automatic run(fpu_req_t r, logic [31:0] a, logic [31:0] b, output logic [31:0] y);
    @(negedge clk);
    req = r; opa = a; opb = b; in_valid = 1;
    #1 while (!in_ready) begin @(negedge clk); #1; end
    @(posedge clk);
    issued++;
    @(negedge clk);
    in_valid = 0;
    while (!out_valid) @(negedge clk);
    y = res;
    check("illegal flag", out_illegal, 0);
    check("unit result", y, ref_unit(r, a, b));
  endtask

  function automatic fpu_req_t mk(op_e op, fp_fmt_e s, fp_fmt_e d, bit vec);
    fpu_req_t r = '0;
    r.op = op; r.src_fmt = s; r.dst_fmt = d; r.vectorial = vec;
    return r;
  endfunction

  initial begin
    #200000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] w [NFEAT/2], x [NFEAT/2];
    logic [31:0] acc, p, s, y, bias;
    real         wr [NFEAT], xr [NFEAT], dr, br, got, bound;
    int          agree;
    in_valid = 0; req = '0; opa = 0; opb = 0;
    for (int f = 0; f < NFEAT; f++) begin
      w[f/2][16*(f%2) +: 16] = 16'(rnd_fp(real'($urandom_range(0, 2000)) / 1000.0 - 1.0, 5, 10));
      wr[f] = to_real(w[f/2][16*(f%2) +: 16], 5, 10);
    end
    bias = {16'd0, 16'(rnd_fp(0.125, 5, 10))};
    br   = 0.125;
    repeat (2) @(negedge clk);
    rst_n = 1;
    agree = 0;
    for (int n = 0; n < NSAMP; n++) begin
      for (int f = 0; f < NFEAT; f++) begin
        x[f/2][16*(f%2) +: 16] = 16'(rnd_fp(real'($urandom_range(0, 2000)) / 1000.0 - 1.0, 5, 10));
        xr[f] = to_real(x[f/2][16*(f%2) +: 16], 5, 10);
      end
      acc = '0;
      for (int k = 0; k < NFEAT / 2; k++) begin
        run(mk(OP_MUL, FP16, FP16, 1), w[k], x[k], p);
        run(mk(OP_ADD, FP16, FP16, 1), acc, p, acc);
      end
      run(mk(OP_ADD, FP16, FP16, 0), {16'd0, acc[15:0]}, {16'd0, acc[31:16]}, s);
      run(mk(OP_ADD, FP16, FP16, 0), s, bias, s);
      run(mk(OP_F2F, FP16, FP32, 0), s, '0, y);
      dr = br;
      bound = 0.0;
      for (int f = 0; f < NFEAT; f++) begin
        dr += wr[f] * xr[f];
        bound += (wr[f] * xr[f] < 0.0 ? -wr[f] * xr[f] : wr[f] * xr[f]);
      end
      bound = (bound + 1.0) * real'(NFEAT + 2) * pow2(-11);   // binary16 error bound
      got = to_real(y, 8, 23);
      checks++;
      if ((got - dr) > bound || (dr - got) > bound) begin
        failures++;
        $display("FAIL sample %0d decision %f against %f", n, got, dr);
      end
      if ((dr > bound || dr < -bound)) begin
        checks++;
        if ((got > 0.0) != (dr > 0.0)) begin
          failures++;
          $display("FAIL sample %0d class differs", n);
        end else agree++;
      end
    end
    $display("svm: %0d samples x %0d features, %0d requests, %0d clear-margin classes agree",
             NSAMP, NFEAT, issued, agree);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
