// tb_pca: the covariance stage of a principal component analysis run
// through the transprecision FP unit.
//
// NOBS observations of NVAR variables are binary32, since this benchmark
// is dominated by scalar binary32 operations plus casts. The unit subtracts the
// means (computed with binary32 additions and a multiplication by 1/NOBS)
// and accumulates the covariance matrix with binary32 multiplications and
// additions, all scalar. Each
// covariance entry is then cast to binary16alt and back, the kind of cast
// that tuning inserts in this application. The eigen-decomposition that
// follows needs division and square root, which the unit does not have,
// so it is not run. Every unit result is checked bit-exactly against the
// reference model, and the covariances against double precision.
module tb_pca;
  import tpfpu_pkg::*;
  import tb_fp_ref_pkg::*;
  import tb_fpu_ref_pkg::*;

  localparam int NVAR = 3;
  localparam int NOBS = 16;

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
    logic [31:0] xo [NOBS][NVAR];
    real         xr [NOBS][NVAR];
    logic [31:0] mean [NVAR], cv, p, h, y, inv_n, dv [NOBS][NVAR];
    real         mr [NVAR], cr, maxerr, e;
    in_valid = 0; req = '0; opa = 0; opb = 0;
    for (int o = 0; o < NOBS; o++)
      for (int v = 0; v < NVAR; v++) begin
        xo[o][v] = 32'(rnd_fp(real'(v + 1) * $sin(0.5 * o + v) + real'($urandom_range(0, 1000)) / 500.0, 8, 23));
        xr[o][v] = to_real(xo[o][v], 8, 23);
      end
    inv_n = 32'(rnd_fp(1.0 / NOBS, 8, 23));
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int v = 0; v < NVAR; v++) begin
      mean[v] = '0; mr[v] = 0.0;
      for (int o = 0; o < NOBS; o++) begin
        run(mk(OP_ADD, FP32, FP32, 0), mean[v], xo[o][v], mean[v]);
        mr[v] += xr[o][v];
      end
      run(mk(OP_MUL, FP32, FP32, 0), mean[v], inv_n, mean[v]);
      mr[v] = mr[v] / NOBS;
      for (int o = 0; o < NOBS; o++) run(mk(OP_SUB, FP32, FP32, 0), xo[o][v], mean[v], dv[o][v]);
    end
    maxerr = 0.0;
    for (int v = 0; v < NVAR; v++)
      for (int u = v; u < NVAR; u++) begin
        cv = '0; cr = 0.0;
        for (int o = 0; o < NOBS; o++) begin
          run(mk(OP_MUL, FP32, FP32, 0), dv[o][v], dv[o][u], p);
          run(mk(OP_ADD, FP32, FP32, 0), cv, p, cv);
          cr += (xr[o][v] - mr[v]) * (xr[o][u] - mr[u]);
        end
        run(mk(OP_MUL, FP32, FP32, 0), cv, inv_n, cv);
        cr = cr / NOBS;
        e = to_real(cv, 8, 23) - cr; if (e < 0.0) e = -e; if (e > maxerr) maxerr = e;
        run(mk(OP_F2F, FP32, FP16ALT, 0), cv, '0, h);
        run(mk(OP_F2F, FP16ALT, FP32, 0), h, '0, y);
      end
    checks++;
    if (maxerr > 1.0e-4) begin
      failures++;
      $display("FAIL largest covariance error %g", maxerr);
    end
    $display("pca covariance: %0d observations x %0d variables, %0d requests, largest error %g",
             NOBS, NVAR, issued, maxerr);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
