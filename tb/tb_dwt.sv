// tb_dwt: one level of a Haar discrete wavelet transform run through the
// transprecision FP unit.
//
// The signal is binary16alt, two samples per 32-bit word. For each pair of
// words {x1, x0}, {x3, x2}, the unit computes the approximation
// (x0 + x1) * c and detail (x0 - x1) * c, c = 1/sqrt(2) in binary16alt.
// Even and odd samples are first gathered into separate words (the core's
// job), so two coefficient pairs come out of every vectorial binary16alt
// add, subtract and multiply. The detail coefficients are finally cast to
// binary8 with a vectorial binary16alt -> binary8 cast. Every unit result is
// checked bit-exactly against the reference model, and the coefficients
// against a double-precision transform.
module tb_dwt;
  import tpfpu_pkg::*;
  import tb_fp_ref_pkg::*;
  import tb_fpu_ref_pkg::*;

  localparam int LEN = 64;

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
    logic [15:0] xs [LEN];
    real         xr [LEN];
    logic [31:0] ev, od, sa, sd, a, d, d8, c;
    real         maxerr, e, ar, dr;
    in_valid = 0; req = '0; opa = 0; opb = 0;
    for (int i = 0; i < LEN; i++) begin
      xs[i] = 16'(rnd_fp(3.0 * $sin(0.2 * i) + real'($urandom_range(0, 100)) / 100.0, 8, 7));
      xr[i] = to_real(xs[i], 8, 7);
    end
    c = {2{16'(rnd_fp(0.70710678118654752, 8, 7))}};
    repeat (2) @(negedge clk);
    rst_n = 1;
    maxerr = 0.0;
    for (int i = 0; i < LEN; i += 4) begin
      ev = {xs[i+2], xs[i]};
      od = {xs[i+3], xs[i+1]};
      run(mk(OP_ADD, FP16ALT, FP16ALT, 1), ev, od, sa);
      run(mk(OP_SUB, FP16ALT, FP16ALT, 1), ev, od, sd);
      run(mk(OP_MUL, FP16ALT, FP16ALT, 1), sa, c, a);
      run(mk(OP_MUL, FP16ALT, FP16ALT, 1), sd, c, d);
      run(mk(OP_F2F, FP16ALT, FP8, 1), d, '0, d8);
      for (int l = 0; l < 2; l++) begin
        ar = (xr[i+2*l] + xr[i+2*l+1]) * 0.70710678118654752;
        dr = (xr[i+2*l] - xr[i+2*l+1]) * 0.70710678118654752;
        e = to_real(a[16*l +: 16], 8, 7) - ar; if (e < 0.0) e = -e; if (e > maxerr) maxerr = e;
        e = to_real(d[16*l +: 16], 8, 7) - dr; if (e < 0.0) e = -e; if (e > maxerr) maxerr = e;
      end
    end
    checks++;
    if (maxerr > 6.0 * pow2(-8) * 2.0) begin       // a few binary16alt ulps at |x| < 6
      failures++;
      $display("FAIL largest error %f", maxerr);
    end
    $display("dwt: %0d samples, %0d requests, largest coefficient error %g", LEN, issued, maxerr);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
