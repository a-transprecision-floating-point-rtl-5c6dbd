// tb_jacobi: Jacobi relaxation of a 2D heat grid run through the
// transprecision FP unit.
//
// The grid is kept in binary32. Each interior point's four neighbours are
// summed with scalar binary32 additions; the sum is cast to binary16alt
// (same exponent range as binary32, so the cast never saturates),
// multiplied by 0.25 in binary16alt and cast back to binary32. This
// mirrors the mapping the type-system study reports for this benchmark:
// mostly binary32, a few binary16alt variables, no vectorial operations.
// The boundary is held at fixed temperatures. ITER sweeps of a G x G grid
// are run. Every unit result is checked bit-exactly against the reference
// model, and the final grid is compared with a double-precision Jacobi
// iteration: the largest error must stay within a few binary16alt ulps.
module tb_jacobi;
  import tpfpu_pkg::*;
  import tb_fp_ref_pkg::*;
  import tb_fpu_ref_pkg::*;

  localparam int G    = 8;
  localparam int ITER = 4;

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
    logic [31:0] g [G][G], gn [G][G];
    real         gr [G][G], grn [G][G];
    logic [31:0] s, h, y;
    logic [31:0] quarter;
    real         maxerr, e, t;
    in_valid = 0; req = '0; opa = 0; opb = 0;
    quarter = 32'(rnd_fp(0.25, 8, 7));
    for (int i = 0; i < G; i++)
      for (int j = 0; j < G; j++) begin
        t = (i == 0) ? 100.0 : (j == 0) ? 50.0 : (i == G - 1 || j == G - 1) ? 0.0 : 10.0;
        g[i][j]  = 32'(rnd_fp(t, 8, 23));
        gr[i][j] = t;
      end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int it = 0; it < ITER; it++) begin
      gn = g; grn = gr;
      for (int i = 1; i < G - 1; i++)
        for (int j = 1; j < G - 1; j++) begin
          run(mk(OP_ADD, FP32, FP32, 0), g[i-1][j], g[i+1][j], s);
          run(mk(OP_ADD, FP32, FP32, 0), s, g[i][j-1], s);
          run(mk(OP_ADD, FP32, FP32, 0), s, g[i][j+1], s);
          run(mk(OP_F2F, FP32, FP16ALT, 0), s, '0, h);
          run(mk(OP_MUL, FP16ALT, FP16ALT, 0), h, quarter, h);
          run(mk(OP_F2F, FP16ALT, FP32, 0), h, '0, y);
          gn[i][j]  = y;
          grn[i][j] = 0.25 * (gr[i-1][j] + gr[i+1][j] + gr[i][j-1] + gr[i][j+1]);
        end
      g = gn; gr = grn;
    end
    maxerr = 0.0;
    for (int i = 1; i < G - 1; i++)
      for (int j = 1; j < G - 1; j++) begin
        e = to_real(g[i][j], 8, 23) - gr[i][j];
        if (e < 0.0) e = -e;
        if (gr[i][j] > 0.0) e = e / gr[i][j];
        if (e > maxerr) maxerr = e;
      end
    checks++;
    if (maxerr > 4.0 * pow2(-8)) begin
      failures++;
      $display("FAIL relative error %f", maxerr);
    end
    $display("jacobi: %0dx%0d grid, %0d sweeps, %0d requests, largest relative error %g",
             G, G, ITER, issued, maxerr);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
