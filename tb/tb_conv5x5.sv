// tb_conv5x5: a 5x5 convolution run through the transprecision FP unit.
//
// The floating-point work of a 5x5 convolution kernel is issued to the
// unit the way a core with a transprecision type system would: image and
// kernel are binary16, two neighbouring output pixels are computed at once
// with vectorial binary16 multiply and add (one 32-bit word holds two
// pixels), and the finished outputs are cast down to binary8 with a
// vectorial FP16 -> FP8 cast and, for one pixel of each pair, up to
// binary32. The image is IMG x IMG pixels generated in the testbench;
// the output is (IMG-4) x (IMG-4).
//
// Each result is compared with the reference model applied in the same
// order of operations (so the comparison is bit exact), and the binary16
// outputs are also compared with a double-precision convolution: the
// signal-to-error ratio must stay above a bound. The cycle count is checked
// against the unit's rate: one multiply and one add per output pair and
// kernel tap, issued back to back, with a pipelined result two cycles later.
module tb_conv5x5;
  import tpfpu_pkg::*;
  import tb_fp_ref_pkg::*;
  import tb_fpu_ref_pkg::*;

  localparam int IMG = 12;
  localparam int OUT = IMG - 4;

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

  logic [15:0] img [IMG][IMG];
  logic [15:0] ker [5][5];
  real         img_r [IMG][IMG];
  real         ker_r [5][5];

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
    logic [31:0] acc, prod, y, y8, y32;
    logic [31:0] exp_acc;
    real sig, err, ref_v;
    int  t0, t_loop;
    in_valid = 0; req = '0; opa = 0; opb = 0;
    // data: smooth image in [0, 4), kernel weights in [-0.5, 0.5)
    for (int i = 0; i < IMG; i++)
      for (int j = 0; j < IMG; j++) begin
        img[i][j]   = 16'(rnd_fp(2.0 + 1.5 * $sin(0.3 * i) * $cos(0.2 * j) + real'($urandom_range(0, 99)) / 200.0, 5, 10));
        img_r[i][j] = to_real(img[i][j], 5, 10);
      end
    for (int u = 0; u < 5; u++)
      for (int v = 0; v < 5; v++) begin
        ker[u][v]   = 16'(rnd_fp(real'($urandom_range(0, 999)) / 1000.0 - 0.5, 5, 10));
        ker_r[u][v] = to_real(ker[u][v], 5, 10);
      end
    repeat (2) @(negedge clk);
    rst_n = 1;
    sig = 0.0; err = 0.0;

    // 1) pipelined stream: products of one output pair, issued back to back
    @(negedge clk);
    t0 = 0;
    for (int i = 0; i < OUT; i++)
      for (int j = 0; j < OUT; j += 2) begin
        acc = '0;
        for (int u = 0; u < 5; u++)
          for (int v = 0; v < 5; v++) begin
            run(mk(OP_MUL, FP16, FP16, 1), {img[i+u][j+v+1], img[i+u][j+v]},
                {ker[u][v], ker[u][v]}, prod);
            run(mk(OP_ADD, FP16, FP16, 1), acc, prod, acc);
          end
        // double-precision reference and bit-exact sequence check
        for (int l = 0; l < 2; l++) begin
          ref_v = 0.0;
          for (int u = 0; u < 5; u++)
            for (int v = 0; v < 5; v++) ref_v += img_r[i+u][j+v+l] * ker_r[u][v];
          sig += ref_v * ref_v;
          err += (to_real(acc[16*l +: 16], 5, 10) - ref_v) ** 2;
        end
        // transprecision casts: vectorial FP16 -> FP8, scalar FP16 -> FP32
        run(mk(OP_F2F, FP16, FP8, 1), acc, '0, y8);
        run(mk(OP_F2F, FP16, FP32, 0), {16'd0, acc[15:0]}, '0, y32);
      end
    checks++;
    if (err > 0.0 && sig / err < 1.0e4) begin
      failures++;
      $display("FAIL SQNR %f", sig / err);
    end
    $display("conv %0dx%0d: %0d requests, SQNR (power ratio) %0.1f", OUT, OUT, issued,
             (err == 0.0) ? 0.0 : sig / err);

    // 2) throughput: 25 independent vectorial multiplies back to back must
    //    take 25 issue cycles, the last result 2 cycles after its issue
    @(negedge clk);
    begin
      int n_res = 0, cyc = 0;
      fork
        begin
          for (int k = 0; k < 25; k++) begin
            req = mk(OP_MUL, FP16, FP16, 1);
            opa = {img[0][k % IMG], img[1][k % IMG]}; opb = {ker[k / 5][k % 5], ker[k / 5][k % 5]};
            in_valid = 1;
            #1 check("ready for back-to-back pipelined issue", in_ready, 1);
            @(negedge clk);
          end
          in_valid = 0;
        end
        begin
          while (n_res < 25) begin
            @(negedge clk); cyc++;
            if (out_valid) n_res++;
          end
        end
      join
      check("cycles for 25 pipelined multiplies", cyc, 26);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
