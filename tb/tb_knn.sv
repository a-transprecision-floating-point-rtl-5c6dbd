// tb_knn: k-nearest-neighbour search run through the transprecision FP unit.
//
// The floating-point work of a KNN classifier with every variable in
// binary8: NPTS reference points of four binary8 features, one 32-bit word
// each, and a query point. For each point the unit computes the four
// feature differences with one vectorial binary8 subtraction and their
// squares with one vectorial binary8 multiplication; the four squares are
// summed with scalar binary8 additions (the core moves each byte down to
// lane 0 between them). The K smallest distances are then picked by
// integer comparison of the binary8 patterns, which orders non-negative
// floats correctly. Every unit result is checked bit-exactly against the
// reference model. The neighbours found may differ from a double-precision
// search, since binary8 rounding can reorder close distances; each must lie
// within the worst-case binary8 rounding factor of the K-th nearest.
module tb_knn;
  import tpfpu_pkg::*;
  import tb_fp_ref_pkg::*;
  import tb_fpu_ref_pkg::*;

  localparam int NPTS = 64;
  localparam int K    = 3;

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
    logic [31:0] pts [NPTS];
    logic [31:0] q, d, sq, y;
    logic [7:0]  d8 [NPTS];
    real         dref [NPTS];
    int          sel [K], sel_r [K];
    int          agree;
    bit          used, used_r;
    in_valid = 0; req = '0; opa = 0; opb = 0;
    for (int f = 0; f < 4; f++) q[8*f +: 8] = 8'(rnd_fp(real'($urandom_range(0, 40)) / 10.0, 5, 2));
    for (int p = 0; p < NPTS; p++)
      for (int f = 0; f < 4; f++)
        pts[p][8*f +: 8] = 8'(rnd_fp(real'($urandom_range(0, 40)) / 10.0, 5, 2));
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int p = 0; p < NPTS; p++) begin
      run(mk(OP_SUB, FP8, FP8, 1), pts[p], q, d);
      run(mk(OP_MUL, FP8, FP8, 1), d, d, sq);
      y = {24'd0, sq[7:0]};
      for (int f = 1; f < 4; f++) run(mk(OP_ADD, FP8, FP8, 0), y, {24'd0, sq[8*f +: 8]}, y);
      d8[p] = y[7:0];
      dref[p] = 0.0;
      for (int f = 0; f < 4; f++)
        dref[p] += (to_real(pts[p][8*f +: 8], 5, 2) - to_real(q[8*f +: 8], 5, 2)) ** 2;
    end
    // K nearest, binary8 distances and double distances
    for (int k = 0; k < K; k++) begin
      sel[k] = -1; sel_r[k] = -1;
      for (int p = 0; p < NPTS; p++) begin
        used = 0; used_r = 0;
        for (int j = 0; j < k; j++) begin
          if (sel[j] == p) used = 1;
          if (sel_r[j] == p) used_r = 1;
        end
        if (!used && (sel[k] < 0 || d8[p] < d8[sel[k]])) sel[k] = p;
        if (!used_r && (sel_r[k] < 0 || dref[p] < dref[sel_r[k]])) sel_r[k] = p;
      end
    end
    // binary8 keeps 3 significant bits, so each of the 6 roundings on the
    // way to a distance may change it by a factor up to 1 + 2^-3; a chosen
    // neighbour must be no farther (in double precision) than the K-th
    // nearest by more than (1 + 2^-3)^12 < 4.3
    agree = 0;
    for (int k = 0; k < K; k++) begin
      if (sel[k] == sel_r[k]) agree++;
      checks++;
      if (dref[sel[k]] > 4.3 * dref[sel_r[K-1]] + 1.0e-9) begin
        failures++;
        $display("FAIL neighbour %0d too far: %f against %f", k, dref[sel[k]], dref[sel_r[K-1]]);
      end
    end
    $display("knn: %0d points, %0d requests, %0d of %0d neighbours identical to a double-precision search",
             NPTS, issued, agree, K);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
