// smallfloat_unit: transprecision floating-point unit (top level).
//
// Arithmetic (add, subtract, multiply) in binary32, binary16, binary16alt
// and binary8, and casts between these formats and between them and
// signed/unsigned integers, on 32-bit operands OpA/OpB. The unit is built
// from one 32-bit slice, two 16-bit slices and four 8-bit slices; with
// vectorial set, a 16-bit operation runs on both 16-bit slices (two results
// in one 32-bit word) and an 8-bit one on all four 8-bit slices. Unused
// slices and units get zero operands (operand isolation).
//
// Interface: a request (req_i, opa_i, opb_i) presented in cycle c is taken
// at the rising edge that ends cycle c if in_valid_i and in_ready_o are both
// high. The result is on res_o, with out_valid_o high, for one cycle:
//   * cycle c+1 for casts and binary8 arithmetic (latency 1: the result is
//     computed in cycle c and caught by the output register),
//   * cycle c+2 for binary32/binary16/binary16alt arithmetic (latency 2: one
//     internal pipeline stage; a new request can still issue every cycle).
// A request with no matching unit (out_illegal_o) completes after 1 cycle
// with a zero result. The only stall: in the cycle after a pipelined
// operation issued, a single-cycle operation would finish in the same cycle
// as it, so in_ready_o is low for it; pipelined operations are never
// stalled. There is no back-pressure on the result side.
//
// The slice structure, unit list, operand isolation and latencies follow
// the paper; the request encoding, the ready/valid handshake, the stall
// rule, the output register and the zero-fill of unused result bits are
// this design's own.
module smallfloat_unit
  import tpfpu_pkg::*;
#(
  parameter bit PIPE_WIDE = 1'b1  // pipeline stage in 32/16-bit arithmetic
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic        in_valid_i,
  output logic        in_ready_o,
  input  fpu_req_t    req_i,
  input  logic [31:0] opa_i,
  input  logic [31:0] opb_i,
  output logic        out_valid_o,
  output logic        out_illegal_o,
  output logic [31:0] res_o
);
  logic        legal, pipelined, issue;
  logic        pipe_busy_q;

  // ---- issue control ----
  assign in_ready_o = !(pipe_busy_q && !pipelined);
  assign issue      = in_valid_i && in_ready_o;

  always_ff @(posedge clk_i or negedge rst_ni)
    if (!rst_ni) pipe_busy_q <= 1'b0;
    else         pipe_busy_q <= issue && pipelined;

  // ---- data distribution and operand isolation ----
  lane_ctrl_t  ctrl32;
  logic [31:0] a32, b32;
  lane_ctrl_t  ctrl16 [2];
  logic [15:0] a16 [2], b16 [2];
  lane_ctrl_t  ctrl8 [4];
  logic [7:0]  a8 [4], b8 [4];

  operand_distribution #(.PIPE_WIDE(PIPE_WIDE)) u_dist (
    .valid_i     (issue),
    .req_i       (req_i),
    .opa_i       (opa_i),
    .opb_i       (opb_i),
    .slice_o     (),
    .legal_o     (legal),
    .pipelined_o (pipelined),
    .ctrl32_o    (ctrl32),
    .a32_o       (a32),
    .b32_o       (b32),
    .ctrl16_o    (ctrl16),
    .a16_o       (a16),
    .b16_o       (b16),
    .ctrl8_o     (ctrl8),
    .a8_o        (a8),
    .b8_o        (b8)
  );

  // ---- slices ----
  logic [31:0] r32;
  logic        v32;
  logic [15:0] r16 [2];
  logic        v16 [2];
  logic [7:0]  r8 [4];
  logic        v8 [4];

  slice32 #(.PIPE(PIPE_WIDE)) u_slice32 (
    .clk_i, .rst_ni, .ctrl_i(ctrl32), .a_i(a32), .b_i(b32), .res_o(r32), .valid_o(v32));

  for (genvar j = 0; j < 2; j++) begin : g_slice16
    slice16 #(.PIPE(PIPE_WIDE)) u_slice16 (
      .clk_i, .rst_ni, .ctrl_i(ctrl16[j]), .a_i(a16[j]), .b_i(b16[j]),
      .res_o(r16[j]), .valid_o(v16[j]));
  end

  for (genvar k = 0; k < 4; k++) begin : g_slice8
    slice8 u_slice8 (
      .ctrl_i(ctrl8[k]), .a_i(a8[k]), .b_i(b8[k]), .res_o(r8[k]), .valid_o(v8[k]));
  end

  // ---- output data selection and output register ----
  logic [31:0] sel_res;
  logic        sel_valid;

  output_selection u_outsel (
    .res32_i (r32), .v32_i (v32),
    .res16_i (r16), .v16_i (v16),
    .res8_i  (r8),  .v8_i  (v8),
    .res_o   (sel_res),
    .valid_o (sel_valid)
  );

  always_ff @(posedge clk_i or negedge rst_ni)
    if (!rst_ni) begin
      out_valid_o   <= 1'b0;
      out_illegal_o <= 1'b0;
      res_o         <= '0;
    end else begin
      out_valid_o   <= sel_valid | (issue & !legal);
      out_illegal_o <= issue & !legal;
      if (sel_valid || (issue && !legal)) res_o <= sel_res;
    end

endmodule
