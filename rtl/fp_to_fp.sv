// fp_to_fp: converts one floating-point format into another.
//
// Input format has EI exponent and MI mantissa bits, output format EO and
// MO. The input is unpacked, re-biased and passed to fp_norm_round, so a
// narrowing conversion rounds to nearest, ties to even, overflows to
// infinity and underflows into denormals or zero, and a widening one is
// exact (input denormals become normal numbers where the output range
// allows). Infinities keep their sign; any NaN becomes the canonical quiet
// NaN of the output format. Combinational.
module fp_to_fp #(
  parameter int unsigned EI = 8,
  parameter int unsigned MI = 23,
  parameter int unsigned EO = 5,
  parameter int unsigned MO = 10
) (
  input  logic [EI+MI:0] a_i,
  output logic [EO+MO:0] res_o
);
  localparam int unsigned PAD   = (MO + 2 > MI) ? (MO + 2 - MI) : 0;
  localparam int unsigned W     = MI + 1 + PAD;
  localparam int          BIASI = (1 << (EI - 1)) - 1;
  localparam int          BIASO = (1 << (EO - 1)) - 1;

  logic           s;
  logic [EI-1:0]  e;
  logic [MI-1:0]  f;
  logic [W-1:0]   m;
  logic signed [15:0] ex;
  logic [EO+MO:0] rounded;

  assign s  = a_i[EI+MI];
  assign e  = a_i[EI+MI-1 -: EI];
  assign f  = a_i[MI-1:0];
  assign m  = {e != '0, f, {PAD{1'b0}}};
  assign ex = 16'(((e == '0) ? 1 : int'(e)) - BIASI + BIASO);

  fp_norm_round #(.EXP(EO), .MAN(MO), .W(W)) u_round (
    .sign_i   (s),
    .exp_i    (ex),
    .mant_i   (m),
    .sticky_i (1'b0),
    .res_o    (rounded)
  );

  always_comb begin
    if (e == '1 && f != '0)
      res_o = {1'b0, {EO{1'b1}}, 1'b1, {(MO-1){1'b0}}};
    else if (e == '1)
      res_o = {s, {EO{1'b1}}, {MO{1'b0}}};
    else
      res_o = rounded;
  end
endmodule
