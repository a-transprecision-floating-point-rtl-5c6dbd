// fp_mul: floating-point multiplier for one format.
//
// Computes a * b on a format with EXP exponent and MAN mantissa bits,
// rounding to nearest, ties to even, with denormal inputs and outputs. A NaN
// input or inf * 0 gives the canonical quiet NaN (sign 0, mantissa MSB set);
// inf times a non-zero number gives a signed infinity.
//
// Stage 1 multiplies the two (MAN+1)-bit significands exactly and adds the
// exponents; stage 2 (fp_norm_round) normalises, rounds and packs. With
// PIPE = 1 a register between the stages gives one clock of latency and is
// loaded only while valid_i is high; with PIPE = 0 the unit is
// combinational. The pipeline stage of the binary32 and 16-bit multipliers
// follows the paper; where it is placed is this design's choice.
module fp_mul #(
  parameter int unsigned EXP  = 8,
  parameter int unsigned MAN  = 23,
  parameter bit          PIPE = 1'b1
) (
  input  logic             clk_i,
  input  logic             rst_ni,
  input  logic             valid_i,
  input  logic [EXP+MAN:0] a_i,
  input  logic [EXP+MAN:0] b_i,
  output logic [EXP+MAN:0] res_o
);
  localparam int unsigned W    = 2 * MAN + 2;
  localparam int          BIAS = (1 << (EXP - 1)) - 1;
  localparam logic [EXP+MAN:0] QNAN = {1'b0, {EXP{1'b1}}, 1'b1, {(MAN-1){1'b0}}};
  localparam logic [EXP-1:0]  EONES = '1;

  typedef struct packed {
    logic                    special;
    logic [EXP+MAN:0]        res_special;
    logic                    sign;
    logic signed [15:0]      exp;
    logic [W-1:0]            mant;
  } mid_t;

  mid_t s1, s2;

  always_comb begin
    logic           sa, sb;
    logic [EXP-1:0] ea, eb;
    logic [MAN-1:0] fa, fb;
    logic           a_nan, b_nan, a_inf, b_inf, a_zero, b_zero;

    sa = a_i[EXP+MAN];
    sb = b_i[EXP+MAN];
    ea = a_i[EXP+MAN-1 -: EXP];
    eb = b_i[EXP+MAN-1 -: EXP];
    fa = a_i[MAN-1:0];
    fb = b_i[MAN-1:0];
    a_nan  = (ea == EONES) && (fa != '0);
    b_nan  = (eb == EONES) && (fb != '0);
    a_inf  = (ea == EONES) && (fa == '0);
    b_inf  = (eb == EONES) && (fb == '0);
    a_zero = (ea == '0) && (fa == '0);
    b_zero = (eb == '0) && (fb == '0);

    s1 = '0;
    s1.sign = sa ^ sb;
    if (a_nan || b_nan || (a_inf && b_zero) || (b_inf && a_zero)) begin
      s1.special = 1'b1;
      s1.res_special = QNAN;
    end else if (a_inf || b_inf) begin
      s1.special = 1'b1;
      s1.res_special = {sa ^ sb, EONES, {MAN{1'b0}}};
    end
    s1.mant = W'({ea != '0, fa}) * W'({eb != '0, fb});
    // value = mant / 2^(2*MAN) * 2^(ea+eb-2*BIAS) = mant / 2^(W-1) * 2^(E-BIAS)
    s1.exp  = 16'(((ea == '0) ? 1 : int'(ea)) + ((eb == '0) ? 1 : int'(eb)) - BIAS + 1);
  end

  if (PIPE) begin : g_pipe
    always_ff @(posedge clk_i or negedge rst_ni)
      if (!rst_ni)      s2 <= '0;
      else if (valid_i) s2 <= s1;
  end else begin : g_comb
    assign s2 = s1;
  end

  logic [EXP+MAN:0] rounded;

  fp_norm_round #(.EXP(EXP), .MAN(MAN), .W(W)) u_round (
    .sign_i   (s2.sign),
    .exp_i    (s2.exp),
    .mant_i   (s2.mant),
    .sticky_i (1'b0),
    .res_o    (rounded)
  );

  assign res_o = s2.special ? s2.res_special : rounded;
endmodule
