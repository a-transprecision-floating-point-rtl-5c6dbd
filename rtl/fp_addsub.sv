// fp_addsub: floating-point adder/subtractor for one format.
//
// Computes a + b (sub_i = 0) or a - b (sub_i = 1) on a format with EXP
// exponent and MAN mantissa bits, rounding to nearest, ties to even, with
// denormals, infinities and NaN handled as IEEE 754 does (any NaN input or
// inf - inf gives the canonical quiet NaN, sign 0, mantissa MSB set; an
// exact zero sum of opposite signs is +0).
//
// Stage 1 unpacks the operands, orders them by magnitude, aligns the smaller
// one with guard, round and sticky bits and adds or subtracts the
// significands. Stage 2 (fp_norm_round) normalises, rounds and packs.
// With PIPE = 1 a register sits between the two stages and the result
// appears one clock after the operands (loaded only when valid_i is high, so
// an idle unit does not toggle); with PIPE = 0 the unit is combinational.
// The one-stage pipeline of the binary32 and 16-bit adders follows the
// paper; the split point after the significand addition is this design's.
module fp_addsub #(
  parameter int unsigned EXP  = 8,
  parameter int unsigned MAN  = 23,
  parameter bit          PIPE = 1'b1
) (
  input  logic             clk_i,
  input  logic             rst_ni,
  input  logic             valid_i,
  input  logic             sub_i,
  input  logic [EXP+MAN:0] a_i,
  input  logic [EXP+MAN:0] b_i,
  output logic [EXP+MAN:0] res_o
);
  localparam int unsigned W    = MAN + 5;  // carry, hidden, MAN, G, R, S
  localparam logic [EXP+MAN:0] QNAN = {1'b0, {EXP{1'b1}}, 1'b1, {(MAN-1){1'b0}}};
  localparam logic [EXP-1:0]  EONES = '1;

  typedef struct packed {
    logic                    special;  // result is res_special
    logic [EXP+MAN:0]        res_special;
    logic                    sign;
    logic signed [15:0]      exp;
    logic [W-1:0]            mant;
  } mid_t;

  mid_t s1, s2;

  always_comb begin
    logic              sa, sb;
    logic [EXP-1:0]    ea, eb;
    logic [MAN-1:0]    fa, fb;
    logic              a_nan, b_nan, a_inf, b_inf;
    logic [EXP+MAN-1:0] mag_a, mag_b;
    logic              swap;
    logic              sx, sy;
    logic [EXP-1:0]    ex, ey;
    logic [MAN:0]      mx, my;
    int unsigned       d;
    logic [W-1:0]      ax, ay;
    logic              st;
    logic              eff_sub;

    sa = a_i[EXP+MAN];
    sb = b_i[EXP+MAN] ^ sub_i;
    ea = a_i[EXP+MAN-1 -: EXP];
    eb = b_i[EXP+MAN-1 -: EXP];
    fa = a_i[MAN-1:0];
    fb = b_i[MAN-1:0];
    a_nan = (ea == EONES) && (fa != '0);
    b_nan = (eb == EONES) && (fb != '0);
    a_inf = (ea == EONES) && (fa == '0);
    b_inf = (eb == EONES) && (fb == '0);

    s1 = '0;
    if (a_nan || b_nan || (a_inf && b_inf && (sa != sb))) begin
      s1.special = 1'b1;
      s1.res_special = QNAN;
    end else if (a_inf) begin
      s1.special = 1'b1;
      s1.res_special = {sa, EONES, {MAN{1'b0}}};
    end else if (b_inf) begin
      s1.special = 1'b1;
      s1.res_special = {sb, EONES, {MAN{1'b0}}};
    end

    // order by magnitude: x is the larger operand
    mag_a = a_i[EXP+MAN-1:0];
    mag_b = b_i[EXP+MAN-1:0];
    swap  = mag_b > mag_a;
    sx = swap ? sb : sa;  sy = swap ? sa : sb;
    ex = swap ? eb : ea;  ey = swap ? ea : eb;
    mx = swap ? {eb != '0, fb} : {ea != '0, fa};
    my = swap ? {ea != '0, fa} : {eb != '0, fb};
    // effective exponents (denormals use exponent 1)
    d  = ((ex == '0) ? 1 : int'(ex)) - ((ey == '0) ? 1 : int'(ey));

    ax = {1'b0, mx, 3'b000};
    ay = {1'b0, my, 3'b000};
    st = 1'b0;
    if (d >= W) begin
      st = (ay != '0);
      ay = '0;
    end else begin
      for (int i = 0; i < W; i++)
        if (i < int'(d) && ay[i]) st = 1'b1;
      ay = ay >> d;
    end
    ay[0] = ay[0] | st;

    eff_sub = sx ^ sy;
    s1.mant = eff_sub ? (ax - ay) : (ax + ay);
    s1.exp  = 16'(((ex == '0) ? 1 : int'(ex)) + 1);
    if (s1.mant == '0)
      s1.sign = sx & sy;           // exact zero: +0 unless both are -0
    else
      s1.sign = sx;
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
