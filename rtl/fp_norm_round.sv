// fp_norm_round: normalise, round and pack a floating-point result.
//
// Shared back end of every arithmetic and conversion unit. The input is an
// exact (up to a sticky bit) unsigned magnitude M of W bits together with a
// biased exponent E, meaning
//     value = (-1)^sign * (M / 2^(W-1)) * 2^(E - BIAS)
// The module finds the leading one, shifts M left to a normal number or right
// into the denormal range, rounds the MAN kept bits to nearest, ties to even,
// and packs {sign, exponent, mantissa}. A rounding carry out of the mantissa
// moves into the exponent field, so denormal -> normal and normal -> infinity
// come out without special cases. Results beyond the largest finite value
// become infinity. A zero M gives a signed zero. Purely combinational.
// Round-to-nearest-even as the only rounding mode is this design's choice.
module fp_norm_round #(
  parameter int unsigned EXP = 8,
  parameter int unsigned MAN = 23,
  parameter int unsigned W   = MAN + 5   // must be at least MAN + 3
) (
  input  logic                 sign_i,
  input  logic signed [15:0]   exp_i,     // biased exponent for M/2^(W-1)
  input  logic [W-1:0]         mant_i,
  input  logic                 sticky_i,  // OR of bits already below M
  output logic [EXP+MAN:0]     res_o
);
  localparam int unsigned EMAX = (1 << EXP) - 1;  // all-ones exponent field
  localparam int unsigned LZW  = $clog2(W + 1);

  logic [LZW-1:0]      lz;
  logic signed [15:0]  e_norm;
  logic [W-1:0]        m_sh;
  logic                st_sh;
  logic [EXP+MAN-1:0]  packed_mag;
  logic                guard, sticky, round_up;
  logic [EXP+MAN-1:0]  rounded;

  // count leading zeros
  always_comb begin
    lz = LZW'(W);
    for (int i = 0; i < W; i++)
      if (mant_i[i]) lz = LZW'(W - 1 - i);
  end

  always_comb begin
    int sh, e_lz;
    sh    = 0;
    e_lz  = int'(exp_i) - int'(lz);
    m_sh  = '0;
    st_sh = 1'b0;
    e_norm = '0;
    if (e_lz >= 1) begin
      // normal: leading one to the top bit
      m_sh   = mant_i << lz;
      e_norm = 16'(e_lz);
    end else if (exp_i >= 1) begin
      // denormal reached by a shorter left shift
      m_sh   = mant_i << (exp_i - 1);
      e_norm = '0;
    end else begin
      // denormal reached by a right shift; lost bits go to sticky
      sh = 1 - int'(exp_i);
      if (sh > W) sh = W;
      m_sh   = mant_i >> sh;
      for (int i = 0; i < W; i++)
        if (i < sh && mant_i[i]) st_sh = 1'b1;
      e_norm = '0;
    end
  end

  always_comb begin
    logic [MAN-1:0] man;
    man    = m_sh[W-2 -: MAN];
    guard  = m_sh[W-2-MAN];
    sticky = sticky_i | st_sh;
    for (int i = 0; i < int'(W) - 2 - int'(MAN); i++)
      if (m_sh[i]) sticky = 1'b1;
    round_up   = guard & (sticky | man[0]);
    packed_mag = {e_norm[EXP-1:0], man};
    rounded    = packed_mag + (EXP+MAN)'(round_up);
    if (mant_i == '0 && !sticky_i)
      res_o = {sign_i, {(EXP+MAN){1'b0}}};
    else if (int'(e_norm) >= int'(EMAX) || rounded[EXP+MAN-1 -: EXP] == EXP'(EMAX))
      res_o = {sign_i, EXP'(EMAX), {MAN{1'b0}}};
    else
      res_o = {sign_i, rounded};
  end
endmodule
