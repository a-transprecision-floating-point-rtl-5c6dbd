// fp_int_conv: bidirectional cast between a floating-point format and an
// IW-bit integer, signed or unsigned.
//
// i2f_i = 0 (float to integer): the EXP/MAN value in the low bits of op_i is
// rounded to the nearest integer, ties to even. Results outside the integer
// range saturate: to the largest value for NaN, +inf and large positive
// numbers, to the smallest value (0 when unsigned) for -inf and large
// negative numbers. The integer fills the low IW bits of res_o.
// i2f_i = 1 (integer to float): the IW-bit integer in the low bits of op_i,
// read as signed when signed_i is set, is converted with fp_norm_round
// (round to nearest even, overflow to infinity). The float fills the low
// EXP+MAN+1 bits of res_o.
// Upper result bits are zero. Combinational. Rounding mode and saturation
// values are this design's choice (they match the RISC-V F extension with
// its round-to-nearest-even mode).
module fp_int_conv #(
  parameter int unsigned WIDTH = 32,
  parameter int unsigned EXP   = 8,
  parameter int unsigned MAN   = 23,
  parameter int unsigned IW    = 32
) (
  input  logic             i2f_i,
  input  logic             signed_i,
  input  logic [WIDTH-1:0] op_i,
  output logic [WIDTH-1:0] res_o
);
  localparam int          BIAS = (1 << (EXP - 1)) - 1;
  localparam int unsigned F    = MAN + 2;            // fraction bits kept
  localparam int unsigned FW   = MAN + IW + 4;       // fixed-point width
  localparam int unsigned WI   = (IW > MAN + 3) ? IW : MAN + 3;

  // ---------------- float to integer ----------------
  logic [IW-1:0] f2i;

  always_comb begin
    logic           s;
    logic [EXP-1:0] e;
    logic [MAN-1:0] f;
    int             u;
    logic [FW-1:0]  fx;
    logic           st, g, up, ovf;
    logic [IW+1:0]  ip, mag;

    s = op_i[EXP+MAN];
    e = op_i[EXP+MAN-1 -: EXP];
    f = op_i[MAN-1:0];
    u = ((e == '0) ? 1 : int'(e)) - BIAS;   // unbiased exponent
    st  = 1'b0;
    ovf = 1'b0;
    fx  = '0;
    if (e == '1) begin
      ovf = 1'b1;
    end else if (u > int'(IW) + 1) begin
      ovf = 1'b1;
    end else if (u + 2 >= 0) begin
      fx = FW'({e != '0, f}) << (u + 2);
    end else begin
      for (int i = 0; i <= int'(MAN); i++)
        if (i < -(u + 2) && ((i == int'(MAN)) ? (e != '0) : f[i])) st = 1'b1;
      fx = (-(u + 2) >= int'(FW)) ? '0 : (FW'({e != '0, f}) >> (-(u + 2)));
    end
    // fixed point: fx = |value| * 2^F
    for (int i = 0; i < int'(F) - 1; i++)
      if (fx[i]) st = 1'b1;
    g   = fx[F-1];
    ip  = fx[FW-1 -: (IW + 2)];
    up  = g & (st | ip[0]);
    mag = ip + (IW+2)'(up);

    if (e == '1 && f != '0) begin            // NaN: largest value
      f2i = signed_i ? {1'b0, {(IW-1){1'b1}}} : '1;
    end else if (signed_i) begin
      if (!s && (ovf || mag > (IW+2)'({1'b0, {(IW-1){1'b1}}})))
        f2i = {1'b0, {(IW-1){1'b1}}};
      else if (s && (ovf || mag > (IW+2)'({1'b1, {(IW-1){1'b0}}})))
        f2i = {1'b1, {(IW-1){1'b0}}};
      else
        f2i = s ? IW'(-mag) : IW'(mag);
    end else begin
      if (s)
        f2i = '0;
      else if (ovf || mag > (IW+2)'({IW{1'b1}}))
        f2i = '1;
      else
        f2i = IW'(mag);
    end
  end

  // ---------------- integer to float ----------------
  logic [IW-1:0]      ival, imag;
  logic               isign;
  logic [WI-1:0]      im;
  logic [EXP+MAN:0]   i2f;

  assign ival  = op_i[IW-1:0];
  assign isign = signed_i & ival[IW-1];
  assign imag  = isign ? (~ival + 1'b1) : ival;
  assign im    = {imag, {(WI-IW){1'b0}}};

  fp_norm_round #(.EXP(EXP), .MAN(MAN), .W(WI)) u_round (
    .sign_i   (isign),
    .exp_i    (16'(BIAS + int'(IW) - 1)),   // imag = im / 2^(WI-1) * 2^(IW-1)
    .mant_i   (im),
    .sticky_i (1'b0),
    .res_o    (i2f)
  );

  assign res_o = i2f_i ? WIDTH'(i2f) : WIDTH'(f2i);
endmodule
