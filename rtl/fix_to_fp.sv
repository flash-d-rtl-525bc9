// fix_to_fp: signed fixed-point to floating-point conversion.
//
// Converts a signed FW-bit fixed-point number with FRAC fractional bits to a
// floating-point word (EW exponent, MW mantissa bits): the magnitude is
// normalised by a leading-one search and rounded to nearest, ties to even.
// Results below the smallest normal number become zero. Combinational. A
// helper of the weight unit; its formats are this design's choice.
module fix_to_fp #(
  parameter int EW   = 8,
  parameter int MW   = 7,
  parameter int FW   = 28,
  parameter int FRAC = 20
) (
  input  logic signed [FW-1:0] x,
  output logic [EW+MW:0]       y
);
  localparam int BIAS = (1 << (EW - 1)) - 1;
  localparam int EMAX = (1 << EW) - 1;
  // room below the rounding point, so the guard and sticky bits always exist
  localparam int XW   = FW + MW + 2;

  logic          sign, guard, sticky;
  logic [FW-1:0] absx;
  logic [XW-1:0] mag, norm;
  logic [MW:0]   mant_r;
  int            pos, e;

  always_comb begin
    sign = x[FW-1];
    absx = sign ? FW'(-x) : FW'(x);
    mag  = {absx, {(MW+2){1'b0}}};
    pos  = 0;
    for (int j = 0; j < XW; j++)
      if (mag[j]) pos = j;
    e      = pos - (MW + 2) - FRAC + BIAS;
    norm   = mag << (XW - 1 - pos);
    guard  = norm[XW-2-MW];
    sticky = |norm[XW-3-MW:0];
    mant_r = {1'b0, norm[XW-2 -: MW]} + {{MW{1'b0}}, guard & (sticky | norm[XW-1-MW])};
    if (mant_r[MW]) e = e + 1;
    if (mag == '0 || e <= 0)
      y = '0;
    else if (e > EMAX)
      y = {sign, {(EW+MW){1'b1}}};
    else
      y = {sign, e[EW-1:0], mant_r[MW-1:0]};
  end
endmodule
