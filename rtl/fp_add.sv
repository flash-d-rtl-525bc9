// fp_add: combinational floating-point adder / subtractor.
//
// Computes a + b, or a - b when sub is high, for floating-point words with EW
// exponent and MW stored mantissa bits (default BFloat16), rounded to nearest,
// ties to even. The operand of larger magnitude is kept unshifted; the other is
// aligned to it with MW+4 extra low bits and a sticky bit, the two are added or
// subtracted, the sum is renormalised by a leading-one search and then rounded.
// Like fp_mul it flushes subnormals to zero, has no infinity or NaN and
// saturates on overflow; these simplifications are this design's choice.
module fp_add #(
  parameter int EW = 8,
  parameter int MW = 7
) (
  input  logic [EW+MW:0] a,
  input  logic [EW+MW:0] b,
  input  logic           sub,
  output logic [EW+MW:0] y
);
  localparam int M    = MW + 1;
  localparam int G    = M + 3;          // extra low bits below the mantissa
  localparam int W    = 1 + M + G;      // carry bit + mantissa + extra bits
  localparam int EMAX = (1 << EW) - 1;

  logic [EW+MW:0] x_big, x_small;
  logic           s_big, s_small, eff_sub, sticky_al, guard, sticky;
  logic [EW-1:0]  e_big, e_small;
  logic [W-1:0]   f_big, f_small, f_sh, sum, norm;
  logic [MW:0]    mant_r;
  int             d, pos, e;

  always_comb begin
    // order the operands by magnitude (sign of b already flipped for sub)
    if (a[EW+MW-1:0] >= b[EW+MW-1:0]) begin
      x_big = a; x_small = {b[EW+MW] ^ sub, b[EW+MW-1:0]};
    end else begin
      x_big = {b[EW+MW] ^ sub, b[EW+MW-1:0]}; x_small = a;
    end
    s_big   = x_big[EW+MW];
    s_small = x_small[EW+MW];
    e_big   = x_big[EW+MW-1:MW];
    e_small = x_small[EW+MW-1:MW];
    eff_sub = s_big ^ s_small;
    // zero (or flushed subnormal) operands contribute nothing
    f_big   = (e_big   == '0) ? '0 : {1'b0, 1'b1, x_big[MW-1:0],   {G{1'b0}}};
    f_small = (e_small == '0) ? '0 : {1'b0, 1'b1, x_small[MW-1:0], {G{1'b0}}};

    // align the smaller operand; bits shifted out are kept as a sticky bit
    d         = int'(e_big) - int'(e_small);
    sticky_al = 1'b0;
    for (int j = 0; j < W; j++)
      if (j < d && f_small[j]) sticky_al = 1'b1;
    f_sh    = (d >= W) ? '0 : (f_small >> d);
    f_sh[0] = f_sh[0] | sticky_al;

    sum = eff_sub ? (f_big - f_sh) : (f_big + f_sh);

    // leading one
    pos = 0;
    for (int j = 0; j < W; j++)
      if (sum[j]) pos = j;
    e    = int'(e_big) + pos - (W - 2);
    norm = sum << (W - 1 - pos);

    guard  = norm[W-2-MW];
    sticky = |norm[W-3-MW:0];
    mant_r = {1'b0, norm[W-2 -: MW]} + {{MW{1'b0}}, guard & (sticky | norm[W-1-MW])};
    if (mant_r[MW]) e = e + 1;

    if (sum == '0 || e <= 0)
      y = '0;
    else if (e > EMAX)
      y = {s_big, {(EW+MW){1'b1}}};
    else
      y = {s_big, e[EW-1:0], mant_r[MW-1:0]};
  end
endmodule
