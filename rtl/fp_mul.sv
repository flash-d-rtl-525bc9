// fp_mul: combinational floating-point multiplier.
//
// Multiplies two floating-point words with EW exponent and MW stored mantissa
// bits (default BFloat16) and rounds the product to nearest, ties to even.
// Arithmetic is simplified in the way small accelerator datapaths usually are:
// subnormal inputs and results are flushed to zero, the all-ones exponent is an
// ordinary exponent (no infinity or NaN), and an overflowing result saturates
// to the largest magnitude. The format follows the paper (BFloat16 and
// FP8-E4M3 are the two formats it evaluates); the simplifications are this
// design's choice.
module fp_mul #(
  parameter int EW = 8,
  parameter int MW = 7
) (
  input  logic [EW+MW:0] a,
  input  logic [EW+MW:0] b,
  output logic [EW+MW:0] y
);
  localparam int M    = MW + 1;
  localparam int BIAS = (1 << (EW - 1)) - 1;
  localparam int EMAX = (1 << EW) - 1;

  logic              sign;
  logic [2*M-1:0]    prod, norm;
  logic [MW:0]       mant_r;      // rounded mantissa with carry out
  logic              guard, sticky;
  int                e;

  always_comb begin
    sign = a[EW+MW] ^ b[EW+MW];
    prod = {1'b1, a[MW-1:0]} * {1'b1, b[MW-1:0]};
    e    = int'(a[EW+MW-1:MW]) + int'(b[EW+MW-1:MW]) - BIAS;
    if (prod[2*M-1]) begin
      norm = prod;
      e    = e + 1;
    end else begin
      norm = prod << 1;
    end
    guard  = norm[2*M-2-MW];
    sticky = |norm[2*M-3-MW:0];
    mant_r = {1'b0, norm[2*M-2 -: MW]} + {{MW{1'b0}}, guard & (sticky | norm[2*M-1-MW])};
    if (mant_r[MW]) e = e + 1;   // 1.11..1 rounded up to 10.0..0: mantissa field is already 0

    if (a[EW+MW-1:MW] == '0 || b[EW+MW-1:MW] == '0 || e <= 0)
      y = '0;
    else if (e > EMAX)
      y = {sign, {(EW+MW){1'b1}}};
    else
      y = {sign, e[EW-1:0], mant_r[MW-1:0]};
  end
endmodule
