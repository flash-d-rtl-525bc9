// sigmoid_pwl: logistic sigmoid sigma(x) = 1/(1+e^-x), piece-wise linear.
//
// Input and output are fixed-point numbers with fd_pkg::FRAC fractional bits;
// the output is unsigned, in Q1.FRAC. Eight straight-line segments
// approximate sigma on the negative half, x in [-9.25, 0]; positive inputs use
// the symmetry sigma(x) = 1 - sigma(-x). Below -9.25 the PWL value is zero.
// The result is finally clamped to [Y_MIN, Y_MAX], the smallest and largest
// weights the kernel allows, so that the next ln never sees 0 or 1.
// Each line is the minimax line of its segment (chord slope, shifted by half
// of the peak deviation); peak absolute error 0.0038. Combinational.
//
// Eight segments follow the paper; the paper does not publish its
// breakpoints or coefficients, so the segment placement (denser where sigma
// is small, to keep the relative error of small weights low) and the use of
// symmetry are this design's choice.
module sigmoid_pwl
  import fd_pkg::*;
#(
  parameter int Y_MIN = 105,                   // round(1e-4 * 2^FRAC)
  parameter int Y_MAX = (1 << FRAC) - (1 << (FRAC - 8))
) (
  input  fix_t         x,
  output logic [FRAC:0] y
);
  // segment start points, slopes and intercepts, all scaled by 2^FRAC
  localparam longint BP [8] = '{-9699328, -7340032, -5767168, -4508877,
                                -3407872, -2411725, -1520435,  -734003};
  localparam longint A  [8] = '{380, 2208, 8141, 23908, 59378, 121979, 198266, 251940};
  localparam longint B  [8] = '{3501, 16114, 48337, 115292, 229207, 372113, 483332, 522935};

  longint xn, yn, yp;

  always_comb begin
    xn = (x < 0) ? longint'(x) : -longint'(x);   // -|x|
    yn = 0;
    for (int k = 0; k < 8; k++)
      if (xn >= BP[k]) yn = ((A[k] * xn) >>> FRAC) + B[k];
    yp = (x < 0) ? yn : (longint'(1) <<< FRAC) - yn;
    if (yp < Y_MIN)      y = (FRAC+1)'(Y_MIN);
    else if (yp > Y_MAX) y = (FRAC+1)'(Y_MAX);
    else                 y = (FRAC+1)'(yp);
  end
endmodule
