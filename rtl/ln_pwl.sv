// ln_pwl: natural logarithm of the previous weight, piece-wise linear.
//
// The weight w lies in (0,1), so ln w is always negative. The input is a
// floating-point word w = 1.m * 2^e; the unit returns
//     ln w = e * ln 2 + ln(1.m)
// as a signed fixed-point number (fd_pkg::FRAC fractional bits). ln(1.m) over
// [1,2) is approximated by eight straight-line segments selected by the three
// leading mantissa bits; within segment k, ln(1+t) ~= B[k] + A[k]*(t - k/8).
// Each line is the minimax line of its segment (chord slope, shifted by half
// of the peak deviation); peak error 8.7e-4. Combinational.
//
// The paper specifies an eight-segment PWL approximation of ln over (0,1) but
// neither its breakpoints nor its coefficients. Splitting off the exponent
// first, so the eight segments cover only the mantissa, is this design's
// choice: it keeps the error small across the whole (0,1) range.
// Requires MW >= 3 (BFloat16 and FP8-E4M3 both qualify). A zero input is
// treated as the smallest normal number.
module ln_pwl
  import fd_pkg::*;
#(
  parameter int EW = 8,
  parameter int MW = 7
) (
  input  logic [EW+MW:0] w,
  output fix_t           ln_w
);
  localparam int BIAS = (1 << (EW - 1)) - 1;
  localparam longint LN2 = 726817;   // round(ln 2 * 2^FRAC)
  // slope and value at the segment start, both scaled by 2^FRAC
  localparam longint A [8] = '{988036, 883828, 799520, 729904, 671447, 621663, 578754, 541388};
  localparam longint B [8] = '{   909, 124232, 234578, 334419, 425581, 509452, 587112, 659417};

  logic [2:0]  seg;
  longint      t_fix, e, y;

  always_comb begin
    seg   = w[MW-1 -: 3];
    // offset inside the segment, as a fraction scaled by 2^FRAC
    t_fix = longint'(w[MW-1:0] & ((1 << (MW - 3)) - 1)) <<< (FRAC - MW);
    e     = (w[EW+MW-1:MW] == '0) ? longint'(1 - BIAS) : longint'(w[EW+MW-1:MW]) - BIAS;
    y     = e * LN2 + B[seg] + ((A[seg] * t_fix) >>> FRAC);
    ln_w  = fix_t'(y);
  end
endmodule
