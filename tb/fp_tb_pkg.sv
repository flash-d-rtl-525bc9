// fp_tb_pkg: reference helpers for the testbenches.
//
// Converts between the kernel's small floating-point words and SystemVerilog
// reals (no subnormals, no infinity or NaN, like the design), draws random
// floating-point words, and gives the unit in the last place of a real value,
// so that testbenches can compare the design against exact real arithmetic.
package fp_tb_pkg;

  function automatic real fp2real(logic [31:0] x, int EW, int MW);
    int  e   = int'((x >> MW) & ((1 << EW) - 1));
    int  m   = int'(x & ((1 << MW) - 1));
    int  s   = int'((x >> (EW + MW)) & 1);
    real r;
    if (e == 0) return 0.0;
    r = (1.0 + real'(m) / real'(1 << MW)) * (2.0 ** (e - ((1 << (EW - 1)) - 1)));
    return s ? -r : r;
  endfunction

  // round to nearest, ties to even
  function automatic logic [31:0] real2fp(real r, int EW, int MW);
    real a = (r < 0.0) ? -r : r;
    int  bias = (1 << (EW - 1)) - 1;
    int  e = 0;
    int  mi;
  real f;
    if (a == 0.0) return 0;
    while (a >= 2.0) begin a = a / 2.0; e++; end
    while (a < 1.0)  begin a = a * 2.0; e--; end
    f  = (a - 1.0) * real'(1 << MW);
    mi = int'($floor(f));
    if (f - $floor(f) > 0.5 || (f - $floor(f) == 0.5 && mi % 2 == 1)) mi++;
    if (mi == (1 << MW)) begin mi = 0; e++; end
    if (e + bias <= 0) return 0;
    if (e + bias > (1 << EW) - 1) return ((r < 0.0) ? (1 << (EW + MW)) : 0) | ((1 << (EW + MW)) - 1);
    return ((r < 0.0) ? (1 << (EW + MW)) : 0) | ((e + bias) << MW) | mi;
  endfunction

  // random word with unbiased exponent in [emin, emax]
  function automatic logic [31:0] rand_fp(int EW, int MW, int emin, int emax);
    int bias = (1 << (EW - 1)) - 1;
    int e = emin + int'($urandom_range(emax - emin));
    return (($urandom & 1) << (EW + MW)) | ((e + bias) << MW) | ($urandom & ((1 << MW) - 1));
  endfunction

  // unit in the last place of |r| in a format with MW mantissa bits
  function automatic real ulp(real r, int MW);
    real a = (r < 0.0) ? -r : r;
    int  e = 0;
    if (a == 0.0) return 0.0;
    while (a >= 2.0) begin a = a / 2.0; e++; end
    while (a < 1.0)  begin a = a * 2.0; e--; end
    return 2.0 ** (e - MW);
  endfunction

  function automatic real absr(real r);
    return (r < 0.0) ? -r : r;
  endfunction

  function automatic real sigmoid(real x);
    return 1.0 / (1.0 + $exp(-x));
  endfunction

endpackage
