// fp_to_fix: floating-point to signed fixed-point conversion.
//
// Converts a floating-point word (EW exponent, MW mantissa bits) to a signed
// fixed-point number of FW bits with FRAC fractional bits. The magnitude is
// truncated toward zero and saturates at the largest representable magnitude,
// so a very large score difference still compares correctly against the
// active-region limits. Combinational. A helper of the weight unit; its
// formats are this design's choice.
module fp_to_fix #(
  parameter int EW   = 8,
  parameter int MW   = 7,
  parameter int FW   = 28,
  parameter int FRAC = 20
) (
  input  logic [EW+MW:0]       x,
  output logic signed [FW-1:0] y
);
  localparam int BIAS = (1 << (EW - 1)) - 1;

  logic [FW-1:0] mag;
  logic [MW:0]   m;
  int            sh;

  always_comb begin
    m   = {1'b1, x[MW-1:0]};
    sh  = int'(x[EW+MW-1:MW]) - BIAS - MW + FRAC;
    mag = '0;
    if (x[EW+MW-1:MW] == '0)
      mag = '0;
    else if (sh + MW > FW - 2)
      mag = {1'b0, {(FW-1){1'b1}}};              // saturate
    else if (sh >= 0)
      mag = FW'(m) << sh;
    else if (-sh <= MW)
      mag = FW'(m >> (-sh));
    else
      mag = '0;
    y = x[EW+MW] ? -signed'(mag) : signed'(mag);
  end
endmodule
