// sigmoid_pwl_tb: checks the piece-wise linear sigmoid against 1/(1+e^-x).
// Sweeps x from -20 to 20 in steps of 1/256 and requires the output to be
// within 0.0045 of the exact sigmoid clamped to [Y_MIN, Y_MAX], exactly at
// the clamp limits far out, and never to fall by more than the step between
// two minimax segments (twice the peak error) as x grows.
module sigmoid_pwl_tb;
  import fp_tb_pkg::*;
  import fd_pkg::*;
  localparam int Y_MIN = 105, Y_MAX = (1 << FRAC) - (1 << (FRAC - 8));
  fix_t x;
  logic [FRAC:0] y, y_last;
  int checks = 0, failures = 0;
  real maxerr = 0.0;

  sigmoid_pwl #(.Y_MIN(Y_MIN), .Y_MAX(Y_MAX)) dut (.x, .y);

  task automatic check(string what, bit ok);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s x=%f y=%0d", what, real'(x) / real'(1 << FRAC), y);
    end
  endtask

  initial begin
    y_last = '0;
    for (int n = -20 * 256; n <= 20 * 256; n++) begin
      real xr, ex, got;
      x  = fix_t'(n) <<< (FRAC - 8);
      #1;
      xr  = real'(n) / 256.0;
      ex  = sigmoid(xr);
      if (ex < real'(Y_MIN) / real'(1 << FRAC)) ex = real'(Y_MIN) / real'(1 << FRAC);
      if (ex > real'(Y_MAX) / real'(1 << FRAC)) ex = real'(Y_MAX) / real'(1 << FRAC);
      got = real'(y) / real'(1 << FRAC);
      if (absr(got - ex) > maxerr) maxerr = absr(got - ex);
      check("value", absr(got - ex) <= 0.0045);
      check("monotonic", real'(y) >= real'(y_last) - 0.0076 * real'(1 << FRAC));
      y_last = y;
    end
    x = fix_t'(-15) <<< FRAC; #1; check("low clamp",  y == (FRAC+1)'(Y_MIN));
    x = fix_t'(15)  <<< FRAC; #1; check("high clamp", y == (FRAC+1)'(Y_MAX));
    x = '0;                   #1; check("sigma(0)",  absr(real'(y) / real'(1 << FRAC) - 0.5) < 0.003);
    $display("max |error| = %g", maxerr);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
