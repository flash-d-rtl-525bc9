// ln_pwl_tb: checks the piece-wise linear ln against $ln.
// Sweeps every BFloat16 value from 2^-14 up to the largest value below 1 and
// requires |ln_pwl(w) - ln(w)| <= 1e-3, which covers the PWL error (8.7e-4)
// plus fixed-point rounding.
module ln_pwl_tb;
  import fp_tb_pkg::*;
  import fd_pkg::*;
  localparam int EW = 8, MW = 7;
  logic [EW+MW:0] w;
  fix_t ln_w;
  int checks = 0, failures = 0;
  real maxerr = 0.0;

  ln_pwl #(.EW(EW), .MW(MW)) dut (.w, .ln_w);

  initial begin
    for (int e = 127 - 14; e < 127; e++)
      for (int m = 0; m < (1 << MW); m++) begin
        real ex, got;
        w = {1'b0, 8'(e), 7'(m)};
        #1;
        ex  = $ln(fp2real(w, EW, MW));
        got = real'(ln_w) / real'(1 << FRAC);
        if (absr(got - ex) > maxerr) maxerr = absr(got - ex);
        checks++;
        if (absr(got - ex) > 1e-3) begin
          failures++;
          if (failures < 10) $display("FAIL w=%h ln=%f expected %f", w, got, ex);
        end
      end
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
