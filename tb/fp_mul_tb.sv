// fp_mul_tb: checks the floating-point multiplier against exact real products.
// Random BFloat16 operands; every result must lie within half an ulp of the
// exact product and equal it rounded to nearest, ties to even. Also checks zero operands, flushing of
// underflowing products and saturation of overflowing ones.
module fp_mul_tb;
  import fp_tb_pkg::*;
  localparam int EW = 8, MW = 7;
  logic [EW+MW:0] a, b, y;
  int checks = 0, failures = 0;

  fp_mul #(.EW(EW), .MW(MW)) dut (.a, .b, .y);

  task automatic check(string what, bit ok);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s a=%h b=%h y=%h", what, a, b, y);
    end
  endtask

  initial begin
    real ex, got;
    for (int n = 0; n < 5000; n++) begin
      a = (EW+MW+1)'(rand_fp(EW, MW, -20, 20));
      b = (EW+MW+1)'(rand_fp(EW, MW, -20, 20));
      #1;
      ex  = fp2real(a, EW, MW) * fp2real(b, EW, MW);
      got = fp2real(y, EW, MW);
      begin
        check("product", absr(got - ex) <= 0.5 * ulp(ex, MW) * 1.0000001);
        check("rounded to nearest even", y == (EW+MW+1)'(real2fp(ex, EW, MW)));
      end
    end
    a = 16'h3F80; b = 16'h0000; #1; check("zero operand", y == 16'h0000);
    a = 16'h0200; b = 16'h0200; #1; check("underflow to zero", y == 16'h0000);
    a = 16'h7F00; b = 16'h7F00; #1; check("overflow saturates", y == 16'h7FFF);
    a = 16'hBFC0; b = 16'h4000; #1; check("-1.5*2", y == 16'hC040);
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
