// fp_add_tb: checks the floating-point adder/subtractor against exact real sums.
// Random BFloat16 operands with close and distant exponents, both for a + b
// and a - b; every result must lie within half an ulp of the exact value and
// equal the exact value rounded to nearest, ties to even, and
// exact cancellation must give zero.
module fp_add_tb;
  import fp_tb_pkg::*;
  localparam int EW = 8, MW = 7;
  logic [EW+MW:0] a, b, y;
  logic           sub;
  int checks = 0, failures = 0;

  fp_add #(.EW(EW), .MW(MW)) dut (.a, .b, .sub, .y);

  task automatic check(string what, bit ok);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s a=%h b=%h sub=%0d y=%h", what, a, b, sub, y);
    end
  endtask

  initial begin
    real ex, got;
    for (int n = 0; n < 8000; n++) begin
      int span = (n % 2) ? 3 : 20;
      a   = (EW+MW+1)'(rand_fp(EW, MW, -span, span));
      b   = (EW+MW+1)'(rand_fp(EW, MW, -span, span));
      sub = n[2];
      #1;
      ex  = sub ? fp2real(a, EW, MW) - fp2real(b, EW, MW) : fp2real(a, EW, MW) + fp2real(b, EW, MW);
      got = fp2real(y, EW, MW);
      if (ex == 0.0) check("cancellation", y[EW+MW-1:0] == '0);
      else           begin
        check("sum", absr(got - ex) <= 0.5 * ulp(ex, MW) * 1.0000001);
        check("rounded to nearest even", y == (EW+MW+1)'(real2fp(ex, EW, MW)));
      end
    end
    a = 16'h3F80; b = 16'h3F80; sub = 1'b1; #1; check("1-1", y == 16'h0000);
    a = 16'h3F80; b = 16'h0000; sub = 1'b0; #1; check("1+0", y == 16'h3F80);
    a = 16'h7FFF; b = 16'h7FFF; sub = 1'b0; #1; check("overflow saturates", y == 16'h7FFF);
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
