// output_unit_tb: checks the output update o_i = o_{i-1} + (v_i - o_{i-1}) w_i.
// Drives random value vectors and weights with all four selector cases and
// random idle cycles. For the arithmetic case every element must be within
// the rounding error of three BFloat16 operations of the exact real update
// computed from the previous output; the start and high cases must load v
// exactly, the low case must leave o untouched, and o must not change on
// idle cycles.
module output_unit_tb;
  import fp_tb_pkg::*;
  import fd_pkg::*;
  localparam int EW = 8, MW = 7, D = 64;
  localparam int NU = 1500;

  logic clk = 0, rst_n = 0, valid = 0;
  wsel_t w_sel = WSEL_START;
  logic [15:0] w = 0;
  logic [15:0] v [D];
  logic [15:0] o [D];
  logic [15:0] o_before [D];
  int checks = 0, failures = 0;
  int cnt [4] = '{0, 0, 0, 0};

  output_unit #(.EW(EW), .MW(MW), .D(D)) dut (.*);

  always #5 clk = ~clk;

  task automatic fail(string msg);
    failures++;
    if (failures < 12) $display("FAIL: %s", msg);
  endtask

  initial begin
    for (int j = 0; j < D; j++) v[j] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < NU; n++) begin
      @(negedge clk);
      for (int j = 0; j < D; j++) v[j] = 16'(rand_fp(EW, MW, -4, 1));
      w_sel = (n == 0) ? WSEL_START : wsel_t'($urandom_range(3));
      w     = 16'(rand_fp(EW, MW, -12, -1)) & 16'h7FFF;
      valid = ($urandom_range(5) != 0);
      o_before = o;
      @(negedge clk);                       // update happened at the posedge
      if (valid) cnt[w_sel]++;
      for (int j = 0; j < D; j++) begin
        real ov, vv, wv, ex, got;
        ov = fp2real(o_before[j], EW, MW); vv = fp2real(v[j], EW, MW);
        wv = fp2real(w, EW, MW);           got = fp2real(o[j], EW, MW);
        checks++;
        if (!valid || w_sel == WSEL_LOW) begin
          if (o[j] != o_before[j]) fail($sformatf("element %0d changed while held", j));
        end else if (w_sel == WSEL_START || w_sel == WSEL_HIGH) begin
          if (o[j] != v[j]) fail($sformatf("element %0d not loaded with v", j));
        end else begin
          ex = ov + (vv - ov) * wv;
          if (absr(got - ex) > 2.0 ** (-MW) * (absr(ov) + 2.0 * absr(vv - ov) * wv) + 1e-30)
            fail($sformatf("element %0d: %f expected %f (o=%f v=%f w=%f)", j, got, ex, ov, vv, wv));
        end
      end
      valid = 0;
    end
    foreach (cnt[k]) begin
      checks++;
      if (cnt[k] == 0) fail($sformatf("selector case %0d never occurred", k));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
