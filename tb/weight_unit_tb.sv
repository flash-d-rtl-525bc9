// weight_unit_tb: checks the recursive weight w_i = sigma(s_i - s_{i-1} + ln w_{i-1}).
// Streams sequences of random-walk BFloat16 scores (steps between -8 and +13,
// so all four cases occur) with first-key marks and random idle cycles. For
// every weight it recomputes the expected value in real arithmetic from the
// scores and from the previous weight held by the unit: 1 for a first key,
// the defaults below -6 and above 11, otherwise the exact sigmoid, allowed
// the PWL error plus BFloat16 rounding. Checks that w follows s by one cycle
// and that every case of the weight selector was exercised.
module weight_unit_tb;
  import fp_tb_pkg::*;
  import fd_pkg::*;
  localparam int EW = 8, MW = 7;
  localparam logic [15:0] W_LO = 16'h38D2, W_HI = 16'h3F7F, W_ONE = 16'h3F80;
  localparam int NS = 3000;

  logic clk = 0, rst_n = 0;
  logic s_valid = 0, s_first = 0, w_valid;
  logic [1:0] s_tag = 0, w_tag;
  logic [15:0] s = 0, w, w_prev;
  wsel_t w_sel;
  int checks = 0, failures = 0, cycle = 0;
  int cnt [4] = '{0, 0, 0, 0};
  logic [15:0] q_s [$];
  bit          q_f [$];
  int          q_c [$];
  real s_last = 0.0;
  real max_err = 0.0;

  weight_unit #(.EW(EW), .MW(MW), .TAG_W(2), .W_LO(W_LO), .W_HI(W_HI), .W_ONE(W_ONE)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  task automatic fail(string msg);
    failures++;
    if (failures < 12) $display("FAIL cycle %0d: %s", cycle, msg);
  endtask

  always @(posedge clk) if (rst_n && w_valid) begin
    logic [15:0] si; bit fi; int ci;
    real d, dq, ex, got;
    wsel_t exp_sel;
    si = q_s.pop_front(); fi = q_f.pop_front(); ci = q_c.pop_front();
    checks++; if (cycle - ci != 1) fail($sformatf("latency %0d", cycle - ci));
    d   = fp2real(si, EW, MW) - s_last;
    dq  = fp2real(real2fp(d, EW, MW), EW, MW);
    got = fp2real(w, EW, MW);
    if (fi)             exp_sel = WSEL_START;
    else if (dq >= 11)  exp_sel = WSEL_HIGH;
    else if (dq <= -6)  exp_sel = WSEL_LOW;
    else                exp_sel = WSEL_SIGMOID;
    cnt[w_sel]++;
    if (fi || absr(dq - 11.0) > 0.2 && absr(dq + 6.0) > 0.2) begin
      checks++;
      if (w_sel != exp_sel) fail($sformatf("selector %s expected %s (d=%f)", w_sel.name(), exp_sel.name(), d));
    end
    checks++;
    unique case (w_sel)
      WSEL_START:   if (w != W_ONE) fail("start weight");
      WSEL_HIGH:    if (w != W_HI)  fail("high default");
      WSEL_LOW:     if (w != W_LO)  fail("low default");
      WSEL_SIGMOID: begin
        ex = sigmoid(dq + $ln(fp2real(w_prev, EW, MW)));
        if (ex < fp2real(W_LO, EW, MW)) ex = fp2real(W_LO, EW, MW);
        if (ex > fp2real(W_HI, EW, MW)) ex = fp2real(W_HI, EW, MW);
        if (absr(got - ex) > max_err) max_err = absr(got - ex);
        if (absr(got - ex) > 0.0045 + 0.6 * ulp(ex, MW))
          fail($sformatf("w=%f expected %f (d=%f w_prev=%f)", got, ex, dq, fp2real(w_prev, EW, MW)));
      end
    endcase
    s_last = fp2real(si, EW, MW);
  end

  initial begin
    real sr;
    int  left;
    repeat (3) @(negedge clk);
    rst_n = 1;
    sr = 0.0; left = 0;
    for (int n = 0; n < NS; n++) begin
      @(negedge clk);
      if ($urandom_range(7) == 0) begin s_valid = 0; @(negedge clk); end
      if (left == 0) begin
        left = 1 + $urandom_range(24);
        s_first = 1;
        sr = real'($urandom_range(200)) / 10.0 - 10.0;
      end else begin
        s_first = 0;
        sr = sr + real'($urandom_range(2100)) / 100.0 - 8.0;
        if (sr > 40.0 || sr < -40.0) sr = 0.0;
      end
      left--;
      s = 16'(real2fp(sr, EW, MW));
      s_valid = 1;
      q_s.push_back(s); q_f.push_back(s_first); q_c.push_back(cycle);
    end
    @(negedge clk) s_valid = 0;
    repeat (4) @(negedge clk);
    checks++; if (q_s.size() != 0) fail("weights missing");
    foreach (cnt[k]) begin
      checks++;
      if (cnt[k] == 0) fail($sformatf("selector case %0d never occurred", k));
    end
    $display("cases: sigmoid %0d low %0d high %0d start %0d, max sigmoid error %g",
             cnt[0], cnt[1], cnt[2], cnt[3], max_err);
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
