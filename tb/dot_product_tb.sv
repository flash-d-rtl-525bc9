// dot_product_tb: checks the query register and pipelined dot product.
// Loads a random query, streams random keys back to back (one per cycle, with
// gaps now and then) and compares every score with the exact real dot product
// of the same BFloat16 inputs, allowing the rounding error of a log2(D)+1
// level computation. Checks the latency of log2(D)+1 cycles and that tags
// stay with their scores. Reloads the query halfway through.
module dot_product_tb;
  import fp_tb_pkg::*;
  localparam int EW = 8, MW = 7, D = 64, TAG_W = 8;
  localparam int L = $clog2(D);
  localparam int NK = 300;

  logic clk = 0, rst_n = 0;
  logic q_load = 0, k_valid = 0, s_valid;
  logic [TAG_W-1:0] k_tag = 0, s_tag;
  logic [EW+MW:0] q_in [D], k_in [D], s;
  int checks = 0, failures = 0, cycle = 0;

  real exp_s [NK];
  real exp_bound [NK];
  int  sent_cycle [NK];
  int  rx = 0;

  dot_product #(.EW(EW), .MW(MW), .D(D), .TAG_W(TAG_W)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  // checker
  always @(posedge clk) if (rst_n && s_valid) begin
    real got;
    got = fp2real(s, EW, MW);
    checks++;
    if (absr(got - exp_s[rx]) > exp_bound[rx]) begin
      failures++;
      if (failures < 10) $display("FAIL score %0d: got %f expected %f (bound %f)", rx, got, exp_s[rx], exp_bound[rx]);
    end
    checks++;
    if (s_tag != TAG_W'(rx) || cycle - sent_cycle[rx] != L + 1) begin
      failures++;
      if (failures < 10) $display("FAIL tag/latency %0d: tag %0d latency %0d", rx, s_tag, cycle - sent_cycle[rx]);
    end
    rx++;
  end

  task automatic new_query();
    for (int j = 0; j < D; j++) q_in[j] = (EW+MW+1)'(rand_fp(EW, MW, -3, 1));
    @(negedge clk) q_load = 1;
    @(negedge clk) q_load = 0;
  endtask

  initial begin
    for (int j = 0; j < D; j++) begin q_in[j] = '0; k_in[j] = '0; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    new_query();
    for (int n = 0; n < NK; n++) begin
      real acc, mag;
      if (n == NK / 2) begin
        @(negedge clk) k_valid = 0;
        repeat (L + 3) @(negedge clk);     // drain before reloading q
        new_query();
      end
      @(negedge clk);
      if ($urandom_range(9) == 0) begin k_valid = 0; @(negedge clk); end
      acc = 0.0; mag = 0.0;
      for (int j = 0; j < D; j++) begin
        k_in[j] = (EW+MW+1)'(rand_fp(EW, MW, -3, 1));
        acc += fp2real(q_in[j], EW, MW) * fp2real(k_in[j], EW, MW);
        mag += absr(fp2real(q_in[j], EW, MW) * fp2real(k_in[j], EW, MW));
      end
      exp_s[n] = acc;
      exp_bound[n] = mag * real'(L + 1) * (2.0 ** (-MW)) + 1e-6;
      sent_cycle[n] = cycle;   // captured at the next edge, score registered L edges later
      k_valid = 1;
      k_tag = TAG_W'(n);
    end
    @(negedge clk) k_valid = 0;
    repeat (L + 4) @(negedge clk);
    checks++;
    if (rx != NK) begin failures++; $display("FAIL received %0d of %0d scores", rx, NK); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
