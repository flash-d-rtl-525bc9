// flashd_cfg_tb: the kernel in the other evaluated configurations.
//
// Runs flashd_top, through flashd_cfg_run, at hidden dimensions 16 and 256 in
// BFloat16 and at 16 and 64 in FP8-E4M3 (EW = 4, MW = 3; default weights
// 2^-6, the smallest normal E4M3 value, 0.9375, the largest below 1, and 1.0).
// The expected latencies are log2(D) + 4 = 8, 12, 8 and 10 cycles from the read
// of a key to its output, checked through the done timing. Buffers are 32
// keys deep and two query lanes are used to keep the simulation short. The
// tolerance against the real-arithmetic recursion is 0.2 for BFloat16 (the
// error of the 8-segment sigmoid carried through the recursion; up to 0.11
// seen over 32 keys) and 0.45 for E4M3. E4M3 rounds every weight to 3 mantissa bits (up to 6% relative
// error, which ln passes on to the next weight) and every output element to
// steps of 1/32 to 1/16 at the values used (0.125 to 0.5); errors up to 0.4
// were seen over 32 keys. The E4M3 results are therefore coarse.
module flashd_cfg_tb;
  logic fin [4];
  int   chk [4], fl [4];

  flashd_cfg_run #(.EW(8), .MW(7), .D(16), .TOL(0.2), .NAME("bf16 d=16"))
    u_b16 (.fin(fin[0]), .checks(chk[0]), .failures(fl[0]));
  flashd_cfg_run #(.EW(8), .MW(7), .D(256), .TOL(0.2), .NAME("bf16 d=256"))
    u_b256 (.fin(fin[1]), .checks(chk[1]), .failures(fl[1]));
  flashd_cfg_run #(.EW(4), .MW(3), .D(16), .W_LO(8'h08), .W_HI(8'h37), .W_ONE(8'h38),
                   .TOL(0.45), .NAME("e4m3 d=16"))
    u_e16 (.fin(fin[2]), .checks(chk[2]), .failures(fl[2]));
  flashd_cfg_run #(.EW(4), .MW(3), .D(64), .W_LO(8'h08), .W_HI(8'h37), .W_ONE(8'h38),
                   .TOL(0.45), .NAME("e4m3 d=64"))
    u_e64 (.fin(fin[3]), .checks(chk[3]), .failures(fl[3]));

  initial begin
    #1;                                   // let every runner clear fin first
    wait (fin[0] && fin[1] && fin[2] && fin[3]);
    $display("TB_RESULT checks=%0d failures=%0d",
             chk[0] + chk[1] + chk[2] + chk[3], fl[0] + fl[1] + fl[2] + fl[3]);
    $finish;
  end

  initial begin
    #200000;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d",
             chk[0] + chk[1] + chk[2] + chk[3], fl[0] + fl[1] + fl[2] + fl[3] + 1);
    $finish;
  end
endmodule
