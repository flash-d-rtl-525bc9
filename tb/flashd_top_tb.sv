// flashd_top_tb: end-to-end test of the FLASH-D kernel at its default size
// (BFloat16, D = 64, NQ = 4 query lanes, 128-entry key/value buffer).
//
// Each operation loads four random queries and N key/value pairs, pulses
// start and waits for done. Two references are computed in real arithmetic
// from the same BFloat16 inputs: exact softmax attention
// sum_i softmax_i(q . k_i) v_i, and the FLASH-D recursion itself (exact
// sigmoid and ln, with the out-of-range defaults and skips). Every
// output element must be within a tolerance of the recursion (0.08 for
// 16 keys, up to 0.3 for 128 and more: the error of the 8-segment PWL
// sigmoid grows with the sequence length); both errors are printed. Keys
// of some operations are built as c_i * q0/|q0|^2, which sets the scores of
// lane 0 to chosen values c_i, so that score jumps >= 11 and drops <= -6
// occur. Operations: N = 1, 16 small random scores, 48 and 128 (a full
// buffer) with large jumps and drops, 128 random, and a 320-key sequence
// run as three tiles (128 + 128 + 64, the later ones started with cont);
// two operations start right after the previous done.
// Checked besides the values: done arrives N + log2(D) + 3 clock edges after
// the start edge (one key per cycle, log2(D) + 4 cycles from the read of the
// last key to its output), and every mechanism occurs: first-key weight,
// sigmoid weight, low default (update skipped), high default (output
// overwritten), full-buffer operation, back-to-back operations and a
// continued (tiled) sequence.
module flashd_top_tb;
  import fp_tb_pkg::*;
  import fd_pkg::*;
  localparam int EW = 8, MW = 7, D = 64, NQ = 4, DEPTH = 128, AW = 7;
  localparam int L = $clog2(D);
  localparam real W_LO_R = 1.0014e-4;       // 16'h38D2
  localparam real W_HI_R = 0.99609375;      // 16'h3F7F

  logic clk = 0, rst_n = 0;
  logic q_we = 0, kv_we = 0, start = 0, cont = 0, busy, done;
  logic [1:0] q_sel = 0;
  logic [AW-1:0] kv_addr = 0;
  logic [AW:0] n_keys = 0;
  logic [15:0] q_data [D], k_data [D], v_data [D];
  logic [15:0] attn [NQ][D];

  logic [15:0] qm [NQ][D];
  localparam int SEQ = 2 * DEPTH + 64;       // longest sequence, in tiles of DEPTH
  logic [15:0] km [SEQ][D];
  logic [15:0] vm [SEQ][D];
  real walk_c = 0.0;

  int checks = 0, failures = 0;
  int cnt_sel [4] = '{0, 0, 0, 0};
  int cnt_full = 0, cnt_b2b = 0, cnt_cont = 0;
  real max_err = 0.0;

  flashd_top dut (.*);

  always #5 clk = ~clk;

  always @(posedge clk)
    for (int q = 0; q < NQ; q++)
      if (rst_n && dut.w_valid[q]) cnt_sel[dut.w_sel[q]]++;

  task automatic fail(string msg);
    failures++;
    if (failures < 12) $display("FAIL: %s", msg);
  endtask

  task automatic load_queries();
    for (int q = 0; q < NQ; q++) begin
      @(negedge clk);
      q_we = 1; q_sel = 2'(q);
      for (int j = 0; j < D; j++) begin
        qm[q][j] = 16'(rand_fp(EW, MW, -3, 0));
        q_data[j] = qm[q][j];
      end
    end
    @(negedge clk) q_we = 0;
  endtask

  // mode 0: small random keys; mode 1: lane-0 scores follow a walk with big
  // jumps and drops; mode 2: lane-0 scores uniform in [-4, 4]
  task automatic load_kv(int base, int n, int mode);
    real q2, c;
    q2 = 0.0;
    for (int j = 0; j < D; j++) q2 += fp2real(qm[0][j], EW, MW) ** 2;
    c = (base == 0) ? 0.0 : walk_c;
    for (int b = base; b < base + n; b++) begin
      int i = b - base;
      int r = int'($urandom_range(99));
      if (mode == 1) begin
        if (r < 15)      c = c + 12.0 + real'($urandom_range(200)) / 100.0;
        else if (r < 30) c = c - 7.0 - real'($urandom_range(200)) / 100.0;
        else             c = c + real'($urandom_range(400)) / 100.0 - 2.0;
        if (c > 30.0 || c < -30.0) c = 0.0;
      end else
        c = real'($urandom_range(800)) / 100.0 - 4.0;
      @(negedge clk);
      kv_we = 1; kv_addr = AW'(i);
      for (int j = 0; j < D; j++) begin
        if (mode == 0) km[b][j] = 16'(rand_fp(EW, MW, -5, -3));
        else km[b][j] = 16'(real2fp(c * fp2real(qm[0][j], EW, MW) / q2
                                    + real'($urandom_range(200)) / 10000.0 - 0.01, EW, MW));
        vm[b][j] = 16'(rand_fp(EW, MW, -3, -1));
        k_data[j] = km[b][j];
        v_data[j] = vm[b][j];
      end
    end
    walk_c = c;
    @(negedge clk) kv_we = 0;
  endtask

  // one operation over the n keys in the buffer; checks when done comes
  task automatic run_op(int n, bit back_to_back, bit continue_seq);
    int t;
    if (!back_to_back) @(negedge clk);
    start = 1; cont = continue_seq; n_keys = (AW+1)'(n);
    @(negedge clk) start = 0; cont = 0;
    t = 0;                                   // edges since the start edge
    while (!done) begin
      @(negedge clk); t++;
      if (t > 1000) break;
    end
    checks++;
    if (t != n + L + 3) fail($sformatf("done after %0d edges, expected %0d (N=%0d)", t, n + L + 3, n));
    if (n == DEPTH) cnt_full++;
    if (continue_seq) cnt_cont++;
  endtask

  task automatic run_check(int n, bit back_to_back, real tol);
    run_op(n, back_to_back, 1'b0);
    check_result(n, tol);
  endtask

  // compares attn with the reference over the first n keys of km/vm
  task automatic check_result(int n, real tol);
    for (int q = 0; q < NQ; q++) begin
      real s [SEQ];
      real wr [SEQ];
      real smax, den, lane_err, sm_err;
      lane_err = 0.0; sm_err = 0.0;
      smax = -1.0e30;
      // scores and the weights of the FLASH-D recursion in real arithmetic,
      // with exact sigmoid and ln and the out-of-range defaults
      for (int i = 0; i < n; i++) begin
        s[i] = 0.0;
        for (int j = 0; j < D; j++) s[i] += fp2real(qm[q][j], EW, MW) * fp2real(km[i][j], EW, MW);
        if (s[i] > smax) smax = s[i];
        if (i == 0)                      wr[i] = 1.0;
        else if (s[i] - s[i-1] >= 11.0)  wr[i] = W_HI_R;
        else if (s[i] - s[i-1] <= -6.0)  wr[i] = W_LO_R;
        else begin
          wr[i] = sigmoid(s[i] - s[i-1] + $ln(wr[i-1]));
          if (wr[i] < W_LO_R) wr[i] = W_LO_R;
          if (wr[i] > W_HI_R) wr[i] = W_HI_R;
        end
      end
      den = 0.0;
      for (int i = 0; i < n; i++) den += $exp(s[i] - smax);
      for (int j = 0; j < D; j++) begin
        real ex, sm, got;
        ex = 0.0; sm = 0.0;
        for (int i = 0; i < n; i++) begin
          real vv = fp2real(vm[i][j], EW, MW);
          sm += $exp(s[i] - smax) / den * vv;
          if (i == 0 || s[i] - s[i-1] >= 11.0) ex = vv;          // load / forget
          else if (s[i] - s[i-1] > -6.0) ex = ex + (vv - ex) * wr[i];   // else skipped
        end
        got = fp2real(attn[q][j], EW, MW);
        if (absr(got - ex) > lane_err) lane_err = absr(got - ex);
        if (absr(got - sm) > sm_err) sm_err = absr(got - sm);
        checks++;
        if (absr(got - ex) > tol)
          fail($sformatf("N=%0d lane %0d element %0d: %f expected %f", n, q, j, got, ex));
        if (n == 1) begin
          checks++;
          if (attn[q][j] != vm[0][j]) fail("N=1 result is not v_1");
        end
      end
      if (lane_err > max_err) max_err = lane_err;
      $display("N=%0d lane %0d: max |error| %f against the recursion, %f against exact softmax",
               n, q, lane_err, sm_err);
    end
  endtask

  initial begin
    for (int j = 0; j < D; j++) begin q_data[j] = 0; k_data[j] = 0; v_data[j] = 0; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    load_queries();
    load_kv(0, 1, 2);    run_check(1, 0, 0.0);
    load_kv(0, 16, 0);   run_check(16, 0, 0.08);
    run_check(16, 1, 0.08); cnt_b2b++;       // same data again, started at once
    load_kv(0, 48, 1);   run_check(48, 0, 0.15);
    load_queries();
    load_kv(0, 128, 1);  run_check(128, 0, 0.3);
    load_kv(0, 128, 2);  run_check(128, 0, 0.3);
    run_check(128, 1, 0.3); cnt_b2b++;
    // a 320-key sequence in three tiles: 128 + 128 + 64 keys
    load_queries();
    load_kv(0, 128, 0);   run_op(128, 0, 1'b0);
    load_kv(128, 128, 0); run_op(128, 0, 1'b1);
    load_kv(256, 64, 0);  run_op(64, 0, 1'b1);
    check_result(320, 0.3);
    $display("weights: sigmoid %0d low %0d high %0d start %0d; full-buffer runs %0d, back-to-back %0d, continued tiles %0d; max |error| %g",
             cnt_sel[WSEL_SIGMOID], cnt_sel[WSEL_LOW], cnt_sel[WSEL_HIGH], cnt_sel[WSEL_START],
             cnt_full, cnt_b2b, cnt_cont, max_err);
    foreach (cnt_sel[k]) begin
      checks++;
      if (cnt_sel[k] == 0) fail($sformatf("weight case %0d never occurred", k));
    end
    checks++; if (cnt_full == 0) fail("no full-buffer operation");
    checks++; if (cnt_b2b == 0) fail("no back-to-back operation");
    checks++; if (cnt_cont == 0) fail("no continued (tiled) operation");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
