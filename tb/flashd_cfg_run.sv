// flashd_cfg_run: drives and checks one flashd_top of a given size and format.
//
// Used by flashd_cfg_tb to run the kernel in the configurations besides the
// default one: hidden dimensions 16 and 256 and the FP8-E4M3 format. The
// module owns its clock, loads NQ random queries, and runs three operations
// over a DEPTH-key buffer: one key (the result must be v_1 exactly), DEPTH
// keys with random scores in [-2, 2], and DEPTH keys whose lane-0 scores
// follow a walk with jumps >= 11 and drops <= -6 (keys built as
// c_i * q0 / |q0|^2). Each result element is compared with the FLASH-D
// recursion in real arithmetic (exact sigmoid and ln, the same default
// weights as the design, W_LO_R and W_HI_R) within TOL, and done must come
// N + log2(D) + 3 clock edges after the start edge. All four weight cases
// must occur. When finished it raises fin and reports its counts.
module flashd_cfg_run
  import fp_tb_pkg::*;
  import fd_pkg::*;
#(
  parameter int             EW    = 8,
  parameter int             MW    = 7,
  parameter int             D     = 16,
  parameter int             NQ    = 2,
  parameter int             DEPTH = 32,
  parameter logic [EW+MW:0] W_LO  = 16'h38D2,
  parameter logic [EW+MW:0] W_HI  = 16'h3F7F,
  parameter logic [EW+MW:0] W_ONE = 16'h3F80,
  parameter real            TOL   = 0.1,
  parameter string          NAME  = "cfg"
) (
  output logic fin,
  output int   checks,
  output int   failures
);
  localparam int AW = $clog2(DEPTH);
  localparam int QW = (NQ > 1) ? $clog2(NQ) : 1;
  localparam int L  = $clog2(D);
  localparam int FW = EW + MW + 1;
  localparam real W_LO_R = fp2real(32'(W_LO), EW, MW);
  localparam real W_HI_R = fp2real(32'(W_HI), EW, MW);

  logic clk = 0, rst_n = 0;
  logic q_we = 0, kv_we = 0, start = 0, cont = 0, busy, done;
  logic [QW-1:0] q_sel = '0;
  logic [AW-1:0] kv_addr = '0;
  logic [AW:0] n_keys = '0;
  logic [FW-1:0] q_data [D], k_data [D], v_data [D];
  logic [FW-1:0] attn [NQ][D];
  logic [FW-1:0] qm [NQ][D];
  logic [FW-1:0] km [DEPTH][D];
  logic [FW-1:0] vm [DEPTH][D];
  int cnt_sel [4] = '{0, 0, 0, 0};

  flashd_top #(.EW(EW), .MW(MW), .D(D), .NQ(NQ), .DEPTH(DEPTH),
               .W_LO(W_LO), .W_HI(W_HI), .W_ONE(W_ONE)) dut (.*);

  always #5 clk = ~clk;

  always @(posedge clk)
    for (int q = 0; q < NQ; q++)
      if (rst_n && dut.w_valid[q]) cnt_sel[dut.w_sel[q]]++;

  task automatic fail(string msg);
    failures++;
    if (failures < 8) $display("FAIL %s: %s", NAME, msg);
  endtask

  task automatic load_queries();
    for (int q = 0; q < NQ; q++) begin
      @(negedge clk);
      q_we = 1; q_sel = QW'(q);
      for (int j = 0; j < D; j++) begin
        qm[q][j] = FW'(rand_fp(EW, MW, -3, 0));
        q_data[j] = qm[q][j];
      end
    end
    @(negedge clk) q_we = 0;
  endtask

  // walk = 0: lane-0 scores uniform in [-2, 2]; walk = 1: jumps and drops
  task automatic load_kv(int n, bit walk);
    real q2, c;
    q2 = 0.0; c = 0.0;
    for (int j = 0; j < D; j++) q2 += fp2real(32'(qm[0][j]), EW, MW) ** 2;
    for (int i = 0; i < n; i++) begin
      int r = int'($urandom_range(99));
      if (walk) begin
        if (r < 15)      c = c + 12.0 + real'($urandom_range(200)) / 100.0;
        else if (r < 30) c = c - 7.0 - real'($urandom_range(200)) / 100.0;
        else             c = c + real'($urandom_range(400)) / 100.0 - 2.0;
        if (c > 30.0 || c < -30.0) c = 0.0;
      end else
        c = real'($urandom_range(400)) / 100.0 - 2.0;
      @(negedge clk);
      kv_we = 1; kv_addr = AW'(i);
      for (int j = 0; j < D; j++) begin
        km[i][j] = FW'(real2fp(c * fp2real(32'(qm[0][j]), EW, MW) / q2, EW, MW));
        vm[i][j] = FW'(rand_fp(EW, MW, -3, -1));
        k_data[j] = km[i][j];
        v_data[j] = vm[i][j];
      end
    end
    @(negedge clk) kv_we = 0;
  endtask

  task automatic run_check(int n);
    int t;
    real worst;
    @(negedge clk);
    start = 1; n_keys = (AW+1)'(n);
    @(negedge clk) start = 0;
    t = 0;
    while (!done) begin
      @(negedge clk); t++;
      if (t > 4 * DEPTH + 100) break;
    end
    checks++;
    if (t != n + L + 3) fail($sformatf("done after %0d edges, expected %0d", t, n + L + 3));
    worst = 0.0;
    for (int q = 0; q < NQ; q++) begin
      real s [DEPTH];
      real wr [DEPTH];
      for (int i = 0; i < n; i++) begin
        s[i] = 0.0;
        for (int j = 0; j < D; j++)
          s[i] += fp2real(32'(qm[q][j]), EW, MW) * fp2real(32'(km[i][j]), EW, MW);
        if (i == 0)                      wr[i] = 1.0;
        else if (s[i] - s[i-1] >= 11.0)  wr[i] = W_HI_R;
        else if (s[i] - s[i-1] <= -6.0)  wr[i] = W_LO_R;
        else begin
          wr[i] = sigmoid(s[i] - s[i-1] + $ln(wr[i-1]));
          if (wr[i] < W_LO_R) wr[i] = W_LO_R;
          if (wr[i] > W_HI_R) wr[i] = W_HI_R;
        end
      end
      for (int j = 0; j < D; j++) begin
        real ex, got;
        ex = 0.0;
        for (int i = 0; i < n; i++) begin
          real vv = fp2real(32'(vm[i][j]), EW, MW);
          if (i == 0 || s[i] - s[i-1] >= 11.0) ex = vv;
          else if (s[i] - s[i-1] > -6.0) ex = ex + (vv - ex) * wr[i];
        end
        got = fp2real(32'(attn[q][j]), EW, MW);
        if (absr(got - ex) > worst) worst = absr(got - ex);
        checks++;
        if (absr(got - ex) > TOL)
          fail($sformatf("N=%0d lane %0d element %0d: %f expected %f", n, q, j, got, ex));
        if (n == 1) begin
          checks++;
          if (attn[q][j] != vm[0][j]) fail("N=1 result is not v_1");
        end
      end
    end
    $display("%s: N=%0d done after %0d edges, max |error| %f against the recursion", NAME, n, t, worst);
  endtask

  initial begin
    fin = 0; checks = 0; failures = 0;
    for (int j = 0; j < D; j++) begin q_data[j] = '0; k_data[j] = '0; v_data[j] = '0; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    load_queries();
    load_kv(1, 1'b0);     run_check(1);
    load_kv(DEPTH, 1'b0); run_check(DEPTH);
    load_kv(DEPTH, 1'b1); run_check(DEPTH);
    $display("%s: weights sigmoid %0d low %0d high %0d start %0d", NAME,
             cnt_sel[WSEL_SIGMOID], cnt_sel[WSEL_LOW], cnt_sel[WSEL_HIGH], cnt_sel[WSEL_START]);
    foreach (cnt_sel[k]) begin
      checks++;
      if (cnt_sel[k] == 0) fail($sformatf("weight case %0d never occurred", k));
    end
    fin = 1;
  end
endmodule
