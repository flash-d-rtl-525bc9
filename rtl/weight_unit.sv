// weight_unit: recursive softmax weight of one query, w_i = sigma(s_i - s_{i-1} + ln w_{i-1}).
//
// This is where FLASH-D hides the softmax division. Each score s_i of the
// query (one per cycle at most, marked by s_valid) is turned into the weight
// w_i with which the value vector v_i enters the output:
//   stage A (registered): the previous score is kept in s_prev and the
//     floating-point difference s_i - s_{i-1} is registered.
//   stage B (combinational, result registered as w_{i-1}): the difference is
//     converted to fixed point, ln w_{i-1} is added, the sum goes through the
//     PWL sigmoid and back to floating point. A range check on the difference
//     selects a default instead of the sigmoid: W_LO when s_i - s_{i-1} <= -6,
//     W_HI when s_i - s_{i-1} >= 11. For the first key of a sequence
//     (tag first) the weight is 1.
// w, w_sel and w_valid are valid one cycle after s (stage B); w_sel tells the
// output unit which of the four cases applied, so it can skip its arithmetic
// for the two out-of-range cases. The next weight of the same query needs the
// registered w_{i-1}, so the loop ln -> + -> sigmoid -> register closes in a
// single cycle and a new score can be taken every cycle.
//
// The structure (score register, subtractor, ln, adder, sigmoid, range check,
// two multiplexers, weight register) and the limits -6 and 11 follow the
// paper. The defaults printed in its block diagram are 0.0001 and 0.9999; the
// text asks for the smallest and largest values inside (0,1). 0.9999 rounds to
// 1.0 in BFloat16, so W_HI is the largest BFloat16 below 1 (0.99609375, 0x3F7F)
// and W_LO is 0.0001 rounded to BFloat16 (1.0014e-4, 0x38D2). Both are
// parameters, to be overridden for other formats. The sign of ln w_{i-1} is
// "+" as in the paper's derivation; its algorithm listing prints "-".
module weight_unit
  import fd_pkg::*;
#(
  parameter int              EW    = 8,
  parameter int              MW    = 7,
  parameter int              TAG_W = 2,
  parameter logic [EW+MW:0]  W_LO  = 16'h38D2,
  parameter logic [EW+MW:0]  W_HI  = 16'h3F7F,
  parameter logic [EW+MW:0]  W_ONE = 16'h3F80
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             s_valid,
  input  logic             s_first,
  input  logic [TAG_W-1:0] s_tag,
  input  logic [EW+MW:0]   s,
  output logic             w_valid,
  output logic [TAG_W-1:0] w_tag,
  output wsel_t            w_sel,
  output logic [EW+MW:0]   w,
  output logic [EW+MW:0]   w_prev
);
  logic [EW+MW:0]   s_prev, diff, diff_q, w_sig;
  logic             first_q;
  fix_t             diff_fix, ln_fix, x;
  logic [FRAC:0]    sig_fix;
  logic signed [FIX_W:0] x_wide;

  // sigmoid clamp limits: the fixed-point images of W_LO and W_HI
  localparam int BIAS = (1 << (EW - 1)) - 1;
  function automatic int fix_of(logic [EW+MW:0] f);
    int     sh = int'(f[EW+MW-1:MW]) - BIAS - MW + FRAC;
    longint m  = longint'({1'b1, f[MW-1:0]});
    return (sh >= 0) ? int'(m <<< sh) : int'(m >>> (-sh));
  endfunction
  localparam int LO_FIX = fix_of(W_LO);
  localparam int HI_FIX = fix_of(W_HI);

  // ---- stage A: score difference -------------------------------------------
  fp_add #(.EW(EW), .MW(MW)) u_sub (.a(s), .b(s_prev), .sub(1'b1), .y(diff));

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      s_prev  <= '0;
      diff_q  <= '0;
      first_q <= 1'b0;
      w_valid <= 1'b0;
      w_tag   <= '0;
    end else begin
      w_valid <= s_valid;
      if (s_valid) begin
        s_prev  <= s;
        diff_q  <= diff;
        first_q <= s_first;
        w_tag   <= s_tag;
      end
    end

  // ---- stage B: ln, add, sigmoid, range check, multiplexers -----------------
  fp_to_fix #(.EW(EW), .MW(MW), .FW(FIX_W), .FRAC(FRAC)) u_diff_fix (.x(diff_q), .y(diff_fix));
  ln_pwl    #(.EW(EW), .MW(MW)) u_ln (.w(w_prev), .ln_w(ln_fix));

  always_comb begin
    x_wide = {diff_fix[FIX_W-1], diff_fix} + {ln_fix[FIX_W-1], ln_fix};
    // saturate; out-of-range sums are overridden by the range check anyway
    if (x_wide > (FIX_W+1)'(2**(FIX_W-1) - 1))   x = {1'b0, {(FIX_W-1){1'b1}}};
    else if (x_wide < -(FIX_W+1)'(2**(FIX_W-1))) x = {1'b1, {(FIX_W-1){1'b0}}};
    else                                         x = fix_t'(x_wide);
  end

  sigmoid_pwl #(.Y_MIN(LO_FIX), .Y_MAX(HI_FIX)) u_sig (.x(x), .y(sig_fix));
  fix_to_fp #(.EW(EW), .MW(MW), .FW(FIX_W), .FRAC(FRAC)) u_sig_fp (
    .x(fix_t'(sig_fix)), .y(w_sig));

  always_comb begin
    if (first_q)                                        w_sel = WSEL_START;
    else if (diff_fix >= fix_t'(DIFF_HIGH <<< FRAC))    w_sel = WSEL_HIGH;
    else if (diff_fix <= fix_t'(DIFF_LOW <<< FRAC))     w_sel = WSEL_LOW;
    else                                                w_sel = WSEL_SIGMOID;
    unique case (w_sel)
      WSEL_START: w = W_ONE;
      WSEL_HIGH:  w = W_HI;
      WSEL_LOW:   w = W_LO;
      default:    w = w_sig;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n)       w_prev <= W_ONE;
    else if (w_valid) w_prev <= w;

endmodule
