// output_unit: running attention output of one query, o_i = o_{i-1} + (v_i - o_{i-1}) * w_i.
//
// Keeps the output vector o (D floating-point elements) of one query and
// folds in one value vector per valid cycle. Per element it has one
// subtractor, one multiplier and one adder, the rewritten form
//   o_{i-1}(1 - w_i) + v_i w_i  =  o_{i-1} + (v_i - o_{i-1}) w_i
// that saves a multiplier over the two-multiplier update of FlashAttention2.
// The weight selector from the weight unit bypasses the arithmetic:
//   WSEL_LOW   (w_i ~ 0): o is kept unchanged, v_i is not needed;
//   WSEL_HIGH  (w_i ~ 1): o is overwritten with v_i (previous values forgotten);
//   WSEL_START (w_1 = 1): o is loaded with v_1, which starts a new sequence;
//   WSEL_SIGMOID: the full update above.
// o is a register updated at the clock edge after valid; it holds the result
// o_N after the last key. The update and both bypasses follow the paper;
// treating the start case as a load is this design's choice (it equals the
// update with w = 1 but does not depend on the stale o).
module output_unit
  import fd_pkg::*;
#(
  parameter int EW = 8,
  parameter int MW = 7,
  parameter int D  = 64
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           valid,
  input  wsel_t          w_sel,
  input  logic [EW+MW:0] w,
  input  logic [EW+MW:0] v [D],
  output logic [EW+MW:0] o [D]
);
  logic [EW+MW:0] dv   [D];
  logic [EW+MW:0] dvw  [D];
  logic [EW+MW:0] o_nx [D];

  for (genvar j = 0; j < D; j++) begin : g_el
    fp_add #(.EW(EW), .MW(MW)) u_sub (.a(v[j]),  .b(o[j]),   .sub(1'b1), .y(dv[j]));
    fp_mul #(.EW(EW), .MW(MW)) u_mul (.a(dv[j]), .b(w),      .y(dvw[j]));
    fp_add #(.EW(EW), .MW(MW)) u_add (.a(o[j]),  .b(dvw[j]), .sub(1'b0), .y(o_nx[j]));
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n)
      for (int j = 0; j < D; j++) o[j] <= '0;
    else if (valid)
      unique case (w_sel)
        WSEL_START, WSEL_HIGH: o <= v;
        WSEL_LOW:              o <= o;
        default:               o <= o_nx;
      endcase
endmodule
