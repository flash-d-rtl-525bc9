// dot_product: query register and pipelined floating-point dot product.
//
// Holds one preloaded query vector q (D elements) and, for every key vector
// k_i presented with k_valid, computes the attention score
//     s_i = sum_j q[j] * k_i[j].
// D multipliers form the element products, which are registered, and a
// balanced tree of log2(D) levels of two-input adders, registered at every
// level, reduces them. A new key is accepted every cycle; s_i appears
// log2(D) + 1 cycles after its key, together with the key's valid and tag.
// The query is written with q_load, which must not be raised while keys are
// in flight.
//
// The query register, the multipliers and the adder follow the query block
// of the paper's architecture; the paper's adder is a fused multi-operand
// floating-point adder, while this design uses a tree of rounded two-input
// adders. The pipeline split is this design's choice, made so that the whole
// kernel has the log2(D) + 4 cycle latency the paper reports.
module dot_product #(
  parameter int EW    = 8,
  parameter int MW    = 7,
  parameter int D     = 64,
  parameter int TAG_W = 2
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  q_load,
  input  logic [EW+MW:0]        q_in    [D],
  input  logic                  k_valid,
  input  logic [TAG_W-1:0]      k_tag,
  input  logic [EW+MW:0]        k_in    [D],
  output logic                  s_valid,
  output logic [TAG_W-1:0]      s_tag,
  output logic [EW+MW:0]        s
);
  localparam int FPW = EW + MW + 1;
  localparam int L   = $clog2(D);

  initial assert (D == (1 << L) && D >= 2) else $error("dot_product: D must be a power of two");

  logic [FPW-1:0]   q_r  [D];
  logic [FPW-1:0]   prod [D];
  logic [FPW-1:0]   lvl  [L+1][D];     // lvl[0]: products, lvl[L][0]: score
  logic [L:0]       vld;
  logic [TAG_W-1:0] tag  [L+1];

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n)      for (int j = 0; j < D; j++) q_r[j] <= '0;
    else if (q_load) q_r <= q_in;

  for (genvar j = 0; j < D; j++) begin : g_mul
    fp_mul #(.EW(EW), .MW(MW)) u_mul (.a(q_r[j]), .b(k_in[j]), .y(prod[j]));
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      vld    <= '0;
      tag[0] <= '0;
      for (int j = 0; j < D; j++) lvl[0][j] <= '0;
    end else begin
      vld[0] <= k_valid;
      tag[0] <= k_tag;
      lvl[0] <= prod;
    end

  for (genvar l = 0; l < L; l++) begin : g_lvl
    localparam int NS = D >> (l + 1);   // sums produced by this level
    logic [FPW-1:0] sum [NS];
    for (genvar j = 0; j < NS; j++) begin : g_add
      fp_add #(.EW(EW), .MW(MW)) u_add (
        .a(lvl[l][2*j]), .b(lvl[l][2*j+1]), .sub(1'b0), .y(sum[j]));
    end
    always_ff @(posedge clk or negedge rst_n)
      if (!rst_n) begin
        vld[l+1] <= 1'b0;
        tag[l+1] <= '0;
        for (int j = 0; j < D; j++) lvl[l+1][j] <= '0;
      end else begin
        vld[l+1] <= vld[l];
        tag[l+1] <= tag[l];
        for (int j = 0; j < D; j++) lvl[l+1][j] <= (j < NS) ? sum[j] : '0;
      end
  end

  assign s       = lvl[L][0];
  assign s_valid = vld[L];
  assign s_tag   = tag[L];
endmodule
