// flashd_top: FLASH-D attention kernel for NQ queries processed in parallel.
//
// Computes Attn(q, K, V) = sum_i softmax(q.k_i) v_i for NQ preloaded query
// vectors at once, over the N key/value vectors held in the local buffer,
// without a maximum search, a running sum of exponentials or a final
// division. Every query lane has
//   dot_product  - query register and s_i = q . k_i,
//   weight_unit  - w_i = sigma(s_i - s_{i-1} + ln w_{i-1}), w_1 = 1,
//   output_unit  - o_i = o_{i-1} + (v_i - o_{i-1}) w_i,
// and all lanes share one kv_buffer whose key and value vectors are read once
// per cycle and broadcast to every lane.
//
// Use: write the query of lane j with q_we/q_sel/q_data, the key/value pairs
// with kv_we/kv_addr/k_data/v_data, then pulse start with n_keys = N
// (1..DEPTH). With cont low the first key starts a new sequence (w_1 = 1);
// with cont high the lanes keep their state (previous score, previous weight
// and output), so a sequence longer than DEPTH is processed as successive
// tiles: reload the buffer with the next keys and values and start again
// with cont high. The controller reads addresses 0..N-1 on consecutive cycles;
// the value vector is delayed by log2(D)+2 cycles so that it reaches the
// output unit together with its weight. One key/value pair enters per cycle
// and the kernel latency, from the read of a key to the updated o_i, is
// log2(D)+4 cycles (8, 10 and 12 for D = 16, 64 and 256). done pulses for one
// cycle when attn holds o_N, N + log2(D) + 3 clock edges after the edge that
// samples start (the last key is read N edges after it); attn then
// stays valid until the next start. The buffers must not be written while
// busy.
//
// The lane structure, the broadcast of K and V, the preloaded queries and the
// latency figures follow the paper. The number of lanes (NQ = 4), the buffer
// depth (DEPTH = 128), the load ports, the start/done controller and the
// tile continuation (cont) are this design's choice, the latter made so that
// the kernel keeps FlashAttention's tiling over the key sequence; the paper gives neither a number of parallel queries nor
// a memory size.
// The usage rules are immediate assertions sampled at the clock and gated by
// rst_n, so lint reports rst_n as used both asynchronously (reset) and
// synchronously (assertion enable); no logic is built from the latter.
module flashd_top
  import fd_pkg::*;
#(
  parameter int             EW    = 8,
  parameter int             MW    = 7,
  parameter int             D     = 64,
  parameter int             NQ    = 4,
  parameter int             DEPTH = 128,
  parameter int             AW    = $clog2(DEPTH),
  parameter int             QW    = (NQ > 1) ? $clog2(NQ) : 1,
  parameter logic [EW+MW:0] W_LO  = 16'h38D2,
  parameter logic [EW+MW:0] W_HI  = 16'h3F7F,
  parameter logic [EW+MW:0] W_ONE = 16'h3F80
) (
  input  logic           clk,
  input  logic           rst_n,
  // query preload
  input  logic           q_we,
  input  logic [QW-1:0]  q_sel,
  input  logic [EW+MW:0] q_data [D],
  // key/value buffer load
  input  logic           kv_we,
  input  logic [AW-1:0]  kv_addr,
  input  logic [EW+MW:0] k_data [D],
  input  logic [EW+MW:0] v_data [D],
  // control
  input  logic           start,
  input  logic           cont,
  input  logic [AW:0]    n_keys,
  output logic           busy,
  output logic           done,
  // result: one output vector per query lane
  output logic [EW+MW:0] attn [NQ][D]
);
  localparam int L     = $clog2(D);
  localparam int VDLY  = L + 2;                 // dot product + score-difference stage
  localparam int TAG_W = $bits(kv_tag_t);

  // ---- controller ------------------------------------------------------------
  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DRAIN} state_t;
  state_t          state;
  logic [AW:0]     n_r, cnt;
  logic            cont_r;
  logic            rd_en, k_valid;
  logic [AW-1:0]   rd_addr;
  kv_tag_t         rd_tag, k_tag;
  logic            fin;                        // last weight applied this cycle

  assign rd_en   = (state == S_RUN);
  assign rd_addr = cnt[AW-1:0];
  assign rd_tag  = '{first: (cnt == '0) && !cont_r, last: (cnt == n_r - 1'b1)};
  assign busy    = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      state   <= S_IDLE;
      n_r     <= '0;
      cnt     <= '0;
      cont_r  <= 1'b0;
      k_valid <= 1'b0;
      k_tag   <= '0;
      done    <= 1'b0;
    end else begin
      k_valid <= rd_en;
      k_tag   <= rd_tag;
      done    <= fin;
      unique case (state)
        S_IDLE:  if (start && n_keys != '0) begin
                   state <= S_RUN;
                   n_r    <= n_keys;
                   cnt    <= '0;
                   cont_r <= cont;
                 end
        S_RUN:   begin
                   cnt <= cnt + 1'b1;
                   if (cnt == n_r - 1'b1) state <= S_DRAIN;
                 end
        S_DRAIN: if (fin) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end

  // ---- shared key/value buffer ----------------------------------------------
  logic [EW+MW:0] k_bc [D];
  logic [EW+MW:0] v_rd [D];
  logic [EW+MW:0] v_dly [VDLY+1][D];           // v_dly[0]: buffer output

  kv_buffer #(.EW(EW), .MW(MW), .D(D), .DEPTH(DEPTH), .AW(AW)) u_kv (
    .clk, .wr_en(kv_we), .wr_addr(kv_addr), .wr_k(k_data), .wr_v(v_data),
    .rd_en, .rd_addr, .rd_k(k_bc), .rd_v(v_rd));

  // value vectors wait for their weights
  assign v_dly[0] = v_rd;
  for (genvar t = 0; t < VDLY; t++) begin : g_vdly
    always_ff @(posedge clk) v_dly[t+1] <= v_dly[t];
  end

  // ---- query lanes -----------------------------------------------------------
  logic  w_valid [NQ];
  wsel_t w_sel   [NQ];
  kv_tag_t w_tag [NQ];

  for (genvar q = 0; q < NQ; q++) begin : g_lane
    logic             s_valid;
    logic [TAG_W-1:0] s_tag, wt;
    kv_tag_t          s_tag_s;
    logic [EW+MW:0]   s, w, w_prev;

    dot_product #(.EW(EW), .MW(MW), .D(D), .TAG_W(TAG_W)) u_dot (
      .clk, .rst_n, .q_load(q_we && q_sel == QW'(q)), .q_in(q_data),
      .k_valid, .k_tag(k_tag), .k_in(k_bc),
      .s_valid, .s_tag, .s);

    weight_unit #(.EW(EW), .MW(MW), .TAG_W(TAG_W),
                  .W_LO(W_LO), .W_HI(W_HI), .W_ONE(W_ONE)) u_w (
      .clk, .rst_n, .s_valid, .s_first(s_tag_s.first), .s_tag,
      .s, .w_valid(w_valid[q]), .w_tag(wt), .w_sel(w_sel[q]), .w, .w_prev);
    assign s_tag_s  = kv_tag_t'(s_tag);
    assign w_tag[q] = kv_tag_t'(wt);

    output_unit #(.EW(EW), .MW(MW), .D(D)) u_out (
      .clk, .rst_n, .valid(w_valid[q]), .w_sel(w_sel[q]), .w,
      .v(v_dly[VDLY]), .o(attn[q]));
  end

  // all lanes run in lock step; lane 0 tells when the sequence is finished
  assign fin = w_valid[0] && w_tag[0].last;

  // ---- usage rules ---------------------------------------------------------------
  always_ff @(posedge clk)
    if (rst_n && busy) begin
      assert (!q_we)  else $error("flashd_top: query written while busy");
      assert (!kv_we) else $error("flashd_top: key/value buffer written while busy");
    end
  always_ff @(posedge clk)
    if (rst_n && start && state == S_IDLE)
      assert (n_keys <= (AW+1)'(DEPTH)) else $error("flashd_top: n_keys exceeds DEPTH");
endmodule
