// kv_buffer: local key and value memory of the kernel.
//
// Holds DEPTH key vectors and DEPTH value vectors of D floating-point
// elements each. One write port stores a key/value pair at wr_addr; one read
// port returns the key and the value vector at rd_addr on the next clock
// edge, so a key and a value vector are read every cycle and broadcast to all
// query lanes. The paper assumes such local memories (one key and one value
// vector read per cycle) without describing them; the depth, the single write
// port and the one-cycle synchronous read are this design's choice. Written
// as plain arrays, so a synthesis flow can map them onto SRAM macros.
module kv_buffer #(
  parameter int EW    = 8,
  parameter int MW    = 7,
  parameter int D     = 64,
  parameter int DEPTH = 128,
  parameter int AW    = $clog2(DEPTH)
) (
  input  logic           clk,
  input  logic           wr_en,
  input  logic [AW-1:0]  wr_addr,
  input  logic [EW+MW:0] wr_k [D],
  input  logic [EW+MW:0] wr_v [D],
  input  logic           rd_en,
  input  logic [AW-1:0]  rd_addr,
  output logic [EW+MW:0] rd_k [D],
  output logic [EW+MW:0] rd_v [D]
);
  logic [D*(EW+MW+1)-1:0] k_mem [DEPTH];
  logic [D*(EW+MW+1)-1:0] v_mem [DEPTH];
  logic [D*(EW+MW+1)-1:0] k_rd, v_rd, k_wr, v_wr;

  for (genvar j = 0; j < D; j++) begin : g_pack
    assign k_wr[j*(EW+MW+1) +: EW+MW+1] = wr_k[j];
    assign v_wr[j*(EW+MW+1) +: EW+MW+1] = wr_v[j];
    assign rd_k[j] = k_rd[j*(EW+MW+1) +: EW+MW+1];
    assign rd_v[j] = v_rd[j*(EW+MW+1) +: EW+MW+1];
  end

  always_ff @(posedge clk) begin
    if (wr_en) begin
      k_mem[wr_addr] <= k_wr;
      v_mem[wr_addr] <= v_wr;
    end
    if (rd_en) begin
      k_rd <= k_mem[rd_addr];
      v_rd <= v_mem[rd_addr];
    end
  end
endmodule
