// kv_buffer_tb: checks the local key/value memory.
// Fills every address with random key and value vectors, reads the addresses
// back in random order one per cycle and checks that the vectors of the
// address read at one clock edge appear after that edge, that keys and
// values stay paired and that rewriting an address replaces its contents.
module kv_buffer_tb;
  import fp_tb_pkg::*;
  localparam int EW = 8, MW = 7, D = 64, DEPTH = 128, AW = $clog2(DEPTH);

  logic clk = 0, wr_en = 0, rd_en = 0;
  logic [AW-1:0] wr_addr = 0, rd_addr = 0;
  logic [15:0] wr_k [D], wr_v [D], rd_k [D], rd_v [D];
  logic [15:0] ref_k [DEPTH][D];
  logic [15:0] ref_v [DEPTH][D];
  int checks = 0, failures = 0;

  kv_buffer #(.EW(EW), .MW(MW), .D(D), .DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  task automatic write(int a);
    @(negedge clk);
    wr_en = 1; wr_addr = AW'(a);
    for (int j = 0; j < D; j++) begin
      wr_k[j] = 16'($urandom); wr_v[j] = 16'($urandom);
      ref_k[a][j] = wr_k[j]; ref_v[a][j] = wr_v[j];
    end
  endtask

  task automatic read_check(int a);
    @(negedge clk);
    wr_en = 0; rd_en = 1; rd_addr = AW'(a);
    @(negedge clk);
    rd_en = 0;
    checks++;
    if (rd_k != ref_k[a] || rd_v != ref_v[a]) begin
      failures++;
      if (failures < 10) $display("FAIL address %0d", a);
    end
  endtask

  initial begin
    for (int a = 0; a < DEPTH; a++) write(a);
    for (int n = 0; n < 400; n++) begin
      read_check(int'($urandom_range(DEPTH - 1)));
      if (n % 50 == 0) write(int'($urandom_range(DEPTH - 1)));
    end
    // back-to-back reads: data of each address right after its edge
    @(negedge clk); wr_en = 0; rd_en = 1; rd_addr = 5;
    @(negedge clk); checks++; if (rd_k != ref_k[5]) failures++; rd_addr = 9;
    @(negedge clk); checks++; if (rd_k != ref_k[9] || rd_v != ref_v[9]) failures++;
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
