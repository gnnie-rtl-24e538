// tb_weight_buffer: fills both halves (double buffer) of a small weight
// buffer with random values, then reads random addresses with random
// row-to-block selections and compares every column against a model.
`include "tb/tb_check.svh"
module tb_weight_buffer;
  import gnnie_pkg::*;
  localparam int M = 4, N = 4, K = 8;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic wr_en, wr_half, rd_half;
  logic [1:0] wr_col, wr_blk;
  logic [2:0] wr_addr, rd_addr;
  data_t wr_data;
  logic [1:0] sel_blk [M];
  data_t rd_data [M][N];
  weight_buffer #(.M(M), .N(N), .K_MAX(K)) dut (.*);
  `WATCHDOG(10000)
  data_t model [2][N][M][K];
  initial begin
    wr_en = 0; wr_half = 0; wr_col = 0; wr_blk = 0; wr_addr = 0; wr_data = 0; rd_half = 0; rd_addr = 0;
    for (int r = 0; r < M; r++) sel_blk[r] = 2'(r);
    @(posedge clk); #1;
    for (int h = 0; h < 2; h++) for (int c = 0; c < N; c++) for (int b = 0; b < M; b++) for (int a = 0; a < K; a++) begin
      model[h][c][b][a] = data_t'($urandom);
      wr_en = 1; wr_half = h[0]; wr_col = 2'(c); wr_blk = 2'(b); wr_addr = 3'(a); wr_data = model[h][c][b][a];
      @(posedge clk); #1;
    end
    wr_en = 0;
    for (int t = 0; t < 100; t++) begin
      rd_half = 1'($urandom); rd_addr = 3'($urandom);
      for (int r = 0; r < M; r++) sel_blk[r] = 2'($urandom);
      #1;
      for (int r = 0; r < M; r++) for (int c = 0; c < N; c++)
        `CHECK(rd_data[r][c] == model[rd_half][c][sel_blk[r]][rd_addr], $sformatf("row %0d col %0d", r, c))
      @(posedge clk); #1;
    end
    `FINISH
  end
endmodule
