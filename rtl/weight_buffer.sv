// weight_buffer: double-buffered on-chip store of weight columns.
// Two halves each hold one pass worth of weights: N columns, each split into M
// k-row blocks of up to K_MAX bytes. While the CPE array works from half
// rd_half, DRAM refills the other half through wr_*. During a spad load, at
// address rd_addr, row r of CPEs reads block sel_blk[r] of every column, so all
// M x N CPE spads take one word per cycle and a full load takes k cycles. The
// row-to-block selection carries the FM reordering and the LR weight transfer.
// For GATs the two halves of the attention vector are stored as two weight
// columns. Reads are combinational.
// Holding W columns, the attention vector and double buffering follow the
// paper; the bank layout and the read port shape are this design's choices.
module weight_buffer import gnnie_pkg::*; #(
  parameter int M     = 16,
  parameter int N     = 16,
  parameter int K_MAX = 256
) (
  input  logic                      clk,
  input  logic                      wr_en,
  input  logic                      wr_half,
  input  logic [$clog2(N)-1:0]      wr_col,
  input  logic [$clog2(M)-1:0]      wr_blk,
  input  logic [$clog2(K_MAX)-1:0]  wr_addr,
  input  data_t                     wr_data,
  input  logic                      rd_half,
  input  logic [$clog2(K_MAX)-1:0]  rd_addr,
  input  logic [$clog2(M)-1:0]      sel_blk [M],
  output data_t                     rd_data [M][N]
);
  data_t mem [2][N][M][K_MAX];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_half][wr_col][wr_blk][wr_addr] <= wr_data;
  end

  always_comb begin
    for (int r = 0; r < M; r++)
      for (int c = 0; c < N; c++)
        rd_data[r][c] = mem[rd_half][c][sel_blk[r]][rd_addr];
  end
endmodule
