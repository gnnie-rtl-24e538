// tb_fm_scheduler: random per-block nonzero counts (with ties); the
// row-to-block map must be a permutation whose counts never decrease from
// the first row to the last, ties kept in block order. Includes the paper's
// example of three blocks with 6, 5 and 4 nonzeros.
`include "tb/tb_check.svh"
module tb_fm_scheduler;
  localparam int M = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic start, done;
  logic [23:0] blk_nnz [M];
  logic [2:0] blk_of_row [M];
  fm_scheduler #(.M(M)) dut (.*);
  `WATCHDOG(5000)
  initial begin
    start = 0;
    for (int b = 0; b < M; b++) blk_nnz[b] = 0;
    repeat (3) @(posedge clk); #1; rst_n = 1;
    for (int t = 0; t < 40; t++) begin
      automatic int used [M];
      for (int b = 0; b < M; b++) begin blk_nnz[b] = 24'($urandom % 12); used[b] = 0; end
      if (t == 0) begin
        for (int b = 0; b < M; b++) blk_nnz[b] = 24'(100 + b);
        blk_nnz[0] = 6; blk_nnz[1] = 5; blk_nnz[2] = 4;
      end
      start = 1; @(posedge clk); #1; start = 0;
      `CHECK(done, "done one cycle after start")
      for (int r = 0; r < M; r++) used[blk_of_row[r]]++;
      for (int b = 0; b < M; b++) `CHECK(used[b] == 1, "permutation")
      for (int r = 1; r < M; r++)
        `CHECK(blk_nnz[blk_of_row[r-1]] < blk_nnz[blk_of_row[r]] ||
               (blk_nnz[blk_of_row[r-1]] == blk_nnz[blk_of_row[r]] && blk_of_row[r-1] < blk_of_row[r]),
               $sformatf("order t=%0d r=%0d", t, r))
      if (t == 0) `CHECK(blk_of_row[0] == 2 && blk_of_row[1] == 1 && blk_of_row[2] == 0, "paper example 4,5,6")
    end
    `FINISH
  end
endmodule
