// fm_scheduler: workload reordering of the flexible-MAC (FM) array.
// Rows of the CPE array have non-decreasing MAC counts (fewest in the first
// row group, most in the last). Given the total nonzero count of each of the M
// k-element feature blocks (summed over the vertices of a pass, obtained while
// the blocks are binned), the scheduler ranks the blocks: rank(b) = number of
// blocks with fewer nonzeros, ties broken by block index. Row r then receives
// the block of rank r, so the lightest blocks go to the rows with fewest MACs
// and the heaviest to the rows with most. blk_of_row drives the weight load
// (row r's spads get the weight rows of that block) and the input buffer.
// The mapping is registered one cycle after start; done pulses with it.
// Ordering blocks by nonzeros onto the MAC groups follows the paper; using a
// full rank instead of coarse bins is this design's choice (it bins as finely
// as the rows allow).
module fm_scheduler #(
  parameter int M  = 16,
  parameter int CW = 24
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  start,
  input  logic [CW-1:0]         blk_nnz [M],
  output logic [$clog2(M)-1:0]  blk_of_row [M],
  output logic                  done
);
  localparam int MW = $clog2(M);
  logic [MW-1:0] rank [M];

  always_comb begin
    for (int b = 0; b < M; b++) begin
      rank[b] = '0;
      for (int o = 0; o < M; o++)
        if (blk_nnz[o] < blk_nnz[b] || (blk_nnz[o] == blk_nnz[b] && o < b))
          rank[b] = rank[b] + 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      done <= 1'b0;
      for (int r = 0; r < M; r++) blk_of_row[r] <= MW'(r);
    end else begin
      done <= start;
      if (start)
        for (int b = 0; b < M; b++) blk_of_row[rank[b]] <= MW'(b);
    end
  end
endmodule
