// tb_zero_detect: random blocks with varied density enter the zero-detection
// buffer; the (index, value) lanes handed out must list exactly the nonzeros in
// ascending index order, take max(1, ceil(nnz/LANES)) beats and report nnz.
`include "tb/tb_check.svh"
module tb_zero_detect;
  import gnnie_pkg::*;
  localparam int K = 32, L = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic blk_valid, blk_ready, out_valid, out_ready, out_last;
  data_t blk [K];
  vid_t blk_vid, out_vid;
  logic [L-1:0] lane_valid;
  logic [$clog2(K)-1:0] lane_idx [L];
  data_t lane_val [L];
  logic [$clog2(K):0] nnz;
  zero_detect #(.K_MAX(K), .LANES(L)) dut (.*);
  `WATCHDOG(50000)

  initial begin
    blk_valid = 0; out_ready = 1; blk_vid = '0;
    for (int i = 0; i < K; i++) blk[i] = '0;
    repeat (3) @(posedge clk); #1; rst_n = 1;
    for (int t = 0; t < 60; t++) begin
      automatic int n = 0, beats = 0, got = 0, pos = 0;
      automatic int dens = t % 5;
      for (int i = 0; i < K; i++) begin
        blk[i] = ($urandom % 5 < dens) ? data_t'($urandom % 200 + 1) : '0;
        if (blk[i] != 0) n++;
      end
      blk_vid = vid_t'(t);
      blk_valid = 1; @(posedge clk); #1; blk_valid = 0;
      `CHECK(int'(nnz) == n, "nnz count")
      forever begin
        automatic logic lst;
        lst = out_last;
        `CHECK(out_valid, "beat valid")
        `CHECK(out_vid == vid_t'(t), "vid")
        for (int l = 0; l < L; l++) if (lane_valid[l]) begin
          while (pos < K && blk[pos] == 0) pos++;
          `CHECK(int'(lane_idx[l]) == pos && lane_val[l] == blk[pos], $sformatf("lane t=%0d l=%0d", t, l))
          pos++; got++;
        end
        beats++;
        @(posedge clk); #1;
        if (lst || beats > 100) break;
      end
      `CHECK(got == n, $sformatf("all nonzeros t=%0d got %0d of %0d", t, got, n))
      `CHECK(beats == ((n == 0) ? 1 : (n + L - 1) / L), $sformatf("beats t=%0d %0d n=%0d", t, beats, n))
    end
    `FINISH
  end
endmodule
