// tb_cpe: loads a random weight spad, streams random sparse blocks as
// nonzero lanes and checks each vertex-tagged partial sum against a dot
// product computed here, including the stall while the partial sum is not
// taken. Then drives aggregation edges: SUM and MAX over several neighbours
// with flushes on target change and at the end, and a GAT edge with the SFU
// answer supplied here, checked against scale*eta >> 16 and the denominator.
`include "tb/tb_check.svh"
module tb_cpe;
  import gnnie_pkg::*;
  localparam int K = 16, L = 4, G = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic w_we; logic [3:0] w_addr; data_t w_data;
  logic in_valid, in_ready, in_last; logic [L-1:0] lane_valid;
  logic [3:0] lane_idx [L]; data_t lane_val [L]; vid_t in_vid;
  logic ps_valid, ps_ready; psum_t ps;
  logic ag_valid, ag_ready, ag_flush; agg_op_e ag_op; vid_t ag_tgt;
  acc_t ag_opnd [G]; acc_t ag_ei1, ag_ej2;
  logic sfu_req_valid, sfu_req_ready, sfu_resp_valid; acc_t sfu_req_x; logic [31:0] sfu_resp_y;
  logic fl_valid, fl_ready, ag_idle; vid_t fl_vid; acc_t fl_vec [G]; acc_t fl_den;
  cpe #(.K_MAX(K), .LANES(L), .G(G)) dut (.*);
  `WATCHDOG(100000)

  data_t W [K];
  acc_t  accv [G];
  acc_t  nb [G];

  task automatic send_edge(agg_op_e op, vid_t t);
    ag_op = op; ag_tgt = t; for (int e = 0; e < G; e++) ag_opnd[e] = nb[e];
    ag_valid = 1;
    begin automatic logic rr; do begin rr = ag_ready; @(posedge clk); #1; end while (!rr); end
    ag_valid = 0;
  endtask

  task automatic expect_flush(vid_t t, string what);
    int n = 0;
    fl_ready = 1;
    while (!fl_valid && n < 200) begin @(posedge clk); #1; n++; end
    `CHECK(fl_valid && fl_vid == t, {what, " flush target"})
    for (int e = 0; e < G; e++) `CHECK(fl_vec[e] == accv[e], $sformatf("%s elem %0d: %0d vs %0d", what, e, fl_vec[e], accv[e]))
    @(posedge clk); #1; fl_ready = 0;
  endtask

  initial begin
    w_we = 0; w_addr = 0; w_data = 0; in_valid = 0; in_last = 0; lane_valid = 0; in_vid = 0;
    ps_ready = 0; ag_valid = 0; ag_flush = 0; ag_op = AGG_SUM; ag_tgt = 0; ag_ei1 = 0; ag_ej2 = 0;
    sfu_req_ready = 0; sfu_resp_valid = 0; sfu_resp_y = 0; fl_ready = 0;
    for (int e = 0; e < G; e++) ag_opnd[e] = 0;
    for (int l = 0; l < L; l++) begin lane_idx[l] = 0; lane_val[l] = 0; end
    repeat (3) @(posedge clk); #1; rst_n = 1;
    for (int a = 0; a < K; a++) begin
      W[a] = data_t'($urandom); w_we = 1; w_addr = 4'(a); w_data = W[a];
      @(posedge clk); #1;
    end
    w_we = 0;
    // weighting
    for (int t = 0; t < 30; t++) begin
      automatic acc_t expv = 0;
      automatic int idxs [$];
      automatic data_t vals [$];
      for (int i = 0; i < K; i++) if ($urandom % 3 == 0) begin
        idxs.push_back(i); vals.push_back(data_t'($urandom % 255 + 1));
        expv += acc_t'(vals[$]) * acc_t'(W[i]);
      end
      in_vid = vid_t'(100 + t);
      for (int b = 0; b == 0 || b * L < idxs.size(); b++) begin
        for (int l = 0; l < L; l++) begin
          lane_valid[l] = (b * L + l < idxs.size());
          lane_idx[l] = lane_valid[l] ? 4'(idxs[b*L+l]) : '0;
          lane_val[l] = lane_valid[l] ? vals[b*L+l] : '0;
        end
        in_last = ((b + 1) * L >= idxs.size());
        in_valid = 1;
        begin automatic logic rr; do begin rr = in_ready; @(posedge clk); #1; end while (!rr); end
      end
      in_valid = 0;
      // leave the psum pending a few cycles: input must stall
      in_valid = 1; in_last = 1; lane_valid = '0;
      repeat (3) begin `CHECK(ps_valid && !in_ready, "stall while psum pending") @(posedge clk); #1; end
      in_valid = 0;
      `CHECK(ps.vid == vid_t'(100 + t) && ps.val == expv, $sformatf("psum t=%0d %0d vs %0d", t, ps.val, expv))
      ps_ready = 1; @(posedge clk); #1; ps_ready = 0;
    end
    // SUM aggregation: target 5 gets 3 neighbours, then target 6 (flush of 5)
    for (int e = 0; e < G; e++) accv[e] = 0;
    for (int n = 0; n < 3; n++) begin
      for (int e = 0; e < G; e++) begin nb[e] = acc_t'($urandom % 1000) - 500; accv[e] += nb[e]; end
      send_edge(AGG_SUM, 5);
    end
    for (int e = 0; e < G; e++) nb[e] = 7;
    fork send_edge(AGG_SUM, 6); expect_flush(5, "sum"); join
    for (int e = 0; e < G; e++) accv[e] = 7;
    repeat (4) @(posedge clk); #1;
    ag_flush = 1; expect_flush(6, "sum2"); ag_flush = 0;
    repeat (2) @(posedge clk); #1;
    `CHECK(ag_idle, "idle after final flush")
    // MAX aggregation
    for (int e = 0; e < G; e++) accv[e] = -1000000;
    for (int n = 0; n < 4; n++) begin
      for (int e = 0; e < G; e++) begin nb[e] = acc_t'($urandom % 2000) - 1000; if (nb[e] > accv[e]) accv[e] = nb[e]; end
      send_edge(AGG_MAX, 9);
    end
    ag_flush = 1; expect_flush(9, "max"); ag_flush = 0;
    // GAT edge: SFU answers 1.5 (Q16.16)
    ag_ei1 = 300; ag_ej2 = -44;
    for (int e = 0; e < G; e++) begin nb[e] = acc_t'(e * 1000 - 3000); accv[e] = (nb[e] * 98304) >>> 16; end
    fork
      send_edge(AGG_GAT, 11);
      begin
        sfu_req_ready = 1;
        while (!sfu_req_valid) begin @(posedge clk); #1; end
        `CHECK(sfu_req_x == 256, "logit sum e_i1 + e_j2 to SFU")
        @(posedge clk); #1; sfu_req_ready = 0;
        repeat (2) @(posedge clk); #1;
        sfu_resp_valid = 1; sfu_resp_y = 32'd98304; @(posedge clk); #1; sfu_resp_valid = 0;
      end
    join
    ag_flush = 1; expect_flush(11, "gat"); ag_flush = 0;
    `CHECK(fl_den == 0, "den cleared after flush")
    `FINISH
  end
  // denominator check while the flush is pending
  always @(posedge clk) if (fl_valid && fl_ready && fl_vid == 11) begin
    checks++; if (fl_den != 98304) begin failures++; $display("FAIL: gat den %0d", fl_den); end
  end
endmodule
