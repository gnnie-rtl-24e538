// tb_top: end-to-end run of the engine at reduced size (4x2 CPE array,
// k = 4 features per block, 16 vertices, 8-slot vertex cache).
//  1. FM scheduling of the four k-blocks by nonzero count.
//  2. Weighting pass 0 with RLC-coded features, pass 1 with the RLC decoder
//     bypassed (dense tokens), and an attention pass that produces e1/e2.
//  3. Sum aggregation over a degree-ordered graph through the cache
//     controller, drained with ReLU to DRAM: compared exactly with
//     ReLU(sum over neighbours of h*W).
//  4. GAT aggregation over the same graph, drained through the divider:
//     compared with the softmax-weighted sum worked out here in floating
//     point (3% + 2 tolerance).
// The testbench plays DRAM (alpha words and result words) and the edge
// streamer, offering every not yet processed edge in each cache iteration.
// Each mechanism is counted and must occur: merge-PE stall, RLC bypass,
// all-zero block, load redistribution, SFU use, division, eviction, Round,
// deadlock (gamma raised), and a dropped (not yet cacheable) edge.
`include "tb/tb_check.svh"
module tb_top;
  import gnnie_pkg::*;
  localparam int M = 4, N = 2, KM = 8, G = 2, K = 4, NV = 16, NE = 40;
  localparam int F = N * G, FI = M * K;
  localparam int AB = 32'h0100_0000, OB = 32'h0200_0000;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic cfg_rlc_en, cfg_lr_en, cfg_rd_half, cfg_to_e, cfg_gat, cfg_relu;
  logic [3:0] cfg_k; logic [2:0] cfg_nblk; logic [0:0] cfg_pass;
  agg_op_e cfg_agg_op; vid_t cfg_nv; logic [31:0] cfg_total_alpha;
  logic wf_en, wf_half; logic [0:0] wf_col; logic [1:0] wf_blk; logic [2:0] wf_addr; data_t wf_data;
  logic fm_start; logic [23:0] fm_blk_nnz [M];
  logic tf_valid, tf_ready; logic [1:0] tf_blk; rlc_tok_t tf_tok; vid_t tf_vid;
  logic w_start, w_busy, w_done, ag_start, ec_valid, ec_ready, sub_end, iter_active, ag_done;
  vid_t ec_a, ec_b;
  logic dr_start, dr_busy, dr_done;
  logic m_valid, m_ready, m_we, m_tag, m_rvalid, m_rtag;
  logic [31:0] m_addr, m_wdata, m_rdata;
  logic [31:0] st_mpe_stalls, st_zero_blocks, st_bypass_blocks, st_sfu_served, st_divs, st_edges, st_dropped;
  logic [15:0] st_lr_events, st_rounds, st_iters, st_evictions, st_deadlocks, st_gamma;

  gnnie_top #(.M(M), .N(N), .K_MAX(KM), .G(G), .IB_DEPTH(128), .OB_ENTRIES(16), .SLOTS(4),
              .NSLOT(8), .WAYS(4), .R(2), .GAMMA0(5), .LR_PAIRS(1)) dut (.*);
  `WATCHDOG(400000)

  int h [NV][FI];
  int W [FI][F];
  int A [FI][2];
  int ea [NE], eb [NE], done_e [NE];
  int eta [NV][F];
  int e1 [NV], e2 [NV];
  logic [31:0] alpha_mem [NV];
  logic [31:0] out_mem [NV * F];

  // ---------------- DRAM model ----------------
  always @(posedge clk) begin
    m_rvalid <= 0;
    if (rst_n && m_valid && m_ready) begin
      if (m_we) begin
        if (m_addr >= OB) out_mem[m_addr - OB] <= m_wdata;
        else alpha_mem[m_addr - AB] <= m_wdata;
      end else begin
        m_rvalid <= 1; m_rtag <= m_tag; m_rdata <= alpha_mem[m_addr - AB];
      end
    end
  end
  always @(posedge clk) begin #1; m_ready = ($urandom % 4 != 0); end

  // ---------------- helpers ----------------
  task automatic push_blocks(input bit rlc);
    for (int v = 0; v < NV; v++)
      for (int b = 0; b < M; b++) begin
        rlc_tok_t toks [$];
        int run = 0;
        for (int i = 0; i < K; i++) begin
          automatic int x = h[v][b * K + i];
          if (!rlc) toks.push_back('{last: 1'b0, run: 8'd0, value: data_t'(x)});
          else if (x != 0) begin toks.push_back('{last: 1'b0, run: 8'(run), value: data_t'(x)}); run = 0; end
          else run++;
        end
        if (toks.size() == 0) toks.push_back('{last: 1'b0, run: 8'd0, value: '0});
        toks[toks.size() - 1].last = 1'b1;
        foreach (toks[t]) begin
          tf_valid = 1; tf_blk = 2'(b); tf_tok = toks[t]; tf_vid = vid_t'(v);
          begin automatic logic rr; do begin rr = tf_ready; @(posedge clk); #1; end while (!rr); end
          tf_valid = 0;
        end
      end
  endtask

  task automatic load_weights(input int half, input int mode, input int pass);
    for (int c = 0; c < N; c++) for (int b = 0; b < M; b++) for (int a = 0; a < K; a++) begin
      wf_en = 1; wf_half = half[0]; wf_col = 1'(c); wf_blk = 2'(b); wf_addr = 3'(a);
      wf_data = data_t'(mode == 0 ? W[b * K + a][pass * N + c] : A[b * K + a][c]);
      @(posedge clk); #1;
    end
    wf_en = 0;
  endtask

  task automatic weighting(input bit rlc, input int half, input int pass, input bit to_e);
    int cyc = 0;
    cfg_rlc_en = rlc; cfg_rd_half = half[0]; cfg_pass = 1'(pass); cfg_to_e = to_e;
    push_blocks(rlc);
    w_start = 1; @(posedge clk); #1; w_start = 0;
    while (!w_done && cyc < 50000) begin @(posedge clk); #1; cyc++; end
    `CHECK(w_done, "weighting pass finished")
  endtask

  task automatic aggregate(input agg_op_e op);
    cfg_agg_op = op; cfg_gat = (op == AGG_GAT);
    for (int v = 0; v < NV; v++) alpha_mem[v] = 0;
    for (int e = 0; e < NE; e++) begin alpha_mem[ea[e]]++; alpha_mem[eb[e]]++; done_e[e] = 0; end
    cfg_total_alpha = 2 * NE;
    ag_start = 1; @(posedge clk); #1; ag_start = 0;
    while (!ag_done) begin
      if (iter_active) begin
        for (int e = 0; e < NE; e++) if (!done_e[e]) begin
          automatic logic [31:0] n_before = st_edges;
          ec_valid = 1; ec_a = vid_t'(ea[e]); ec_b = vid_t'(eb[e]);
          begin automatic logic rr; do begin rr = ec_ready; @(posedge clk); #1; end while (!rr); end
          ec_valid = 0;
          if (st_edges != n_before) done_e[e] = 1;
        end
        // wait until the dispatcher is back in its idle state, then end the subgraph
        while (!ec_ready) begin @(posedge clk); #1; end
        sub_end = 1; @(posedge clk); #1; sub_end = 0;
        while (iter_active && !ec_ready) begin @(posedge clk); #1; end
        repeat (2) @(posedge clk); #1;
      end else begin
        @(posedge clk); #1;
      end
    end
    for (int e = 0; e < NE; e++) `CHECK(done_e[e] == 1, $sformatf("edge %0d aggregated", e))
    dr_start = 1; @(posedge clk); #1; dr_start = 0;
    while (!dr_done) begin @(posedge clk); #1; end
    repeat (20) @(posedge clk); #1;
  endtask

  initial begin
    cfg_rlc_en = 1; cfg_lr_en = 1; cfg_k = 4'(K); cfg_nblk = 3'(M); cfg_rd_half = 0; cfg_pass = 0;
    cfg_to_e = 0; cfg_agg_op = AGG_SUM; cfg_gat = 0; cfg_relu = 1; cfg_nv = vid_t'(NV); cfg_total_alpha = 0;
    wf_en = 0; wf_half = 0; wf_col = 0; wf_blk = 0; wf_addr = 0; wf_data = 0;
    fm_start = 0; tf_valid = 0; tf_blk = 0; tf_tok = '0; tf_vid = 0;
    w_start = 0; ag_start = 0; ec_valid = 0; ec_a = 0; ec_b = 0; sub_end = 0; dr_start = 0;
    m_rvalid = 0; m_rtag = 0; m_rdata = 0; m_ready = 1;
    for (int b = 0; b < M; b++) fm_blk_nnz[b] = 0;
    for (int i = 0; i < NV * F; i++) out_mem[i] = 32'hdead_beef;
    // features: block 1 (features 4..7) all zero, block 0 sparse, block 3 dense
    for (int v = 0; v < NV; v++) for (int i = 0; i < FI; i++) begin
      automatic int b = i / K;
      automatic int x = int'($urandom % 15) - 7;
      if (b == 1 || (b == 0 && $urandom % 4 != 0) || (b == 2 && $urandom % 2 == 0)) x = 0;
      if (b == 3 && x == 0) x = 1;
      h[v][i] = x;
    end
    for (int i = 0; i < FI; i++) begin
      for (int f = 0; f < F; f++) W[i][f] = int'($urandom % 7) - 3;
      A[i][0] = int'($urandom % 5) - 2; A[i][1] = int'($urandom % 5) - 2;
    end
    for (int v = 0; v < NV; v++) begin
      e1[v] = 0; e2[v] = 0;
      for (int f = 0; f < F; f++) begin eta[v][f] = 0; for (int i = 0; i < FI; i++) eta[v][f] += h[v][i] * W[i][f]; end
      for (int i = 0; i < FI; i++) begin e1[v] += h[v][i] * A[i][0]; e2[v] += h[v][i] * A[i][1]; end
    end
    // graph: vertices 0..7 each linked to five of 8..15 (equal degrees keep
    // the ids in degree order); the first cache fill holds only vertices
    // without edges among them, which deadlocks until gamma is raised
    for (int e = 0; e < NE; e++) begin ea[e] = e % 8; eb[e] = 8 + ((e / 8) + e % 8) % 8; end
    repeat (3) @(posedge clk); #1; rst_n = 1;

    // FM scheduling
    for (int b = 0; b < M; b++)
      for (int v = 0; v < NV; v++) for (int i = 0; i < K; i++) fm_blk_nnz[b] += 24'(h[v][b * K + i] != 0);
    fm_start = 1; @(posedge clk); #1; fm_start = 0; @(posedge clk); #1;
    `CHECK(dut.blk_of_row[0] == 1 && dut.blk_of_row[3] == 3, "FM: empty block on the lightest row, dense block on the heaviest")

    load_weights(0, 0, 0);
    weighting(1, 0, 0, 0);
    load_weights(1, 0, 1);
    weighting(0, 1, 1, 0);
    load_weights(0, 1, 0);
    weighting(1, 0, 0, 1);

    // sum aggregation with ReLU
    cfg_relu = 1;
    aggregate(AGG_SUM);
    for (int v = 0; v < NV; v++) for (int f = 0; f < F; f++) begin
      automatic int s = 0;
      for (int e = 0; e < NE; e++) begin
        if (ea[e] == v) s += eta[eb[e]][f];
        if (eb[e] == v) s += eta[ea[e]][f];
      end
      if (s < 0) s = 0;
      `CHECK(out_mem[v * F + f] == 32'(s), $sformatf("sum v%0d f%0d got %0d want %0d", v, f, $signed(out_mem[v * F + f]), s))
    end

    // GAT aggregation, identity activation
    cfg_relu = 0;
    for (int i = 0; i < NV * F; i++) out_mem[i] = 32'hdead_beef;
    aggregate(AGG_GAT);
    for (int v = 0; v < NV; v++) for (int f = 0; f < F; f++) begin
      automatic real num = 0.0, den = 0.0, want, got, tol;
      for (int e = 0; e < NE; e++) begin
        automatic int u = -1;
        if (ea[e] == v) u = eb[e];
        if (eb[e] == v) u = ea[e];
        if (u >= 0) begin
          automatic real x = real'(e1[v] + e2[u]) / 256.0;
          if (x < 0) x = x * 13.0 / 64.0;
          num += $exp(x) * real'(eta[u][f]); den += $exp(x);
        end
      end
      want = num / den; got = real'($signed(out_mem[v * F + f]));
      tol = 0.03 * (want < 0 ? -want : want) + 2.0;
      `CHECK(got - want <= tol && want - got <= tol, $sformatf("gat v%0d f%0d got %0f want %0f", v, f, got, want))
    end

    $display("stalls=%0d bypass=%0d zero=%0d lr=%0d sfu=%0d div=%0d edges=%0d dropped=%0d iters=%0d rounds=%0d evict=%0d deadlocks=%0d gamma=%0d",
             st_mpe_stalls, st_bypass_blocks, st_zero_blocks, st_lr_events, st_sfu_served, st_divs, st_edges,
             st_dropped, st_iters, st_rounds, st_evictions, st_deadlocks, st_gamma);
    `CHECK(st_mpe_stalls > 0, "merge PE stall happened")
    `CHECK(st_bypass_blocks > 0, "RLC bypass happened")
    `CHECK(st_zero_blocks > 0, "all-zero block skipped")
    `CHECK(st_lr_events > 0, "load redistribution happened")
    `CHECK(st_sfu_served > 0, "SFU used")
    `CHECK(st_divs > 0, "divider used")
    `CHECK(st_dropped > 0, "edge refused by the cache")
    `CHECK(st_evictions > 0, "eviction happened")
    `CHECK(st_rounds > 0, "a Round completed")
    `CHECK(st_deadlocks > 0, "deadlock resolved")
    `FINISH
  end
endmodule
