// tb_cache_controller: a random 16-vertex graph, relabelled in descending
// degree order, is aggregated through a cache of 8 vertex slots (2 sets of
// 4 ways) with r = 2 replacements per iteration. The testbench plays the
// array: in each iteration it offers every unprocessed edge, processes the
// ones the controller accepts and decrements alpha of both ends. It also
// plays DRAM holding the alpha values. Checks: every edge is processed
// exactly once, the controller finishes, alpha written back on eviction
// equals the vertex's unprocessed edges, at most r replacements of unfinished
// vertices per iteration,
// and evictions, several iterations, a completed Round and a deadlock
// (gamma raised) all occur. A second, bipartite graph is built so that the
// first fill caches only vertices without edges among them (deadlock).
`include "tb/tb_check.svh"
module tb_cache_controller;
  import gnnie_pkg::*;
  localparam int NV = 16, NE = 40, AB = 32'h0100_0000;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic start, mreq_valid, mreq_ready, mreq_we, mrsp_valid, iter_active, iter_done, lk_take, dec_valid, done;
  logic [31:0] mreq_addr, mreq_wdata, mrsp_data, total_alpha;
  vid_t nv, lk_a, lk_b, dec_vid;
  logic [15:0] rounds, iters, evictions, deadlocks, gamma, resident;
  cache_controller #(.NSLOT(8), .WAYS(4), .R(2), .GAMMA0(5), .ALPHA_BASE(AB)) dut (.*);
  `WATCHDOG(200000)
  final for (int e = 0; e < NE; e++) if (proc_cnt[e] == 0) $display("left edge %0d-%0d rem %0d %0d gamma %0d", ea[e], eb[e], rem[ea[e]], rem[eb[e]], gamma);

  int ea [NE], eb [NE], proc_cnt [NE];
  int deg [NV], rem [NV], lbl [NV];
  logic [31:0] alpha_mem [NV];
  int ev_this = 0, max_ev = 0;

  // DRAM: reads answered one cycle later, writes taken at once
  always @(posedge clk) begin
    mrsp_valid <= 0;
    if (rst_n && mreq_valid && mreq_ready) begin
      if (mreq_we) begin
        alpha_mem[mreq_addr - AB] <= mreq_wdata;
        checks++;
        if (int'(mreq_wdata) != rem[mreq_addr - AB]) begin
          failures++; $display("FAIL: alpha write-back v%0d %0d vs %0d", mreq_addr - AB, mreq_wdata, rem[mreq_addr - AB]);
        end
        if (mreq_wdata != 0) ev_this++;
      end else begin
        mrsp_valid <= 1; mrsp_data <= alpha_mem[mreq_addr - AB];
      end
    end
  end

  task automatic dec(int v);
    dec_valid = 1; dec_vid = vid_t'(v); rem[v]--;
    @(posedge clk); #1; dec_valid = 0;
  endtask

  task automatic run_graph(int mode);
    for (int v = 0; v < NV; v++) deg[v] = 0;
    for (int e = 0; e < NE; e++) begin
      automatic bit ok;
      if (mode == 1) begin
        // bipartite: 0..7 each linked to five of 8..15, none among themselves;
        // the first fill caches only vertices whose edges all lead outside
        ea[e] = e % 8; eb[e] = 8 + ((e / 8) + e % 8) % 8;
      end else
      do begin
        ea[e] = $urandom % NV; eb[e] = ($urandom % 2) ? $urandom % 5 : $urandom % NV;
        ok = ea[e] != eb[e];
        for (int f = 0; f < e; f++)
          if ((ea[f] == ea[e] && eb[f] == eb[e]) || (ea[f] == eb[e] && eb[f] == ea[e])) ok = 0;
      end while (!ok);
      deg[ea[e]]++; deg[eb[e]]++; proc_cnt[e] = 0;
    end
    // relabel: label 0 = highest degree
    for (int v = 0; v < NV; v++) begin
      lbl[v] = 0;
      for (int u = 0; u < NV; u++) if (deg[u] > deg[v] || (deg[u] == deg[v] && u < v)) lbl[v]++;
    end
    for (int e = 0; e < NE; e++) begin
      automatic int a = lbl[ea[e]], b = lbl[eb[e]];
      ea[e] = (a < b) ? a : b; eb[e] = (a < b) ? b : a;
    end
    for (int v = 0; v < NV; v++) begin rem[lbl[v]] = deg[v]; alpha_mem[lbl[v]] = 32'(deg[v]); end
    total_alpha = 2 * NE; max_ev = 0; ev_this = 0;
    start = 1; @(posedge clk); #1; start = 0;
    while (!done) begin
      if (iter_active) begin
        if (ev_this > max_ev) max_ev = ev_this;
        ev_this = 0;
        for (int e = 0; e < NE; e++) if (proc_cnt[e] == 0) begin
          // one lookup per cycle, sampled inside the cycle
          automatic logic take;
          lk_a = vid_t'(ea[e]); lk_b = vid_t'(eb[e]); #1;
          take = lk_take;
          // the reverse listing (b,a) is never taken
          lk_a = vid_t'(eb[e]); lk_b = vid_t'(ea[e]); #1;
          `CHECK(!lk_take, "reverse listing refused")
          @(posedge clk); #1;
          if (take) begin proc_cnt[e]++; dec(ea[e]); dec(eb[e]); end
        end
        iter_done = 1; @(posedge clk); #1; iter_done = 0;
        @(posedge clk); #1;
      end else begin
        @(posedge clk); #1;
      end
    end
    for (int e = 0; e < NE; e++) `CHECK(proc_cnt[e] == 1, $sformatf("edge %0d processed %0d times", e, proc_cnt[e]))
    `CHECK(max_ev <= 2, $sformatf("at most r evictions per iteration (%0d)", max_ev))
    $display("graph %0d: iterations=%0d rounds=%0d evictions=%0d deadlocks=%0d gamma=%0d", mode, iters, rounds, evictions, deadlocks, gamma);
    `CHECK(evictions > 0, "evictions happened")
    `CHECK(iters > 1, "several iterations")
    `CHECK(rounds > 0, "a Round completed")
    if (mode == 1) `CHECK(deadlocks > 0 && gamma > 5, "deadlock resolved by raising gamma")
    @(posedge clk); #1;
  endtask

  initial begin
    start = 0; mreq_ready = 1; iter_done = 0; lk_a = 0; lk_b = 0; dec_valid = 0; dec_vid = 0;
    nv = NV; mrsp_valid = 0; mrsp_data = 0; total_alpha = 0;
    repeat (3) @(posedge clk); #1; rst_n = 1;
    run_graph(0);
    run_graph(1);
    `FINISH
  end
endmodule
