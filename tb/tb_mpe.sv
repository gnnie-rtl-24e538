// tb_mpe: four CPE drivers deliver tagged partial sums for many vertices in
// the same order but at different speeds; each vertex element must leave exactly once with the sum of
// its nblk contributions. With two psum slots and more vertices in flight
// the merge PE must stall (stall_cycles > 0) yet lose nothing.
`include "tb/tb_check.svh"
module tb_mpe;
  import gnnie_pkg::*;
  localparam int M = 4, S = 2, NV = 24;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic [$clog2(M):0] nblk;
  logic [M-1:0] in_valid, in_ready;
  psum_t in_ps [M];
  logic out_valid, out_ready, busy;
  psum_t out_ps;
  logic [31:0] stall_cycles;
  mpe #(.M(M), .SLOTS(S)) dut (.*);
  `WATCHDOG(20000)

  acc_t part [NV][M];
  acc_t expv [NV];
  int   seen [NV];
  int   outs = 0;

  // each CPE row r sends its part for vertices in its own random order
  for (genvar r = 0; r < M; r++) begin : g_drv
    initial begin
      automatic int order [NV];
      in_valid[r] = 0; in_ps[r] = '0;
      for (int i = 0; i < NV; i++) order[i] = i;
      // all rows walk the vertices in the same order (as in the engine) but
      // at different speeds: lower rows are faster, as with sparse blocks
      wait (rst_n);
      @(posedge clk); #1;
      for (int i = 0; i < NV; i++) begin
        repeat ($urandom % (2 * r + 1)) @(posedge clk);
        #1;
        in_ps[r].vid = vid_t'(order[i] + 40);
        in_ps[r].val = part[order[i]][r];
        in_valid[r] = 1;
        // handshake sampled at the clock edge (other rows change their
        // valid in the same time step, so in_ready may move before it)
        begin automatic logic rr; do begin @(posedge clk); rr = in_ready[r]; end while (!rr); #1; end
        in_valid[r] = 0;
      end
    end
  end

  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    automatic int v = int'(out_ps.vid) - 40;
    checks++;
    if (v < 0 || v >= NV || out_ps.val != expv[v]) begin failures++; $display("FAIL: vertex %0d sum %0d", v, out_ps.val); end
    else seen[v]++;
    outs++;
  end

  initial begin
    nblk = M; out_ready = 1;
    for (int v = 0; v < NV; v++) begin
      expv[v] = 0; seen[v] = 0;
      for (int r = 0; r < M; r++) begin part[v][r] = acc_t'($urandom % 100000) - 50000; expv[v] += part[v][r]; end
    end
    repeat (3) @(posedge clk); #1; rst_n = 1;
    // back-pressure from the output side for a while
    repeat (20) @(posedge clk); #1; out_ready = 0;
    repeat (10) @(posedge clk); #1; out_ready = 1;
    wait (outs == NV);
    repeat (5) @(posedge clk);
    for (int v = 0; v < NV; v++) `CHECK(seen[v] == 1, $sformatf("vertex %0d emitted %0d times", v, seen[v]))
    `CHECK(stall_cycles > 0, "psum slots ran out at least once (stall)")
    `CHECK(!busy, "idle at the end")
    `FINISH
  end
endmodule
