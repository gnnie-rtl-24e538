// tb_mem_access_scheduler: four clients issue random reads and writes to a
// DRAM model that accepts with random back-pressure and answers reads after
// a random delay, possibly out of order between clients. Each client must get
// its own read data back in its issue order, writes must land in memory, and
// while all clients request, grants must rotate (no client waits more than
// NCLI grants).
`include "tb/tb_check.svh"
module tb_mem_access_scheduler;
  localparam int NC = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic [NC-1:0] req_valid, req_ready, req_we, rsp_valid;
  logic [31:0] req_addr [NC], req_wdata [NC];
  logic m_valid, m_ready, m_we, m_rvalid;
  logic [31:0] m_addr, m_wdata, m_rdata, rsp_data;
  logic [1:0] m_tag, m_rtag;
  mem_access_scheduler #(.NCLI(NC)) dut (.*);
  `WATCHDOG(50000)

  logic [31:0] mem [256];
  // DRAM: read pipeline of fixed 3-entry delay line per request, one response per cycle
  logic [31:0] q_data [$];
  logic [1:0]  q_tag [$];
  int          q_time [$];
  int cyc = 0;
  always @(posedge clk) cyc++;
  always @(posedge clk) if (rst_n) begin
    if (m_valid && m_ready) begin
      if (m_we) mem[m_addr[7:0]] <= m_wdata;
      else begin q_data.push_back(mem[m_addr[7:0]]); q_tag.push_back(m_tag); q_time.push_back(cyc + 2 + $urandom % 4); end
    end
  end
  always @(posedge clk) begin
    #1;
    m_ready = ($urandom % 4 != 0);
    m_rvalid = 0;
    if (q_time.size() > 0 && q_time[0] <= cyc) begin
      m_rvalid = 1; m_rdata = q_data.pop_front(); m_rtag = q_tag.pop_front(); void'(q_time.pop_front());
    end
  end

  int exp_rd [NC][$];
  int waits [NC];
  int done_cnt = 0, wgrants = 0, maxwait = 0;

  always @(posedge clk) if (rst_n) for (int c = 0; c < NC; c++) if (rsp_valid[c]) begin
    checks++;
    if (exp_rd[c].size() == 0 || 32'(exp_rd[c][0]) != rsp_data) begin failures++; $display("FAIL: client %0d data %h", c, rsp_data); end
    else void'(exp_rd[c].pop_front());
  end
  // fairness: count grants each requesting client has to wait for
  always @(posedge clk) if (rst_n && m_valid && m_ready) for (int c = 0; c < NC; c++) begin
    if (req_ready[c]) waits[c] = 0;
    else if (req_valid[c]) begin waits[c]++; if (waits[c] > maxwait) maxwait = waits[c]; end
  end

  for (genvar c = 0; c < NC; c++) begin : g_cli
    initial begin
      req_valid[c] = 0; req_we[c] = 0; req_addr[c] = 0; req_wdata[c] = 0; waits[c] = 0;
      wait (rst_n); @(posedge clk); #1;
      for (int t = 0; t < 40; t++) begin
        // client c owns addresses c*64 .. c*64+63
        req_addr[c] = 32'(c * 64 + $urandom % 64);
        req_we[c] = (t < 10) || ($urandom % 2 == 0);
        req_wdata[c] = $urandom;
        if (!req_we[c]) exp_rd[c].push_back(int'(ref_mem[req_addr[c][7:0]]));
        else ref_mem[req_addr[c][7:0]] = req_wdata[c];
        req_valid[c] = 1;
        begin automatic logic rr; do begin @(posedge clk); rr = req_ready[c]; end while (!rr); #1; end
        req_valid[c] = 0;
      end
      wait (exp_rd[c].size() == 0);
      done_cnt++;
    end
  end
  logic [31:0] ref_mem [256];

  initial begin
    m_ready = 0; m_rvalid = 0; m_rdata = 0; m_rtag = 0;
    for (int a = 0; a < 256; a++) begin mem[a] = 32'(a * 7); ref_mem[a] = 32'(a * 7); end
    repeat (3) @(posedge clk); #1; rst_n = 1;
    wait (done_cnt == NC);
    repeat (5) @(posedge clk);
    for (int a = 0; a < 256; a++) `CHECK(mem[a] == ref_mem[a], $sformatf("memory word %0d", a))
    `CHECK(maxwait <= NC - 1, $sformatf("round robin wait %0d", maxwait))
    `FINISH
  end
endmodule
