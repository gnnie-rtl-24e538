// tb_output_buffer: merge-PE results written into eta slots of two passes and
// into e1/e2 (attention pass) must read back per vertex; partial aggregations
// added from all columns (several per vertex, including two columns at once)
// must sum up with the denominator; a drain clear zeroes only that vertex.
`include "tb/tb_check.svh"
module tb_output_buffer;
  import gnnie_pkg::*;
  localparam int N = 2, G = 2, E = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic [0:0] pass; logic to_e;
  logic [N-1:0] mpe_valid, acc_valid;
  psum_t mpe_ps [N];
  vid_t rd_vid, rt_vid, dr_vid;
  acc_t rd_eta [N][G], rd_e1, rd_e2, rt_e1, dr_den, acc_den;
  vid_t acc_vid [N];
  acc_t acc_vec [N][G], dr_agg [N][G];
  logic dr_clr;
  output_buffer #(.N(N), .G(G), .ENTRIES(E)) dut (.*);
  `WATCHDOG(10000)
  acc_t m_eta [E][N][G], m_e1 [E], m_e2 [E], m_agg [E][N][G], m_den [E];
  initial begin
    pass = 0; to_e = 0; mpe_valid = 0; acc_valid = 0; rd_vid = 0; rt_vid = 0; dr_vid = 0; dr_clr = 0; acc_den = 0;
    for (int c = 0; c < N; c++) begin mpe_ps[c] = '0; acc_vid[c] = 0; for (int g = 0; g < G; g++) acc_vec[c][g] = 0; end
    for (int v = 0; v < E; v++) begin m_e1[v] = 0; m_e2[v] = 0; m_den[v] = 0;
      for (int c = 0; c < N; c++) for (int g = 0; g < G; g++) m_agg[v][c][g] = 0; end
    repeat (3) @(posedge clk); #1; rst_n = 1;
    // weighting passes 0,1 and attention pass
    for (int p = 0; p < 3; p++) for (int v = 0; v < E; v++) begin
      pass = 1'(p == 1); to_e = (p == 2);
      for (int c = 0; c < N; c++) begin
        mpe_valid[c] = 1; mpe_ps[c].vid = vid_t'(v + E); // vertex ids wrap onto entries
        mpe_ps[c].val = acc_t'($urandom);
        if (p < 2) m_eta[v][c][p] = mpe_ps[c].val;
        else if (c == 0) m_e1[v] = mpe_ps[c].val;
        else m_e2[v] = mpe_ps[c].val;
      end
      @(posedge clk); #1;
    end
    mpe_valid = 0; to_e = 0;
    for (int v = 0; v < E; v++) begin
      rd_vid = vid_t'(v); rt_vid = vid_t'(E - 1 - v); #1;
      for (int c = 0; c < N; c++) for (int g = 0; g < G; g++) `CHECK(rd_eta[c][g] == m_eta[v][c][g], "eta readback")
      `CHECK(rd_e1 == m_e1[v] && rd_e2 == m_e2[v], "e1/e2 readback")
      `CHECK(rt_e1 == m_e1[E - 1 - v], "target e1 readback")
    end
    // aggregation adds
    for (int t = 0; t < 60; t++) begin
      for (int c = 0; c < N; c++) begin
        acc_valid[c] = 1'($urandom); acc_vid[c] = vid_t'($urandom % E);
        for (int g = 0; g < G; g++) begin acc_vec[c][g] = acc_t'($urandom % 1000);
          if (acc_valid[c]) m_agg[acc_vid[c]][c][g] += acc_vec[c][g]; end
      end
      acc_den = acc_t'($urandom % 100);
      if (acc_valid[0]) m_den[acc_vid[0]] += acc_den;
      @(posedge clk); #1;
    end
    acc_valid = 0;
    for (int v = 0; v < E; v++) begin
      dr_vid = vid_t'(v); #1;
      for (int c = 0; c < N; c++) for (int g = 0; g < G; g++) `CHECK(dr_agg[c][g] == m_agg[v][c][g], $sformatf("agg v%0d c%0d", v, c))
      `CHECK(dr_den == m_den[v], "denominator")
    end
    dr_vid = 3; dr_clr = 1; @(posedge clk); #1; dr_clr = 0;
    for (int v = 0; v < E; v++) begin
      dr_vid = vid_t'(v); #1;
      `CHECK(dr_agg[0][0] == ((v == 3) ? 0 : m_agg[v][0][0]) && dr_den == ((v == 3) ? 0 : m_den[v]), "drain clear")
    end
    `FINISH
  end
endmodule
