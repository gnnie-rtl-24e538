// mem_access_scheduler: funnels the off-chip requests of the on-chip buffers
// onto the single HBM port. NCLI clients (weight fetch, feature fetch, result
// write-back, alpha traffic of the cache controller) each present one request
// (address, write enable, write data). A round-robin arbiter forwards one per
// cycle with the client number as tag; read data coming back with a tag is
// routed to that client's rsp_valid. Requests are fire-and-forget on the
// client side once req_ready is seen; the DRAM may answer reads with any
// latency. Coordinating the buffers' requests follows the paper; round robin
// and tagging are this design's choices.
module mem_access_scheduler #(
  parameter int NCLI   = 4,
  parameter int ADDR_W = 32,
  parameter int DW     = 32
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic [NCLI-1:0]         req_valid,
  output logic [NCLI-1:0]         req_ready,
  input  logic [ADDR_W-1:0]       req_addr  [NCLI],
  input  logic [NCLI-1:0]         req_we,
  input  logic [DW-1:0]           req_wdata [NCLI],
  output logic                    m_valid,
  input  logic                    m_ready,
  output logic [ADDR_W-1:0]       m_addr,
  output logic                    m_we,
  output logic [DW-1:0]           m_wdata,
  output logic [$clog2(NCLI)-1:0] m_tag,
  input  logic                    m_rvalid,
  input  logic [$clog2(NCLI)-1:0] m_rtag,
  input  logic [DW-1:0]           m_rdata,
  output logic [NCLI-1:0]         rsp_valid,
  output logic [DW-1:0]           rsp_data
);
  localparam int TW = $clog2(NCLI);
  logic [TW-1:0] rr;
  logic          g_any;
  logic [TW-1:0] g;

  always_comb begin
    g_any = 1'b0; g = '0;
    for (int o = NCLI - 1; o >= 0; o--) begin
      automatic logic [TW-1:0] i = TW'((int'(rr) + o) % NCLI);
      if (req_valid[i]) begin g_any = 1'b1; g = i; end
    end
    m_valid   = g_any;
    m_addr    = req_addr[g];
    m_we      = req_we[g];
    m_wdata   = req_wdata[g];
    m_tag     = g;
    req_ready = '0;
    if (g_any && m_ready) req_ready[g] = 1'b1;
    rsp_valid = '0;
    if (m_rvalid) rsp_valid[m_rtag] = 1'b1;
    rsp_data  = m_rdata;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rr <= '0;
    else if (g_any && m_ready) rr <= TW'((int'(g) + 1) % NCLI);
  end
endmodule
