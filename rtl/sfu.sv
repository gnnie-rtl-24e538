// sfu: special function unit shared by the CPEs of one column (GAT only).
// Requests carry an attention logit x = e_i1 + e_j2 in signed Q8.8. They wait
// in a request queue (one pending request per CPE, served round robin), then
// pass LeakyReLU (negative slope 13/64, about 0.2) and the exponential unit,
// and the result exp(LeakyReLU(x)) returns to the requesting CPE as unsigned
// Q16.16 on resp_valid[id] one cycle after the queue head is served.
// The exponential uses exp(y) = 2^(y*log2 e): the integer part of y*log2 e is
// a shift, the fraction indexes a 16-entry table of 2^(f/16) (Q1.15,
// entry f = round(32768 * 2^(f/16))) with linear interpolation between
// entries. Results above the Q16.16 range saturate, below it flush to zero.
// The queue, LeakyReLU and a table-based exponential follow the paper; the
// number formats, slope, table size and arbitration are this design's own.
module sfu import gnnie_pkg::*; #(
  parameter int NREQ   = 16,
  parameter int QDEPTH = 4
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic [NREQ-1:0]        req_valid,
  output logic [NREQ-1:0]        req_ready,
  input  acc_t                   req_x [NREQ],
  output logic [NREQ-1:0]        resp_valid,
  output logic [ACC_W-1:0]       resp_y,
  output logic [31:0]            n_served
);
  localparam int IW = (NREQ > 1) ? $clog2(NREQ) : 1;
  localparam int QW = (QDEPTH > 1) ? $clog2(QDEPTH) : 1;

  // request queue
  logic [IW-1:0] q_id [QDEPTH];
  acc_t          q_x  [QDEPTH];
  logic [QW:0]   q_cnt;
  logic [QW-1:0] q_rd, q_wr;
  logic [IW-1:0] rr;

  logic          g_any;
  logic [IW-1:0] g_id;
  always_comb begin
    g_any = 1'b0; g_id = '0;
    for (int o = NREQ - 1; o >= 0; o--) begin
      automatic int i = (int'(rr) + o) % NREQ;
      if (req_valid[i]) begin g_any = 1'b1; g_id = IW'(i); end
    end
  end
  wire q_full = (q_cnt == (QW+1)'(QDEPTH));
  wire push   = g_any && !q_full;
  wire pop    = (q_cnt != '0);
  always_comb begin
    req_ready = '0;
    if (push) req_ready[g_id] = 1'b1;
  end

  // 2^(f/16) in Q1.15
  localparam logic [16:0] POW2 [17] = '{
    17'd32768, 17'd34219, 17'd35734, 17'd37316, 17'd38968, 17'd40693, 17'd42495,
    17'd44376, 17'd46341, 17'd48393, 17'd50535, 17'd52773, 17'd55109, 17'd57549,
    17'd60097, 17'd62757, 17'd65536};

  function automatic logic [ACC_W-1:0] exp_q16(input acc_t x_q8);
    logic signed [31:0] lr, t;
    logic signed [31:0] ip;
    logic [11:0]        fr;   // 12-bit fraction of y*log2 e
    logic [3:0]         hi;
    logic [7:0]         lo;
    logic [33:0]        m;
    logic [63:0]        r;
    // LeakyReLU on Q8.8
    lr = (x_q8 < 0) ? (x_q8 * 13) >>> 6 : x_q8;
    // t = lr * log2(e) in Q.12 : 1.4427 * 2^4 ~ 23.08 -> lr(Q8) * 5909 >> 12 gives Q12
    t  = 32'((64'(signed'(lr)) * 64'sd5909) >>> 8);
    ip = t >>> 12;
    fr = t[11:0];
    hi = fr[11:8];
    lo = fr[7:0];
    m  = 34'(POW2[{1'b0, hi}]) * 256 + 34'(POW2[{1'b0, hi} + 5'd1] - POW2[{1'b0, hi}]) * 34'(lo);  // Q1.23
    if (ip > 15)       return '1;
    else if (ip < -24) return '0;
    else begin
      // value = m * 2^ip / 2^23 ; want Q16.16 -> m * 2^(ip) >> 7
      if (ip >= 7) r = 64'(m) << (ip - 7);
      else         r = 64'(m) >> (7 - ip);
      return (r > 64'hFFFF_FFFF) ? '1 : r[31:0];
    end
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q_cnt <= '0; q_rd <= '0; q_wr <= '0; rr <= '0;
      resp_valid <= '0; resp_y <= '0; n_served <= '0;
      for (int i = 0; i < QDEPTH; i++) begin q_id[i] <= '0; q_x[i] <= '0; end
    end else begin
      resp_valid <= '0;
      if (push) begin
        q_id[q_wr] <= g_id;
        q_x[q_wr]  <= req_x[g_id];
        q_wr       <= QW'((int'(q_wr) + 1) % QDEPTH);
        rr         <= IW'((int'(g_id) + 1) % NREQ);
      end
      if (pop) begin
        resp_valid[q_id[q_rd]] <= 1'b1;
        resp_y   <= exp_q16(q_x[q_rd]);
        q_rd     <= QW'((int'(q_rd) + 1) % QDEPTH);
        n_served <= n_served + 1;
      end
      q_cnt <= q_cnt + (QW+1)'(push) - (QW+1)'(pop);
    end
  end
endmodule
