// gnnie_top: the GNN inference engine, one engine for Weighting and
// Aggregation.
// Weighting (h*W, and for GATs the attention logits e1 = a1.eta, e2 = a2.eta
// computed the same way with [a1 a2] as two weight columns): feature blocks
// arrive as RLC tokens (tf_*), tagged with their k-block index, and are stored
// in the input-buffer bank of the row that the FM scheduler assigned that
// block to. Per row: RLC decoder -> zero detection -> the N CPEs of the row,
// which hold the block's weight rows of N weight columns and have 4, 5 or 6
// MACs depending on the row group. Each column's merge PE sums the M block
// partial sums of a vertex and writes the finished element to the output
// buffer. The controller loads the spads (k cycles) and applies load
// redistribution between light and heavy rows.
// Aggregation: the cache controller keeps a degree-ordered subgraph of
// vertices cached and tells which candidate edges (ec_*) to process now.
// Each accepted edge (a,b) is dispatched twice (a<-b and b<-a) to the next
// free CPE row; all N columns of the row process their G-element slices of
// the neighbour's eta in parallel (sum, max, or GAT exp-weighted sum using the
// column SFU). Partial vectors are added into the output buffer when a CPE
// switches target or at the end of the subgraph (sub_end).
// Drain: results pass the divider (GAT) and the activation unit and are
// written to DRAM through the memory access scheduler, which also carries
// the cache controller's alpha traffic. The weight and feature fill streams
// are ports: they carry data already fetched from DRAM.
// Timing: one token per row per cycle, one beat of up to 4/5/6 nonzeros per
// row per cycle, one psum per merge PE per cycle, one edge direction
// dispatched per cycle.
module gnnie_top import gnnie_pkg::*; #(
  parameter int M        = 16,
  parameter int N        = 16,
  parameter int K_MAX    = 256,
  parameter int G        = 8,
  parameter int MAC1     = 4,
  parameter int MAC2     = 5,
  parameter int MAC3     = 6,
  parameter int IB_DEPTH = 8192,
  parameter int OB_ENTRIES = 1024,
  parameter int SLOTS    = 16,
  parameter int NSLOT    = 1024,
  parameter int WAYS     = 4,
  parameter int R        = 64,
  parameter int GAMMA0   = 5,
  parameter int LR_PAIRS = 4
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // configuration
  input  logic                      cfg_rlc_en,
  input  logic                      cfg_lr_en,
  input  logic [$clog2(K_MAX):0]    cfg_k,
  input  logic [$clog2(M):0]        cfg_nblk,
  input  logic                      cfg_rd_half,
  input  logic [$clog2(G)-1:0]      cfg_pass,
  input  logic                      cfg_to_e,
  input  agg_op_e                   cfg_agg_op,
  input  logic                      cfg_gat,
  input  logic                      cfg_relu,
  input  vid_t                      cfg_nv,
  input  logic [31:0]               cfg_total_alpha,
  // weight fill (data fetched from DRAM)
  input  logic                      wf_en,
  input  logic                      wf_half,
  input  logic [$clog2(N)-1:0]      wf_col,
  input  logic [$clog2(M)-1:0]      wf_blk,
  input  logic [$clog2(K_MAX)-1:0]  wf_addr,
  input  data_t                     wf_data,
  // FM preprocessing: nonzeros per k-block
  input  logic                      fm_start,
  input  logic [23:0]               fm_blk_nnz [M],
  // feature token fill
  input  logic                      tf_valid,
  output logic                      tf_ready,
  input  logic [$clog2(M)-1:0]      tf_blk,
  input  rlc_tok_t                  tf_tok,
  input  vid_t                      tf_vid,
  // weighting pass
  input  logic                      w_start,
  output logic                      w_busy,
  output logic                      w_done,
  // aggregation
  input  logic                      ag_start,
  input  logic                      ec_valid,
  output logic                      ec_ready,
  input  vid_t                      ec_a,
  input  vid_t                      ec_b,
  input  logic                      sub_end,
  output logic                      iter_active,
  output logic                      ag_done,
  // drain
  input  logic                      dr_start,
  output logic                      dr_busy,
  output logic                      dr_done,
  // HBM port
  output logic                      m_valid,
  input  logic                      m_ready,
  output logic [31:0]               m_addr,
  output logic                      m_we,
  output logic [31:0]               m_wdata,
  output logic                      m_tag,
  input  logic                      m_rvalid,
  input  logic                      m_rtag,
  input  logic [31:0]               m_rdata,
  // statistics
  output logic [31:0]               st_mpe_stalls,
  output logic [15:0]               st_lr_events,
  output logic [31:0]               st_zero_blocks,
  output logic [31:0]               st_bypass_blocks,
  output logic [31:0]               st_sfu_served,
  output logic [31:0]               st_divs,
  output logic [31:0]               st_edges,
  output logic [31:0]               st_dropped,
  output logic [15:0]               st_rounds,
  output logic [15:0]               st_iters,
  output logic [15:0]               st_evictions,
  output logic [15:0]               st_deadlocks,
  output logic [15:0]               st_gamma
);
  localparam int MW = $clog2(M);
  localparam int KW = $clog2(K_MAX);

  function automatic int lanes_of(input int r);
    if (r < M / 2)          return MAC1;
    else if (r < 3 * M / 4) return MAC2;
    else                    return MAC3;
  endfunction

  // ---------------- FM scheduler and controller ----------------
  logic [MW-1:0] blk_of_row [M];
  logic [MW-1:0] row_of_blk [M];
  logic          fm_done;
  fm_scheduler #(.M(M)) u_fm (
    .clk, .rst_n, .start(fm_start), .blk_nnz(fm_blk_nnz), .blk_of_row, .done(fm_done));
  always_comb
    for (int r = 0; r < M; r++) row_of_blk[blk_of_row[r]] = MW'(r);

  logic [15:0]   ib_blocks [M];
  logic [M-1:0]  row_idle;
  logic [N-1:0]  mpe_busy_c;
  logic [KW-1:0] spad_addr;
  logic [M-1:0]  spad_we;
  logic [MW-1:0] sel_blk [M];
  logic [MW-1:0] src [M];
  logic [M-1:0]  row_run;
  controller #(.M(M), .K_MAX(K_MAX), .LR_PAIRS(LR_PAIRS)) u_ctl (
    .clk, .rst_n, .start(w_start), .k(cfg_k), .lr_en(cfg_lr_en), .blk_of_row,
    .blocks(ib_blocks), .row_idle, .mpe_busy(|mpe_busy_c), .spad_addr, .spad_we,
    .sel_blk, .src, .row_run, .busy(w_busy), .done(w_done), .lr_events(st_lr_events));

  data_t wb_rd [M][N];
  weight_buffer #(.M(M), .N(N), .K_MAX(K_MAX)) u_wb (
    .clk, .wr_en(wf_en), .wr_half(wf_half), .wr_col(wf_col), .wr_blk(wf_blk),
    .wr_addr(wf_addr), .wr_data(wf_data), .rd_half(cfg_rd_half), .rd_addr(spad_addr),
    .sel_blk, .rd_data(wb_rd));

  // ---------------- input buffer ----------------
  logic [M-1:0] ib_cons_ready, ib_cons_valid;
  rlc_tok_t     ib_tok [M];
  vid_t         ib_vid [M];
  input_buffer #(.M(M), .DEPTH(IB_DEPTH)) u_ib (
    .clk, .rst_n, .push_valid(tf_valid), .push_ready(tf_ready), .push_row(row_of_blk[tf_blk]),
    .push_tok(tf_tok), .push_vid(tf_vid), .src, .cons_ready(ib_cons_ready),
    .cons_valid(ib_cons_valid), .cons_tok(ib_tok), .cons_vid(ib_vid), .blocks(ib_blocks));

  // ---------------- PE array ----------------
  psum_t        ps     [M][N];
  logic         ps_v   [M][N];
  logic         ps_rdy [M][N];
  logic [M-1:0] row_ps_pending;
  logic [M-1:0] row_zero_blk;
  logic [M-1:0] row_bypass_blk;

  // aggregation dispatch signals
  logic          disp_v;
  logic [MW-1:0] disp_row;
  vid_t          disp_tgt, disp_nbr;
  logic          ag_flush;
  acc_t          ob_rd_eta [N][G];
  acc_t          ob_rd_e2, ob_rt_e1;
  logic [M-1:0]  row_ag_ready;
  logic [M-1:0]  row_ag_idle;
  logic          cpe_agr  [M][N];
  logic          cpe_agi  [M][N];
  // flush paths
  logic          fl_v   [M][N];
  logic          fl_rdy [M][N];
  vid_t          fl_vid [M][N];
  acc_t          fl_vec [M][N][G];
  acc_t          fl_den [M][N];
  // SFU paths
  logic [M-1:0]  sreq_v [N];
  logic [M-1:0]  sreq_r [N];
  acc_t          sreq_x [N][M];
  logic [M-1:0]  srsp_v [N];
  logic [ACC_W-1:0] srsp_y [N];

  for (genvar r = 0; r < M; r++) begin : g_row
    localparam int L = lanes_of(r);
    data_t     blk [K_MAX];
    vid_t      blk_vid;
    logic      blk_valid, blk_ready;
    logic      zd_valid, zd_last;
    logic [L-1:0] zd_lv;
    logic [KW-1:0] zd_idx [L];
    data_t     zd_val [L];
    vid_t      zd_vid;
    logic [KW:0] zd_nnz;
    logic      row_ready;
    logic [N-1:0] in_rdy;
    logic      dec_tok_ready;
    assign ib_cons_ready[r] = dec_tok_ready && row_run[r];

    rlc_decoder #(.K_MAX(K_MAX)) u_dec (
      .clk, .rst_n, .rlc_en(cfg_rlc_en), .tok_valid(ib_cons_valid[r] && row_run[r]), .tok_ready(dec_tok_ready),
      .tok(ib_tok[r]), .tok_vid(ib_vid[r]), .blk_valid, .blk_ready, .blk, .blk_vid);

    zero_detect #(.K_MAX(K_MAX), .LANES(L)) u_zd (
      .clk, .rst_n, .blk_valid, .blk_ready, .blk, .blk_vid, .out_valid(zd_valid),
      .out_ready(row_ready), .lane_valid(zd_lv), .lane_idx(zd_idx), .lane_val(zd_val),
      .out_last(zd_last), .out_vid(zd_vid), .nnz(zd_nnz));

    assign row_ready       = &in_rdy;
    assign row_zero_blk[r] = zd_valid && row_ready && zd_last && (zd_nnz == '0);
    assign row_bypass_blk[r] = blk_valid && blk_ready && !cfg_rlc_en;

    always_comb begin
      row_ps_pending[r] = 1'b0;
      row_ag_ready[r]   = 1'b1;
      row_ag_idle[r]    = 1'b1;
      for (int c = 0; c < N; c++) begin
        row_ps_pending[r] |= ps_v[r][c];
        row_ag_ready[r]   &= cpe_agr[r][c];
        row_ag_idle[r]    &= cpe_agi[r][c];
      end
    end
    assign row_idle[r] = !blk_valid && blk_ready && !row_ps_pending[r];

    for (genvar c = 0; c < N; c++) begin : g_col
      logic psv, agr, agi, flv;
      assign ps_v[r][c]    = psv;
      assign cpe_agr[r][c] = agr;
      assign cpe_agi[r][c] = agi;
      assign fl_v[r][c]    = flv;
      cpe #(.K_MAX(K_MAX), .LANES(L), .G(G)) u_cpe (
        .clk, .rst_n,
        .w_we(spad_we[r]), .w_addr(spad_addr), .w_data(wb_rd[r][c]),
        .in_valid(zd_valid && row_ready), .in_ready(in_rdy[c]), .lane_valid(zd_lv),
        .lane_idx(zd_idx), .lane_val(zd_val), .in_last(zd_last), .in_vid(zd_vid),
        .ps_valid(psv), .ps_ready(ps_rdy[r][c]), .ps(ps[r][c]),
        .ag_valid(disp_v && disp_row == MW'(r) && row_ag_ready[r]), .ag_ready(agr),
        .ag_op(cfg_agg_op), .ag_tgt(disp_tgt), .ag_opnd(ob_rd_eta[c]), .ag_ei1(ob_rt_e1),
        .ag_ej2(ob_rd_e2), .ag_flush,
        .sfu_req_valid(sreq_v[c][r]), .sfu_req_ready(sreq_r[c][r]), .sfu_req_x(sreq_x[c][r]),
        .sfu_resp_valid(srsp_v[c][r]), .sfu_resp_y(srsp_y[c]),
        .fl_valid(flv), .fl_ready(fl_rdy[r][c]), .fl_vid(fl_vid[r][c]), .fl_vec(fl_vec[r][c]),
        .fl_den(fl_den[r][c]), .ag_idle(agi));
    end
  end

  // ---------------- merge PEs, SFUs, flush arbiters per column ----------------
  logic [N-1:0] mpe_out_v;
  psum_t        mpe_out [N];
  logic [31:0]  mpe_stall [N];
  logic [31:0]  sfu_cnt [N];
  logic [N-1:0] acc_v;
  vid_t         acc_vid [N];
  acc_t         acc_vec [N][G];
  acc_t         acc_den;

  for (genvar c = 0; c < N; c++) begin : g_mcol
    logic [M-1:0] iv, ir;
    psum_t        ips [M];
    for (genvar r = 0; r < M; r++) begin : g_in
      assign iv[r]       = ps_v[r][c];
      assign ips[r]      = ps[r][c];
      assign ps_rdy[r][c] = ir[r];
    end
    mpe #(.M(M), .SLOTS(SLOTS)) u_mpe (
      .clk, .rst_n, .nblk(cfg_nblk), .in_valid(iv), .in_ready(ir), .in_ps(ips),
      .out_valid(mpe_out_v[c]), .out_ready(1'b1), .out_ps(mpe_out[c]),
      .stall_cycles(mpe_stall[c]), .busy(mpe_busy_c[c]));

    sfu #(.NREQ(M)) u_sfu (
      .clk, .rst_n, .req_valid(sreq_v[c]), .req_ready(sreq_r[c]), .req_x(sreq_x[c]),
      .resp_valid(srsp_v[c]), .resp_y(srsp_y[c]), .n_served(sfu_cnt[c]));

    // flush arbiter: lowest requesting row wins
    always_comb begin
      acc_v[c]   = 1'b0;
      acc_vid[c] = '0;
      for (int g = 0; g < G; g++) acc_vec[c][g] = '0;
      for (int r = 0; r < M; r++) fl_rdy[r][c] = 1'b0;
      for (int r = M - 1; r >= 0; r--)
        if (fl_v[r][c]) begin
          acc_v[c]   = 1'b1;
          acc_vid[c] = fl_vid[r][c];
          for (int g = 0; g < G; g++) acc_vec[c][g] = fl_vec[r][c][g];
        end
      for (int r = 0; r < M; r++)
        if (fl_v[r][c] && acc_vid[c] == fl_vid[r][c]) begin
          fl_rdy[r][c] = 1'b1;
          break;
        end
    end
  end

  always_comb begin
    acc_den = '0;
    for (int r = M - 1; r >= 0; r--) if (fl_v[r][0]) acc_den = fl_den[r][0];
  end

  // ---------------- output buffer ----------------
  vid_t dr_vid;
  acc_t dr_agg [N][G];
  acc_t dr_den;
  logic dr_clr;
  output_buffer #(.N(N), .G(G), .ENTRIES(OB_ENTRIES)) u_ob (
    .clk, .rst_n, .pass(cfg_pass), .to_e(cfg_to_e), .mpe_valid(mpe_out_v), .mpe_ps(mpe_out),
    .rd_vid(disp_nbr), .rd_eta(ob_rd_eta), .rd_e1(), .rd_e2(ob_rd_e2),
    .rt_vid(disp_tgt), .rt_e1(ob_rt_e1),
    .acc_valid(acc_v), .acc_vid, .acc_vec, .acc_den, .dr_vid, .dr_agg, .dr_den, .dr_clr);

  // ---------------- cache controller and edge dispatch ----------------
  logic        cc_req_v, cc_req_r, cc_req_we, cc_rsp_v, cc_done;
  logic [31:0] cc_req_a, cc_req_d;
  logic        lk_take;
  logic        iter_done;
  logic        dec_v;
  vid_t        dec_vid;
  logic [15:0] cc_res;

  cache_controller #(.NSLOT(NSLOT), .WAYS(WAYS), .R(R), .GAMMA0(GAMMA0)) u_cc (
    .clk, .rst_n, .start(ag_start), .nv(cfg_nv), .total_alpha(cfg_total_alpha),
    .mreq_valid(cc_req_v), .mreq_ready(cc_req_r), .mreq_addr(cc_req_a), .mreq_we(cc_req_we),
    .mreq_wdata(cc_req_d), .mrsp_valid(cc_rsp_v), .mrsp_data(m_rdata),
    .iter_active, .iter_done, .lk_a(ec_a), .lk_b(ec_b), .lk_take, .dec_valid(dec_v),
    .dec_vid, .done(cc_done), .rounds(st_rounds), .iters(st_iters), .evictions(st_evictions),
    .deadlocks(st_deadlocks), .gamma(st_gamma), .resident(cc_res));
  assign ag_done = cc_done;

  // dispatcher: holds one accepted edge, issues a<-b then b<-a
  typedef enum logic [1:0] {E_IDLE, E_DISP, E_FLUSH} est_e;
  est_e          est;
  vid_t          ea, eb;
  logic          ph;
  logic [MW-1:0] rr_row;
  logic          free_any;
  logic [MW-1:0] free_row;
  always_comb begin
    free_any = 1'b0; free_row = '0;
    for (int o = M - 1; o >= 0; o--) begin
      automatic logic [MW-1:0] rw = MW'((int'(rr_row) + o) % M);
      if (row_ag_ready[rw]) begin free_any = 1'b1; free_row = rw; end
    end
  end
  assign ec_ready = (est == E_IDLE) && iter_active;
  assign disp_v   = (est == E_DISP) && free_any;
  assign disp_row = free_row;
  assign disp_tgt = ph ? eb : ea;
  assign disp_nbr = ph ? ea : eb;
  assign dec_v    = disp_v;
  assign dec_vid  = disp_tgt;
  assign ag_flush = (est == E_FLUSH);
  assign iter_done = (est == E_FLUSH) && (&row_ag_idle);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      est <= E_IDLE; ea <= '0; eb <= '0; ph <= 1'b0; rr_row <= '0;
      st_edges <= '0; st_dropped <= '0;
    end else begin
      unique case (est)
        E_IDLE: begin
          if (ec_valid && ec_ready) begin
            if (lk_take) begin
              ea <= ec_a; eb <= ec_b; ph <= 1'b0; est <= E_DISP;
              st_edges <= st_edges + 1;
            end else st_dropped <= st_dropped + 1;
          end else if (sub_end && iter_active) est <= E_FLUSH;
        end
        E_DISP: if (disp_v) begin
          rr_row <= MW'((int'(free_row) + 1) % M);
          if (ph) est <= E_IDLE;
          ph <= !ph;
        end
        E_FLUSH: if (&row_ag_idle) est <= E_IDLE;
        default: est <= E_IDLE;
      endcase
    end
  end

  // ---------------- drain and memory access scheduler ----------------
  logic        dw_v, dw_r;
  logic [31:0] dw_a, dw_d;
  drain_unit #(.N(N), .G(G)) u_drain (
    .clk, .rst_n, .start(dr_start), .nv(cfg_nv), .gat(cfg_gat), .relu_en(cfg_relu),
    .dr_vid, .dr_agg, .dr_den, .dr_clr, .wreq_valid(dw_v), .wreq_ready(dw_r),
    .wreq_addr(dw_a), .wreq_data(dw_d), .busy(dr_busy), .done(dr_done), .n_div(st_divs));

  logic [1:0]  mas_v, mas_r, mas_we, mas_rsp;
  logic [31:0] mas_a [2];
  logic [31:0] mas_d [2];
  logic [31:0] mas_rdata;
  assign mas_v  = {cc_req_v, dw_v};
  assign mas_we = {cc_req_we, 1'b1};
  assign mas_a[0] = dw_a;  assign mas_a[1] = cc_req_a;
  assign mas_d[0] = dw_d;  assign mas_d[1] = cc_req_d;
  assign dw_r     = mas_r[0];
  assign cc_req_r = mas_r[1];
  assign cc_rsp_v = mas_rsp[1];
  mem_access_scheduler #(.NCLI(2)) u_mas (
    .clk, .rst_n, .req_valid(mas_v), .req_ready(mas_r), .req_addr(mas_a), .req_we(mas_we),
    .req_wdata(mas_d), .m_valid, .m_ready, .m_addr, .m_we, .m_wdata, .m_tag,
    .m_rvalid, .m_rtag, .m_rdata, .rsp_valid(mas_rsp), .rsp_data(mas_rdata));

  // ---------------- statistics ----------------
  always_comb begin
    st_mpe_stalls = '0;
    st_sfu_served = '0;
    for (int c = 0; c < N; c++) begin
      st_mpe_stalls += mpe_stall[c];
      st_sfu_served += sfu_cnt[c];
    end
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_zero_blocks <= '0; st_bypass_blocks <= '0;
    end else begin
      st_zero_blocks   <= st_zero_blocks + 32'($countones(row_zero_blk));
      st_bypass_blocks <= st_bypass_blocks + 32'($countones(row_bypass_blk));
    end
  end
endmodule
