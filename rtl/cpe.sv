// cpe: computation PE of the GNNIE array.
// Weighting (and attention-vector dot products): a weight spad of K_MAX
// entries holds this CPE's k-row slice of one weight column. Each beat brings
// up to LANES nonzero (index, value) pairs of the broadcast feature block; the
// LANES MACs multiply them with wspad[index] and accumulate. On the block's
// last beat the sum leaves as a vertex-tagged partial sum for the merge PE
// (ps_*). A new beat is taken only when the previous partial sum has left, so
// a full merge PE stalls the CPE. One beat per cycle.
// Aggregation: spad1 holds the running G-element slice for the current target
// vertex i and spad2 the incoming neighbour slice eta_j. An edge is processed
// with LANES element operations per cycle (ceil(G/LANES) cycles): sum, max, or
// for GATs e = e_i1 + e_j2 is sent to the column's SFU, which returns
// exp(LeakyReLU(e)) in Q16.16, and spad1 += exp*eta_j, den += exp. When an edge
// for a different target arrives, or on agg_flush, the partial vector and
// denominator leave on fl_* for accumulation in the output buffer.
// The spads, MACs and the SFU round trip follow the paper; the handshakes, the
// per-cycle lane count in aggregation and the flush-on-target-change policy
// are this design's choices.
module cpe import gnnie_pkg::*; #(
  parameter int K_MAX = 256,
  parameter int LANES = 4,
  parameter int G     = 8
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // weight spad load
  input  logic                     w_we,
  input  logic [$clog2(K_MAX)-1:0] w_addr,
  input  data_t                    w_data,
  // weighting lanes
  input  logic                     in_valid,
  output logic                     in_ready,
  input  logic [LANES-1:0]         lane_valid,
  input  logic [$clog2(K_MAX)-1:0] lane_idx [LANES],
  input  data_t                    lane_val [LANES],
  input  logic                     in_last,
  input  vid_t                     in_vid,
  output logic                     ps_valid,
  input  logic                     ps_ready,
  output psum_t                    ps,
  // aggregation edges
  input  logic                     ag_valid,
  output logic                     ag_ready,
  input  agg_op_e                  ag_op,
  input  vid_t                     ag_tgt,
  input  acc_t                     ag_opnd [G],
  input  acc_t                     ag_ei1,
  input  acc_t                     ag_ej2,
  input  logic                     ag_flush,
  // SFU round trip
  output logic                     sfu_req_valid,
  input  logic                     sfu_req_ready,
  output acc_t                     sfu_req_x,
  input  logic                     sfu_resp_valid,
  input  logic [ACC_W-1:0]         sfu_resp_y,
  // flushed partial aggregation
  output logic                     fl_valid,
  input  logic                     fl_ready,
  output vid_t                     fl_vid,
  output acc_t                     fl_vec [G],
  output acc_t                     fl_den,
  output logic                     ag_idle
);
  // ---------------- weighting ----------------
  data_t wspad [K_MAX];
  acc_t  wacc;
  acc_t  beat_sum;

  always_comb begin
    beat_sum = '0;
    for (int l = 0; l < LANES; l++)
      if (lane_valid[l]) beat_sum += acc_t'(lane_val[l]) * acc_t'(wspad[lane_idx[l]]);
  end

  assign in_ready = !ps_valid;

  always_ff @(posedge clk) begin
    if (w_we) wspad[w_addr] <= w_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wacc     <= '0;
      ps_valid <= 1'b0;
      ps       <= '0;
    end else begin
      if (ps_valid && ps_ready) ps_valid <= 1'b0;
      if (in_valid && in_ready) begin
        if (in_last) begin
          ps_valid <= 1'b1;
          ps.vid   <= in_vid;
          ps.val   <= wacc + beat_sum;
          wacc     <= '0;
        end else begin
          wacc <= wacc + beat_sum;
        end
      end
    end
  end

  // ---------------- aggregation ----------------
  typedef enum logic [2:0] {S_IDLE, S_FLUSH, S_REQ, S_WAIT, S_OP} st_e;
  localparam int NCH = (G + LANES - 1) / LANES;
  localparam int CW  = (NCH > 1) ? $clog2(NCH) : 1;

  st_e       st;
  acc_t      spad1 [G];
  acc_t      spad2 [G];
  acc_t      den;
  vid_t      cur_tgt;
  logic      has_tgt;
  logic      fresh;
  agg_op_e   op;
  vid_t      nxt_tgt;
  acc_t      ei1, ej2;
  logic [ACC_W-1:0] scale;
  logic [CW-1:0]    chunk;
  logic      pend_flush;  // flush was requested, no edge follows

  assign ag_ready      = (st == S_IDLE);
  assign ag_idle       = (st == S_IDLE) && !has_tgt;
  assign fl_valid      = (st == S_FLUSH);
  assign fl_vid        = cur_tgt;
  assign fl_den        = den;
  assign sfu_req_valid = (st == S_REQ);
  assign sfu_req_x     = ei1 + ej2;
  always_comb for (int e = 0; e < G; e++) fl_vec[e] = spad1[e];

  function automatic acc_t scaled(input logic [ACC_W-1:0] s, input acc_t v);
    logic signed [2*ACC_W:0] p;
    p = $signed({1'b0, s}) * v;
    return acc_t'(p >>> EXP_FRAC);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; den <= '0; cur_tgt <= '0; has_tgt <= 1'b0; fresh <= 1'b1;
      op <= AGG_SUM; nxt_tgt <= '0; ei1 <= '0; ej2 <= '0; scale <= '0; chunk <= '0;
      pend_flush <= 1'b0;
      for (int e = 0; e < G; e++) begin spad1[e] <= '0; spad2[e] <= '0; end
    end else begin
      unique case (st)
        S_IDLE: begin
          if (ag_valid) begin
            op      <= ag_op;
            nxt_tgt <= ag_tgt;
            ei1     <= ag_ei1;
            ej2     <= ag_ej2;
            for (int e = 0; e < G; e++) spad2[e] <= ag_opnd[e];
            pend_flush <= 1'b0;
            if (has_tgt && ag_tgt != cur_tgt) st <= S_FLUSH;
            else begin
              cur_tgt <= ag_tgt;
              has_tgt <= 1'b1;
              st      <= (ag_op == AGG_GAT) ? S_REQ : S_OP;
            end
            chunk <= '0;
          end else if (ag_flush && has_tgt) begin
            pend_flush <= 1'b1;
            st <= S_FLUSH;
          end
        end
        S_FLUSH: if (fl_ready) begin
          fresh   <= 1'b1;
          den     <= '0;
          for (int e = 0; e < G; e++) spad1[e] <= '0;
          if (pend_flush) begin
            has_tgt <= 1'b0;
            st      <= S_IDLE;
          end else begin
            cur_tgt <= nxt_tgt;
            st      <= (op == AGG_GAT) ? S_REQ : S_OP;
          end
        end
        S_REQ:  if (sfu_req_ready) st <= S_WAIT;
        S_WAIT: if (sfu_resp_valid) begin
          scale <= sfu_resp_y;
          den   <= den + acc_t'(sfu_resp_y);
          st    <= S_OP;
        end
        S_OP: begin
          for (int l = 0; l < LANES; l++) begin
            automatic int e = int'(chunk) * LANES + l;
            if (e < G) begin
              unique case (op)
                AGG_SUM: spad1[e] <= (fresh ? '0 : spad1[e]) + spad2[e];
                AGG_MAX: spad1[e] <= (fresh || spad2[e] > spad1[e]) ? spad2[e] : spad1[e];
                default: spad1[e] <= (fresh ? '0 : spad1[e]) + scaled(scale, spad2[e]);
              endcase
            end
          end
          if (int'(chunk) == NCH - 1) begin
            chunk <= '0;
            fresh <= 1'b0;
            st    <= S_IDLE;
          end else chunk <= chunk + 1'b1;
        end
        default: st <= S_IDLE;
      endcase
    end
  end
endmodule
