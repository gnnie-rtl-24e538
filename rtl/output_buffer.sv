// output_buffer: on-chip store of per-vertex results, banked by CPE column.
// Vertex v occupies entry v mod ENTRIES. Column bank c keeps, per entry, the G
// elements c, c+N, c+2N, ... of the weighted feature eta = h*W, plus the G
// matching elements of the aggregation sum; the entry also keeps the GAT
// logit halves e1, e2 and the softmax denominator.
//  * mpe_*: each column's merge PE writes one finished element per cycle,
//    at slot 'pass' of its bank, or with to_e set into e1 (column 0) / e2
//    (column 1) when the pass computed attention logits.
//  * rd_*:  combinational read of the whole eta vector and e1/e2 of a vertex
//    (the neighbour operand of an edge); rt_* reads e1 of the target.
//  * acc_*: per column, adds a G-element partial aggregation into the entry;
//    column 0 also adds the softmax denominator.
//  * dr_*:  combinational read of a finished aggregation vector and its
//    denominator; dr_clr zeroes it after it has been drained.
// Keeping weighted features, partial sums and e values on chip follows the
// paper; the banking, the direct vertex mapping and the ports are this
// design's own.
module output_buffer import gnnie_pkg::*; #(
  parameter int N       = 16,
  parameter int G       = 8,
  parameter int ENTRIES = 1024
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic [$clog2(G)-1:0]   pass,
  input  logic                   to_e,
  input  logic [N-1:0]           mpe_valid,
  input  psum_t                  mpe_ps [N],
  input  vid_t                   rd_vid,
  output acc_t                   rd_eta [N][G],
  output acc_t                   rd_e1,
  output acc_t                   rd_e2,
  input  vid_t                   rt_vid,
  output acc_t                   rt_e1,
  input  logic [N-1:0]           acc_valid,
  input  vid_t                   acc_vid [N],
  input  acc_t                   acc_vec [N][G],
  input  acc_t                   acc_den,
  input  vid_t                   dr_vid,
  output acc_t                   dr_agg [N][G],
  output acc_t                   dr_den,
  input  logic                   dr_clr
);
  localparam int EW = $clog2(ENTRIES);
  acc_t eta [N][ENTRIES][G];
  acc_t agg [N][ENTRIES][G];
  acc_t e1  [ENTRIES];
  acc_t e2  [ENTRIES];
  acc_t den [ENTRIES];

  function automatic logic [EW-1:0] ent(input vid_t v);
    return v[EW-1:0];
  endfunction

  always_comb begin
    for (int c = 0; c < N; c++)
      for (int g = 0; g < G; g++) begin
        rd_eta[c][g] = eta[c][ent(rd_vid)][g];
        dr_agg[c][g] = agg[c][ent(dr_vid)][g];
      end
    rd_e1  = e1[ent(rd_vid)];
    rd_e2  = e2[ent(rd_vid)];
    rt_e1  = e1[ent(rt_vid)];
    dr_den = den[ent(dr_vid)];
  end

  always_ff @(posedge clk) begin
    for (int c = 0; c < N; c++) begin
      if (mpe_valid[c] && !to_e) eta[c][ent(mpe_ps[c].vid)][pass] <= mpe_ps[c].val;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < ENTRIES; i++) begin
        e1[i] <= '0; e2[i] <= '0; den[i] <= '0;
        for (int c = 0; c < N; c++)
          for (int g = 0; g < G; g++) agg[c][i][g] <= '0;
      end
    end else begin
      if (to_e && mpe_valid[0]) e1[ent(mpe_ps[0].vid)] <= mpe_ps[0].val;
      if (to_e && N > 1 && mpe_valid[1]) e2[ent(mpe_ps[1].vid)] <= mpe_ps[1].val;
      for (int c = 0; c < N; c++) begin
        if (acc_valid[c])
          for (int g = 0; g < G; g++)
            agg[c][ent(acc_vid[c])][g] <= agg[c][ent(acc_vid[c])][g] + acc_vec[c][g];
        if (dr_clr && !(acc_valid[c] && ent(acc_vid[c]) == ent(dr_vid)))
          for (int g = 0; g < G; g++) agg[c][ent(dr_vid)][g] <= '0;
      end
      if (acc_valid[0]) den[ent(acc_vid[0])] <= den[ent(acc_vid[0])] + acc_den;
      if (dr_clr && !(acc_valid[0] && ent(acc_vid[0]) == ent(dr_vid))) den[ent(dr_vid)] <= '0;
    end
  end
endmodule
