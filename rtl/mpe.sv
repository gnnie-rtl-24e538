// mpe: merge PE at the foot of one CPE column.
// The M CPEs of the column deliver vertex-tagged partial sums at irregular
// times (rows with sparse blocks finish early, dense ones late). A round-robin
// arbiter moves one of them per cycle into the update spad. The next cycle the
// accumulator adds it to the psum slot holding the same vertex, or opens a free
// slot. When a slot has collected nblk contributions (one per active CPE row)
// the finished element leaves on out_* together with its vertex id and the
// slot is freed. A CPE is admitted only when its vertex matches a slot (or the
// spad) or a slot is free; otherwise it stalls. Because all rows walk the
// vertices in the same order, the oldest unfinished vertex can always enter,
// so the column cannot deadlock. stall_cycles counts cycles in which a CPE
// waits for a slot or the spad waits for the output.
// Update spad, accumulator, psum slots and the stall follow the paper; the slot
// count, the arbiter and the handshakes are this design's choices.
module mpe import gnnie_pkg::*; #(
  parameter int M     = 16,
  parameter int SLOTS = 16
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [$clog2(M):0]   nblk,
  input  logic [M-1:0]         in_valid,
  output logic [M-1:0]         in_ready,
  input  psum_t                in_ps [M],
  output logic                 out_valid,
  input  logic                 out_ready,
  output psum_t                out_ps,
  output logic [31:0]          stall_cycles,
  output logic                 busy
);
  localparam int MW = (M > 1) ? $clog2(M) : 1;
  localparam int CW = $clog2(M) + 1;

  // update spad
  logic  upd_valid;
  psum_t upd;
  // psum slots
  logic          sl_used [SLOTS];
  vid_t          sl_vid  [SLOTS];
  acc_t          sl_val  [SLOTS];
  logic [CW-1:0] sl_cnt  [SLOTS];

  logic [MW-1:0] rr_ptr;
  logic          grant_any;
  logic [MW-1:0] grant;

  // slot lookup
  logic          hit, has_free;
  int            hit_i, free_i;
  always_comb begin
    hit = 1'b0; has_free = 1'b0; hit_i = 0; free_i = 0;
    for (int s = SLOTS - 1; s >= 0; s--) begin
      if (sl_used[s] && sl_vid[s] == upd.vid) begin hit = 1'b1; hit_i = s; end
      if (!sl_used[s]) begin has_free = 1'b1; free_i = s; end
    end
  end

  // admission: a CPE may enter the update spad only if its vertex already
  // owns a slot (or sits in the spad) or a slot is still free after the one
  // the spad itself may need. Without this rule a fast row could fill the
  // spad with a vertex that has no slot while the slow rows that would
  // complete the resident vertices wait behind it (deadlock).
  int   nfree;
  logic [M-1:0] elig;
  always_comb begin
    nfree = 0;
    for (int s = 0; s < SLOTS; s++) nfree += int'(!sl_used[s]);
    for (int i = 0; i < M; i++) begin
      elig[i] = in_valid[i] && ((upd_valid && upd.vid == in_ps[i].vid) ||
                                (nfree > int'(upd_valid && !hit)));
      for (int s = 0; s < SLOTS; s++)
        if (sl_used[s] && sl_vid[s] == in_ps[i].vid) elig[i] = in_valid[i];
    end
  end

  // round-robin choice among eligible CPEs, starting at rr_ptr
  always_comb begin
    grant_any = 1'b0;
    grant     = '0;
    for (int o = M - 1; o >= 0; o--) begin
      automatic int idx = (int'(rr_ptr) + o) % M;
      if (elig[idx]) begin
        grant_any = 1'b1;
        grant     = MW'(idx);
      end
    end
  end

  logic out_free, can_merge;
  assign out_free  = !out_valid || out_ready;
  assign can_merge = upd_valid && out_free && (hit || has_free);
  wire   upd_take  = !upd_valid || can_merge;

  always_comb begin
    in_ready = '0;
    if (grant_any && upd_take) in_ready[grant] = 1'b1;
  end

  always_comb begin
    busy = upd_valid || out_valid;
    for (int s = 0; s < SLOTS; s++) busy |= sl_used[s];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      upd_valid <= 1'b0; upd <= '0; rr_ptr <= '0;
      out_valid <= 1'b0; out_ps <= '0; stall_cycles <= '0;
      for (int s = 0; s < SLOTS; s++) begin
        sl_used[s] <= 1'b0; sl_vid[s] <= '0; sl_val[s] <= '0; sl_cnt[s] <= '0;
      end
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if ((upd_valid && !can_merge) || (|in_valid && !grant_any)) stall_cycles <= stall_cycles + 1;
      if (can_merge) begin
        automatic int   s    = hit ? hit_i : free_i;
        automatic acc_t sum  = (hit ? sl_val[s] : '0) + upd.val;
        automatic logic [CW-1:0] cnt = (hit ? sl_cnt[s] : '0) + 1'b1;
        if (cnt >= nblk) begin
          sl_used[s]   <= 1'b0;
          out_valid    <= 1'b1;
          out_ps.vid   <= upd.vid;
          out_ps.val   <= sum;
        end else begin
          sl_used[s] <= 1'b1;
          sl_vid[s]  <= upd.vid;
          sl_val[s]  <= sum;
          sl_cnt[s]  <= cnt;
        end
      end
      if (upd_take) begin
        upd_valid <= grant_any;
        if (grant_any) begin
          upd    <= in_ps[grant];
          rr_ptr <= MW'((int'(grant) + 1) % M);
        end
      end
    end
  end
endmodule
