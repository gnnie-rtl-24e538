// cache_controller: degree-aware dynamic caching of vertices for Aggregation.
// Vertices are stored in DRAM in descending degree order, so vertex 0 has the
// highest degree, and DRAM word ALPHA_BASE+v holds alpha_v, the number of v's
// edges not yet aggregated (initially its degree). The cache has NSLOT vertex
// slots organised WAYS-way set associative; vertex v may live in set
// v mod (NSLOT/WAYS).
//  FILL   : vertices are fetched in order from a sequential pointer. A
//           vertex with alpha 0 is skipped; a vertex already cached is
//           skipped; otherwise it takes a free way of its set. Filling stops
//           at a full set, or after every vertex has been looked at once
//           in this phase, and the iteration starts. When the pointer passes
//           the last vertex a Round is complete and it wraps to 0.
//  ITER   : the array aggregates the subgraph of cached vertices. lk_* tells
//           whether an edge (a,b) is to be processed now: both ends cached
//           and at least one of them loaded since the previous iteration, so
//           no edge is processed twice; only the listing with a < b counts,
//           as the CSR lists every edge from both ends. dec_* decrements alpha of an end.
//  EVICT  : on iter_done, finished vertices (alpha 0) are dropped, then up
//           to R cached vertices with alpha < gamma are replaced, lowest
//           vertex id first; each one's alpha is written back.
//           If nothing can be evicted and nothing new can be loaded while
//           edges remain, the state is a deadlock: gamma doubles.
// done rises when the sum of all alpha (rem_edges, loaded by the caller as
// twice the edge count) reaches 0.
// Degree order, alpha tracking, gamma threshold, r replacements per iteration,
// dictionary order, Rounds, sequential DRAM access and deadlock handling by
// changing gamma follow the paper; the slot organisation details, the
// gamma-doubling rule and the new-vertex edge rule are this design's choices.
module cache_controller import gnnie_pkg::*; #(
  parameter int NSLOT  = 1024,
  parameter int WAYS   = 4,
  parameter int R      = 64,
  parameter int GAMMA0 = 5,
  parameter int ALPHA_BASE = 32'h0100_0000
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  vid_t          nv,
  input  logic [31:0]   total_alpha,
  // DRAM traffic (through the memory access scheduler)
  output logic          mreq_valid,
  input  logic          mreq_ready,
  output logic [31:0]   mreq_addr,
  output logic          mreq_we,
  output logic [31:0]   mreq_wdata,
  input  logic          mrsp_valid,
  input  logic [31:0]   mrsp_data,
  // iteration interface
  output logic          iter_active,
  input  logic          iter_done,
  input  vid_t          lk_a,
  input  vid_t          lk_b,
  output logic          lk_take,
  input  logic          dec_valid,
  input  vid_t          dec_vid,
  output logic          done,
  output logic [15:0]   rounds,
  output logic [15:0]   iters,
  output logic [15:0]   evictions,
  output logic [15:0]   deadlocks,
  output logic [15:0]   gamma,
  output logic [15:0]   resident
);
  localparam int SETS = NSLOT / WAYS;
  localparam int SW   = (SETS > 1) ? $clog2(SETS) : 1;
  localparam int WW   = $clog2(WAYS);

  logic        s_used [SETS][WAYS];
  logic        s_new  [SETS][WAYS];
  vid_t        s_vid  [SETS][WAYS];
  logic [31:0] s_alp  [SETS][WAYS];

  typedef enum logic [2:0] {C_IDLE, C_FREQ, C_FWAIT, C_ITER, C_EVICT, C_WB, C_DONE} st_e;
  st_e         st;
  vid_t        ptr;
  logic [31:0] rem_edges;
  logic [15:0] nev;         // replacements in this EVICT phase
  logic        freed_any;   // some slot freed in this EVICT phase
  logic        loaded_any;  // something loaded in this FILL phase
  vid_t        scanned;     // vertices looked at in this FILL phase
  logic [31:0] wb_alpha;
  vid_t        wb_vid;

  function automatic logic [SW-1:0] set_of(input vid_t v);
    return SW'(v % SETS);
  endfunction

  // lookup of a vertex: hit and way
  function automatic logic [WW:0] find(input vid_t v);
    find = '0;
    for (int w = WAYS - 1; w >= 0; w--)
      if (s_used[set_of(v)][w] && s_vid[set_of(v)][w] == v) find = {1'b1, WW'(w)};
  endfunction

  logic [WW:0] fa, fb, fp, fd;
  assign fa = find(lk_a);
  assign fb = find(lk_b);
  assign fp = find(ptr);
  assign fd = find(dec_vid);
  assign lk_take = (st == C_ITER) && fa[WW] && fb[WW] && (lk_a < lk_b) &&
                   (s_new[set_of(lk_a)][fa[WW-1:0]] || s_new[set_of(lk_b)][fb[WW-1:0]]);

  // free way in the pointer's set
  logic          pfree;
  logic [WW-1:0] pway;
  always_comb begin
    pfree = 1'b0; pway = '0;
    for (int w = WAYS - 1; w >= 0; w--)
      if (!s_used[set_of(ptr)][w]) begin pfree = 1'b1; pway = WW'(w); end
  end

  // eviction candidate: a finished vertex (alpha 0) if there is one, else
  // the lowest vertex id with alpha < gamma
  logic          ev_any, ev_zero;
  logic [SW-1:0] ev_s;
  logic [WW-1:0] ev_w;
  always_comb begin
    ev_any = 1'b0; ev_zero = 1'b0; ev_s = '0; ev_w = '0;
    for (int s = 0; s < SETS; s++)
      for (int w = 0; w < WAYS; w++)
        if (s_used[s][w] && s_alp[s][w] == 0) begin
          ev_any = 1'b1; ev_zero = 1'b1; ev_s = SW'(s); ev_w = WW'(w);
        end
    if (!ev_zero)
      for (int s = 0; s < SETS; s++)
        for (int w = 0; w < WAYS; w++)
          if (s_used[s][w] && s_alp[s][w] < 32'(gamma) &&
              (!ev_any || s_vid[s][w] < s_vid[ev_s][ev_w])) begin
            ev_any = 1'b1; ev_s = SW'(s); ev_w = WW'(w);
          end
  end

  always_comb begin
    resident = '0;
    for (int s = 0; s < SETS; s++)
      for (int w = 0; w < WAYS; w++) resident += 16'(s_used[s][w]);
  end

  assign iter_active = (st == C_ITER);
  assign done        = (st == C_DONE);
  assign mreq_valid  = (st == C_FREQ) || (st == C_WB);
  assign mreq_we     = (st == C_WB);
  assign mreq_addr   = ALPHA_BASE + ((st == C_WB) ? 32'(wb_vid) : 32'(ptr));
  assign mreq_wdata  = wb_alpha;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= C_IDLE; ptr <= '0; scanned <= '0; rem_edges <= '0; nev <= '0; freed_any <= 1'b0; loaded_any <= 1'b0;
      wb_alpha <= '0; wb_vid <= '0;
      rounds <= '0; iters <= '0; evictions <= '0; deadlocks <= '0; gamma <= 16'(GAMMA0);
      for (int s = 0; s < SETS; s++)
        for (int w = 0; w < WAYS; w++) begin
          s_used[s][w] <= 1'b0; s_new[s][w] <= 1'b0; s_vid[s][w] <= '0; s_alp[s][w] <= '0;
        end
    end else begin
      // alpha decrements may arrive in any state of an iteration
      if (dec_valid && fd[WW] && s_alp[set_of(dec_vid)][fd[WW-1:0]] != 0) begin
        s_alp[set_of(dec_vid)][fd[WW-1:0]] <= s_alp[set_of(dec_vid)][fd[WW-1:0]] - 1;
        rem_edges <= rem_edges - 1;
      end
      unique case (st)
        C_IDLE, C_DONE: if (start) begin
          ptr <= '0; rem_edges <= total_alpha; loaded_any <= 1'b0;
          rounds <= '0; iters <= '0; evictions <= '0; deadlocks <= '0;
          gamma <= 16'(GAMMA0);
          for (int s = 0; s < SETS; s++)
            for (int w = 0; w < WAYS; w++) begin s_used[s][w] <= 1'b0; s_new[s][w] <= 1'b0; end
          st <= (total_alpha == 0) ? C_DONE : C_FREQ;
        end
        C_FREQ: begin
          if ((!pfree && !fp[WW]) || scanned >= nv) begin // set full or all seen
            st <= C_ITER;
            iters <= iters + 1;
            scanned <= '0;
          end else if (fp[WW]) begin             // already cached: skip
            scanned <= scanned + 1;
            if (ptr + 1 >= nv) begin ptr <= '0; rounds <= rounds + 1; end
            else ptr <= ptr + 1;
          end else if (mreq_ready) st <= C_FWAIT;
        end
        C_FWAIT: if (mrsp_valid) begin
          if (mrsp_data != 0) begin
            s_used[set_of(ptr)][pway] <= 1'b1;
            s_new[set_of(ptr)][pway]  <= 1'b1;
            s_vid[set_of(ptr)][pway]  <= ptr;
            s_alp[set_of(ptr)][pway]  <= mrsp_data;
            loaded_any <= 1'b1;
          end
          scanned <= scanned + 1;
          if (ptr + 1 >= nv) begin ptr <= '0; rounds <= rounds + 1; end
          else ptr <= ptr + 1;
          st <= C_FREQ;
        end
        C_ITER: if (iter_done) begin
          for (int s = 0; s < SETS; s++)
            for (int w = 0; w < WAYS; w++) s_new[s][w] <= 1'b0;
          nev <= '0;
          st  <= (rem_edges == 0) ? C_DONE : C_EVICT;
        end
        C_EVICT: begin
          if (ev_any && (ev_zero || nev < 16'(R))) begin
            s_used[ev_s][ev_w] <= 1'b0;
            wb_vid   <= s_vid[ev_s][ev_w];
            wb_alpha <= s_alp[ev_s][ev_w];
            if (!ev_zero) nev <= nev + 1;
            freed_any <= 1'b1;
            evictions <= evictions + 1;
            st       <= C_WB;
          end else begin
            if (!freed_any && !loaded_any) begin
              gamma     <= gamma << 1;
              deadlocks <= deadlocks + 1;
            end
            loaded_any <= 1'b0;
            freed_any  <= 1'b0;
            st <= C_FREQ;
          end
        end
        C_WB: if (mreq_ready) st <= C_EVICT;
        default: st <= C_IDLE;
      endcase
    end
  end
endmodule
