// input_buffer: feature-token store in front of the CPE rows.
// One FIFO bank per CPE row holds that row's RLC-coded feature blocks, each
// token tagged with its vertex id; the fill side writes one token per cycle
// (push_*), and since a bank can fill while it drains, fetching the next set
// overlaps computation as double buffering does. Each row's decoder pops
// through consumer port r from bank src[r]: normally its own bank, or during
// load redistribution (LR) the bank of its heavily loaded partner row. A bank
// serves one consumer per cycle and is locked to it until the block's last
// token, so blocks are never interleaved; the owner row has priority.
// blocks[b] counts complete blocks waiting in bank b.
// Per-row storage and double buffering follow the paper; the FIFO
// organisation, locking and the sharing rule are this design's choices.
module input_buffer import gnnie_pkg::*; #(
  parameter int M     = 16,
  parameter int DEPTH = 8192
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  push_valid,
  output logic                  push_ready,
  input  logic [$clog2(M)-1:0]  push_row,
  input  rlc_tok_t              push_tok,
  input  vid_t                  push_vid,
  input  logic [$clog2(M)-1:0]  src [M],
  input  logic [M-1:0]          cons_ready,
  output logic [M-1:0]          cons_valid,
  output rlc_tok_t              cons_tok [M],
  output vid_t                  cons_vid [M],
  output logic [15:0]           blocks [M]
);
  localparam int MW = $clog2(M);
  localparam int AW = $clog2(DEPTH);
  rlc_tok_t      mem_t [M][DEPTH];
  vid_t          mem_v [M][DEPTH];
  logic [AW-1:0] rd [M];
  logic [AW-1:0] wr [M];
  logic [AW:0]   cnt [M];
  logic          locked [M];
  logic [MW-1:0] holder [M];
  logic [MW-1:0] gnt    [M];   // consumer granted bank b
  logic [M-1:0]  gnt_v;
  logic [M-1:0]  pop;

  assign push_ready = (cnt[push_row] != (AW+1)'(DEPTH));

  // grant per bank
  always_comb begin
    for (int b = 0; b < M; b++) begin
      gnt_v[b] = 1'b0;
      gnt[b]   = MW'(b);
      if (cnt[b] != '0) begin
        if (locked[b]) begin
          gnt_v[b] = (src[holder[b]] == MW'(b));
          gnt[b]   = holder[b];
        end else if (src[b] == MW'(b)) begin
          gnt_v[b] = 1'b1;
        end else begin
          for (int c = M - 1; c >= 0; c--)
            if (src[c] == MW'(b)) begin gnt_v[b] = 1'b1; gnt[b] = MW'(c); end
        end
      end
    end
  end

  always_comb begin
    for (int c = 0; c < M; c++) begin
      automatic logic [MW-1:0] b = src[c];
      cons_valid[c] = gnt_v[b] && (gnt[b] == MW'(c));
      cons_tok[c]   = mem_t[b][rd[b]];
      cons_vid[c]   = mem_v[b][rd[b]];
    end
    for (int b = 0; b < M; b++) pop[b] = gnt_v[b] && cons_ready[gnt[b]];
  end

  always_ff @(posedge clk) begin
    if (push_valid && push_ready) begin
      mem_t[push_row][wr[push_row]] <= push_tok;
      mem_v[push_row][wr[push_row]] <= push_vid;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int b = 0; b < M; b++) begin
        rd[b] <= '0; wr[b] <= '0; cnt[b] <= '0; locked[b] <= 1'b0;
        holder[b] <= '0; blocks[b] <= '0;
      end
    end else begin
      for (int b = 0; b < M; b++) begin
        automatic logic pu  = push_valid && push_ready && (push_row == MW'(b));
        automatic logic pul = pu && push_tok.last;
        automatic logic pol = pop[b] && mem_t[b][rd[b]].last;
        if (pu) wr[b] <= wr[b] + 1'b1;
        if (pop[b]) begin
          rd[b]     <= rd[b] + 1'b1;
          locked[b] <= !mem_t[b][rd[b]].last;
          holder[b] <= gnt[b];
        end
        cnt[b]    <= cnt[b] + (AW+1)'(pu) - (AW+1)'(pop[b]);
        blocks[b] <= blocks[b] + 16'(pul) - 16'(pol);
      end
    end
  end
endmodule
