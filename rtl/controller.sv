// controller: sequences one Weighting pass over the CPE array.
//  LOAD : for k cycles, every CPE of row r writes spad address a with the
//         weight of block blk_of_row[r] (the FM mapping) of its column.
//  RUN  : each row pulls blocks from its own input-buffer bank. Load
//         redistribution (LR): the first LR_PAIRS rows (fewest MACs) are paired
//         with the last LR_PAIRS rows (most MACs), row r with row M-1-r. When a
//         light row has run dry while its partner still has at least LR_MIN
//         waiting blocks, the controller reloads the light row's spads with the
//         partner's weights (k cycles, one row at a time) and then points the
//         light row at the partner's bank, so both drain it.
//  DRAIN: when every bank is empty, every row idle and the merge PEs are
//         empty, done pulses.
// row_run tells each row when it may take feature tokens (not while its
// spads are being loaded). lr_events counts LR switches. Pairing heavy with light rows after the FM
// work has run out, and moving weights with the work, follow the paper; the
// pairing rule, LR_MIN and the trigger are this design's choices.
module controller import gnnie_pkg::*; #(
  parameter int M        = 16,
  parameter int K_MAX    = 256,
  parameter int LR_PAIRS = 4,
  parameter int LR_MIN   = 2
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start,
  input  logic [$clog2(K_MAX):0]   k,
  input  logic                     lr_en,
  input  logic [$clog2(M)-1:0]     blk_of_row [M],
  input  logic [15:0]              blocks [M],
  input  logic [M-1:0]             row_idle,
  input  logic                     mpe_busy,
  output logic [$clog2(K_MAX)-1:0] spad_addr,
  output logic [M-1:0]             spad_we,
  output logic [$clog2(M)-1:0]     sel_blk [M],
  output logic [$clog2(M)-1:0]     src [M],
  output logic [M-1:0]             row_run,
  output logic                     busy,
  output logic                     done,
  output logic [15:0]              lr_events
);
  localparam int MW = $clog2(M);
  localparam int KW = $clog2(K_MAX);
  typedef enum logic [2:0] {W_IDLE, W_LOAD, W_RUN, W_LRLOAD, W_DRAIN} st_e;
  st_e           st;
  logic [KW:0]   a;
  logic [MW-1:0] lr_row;
  logic [M-1:0]  lr_on;

  // a light row ready to take over its partner's work
  logic          lr_go;
  logic [MW-1:0] lr_pick;
  always_comb begin
    lr_go = 1'b0; lr_pick = '0;
    for (int r = LR_PAIRS - 1; r >= 0; r--)
      if (lr_en && !lr_on[r] && row_idle[r] && blocks[r] == 0 &&
          blocks[M-1-r] >= 16'(LR_MIN)) begin
        lr_go = 1'b1; lr_pick = MW'(r);
      end
  end

  logic all_empty;
  always_comb begin
    all_empty = &row_idle && !mpe_busy;
    for (int r = 0; r < M; r++) all_empty &= (blocks[r] == 0);
  end

  assign spad_addr = a[KW-1:0];
  assign busy      = (st != W_IDLE);
  // rows may take tokens only while their spads hold this pass's weights
  always_comb
    for (int r = 0; r < M; r++)
      row_run[r] = (st == W_RUN) || (st == W_DRAIN) || (st == W_LRLOAD && lr_row != MW'(r));
  always_comb begin
    spad_we = '0;
    if (st == W_LOAD) spad_we = '1;
    if (st == W_LRLOAD) spad_we[lr_row] = 1'b1;
    for (int r = 0; r < M; r++) begin
      sel_blk[r] = blk_of_row[r];
      src[r]     = lr_on[r] ? MW'(M - 1 - r) : MW'(r);
    end
    if (st == W_LRLOAD) sel_blk[lr_row] = blk_of_row[M - 1 - int'(lr_row)];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= W_IDLE; a <= '0; lr_row <= '0; lr_on <= '0; done <= 1'b0; lr_events <= '0;
    end else begin
      done <= 1'b0;
      unique case (st)
        W_IDLE: if (start) begin
          a <= '0; lr_on <= '0;
          st <= W_LOAD;
        end
        W_LOAD: begin
          if (a + 1 >= k) begin a <= '0; st <= W_RUN; end
          else a <= a + 1'b1;
        end
        W_RUN: begin
          if (lr_go) begin
            lr_row <= lr_pick; a <= '0; st <= W_LRLOAD;
          end else if (all_empty) begin
            st <= W_DRAIN;
          end
        end
        W_LRLOAD: begin
          if (a + 1 >= k) begin
            a <= '0;
            lr_on[lr_row] <= 1'b1;
            lr_events <= lr_events + 1;
            st <= W_RUN;
          end else a <= a + 1'b1;
        end
        W_DRAIN: if (all_empty) begin done <= 1'b1; st <= W_IDLE; end
        default: st <= W_IDLE;
      endcase
    end
  end
endmodule
