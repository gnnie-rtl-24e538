// tb_input_buffer: RLC-coded blocks of random length are pushed into the
// four row banks; the per-bank block counters are checked while nothing is
// consumed. Then the consumers drain the banks with random ready, and
// consumer 0 keeps switching between its own bank and bank 3 (as during load
// redistribution). Every bank must deliver its tokens in order, exactly once,
// and all tokens of one block must go to the same consumer.
`include "tb/tb_check.svh"
module tb_input_buffer;
  import gnnie_pkg::*;
  localparam int M = 4, D = 64, NB1 = 12, NB = 48;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic push_valid, push_ready;
  logic [1:0] push_row;
  rlc_tok_t push_tok;
  vid_t push_vid;
  logic [1:0] src [M];
  logic [M-1:0] cons_ready, cons_valid;
  rlc_tok_t cons_tok [M];
  vid_t cons_vid [M];
  logic [15:0] blocks [M];
  input_buffer #(.M(M), .DEPTH(D)) dut (.*);
  `WATCHDOG(50000)

  // expected token stream per bank: {block id, position}
  int exp_blk [M][$];
  int exp_pos [M][$];
  int owner [NB];
  int popped = 0, total = 0, nblk_bank [M];
  logic go = 0;

  task automatic push_block(int id);
    automatic int row = $urandom % M;
    automatic int len = 1 + $urandom % 4;
    for (int p = 0; p < len; p++) begin
      push_valid = 1; push_row = 2'(row); push_vid = vid_t'(id);
      push_tok.last = (p == len - 1); push_tok.run = 8'(p); push_tok.value = data_t'(id);
      exp_blk[row].push_back(id); exp_pos[row].push_back(p); total++;
      begin automatic logic rr; do begin rr = push_ready; @(posedge clk); #1; end while (!rr); end
      push_valid = 0;
    end
    nblk_bank[row]++;
  endtask

  always @(posedge clk) if (rst_n) begin
    for (int c = 0; c < M; c++) if (cons_valid[c] && cons_ready[c]) begin
      automatic int b = int'(src[c]);
      automatic int id = int'(cons_vid[c]);
      checks++;
      if (exp_blk[b].size() == 0 || exp_blk[b][0] != id || exp_pos[b][0] != int'(cons_tok[c].run)) begin
        failures++; $display("FAIL: consumer %0d bank %0d got blk %0d pos %0d", c, b, id, cons_tok[c].run);
      end else begin
        void'(exp_blk[b].pop_front()); void'(exp_pos[b].pop_front());
      end
      if (owner[id] < 0) owner[id] = c;
      else if (owner[id] != c) begin failures++; $display("FAIL: block %0d split between consumers", id); end
      popped++;
    end
  end

  // consumers: random ready, consumer 0 toggles its source between 0 and 3
  always @(posedge clk) begin
    #1;
    for (int c = 0; c < M; c++) cons_ready[c] <= go && ($urandom % 3 != 0);
    if (go && $urandom % 16 == 0) src[0] <= (src[0] == 0) ? 2'd3 : 2'd0;
  end

  initial begin
    push_valid = 0; push_row = 0; push_tok = '0; push_vid = 0;
    cons_ready = '0;
    for (int c = 0; c < M; c++) begin src[c] = 2'(c); nblk_bank[c] = 0; end
    for (int i = 0; i < NB; i++) owner[i] = -1;
    repeat (3) @(posedge clk); #1; rst_n = 1;
    for (int i = 0; i < NB1; i++) push_block(i);
    @(posedge clk); #1;
    for (int b = 0; b < M; b++) `CHECK(int'(blocks[b]) == nblk_bank[b], $sformatf("bank %0d block count %0d", b, blocks[b]))
    go = 1;
    for (int i = NB1; i < NB; i++) push_block(i);
    wait (popped == total);
    @(posedge clk); #1;
    for (int b = 0; b < M; b++) `CHECK(blocks[b] == 0 && exp_blk[b].size() == 0, "all banks drained")
    `FINISH
  end
endmodule
