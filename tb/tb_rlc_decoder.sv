// tb_rlc_decoder: encodes random sparse blocks as run-length tokens, feeds
// them to the decoder and compares the decoded block and vertex tag with the
// original; repeats in bypass (dense) mode. Checks that a block of T tokens
// is out T cycles after its first token.
`include "tb/tb_check.svh"
module tb_rlc_decoder;
  import gnnie_pkg::*;
  localparam int K = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic rlc_en, tok_valid, tok_ready, blk_valid, blk_ready;
  rlc_tok_t tok;
  vid_t tok_vid, blk_vid;
  data_t blk [K];
  rlc_decoder #(.K_MAX(K)) dut (.*);

  `WATCHDOG(20000)

  data_t ref_blk [K];
  rlc_tok_t toks [$];
  initial begin
    tok_valid = 0; blk_ready = 0; rlc_en = 1; tok = '0; tok_vid = '0;
    repeat (3) @(posedge clk); #1; rst_n = 1;
    for (int t = 0; t < 40; t++) begin
      automatic int run = 0;
      automatic int t0;
      rlc_en = (t < 30);
      for (int i = 0; i < K; i++) ref_blk[i] = ($urandom % 4 == 0) ? data_t'($urandom % 255 + 1) : '0;
      if (t % 10 == 3) for (int i = 0; i < K; i++) ref_blk[i] = '0;
      toks.delete();
      for (int i = 0; i < K; i++) begin
        if (!rlc_en) toks.push_back('{last: 1'b0, run: 8'd0, value: ref_blk[i]});
        else if (ref_blk[i] != 0) begin
          toks.push_back('{last: 1'b0, run: 8'(run), value: ref_blk[i]}); run = 0;
        end else run++;
      end
      if (toks.size() == 0) toks.push_back('{last: 1'b0, run: 8'd0, value: '0});
      toks[toks.size()-1].last = 1'b1;
      tok_vid = vid_t'(t * 7);
      t0 = 0;
      foreach (toks[i]) begin
        tok = toks[i]; tok_valid = 1;
        @(posedge clk); #1;
        t0++;
      end
      tok_valid = 0;
      `CHECK(blk_valid, "block valid right after last token")
      `CHECK(t0 == toks.size(), "one token per cycle")
      for (int i = 0; i < K; i++) `CHECK(blk[i] == ref_blk[i], $sformatf("blk %0d elem %0d %0d vs %0d", t, i, blk[i], ref_blk[i]))
      `CHECK(blk_vid == vid_t'(t * 7), "vertex tag")
      blk_ready = 1; @(posedge clk); #1; blk_ready = 0;
    end
    `FINISH
  end
endmodule
