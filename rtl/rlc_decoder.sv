// rlc_decoder: expands run-length coded feature tokens into a dense block.
// Each token {last, run, value} says that 'run' zero elements precede 'value'.
// The decoder writes value at position pos+run of a block register and moves
// pos past it, one token per cycle. The token with 'last' set closes the block,
// which is then offered on blk_* until taken; tokens stall meanwhile.
// With rlc_en low (dense layers) the run field is ignored, so every token is
// simply the next element: the decoder is bypassed but the block framing stays.
// The RLC scheme and the bypass follow the paper; the token layout is this
// design's own choice. Latency: a block of T tokens is valid T cycles after its
// first token was accepted.
module rlc_decoder import gnnie_pkg::*; #(
  parameter int K_MAX = 256
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      rlc_en,
  input  logic      tok_valid,
  output logic      tok_ready,
  input  rlc_tok_t  tok,
  input  vid_t      tok_vid,
  output logic      blk_valid,
  input  logic      blk_ready,
  output data_t     blk [K_MAX],
  output vid_t      blk_vid
);
  localparam int PW = $clog2(K_MAX) + 1;
  logic [PW-1:0] pos;
  logic [PW-1:0] wpos;

  assign tok_ready = !blk_valid;
  assign wpos = rlc_en ? pos + PW'(tok.run) : pos;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pos       <= '0;
      blk_valid <= 1'b0;
      blk_vid   <= '0;
      for (int i = 0; i < K_MAX; i++) blk[i] <= '0;
    end else begin
      if (blk_valid && blk_ready) begin
        blk_valid <= 1'b0;
        for (int i = 0; i < K_MAX; i++) blk[i] <= '0;
      end
      if (tok_valid && tok_ready) begin
        if (wpos < PW'(K_MAX)) blk[wpos[PW-2:0]] <= tok.value;
        if (tok.last) begin
          pos       <= '0;
          blk_valid <= 1'b1;
          blk_vid   <= tok_vid;
        end else begin
          pos <= wpos + 1'b1;
        end
      end
    end
  end
endmodule
