// zero_detect: the zero-detection buffer in front of a CPE row.
// A dense block is captured into a value register and a nonzero mask. Each
// cycle the lowest LANES set bits of the mask are handed out as (index, value)
// lanes and cleared, so a block with Z nonzeros takes max(1, ceil(Z/LANES))
// beats and zero elements cost no MAC cycles. An all-zero block produces one
// beat with no valid lane so the downstream merge PE still sees one partial
// sum per block. nnz reports the block's nonzero count. Skipping zeros follows
// the paper; the mask-and-priority-pick structure is this design's own.
module zero_detect import gnnie_pkg::*; #(
  parameter int K_MAX = 256,
  parameter int LANES = 4
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     blk_valid,
  output logic                     blk_ready,
  input  data_t                    blk [K_MAX],
  input  vid_t                     blk_vid,
  output logic                     out_valid,
  input  logic                     out_ready,
  output logic [LANES-1:0]         lane_valid,
  output logic [$clog2(K_MAX)-1:0] lane_idx [LANES],
  output data_t                    lane_val [LANES],
  output logic                     out_last,
  output vid_t                     out_vid,
  output logic [$clog2(K_MAX):0]   nnz
);
  localparam int IW = $clog2(K_MAX);
  data_t            vals [K_MAX];
  logic [K_MAX-1:0] mask;
  logic             busy;
  logic [K_MAX-1:0] rest [LANES+1];
  logic [K_MAX-1:0] pick;

  // Take the lowest LANES set bits, one priority pick after another.
  always_comb begin
    rest[0] = mask;
    pick    = '0;
    for (int l = 0; l < LANES; l++) begin
      lane_valid[l] = 1'b0;
      lane_idx[l]   = '0;
      for (int i = K_MAX - 1; i >= 0; i--) begin
        if (rest[l][i]) begin
          lane_valid[l] = 1'b1;
          lane_idx[l]   = IW'(i);
        end
      end
      rest[l+1] = rest[l];
      if (lane_valid[l]) begin
        rest[l+1][lane_idx[l]] = 1'b0;
        pick[lane_idx[l]]      = 1'b1;
      end
      lane_val[l] = vals[lane_idx[l]];
    end
  end

  assign out_valid = busy;
  assign out_last  = busy && (rest[LANES] == '0);
  assign blk_ready = !busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy    <= 1'b0;
      mask    <= '0;
      out_vid <= '0;
      nnz     <= '0;
      for (int i = 0; i < K_MAX; i++) vals[i] <= '0;
    end else if (!busy) begin
      if (blk_valid) begin
        busy    <= 1'b1;
        out_vid <= blk_vid;
        for (int i = 0; i < K_MAX; i++) begin
          vals[i] <= blk[i];
          mask[i] <= (blk[i] != '0);
        end
        nnz <= ($clog2(K_MAX)+1)'($countones(mask_of(blk)));
      end
    end else if (out_ready) begin
      mask <= mask & ~pick;
      if (out_last) busy <= 1'b0;
    end
  end

  function automatic logic [K_MAX-1:0] mask_of(input data_t b [K_MAX]);
    for (int i = 0; i < K_MAX; i++) mask_of[i] = (b[i] != '0);
  endfunction
endmodule
