// activation_unit: applies the layer's activation to a finished vertex
// feature element on its way to DRAM. relu_en selects ReLU, otherwise the value
// passes unchanged (GINConv keeps its activation inside the MLP). One element
// per cycle, registered: out_* follows in_* by one cycle. Softmax activation is
// not built here. ReLU as the activation follows the paper; the pass-through
// mode and the one-cycle register are this design's choices.
module activation_unit import gnnie_pkg::*; (
  input  logic clk,
  input  logic rst_n,
  input  logic relu_en,
  input  logic in_valid,
  input  vid_t in_vid,
  input  logic [7:0] in_idx,
  input  acc_t in_val,
  output logic out_valid,
  output vid_t out_vid,
  output logic [7:0] out_idx,
  output acc_t out_val
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; out_vid <= '0; out_idx <= '0; out_val <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        out_vid <= in_vid;
        out_idx <= in_idx;
        out_val <= (relu_en && in_val < 0) ? '0 : in_val;
      end
    end
  end
endmodule
