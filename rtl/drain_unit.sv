// drain_unit: empties finished Aggregation results from the output buffer.
// For vertices 0..nv-1 and elements 0..F-1 (F = N*G), the element's
// aggregated sum goes, for GATs, through the divider (sum of exp-weighted
// features over the sum of exponentials), otherwise straight on; then through
// the activation unit; the result is written to DRAM word
// OUT_BASE + vid*F + idx through the memory access scheduler. After a
// vertex's last element its output buffer entry is cleared. One element per
// cycle without the divider, one per divide otherwise.
// The output buffer -> (divider) -> activation -> DRAM path and its two
// bypass multiplexers follow the paper's block diagram; the sequencing is this
// design's own.
module drain_unit import gnnie_pkg::*; #(
  parameter int N        = 16,
  parameter int G        = 8,
  parameter int OUT_BASE = 32'h0200_0000
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  vid_t        nv,
  input  logic        gat,
  input  logic        relu_en,
  output vid_t        dr_vid,
  input  acc_t        dr_agg [N][G],
  input  acc_t        dr_den,
  output logic        dr_clr,
  output logic        wreq_valid,
  input  logic        wreq_ready,
  output logic [31:0] wreq_addr,
  output logic [31:0] wreq_data,
  output logic        busy,
  output logic        done,
  output logic [31:0] n_div
);
  localparam int F  = N * G;
  localparam int IW = $clog2(F);
  typedef enum logic [2:0] {D_IDLE, D_ELEM, D_DIV, D_ACT, D_AW, D_WR} st_e;
  st_e         st;
  logic [IW:0] idx;
  acc_t        val;
  logic        div_start, div_ready, div_done;
  acc_t        div_q;
  logic        act_valid;
  vid_t        act_vid;
  logic [7:0]  act_idx;
  acc_t        act_val;

  wire acc_t cur = dr_agg[int'(idx) % N][int'(idx) / N];

  divider #(.W(ACC_W), .FRAC(EXP_FRAC)) u_div (
    .clk, .rst_n, .start(div_start), .ready(div_ready), .num(cur), .den(dr_den),
    .done(div_done), .quo(div_q));

  activation_unit u_act (
    .clk, .rst_n, .relu_en, .in_valid(st == D_ACT), .in_vid(dr_vid), .in_idx(8'(idx)),
    .in_val(val), .out_valid(act_valid), .out_vid(act_vid), .out_idx(act_idx), .out_val(act_val));

  logic [31:0] waddr;
  acc_t        wdata;
  assign div_start  = (st == D_ELEM) && gat && div_ready;
  assign wreq_valid = (st == D_WR);
  assign wreq_addr  = waddr;
  assign wreq_data  = wdata;
  assign busy       = (st != D_IDLE);
  assign dr_clr     = (st == D_WR) && wreq_ready && (int'(idx) == F - 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= D_IDLE; idx <= '0; val <= '0; dr_vid <= '0; done <= 1'b0;
      waddr <= '0; wdata <= '0; n_div <= '0;
    end else begin
      done <= 1'b0;
      unique case (st)
        D_IDLE: if (start) begin
          dr_vid <= '0; idx <= '0;
          st <= (nv == 0) ? D_IDLE : D_ELEM;
          done <= (nv == 0);
        end
        D_ELEM: begin
          if (gat) begin
            if (div_ready) st <= D_DIV;
          end else begin
            val <= cur;
            st  <= D_ACT;
          end
        end
        D_DIV: if (div_done) begin val <= div_q; n_div <= n_div + 1; st <= D_ACT; end
        D_ACT: st <= D_AW;
        D_AW:  ;
        D_WR: if (wreq_ready) begin
          if (int'(idx) == F - 1) begin
            idx <= '0;
            if (dr_vid + 1 >= nv) begin st <= D_IDLE; done <= 1'b1; end
            else begin dr_vid <= dr_vid + 1; st <= D_ELEM; end
          end else begin
            idx <= idx + 1'b1;
            st  <= D_ELEM;
          end
        end
        default: st <= D_IDLE;
      endcase
      if (act_valid) begin
        waddr <= OUT_BASE + 32'(act_vid) * 32'(F) + 32'(act_idx);
        wdata <= act_val;
        st    <= D_WR;
      end
    end
  end
endmodule
