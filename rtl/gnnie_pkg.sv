// gnnie_pkg: types and constants shared by the GNN inference engine.
// Features and weights are 8-bit signed (the 1-byte weight is the paper's
// figure; the 8-bit feature is this design's choice). Products are summed in
// 32-bit signed accumulators. Attention logits are signed Q8.8 values and the
// exponential unit returns unsigned Q16.16 (both formats are this design's own).
package gnnie_pkg;
  localparam int DATA_W = 8;
  localparam int ACC_W  = 32;
  localparam int VID_W  = 18;   // 232,965 vertices of the largest graph fit
  localparam int RUN_W  = 8;    // zero-run field of an RLC token
  localparam int EXP_FRAC = 16; // fraction bits of exp() results
  localparam int E_FRAC   = 8;  // fraction bits of attention logits

  typedef logic signed [DATA_W-1:0] data_t;
  typedef logic signed [ACC_W-1:0]  acc_t;
  typedef logic [VID_W-1:0]         vid_t;

  // One run-length token: 'run' zeros precede 'value'; 'last' closes a block.
  typedef struct packed {
    logic             last;
    logic [RUN_W-1:0] run;
    data_t            value;
  } rlc_tok_t;

  // Tagged partial sum travelling from a CPE to the merge PE of its column.
  typedef struct packed {
    vid_t vid;
    acc_t val;
  } psum_t;

  // Edge operations of the aggregation phase.
  typedef enum logic [1:0] {
    AGG_SUM = 2'd0,   // GCN, GINConv, DiffPool: spad1 += spad2
    AGG_MAX = 2'd1,   // GraphSAGE max aggregator
    AGG_GAT = 2'd2    // spad1 += exp(LeakyReLU(e_i1+e_j2)) * spad2, den += exp
  } agg_op_e;
endpackage
