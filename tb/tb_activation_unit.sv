// tb_activation_unit: random values through ReLU and pass-through modes,
// checked one cycle later together with the carried vertex id and index.
`include "tb/tb_check.svh"
module tb_activation_unit;
  import gnnie_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic relu_en, in_valid, out_valid;
  vid_t in_vid, out_vid; logic [7:0] in_idx, out_idx; acc_t in_val, out_val;
  activation_unit dut (.*);
  `WATCHDOG(5000)
  initial begin
    relu_en = 1; in_valid = 0; in_vid = 0; in_idx = 0; in_val = 0;
    repeat (3) @(posedge clk); #1; rst_n = 1;
    for (int t = 0; t < 100; t++) begin
      automatic acc_t v = acc_t'($urandom);
      relu_en = (t % 4 != 0); in_valid = 1; in_val = v; in_vid = vid_t'(t); in_idx = 8'(t * 3);
      @(posedge clk); #1; in_valid = 0;
      `CHECK(out_valid && out_vid == vid_t'(t) && out_idx == 8'(t * 3), "tag")
      `CHECK(out_val == ((relu_en && v < 0) ? 0 : v), $sformatf("value %0d -> %0d", v, out_val))
      @(posedge clk); #1;
      `CHECK(!out_valid, "single-cycle valid")
    end
    `FINISH
  end
endmodule
