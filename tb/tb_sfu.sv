// tb_sfu: four requesters send attention logits (Q8.8) to the shared SFU;
// every requester must get exactly its answer, exp(LeakyReLU(x)) in Q16.16,
// within 1% (plus 2 LSB) of the value computed here in floating point, and
// the answer must come one cycle after the request is served.
`include "tb/tb_check.svh"
module tb_sfu;
  import gnnie_pkg::*;
  localparam int NR = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic [NR-1:0] req_valid, req_ready, resp_valid;
  acc_t req_x [NR];
  logic [31:0] resp_y, n_served;
  sfu #(.NREQ(NR), .QDEPTH(2)) dut (.*);
  `WATCHDOG(20000)
  int done_cnt = 0;

  function automatic real ref_exp(acc_t x);
    real v = real'(x) / 256.0;
    if (v < 0) v = v * 13.0 / 64.0;
    return $exp(v) * 65536.0;
  endfunction

  for (genvar r = 0; r < NR; r++) begin : g_req
    initial begin
      req_valid[r] = 0; req_x[r] = '0;
      wait (rst_n); @(posedge clk); #1;
      for (int t = 0; t < 25; t++) begin
        automatic acc_t x = acc_t'(int'($urandom % 4000) - 2000);
        automatic real  e;
        if (t == 0) x = 0;
        if (t == 1) x = 256;       // 1.0
        if (t == 2) x = 9 * 256;   // saturates? exp(9)*65536 < 2^32
        e = ref_exp(x);
        req_x[r] = x; req_valid[r] = 1;
        // handshake sampled at the clock edge: other requesters change valid in the same step
        begin automatic logic rr; do begin @(posedge clk); rr = req_ready[r]; end while (!rr); #1; end
        req_valid[r] = 0;
        while (!resp_valid[r]) begin @(posedge clk); #1; end
        checks++;
        if ((real'(resp_y) - e > 0.01 * e + 2.0) || (e - real'(resp_y) > 0.01 * e + 2.0)) begin
          failures++; $display("FAIL: req %0d x=%0d got %0d want %0f", r, x, resp_y, e);
        end
        @(posedge clk); #1;
      end
      done_cnt++;
    end
  end

  initial begin
    repeat (3) @(posedge clk); #1; rst_n = 1;
    wait (done_cnt == NR);
    `CHECK(n_served == NR * 25, $sformatf("every request served once (%0d)", n_served))
    `FINISH
  end
endmodule
