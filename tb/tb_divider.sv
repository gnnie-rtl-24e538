// tb_divider: random signed numerators over positive denominators; the
// quotient must equal trunc(num * 2^16 / den) computed here, arrive
// W+FRAC+1 cycles after start, and a zero denominator must give 0.
`include "tb/tb_check.svh"
module tb_divider;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic start, ready, done;
  logic signed [31:0] num, quo;
  logic [31:0] den;
  divider #(.W(32), .FRAC(16)) dut (.*);
  `WATCHDOG(20000)
  initial begin
    start = 0; num = 0; den = 0;
    repeat (3) @(posedge clk); #1; rst_n = 1;
    for (int t = 0; t < 60; t++) begin
      automatic longint n = longint'($signed($urandom % 2000000)) - 1000000;
      automatic longint d = (t % 3 == 0) ? longint'($urandom % 5000000 + 1) : longint'($urandom % 300000 + 1);
      automatic longint q;
      automatic int cyc = 0;
      if (t == 5) d = 0;
      q = (d == 0) ? 0 : ((n < 0 ? -n : n) * 65536) / d;
      if (n < 0) q = -q;
      num = 32'(n); den = 32'(d); start = 1;
      @(posedge clk); #1; start = 0;
      while (!done && cyc < 100) begin @(posedge clk); #1; cyc++; end
      `CHECK(quo == 32'(q), $sformatf("%0d/%0d got %0d want %0d", n, d, quo, q))
      `CHECK(cyc == 49, $sformatf("latency %0d", cyc))
    end
    `FINISH
  end
endmodule
