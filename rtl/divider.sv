// divider: sequential divider for the GAT softmax.
// Computes q = (num << FRAC) / den for a signed numerator and a positive
// denominator, i.e. the numerator sum divided by the sum of exponentials, with
// the denominator's FRAC fraction bits cancelled. Restoring radix-2 division,
// one quotient bit per cycle: a request accepted on start/ready returns on
// done after W+FRAC+1 cycles. A zero denominator yields 0.
// The position of the divider between output buffer and activation unit
// follows the paper's block diagram; its algorithm is this design's choice.
module divider #(
  parameter int W    = 32,
  parameter int FRAC = 16
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  output logic                ready,
  input  logic signed [W-1:0] num,
  input  logic [W-1:0]        den,
  output logic                done,
  output logic signed [W-1:0] quo
);
  localparam int NW = W + FRAC;
  localparam int CW = $clog2(NW + 1);
  logic [NW-1:0] dividend;
  logic [W:0]    rem;
  logic [NW-1:0] q;
  logic [W-1:0]  d;
  logic          neg, busy;
  logic [CW-1:0] cnt;
  logic [W:0]    trial;

  assign ready = !busy;
  assign trial = {rem[W-1:0], dividend[NW-1]} - {1'b0, d};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; quo <= '0; dividend <= '0; rem <= '0;
      q <= '0; d <= '0; neg <= 1'b0; cnt <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          busy     <= 1'b1;
          neg      <= num[W-1];
          dividend <= {(num[W-1] ? W'(-num) : W'(num)), FRAC'(0)};
          d        <= den;
          rem      <= '0;
          q        <= '0;
          cnt      <= CW'(NW);
        end
      end else if (cnt != '0) begin
        if (!trial[W]) rem <= trial;
        else           rem <= {rem[W-1:0], dividend[NW-1]};
        q        <= {q[NW-2:0], !trial[W]};
        dividend <= {dividend[NW-2:0], 1'b0};
        cnt      <= cnt - 1'b1;
      end else begin
        busy <= 1'b0;
        done <= 1'b1;
        if (d == '0) quo <= '0;
        else         quo <= neg ? -W'(q) : W'(q);
      end
    end
  end
endmodule
