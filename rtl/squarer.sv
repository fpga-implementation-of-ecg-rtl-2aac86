// squarer: point-by-point squaring of the slope, y(n) = x(n)^2, which makes
// every sample positive and emphasises the steep QRS slopes.
//
// Full-precision signed product, 2*IN_W bits, returned as an unsigned value
// (the square is never negative). Registered: one sample of latency.
// reset: asynchronous, active high.
module squarer #(
  parameter int unsigned IN_W = 24
) (
  input  logic                   clk,
  input  logic                   reset,
  input  logic                   clk_enable,
  input  logic signed [IN_W-1:0] x,
  output logic [2*IN_W-1:0]      y
);
  logic signed [2*IN_W-1:0] p;

  always_comb p = (2*IN_W)'(x) * (2*IN_W)'(x);

  always_ff @(posedge clk or posedge reset)
    if (reset)           y <= '0;
    else if (clk_enable) y <= p;
endmodule
