// dc_removal: baseline-wander ("DC noise") removal.
//
// The raw ECG minus its 2 Hz low-passed copy (lpf_2hz), as in the detector's
// block diagram: the input goes to the '+' side of a subtractor and to the
// low-pass, whose output goes to the '-' side. The difference is registered
// and is W+1 bits wide so it cannot overflow.
//
// Timing: x is taken on a clock with clk_enable high; y(n) = x(n) - b(n-1),
// where b(n-1) is the low-pass output of the previous sample, appears after
// that clock edge (one sample of latency). reset: asynchronous, active high.
module dc_removal #(
  parameter int unsigned W = 16
) (
  input  logic                clk,
  input  logic                reset,
  input  logic                clk_enable,
  input  logic signed [W-1:0] x,
  output logic signed [W:0]   y
);
  logic signed [W-1:0] base;

  lpf_2hz #(.W(W)) u_2lpf (
    .clk, .reset, .clk_enable, .x, .y(base)
  );

  always_ff @(posedge clk or posedge reset)
    if (reset)           y <= '0;
    else if (clk_enable) y <= (W+1)'(x) - (W+1)'(base);
endmodule
