// pt_lowpass: Pan-Tompkins integer low-pass filter (first half of the
// 5-15 Hz band-pass).
//
//     H(z) = (1 - z^-6)^2 / (1 - z^-1)^2
//     y(n) = 2y(n-1) - y(n-2) + x(n) - 2x(n-6) + x(n-12)
//
// The recursion is computed exactly in integers. Its two poles at z = 1 are
// cancelled by zeros, so the output is a 12-tap FIR with DC gain 36; OUT_W =
// IN_W + 6 holds every output, and because the arithmetic is exact the
// wrap-around of the recursive state never shows in y.
//
// Timing: one sample per clock with clk_enable high; y(n) is registered on
// the edge that takes x(n). reset (asynchronous, active high) clears the
// delay line and the state.
module pt_lowpass #(
  parameter int unsigned IN_W  = 17,
  parameter int unsigned OUT_W = IN_W + 6
) (
  input  logic                    clk,
  input  logic                    reset,
  input  logic                    clk_enable,
  input  logic signed [IN_W-1:0]  x,
  output logic signed [OUT_W-1:0] y
);
  logic signed [IN_W-1:0]  xd [1:12];   // x(n-1) .. x(n-12)
  logic signed [OUT_W-1:0] y1, y2, y_next;

  always_comb
    y_next = (y1 <<< 1) - y2 + OUT_W'(x) - (OUT_W'(xd[6]) <<< 1) + OUT_W'(xd[12]);

  always_ff @(posedge clk or posedge reset)
    if (reset) begin
      xd <= '{default: '0};
      y1 <= '0;
      y2 <= '0;
    end else if (clk_enable) begin
      xd[1] <= x;
      for (int i = 2; i <= 12; i++) xd[i] <= xd[i-1];
      y2 <= y1;
      y1 <= y_next;
    end

  assign y = y1;
endmodule
