// derivative: Pan-Tompkins five-point derivative (drawn as the '30 Hz HPF'
// stage of the detector).
//
//     y(n) = (2x(n) + x(n-1) - x(n-3) - 2x(n-4)) / 8
//
// The tap signs follow the transfer function 1/10 (2 + z^-1 - z^-3 - 2z^-4);
// the printed difference equation has other signs (which would not make a
// derivative) and a scale of 1/8, and the 1/8 is kept because it is a shift.
// The division is an arithmetic shift (floor). |y| <= 6/8 max|x|, so the
// output has the input's width.
//
// Timing: one sample per clock with clk_enable high; y(n) is registered on
// the edge that takes x(n). reset: asynchronous, active high.
module derivative #(
  parameter int unsigned W = 24
) (
  input  logic                clk,
  input  logic                reset,
  input  logic                clk_enable,
  input  logic signed [W-1:0] x,
  output logic signed [W-1:0] y
);
  localparam int unsigned AW = W + 3;
  logic signed [W-1:0]  xd [1:4];       // x(n-1) .. x(n-4)
  logic signed [AW-1:0] sum;

  always_comb
    sum = (AW'(x) <<< 1) + AW'(xd[1]) - AW'(xd[3]) - (AW'(xd[4]) <<< 1);

  always_ff @(posedge clk or posedge reset)
    if (reset) begin
      xd <= '{default: '0};
      y  <= '0;
    end else if (clk_enable) begin
      xd[1] <= x;
      for (int i = 2; i <= 4; i++) xd[i] <= xd[i-1];
      y <= W'(sum >>> 3);
    end
endmodule
