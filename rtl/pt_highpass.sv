// pt_highpass: Pan-Tompkins integer high-pass filter (second half of the
// 5-15 Hz band-pass).
//
//     y(n) = y(n-1) - x(n)/32 + x(n-16) - x(n-17) + x(n-32)/32
//
// that is, a 16-sample delay minus a 32-sample moving average. The printed
// difference equation carries -x(n-16); with that sign the filter would have
// a large DC gain instead of a high-pass response, so the sign of the
// original Pan-Tompkins filter is used. The accumulator holds 32*y exactly:
//     a(n) = a(n-1) - x(n) + 32x(n-16) - 32x(n-17) + x(n-32)
// and the output is floor(a/32). The impulse response sums to less than 2 in
// magnitude, so OUT_W = IN_W + 1 holds every output.
//
// Timing: one sample per clock with clk_enable high; y(n) is registered on
// the edge that takes x(n). reset: asynchronous, active high.
module pt_highpass #(
  parameter int unsigned IN_W  = 23,
  parameter int unsigned OUT_W = IN_W + 1
) (
  input  logic                    clk,
  input  logic                    reset,
  input  logic                    clk_enable,
  input  logic signed [IN_W-1:0]  x,
  output logic signed [OUT_W-1:0] y
);
  localparam int unsigned AW = IN_W + 7;
  logic signed [IN_W-1:0] xd [1:32];    // x(n-1) .. x(n-32)
  logic signed [AW-1:0]   acc, acc_next;

  always_comb
    acc_next = acc - AW'(x) + (AW'(xd[16]) <<< 5) - (AW'(xd[17]) <<< 5) + AW'(xd[32]);

  always_ff @(posedge clk or posedge reset)
    if (reset) begin
      xd  <= '{default: '0};
      acc <= '0;
    end else if (clk_enable) begin
      xd[1] <= x;
      for (int i = 2; i <= 32; i++) xd[i] <= xd[i-1];
      acc <= acc_next;
    end

  assign y = OUT_W'(acc >>> 5);
endmodule
