// bandpass_5_15: the detector's 5-15 Hz band-pass filter, a cascade of the
// Pan-Tompkins low-pass (pt_lowpass) and high-pass (pt_highpass). Its output
// is the filtered ECG, called SF, which also feeds the SF threshold.
//
// Gain: 36 from the low-pass, about 1 from the high-pass. Widths: IN_W in,
// IN_W + 7 out. Timing: two samples of register latency plus the filters'
// own group delay (5 + 15.5 samples). reset: asynchronous, active high.
module bandpass_5_15 #(
  parameter int unsigned IN_W = 17
) (
  input  logic                     clk,
  input  logic                     reset,
  input  logic                     clk_enable,
  input  logic signed [IN_W-1:0]   x,
  output logic signed [IN_W+6:0]   y
);
  logic signed [IN_W+5:0] lp;

  pt_lowpass  #(.IN_W(IN_W))     u_lpf (.clk, .reset, .clk_enable, .x,      .y(lp));
  pt_highpass #(.IN_W(IN_W + 6)) u_hpf (.clk, .reset, .clk_enable, .x(lp),  .y);
endmodule
