// adaptive_threshold: Pan-Tompkins style adaptive threshold for one
// non-negative signal (the integrated signal SI, or the magnitude of SF).
//
// A local peak is a sample that was larger than the one before it and is
// not exceeded by the one after it. Each peak is classed as a signal peak if
// it lies above the current threshold, otherwise as a noise peak, and moves
// the matching running estimate one eighth of the way towards it:
//     SPK += (PEAK - SPK)/8   or   NPK += (PEAK - NPK)/8
// The threshold is a fixed blend of the two:  T = NPK + (SPK - NPK)/4.
// The 1/8 and 1/4 weights are those of the original Pan-Tompkins detector;
// both estimates start at zero and learn from the first peaks.
//
// Interface and timing: x is sampled on clocks with clk_enable high. peak
// and sig_peak are combinational pulses in the clock that takes the sample
// after the peak; spk/npk/thr change on that clock's edge. above = x > thr
// (combinational). reset: asynchronous, active high.
module adaptive_threshold #(
  parameter int unsigned W = 48
) (
  input  logic         clk,
  input  logic         reset,
  input  logic         clk_enable,
  input  logic [W-1:0] x,
  output logic [W-1:0] thr,
  output logic [W-1:0] spk,
  output logic [W-1:0] npk,
  output logic         above,
  output logic         peak,
  output logic         sig_peak
);
  logic [W-1:0]   x1;          // previous sample, the peak candidate
  logic           rising;      // x1 was larger than the sample before it
  logic signed [W+1:0] spk_s, npk_s, x1_s, d, t;

  always_comb begin
    spk_s    = signed'({2'b00, spk});
    npk_s    = signed'({2'b00, npk});
    x1_s     = signed'({2'b00, x1});
    t        = npk_s + ((spk_s - npk_s) >>> 2);
    thr      = W'(t);
    peak     = clk_enable && rising && (x <= x1);
    sig_peak = peak && (x1 > thr);
    above    = x > thr;
    d        = x1_s - (sig_peak ? spk_s : npk_s);
  end

  always_ff @(posedge clk or posedge reset)
    if (reset) begin
      x1     <= '0;
      rising <= 1'b0;
      spk    <= '0;
      npk    <= '0;
    end else if (clk_enable) begin
      x1     <= x;
      rising <= x > x1;
      if (sig_peak)  spk <= W'(spk_s + (d >>> 3));
      else if (peak) npk <= W'(npk_s + (d >>> 3));
    end
endmodule
