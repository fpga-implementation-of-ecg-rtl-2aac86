// rr_interval: R-peak detection and R-R interval on the integrated signal.
//
// The slope p(n) = y(n) - y(n-1) is tracked; a sample where p turns from
// positive to zero or negative marks a local maximum, taken as the R peak.
// A maximum is accepted when the gate is open (both thresholds crossed) and
// at least GUARD samples (50) have passed since the previous accepted peak;
// the second rule is how this design reads the "past 50 samples" test of the
// R-R procedure. A free-running sample counter time-stamps each accepted
// peak; R-R = stamp - previous stamp (modulo 2^CNT_W). The first peak after
// reset has no predecessor and produces no R-R value.
//
// Interface and timing: y and gate are sampled on clocks with clk_enable
// high. r_peak and rr_valid are one-clock pulses registered on the edge of
// the sample after the maximum; rr holds the last interval in samples.
// reset: asynchronous, active high.
module rr_interval #(
  parameter int unsigned W     = 48,
  parameter int unsigned CNT_W = 16,
  parameter int unsigned GUARD = 50
) (
  input  logic             clk,
  input  logic             reset,
  input  logic             clk_enable,
  input  logic [W-1:0]     y,
  input  logic             gate,
  output logic             r_peak,
  output logic [CNT_W-1:0] rr,
  output logic             rr_valid,
  output logic             rejected
);
  localparam int unsigned GW = $clog2(GUARD + 1);
  logic [W-1:0]     y_prev;
  logic             p_prev_pos;   // p(n-1) > 0
  logic [CNT_W-1:0] countval, rprev;
  logic [GW-1:0]    since;
  logic             have_prev, candidate, accept;

  always_comb begin
    candidate = clk_enable && p_prev_pos && (y <= y_prev);
    accept    = candidate && gate && (!have_prev || since >= GW'(GUARD));
    rejected  = candidate && gate && !accept;
  end

  always_ff @(posedge clk or posedge reset)
    if (reset) begin
      y_prev     <= '0;
      p_prev_pos <= 1'b0;
      countval   <= '0;
      rprev      <= '0;
      since      <= '0;
      have_prev  <= 1'b0;
      rr         <= '0;
      r_peak     <= 1'b0;
      rr_valid   <= 1'b0;
    end else begin
      r_peak   <= 1'b0;
      rr_valid <= 1'b0;
      if (clk_enable) begin
        y_prev     <= y;
        p_prev_pos <= y > y_prev;
        countval   <= countval + 1'b1;
        if (since < GW'(GUARD)) since <= since + 1'b1;
        if (accept) begin
          r_peak    <= 1'b1;
          rprev     <= countval;
          have_prev <= 1'b1;
          since     <= '0;
          if (have_prev) begin
            rr       <= countval - rprev;
            rr_valid <= 1'b1;
          end
        end
      end
    end
endmodule
