// qrs_threshold: thresholds on SI and SF and the gate that lets a beat
// through to the feature extractor only when both signals crossed their own
// threshold.
//
// Two adaptive_threshold units run side by side, one on SI and one on |SF|.
// The band-passed SF peaks near the start of a QRS complex, while SI (which
// integrates over 32 samples) climbs over its threshold later, so an SF
// crossing is remembered in sf_seen until SI falls back below its threshold
// at the end of the complex. gate = (SI > T_I) and (SF crossed); this
// latching rule is this design's own choice.
//
// Timing: gate and the thresholds are valid in the same clock as si/sf
// (combinational from registers); sf_seen updates on clocks with clk_enable
// high. reset: asynchronous, active high.
module qrs_threshold #(
  parameter int unsigned SI_W = 48,
  parameter int unsigned SF_W = 24
) (
  input  logic                   clk,
  input  logic                   reset,
  input  logic                   clk_enable,
  input  logic [SI_W-1:0]        si,
  input  logic signed [SF_W-1:0] sf,
  output logic [SI_W-1:0]        thr_i,
  output logic [SF_W-1:0]        thr_f,
  output logic                   si_above,
  output logic                   sf_above,
  output logic                   si_sig_peak,
  output logic                   si_noise_peak,
  output logic                   gate
);
  logic [SF_W-1:0] sf_mag;
  logic            si_peak, sf_peak, sf_sig_peak;
  logic            si_above_q, sf_seen;
  logic [SI_W-1:0] si_spk, si_npk;
  logic [SF_W-1:0] sf_spk, sf_npk;

  assign sf_mag = sf[SF_W-1] ? SF_W'(-sf) : SF_W'(sf);

  adaptive_threshold #(.W(SI_W)) u_thr_si (
    .clk, .reset, .clk_enable, .x(si), .thr(thr_i), .spk(si_spk), .npk(si_npk),
    .above(si_above), .peak(si_peak), .sig_peak(si_sig_peak)
  );
  adaptive_threshold #(.W(SF_W)) u_thr_sf (
    .clk, .reset, .clk_enable, .x(sf_mag), .thr(thr_f), .spk(sf_spk), .npk(sf_npk),
    .above(sf_above), .peak(sf_peak), .sig_peak(sf_sig_peak)
  );

  assign si_noise_peak = si_peak && !si_sig_peak;
  assign gate          = si_above && (sf_seen || sf_above);

  always_ff @(posedge clk or posedge reset)
    if (reset) begin
      si_above_q <= 1'b0;
      sf_seen    <= 1'b0;
    end else if (clk_enable) begin
      si_above_q <= si_above;
      if (si_above_q && !si_above) sf_seen <= 1'b0;
      else if (sf_above)           sf_seen <= 1'b1;
    end
endmodule
