// ecg_feature_top: ECG feature extractor, one sample per enabled clock.
//
//   In1 -> qrs_detector -> SI (Out1), SF -> qrs_threshold -> gate
//                                  SI, gate -> feature_extractor -> QRS width, R-R, HR
//
// The detector is the Pan-Tompkins chain (baseline removal, 5-15 Hz
// band-pass, derivative, squaring, 32-sample moving window). Adaptive
// thresholds on SI and SF open the gate for a beat; the feature extractor
// measures the QRS rise time, time-stamps R peaks and divides 60*FS by the
// R-R interval. Results leave on ports for whatever evaluates them.
//
// SAMPLE_RATE (default 200) sets the heart-rate constant 60*SAMPLE_RATE and
// the 100 ms QRS hold-off; the filter coefficients are fixed, so at another
// rate their pass band moves in proportion (at 360 Hz: about 9-27 Hz).
//
// Interface: clk, asynchronous active-high reset, clk_enable as the sample
// strobe, 16-bit signed In1; ce_out and the 64-bit Out1 (SI) as in the
// detector's port list; features with one-clock valid pulses.
module ecg_feature_top
  import ecg_pkg::*;
#(
  parameter int unsigned SAMPLE_RATE = ecg_pkg::FS   // samples per second
) (
  input  logic                    clk,
  input  logic                    reset,
  input  logic                    clk_enable,
  input  logic signed [IN_W-1:0]  In1,
  output logic                    ce_out,
  output logic [OUT_W-1:0]        Out1,
  output logic signed [SF_W-1:0]  sf,
  output logic [SI_W-1:0]         thr_i,
  output logic [SF_W-1:0]         thr_f,
  output logic                    gate,
  output logic                    si_sig_peak,
  output logic                    si_noise_peak,
  output logic [CNT_W-1:0]        qrs_width,
  output logic                    qrs_valid,
  output logic                    qrs_active,
  output logic                    qrs_holding,
  output logic                    r_peak,
  output logic                    r_rejected,
  output logic [CNT_W-1:0]        rr,
  output logic                    rr_valid,
  output logic [HR_W-1:0]         hr,
  output logic                    hr_valid,
  output features_t               features
);
  logic [SI_W-1:0] si;
  logic            si_above, sf_above;

  qrs_detector #(.IN_W(IN_W), .OUT_W(OUT_W)) u_detector (
    .clk, .reset, .clk_enable, .In1, .ce_out, .Out1, .sf
  );

  assign si = SI_W'(Out1);

  qrs_threshold #(.SI_W(SI_W), .SF_W(SF_W)) u_threshold (
    .clk, .reset, .clk_enable, .si, .sf, .thr_i, .thr_f,
    .si_above, .sf_above, .si_sig_peak, .si_noise_peak, .gate
  );

  feature_extractor #(.W(SI_W), .FS(SAMPLE_RATE)) u_features (
    .clk, .reset, .clk_enable, .si, .gate,
    .qrs_width, .qrs_valid, .qrs_active, .qrs_holding,
    .r_peak, .r_rejected, .rr, .rr_valid, .hr, .hr_valid, .features
  );
endmodule
