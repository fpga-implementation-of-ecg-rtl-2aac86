// feature_extractor: extracts three features per beat from the integrated
// signal SI: the QRS interval (qrs_width), the R-peak times and R-R interval
// (rr_interval) and the heart rate 60*FS/RR (heart_rate, started by each new
// R-R value). The three run in parallel on every sample.
//
// Interface and timing: si and gate are sampled on clocks with clk_enable
// high; see the three units for their pulse timing. features collects the
// latest value of each (registered in the units, no extra latency).
// reset: asynchronous, active high.
module feature_extractor #(
  parameter int unsigned W  = ecg_pkg::SI_W,
  parameter int unsigned FS = ecg_pkg::FS
) (
  input  logic             clk,
  input  logic             reset,
  input  logic             clk_enable,
  input  logic [W-1:0]     si,
  input  logic             gate,
  output logic [ecg_pkg::CNT_W-1:0] qrs_width,
  output logic             qrs_valid,
  output logic             qrs_active,
  output logic             qrs_holding,
  output logic             r_peak,
  output logic             r_rejected,
  output logic [ecg_pkg::CNT_W-1:0] rr,
  output logic             rr_valid,
  output logic [ecg_pkg::HR_W-1:0]  hr,
  output logic             hr_valid,
  output ecg_pkg::features_t        features
);
  logic hr_busy;

  qrs_width #(.W(W), .CNT_W(ecg_pkg::CNT_W), .HOLD(FS / 10)) u_qrs (
    .clk, .reset, .clk_enable, .y(si), .gate,
    .width(qrs_width), .valid(qrs_valid), .active(qrs_active), .holding(qrs_holding)
  );

  rr_interval #(.W(W), .CNT_W(ecg_pkg::CNT_W), .GUARD(ecg_pkg::RR_GUARD)) u_rr (
    .clk, .reset, .clk_enable, .y(si), .gate,
    .r_peak, .rr, .rr_valid, .rejected(r_rejected)
  );

  heart_rate #(.FS(FS), .CNT_W(ecg_pkg::CNT_W), .HR_W(ecg_pkg::HR_W)) u_hr (
    .clk, .reset, .rr, .start(rr_valid), .hr, .valid(hr_valid), .busy(hr_busy)
  );

  assign features = '{qrs_width: qrs_width, rr: rr, hr: hr};
endmodule
