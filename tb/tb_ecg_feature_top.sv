// tb_ecg_feature_top: end-to-end run of the whole feature extractor at its
// default parameters on a synthetic ECG (200 samples/s, 1000 LSB/mV):
// 24 beats with R-R intervals between 120 and 200 samples (60 to 100 beats
// per minute), baseline wander, and one sharp artifact 40 samples after an
// R wave.
//
// Checked, after the thresholds have learned (from the 4th beat on):
//  - every reported R-R interval is within 2 samples of the true spacing of
//    the two beats it spans, and one R peak is reported per beat;
//  - every heart rate equals floor(12000 / R-R) of the interval before it;
//  - every QRS interval lies between 2 and 40 samples.
// Each mechanism must occur at least once, counted separately: gate opening,
// signal-peak and noise-peak threshold updates, QRS count, 100 ms hold-off,
// R peak, R peak rejected by the 50-sample guard, heart-rate division.
module tb_ecg_feature_top;
  import ecg_synth_pkg::*;
  logic clk = 0, reset = 1, en = 0;
  logic signed [15:0] In1 = 0;
  logic ce_out, gate, si_sig_peak, si_noise_peak, qrs_valid, qrs_active, qrs_holding;
  logic r_peak, r_rejected, rr_valid, hr_valid;
  logic [63:0] Out1;
  logic signed [23:0] sf;
  logic [47:0] thr_i;
  logic [23:0] thr_f;
  logic [15:0] qrs_width, rr, hr;
  ecg_pkg::features_t features;
  int checks = 0, failures = 0, n = 0;
  int c_gate = 0, c_sig = 0, c_noise = 0, c_qrs = 0, c_hold = 0, c_r = 0, c_rej = 0, c_hr = 0;
  int rs[$], rr_true[$], rr_got[$], r_at[$];
  int art;
  logic gate_q = 0, hold_q = 0;

  ecg_feature_top dut (.*, .clk_enable(en));

  always #5 clk = ~clk;
  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  always @(posedge clk) if (!reset) begin
    #1;
    if (en) begin
      if (gate && !gate_q) c_gate++;
      gate_q = gate;
      if (qrs_holding && !hold_q) c_hold++;
      hold_q = qrs_holding;
    end
    if (si_sig_peak) c_sig++;
    if (si_noise_peak) c_noise++;
    if (r_rejected) c_rej++;
    if (r_peak) begin c_r++; r_at.push_back(n); end
    if (qrs_valid) begin
      c_qrs++;
      if (n > rs[3] - 10) begin
        checks++;
        if (qrs_width < 2 || qrs_width > 40) begin failures++; $display("QRS width %0d at %0d", qrs_width, n); end
      end
    end
    if (rr_valid) rr_got.push_back(int'(rr));
    if (hr_valid) begin
      c_hr++; checks++;
      if (int'(hr) != 12000 / int'(rr) || features.hr != hr) begin
        failures++; $display("hr %0d for rr %0d", hr, rr); end
    end
  end

  initial begin
    int r = 100, nbeats = 24, total, idx;
    for (int i = 0; i < nbeats; i++) begin
      rs.push_back(r);
      r += 120 + 10 * ((i * 7) % 9);
    end
    art = rs[10] + 40;
    total = rs[nbeats - 1] + 200;
    repeat (3) @(posedge clk);
    reset = 0;
    while (n < total) begin
      @(negedge clk);
      en  = 1;
      In1 = ecg_sample(n, rs, art);
      @(posedge clk);
      n++;
    end
    repeat (30) @(posedge clk);
    // R peaks: from the 4th beat on, one per beat, spaced like the beats
    idx = 0;
    foreach (r_at[i]) if (r_at[i] > rs[3] - 20) idx++;
    checks++;
    if (idx != nbeats - 3) begin failures++; $display("R peaks after learning: %0d, beats %0d", idx, nbeats - 3); end
    // compare the last R-R values with the true spacings
    for (int i = 0; i < nbeats - 4 && i < rr_got.size(); i++) begin
      int g = rr_got[rr_got.size() - 1 - i];
      int t = rs[nbeats - 1 - i] - rs[nbeats - 2 - i];
      checks++;
      if (g < t - 2 || g > t + 2) begin failures++; $display("rr %0d true %0d", g, t); end
    end
    $display("mechanisms: gate=%0d sigpeak=%0d noisepeak=%0d qrs=%0d hold=%0d rpeak=%0d rejected=%0d hr=%0d",
             c_gate, c_sig, c_noise, c_qrs, c_hold, c_r, c_rej, c_hr);
    checks += 8;
    if (c_gate == 0)  begin failures++; $display("gate never opened"); end
    if (c_sig == 0)   begin failures++; $display("no signal-peak update"); end
    if (c_noise == 0) begin failures++; $display("no noise-peak update"); end
    if (c_qrs == 0)   begin failures++; $display("no QRS interval"); end
    if (c_hold == 0)  begin failures++; $display("no hold-off"); end
    if (c_r == 0)     begin failures++; $display("no R peak"); end
    if (c_rej == 0)   begin failures++; $display("no guard rejection"); end
    if (c_hr == 0)    begin failures++; $display("no heart rate"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
