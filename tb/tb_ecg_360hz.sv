// tb_ecg_360hz: the whole feature extractor on ECG sampled at 360 samples/s,
// the rate of the MIT-BIH arrhythmia recordings, with SAMPLE_RATE = 360.
// The filters keep their coefficients, so their band moves up to about
// 9-27 Hz; the check is that beats are still found. 30 synthetic beats with
// R-R intervals from 0.6 to 1.15 s (52-100 beats/min), baseline wander, and
// at two points a premature beat 0.45 s after the previous one.
// From the 4th beat on: one R peak per beat, R-R within 3 samples of the
// true spacing, HR = floor(21600 / R-R), QRS widths from 2 to 72 samples.
module tb_ecg_360hz;
  import ecg_synth_pkg::*;
  localparam int FSR = 360;
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
  int checks = 0, failures = 0, n = 0, c_hr = 0;
  int rs[$], rr_got[$], r_at[$];

  ecg_feature_top #(.SAMPLE_RATE(FSR)) dut (.*, .clk_enable(en));

  always #5 clk = ~clk;
  initial begin
    repeat (400000) @(posedge clk);
    failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  always @(posedge clk) if (!reset) begin
    #1;
    if (r_peak) r_at.push_back(n);
    if (qrs_valid && n > rs[3] - 20) begin
      checks++;
      if (qrs_width < 2 || qrs_width > 72) begin failures++; $display("QRS width %0d", qrs_width); end
    end
    if (rr_valid) rr_got.push_back(int'(rr));
    if (hr_valid) begin
      c_hr++; checks++;
      if (int'(hr) != 21600 / int'(rr)) begin failures++; $display("hr %0d for rr %0d", hr, rr); end
    end
  end

  initial begin
    int r = 150, nbeats = 30, total, idx;
    for (int i = 0; i < nbeats; i++) begin
      rs.push_back(r);
      if (i == 12 || i == 21) r += 162;                    // premature beat, 0.45 s
      else r += 216 + 18 * ((i * 5) % 12);                  // 0.6 .. 1.15 s
    end
    total = rs[nbeats - 1] + 400;
    repeat (3) @(posedge clk);
    reset = 0;
    while (n < total) begin
      @(negedge clk);
      en  = 1;
      In1 = ecg_sample(n, rs, -1, FSR);
      @(posedge clk);
      n++;
    end
    repeat (30) @(posedge clk);
    idx = 0;
    foreach (r_at[i]) if (r_at[i] > rs[3] - 20) idx++;
    checks++;
    if (idx != nbeats - 3) begin failures++; $display("R peaks after learning: %0d, beats %0d", idx, nbeats - 3); end
    for (int i = 0; i < nbeats - 4 && i < rr_got.size(); i++) begin
      int g = rr_got[rr_got.size() - 1 - i];
      int t = rs[nbeats - 1 - i] - rs[nbeats - 2 - i];
      checks++;
      if (g < t - 3 || g > t + 3) begin failures++; $display("rr %0d true %0d", g, t); end
    end
    checks++; if (c_hr < nbeats - 4) begin failures++; $display("heart rates %0d", c_hr); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
