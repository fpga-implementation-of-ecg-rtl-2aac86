// tb_feature_extractor: integrated-signal humps every 150, 160, 120 and 200
// samples, each rising 16 samples, gate open above a quarter of the height.
// Expected per beat: QRS width = rising samples above the gate level (12),
// R-R = hump spacing, HR = floor(12000/R-R), and the features struct
// carrying the same values.
module tb_feature_extractor;
  logic clk = 0, reset = 1, en = 0, gate = 0;
  logic [47:0] si = 0;
  logic [15:0] qrs_width, rr, hr;
  logic qrs_valid, qrs_active, qrs_holding, r_peak, r_rejected, rr_valid, hr_valid;
  ecg_pkg::features_t features;
  int checks = 0, failures = 0, n = 0, nq = 0, nr = 0, nh = 0;
  feature_extractor dut (.clk, .reset, .clk_enable(en), .si, .gate, .qrs_width, .qrs_valid,
    .qrs_active, .qrs_holding, .r_peak, .r_rejected, .rr, .rr_valid, .hr, .hr_valid, .features);
  always #5 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  int exp_rr[$] = '{150, 160, 120, 200};
  always @(posedge clk) if (!reset) begin
    #1;
    if (qrs_valid) begin
      nq++; checks++;
      if (qrs_width != 12) begin failures++; $display("width %0d", qrs_width); end
    end
    if (rr_valid) begin
      checks++;
      if (nr < exp_rr.size() && int'(rr) != exp_rr[nr]) begin failures++; $display("rr %0d", rr); end
      nr++;
    end
    if (hr_valid) begin
      checks += 2;
      if (int'(hr) != 12000 / int'(rr)) begin failures++; $display("hr %0d rr %0d", hr, rr); end
      if (features.hr != hr || features.rr != rr || features.qrs_width != qrs_width) begin
        failures++; $display("features struct"); end
      nh++;
    end
  end
  task automatic step(input int v);
    @(negedge clk); en = 1; si = 48'(v); gate = (v > 4000);
    @(posedge clk); n++;
  endtask
  initial begin
    int starts[$] = '{20, 170, 330, 450, 650};
    repeat (3) @(posedge clk); reset = 0;
    foreach (starts[b]) begin
      while (n < starts[b]) step(0);
      for (int i = 1; i <= 16; i++) step(1000 * i);   // gate above 4000: samples 5..16
      for (int i = 15; i >= 0; i--) step(1000 * i);
    end
    repeat (40) step(0);
    checks++; if (nq != 5 || nr != 4 || nh != 4) begin failures++; $display("counts %0d %0d %0d", nq, nr, nh); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
