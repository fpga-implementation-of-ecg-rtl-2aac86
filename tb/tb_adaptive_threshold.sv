// tb_adaptive_threshold: drives humps of random height and small noise
// wiggles into the threshold unit and compares thr, above, peak and
// sig_peak every sample with a reference model; then checks that after many
// peaks of 1000 (signal) and 100 (noise) the threshold sits near
// 100 + (1000-100)/4 = 325.
module tb_adaptive_threshold;
  // Reference model: peaks are samples not exceeded by their successor after
  // a rise; SPK/NPK move 1/8 of the way to each peak (floor division);
  // T = NPK + floor((SPK-NPK)/4).
  class thr_model;
    longint spk = 0, npk = 0, x1 = 0;
    bit     rising = 0;
    longint thr;
    bit     peak, sig_peak, above;
    // evaluate one strobe with sample x; outputs are those seen before the edge
    function void step(longint x);
      thr      = npk + ((spk - npk) >>> 2);
      peak     = rising && (x <= x1);
      sig_peak = peak && (x1 > thr);
      above    = x > thr;
      if (sig_peak)  spk = spk + ((x1 - spk) >>> 3);
      else if (peak) npk = npk + ((x1 - npk) >>> 3);
      rising = x > x1;
      x1     = x;
    endfunction
  endclass
  localparam int W = 16;
  logic clk = 0, reset = 1, en = 0;
  logic [W-1:0] x = 0, thr, spk, npk;
  logic above, peak, sig_peak;
  int checks = 0, failures = 0, n_sig = 0, n_noise = 0;
  thr_model m = new();
  adaptive_threshold #(.W(W)) dut (.clk, .reset, .clk_enable(en), .x, .thr, .spk, .npk,
                                   .above, .peak, .sig_peak);
  always #5 clk = ~clk;
  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  // present v until a strobe takes it; gaps in the strobe come at random
  task automatic step(input logic [W-1:0] v);
    logic e;
    do begin
      e = ($urandom_range(0, 4) != 0);
      @(negedge clk); x = v; en = e;
      #1;
      if (e) begin
        m.step(longint'(v));
        checks++;
        if (longint'(thr) != m.thr || above != m.above || peak != m.peak || sig_peak != m.sig_peak) begin
          failures++;
          if (failures < 10) $display("thr=%0d/%0d above=%b/%b peak=%b/%b sig=%b/%b", thr, m.thr,
                                      above, m.above, peak, m.peak, sig_peak, m.sig_peak);
        end
        n_sig += sig_peak; n_noise += (peak && !sig_peak);
      end else begin
        checks++; if (peak || sig_peak) begin failures++; $display("peak without strobe"); end
      end
      @(posedge clk);
    end while (!e);
  endtask
  task automatic hump(int h, int len);
    for (int i = 1; i <= len; i++) step(W'(h * i / len));
    for (int i = len - 1; i >= 0; i--) step(W'(h * i / len));
  endtask
  initial begin
    repeat (3) @(posedge clk); reset = 0;
    for (int b = 0; b < 60; b++) begin
      hump($urandom_range(200, 5000), $urandom_range(3, 12));
      for (int i = 0; i < 20; i++) step(W'($urandom_range(0, 40)));
    end
    for (int b = 0; b < 80; b++) begin
      hump(1000, 8);
      hump(100, 8);
    end
    checks++; if (thr < 300 || thr > 350) begin failures++; $display("settled thr=%0d", thr); end
    checks++; if (n_sig == 0 || n_noise == 0) begin failures++; $display("sig %0d noise %0d", n_sig, n_noise); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
