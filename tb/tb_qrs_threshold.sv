// tb_qrs_threshold: drives SI humps and bipolar SF bursts (sometimes both,
// sometimes only one of them) and checks both thresholds and the gate
// against reference models. The gate must open only when SI is above its
// threshold and SF has crossed its own since SI last fell below.
module tb_qrs_threshold;
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
  logic clk = 0, reset = 1, en = 0;
  logic [47:0] si = 0, thr_i;
  logic signed [23:0] sf = 0;
  logic [23:0] thr_f;
  logic si_above, sf_above, si_sig_peak, si_noise_peak, gate;
  int checks = 0, failures = 0, gates = 0, blocked = 0;
  bit seen = 0, si_above_q = 0;
  thr_model mi = new(), mf = new();
  qrs_threshold dut (.clk, .reset, .clk_enable(en), .si, .sf, .thr_i, .thr_f,
                     .si_above, .sf_above, .si_sig_peak, .si_noise_peak, .gate);
  always #5 clk = ~clk;
  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic step(input longint vi, input longint vf);
    bit eg;
    @(negedge clk); si = 48'(vi); sf = 24'(vf); en = 1;
    #1;
    mi.step(vi);
    mf.step(vf < 0 ? -vf : vf);
    eg = mi.above && (seen || mf.above);
    checks++;
    if (longint'(thr_i) != mi.thr || longint'(thr_f) != mf.thr || gate != eg ||
        si_sig_peak != mi.sig_peak || si_noise_peak != (mi.peak && !mi.sig_peak)) begin
      failures++;
      if (failures < 10) $display("thr_i %0d/%0d thr_f %0d/%0d gate %b/%b", thr_i, mi.thr, thr_f, mf.thr, gate, eg);
    end
    if (gate) gates++;
    if (mi.above && !eg) blocked++;
    if (si_above_q && !mi.above) seen = 0; else if (mf.above) seen = 1;
    si_above_q = mi.above;
    @(posedge clk);
  endtask
  initial begin
    repeat (3) @(posedge clk); reset = 0;
    for (int b = 0; b < 80; b++) begin
      int kind = $urandom_range(0, 3);          // 0: both, 1: SI only, 2: SF only, 3: both
      int hi = (kind == 2) ? 0 : $urandom_range(2000, 9000);
      int hf = (kind == 1) ? 0 : $urandom_range(500, 3000);
      for (int i = 0; i < 60; i++) begin
        longint vi = (i < 30) ? hi * i / 30 : hi * (60 - i) / 30;
        longint vf = (i >= 2 && i < 14) ? ((i % 4 < 2) ? hf : -hf) : 0;
        step(vi + $urandom_range(0, 20), vf + $urandom_range(0, 10));
      end
      for (int i = 0; i < 30; i++) step($urandom_range(0, 50), $urandom_range(0, 40));
    end
    checks++; if (gates == 0 || blocked == 0) begin failures++; $display("gate %0d blocked %0d", gates, blocked); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
