// tb_rr_interval: humps whose maxima fall at known samples. Checks that
// the first accepted peak gives no R-R value, that every later one gives the
// distance in samples to the previous accepted peak, that a second maximum
// 20 samples after a peak is rejected by the 50-sample guard, and that a
// hump with the gate shut is ignored.
module tb_rr_interval;
  logic clk = 0, reset = 1, en = 0, gate = 0;
  logic [47:0] y = 0;
  logic r_peak, rr_valid, rejected;
  logic [15:0] rr;
  int checks = 0, failures = 0, npk = 0, nrej = 0, n = 0;
  int got[$];
  rr_interval dut (.clk, .reset, .clk_enable(en), .y, .gate, .r_peak, .rr, .rr_valid, .rejected);
  always #5 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  always @(posedge clk) if (!reset) begin
    if (r_peak) npk++;
    if (rr_valid) got.push_back(int'(rr));
  end
  task automatic step(input int v, input bit g);
    if ($urandom_range(0, 3) == 0) begin @(negedge clk); en = 0; end
    @(negedge clk); en = 1; y = 48'(v); gate = g;
    #1; if (rejected) nrej++;
    @(posedge clk); n++;
  endtask
  // hump with its maximum at sample index 'pk' (absolute), 10-sample sides
  task automatic hump_at(int pk, bit g, int h);
    while (n < pk - 10) step(0, 0);
    for (int i = 0; i <= 10; i++) step(h * (i + 1), g);
    for (int i = 9; i >= 0; i--) step(h * (i + 1), g);
  endtask
  initial begin
    int exp_rr[$] = '{120, 95, 140, 130};
    repeat (3) @(posedge clk); reset = 0;
    hump_at(50, 1, 100);      // first: no R-R
    hump_at(170, 1, 100);     // 120
    hump_at(190, 1, 150);     // 20 later: rejected by the guard
    hump_at(265, 1, 100);     // 95
    hump_at(330, 0, 100);     // gate shut: ignored
    hump_at(405, 1, 100);     // 140
    hump_at(535, 1, 100);     // 130
    repeat (30) step(0, 0);
    checks++; if (npk != 5) begin failures++; $display("R peaks %0d", npk); end
    checks++; if (nrej != 1) begin failures++; $display("rejections %0d", nrej); end
    checks++; if (got.size() != exp_rr.size()) begin failures++; $display("rr count %0d", got.size()); end
    foreach (exp_rr[i]) if (i < got.size()) begin
      checks++; if (got[i] != exp_rr[i]) begin failures++; $display("rr[%0d]=%0d exp %0d", i, got[i], exp_rr[i]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
