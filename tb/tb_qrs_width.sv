// tb_qrs_width: three humps with a hand-computed answer.
//  hump 1 rises 30 samples by 100, gate open above 1250: counting starts at
//         1300 (rise sample 13) and lasts to the peak, width 18; a bump on
//         its falling edge 5 samples after the peak lies inside the 100 ms
//         (20-sample) hold-off and must give no output;
//  hump 2 rises 10 samples by 500, gate open above 1250: width 8;
//  hump 3 rises with the gate shut: no output.
// Also checks that valid comes on the edge of the first non-rising sample,
// that active lasts as many samples as the width and holding exactly 20.
module tb_qrs_width;
  logic clk = 0, reset = 1, en = 0, gate = 0;
  logic [47:0] y = 0;
  logic [15:0] width;
  logic valid, active, holding;
  int checks = 0, failures = 0, nvalid = 0, nact = 0, nhold = 0, k = 0;
  int widths[$];
  qrs_width dut (.clk, .reset, .clk_enable(en), .y, .gate, .width, .valid, .active, .holding);
  always #5 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  always @(posedge clk) if (!reset && valid) begin nvalid++; widths.push_back(int'(width)); end
  task automatic step(input int v, input int g_thr);
    // a strobe gap now and then; the unit must hold
    if ($urandom_range(0, 3) == 0) begin @(negedge clk); en = 0; end
    @(negedge clk); en = 1; y = 48'(v); gate = (v > g_thr);
    @(posedge clk); #1;
    k++;
    nact  += active;
    nhold += holding;
  endtask
  initial begin
    int v;
    repeat (3) @(posedge clk); reset = 0;
    for (int i = 0; i < 10; i++) step(0, 1250);
    for (int i = 1; i <= 30; i++) step(100 * i, 1250);
    for (int i = 29; i >= 0; i--) begin
      v = 100 * i;
      if (i >= 22 && i <= 24) v = 100 * 29 + 50 * (25 - i) * 2;   // a bump while holding
      step(v, 1250);
    end
    for (int i = 0; i < 20; i++) step(0, 1250);
    checks++; if (nhold != 20) begin failures++; $display("hold-off lasted %0d samples", nhold); end
    for (int i = 1; i <= 10; i++) step(500 * i, 1250);
    step(4000, 1250);
    checks++; if (!valid) begin failures++; $display("no valid at hump 2 peak"); end
    for (int i = 0; i < 40; i++) step(0, 1250);
    for (int i = 1; i <= 10; i++) step(500 * i, 1 << 30);
    for (int i = 0; i < 40; i++) step(0, 1250);
    checks++; if (nvalid != 2) begin failures++; $display("valid count %0d", nvalid); end
    checks++; if (widths.size() < 2 || widths[0] != 18 || widths[1] != 8) begin
      failures++; $display("widths %p", widths); end
    checks++; if (nact != 26) begin failures++; $display("active samples %0d", nact); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
