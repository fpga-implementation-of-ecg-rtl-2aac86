// tb_bandpass_5_15: checks the band-pass cascade against a model built from
// the two direct forms (triangular low-pass FIR, then delay-minus-average
// high-pass, one register between them), and that the gain at 10 Hz is far
// above the gain at 1 Hz and at 60 Hz (200 samples/s).
module tb_bandpass_5_15;
  localparam int IW = 17;
  logic clk = 0, reset = 1, en = 0;
  logic signed [IW-1:0] x = 0;
  logic signed [IW+6:0] y;
  int checks = 0, failures = 0;
  longint xh [0:11], lh [0:33];
  bandpass_5_15 #(.IN_W(IW)) dut (.clk, .reset, .clk_enable(en), .x, .y);
  always #5 clk = ~clk;
  initial begin
    repeat (400000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  function automatic longint lp_ref();
    longint acc = 0;
    for (int k = 0; k <= 10; k++) acc += longint'((k <= 5) ? k + 1 : 11 - k) * xh[k];
    return acc;
  endfunction
  // high-pass of the low-pass sequence, one sample behind (lh[1] is lp(n-1))
  function automatic longint hp_ref();
    longint acc = 32 * lh[17];
    for (int k = 1; k <= 32; k++) acc -= lh[k];
    return acc >>> 5;
  endfunction
  task automatic step(input logic signed [IW-1:0] v, input logic e);
    @(negedge clk); x = v; en = e;
    @(posedge clk); #1;
    if (e) begin
      for (int k = 11; k > 0; k--) xh[k] = xh[k-1];
      xh[0] = v;
      for (int k = 33; k > 0; k--) lh[k] = lh[k-1];
      lh[0] = lp_ref();
    end
    checks++;
    if (longint'(y) != hp_ref()) begin
      failures++; if (failures < 10) $display("bp mismatch y=%0d exp=%0d", y, hp_ref());
    end
  endtask
  real g [3];
  real fr [3] = '{1.0, 10.0, 60.0};
  initial begin
    foreach (xh[k]) xh[k] = 0;
    foreach (lh[k]) lh[k] = 0;
    repeat (3) @(posedge clk); reset = 0;
    for (int i = 0; i < 2000; i++) step(IW'($urandom), 1'($urandom_range(0, 4) != 0));
    for (int t = 0; t < 3; t++) begin
      real pk;
      pk = 0;
      for (int i = 0; i < 800; i++) begin
        step(IW'($rtoi(1000.0 * $sin(2.0 * 3.14159265 * fr[t] * i / 200.0))), 1);
        if (i > 400 && $itor(y) > pk) pk = $itor(y);
      end
      g[t] = pk / 1000.0;
    end
    checks++;
    if (!(g[1] > 4.0 * g[0] && g[1] > 4.0 * g[2])) begin
      failures++; $display("band shape: 1Hz %f 10Hz %f 60Hz %f", g[0], g[1], g[2]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
