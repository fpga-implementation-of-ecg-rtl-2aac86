// tb_pt_lowpass: compares the recursive low-pass with its FIR form, the
// triangular 11-tap response 1 2 3 4 5 6 5 4 3 2 1 (sum 36), on random
// full-scale samples with gaps in the strobe, and checks the DC gain of 36.
module tb_pt_lowpass;
  localparam int IW = 17;
  logic clk = 0, reset = 1, en = 0;
  logic signed [IW-1:0] x = 0;
  logic signed [IW+5:0] y;
  int checks = 0, failures = 0;
  longint hist [0:11];
  pt_lowpass #(.IN_W(IW)) dut (.clk, .reset, .clk_enable(en), .x, .y);
  always #5 clk = ~clk;
  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  function automatic longint ref_y();
    longint acc = 0;
    for (int k = 0; k <= 10; k++) acc += longint'((k <= 5) ? k + 1 : 11 - k) * hist[k];
    return acc;
  endfunction
  task automatic step(input logic signed [IW-1:0] v, input logic e);
    @(negedge clk); x = v; en = e;
    @(posedge clk); #1;
    if (e) begin
      for (int k = 11; k > 0; k--) hist[k] = hist[k-1];
      hist[0] = v;
    end
    checks++;
    if (longint'(y) != ref_y()) begin
      failures++; if (failures < 10) $display("lp mismatch y=%0d exp=%0d", y, ref_y());
    end
  endtask
  initial begin
    foreach (hist[k]) hist[k] = 0;
    repeat (3) @(posedge clk); reset = 0;
    for (int i = 0; i < 3000; i++) step(IW'($urandom), 1'($urandom_range(0, 4) != 0));
    for (int i = 0; i < 20; i++) step(-17'sd65536, 1);
    checks++; if (longint'(y) != -36 * 65536) begin failures++; $display("dc gain: %0d", y); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
