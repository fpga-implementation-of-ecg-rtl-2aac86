// tb_lpf_2hz: checks the baseline low-pass against an integer model of
// s += (x*256 - s)/16 (floor), with random samples and random gaps in the
// sample strobe, then checks that a constant input is followed to within one
// LSB and that a 2 Hz sine comes out about 3 dB down.
module tb_lpf_2hz;
  logic clk = 0, reset = 1, en = 0;
  logic signed [15:0] x = 0, y;
  int checks = 0, failures = 0;
  longint s = 0;
  lpf_2hz dut (.clk, .reset, .clk_enable(en), .x, .y);
  always #5 clk = ~clk;
  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic step(input logic signed [15:0] v, input logic e);
    @(negedge clk); x = v; en = e;
    @(posedge clk); #1;
    if (e) s = s + (((longint'(v) <<< 8) - s) >>> 4);
    checks++;
    if (longint'(y) != (s >>> 8)) begin
      failures++; if (failures < 10) $display("lpf mismatch y=%0d exp=%0d", y, s >>> 8);
    end
  endtask
  initial begin
    real amp_in, amp_out, pk;
    repeat (3) @(posedge clk); reset = 0;
    for (int i = 0; i < 2000; i++) step(16'($urandom), 1'($urandom_range(0, 3) != 0));
    for (int i = 0; i < 400; i++) step(16'sd12000, 1);
    checks++; if (y < 16'sd11999 || y > 16'sd12000) begin failures++; $display("step: y=%0d", y); end
    // 2 Hz sine at 200 samples/s: gain of a one-pole 1/16 filter is about 0.7
    pk = 0;
    for (int i = 0; i < 1000; i++) begin
      step(16'($rtoi(10000.0 * $sin(2.0 * 3.14159265 * 2.0 * i / 200.0))), 1);
      if (i > 600 && $itor(y) > pk) pk = $itor(y);
    end
    amp_out = pk; amp_in = 10000.0;
    checks++; if (amp_out / amp_in < 0.6 || amp_out / amp_in > 0.8) begin
      failures++; $display("2 Hz gain %f", amp_out / amp_in); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
