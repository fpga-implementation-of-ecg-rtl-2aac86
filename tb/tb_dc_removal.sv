// tb_dc_removal: checks y(n) = x(n) - b(n-1), b the 2 Hz low-pass of x,
// against an integer model, and that a large constant offset is removed
// (the output settles to zero) while a fast step passes straight through.
module tb_dc_removal;
  logic clk = 0, reset = 1, en = 0;
  logic signed [15:0] x = 0;
  logic signed [16:0] y;
  int checks = 0, failures = 0;
  longint s = 0, exp_y = 0;
  dc_removal dut (.clk, .reset, .clk_enable(en), .x, .y);
  always #5 clk = ~clk;
  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic step(input logic signed [15:0] v, input logic e);
    @(negedge clk); x = v; en = e;
    @(posedge clk); #1;
    if (e) begin
      exp_y = longint'(v) - (s >>> 8);
      s = s + (((longint'(v) <<< 8) - s) >>> 4);
    end
    checks++;
    if (longint'(y) != exp_y) begin
      failures++; if (failures < 10) $display("dc mismatch y=%0d exp=%0d", y, exp_y);
    end
  endtask
  initial begin
    repeat (3) @(posedge clk); reset = 0;
    for (int i = 0; i < 2000; i++) step(16'($urandom), 1'($urandom_range(0, 3) != 0));
    for (int i = 0; i < 500; i++) step(-16'sd20000, 1);
    checks++; if (y > 17'sd1 || y < -17'sd1) begin failures++; $display("offset left: %0d", y); end
    step(-16'sd19000, 1);
    checks++; if (y < 17'sd990 || y > 17'sd1001) begin failures++; $display("step lost: %0d", y); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
