// tb_derivative: checks y(n) = floor((2x(n)+x(n-1)-x(n-3)-2x(n-4))/8) on
// random samples, and that a ramp of slope 8 gives the steady value 10
// (the filter's gain at DC for a ramp is 10/8 per unit slope).
module tb_derivative;
  localparam int W = 24;
  logic clk = 0, reset = 1, en = 0;
  logic signed [W-1:0] x = 0, y;
  int checks = 0, failures = 0;
  longint h [0:4];
  derivative #(.W(W)) dut (.clk, .reset, .clk_enable(en), .x, .y);
  always #5 clk = ~clk;
  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic step(input logic signed [W-1:0] v, input logic e);
    longint ex;
    @(negedge clk); x = v; en = e;
    @(posedge clk); #1;
    if (e) begin
      for (int k = 4; k > 0; k--) h[k] = h[k-1];
      h[0] = v;
    end
    ex = (2 * h[0] + h[1] - h[3] - 2 * h[4]) >>> 3;
    checks++;
    if (longint'(y) != ex) begin
      failures++; if (failures < 10) $display("diff mismatch y=%0d exp=%0d", y, ex);
    end
  endtask
  initial begin
    foreach (h[k]) h[k] = 0;
    repeat (3) @(posedge clk); reset = 0;
    for (int i = 0; i < 3000; i++) step(W'($urandom), 1'($urandom_range(0, 4) != 0));
    for (int i = 0; i < 10; i++) step(W'(8 * i - 100), 1);
    checks++; if (y != 10) begin failures++; $display("ramp: %0d", y); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
