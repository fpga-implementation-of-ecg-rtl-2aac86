// tb_squarer: checks y = x*x for random and extreme signed inputs, and that
// y holds while the strobe is low.
module tb_squarer;
  localparam int W = 24;
  logic clk = 0, reset = 1, en = 0;
  logic signed [W-1:0] x = 0;
  logic [2*W-1:0] y;
  longint last = 0;
  int checks = 0, failures = 0;
  squarer #(.IN_W(W)) dut (.clk, .reset, .clk_enable(en), .x, .y);
  always #5 clk = ~clk;
  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic step(input logic signed [W-1:0] v, input logic e);
    @(negedge clk); x = v; en = e;
    @(posedge clk); #1;
    if (e) last = longint'(v) * longint'(v);
    checks++;
    if (longint'(y) != last) begin
      failures++; if (failures < 10) $display("sq mismatch x=%0d y=%0d exp=%0d", v, y, last);
    end
  endtask
  initial begin
    repeat (3) @(posedge clk); reset = 0;
    step(-24'sd8388608, 1); step(24'sd8388607, 1); step(-24'sd1, 1); step(24'sd0, 1);
    for (int i = 0; i < 3000; i++) step(W'($urandom), 1'($urandom_range(0, 4) != 0));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
