// tb_mwi: checks the 32-tap moving-window integrator: after the strobe that
// takes x(n) the output must be floor(sum_{k=0..31} x(n-k) / 32), the value
// of y(n+1) = 1/32 sum_{i=1..32} x(n+1-i). Random 48-bit inputs with gaps.
module tb_mwi;
  localparam int W = 48;
  logic clk = 0, reset = 1, en = 0;
  logic [W-1:0] x = 0, y;
  int checks = 0, failures = 0;
  logic [63:0] h [0:31];
  mwi #(.IN_W(W), .N(32)) dut (.clk, .reset, .clk_enable(en), .x, .y);
  always #5 clk = ~clk;
  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic step(input logic [W-1:0] v, input logic e);
    logic [63:0] acc;
    @(negedge clk); x = v; en = e;
    @(posedge clk); #1;
    if (e) begin
      for (int k = 31; k > 0; k--) h[k] = h[k-1];
      h[0] = 64'(v);
    end
    acc = 0;
    for (int k = 0; k < 32; k++) acc += h[k];
    checks++;
    if (64'(y) != (acc >> 5)) begin
      failures++; if (failures < 10) $display("mwi mismatch y=%0d exp=%0d", y, acc >> 5);
    end
  endtask
  initial begin
    foreach (h[k]) h[k] = 0;
    repeat (3) @(posedge clk); reset = 0;
    for (int i = 0; i < 3000; i++) step({$urandom, $urandom}, 1'($urandom_range(0, 4) != 0));
    for (int i = 0; i < 40; i++) step('1, 1);
    checks++; if (y != '1) begin failures++; $display("full-scale: %0h", y); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
