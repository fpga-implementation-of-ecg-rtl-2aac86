// tb_pt_highpass: compares the recursive high-pass with its direct form
// y(n) = floor((32 x(n-16) - sum_{k=0..31} x(n-k)) / 32) on random
// samples, and checks that a constant input gives zero output.
module tb_pt_highpass;
  localparam int IW = 23;
  logic clk = 0, reset = 1, en = 0;
  logic signed [IW-1:0] x = 0;
  logic signed [IW:0] y;
  int checks = 0, failures = 0;
  longint hist [0:32];
  pt_highpass #(.IN_W(IW)) dut (.clk, .reset, .clk_enable(en), .x, .y);
  always #5 clk = ~clk;
  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  function automatic longint ref_y();
    longint acc = 32 * hist[16];
    for (int k = 0; k < 32; k++) acc -= hist[k];
    return acc >>> 5;
  endfunction
  task automatic step(input logic signed [IW-1:0] v, input logic e);
    @(negedge clk); x = v; en = e;
    @(posedge clk); #1;
    if (e) begin
      for (int k = 32; k > 0; k--) hist[k] = hist[k-1];
      hist[0] = v;
    end
    checks++;
    if (longint'(y) != ref_y()) begin
      failures++; if (failures < 10) $display("hp mismatch y=%0d exp=%0d", y, ref_y());
    end
  endtask
  initial begin
    foreach (hist[k]) hist[k] = 0;
    repeat (3) @(posedge clk); reset = 0;
    for (int i = 0; i < 3000; i++) step(IW'($urandom), 1'($urandom_range(0, 4) != 0));
    for (int i = 0; i < 40; i++) step(23'sd1234567, 1);
    checks++; if (y != 0) begin failures++; $display("dc not blocked: %0d", y); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
