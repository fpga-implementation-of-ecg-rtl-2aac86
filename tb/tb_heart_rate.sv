// tb_heart_rate: random R-R intervals from 1 to 2000 samples plus edge
// values; hr must equal floor(12000/rr) (60 s * 200 samples/s) and valid
// must rise on the 14th clock edge after the edge that takes start.
module tb_heart_rate;
  logic clk = 0, reset = 1, start = 0;
  logic [15:0] rr = 0, hr;
  logic valid, busy;
  int checks = 0, failures = 0;
  heart_rate dut (.clk, .reset, .rr, .start, .hr, .valid, .busy);
  always #5 clk = ~clk;
  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic run(input int r);
    int cyc = 0;
    @(negedge clk); rr = 16'(r); start = 1;
    @(negedge clk); start = 0;
    cyc = 1;
    while (!valid && cyc < 100) begin @(negedge clk); cyc++; end
    checks += 2;
    if (int'(hr) != 12000 / r) begin failures++; if (failures < 10) $display("rr=%0d hr=%0d", r, hr); end
    if (cyc != 15) begin failures++; if (failures < 10) $display("latency %0d", cyc); end
  endtask
  initial begin
    repeat (3) @(posedge clk); reset = 0;
    run(1); run(50); run(160); run(12000); run(12001); run(65535);
    for (int i = 0; i < 500; i++) run($urandom_range(1, 2000));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
