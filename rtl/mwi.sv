// mwi: moving-window integrator, a direct-form FIR with N equal taps of 1/N:
//
//     y(n) = 1/N * sum_{i=1..N} x(n-i),   N = 32 (about 150 ms)
//
// The current sample is not in the sum. The N taps live in a delay line;
// after the strobe that takes x(n-1) the line holds x(n-1)..x(n-N), so y(n)
// is the combinational sum of the line, divided by N with a shift (floor;
// N must be a power of two). Its output is the integrated signal SI.
//
// Timing: x is shifted in on a clock with clk_enable high; y always shows
// the sum for the next sample. reset (asynchronous, active high) clears the
// line.
module mwi #(
  parameter int unsigned IN_W = 48,
  parameter int unsigned N    = 32
) (
  input  logic              clk,
  input  logic              reset,
  input  logic              clk_enable,
  input  logic [IN_W-1:0]   x,
  output logic [IN_W-1:0]   y
);
  localparam int unsigned LG = $clog2(N);
  localparam int unsigned SW = IN_W + LG;
  logic [IN_W-1:0] tap [N];
  logic [SW-1:0]   sum;

  initial assert (N == (1 << LG)) else $error("mwi: N must be a power of two");

  always_comb begin
    sum = '0;
    for (int i = 0; i < N; i++) sum += SW'(tap[i]);
  end

  always_ff @(posedge clk or posedge reset)
    if (reset) tap <= '{default: '0};
    else if (clk_enable) begin
      tap[0] <= x;
      for (int i = 1; i < N; i++) tap[i] <= tap[i-1];
    end

  assign y = IN_W'(sum >> LG);
endmodule
