// lpf_2hz: baseline (about 2 Hz) low-pass filter for the raw ECG.
//
// The detector removes baseline wander by subtracting a low-passed copy of
// the ECG from itself; the 2 Hz low-pass is named but its structure is not
// given. It is built here as the simplest filter with that cut-off, a
// first-order IIR (exponential average):
//     s(n) = s(n-1) + (x(n)*2^FRAC - s(n-1)) / 2^K,   y(n) = s(n) / 2^FRAC
// K = 4 puts the -3 dB point at FS/(2*pi*16) = 2.0 Hz for FS = 200 Hz. The
// state carries FRAC extra fraction bits so that small steps do not stall.
// Divisions are arithmetic shifts (floor).
//
// Interface: one sample x per clock with clk_enable high; y is registered
// and updated on the same clock edge that takes x (one sample of latency).
// reset is asynchronous, active high, and clears the state.
module lpf_2hz #(
  parameter int unsigned W    = 16,
  parameter int unsigned K    = 4,
  parameter int unsigned FRAC = 8
) (
  input  logic                clk,
  input  logic                reset,
  input  logic                clk_enable,
  input  logic signed [W-1:0] x,
  output logic signed [W-1:0] y
);
  localparam int unsigned SW = W + FRAC + 1;
  logic signed [SW-1:0] s, s_next, xs;

  always_comb begin
    xs     = SW'(x) <<< FRAC;
    s_next = s + ((xs - s) >>> K);
  end

  always_ff @(posedge clk or posedge reset)
    if (reset)           s <= '0;
    else if (clk_enable) s <= s_next;

  assign y = W'(s >>> FRAC);
endmodule
