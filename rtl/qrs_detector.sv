// qrs_detector: the Pan-Tompkins pre-processing chain, one ECG sample per
// enabled clock, all stages working in parallel on successive samples:
//
//   In1 -> dc_removal -> bandpass_5_15 (SF) -> derivative -> squarer -> mwi (SI)
//
// dc_removal subtracts a 2 Hz low-passed copy of the input (baseline
// wander), the band-pass keeps the 5-15 Hz QRS energy, the derivative and the
// squarer turn slope into positive energy, and the 32-sample moving window
// integrates it into one hump per QRS complex. The port names and the 16-bit
// input and 64-bit output follow the detector's published port list
// (clk, reset, clk_enable, In1, ce_out, Out1); the internal widths are this
// design's choice (full precision, see ecg_pkg).
//
// Timing: after the clock edge that takes In1 = x(k), sf = SF(k-2) and
// Out1 = floor(sum_{j=5..36} sq(k-j) / 32), where sq is the squared
// derivative of SF; that is a pipeline of five registers in front of the
// integrator. ce_out repeats clk_enable (no rate change inside).
// reset: asynchronous, active high, clears every stage.
module qrs_detector #(
  parameter int unsigned IN_W  = ecg_pkg::IN_W,
  parameter int unsigned OUT_W = ecg_pkg::OUT_W
) (
  input  logic                    clk,
  input  logic                    reset,
  input  logic                    clk_enable,
  input  logic signed [IN_W-1:0]  In1,
  output logic                    ce_out,
  output logic [OUT_W-1:0]        Out1,
  output logic signed [IN_W+7:0]  sf
);
  localparam int unsigned S_W  = IN_W + 8;   // SF and slope width
  localparam int unsigned Q_W  = 2 * S_W;    // squared slope, SI width

  logic signed [IN_W:0]  dc;
  logic signed [S_W-1:0] slope;
  logic [Q_W-1:0]        sq, si;

  initial assert (OUT_W >= Q_W) else $error("qrs_detector: OUT_W too small for SI");

  dc_removal    #(.W(IN_W))      u_dc   (.clk, .reset, .clk_enable, .x(In1),   .y(dc));
  bandpass_5_15 #(.IN_W(IN_W+1)) u_5_15bpf (.clk, .reset, .clk_enable, .x(dc), .y(sf));
  derivative    #(.W(S_W))       u_30hpf (.clk, .reset, .clk_enable, .x(sf),   .y(slope));
  squarer       #(.IN_W(S_W))    u_prod (.clk, .reset, .clk_enable, .x(slope), .y(sq));
  mwi           #(.IN_W(Q_W), .N(ecg_pkg::MWI_N)) u_Discrete_FIR_Filter (
    .clk, .reset, .clk_enable, .x(sq), .y(si)
  );

  assign Out1   = OUT_W'(si);
  assign ce_out = clk_enable;
endmodule
