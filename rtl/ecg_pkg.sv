// ecg_pkg: constants shared by the ECG feature-extraction pipeline.
//
// The sample rate is not stated with the filter equations; the 32-sample,
// 150 ms integration window and the Pan-Tompkins coefficients point to about
// 200 samples/s, which is used here. The input (16 bit) and output (64 bit)
// widths are those of the detector's ports. Every intermediate width is this
// design's own choice: each stage keeps full integer precision, so no stage
// can overflow and no rounding other than the stated shifts takes place.
package ecg_pkg;
  localparam int unsigned FS       = 200;          // samples per second
  localparam int unsigned IN_W     = 16;           // raw ECG sample
  localparam int unsigned OUT_W    = 64;           // Out1, integrator output
  localparam int unsigned SUB_W    = IN_W + 1;     // after baseline subtraction
  localparam int unsigned LPF_W    = SUB_W + 6;    // low-pass, DC gain 36
  localparam int unsigned SF_W     = LPF_W + 1;    // high-pass output = SF
  localparam int unsigned DIFF_W   = SF_W;         // derivative output
  localparam int unsigned SQ_W     = 2 * DIFF_W;   // squared slope
  localparam int unsigned SI_W     = SQ_W;         // integrator output = SI
  localparam int unsigned MWI_N    = 32;           // integration window, samples
  localparam int unsigned CNT_W    = 16;           // sample counters
  localparam int unsigned HR_W     = 16;           // heart rate, beats/min
  localparam int unsigned HOLD_SMP = FS / 10;      // 100 ms hold-off
  localparam int unsigned RR_GUARD = 50;           // samples between R peaks

  // One extracted beat, as handed to whatever evaluates the features.
  typedef struct packed {
    logic [CNT_W-1:0] qrs_width;   // samples
    logic [CNT_W-1:0] rr;          // samples
    logic [HR_W-1:0]  hr;          // beats per minute
  } features_t;
endpackage
