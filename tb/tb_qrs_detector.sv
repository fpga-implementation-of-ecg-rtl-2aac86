// tb_qrs_detector: runs a synthetic ECG through the detector chain and
// compares SF and Out1 sample by sample with a model of the whole chain
// written from the filters' direct forms: baseline low-pass and
// subtraction, triangular low-pass FIR, delay-minus-average high-pass,
// five-point derivative, square, 32-sample window. After the strobe that
// takes sample k, SF must equal sf(k-2) and Out1 floor(sum_{j=5..36} sq(k-j)/32).
// Random gaps in clk_enable check that every stage holds between samples.
module tb_qrs_detector;
  import ecg_synth_pkg::*;
  localparam int NS = 1500;
  logic clk = 0, reset = 1, en = 0;
  logic signed [15:0] In1 = 0;
  logic ce_out;
  logic [63:0] Out1;
  logic signed [23:0] sf;
  int checks = 0, failures = 0;
  // every array is indexed by sample + P; the first P entries stay zero
  localparam int P = 64;
  longint x [NS+P], dc [NS+P], lp [NS+P], hp [NS+P], dr [NS+P], sq [NS+P];
  int rs[$] = '{150, 320, 480, 650, 830, 990, 1160, 1330};

  qrs_detector dut (.clk, .reset, .clk_enable(en), .In1, .ce_out, .Out1, .sf);
  always #5 clk = ~clk;
  initial begin
    repeat (20 * NS) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end


  initial begin
    longint s = 0, acc;
    foreach (x[i]) begin x[i] = 0; dc[i] = 0; lp[i] = 0; hp[i] = 0; dr[i] = 0; sq[i] = 0; end
    for (int n = 0; n < NS; n++) begin
      x[P+n]  = longint'(ecg_sample(n, rs, -1));
      dc[P+n] = x[P+n] - (s >>> 8);
      s       = s + (((x[P+n] <<< 8) - s) >>> 4);
    end
    for (int n = 0; n < NS; n++) begin
      acc = 0;
      for (int k = 0; k <= 10; k++) acc += longint'((k <= 5) ? k + 1 : 11 - k) * dc[P + n - k];
      lp[P+n] = acc;
    end
    for (int n = 0; n < NS; n++) begin
      acc = 32 * lp[P + n - 16];
      for (int k = 0; k < 32; k++) acc -= lp[P + n - k];
      hp[P+n] = acc >>> 5;
      dr[P+n] = (2 * hp[P+n] + hp[P + n - 1] - hp[P + n - 3] - 2 * hp[P + n - 4]) >>> 3;
      sq[P+n] = dr[P+n] * dr[P+n];
    end
  end

  initial begin
    int k = 0;
    longint exp_si, exp_sf;
    int max_si = 0;
    repeat (3) @(posedge clk);
    reset = 0;
    while (k < NS) begin
      @(negedge clk);
      en  = ($urandom_range(0, 5) != 0);
      In1 = 16'(x[P+k]);
      @(posedge clk); #1;
      if (ce_out != en) begin failures++; $display("ce_out"); end
      if (en) begin
        exp_sf = hp[P + k - 2];
        exp_si = 0;
        for (int j = 5; j <= 36; j++) exp_si += sq[P + k - j];
        exp_si = exp_si >>> 5;
        checks += 2;
        if (longint'(sf) != exp_sf) begin
          failures++; if (failures < 10) $display("k=%0d sf=%0d exp=%0d", k, sf, exp_sf);
        end
        if (longint'(Out1) != exp_si) begin
          failures++; if (failures < 10) $display("k=%0d Out1=%0d exp=%0d", k, Out1, exp_si);
        end
        if (exp_si > max_si) max_si = int'(exp_si > 64'h7fffffff ? 64'h7fffffff : exp_si);
        k++;
      end
    end
    // the integrated signal must show the beats
    checks++; if (max_si < 1000) begin failures++; $display("SI too small: %0d", max_si); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
