// heart_rate: heart rate in beats per minute from the R-R interval,
//
//     HR = 60 * FS / RR        (RR in samples, FS in samples per second)
//
// computed by a sequential restoring divider that produces one quotient bit
// per clock, most significant first. The quotient is truncated. A divider
// of this kind is this design's choice; only the formula is given.
//
// Interface and timing: start (one clock, with rr) begins a division;
// busy is high while it runs and valid pulses for one clock with the new hr
// NB clocks after start, NB = number of bits of 60*FS (14 for FS = 200).
// A start while busy restarts the division. rr = 0 returns all ones.
// reset: asynchronous, active high.
module heart_rate #(
  parameter int unsigned FS    = 200,
  parameter int unsigned CNT_W = 16,
  parameter int unsigned HR_W  = 16
) (
  input  logic             clk,
  input  logic             reset,
  input  logic [CNT_W-1:0] rr,
  input  logic             start,
  output logic [HR_W-1:0]  hr,
  output logic             valid,
  output logic             busy
);
  localparam int unsigned NUM = 60 * FS;
  localparam int unsigned NB  = $clog2(NUM + 1);
  localparam int unsigned CW  = $clog2(NB + 1);

  logic [NB-1:0]    num;      // dividend bits still to bring down, MSB first
  logic [NB-2:0]    quo;      // quotient bits so far (the last one is formed at the end)
  logic [CNT_W-1:0] rem;      // remainder, always below the divisor
  logic [CNT_W:0]   trial;
  logic [CNT_W-1:0] div;
  logic [CW-1:0]    left;

  always_comb trial = {rem, num[NB-1]};

  always_ff @(posedge clk or posedge reset)
    if (reset) begin
      num   <= '0;
      quo   <= '0;
      rem   <= '0;
      div   <= '0;
      left  <= '0;
      busy  <= 1'b0;
      valid <= 1'b0;
      hr    <= '0;
    end else begin
      valid <= 1'b0;
      if (start) begin
        if (rr == '0) begin
          hr    <= '1;
          valid <= 1'b1;
          busy  <= 1'b0;
        end else begin
          num  <= NB'(NUM);
          quo  <= '0;
          rem  <= '0;
          div  <= rr;
          left <= CW'(NB);
          busy <= 1'b1;
        end
      end else if (busy) begin
        num <= num << 1;
        if (trial >= {1'b0, div}) begin
          rem <= CNT_W'(trial - {1'b0, div});
          quo <= {quo[NB-3:0], 1'b1};
        end else begin
          rem <= CNT_W'(trial);
          quo <= {quo[NB-3:0], 1'b0};
        end
        left <= left - 1'b1;
        if (left == CW'(1)) begin
          busy  <= 1'b0;
          valid <= 1'b1;
          hr    <= HR_W'({quo, trial >= {1'b0, div}});
        end
      end
    end
endmodule
