// qrs_width: QRS interval from the rise time of the integrated signal SI.
//
// While the gate is open (SI above its threshold, SF crossed) and SI keeps
// rising, a counter counts samples. On the first sample that no longer rises
// the peak has been reached: the count is the QRS interval, the counter is
// cleared and the unit ignores its input for HOLD samples (100 ms) so that
// ripple on the falling edge gives no false output.
//
//   IDLE  --gate & rising-->  COUNT  --not rising-->  HOLD  --HOLD samples-->  IDLE
//
// Interface and timing: y and gate are sampled on clocks with clk_enable
// high. width is registered and changes with a one-clock valid pulse on the
// edge that sees the peak. active is high while counting (a pulse as long as
// the QRS rise), holding during the 100 ms hold-off. The counter saturates.
// reset: asynchronous, active high.
module qrs_width #(
  parameter int unsigned W     = 48,
  parameter int unsigned CNT_W = 16,
  parameter int unsigned HOLD  = 20
) (
  input  logic             clk,
  input  logic             reset,
  input  logic             clk_enable,
  input  logic [W-1:0]     y,
  input  logic             gate,
  output logic [CNT_W-1:0] width,
  output logic             valid,
  output logic             active,
  output logic             holding
);
  typedef enum logic [1:0] {IDLE, COUNT, HOLD_OFF} state_t;
  state_t           state;
  logic [W-1:0]     y_prev;
  logic [CNT_W-1:0] cnt;
  logic [$clog2(HOLD+1)-1:0] hold_cnt;
  logic             rising;

  assign rising  = y > y_prev;
  assign active  = state == COUNT;
  assign holding = state == HOLD_OFF;

  always_ff @(posedge clk or posedge reset)
    if (reset) begin
      state    <= IDLE;
      y_prev   <= '0;
      cnt      <= '0;
      hold_cnt <= '0;
      width    <= '0;
      valid    <= 1'b0;
    end else begin
      valid <= 1'b0;
      if (clk_enable) begin
        y_prev <= y;
        unique case (state)
          IDLE:
            if (gate && rising) begin
              state <= COUNT;
              cnt   <= CNT_W'(1);
            end
          COUNT:
            if (rising) begin
              if (cnt != '1) cnt <= cnt + 1'b1;
            end else begin
              width    <= cnt;
              valid    <= 1'b1;
              cnt      <= '0;
              state    <= HOLD_OFF;
              hold_cnt <= ($clog2(HOLD+1))'(HOLD - 1);
            end
          HOLD_OFF:
            if (hold_cnt == 0) state <= IDLE;
            else hold_cnt <= hold_cnt - 1'b1;
          default: state <= IDLE;
        endcase
      end
    end
endmodule
