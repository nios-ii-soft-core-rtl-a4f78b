// mon_timer: programmable monitoring timer.
//
// The DAQ logic raises a monitoring interrupt at a programmable period, typically 10 s
// during event runs; the monitoring ISR then reads the scalers and sensors. This timer
// counts clock cycles down from the programmed period and emits a one-cycle tick when
// it expires, then reloads. Writing a new period (period_we) restarts the count. While
// enable is low the counter holds at the full period.
// Interface: enable, period_we/period in (clock cycles), tick out.
// Timing: with period P the ticks are exactly P cycles apart. The 10 s default follows
// the DAQ description; counting in clock cycles is this design's choice.
module mon_timer #(
  parameter int unsigned CNT_W          = 32,
  parameter int unsigned DEFAULT_PERIOD = 500_000_000
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             enable,
  input  logic             period_we,
  input  logic [CNT_W-1:0] period,
  output logic             tick
);
  logic [CNT_W-1:0] period_q, cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      period_q <= CNT_W'(DEFAULT_PERIOD);
      cnt      <= CNT_W'(DEFAULT_PERIOD - 1);
      tick     <= 1'b0;
    end else begin
      tick <= 1'b0;
      if (period_we) begin
        period_q <= period;
        cnt      <= period - 1'b1;
      end else if (!enable) begin
        cnt <= period_q - 1'b1;
      end else if (cnt == '0) begin
        tick <= 1'b1;
        cnt  <= period_q - 1'b1;
      end else begin
        cnt <= cnt - 1'b1;
      end
    end
  end
endmodule
