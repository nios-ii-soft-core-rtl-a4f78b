// rtc: real-time clock of one RPC-DAQ, counting in 100 ns ticks.
//
// A prescaler divides the 50 MHz system clock by TICK_DIV (5) and the RTC_W-bit time
// counter advances once per 100 ns, the precision the DAQ timestamps need. At the start
// of a run all DAQs are brought onto a common time base by loading a preset value
// (software LOADRTC command or the global sync pulse); the load also restarts the
// prescaler so that the first tick after it comes a full 100 ns later.
// Interface: load/load_value in, rtc_time out, tick is a one-cycle pulse on each advance.
// Timing: rtc_time changes on the clock edge after tick goes high. The 100 ns step is the
// DAQ's; the counter width and the loading scheme are this design's choice.
module rtc #(
  parameter int unsigned TICK_DIV = 5,
  parameter int unsigned RTC_W    = 64
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             load,
  input  logic [RTC_W-1:0] load_value,
  output logic [RTC_W-1:0] rtc_time,
  output logic             tick
);
  localparam int unsigned PW = (TICK_DIV > 1) ? $clog2(TICK_DIV) : 1;
  logic [PW-1:0] pre;

  assign tick = (pre == PW'(TICK_DIV - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pre <= '0;
      rtc_time <= '0;
    end else if (load) begin
      pre <= '0;
      rtc_time <= load_value;
    end else begin
      pre <= tick ? '0 : pre + 1'b1;
      if (tick) rtc_time <= rtc_time + 1'b1;
    end
  end
endmodule
