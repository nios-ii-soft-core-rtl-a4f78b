// event_latch: holds the data of one event for the event ISR.
//
// On a gated trigger the latch captures the (delayed) HIT_W-bit strip hit pattern and
// the RTC time, increments the event number, raises the event interrupt for one cycle
// and stays busy. Busy keeps the trigger gate closed until the ISR has copied the event
// into the hardware FIFO and release arrives from the event write control.
// Interface: trig, hits, rtc, release, clear_evno in; busy, irq, hit_q, ts_q,
// event_no out. Timing: hit_q/ts_q/event_no and busy are valid the cycle after trig;
// irq is high in that same cycle. A trigger while busy is ignored (the gate should
// already block it). Latching hits with the timestamp and the event number follows the
// DAQ description and its event packet; the 32-bit event number is this design's choice.
module event_latch #(
  parameter int unsigned HIT_W = 128,
  parameter int unsigned RTC_W = 64
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             trig,
  input  logic [HIT_W-1:0] hits,
  input  logic [RTC_W-1:0] rtc,
  input  logic             release_evt,
  input  logic             clear_evno,
  output logic             busy,
  output logic             irq,
  output logic [HIT_W-1:0] hit_q,
  output logic [RTC_W-1:0] ts_q,
  output logic [31:0]      event_no
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy     <= 1'b0;
      irq      <= 1'b0;
      hit_q    <= '0;
      ts_q     <= '0;
      event_no <= '0;
    end else begin
      irq <= 1'b0;
      if (clear_evno) event_no <= '0;
      if (trig && !busy) begin
        busy     <= 1'b1;
        irq      <= 1'b1;
        hit_q    <= hits;
        ts_q     <= rtc;
        event_no <= clear_evno ? 32'd1 : event_no + 1'b1;
      end else if (release_evt) begin
        busy <= 1'b0;
      end
    end
  end
endmodule
