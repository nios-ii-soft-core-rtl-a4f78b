// trigger_ctrl: the trigger gate of the software-controlled event acquisition.
//
// A global trigger may start a new event only if the run is enabled, the event latch is
// free (the event ISR has finished with the previous event) and the hardware event FIFO
// has room for the largest event, THRESH_WORDS 32-bit words (600 bytes). When the FIFO
// is too full the gate stays closed and reopens by itself as soon as the transfer to the
// Ethernet controller has freed enough space. Triggers that arrive while the gate is
// closed are counted as lost, so the dead-time loss can be measured.
// Interface: trig_in (rising edge used), run_enable, busy, fifo_free in; trig_out pulse,
// blocked, n_accepted, n_lost out; clear_counts zeroes both counters.
// Timing: trig_out is a one-cycle pulse in the cycle after the trigger edge is seen.
// The allow/block rule on free FIFO space follows the DAQ description, where it is taken
// by software; making it a hardware comparator and counting lost triggers is this
// design's choice.
module trigger_ctrl #(
  parameter int unsigned CNT_W        = 11,
  parameter int unsigned THRESH_WORDS = 150
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             trig_in,
  input  logic             run_enable,
  input  logic             busy,
  input  logic [CNT_W-1:0] fifo_free,
  input  logic             clear_counts,
  output logic             trig_out,
  output logic             blocked,
  output logic [31:0]      n_accepted,
  output logic [31:0]      n_lost
);
  logic trig_d, trig_edge;

  assign blocked   = !run_enable || busy || (32'(fifo_free) < THRESH_WORDS);
  assign trig_edge = trig_in && !trig_d;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      trig_d     <= 1'b0;
      trig_out   <= 1'b0;
      n_accepted <= '0;
      n_lost     <= '0;
    end else begin
      trig_d   <= trig_in;
      trig_out <= 1'b0;
      if (clear_counts) begin
        n_accepted <= '0;
        n_lost     <= '0;
      end else if (trig_edge) begin
        if (!blocked) begin
          trig_out   <= 1'b1;
          n_accepted <= n_accepted + 1'b1;
        end else if (run_enable) begin
          n_lost <= n_lost + 1'b1;
        end
      end
    end
  end
endmodule
