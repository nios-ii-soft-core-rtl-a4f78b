// irq_ctrl: interrupt collection for the processor.
//
// Three sources interrupt the processor, served in this order of priority: the event
// interrupt from the event latch, the command interrupt from the W5300 (a UDP command
// has arrived on a command socket) and the monitoring timer. Event and monitoring
// interrupts are one-cycle pulses kept in pending bits until the ISR acknowledges them
// (write 1 to ack). The W5300 interrupt line INTn is active low and level-sensitive; it
// is synchronised by two flip-flops and stays pending until software clears the cause
// inside the W5300, so ack[1] has no effect and is kept only so that ack lines up
// with pending bit for bit (lint reports it unused). irq gives each masked pending source on its own line; irq_id names
// the highest-priority one, IRQ_NONE if none.
// Timing: a pulse appears on irq the cycle after it arrives; INTn takes two cycles more.
// The priority order follows the DAQ description (event, then command, then
// monitoring); the pending/ack scheme is this design's choice.
module irq_ctrl
  import rpc_daq_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       evt_pulse,
  input  logic       w_int_n,
  input  logic       mon_pulse,
  input  logic [2:0] mask,
  input  logic [2:0] ack,
  output logic [2:0] irq,
  output logic [2:0] pending,
  output irq_id_t    irq_id
);
  logic       p_evt, p_mon;
  logic [1:0] int_sync;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      p_evt    <= 1'b0;
      p_mon    <= 1'b0;
      int_sync <= 2'b00;
    end else begin
      int_sync <= {int_sync[0], !w_int_n};
      if (evt_pulse)   p_evt <= 1'b1;
      else if (ack[0]) p_evt <= 1'b0;
      if (mon_pulse)   p_mon <= 1'b1;
      else if (ack[2]) p_mon <= 1'b0;
    end
  end

  assign pending = {p_mon, int_sync[1], p_evt};
  assign irq     = pending & mask;

  always_comb begin
    if      (irq[0]) irq_id = IRQ_EVENT;
    else if (irq[1]) irq_id = IRQ_CMD;
    else if (irq[2]) irq_id = IRQ_MON;
    else             irq_id = IRQ_NONE;
  end
endmodule
