// event_write_ctrl: processor-side write control of the hardware event FIFO.
//
// The event ISR packs an event into 32-bit words and writes them one by one through the
// logic bridge. While the processor holds CTRL_FLAG high each written word is pushed
// into the FIFO and counted; a word written with CTRL_FLAG low or into a full FIFO is
// dropped and sets the sticky overflow flag (cleared by clear_ovf). When the ISR signals
// the end of the event (event_done) the word count restarts and release frees the event
// latch so that the next trigger may pass.
// Interface: ctrl_flag, cpu_wr, cpu_wdata, event_done, clear_ovf, fifo_full in;
// fifo_wr, fifo_wdata, release_evt, words, overflow out.
// Timing: fifo_wr/fifo_wdata follow cpu_wr combinationally (same cycle); release_evt is
// a one-cycle pulse in the cycle of event_done. fifo_wdata is cpu_wdata itself and
// release_evt is event_done itself: only the write strobe is gated. The CTRL_FLAG gate comes from the event
// acquisition data path; the dropping, counting and release rules are this design's.
module event_write_ctrl (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        ctrl_flag,
  input  logic        cpu_wr,
  input  logic [31:0] cpu_wdata,
  input  logic        event_done,
  input  logic        clear_ovf,
  input  logic        fifo_full,
  output logic        fifo_wr,
  output logic [31:0] fifo_wdata,
  output logic        release_evt,
  output logic [15:0] words,
  output logic        overflow
);
  assign fifo_wr     = cpu_wr && ctrl_flag && !fifo_full;
  assign fifo_wdata  = cpu_wdata;
  assign release_evt = event_done;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      words    <= '0;
      overflow <= 1'b0;
    end else begin
      if (event_done)   words <= '0;
      else if (fifo_wr) words <= words + 1'b1;
      if (clear_ovf)                 overflow <= 1'b0;
      else if (cpu_wr && !fifo_wr)   overflow <= 1'b1;
    end
  end
endmodule
