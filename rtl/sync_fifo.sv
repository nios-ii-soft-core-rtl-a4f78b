// sync_fifo: the hardware event FIFO.
//
// Single-clock FIFO of DEPTH words of W bits written as an array, with show-ahead read:
// rdata is the oldest word whenever empty is low and rd pops it. count and free give the
// fill level, which the trigger gate compares with the largest event size. A write to a
// full FIFO and a read of an empty one are ignored; a simultaneous read and write on a
// non-empty FIFO does both. clear empties it.
// Timing: a written word is visible at rdata the cycle after the write. DEPTH must be a
// power of two. The 32-bit width matches the logic bridge; the depth of 1024 words is
// this design's choice.
module sync_fifo #(
  parameter int unsigned W     = 32,
  parameter int unsigned DEPTH = 1024
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     clear,
  input  logic                     wr,
  input  logic [W-1:0]             wdata,
  input  logic                     rd,
  output logic [W-1:0]             rdata,
  output logic [$clog2(DEPTH):0]   count,
  output logic [$clog2(DEPTH):0]   free,
  output logic                     full,
  output logic                     empty
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] wptr, rptr;
  logic          do_wr, do_rd;

  assign full  = (count == (AW+1)'(DEPTH));
  assign empty = (count == '0);
  assign free  = (AW+1)'(DEPTH) - count;
  assign do_wr = wr && !full;
  assign do_rd = rd && !empty;
  assign rdata = mem[rptr];

  always_ff @(posedge clk) begin
    if (do_wr) mem[wptr] <= wdata;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr  <= '0;
      rptr  <= '0;
      count <= '0;
    end else if (clear) begin
      wptr  <= '0;
      rptr  <= '0;
      count <= '0;
    end else begin
      if (do_wr) wptr <= wptr + 1'b1;
      if (do_rd) rptr <= rptr + 1'b1;
      count <= count + (AW+1)'(do_wr) - (AW+1)'(do_rd);
    end
  end

  // The FIFO never reports more words than it holds.
  a_count_range: assert property (@(posedge clk) disable iff (!rst_n) count <= (AW+1)'(DEPTH));
endmodule
