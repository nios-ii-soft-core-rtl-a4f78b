// hit_delay: fixed delay of the strip hit pattern before the event latch.
//
// The strip signals of the RPC reach the FPGA before the global trigger decision has
// come back from the trigger system. This shift register delays the W-bit hit pattern
// by DEPTH clocks so that the pattern latched on a trigger is the one that caused it.
// Interface: d in, q out; q(t) = d(t - DEPTH). The block follows the DELAY box of the
// event acquisition data path; its length (8 clocks, 160 ns) is this design's choice
// and should be set to the trigger latency of the installation.
module hit_delay #(
  parameter int unsigned W     = 128,
  parameter int unsigned DEPTH = 8
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [W-1:0] d,
  output logic [W-1:0] q
);
  logic [W-1:0] sr [DEPTH];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < DEPTH; i++) sr[i] <= '0;
    end else begin
      sr[0] <= d;
      for (int i = 1; i < DEPTH; i++) sr[i] <= sr[i-1];
    end
  end

  assign q = sr[DEPTH-1];
endmodule
