// scaler_bank: strip and fold rate scalers read by the monitoring ISR.
//
// N_STRIP strip counters and N_FOLD fold counters count rising edges of their inputs.
// On each snapshot (the monitoring timer tick) every count is copied to a shadow
// register and the counter restarts, so a read returns the number of edges in the last
// monitoring period. Each 32-bit read word carries the channel ID in its top 8 bits and
// a CNT_W (24) bit saturating count below: channels 0..N_STRIP-1 are strips,
// N_STRIP.. are folds.
// Interface: strip_in, fold_in (synchronous to clk), snapshot, rd_idx -> rd_word
// (combinational). Timing: an edge on the input is counted one cycle later; an edge in
// the snapshot cycle counts towards the next period. The 16 + 9 channels and the 8-bit
// ID come from the DAQ description; the ID bit position, edge counting, per-period
// window and saturation are this design's choices.
module scaler_bank #(
  parameter int unsigned N_STRIP = 16,
  parameter int unsigned N_FOLD  = 9,
  parameter int unsigned CNT_W   = 24
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [N_STRIP-1:0] strip_in,
  input  logic [N_FOLD-1:0]  fold_in,
  input  logic               snapshot,
  input  logic [4:0]         rd_idx,
  output logic [31:0]        rd_word
);
  localparam int unsigned N = N_STRIP + N_FOLD;

  logic [N-1:0]     in_now, in_prev, rise;
  logic [CNT_W-1:0] cnt  [N];
  logic [CNT_W-1:0] shad [N];

  assign in_now = {fold_in, strip_in};
  assign rise   = in_now & ~in_prev;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      in_prev <= '0;
      for (int i = 0; i < N; i++) begin
        cnt[i]  <= '0;
        shad[i] <= '0;
      end
    end else begin
      in_prev <= in_now;
      for (int i = 0; i < N; i++) begin
        if (snapshot) begin
          shad[i] <= cnt[i];
          cnt[i]  <= CNT_W'(rise[i]);
        end else if (rise[i] && cnt[i] != {CNT_W{1'b1}}) begin
          cnt[i] <= cnt[i] + 1'b1;
        end
      end
    end
  end

  always_comb begin
    rd_word = '0;
    if (32'(rd_idx) < N) rd_word = {8'(rd_idx), (24)'(shad[rd_idx])};
  end
endmodule
