// tb_scaler_bank: self-checking test of the 25 rate scalers.
// Drives random pulse trains on 16 strip and 9 fold inputs for several monitoring
// periods, counts rising edges in the testbench and checks every read word
// {channel ID, count} after each snapshot. A second instance with 4-bit counters checks
// that counts saturate instead of wrapping.
module tb_scaler_bank;
  logic clk = 0, rst_n = 0, snapshot = 0;
  logic [15:0] strip = '0;
  logic [8:0]  fold = '0;
  logic [4:0]  idx = '0, idx_s = '0;
  logic [31:0] word, word_s;
  logic        in_s = 0;
  int checks = 0, failures = 0;
  int model [25];
  int cur [25];

  scaler_bank dut (.clk, .rst_n, .strip_in(strip), .fold_in(fold), .snapshot, .rd_idx(idx),
                   .rd_word(word));
  scaler_bank #(.N_STRIP(1), .N_FOLD(0+1), .CNT_W(4)) sat (.clk, .rst_n,
                   .strip_in(in_s), .fold_in(1'b0), .snapshot, .rd_idx(idx_s), .rd_word(word_s));

  always #10 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [24:0] prev, now;
    repeat (3) @(negedge clk);
    rst_n = 1;
    prev = '0;
    for (int i = 0; i < 25; i++) cur[i] = 0;
    for (int period = 0; period < 4; period++) begin
      int len;
      len = 300 + 100 * period;
      for (int c = 0; c < len; c++) begin
        strip = 16'($urandom);
        fold  = 9'($urandom);
        in_s  = (c % 2 == 0);
        now = {fold, strip};
        for (int i = 0; i < 25; i++) if (now[i] && !prev[i]) cur[i]++;
        prev = now;
        @(negedge clk);
      end
      // snapshot: edges of the input applied in this cycle go to the next period
      snapshot = 1;
      strip = '0; fold = '0; now = '0; prev = '0;
      @(negedge clk);
      snapshot = 0;
      for (int i = 0; i < 25; i++) begin model[i] = cur[i]; cur[i] = 0; end
      for (int i = 0; i < 25; i++) begin
        idx = 5'(i);
        #1;
        check(word[31:24] == 8'(i), $sformatf("channel %0d ID %0d", i, word[31:24]));
        check(word[23:0] == 24'(model[i]), $sformatf("period %0d ch %0d count %0d expected %0d",
              period, i, word[23:0], model[i]));
      end
      idx_s = 0; #1;
      check(word_s[23:0] == 24'd15, $sformatf("4-bit counter saturates at 15, got %0d", word_s[23:0]));
    end
    idx = 5'd30; #1;
    check(word == 32'h0, "unused index reads zero");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
