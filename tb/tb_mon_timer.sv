// tb_mon_timer: self-checking test of the programmable monitoring timer.
// Checks that the reset period (10 s) gives no tick in the first thousands of clocks,
// that a programmed period P gives ticks exactly P clocks apart, that disabling stops
// the ticks and re-enabling restarts a full period, and that a new period takes effect.
module tb_mon_timer;
  logic clk = 0, rst_n = 0, enable = 0, period_we = 0, tick;
  logic [31:0] period = '0;
  int checks = 0, failures = 0;

  mon_timer dut (.clk, .rst_n, .enable, .period_we, .period, .tick);

  always #10 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic measure(input int p, input int n);
    int c, last;
    last = -1; c = 0;
    while (n > 0) begin
      @(negedge clk); c++;
      if (tick) begin
        if (last >= 0) check(c - last == p, $sformatf("tick spacing %0d, expected %0d", c - last, p));
        last = c; n--;
      end
    end
  endtask

  initial begin
    int seen;
    repeat (3) @(negedge clk);
    rst_n = 1;
    enable = 1;
    seen = 0;
    repeat (5000) begin @(negedge clk); if (tick) seen++; end
    check(seen == 0, "no tick within 5000 clocks at the 10 s reset period");
    period = 100; period_we = 1; @(negedge clk); period_we = 0;
    measure(100, 5);
    period = 37; period_we = 1; @(negedge clk); period_we = 0;
    measure(37, 5);
    enable = 0; seen = 0;
    repeat (200) begin @(negedge clk); if (tick) seen++; end
    check(seen == 0, "no tick while disabled");
    enable = 1; seen = 0;
    begin
      int c;
      c = 0;
      do begin @(negedge clk); c++; end while (!tick);
      check(c == 37, $sformatf("first tick %0d clocks after enable, expected 37", c));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
