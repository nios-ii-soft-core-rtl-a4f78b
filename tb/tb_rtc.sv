// tb_rtc: self-checking test of the 100 ns real-time clock.
// Checks that after reset the time advances by one every 5 clocks (100 ns at 50 MHz),
// that a load sets the preset value and restarts the 100 ns phase, and that the count
// carries across the 32-bit boundary. Inputs change on the falling edge.
module tb_rtc;
  logic clk = 0, rst_n = 0, load = 0;
  logic [63:0] load_value = '0, t;
  logic tick;
  int checks = 0, failures = 0;

  rtc #(.TICK_DIV(5), .RTC_W(64)) dut (.clk, .rst_n, .load, .load_value, .rtc_time(t), .tick);

  always #10 clk = ~clk;  // 50 MHz

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n_edges;
    logic [63:0] prev;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // count clocks between advances
    @(negedge clk);
    prev = t;
    n_edges = 0;
    for (int k = 0; k < 10; k++) begin
      int c;
      c = 0;
      do begin @(negedge clk); c++; end while (t == prev);
      if (k > 0) check(c == 5, $sformatf("advance after %0d clocks, expected 5", c));
      check(t == prev + 1, "advance by one");
      prev = t;
    end
    // load
    load_value = 64'h0000_0000_FFFF_FFFE;
    load = 1; @(negedge clk); load = 0;
    check(t == 64'h0000_0000_FFFF_FFFE, "preset loaded");
    repeat (4) @(negedge clk);
    check(t == 64'h0000_0000_FFFF_FFFE, "no advance before 100 ns after load");
    @(negedge clk);
    check(t == 64'h0000_0000_FFFF_FFFF, "first advance 5 clocks after load");
    repeat (5) @(negedge clk);
    check(t == 64'h0000_0001_0000_0000, "carry into upper word");
    // 1 ms of time = 10000 ticks = 50000 clocks
    load_value = 64'd0; load = 1; @(negedge clk); load = 0;
    repeat (5000) @(negedge clk);
    check(t == 64'd1000, $sformatf("100 us gives 1000 ticks, got %0d", t));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
