// tb_event_write_ctrl: self-checking test of the event write control.
// Checks that words pass to the FIFO only while CTRL_FLAG is high and the FIFO is not
// full, that the word count follows the accepted words and restarts at end of event,
// that end of event releases the latch, and that dropped words set the sticky overflow
// flag until it is cleared.
module tb_event_write_ctrl;
  logic clk = 0, rst_n = 0, ctrl_flag = 0, cpu_wr = 0, event_done = 0, clear_ovf = 0;
  logic fifo_full = 0;
  logic [31:0] cpu_wdata = '0, fifo_wdata;
  logic fifo_wr, release_evt, overflow;
  logic [15:0] words;
  int checks = 0, failures = 0;

  event_write_ctrl dut (.clk, .rst_n, .ctrl_flag, .cpu_wr, .cpu_wdata, .event_done, .clear_ovf,
                        .fifo_full, .fifo_wr, .fifo_wdata, .release_evt, .words, .overflow);

  always #10 clk = ~clk;

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
    int n_ok;
    bit exp_ovf;
    repeat (3) @(negedge clk);
    rst_n = 1;
    exp_ovf = 0;
    for (int ev = 0; ev < 10; ev++) begin
      n_ok = 0;
      ctrl_flag = 1;
      for (int k = 0; k < 40; k++) begin
        cpu_wdata = $urandom;
        fifo_full = 1'($urandom_range(0, 9) == 0);
        if (ev == 7 && k == 5) ctrl_flag = 0;
        if (ev == 7 && k == 8) ctrl_flag = 1;
        cpu_wr = 1'($urandom_range(0, 1));
        #1;
        check(fifo_wr == (cpu_wr && ctrl_flag && !fifo_full), "fifo_wr gating");
        if (fifo_wr) check(fifo_wdata == cpu_wdata, "data passed");
        if (fifo_wr) n_ok++;
        if (cpu_wr && !fifo_wr) exp_ovf = 1;
        @(negedge clk);
        check(words == 16'(n_ok), $sformatf("word count %0d expected %0d", words, n_ok));
        check(overflow == exp_ovf, "overflow flag");
      end
      cpu_wr = 0; fifo_full = 0;
      event_done = 1; #1;
      check(release_evt, "end of event releases latch");
      @(negedge clk); event_done = 0;
      check(words == 0, "count restarts");
      if (ev == 4) begin
        clear_ovf = 1; @(negedge clk); clear_ovf = 0; exp_ovf = 0;
        check(!overflow, "overflow cleared");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
