// tb_trigger_ctrl: self-checking test of the trigger gate.
// Checks that a trigger edge passes (one pulse, one cycle later) only when the run is
// enabled, the latch is free and the FIFO has at least 150 free words; that a level held
// high gives one trigger; that blocked triggers are counted as lost (but not while the
// run is disabled); that the gate reopens when space is freed; and that the counters
// clear.
module tb_trigger_ctrl;
  logic clk = 0, rst_n = 0, trig_in = 0, run_enable = 0, busy = 0, clear_counts = 0;
  logic [10:0] fifo_free = 11'd1024;
  logic trig_out, blocked;
  logic [31:0] n_acc, n_lost;
  int checks = 0, failures = 0;
  int exp_acc = 0, exp_lost = 0;

  trigger_ctrl dut (.clk, .rst_n, .trig_in, .run_enable, .busy, .fifo_free, .clear_counts,
                    .trig_out, .blocked, .n_accepted(n_acc), .n_lost);

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

  // one trigger pulse of 3 clocks; returns how many output pulses were seen
  task automatic fire(output int pulses);
    pulses = 0;
    trig_in = 1;
    repeat (3) begin @(negedge clk); if (trig_out) pulses++; end
    trig_in = 0;
    repeat (3) begin @(negedge clk); if (trig_out) pulses++; end
  endtask

  initial begin
    int p;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    fire(p); check(p == 0, "no trigger while run disabled");
    check(n_lost == 0, "disabled run does not count lost triggers");
    run_enable = 1;
    fire(p); check(p == 1, "one trigger per edge"); exp_acc++;
    // latency: edge seen at the clock after the input rises, pulse out one cycle later
    trig_in = 1; @(negedge clk); check(trig_out == 1, "trigger out in the cycle after the edge");
    exp_acc++; trig_in = 0; repeat (2) @(negedge clk);
    busy = 1; @(negedge clk);
    check(blocked, "blocked while latch busy");
    fire(p); check(p == 0, "busy blocks"); exp_lost++;
    busy = 0;
    for (int f = 140; f <= 160; f += 5) begin
      fifo_free = 11'(f); @(negedge clk);
      check(blocked == (f < 150), $sformatf("blocked=%0d at %0d free words", blocked, f));
      fire(p);
      check(p == ((f >= 150) ? 1 : 0), $sformatf("pass=%0d at %0d free words", p, f));
      if (f >= 150) exp_acc++; else exp_lost++;
    end
    check(n_acc == 32'(exp_acc), $sformatf("accepted %0d expected %0d", n_acc, exp_acc));
    check(n_lost == 32'(exp_lost), $sformatf("lost %0d expected %0d", n_lost, exp_lost));
    // random mix
    for (int k = 0; k < 200; k++) begin
      busy = 1'($urandom_range(0, 3) == 0);
      fifo_free = 11'($urandom_range(100, 400));
      run_enable = 1'($urandom_range(0, 7) != 0);
      @(negedge clk);
      fire(p);
      if (run_enable && !busy && fifo_free >= 150) begin
        exp_acc++; check(p == 1, "random: should pass");
      end else begin
        if (run_enable) exp_lost++;
        check(p == 0, "random: should block");
      end
    end
    check(n_acc == 32'(exp_acc), $sformatf("accepted %0d expected %0d", n_acc, exp_acc));
    check(n_lost == 32'(exp_lost), $sformatf("lost %0d expected %0d", n_lost, exp_lost));
    clear_counts = 1; @(negedge clk); clear_counts = 0;
    check(n_acc == 0 && n_lost == 0, "counters cleared");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
