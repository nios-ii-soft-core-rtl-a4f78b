// tb_irq_ctrl: self-checking test of interrupt collection and priority.
// Checks that event and monitoring pulses stay pending until acknowledged, that the
// W5300 INTn line (active low) appears after two synchronising clocks and follows the
// line, that masking hides a source, and that irq_id always names the pending source of
// highest priority: event, then command, then monitoring.
module tb_irq_ctrl;
  import rpc_daq_pkg::*;
  logic clk = 0, rst_n = 0, evt = 0, mon = 0, int_n = 1;
  logic [2:0] mask = 3'b111, ack = 3'b000, irq, pending;
  irq_id_t id;
  int checks = 0, failures = 0;

  irq_ctrl dut (.clk, .rst_n, .evt_pulse(evt), .w_int_n(int_n), .mon_pulse(mon), .mask, .ack,
                .irq, .pending, .irq_id(id));

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
    logic [2:0] m_pend;
    logic s1, s2;
    irq_id_t exp_id;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check(irq == 0 && id == IRQ_NONE, "idle after reset");
    evt = 1; @(negedge clk); evt = 0;
    check(irq == 3'b001 && id == IRQ_EVENT, "event pending");
    repeat (5) @(negedge clk);
    check(irq == 3'b001, "event stays pending");
    int_n = 0; @(negedge clk);
    check(irq[1] == 0, "INTn not yet through synchroniser");
    @(negedge clk);
    check(irq[1] == 1, "INTn after two clocks");
    check(id == IRQ_EVENT, "event has priority over command");
    ack = 3'b001; @(negedge clk); ack = 0;
    check(id == IRQ_CMD, "command next");
    mon = 1; @(negedge clk); mon = 0;
    check(id == IRQ_CMD && irq == 3'b110, "command has priority over monitoring");
    int_n = 1; repeat (2) @(negedge clk);
    check(id == IRQ_MON, "monitoring last");
    mask = 3'b011; #1;
    check(irq == 0 && pending == 3'b100 && id == IRQ_NONE, "mask hides monitoring");
    mask = 3'b111; ack = 3'b100; @(negedge clk); ack = 0;
    check(irq == 0, "all acknowledged");
    // random sequence against a model
    m_pend = 0;
    s1 = !int_n; s2 = !int_n;
    for (int k = 0; k < 300; k++) begin
      evt = 1'($urandom_range(0, 9) == 0);
      mon = 1'($urandom_range(0, 9) == 0);
      ack = 3'($urandom_range(0, 7)) & 3'b101;
      mask = 3'($urandom_range(0, 7));
      int_n = 1'($urandom_range(0, 3) != 0);
      @(negedge clk);
      s2 = s1; s1 = !int_n;
      m_pend[0] = evt ? 1'b1 : (ack[0] ? 1'b0 : m_pend[0]);
      m_pend[2] = mon ? 1'b1 : (ack[2] ? 1'b0 : m_pend[2]);
      m_pend[1] = s2;
      evt = 0; mon = 0; ack = 0;
      #1;
      check(pending == m_pend, "pending model");
      check(irq == (m_pend & mask), "masked irq");
      exp_id = (irq[0]) ? IRQ_EVENT : (irq[1]) ? IRQ_CMD : (irq[2]) ? IRQ_MON : IRQ_NONE;
      check(id == exp_id, "priority encode");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
