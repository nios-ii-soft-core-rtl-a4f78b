// tb_event_latch: self-checking test of the event latch.
// Checks that a trigger captures the hit pattern and RTC of that cycle, numbers the
// event, pulses the interrupt once and holds busy; that a second trigger while busy
// changes nothing; that release frees the latch; and that the event number restarts.
module tb_event_latch;
  logic clk = 0, rst_n = 0, trig = 0, release_evt = 0, clear_evno = 0;
  logic [127:0] hits = '0, hit_q;
  logic [63:0] rtc = '0, ts_q;
  logic busy, irq;
  logic [31:0] event_no;
  int checks = 0, failures = 0;

  event_latch dut (.clk, .rst_n, .trig, .hits, .rtc, .release_evt, .clear_evno, .busy, .irq,
                   .hit_q, .ts_q, .event_no);

  always #10 clk = ~clk;
  always @(posedge clk) rtc <= rtc + 1;

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
    logic [127:0] h;
    logic [63:0]  t;
    int irqs;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int e = 1; e <= 20; e++) begin
      repeat ($urandom_range(1, 5)) @(negedge clk);
      h = {$urandom, $urandom, $urandom, $urandom};
      hits = h; t = rtc; trig = 1;
      @(negedge clk);
      trig = 0; hits = ~h;
      check(busy && irq, "busy and interrupt after trigger");
      check(hit_q == h, "hit pattern latched");
      check(ts_q == t, $sformatf("timestamp %0d expected %0d", ts_q, t));
      check(event_no == 32'(e), $sformatf("event number %0d expected %0d", event_no, e));
      irqs = 0;
      // a trigger while busy is ignored
      trig = 1; @(negedge clk); trig = 0;
      if (irq) irqs++;
      check(hit_q == h && event_no == 32'(e), "trigger while busy ignored");
      repeat (3) begin @(negedge clk); if (irq) irqs++; end
      check(irqs == 0, "interrupt is a single pulse");
      release_evt = 1; @(negedge clk); release_evt = 0;
      check(!busy, "release frees the latch");
    end
    clear_evno = 1; @(negedge clk); clear_evno = 0;
    check(event_no == 0, "event number cleared");
    trig = 1; @(negedge clk); trig = 0;
    check(event_no == 1, "first event after clear is 1");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
