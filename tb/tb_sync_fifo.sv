// tb_sync_fifo: self-checking test of the event FIFO at its full 1024-word depth.
// Random pushes and pops against a queue model; checks data order, count, free, full
// and empty, that writes to a full FIFO and reads of an empty one are ignored, and that
// clear empties it.
module tb_sync_fifo;
  localparam int DEPTH = 1024;
  logic clk = 0, rst_n = 0, clear = 0, wr = 0, rd = 0;
  logic [31:0] wdata = '0, rdata;
  logic [10:0] count, free;
  logic full, empty;
  logic [31:0] q [$];
  int checks = 0, failures = 0;

  sync_fifo dut (.clk, .rst_n, .clear, .wr, .wdata, .rd, .rdata, .count, .free, .full, .empty);

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

  task automatic step(input int pw, input int pr);
    wr = 1'($urandom_range(0, 99) < pw);
    rd = 1'($urandom_range(0, 99) < pr);
    wdata = $urandom;
    #1;
    if (q.size() > 0) check(rdata == q[0], "head data");
    check(empty == (q.size() == 0), "empty flag");
    check(full == (q.size() == DEPTH), "full flag");
    check(count == 11'(q.size()) && free == 11'(DEPTH - q.size()), "count/free");
    begin
      bit dw, dr;
      dw = wr && q.size() < DEPTH;
      dr = rd && q.size() > 0;
      @(posedge clk);
      if (dr) void'(q.pop_front());
      if (dw) q.push_back(wdata);
    end
    @(negedge clk);
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    repeat (3000) step(70, 20);   // fill up, hit full
    repeat (4000) step(20, 70);   // drain, hit empty
    repeat (3000) step(50, 50);
    wr = 0; rd = 0;
    clear = 1; @(negedge clk); clear = 0; q.delete();
    check(empty && count == 0, "clear empties the FIFO");
    repeat (500) step(50, 50);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
