// tb_fifo_to_w5300: self-checking test of the hardware FIFO-to-W5300 transfer.
// The engine is connected to a real event FIFO, the W5300 bus controller and a W5300
// bus model. Checks: a 600-byte event (150 FIFO words, 300 16-bit writes) lands in the
// event socket TX FIFO register in order, upper half first, within 35 us (the transfer
// time the hardware path is meant to reach) and at 4 clocks per write; an odd count
// pops the last word after its upper half; the engine waits when the FIFO runs empty;
// the bus goes back to the processor afterwards; a zero count completes at once.
module tb_fifo_to_w5300;
  import rpc_daq_pkg::*;
  logic clk = 0, rst_n = 0;
  logic start = 0;
  logic [15:0] n_half = '0;
  logic [2:0] sock = '0;
  logic busy, done;
  logic f_wr = 0;
  logic [31:0] f_wdata = '0, f_rdata;
  logic f_rd, f_full, f_empty;
  logic [10:0] f_count, f_free;
  logic own, grant, req, wdone;
  logic [9:0] addr;
  logic [15:0] wdata;
  logic [9:0] w_addr;
  logic [15:0] w_data_o, w_data_i, cpu_rdata;
  logic w_data_oe, w_cs_n, w_wr_n, w_rd_n, w_int_n, cpu_done;
  int checks = 0, failures = 0;
  logic [31:0] sent [$];

  sync_fifo fifo (.clk, .rst_n, .clear(1'b0), .wr(f_wr), .wdata(f_wdata), .rd(f_rd),
    .rdata(f_rdata), .count(f_count), .free(f_free), .full(f_full), .empty(f_empty));
  fifo_to_w5300 dut (.clk, .rst_n, .start, .n_half, .sock, .busy, .done, .fifo_rdata(f_rdata),
    .fifo_empty(f_empty), .fifo_rd(f_rd), .own, .grant, .req, .addr, .wdata, .wdone);
  w5300_bus_ctrl bus (.clk, .rst_n, .cpu_req(1'b0), .cpu_we(1'b0), .cpu_addr(10'h0),
    .cpu_wdata(16'h0), .cpu_rdata, .cpu_done, .hw_own(own), .hw_grant(grant), .hw_req(req),
    .hw_addr(addr), .hw_wdata(wdata), .hw_done(wdone), .w_addr, .w_data_o, .w_data_oe,
    .w_data_i, .w_cs_n, .w_wr_n, .w_rd_n);
  w5300_model chip (.addr(w_addr), .data_in(w_data_o), .cs_n(w_cs_n), .wr_n(w_wr_n),
    .rd_n(w_rd_n), .data_out(w_data_i), .int_n(w_int_n));

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

  task automatic push(input int n);
    for (int i = 0; i < n; i++) begin
      f_wr = 1; f_wdata = $urandom; sent.push_back(f_wdata);
      @(negedge clk);
    end
    f_wr = 0;
  endtask

  task automatic run(input int halves, input logic [2:0] s, output int cycles);
    n_half = 16'(halves); sock = s; start = 1;
    @(negedge clk); start = 0; cycles = 1;
    while (!done) begin @(negedge clk); cycles++; end
  endtask

  // check that the W5300 log from position n0 holds `halves` halves of sent[] words
  task automatic check_log(input int n0, input int halves, input logic [9:0] a);
    int ok = 1;
    check(chip.wlog_addr.size() - n0 == halves, $sformatf("%0d writes, expected %0d",
          chip.wlog_addr.size() - n0, halves));
    for (int h = 0; h < halves && n0 + h < chip.wlog_addr.size(); h++) begin
      logic [31:0] w = sent[h / 2];
      logic [15:0] e = (h % 2 == 0) ? w[31:16] : w[15:0];
      if (chip.wlog_data[n0 + h] != e || chip.wlog_addr[n0 + h] != a) ok = 0;
    end
    check(ok == 1, "data order and target register");
    for (int i = 0; i < (halves + 1) / 2; i++) void'(sent.pop_front());
  endtask

  initial begin
    int cyc, n0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    // 600-byte event
    push(150);
    n0 = chip.wlog_addr.size();
    run(300, SOCK_EVENT, cyc);
    check_log(n0, 300, w5300_tx_fifo_addr(SOCK_EVENT));
    check(w5300_tx_fifo_addr(SOCK_EVENT) == 10'h26E, "socket 1 TX FIFO register is 0x26E");
    check(cyc * 20 <= 35000, $sformatf("600 bytes took %0d ns, limit 35 us", cyc * 20));
    check(cyc <= 300 * 4 + 4, $sformatf("%0d clocks for 300 writes, expected about 1200", cyc));
    check(f_empty, "FIFO drained");
    for (int k = 1; k < 300; k++)
      check(chip.wlog_time[n0 + k] - chip.wlog_time[n0 + k - 1] == 80.0, "80 ns per write");
    @(negedge clk);
    check(!grant && !busy, "bus released after transfer");
    // odd count: 5 halves from 4 words leaves 1 word
    push(4);
    n0 = chip.wlog_addr.size();
    run(5, SOCK_MON, cyc);
    check_log(n0, 5, w5300_tx_fifo_addr(SOCK_MON));
    check(f_count == 1, $sformatf("odd count pops 3 words, %0d left", f_count));
    void'(sent.pop_front());
    f_wr = 0;
    // FIFO runs empty mid transfer: drain the leftover first
    push(0);
    begin
      // empty the leftover word through a 2-half transfer of a fresh word set
      int c2;
      sent.delete();
      // the remaining word is unknown to the queue; refill the model from the FIFO head
      sent.push_back(f_rdata);
      n0 = chip.wlog_addr.size();
      run(2, SOCK_EVENT, c2);
      check_log(n0, 2, w5300_tx_fifo_addr(SOCK_EVENT));
    end
    n0 = chip.wlog_addr.size();
    push(2);
    fork
      run(20, SOCK_EVENT, cyc);
      begin
        repeat (40) @(negedge clk);
        check(busy && chip.wlog_addr.size() - n0 == 4, "engine waits on empty FIFO");
        push(8);
      end
    join
    check_log(n0, 20, w5300_tx_fifo_addr(SOCK_EVENT));
    run(0, SOCK_EVENT, cyc);
    check(cyc == 1 && done, "zero count completes at once");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
