// tb_logic_bridge: self-checking test of the processor's register bridge.
// Drives the 32-bit slave port like the processor and checks: control register
// write/read-back; one-cycle command pulses for each REG_CMD bit; FIFO push and pop
// strobes (pop suppressed while the transfer engine is busy); transfer, SPI and JTAG
// start decoding (JTAG command and data held while the JTAG port is busy); the strip
// mask (zero after reset, written and read back); status, event, RTC (coherent 64-bit
// read) and scaler read multiplexing;
// and the W5300 window, whose accesses hold waitrequest until the bus controller
// reports done and map word address a to byte address {a[8:0],0}.
module tb_logic_bridge;
  import rpc_daq_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [10:0] address = '0;
  logic read = 0, write = 0, waitrequest;
  logic [31:0] writedata = '0, readdata;
  logic run_enable, ctrl_flag, mon_enable, event_done, clear_evno, fifo_clear, rtc_load;
  logic [63:0] rtc_preset;
  logic clear_counts, clear_ovf, mon_period_we;
  logic [31:0] mon_period;
  logic [2:0] irq_ack, irq_mask;
  logic fifo_push, fifo_pop, xfer_start, spi_start;
  logic [31:0] fifo_push_data;
  logic [15:0] xfer_n, spi_tx;
  logic [2:0] xfer_sock;
  logic [4:0] scaler_idx;
  logic jtag_start, jtag_tms_mode, jtag_tms_last, jtag_busy = 0;
  logic [4:0] jtag_nbits_m1;
  logic [31:0] jtag_din;
  logic [127:0] strip_mask;
  logic w_req, w_we, w_done = 0;
  logic [9:0] w_addr;
  logic [15:0] w_wdata, w_rdata = 16'hA5C3;
  // status stimulus
  logic xfer_busy = 0, spi_busy = 0, fifo_empty = 0;
  logic [10:0] fifo_count = 11'd321;
  logic [63:0] rtc_now = 64'h0000_0012_3456_789A;
  logic [127:0] hits = 128'h0123_4567_89AB_CDEF_FEDC_BA98_7654_3210;
  int checks = 0, failures = 0;
  // pulse counters
  int n_done = 0, n_push = 0, n_pop = 0, n_xfer = 0, n_spi = 0, n_jtag = 0;

  logic_bridge dut (.clk, .rst_n, .address, .read, .write, .writedata, .readdata, .waitrequest,
    .run_enable, .ctrl_flag, .mon_enable, .event_done, .clear_evno, .fifo_clear, .rtc_load,
    .rtc_preset, .clear_counts, .clear_ovf, .mon_period_we, .mon_period, .irq_ack, .irq_mask,
    .fifo_push, .fifo_push_data, .fifo_pop, .xfer_start, .xfer_n, .xfer_sock, .spi_start,
    .spi_tx, .scaler_idx, .jtag_start, .jtag_nbits_m1, .jtag_tms_mode, .jtag_tms_last,
    .jtag_din, .strip_mask, .jtag_busy, .jtag_dout(32'hC0DE_0515), .w_req, .w_we, .w_addr, .w_wdata, .w_rdata, .w_done,
    .evt_busy(1'b1), .trig_blocked(1'b0), .wr_overflow(1'b1), .xfer_busy, .xfer_done(1'b1),
    .spi_busy, .fifo_count, .fifo_empty, .fifo_rdata(32'hF1F0_0001), .event_no(32'd77),
    .evt_ts(64'hAAAA_BBBB_CCCC_DDDD), .evt_hits(hits), .evt_words(16'd42), .rtc_now,
    .irq_pending(3'b101), .irq_id(IRQ_EVENT), .spi_rx(16'h5A5A), .n_accepted(32'd1000),
    .n_lost(32'd3), .scaler_word({8'(scaler_idx), 24'(scaler_idx) * 24'd100}));

  always #10 clk = ~clk;

  always @(posedge clk) begin
    if (event_done) n_done++;
    if (fifo_push)  n_push++;
    if (fifo_pop)   n_pop++;
    if (xfer_start) n_xfer++;
    if (spi_start)  n_spi++;
    if (jtag_start) n_jtag++;
  end

  // bus controller stand-in: done after 3 clocks of request
  int wcnt = 0;
  always @(posedge clk) begin
    if (w_req && !w_done) wcnt <= wcnt + 1; else wcnt <= 0;
    w_done <= w_req && !w_done && wcnt == 2;
  end

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

  task automatic wr(input logic [10:0] a, input logic [31:0] d, output int waits);
    @(negedge clk);
    address = a; writedata = d; write = 1; waits = 0;
    #1;
    while (waitrequest) begin @(negedge clk); waits++; #1; end
    @(posedge clk); #1;
    write = 0;
  endtask

  task automatic rd(input logic [10:0] a, output logic [31:0] d, output int waits);
    @(negedge clk);
    address = a; read = 1; waits = 0;
    #1;
    while (waitrequest) begin @(negedge clk); waits++; #1; end
    d = readdata;
    @(posedge clk); #1;
    read = 0;
  endtask

  initial begin
    logic [31:0] d;
    int w;
    repeat (3) @(negedge clk);
    rst_n = 1;
    wr(11'(REG_CTRL), 32'h5, w);
    check(run_enable && !ctrl_flag && mon_enable, "control bits");
    rd(11'(REG_CTRL), d, w); check(d == 32'h5 && w == 0, "control read-back, no wait");
    check(irq_mask == 3'b111, "all interrupts enabled after reset");
    wr(11'(REG_CMD), 32'h1, w); wr(11'(REG_CMD), 32'h1, w);
    check(n_done == 2, $sformatf("event_done pulses %0d", n_done));
    for (int k = 0; k < 10; k++) wr(11'(REG_FIFO_DATA), 32'(k), w);
    check(n_push == 10, "ten FIFO pushes");
    rd(11'(REG_FIFO_DATA), d, w); check(d == 32'hF1F0_0001 && n_pop == 1, "FIFO pop on read");
    xfer_busy = 1;
    rd(11'(REG_FIFO_DATA), d, w); check(n_pop == 1, "no processor pop while engine busy");
    wr(11'(REG_XFER), 32'h0001_012C, w); check(n_xfer == 0, "no start while engine busy");
    xfer_busy = 0;
    fork
      wr(11'(REG_XFER), 32'h0001_012C, w);
      begin @(posedge clk); #1; check(xfer_n == 16'd300 && xfer_sock == 3'd1, "transfer args"); end
    join
    check(n_xfer == 1, "transfer start");
    fork
      wr(11'(REG_SPI), 32'h0000_BEEF, w);
      begin @(posedge clk); #1; check(spi_tx == 16'hBEEF, "SPI word"); end
    join
    check(n_spi == 1, "SPI start");
    wr(11'(REG_JTAG_DATA), 32'h1234_5678, w);
    check(jtag_din == 32'h1234_5678, "JTAG data register");
    fork
      wr(11'(REG_JTAG_CMD), 32'h0000_0317, w);
      begin @(posedge clk); #1; check(jtag_nbits_m1 == 5'h17 && jtag_tms_mode && jtag_tms_last, "JTAG command fields"); end
    join
    check(n_jtag == 1, "JTAG start");
    jtag_busy = 1;
    wr(11'(REG_JTAG_CMD), 32'h0000_001F, w);
    wr(11'(REG_JTAG_DATA), 32'hFFFF_FFFF, w);
    check(n_jtag == 1 && jtag_din == 32'h1234_5678, "JTAG registers held while busy");
    rd(11'(REG_STATUS), d, w);
    check(d[6], "JTAG busy status");
    jtag_busy = 0;
    rd(11'(REG_JTAG_DATA), d, w); check(d == 32'hC0DE_0515, "JTAG TDO bits");
    check(strip_mask == '0, "strip mask cleared by reset");
    begin
      logic [127:0] m;
      m = {$urandom, $urandom, $urandom, $urandom};
      for (int k = 0; k < 4; k++) wr(11'(REG_MASK0) + 11'(k), m[32*k +: 32], w);
      check(strip_mask == m, "strip mask written");
      for (int k = 0; k < 4; k++) begin
        rd(11'(REG_MASK0) + 11'(k), d, w); check(d == m[32*k +: 32], "strip mask read back");
      end
    end
    rd(11'(REG_STATUS), d, w);
    check(d == {4'h0, 12'd321, 10'h0, 1'b0, 1'b1, 1'b0, 1'b1, 1'b0, 1'b1}, $sformatf("status %h", d));
    rd(11'(REG_EVENT_NO), d, w); check(d == 77, "event number");
    rd(11'(REG_EVT_TS_LO), d, w); check(d == 32'hCCCC_DDDD, "timestamp low");
    rd(11'(REG_EVT_TS_HI), d, w); check(d == 32'hAAAA_BBBB, "timestamp high");
    for (int k = 0; k < 4; k++) begin
      rd(11'(REG_HIT0) + 11'(k), d, w); check(d == hits[32*k +: 32], "hit word");
    end
    rd(11'(REG_RTC_LO), d, w); check(d == 32'h3456_789A, "RTC low");
    rtc_now = 64'h0000_0013_0000_0000;
    rd(11'(REG_RTC_HI), d, w); check(d == 32'h12, "RTC high is the value captured with low");
    wr(11'(REG_RTC_LO), 32'h1111_2222, w); wr(11'(REG_RTC_HI), 32'h3333_4444, w);
    check(rtc_preset == 64'h3333_4444_1111_2222, "RTC preset");
    fork
      wr(11'(REG_CMD), 32'h8, w);
      begin @(posedge clk); #1; check(rtc_load, "RTC load pulse"); @(posedge clk); #1; check(!rtc_load, "pulse one cycle"); end
    join
    rd(11'(REG_IRQ), d, w); check(d == 32'h05, "irq pending and id");
    for (int i = 0; i < 25; i++) begin
      rd(11'(REG_SCALER0) + 11'(i), d, w);
      check(d == {8'(i), 24'(i * 100)}, $sformatf("scaler %0d word %h", i, d));
    end
    rd(11'(REG_N_LOST), d, w); check(d == 3, "lost counter");
    // W5300 window
    fork
      rd(11'h400 | 11'h117, d, w);
      begin
        @(posedge w_req); #1;
        check(w_addr == 10'h22E && !w_we, "W5300 read address");
      end
    join
    check(d == 32'h0000_A5C3 && w >= 2, $sformatf("W5300 read %h after %0d waits", d, w));
    fork
      wr(11'h400 | 11'h101, 32'h0000_0020, w);
      begin @(posedge w_req); #1; check(w_addr == 10'h202 && w_we && w_wdata == 16'h20, "W5300 write"); end
    join
    check(w >= 2, "W5300 write waits");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
