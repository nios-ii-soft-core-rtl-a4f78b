// tb_rpc_daq_top: end-to-end test of one RPC-DAQ's FPGA logic at default parameters.
//
// A bus-functional stand-in for the soft processor runs the DAQ's interrupt routines
// and main loop over the 32-bit bridge, against a W5300 bus model, an HV SPI slave
// model and a trigger/strip generator:
//  - boot: IDCODE read and SETUP configuration of the HPTDC over JTAG (TAP model);
//  - start of run: RTC preset and load, monitoring period 1 ms, a strip mask of 8 random
//    strips (written and read back), run enabled;
//  - event ISR: reads event number, timestamp and 128-bit hits, packs an event packet of
//    80 to 600 bytes (start marker, reserved words, DAQ ID, event number, RTC, hits, TDC
//    size and data, stop marker) into the hardware FIFO, ends the event;
//  - main loop: once the FIFO holds a packet's worth, starts the hardware transfer to
//    socket 1, waits for it, then writes the socket's write-size and SEND registers;
//  - command ISR (W5300 INTn): reads and clears the W5300 interrupt register and sends an
//    HV command frame over SPI;
//  - monitoring ISR: reads the 25 scalers, checks IDs and rates, and writes a monitoring
//    packet (start marker, reserved words, DAQ ID, RTC, period, rates, TPH, HV, stop
//    marker) through its own W5300 window into the Mon socket (2) TX FIFO, then SEND;
//  - interrupts preempt the main loop while it waits for the transfer engine, so ISR
//    accesses to the W5300 are held until the engine gives the bus back;
//  - at the end an event and a monitoring interrupt are made pending together.
// Checked: every word written by the ISRs reaches the socket 1 TX FIFO register in order;
// each latched hit pattern and timestamp belongs to the trigger that caused it; triggers
// lost while busy or while the FIFO is full match the lost counter; interrupt priority.
// Each mechanism (trigger accepted, lost while latch busy, blocked on FIFO space and
// reopened, hardware transfer, processor W5300 access with wait states, command and
// monitoring interrupts, event served before a simultaneous monitoring interrupt, SPI
// frame, RTC load, dropped write with CTRL_FLAG low, HPTDC JTAG configuration, processor
// W5300 access held by a running transfer, monitoring packet, masked strip removed from an
// event) is counted and must occur.
module tb_rpc_daq_top;
  import rpc_daq_pkg::*;
  localparam int N_EVENTS = 1000;

  logic clk = 0, rst_n = 0;
  logic [10:0] av_address = '0;
  logic av_read = 0, av_write = 0, av_waitrequest;
  logic [31:0] av_writedata = '0, av_readdata;
  logic [2:0] irq;
  logic [127:0] strip_hits = '0;
  logic trig_in = 0, rtc_sync = 0;
  logic [15:0] strip_rate = '0;
  logic [8:0] fold_in = '0;
  logic [9:0] w_addr;
  logic [15:0] w_data_o, w_data_i;
  logic w_data_oe, w_cs_n, w_wr_n, w_rd_n, w_int_n;
  logic spi_sclk, spi_mosi, spi_miso, spi_cs_n;
  logic jtag_tck, jtag_tms, jtag_tdi, jtag_tdo;

  int checks = 0, failures = 0;
  longint cyc = 0;

  rpc_daq_top dut (.clk, .rst_n, .av_address, .av_read, .av_write, .av_writedata, .av_readdata,
    .av_waitrequest, .irq, .strip_hits, .trig_in, .rtc_sync, .strip_rate, .fold_in, .w_addr,
    .w_data_o, .w_data_oe, .w_data_i, .w_cs_n, .w_wr_n, .w_rd_n, .w_int_n, .spi_sclk,
    .spi_mosi, .spi_miso, .spi_cs_n, .jtag_tck, .jtag_tms, .jtag_tdi, .jtag_tdo);
  jtag_tap_model #(.SETUP_LEN(647)) hptdc (.tck(jtag_tck), .tms(jtag_tms), .tdi(jtag_tdi),
    .tdo(jtag_tdo));
  w5300_model chip (.addr(w_addr), .data_in(w_data_o), .cs_n(w_cs_n), .wr_n(w_wr_n),
    .rd_n(w_rd_n), .data_out(w_data_i), .int_n(w_int_n));

  always #10 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  // mechanism counters
  int m_accept = 0, m_lost_busy = 0, m_fifo_block = 0, m_reopen = 0, m_xfer = 0;
  int m_wait = 0, m_cmd = 0, m_mon = 0, m_prio = 0, m_spi = 0, m_rtc = 0, m_drop = 0;
  int m_jtag = 0, m_stall = 0, m_monpkt = 0, m_mask = 0;
  logic [127:0] smask = '0;   // strip mask written at the start of the run
  logic [31:0] mon_words [$];    // monitoring packet words sent to socket 2

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin : watchdog
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog events=%0d trig=%0d pending=%0d irq=%b blk=%0d", events_done, n_trig, pending_words, irq, m_fifo_block);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- scaler inputs: channel i is a square wave of half period i+2 ----------
  always @(negedge clk) begin
    for (int i = 0; i < 16; i++) strip_rate[i] <= ((cyc / (i + 2)) % 2) == 1;
    for (int i = 0; i < 9; i++)  fold_in[i]    <= ((cyc / (i + 18)) % 2) == 1;
  end

  // ---------------- HV SPI slave model ----------------
  logic [15:0] spi_got = '0;
  int spi_frames = 0;
  assign spi_miso = 1'b1;
  always @(posedge spi_sclk) if (!spi_cs_n) spi_got <= {spi_got[14:0], spi_mosi};
  always @(posedge spi_cs_n) if (rst_n) spi_frames++;

  // ---------------- trigger generator ----------------
  logic [127:0] pat_log [$];
  longint       pat_cyc [$];
  int n_trig = 0;
  bit gen_finished = 0;
  bit run_started = 0;
  bit hold_done = 0;  // main loop has paused transfers once to fill the FIFO

  initial begin : trig_gen
    wait (run_started);
    repeat (200) @(negedge clk);
    while (events_done < N_EVENTS) begin
      logic [127:0] p;
      p = {$urandom, $urandom, $urandom, $urandom};
      strip_hits = p;
      repeat (20) @(negedge clk);
      pat_log.push_back(p & ~smask);
      if ((p & smask) != '0) m_mask++;
      pat_cyc.push_back(cyc);
      trig_in = 1;
      repeat (3) @(negedge clk);
      trig_in = 0;
      n_trig++;
      repeat ($urandom_range(60, 1500)) @(negedge clk);
    end
    gen_finished = 1;
  end

  // ---------------- processor bus tasks ----------------
  task automatic bus_wr(input logic [10:0] a, input logic [31:0] d);
    @(negedge clk);
    av_address = a; av_writedata = d; av_write = 1;
    #1;
    while (av_waitrequest) begin @(negedge clk); #1; end
    @(posedge clk); #1;
    av_write = 0;
  endtask

  task automatic bus_rd(input logic [10:0] a, output logic [31:0] d);
    @(negedge clk);
    av_address = a; av_read = 1;
    #1;
    while (av_waitrequest) begin @(negedge clk); #1; end
    d = av_readdata;
    @(posedge clk); #1;
    av_read = 0;
  endtask

  task automatic w_wr(input logic [9:0] a, input logic [15:0] d);
    longint c0 = cyc;
    bus_wr(11'h400 | 11'(a >> 1), {16'h0, d});
    if (cyc - c0 > 2) m_wait++;
    if (cyc - c0 > 20) m_stall++;
  endtask

  task automatic w_rd(input logic [9:0] a, output logic [15:0] d);
    logic [31:0] r;
    longint c0 = cyc;
    bus_rd(11'h400 | 11'(a >> 1), r);
    if (cyc - c0 > 20) m_stall++;
    d = r[15:0];
  endtask

  // ---------------- software state ----------------
  logic [31:0] sent_words [$];   // words written into the FIFO, in order
  int          pending_words = 0;
  int          last_pat = -1;
  int          events_done = 0;
  int          exp_lost = 0;
  longint      rtc_load_cyc;
  logic [63:0] rtc_base = 64'h0000_0100_0000_0000;
  bit          was_blocked = 0;
  int          mon_seen = 0;
  int          cmd_sent = 0;

  task automatic event_isr();
    logic [31:0] evno, tslo, tshi, d, st;
    logic [127:0] h;
    logic [63:0] ts, exp_ts;
    int n_tdc, found;
    bus_rd(11'(REG_EVENT_NO), evno);
    bus_rd(11'(REG_EVT_TS_LO), tslo);
    bus_rd(11'(REG_EVT_TS_HI), tshi);
    for (int k = 0; k < 4; k++) begin bus_rd(11'(REG_HIT0) + 11'(k), d); h[32*k +: 32] = d; end
    ts = {tshi, tslo};
    found = -1;
    for (int j = last_pat + 1; j < pat_log.size(); j++) if (pat_log[j] == h) begin found = j; break; end
    check(found >= 0, $sformatf("event %0d hit pattern belongs to a trigger", evno));
    if (found >= 0) begin
      exp_ts = rtc_base + 64'((pat_cyc[found] - rtc_load_cyc) / 5);
      check(ts >= exp_ts && ts <= exp_ts + 2, $sformatf("timestamp %0d expected about %0d", ts, exp_ts));
      exp_lost += found - last_pat - 1;
      if (found - last_pat - 1 > 0) begin
        if (was_blocked) m_fifo_block++; else m_lost_busy++;
      end
      last_pat = found;
    end
    check(evno == 32'(events_done + 1), $sformatf("event number %0d expected %0d", evno, events_done + 1));
    // event packet, 80..600 bytes = 20..150 words
    n_tdc = $urandom_range(20, 150) - 13;
    begin
      logic [31:0] pkt [$];
      pkt.push_back(32'hE5E5_0001);         // event start marker
      pkt.push_back(32'h0);                 // reserved LSW
      pkt.push_back(32'h0);                 // reserved MSW
      pkt.push_back(32'h0000_0007);         // DAQ ID
      pkt.push_back(evno);
      pkt.push_back(tslo); pkt.push_back(tshi);
      for (int k = 0; k < 4; k++) pkt.push_back(h[32*k +: 32]);
      pkt.push_back(32'(n_tdc));            // TDC data size
      for (int k = 0; k < n_tdc; k++) pkt.push_back($urandom);
      pkt.push_back(32'hE5E5_FFFF);         // event stop marker
      foreach (pkt[k]) begin bus_wr(11'(REG_FIFO_DATA), pkt[k]); sent_words.push_back(pkt[k]); end
      pending_words += pkt.size();
    end
    bus_rd(11'(REG_EVT_WORDS), d);
    check(d == 32'(13 + n_tdc), "event write control word count");
    bus_wr(11'(REG_IRQ), 32'h1);            // ack event interrupt
    bus_wr(11'(REG_CMD), 32'h1);            // end of event, frees the latch
    events_done++;
    m_accept++;
  endtask

  task automatic cmd_isr();
    logic [15:0] ir;
    w_rd(10'h002, ir);                      // W5300 interrupt register
    check(ir == 16'h0010, $sformatf("W5300 IR %h", ir));
    w_wr(10'h002, ir);                      // clear it
    chip.int_req = 0;
    bus_wr(11'(REG_SPI), 32'h0000_C000 | 32'(cmd_sent));   // HV command frame
    begin
      logic [31:0] st;
      do bus_rd(11'(REG_STATUS), st); while (st[5]);
    end
    check(spi_got == (16'hC000 | 16'(cmd_sent)), "HV frame received by module");
    m_spi++;
    cmd_sent++;
    m_cmd++;
  endtask

  task automatic mon_isr();
    logic [31:0] d, lo, hi;
    logic [31:0] pkt [$];
    bus_wr(11'(REG_IRQ), 32'h4);
    mon_seen++;
    // monitoring packet: start marker, reserved LSW/MSW, DAQ ID, RTC, period,
    // strip/fold rates, TPH, HV monitor, stop marker
    bus_rd(11'(REG_RTC_LO), lo);
    bus_rd(11'(REG_RTC_HI), hi);
    pkt.push_back(32'hA5A5_0001); pkt.push_back(32'h0); pkt.push_back(32'h0);
    pkt.push_back(32'h0000_0007); pkt.push_back(lo); pkt.push_back(hi);
    pkt.push_back(32'd50_000);
    for (int i = 0; i < 25; i++) begin
      int hp, exp;
      bus_rd(11'(REG_SCALER0) + 11'(i), d);
      pkt.push_back(d);
      hp = (i < 16) ? i + 2 : (i - 16) + 18;
      exp = 50_000 / (2 * hp);
      check(d[31:24] == 8'(i), "scaler channel ID");
      if (mon_seen > 1)
        check(int'(d[23:0]) >= exp - 1 && int'(d[23:0]) <= exp + 1,
              $sformatf("scaler %0d count %0d expected %0d", i, d[23:0], exp));
    end
    pkt.push_back(32'h0);                                  // TPH: no sensor here
    bus_rd(11'(REG_SPI), d);
    pkt.push_back(d);                                      // last HV module reply
    pkt.push_back(32'hA5A5_FFFF);
    // processor path into the Mon socket (2) TX FIFO, then SEND
    foreach (pkt[k]) begin
      w_wr(w5300_tx_fifo_addr(SOCK_MON), pkt[k][31:16]);
      w_wr(w5300_tx_fifo_addr(SOCK_MON), pkt[k][15:0]);
      mon_words.push_back(pkt[k]);
    end
    w_wr(10'h2A2, 16'(pkt.size() * 4));                   // Sn_TX_WRSR (low), socket 2
    w_wr(10'h282, 16'h0020);                               // Sn_CR = SEND
    m_monpkt++;
    m_mon++;
  endtask

  // interrupt dispatch in priority order; checks the reported highest id
  task automatic service_irq();
    logic [31:0] d;
    if (irq[0] && irq[2]) begin
      bus_rd(11'(REG_IRQ), d);
      check(d[5:4] == 2'(IRQ_EVENT), "event served before monitoring");
      m_prio++;
    end
    if (irq[0])      event_isr();
    else if (irq[1]) cmd_isr();
    else if (irq[2]) mon_isr();
  endtask

  task automatic transfer(input int words);
    logic [31:0] st;
    bus_wr(11'(REG_XFER), {13'h0, SOCK_EVENT, 16'(words * 2)});
    // interrupts preempt the main loop while the engine runs
    forever begin
      bus_rd(11'(REG_STATUS), st);
      if (st[4]) break;
      service_irq();
    end
    w_wr(10'h260 + 10'h20, 16'(words * 4 >> 16));       // Sn_TX_WRSR (high), socket 1
    w_wr(10'h260 + 10'h22, 16'(words * 4));             // Sn_TX_WRSR (low)
    w_wr(10'h260 + 10'h02, 16'h0020);                   // Sn_CR = SEND
    pending_words -= words;
    m_xfer++;
    if (was_blocked) begin
      bus_rd(11'(REG_STATUS), st);
      if (!st[1]) begin m_reopen++; was_blocked = 0; end
    end
  endtask

  // ---------------- HPTDC configuration over JTAG ----------------
  task automatic jtag_cmd(input int n, input bit mode, input bit last, input logic [31:0] din,
                          output logic [31:0] dout);
    logic [31:0] st;
    bus_wr(11'(REG_JTAG_DATA), din);
    bus_wr(11'(REG_JTAG_CMD), 32'(n - 1) | (32'(mode) << 8) | (32'(last) << 9));
    do bus_rd(11'(REG_STATUS), st); while (st[6]);
    bus_rd(11'(REG_JTAG_DATA), dout);
  endtask

  task automatic hptdc_config();
    logic [31:0] q, w;
    logic [646:0] cfg;
    int pos, n;
    for (int k = 0; k < 647; k++) cfg[k] = 1'($urandom);
    jtag_cmd(6, 1, 0, 32'b011111, q);         // Test-Logic-Reset, Run-Test/Idle
    jtag_cmd(4, 1, 0, 32'b0011, q);           // Shift-IR
    jtag_cmd(5, 0, 1, 32'b10001, q);          // IDCODE
    jtag_cmd(2, 1, 0, 32'b01, q);
    jtag_cmd(3, 1, 0, 32'b001, q);            // Shift-DR
    jtag_cmd(32, 0, 1, 32'h0, q);
    check(q == 32'h8470_DACE, $sformatf("HPTDC IDCODE %h", q));
    jtag_cmd(2, 1, 0, 32'b01, q);
    jtag_cmd(4, 1, 0, 32'b0011, q);
    jtag_cmd(5, 0, 1, 32'b11000, q);          // SETUP
    jtag_cmd(2, 1, 0, 32'b01, q);
    jtag_cmd(3, 1, 0, 32'b001, q);
    pos = 0;
    while (pos < 647) begin
      n = (647 - pos > 32) ? 32 : 647 - pos;
      w = '0;
      for (int k = 0; k < n; k++) w[k] = cfg[pos + k];
      jtag_cmd(n, 0, pos + n == 647, w, q);
      pos += n;
    end
    jtag_cmd(2, 1, 0, 32'b01, q);             // Update-DR, Run-Test/Idle
    check(hptdc.setup_q == cfg, "HPTDC SETUP register configured");
    if (hptdc.setup_q == cfg) m_jtag++;
  endtask

  // ---------------- processor main loop ----------------
  initial begin : cpu
    logic [31:0] d;
    logic [15:0] r16;
    repeat (5) @(negedge clk);
    rst_n = 1;
    repeat (5) @(negedge clk);
    hptdc_config();
    // start of run
    bus_wr(11'(REG_RTC_LO), rtc_base[31:0]);
    bus_wr(11'(REG_RTC_HI), rtc_base[63:32]);
    @(negedge clk);
    bus_wr(11'(REG_CMD), 32'h8);                         // LOADRTC
    rtc_load_cyc = cyc;
    bus_rd(11'(REG_RTC_LO), d);
    check(d >= rtc_base[31:0] && d <= rtc_base[31:0] + 2, "RTC loaded");
    bus_rd(11'(REG_RTC_HI), d);
    check(d == rtc_base[63:32], "RTC upper word");
    m_rtc++;
    w_rd(10'h000, r16);
    check(r16 == chip.regs[0], "W5300 register read through the window");
    bus_wr(11'(REG_MON_PERIOD), 32'd50_000);              // 1 ms monitoring period
    bus_wr(11'(REG_CMD), 32'h2 | 32'h4);                 // clear event number, clear FIFO
    bus_wr(11'(REG_FIFO_DATA), 32'hDEAD_BEEF);           // CTRL_FLAG low: dropped
    bus_rd(11'(REG_STATUS), d);
    if (d[2] && d[27:16] == 0) m_drop++;
    bus_wr(11'(REG_CMD), 32'h20);                        // clear overflow
    for (int k = 0; k < 8; k++) smask[$urandom_range(127, 0)] = 1'b1;
    for (int k = 0; k < 4; k++) bus_wr(11'(REG_MASK0) + 11'(k), smask[32*k +: 32]);
    for (int k = 0; k < 4; k++) begin
      bus_rd(11'(REG_MASK0) + 11'(k), d);
      check(d == smask[32*k +: 32], "strip mask read back");
    end
    bus_wr(11'(REG_CTRL), 32'h7);                        // run, CTRL_FLAG, monitoring on
    run_started = 1;

    while (!gen_finished || irq[0]) begin
      // W5300 command arrival now and then
      if (($urandom_range(0, 3000) == 0) && !chip.int_req) begin
        chip.regs[1] = 16'h0010;                         // IR: socket 4 (unicast command)
        chip.int_req = 1;
      end
      if (irq != 3'b000) service_irq();
      else begin
        // main loop: fill the FIFO for a while once, to exercise the space check
        if (!hold_done && events_done >= 40) begin
          // hold transfers until the FIFO lacks room for a largest event, then let
          // triggers arrive against the closed gate for a while
          bus_rd(11'(REG_STATUS), d);
          if (d[1] && int'(d[27:16]) > 1024 - 150) begin
            repeat (5000) @(negedge clk);
            was_blocked = 1;
            hold_done = 1;
          end
        end else if (pending_words >= 64) transfer(pending_words);
        else @(negedge clk);
      end
    end
    // an event and a monitoring interrupt pending together: hold them off with the
    // mask, let the monitoring timer expire, trigger once, then unmask
    bus_wr(11'(REG_IRQ_MASK), 32'h0);
    if (pending_words > 0) transfer(pending_words);
    do bus_rd(11'(REG_IRQ), d); while (!d[2]);
    begin
      logic [127:0] p;
      p = {$urandom, $urandom, $urandom, $urandom};
      strip_hits = p;
      repeat (20) @(negedge clk);
      pat_log.push_back(p & ~smask);
      if ((p & smask) != '0) m_mask++;
      pat_cyc.push_back(cyc);
      trig_in = 1;
      repeat (3) @(negedge clk);
      trig_in = 0;
    end
    repeat (10) @(negedge clk);
    bus_wr(11'(REG_IRQ_MASK), 32'h7);
    check(irq[0] && irq[2], "event and monitoring interrupts pending together");
    service_irq();
    check(!irq[0] && irq[2], "event served, monitoring still pending");
    service_irq();
    if (pending_words > 0) transfer(pending_words);
    repeat (20) @(negedge clk);

    // W5300 side: reassemble socket 1 TX FIFO writes
    begin
      logic [15:0] halves [$];
      int bad;
      for (int i = 0; i < chip.wlog_addr.size(); i++)
        if (chip.wlog_addr[i] == w5300_tx_fifo_addr(SOCK_EVENT)) halves.push_back(chip.wlog_data[i]);
      check(halves.size() == 2 * sent_words.size(),
            $sformatf("%0d halves at the W5300, %0d words sent", halves.size(), sent_words.size()));
      bad = 0;
      for (int i = 0; i < sent_words.size() && 2 * i + 1 < halves.size(); i++)
        if ({halves[2*i], halves[2*i+1]} != sent_words[i]) bad++;
      check(bad == 0, $sformatf("%0d words differ at the W5300", bad));
    end
    exp_lost += pat_log.size() - 1 - last_pat;    // triggers after the last accepted one
    begin
      logic [15:0] mh [$];
      int bad;
      for (int i = 0; i < chip.wlog_addr.size(); i++)
        if (chip.wlog_addr[i] == w5300_tx_fifo_addr(SOCK_MON)) mh.push_back(chip.wlog_data[i]);
      bad = 0;
      for (int i = 0; i < mon_words.size(); i++)
        if (2 * i + 1 >= mh.size() || {mh[2*i], mh[2*i+1]} != mon_words[i]) bad++;
      check(bad == 0 && mh.size() == 2 * mon_words.size(), "monitoring packets at the Mon socket");
    end
    bus_rd(11'(REG_N_LOST), d);
    check(d == 32'(exp_lost), $sformatf("lost triggers %0d, expected %0d", d, exp_lost));
    bus_rd(11'(REG_N_ACCEPTED), d);
    check(d == 32'(events_done), "accepted triggers");
    check(spi_frames == cmd_sent, "SPI frames");

    $display("mechanisms: accepted=%0d lost_busy=%0d fifo_block=%0d reopen=%0d xfer=%0d w5300_wait=%0d cmd=%0d mon=%0d prio=%0d spi=%0d rtc=%0d drop=%0d jtag=%0d stall=%0d monpkt=%0d mask=%0d",
             m_accept, m_lost_busy, m_fifo_block, m_reopen, m_xfer, m_wait, m_cmd, m_mon, m_prio, m_spi, m_rtc, m_drop, m_jtag, m_stall, m_monpkt, m_mask);
    check(m_accept > 0, "mechanism: trigger accepted");
    check(m_lost_busy > 0, "mechanism: trigger lost while event latch busy");
    check(m_fifo_block > 0, "mechanism: trigger blocked on FIFO space");
    check(m_reopen > 0, "mechanism: gate reopened after transfer");
    check(m_xfer > 0, "mechanism: hardware FIFO-to-W5300 transfer");
    check(m_wait > 0, "mechanism: processor W5300 access with wait states");
    check(m_cmd > 0, "mechanism: command interrupt");
    check(m_mon > 1, "mechanism: monitoring interrupt");
    check(m_prio > 0, "mechanism: event before simultaneous monitoring interrupt");
    check(m_spi > 0, "mechanism: HV SPI frame");
    check(m_rtc > 0, "mechanism: RTC load");
    check(m_drop > 0, "mechanism: write dropped with CTRL_FLAG low");
    check(m_jtag > 0, "mechanism: HPTDC configured over JTAG");
    check(m_stall > 0, "mechanism: processor W5300 access held while the engine owns the bus");
    check(m_monpkt > 0, "mechanism: monitoring packet sent to the Mon socket");
    check(m_mask > 0, "mechanism: masked strip removed from the latched hits");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
