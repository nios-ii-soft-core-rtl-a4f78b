// tb_event_rates: event-size and trigger-rate workload on the whole DAQ logic.
//
// Runs the complete design at its default parameters under random (exponentially spaced)
// triggers at an average of 5 kHz for four event sizes: 120, 408 and 600 bytes, and
// sizes drawn uniformly from 80 to 600 bytes. A processor stand-in services each event
// interrupt the way the event ISR does (read the latch, write the event packet into the
// hardware FIFO, end the event) with its bus accesses spaced so that a 600-byte event
// takes about 31 us to read and write, the software time reported for that step. Its main
// loop hands whatever is in the FIFO to the hardware transfer engine for socket 1 and
// then issues SEND; an event interrupt preempts the loop while it waits for the engine.
// For each size the test checks:
//  - every word written by the ISR reaches the socket 1 TX FIFO register, in order;
//  - the lost-trigger counter equals the triggers whose hit pattern was never latched;
//  - the lost fraction agrees (within 3 sigma + 1 %) with the fraction of time the gate
//    was closed, worked out from the testbench's own trigger and end-of-event times,
//    i.e. the gate behaves as a non-extending dead time ending when the event is ended;
//  - hardware transfers write the W5300 back to back, one 16-bit write every 80 ns, and a
//    600-byte event goes out in 24 us, inside the 35 us reported for the hardware path;
//  - the FIFO never overflows.
// It prints the loss, the mean dead time and the mean ISR time per size.
module tb_event_rates;
  import rpc_daq_pkg::*;
  localparam int N_TRIG = 400;                 // triggers per event size
  localparam int MEAN_GAP = 10_000;            // clocks between triggers: 5 kHz at 50 MHz
  localparam int ISR_GAP = 9;                  // idle clocks after each ISR bus access

  logic clk = 0, rst_n = 0;
  logic [10:0] av_address = '0;
  logic av_read = 0, av_write = 0, av_waitrequest;
  logic [31:0] av_writedata = '0, av_readdata;
  logic [2:0] irq;
  logic [127:0] strip_hits = '0;
  logic trig_in = 0;
  logic [9:0] w_addr;
  logic [15:0] w_data_o, w_data_i;
  logic w_data_oe, w_cs_n, w_wr_n, w_rd_n, w_int_n;
  logic spi_sclk, spi_mosi, spi_cs_n;
  logic jtag_tck, jtag_tms, jtag_tdi;

  int checks = 0, failures = 0;
  longint cyc = 0;

  rpc_daq_top dut (.clk, .rst_n, .av_address, .av_read, .av_write, .av_writedata, .av_readdata,
    .av_waitrequest, .irq, .strip_hits, .trig_in, .rtc_sync(1'b0), .strip_rate(16'h0),
    .fold_in(9'h0), .w_addr, .w_data_o, .w_data_oe, .w_data_i, .w_cs_n, .w_wr_n, .w_rd_n,
    .w_int_n, .spi_sclk, .spi_mosi, .spi_miso(1'b0), .spi_cs_n, .jtag_tck, .jtag_tms,
    .jtag_tdi, .jtag_tdo(1'b0));
  w5300_model chip (.addr(w_addr), .data_in(w_data_o), .cs_n(w_cs_n), .wr_n(w_wr_n),
    .rd_n(w_rd_n), .data_out(w_data_i), .int_n(w_int_n));

  always #10 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin : watchdog
    repeat (40_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- trigger generator ----------------
  logic [127:0] pat_log [$];
  longint       pat_cyc [$];
  int  n_trig = 0;
  bit  gen_run = 0, gen_finished = 0;

  initial begin : trig_gen
    forever begin
      wait (gen_run);
      n_trig = 0;
      while (n_trig < N_TRIG) begin
        logic [127:0] p;
        real u;
        int gap;
        p = {$urandom, $urandom, $urandom, $urandom};
        strip_hits = p;
        repeat (20) @(negedge clk);
        pat_log.push_back(p);
        pat_cyc.push_back(cyc);
        trig_in = 1;
        repeat (3) @(negedge clk);
        trig_in = 0;
        n_trig++;
        u = (real'($urandom_range(1, 1_000_000))) / 1_000_000.0;
        gap = int'(-$ln(u) * real'(MEAN_GAP - 23));
        repeat (gap) @(negedge clk);
      end
      gen_finished = 1;
      wait (!gen_run);
    end
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

  // ISR accesses, paced like the processor's software
  task automatic isr_wr(input logic [10:0] a, input logic [31:0] d);
    bus_wr(a, d);
    repeat (ISR_GAP) @(negedge clk);
  endtask

  task automatic isr_rd(input logic [10:0] a, output logic [31:0] d);
    bus_rd(a, d);
    repeat (ISR_GAP) @(negedge clk);
  endtask

  // ---------------- software state ----------------
  logic [31:0] sent_words [$];
  int      pending_words = 0;
  int      last_pat = -1;
  int      exp_lost = 0;
  int      events = 0;
  int      size_bytes = 120;          // 0: random 80..600
  longint  dead_sum = 0, isr_sum = 0;
  int      xfer_bad_gap = 0, xfer_600_max_ns = 0;

  task automatic event_isr();
    logic [31:0] evno, tslo, tshi, d;
    logic [127:0] h;
    int found, words;
    longint t0;
    t0 = cyc;
    bus_wr(11'(REG_IRQ), 32'h1);
    isr_rd(11'(REG_EVENT_NO), evno);
    isr_rd(11'(REG_EVT_TS_LO), tslo);
    isr_rd(11'(REG_EVT_TS_HI), tshi);
    for (int k = 0; k < 4; k++) begin isr_rd(11'(REG_HIT0) + 11'(k), d); h[32*k +: 32] = d; end
    found = -1;
    for (int j = last_pat + 1; j < pat_log.size(); j++) if (pat_log[j] == h) begin found = j; break; end
    check(found >= 0, "latched hit pattern belongs to a trigger");
    if (found >= 0) begin
      exp_lost += found - last_pat - 1;
      last_pat = found;
    end
    words = (size_bytes == 0) ? $urandom_range(20, 150) : size_bytes / 4;
    begin
      logic [31:0] pkt [$];
      pkt.push_back(32'hE5E5_0001);
      pkt.push_back(32'h0); pkt.push_back(32'h0);
      pkt.push_back(32'h0000_0007);
      pkt.push_back(evno);
      pkt.push_back(tslo); pkt.push_back(tshi);
      for (int k = 0; k < 4; k++) pkt.push_back(h[32*k +: 32]);
      pkt.push_back(32'(words - 13));
      for (int k = 0; k < words - 13; k++) pkt.push_back($urandom);
      pkt.push_back(32'hE5E5_FFFF);
      foreach (pkt[k]) begin isr_wr(11'(REG_FIFO_DATA), pkt[k]); sent_words.push_back(pkt[k]); end
      pending_words += pkt.size();
    end
    bus_wr(11'(REG_CMD), 32'h1);           // end of event: the gate may reopen
    if (found >= 0) dead_sum += cyc - pat_cyc[found];
    isr_sum += cyc - t0;
    events++;
  endtask

  task automatic transfer(input int words);
    logic [31:0] st;
    int first, n;
    realtime tf, tl, tp;
    first = chip.wlog_addr.size();
    bus_wr(11'(REG_XFER), {13'h0, SOCK_EVENT, 16'(words * 2)});
    forever begin
      bus_rd(11'(REG_STATUS), st);
      if (st[4]) break;
      if (irq[0]) event_isr();
    end
    // the engine's writes: back to back at 80 ns
    n = 0;
    tp = 0;
    tf = 0;
    tl = 0;
    for (int i = first; i < chip.wlog_addr.size(); i++) begin
      if (chip.wlog_addr[i] == w5300_tx_fifo_addr(SOCK_EVENT)) begin
        if (n == 0) tf = chip.wlog_time[i];
        else if (chip.wlog_time[i] - tp != 80.0) xfer_bad_gap++;
        tp = chip.wlog_time[i];
        tl = chip.wlog_time[i];
        n++;
      end
    end
    check(n == 2 * words, $sformatf("transfer wrote %0d halves, expected %0d", n, 2 * words));
    if (words == 150 && int'(tl - tf + 80.0) > xfer_600_max_ns) xfer_600_max_ns = int'(tl - tf + 80.0);
    bus_wr(11'h400 | 11'((10'h260 + 10'h20) >> 1), 32'(words * 4 >> 16));
    bus_wr(11'h400 | 11'((10'h260 + 10'h22) >> 1), 32'(16'(words * 4)));
    bus_wr(11'h400 | 11'((10'h260 + 10'h02) >> 1), 32'h20);   // SEND
    pending_words -= words;
  endtask

  task automatic run_size(input int bytes);
    logic [31:0] d, nlost;
    longint t_start, t_end;
    real loss, closed, sigma, mean_dead_us, mean_isr_us;
    size_bytes = bytes;
    sent_words.delete();
    pat_log.delete();
    pat_cyc.delete();
    chip.wlog_addr.delete(); chip.wlog_data.delete(); chip.wlog_time.delete();
    last_pat = -1; exp_lost = 0; events = 0; dead_sum = 0; isr_sum = 0;
    xfer_bad_gap = 0; xfer_600_max_ns = 0;
    bus_wr(11'(REG_CMD), 32'h10 | 32'h20 | 32'h2);      // clear counters, overflow, event no
    t_start = cyc;
    gen_finished = 0;
    gen_run = 1;
    while (!gen_finished || irq[0]) begin
      if (irq[0]) event_isr();
      else if (pending_words > 0) transfer(pending_words);
      else @(negedge clk);
    end
    t_end = cyc;
    gen_run = 0;
    if (pending_words > 0) transfer(pending_words);
    exp_lost += pat_log.size() - 1 - last_pat;
    // W5300 side
    begin
      logic [15:0] halves [$];
      int bad;
      for (int i = 0; i < chip.wlog_addr.size(); i++)
        if (chip.wlog_addr[i] == w5300_tx_fifo_addr(SOCK_EVENT)) halves.push_back(chip.wlog_data[i]);
      bad = 0;
      for (int i = 0; i < sent_words.size(); i++)
        if (2 * i + 1 >= halves.size() || {halves[2*i], halves[2*i+1]} != sent_words[i]) bad++;
      check(bad == 0 && halves.size() == 2 * sent_words.size(),
            $sformatf("%0d B: %0d of %0d words wrong or missing at the W5300", bytes, bad, sent_words.size()));
    end
    bus_rd(11'(REG_N_LOST), nlost);
    check(nlost == 32'(exp_lost), $sformatf("%0d B: lost counter %0d, expected %0d", bytes, nlost, exp_lost));
    bus_rd(11'(REG_N_ACCEPTED), d);
    check(d == 32'(events), $sformatf("%0d B: accepted %0d, events %0d", bytes, d, events));
    check(int'(nlost) + events == N_TRIG, "every trigger either accepted or lost");
    bus_rd(11'(REG_STATUS), d);
    check(!d[2], "no FIFO write dropped");
    check(xfer_bad_gap == 0, $sformatf("%0d B: %0d engine writes not 80 ns apart", bytes, xfer_bad_gap));
    if (bytes == 600) check(xfer_600_max_ns > 0 && xfer_600_max_ns <= 35_000,
                            $sformatf("600 B event sent to the W5300 in %0d ns", xfer_600_max_ns));
    loss   = real'(nlost) / real'(N_TRIG);
    closed = real'(dead_sum) / real'(t_end - t_start);
    sigma  = $sqrt(closed * (1.0 - closed) / real'(N_TRIG));
    check(loss <= closed + 3.0 * sigma + 0.01 && loss >= closed - 3.0 * sigma - 0.01,
          $sformatf("%0d B: loss %f against gate-closed fraction %f", bytes, loss, closed));
    mean_dead_us = real'(dead_sum) / real'(events) * 0.02;
    mean_isr_us  = real'(isr_sum) / real'(events) * 0.02;
    $display("size %0s: triggers %0d accepted %0d lost %0d (%.2f %%), trigger rate %.2f kHz, mean dead time %.1f us, mean ISR %.1f us%s",
             bytes == 0 ? "80-600 B" : $sformatf("%0d B", bytes), N_TRIG, events, nlost, 100.0 * loss,
             real'(N_TRIG) / (real'(t_end - t_start) * 20.0e-9) / 1000.0, mean_dead_us, mean_isr_us,
             bytes == 600 ? $sformatf(", 600 B transfer %0d ns", xfer_600_max_ns) : "");
  endtask

  initial begin : cpu
    repeat (5) @(negedge clk);
    rst_n = 1;
    repeat (5) @(negedge clk);
    bus_wr(11'(REG_IRQ_MASK), 32'h1);                   // event interrupt only
    bus_wr(11'(REG_CMD), 32'h4);                        // clear FIFO
    bus_wr(11'(REG_CTRL), 32'h3);                       // run, CTRL_FLAG
    run_size(120);
    run_size(408);
    run_size(600);
    run_size(0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
