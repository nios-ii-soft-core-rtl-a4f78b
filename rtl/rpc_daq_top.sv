// rpc_daq_top: FPGA hardware logic of one RPC-DAQ around its soft processor.
//
// One RPC-DAQ reads out one resistive plate chamber: 128 strip signals (X and Y) and a
// global trigger come in; event data, monitoring data and command replies leave through
// a W5300 hardwired TCP/IP controller. A NIOS II soft processor runs the event,
// command and monitoring interrupt routines and the main loop; this module is all the
// logic around it, reached over one 32-bit memory-mapped port (av_*) and three
// interrupt lines (irq).
// Event path: strip hits -> hit_delay -> strip mask -> event_latch, opened by
// trigger_ctrl (the trigger gate). A latched event (hits, RTC time, event number)
// interrupts the processor, which writes the event words into the hardware FIFO
// through event_write_ctrl and then ends the event; the gate reopens only if the FIFO
// still has room for a 600-byte event. Strips that the processor has masked as noisy
// (128-bit mask register) are cleared from the pattern before the latch.
// From the FIFO the data go to the W5300 either word by word through the processor or,
// after a start written to REG_XFER, by fifo_to_w5300, which takes the W5300 bus from
// the processor for the length of the transfer.
// Monitoring path: mon_timer periodically interrupts and snapshots scaler_bank.
// Also inside: rtc (100 ns time base), irq_ctrl (event > command > monitoring),
// spi_master (HV module), jtag_master (HPTDC configuration) and w5300_bus_ctrl (W5300
// pins).
// The block structure follows the DAQ description; sizes not given there (FIFO depth,
// delay length, SPI frame) are parameters with this design's defaults.
module rpc_daq_top
  import rpc_daq_pkg::*;
#(
  parameter int unsigned FIFO_DEPTH     = 1024,
  parameter int unsigned HIT_DELAY      = 8,
  parameter int unsigned MON_PERIOD_RST = MON_PERIOD_DEFAULT,
  parameter int unsigned SPI_DIV        = 25,
  parameter int unsigned JTAG_DIV       = 5
) (
  input  logic               clk,
  input  logic               rst_n,
  // processor data master
  input  logic [10:0]        av_address,
  input  logic               av_read,
  input  logic               av_write,
  input  logic [31:0]        av_writedata,
  output logic [31:0]        av_readdata,
  output logic               av_waitrequest,
  output logic [2:0]         irq,
  // detector and trigger
  input  logic [HIT_W-1:0]   strip_hits,
  input  logic               trig_in,
  input  logic               rtc_sync,
  input  logic [N_STRIP_SCALERS-1:0] strip_rate,
  input  logic [N_FOLD_SCALERS-1:0]  fold_in,
  // W5300
  output logic [9:0]         w_addr,
  output logic [15:0]        w_data_o,
  output logic               w_data_oe,
  input  logic [15:0]        w_data_i,
  output logic               w_cs_n,
  output logic               w_wr_n,
  output logic               w_rd_n,
  input  logic               w_int_n,
  // HV module SPI
  output logic               spi_sclk,
  output logic               spi_mosi,
  input  logic               spi_miso,
  output logic               spi_cs_n,
  // HPTDC JTAG
  output logic               jtag_tck,
  output logic               jtag_tms,
  output logic               jtag_tdi,
  input  logic               jtag_tdo
);
  localparam int unsigned FCW = $clog2(FIFO_DEPTH) + 1;

  // bridge controls
  logic run_enable, ctrl_flag, mon_enable, event_done, clear_evno, fifo_clear;
  logic rtc_load_sw, clear_counts, clear_ovf, mon_period_we;
  logic [RTC_W-1:0] rtc_preset;
  logic [31:0] mon_period;
  logic [2:0]  irq_ack, irq_mask, irq_pending;
  logic        fifo_push, fifo_pop_cpu, xfer_start, spi_start;
  logic [31:0] fifo_push_data;
  logic [15:0] xfer_n, spi_tx, spi_rx;
  logic [2:0]  xfer_sock;
  logic [4:0]  scaler_idx;
  logic [31:0] scaler_word;
  irq_id_t     irq_id;
  logic        jtag_start, jtag_tms_mode, jtag_tms_last, jtag_busy;
  logic [4:0]  jtag_nbits_m1;
  logic [31:0] jtag_din, jtag_dout;

  // W5300 processor port
  logic        wc_req, wc_we, wc_done;
  logic [9:0]  wc_addr;
  logic [15:0] wc_wdata, wc_rdata;
  // W5300 hardware port
  logic        wh_own, wh_grant, wh_req, wh_done;
  logic [9:0]  wh_addr;
  logic [15:0] wh_wdata;

  // event path
  logic [HIT_W-1:0] hits_d, hits_m, strip_mask, evt_hits;
  logic [RTC_W-1:0] rtc_now, evt_ts;
  logic             trig_gated, trig_blocked, evt_busy, evt_irq, release_evt;
  logic [31:0]      event_no, n_accepted, n_lost;
  logic             fifo_wr, fifo_rd, fifo_full, fifo_empty, wr_overflow;
  logic [31:0]      fifo_wdata, fifo_rdata;
  logic [FCW-1:0]   fifo_count, fifo_free;
  logic [15:0]      evt_words;
  logic             xfer_busy, xfer_done, xfer_pop, spi_busy;
  logic             mon_tick;

  logic_bridge #(.FIFO_CW(FCW)) u_bridge (
    .clk, .rst_n,
    .address(av_address), .read(av_read), .write(av_write), .writedata(av_writedata),
    .readdata(av_readdata), .waitrequest(av_waitrequest),
    .run_enable, .ctrl_flag, .mon_enable, .event_done, .clear_evno, .fifo_clear,
    .rtc_load(rtc_load_sw), .rtc_preset, .clear_counts, .clear_ovf, .mon_period_we,
    .mon_period, .irq_ack, .irq_mask, .fifo_push, .fifo_push_data,
    .fifo_pop(fifo_pop_cpu), .xfer_start, .xfer_n, .xfer_sock, .spi_start, .spi_tx,
    .scaler_idx, .jtag_start, .jtag_nbits_m1, .jtag_tms_mode, .jtag_tms_last, .jtag_din,
    .strip_mask,
    .w_req(wc_req), .w_we(wc_we), .w_addr(wc_addr), .w_wdata(wc_wdata),
    .w_rdata(wc_rdata), .w_done(wc_done),
    .evt_busy, .trig_blocked, .wr_overflow, .xfer_busy, .xfer_done, .spi_busy, .jtag_busy,
    .jtag_dout,
    .fifo_count, .fifo_empty, .fifo_rdata, .event_no, .evt_ts, .evt_hits, .evt_words,
    .rtc_now, .irq_pending, .irq_id, .spi_rx, .n_accepted, .n_lost, .scaler_word
  );

  rtc #(.TICK_DIV(RTC_TICK_DIV), .RTC_W(RTC_W)) u_rtc (
    .clk, .rst_n, .load(rtc_load_sw || rtc_sync), .load_value(rtc_preset),
    .rtc_time(rtc_now), .tick()
  );

  // strips masked off by the processor (noisy channels) never reach the hit latch
  assign hits_m = hits_d & ~strip_mask;

  hit_delay #(.W(HIT_W), .DEPTH(HIT_DELAY)) u_delay (
    .clk, .rst_n, .d(strip_hits), .q(hits_d)
  );

  trigger_ctrl #(.CNT_W(FCW), .THRESH_WORDS(MAX_EVENT_WORDS)) u_trig (
    .clk, .rst_n, .trig_in, .run_enable, .busy(evt_busy), .fifo_free, .clear_counts,
    .trig_out(trig_gated), .blocked(trig_blocked), .n_accepted, .n_lost
  );

  event_latch #(.HIT_W(HIT_W), .RTC_W(RTC_W)) u_latch (
    .clk, .rst_n, .trig(trig_gated), .hits(hits_m), .rtc(rtc_now), .release_evt,
    .clear_evno, .busy(evt_busy), .irq(evt_irq), .hit_q(evt_hits), .ts_q(evt_ts),
    .event_no
  );

  event_write_ctrl u_wctrl (
    .clk, .rst_n, .ctrl_flag, .cpu_wr(fifo_push), .cpu_wdata(fifo_push_data), .event_done,
    .clear_ovf, .fifo_full, .fifo_wr, .fifo_wdata, .release_evt, .words(evt_words),
    .overflow(wr_overflow)
  );

  assign fifo_rd = xfer_busy ? xfer_pop : fifo_pop_cpu;

  sync_fifo #(.W(32), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk, .rst_n, .clear(fifo_clear), .wr(fifo_wr), .wdata(fifo_wdata), .rd(fifo_rd),
    .rdata(fifo_rdata), .count(fifo_count), .free(fifo_free), .full(fifo_full),
    .empty(fifo_empty)
  );

  fifo_to_w5300 u_xfer (
    .clk, .rst_n, .start(xfer_start), .n_half(xfer_n), .sock(xfer_sock),
    .busy(xfer_busy), .done(xfer_done), .fifo_rdata, .fifo_empty, .fifo_rd(xfer_pop),
    .own(wh_own), .grant(wh_grant), .req(wh_req), .addr(wh_addr), .wdata(wh_wdata),
    .wdone(wh_done)
  );

  w5300_bus_ctrl #(.CYCLES(W5300_WR_CYCLES)) u_wbus (
    .clk, .rst_n,
    .cpu_req(wc_req), .cpu_we(wc_we), .cpu_addr(wc_addr), .cpu_wdata(wc_wdata),
    .cpu_rdata(wc_rdata), .cpu_done(wc_done),
    .hw_own(wh_own), .hw_grant(wh_grant), .hw_req(wh_req), .hw_addr(wh_addr),
    .hw_wdata(wh_wdata), .hw_done(wh_done),
    .w_addr, .w_data_o, .w_data_oe, .w_data_i, .w_cs_n, .w_wr_n, .w_rd_n
  );

  mon_timer #(.CNT_W(32), .DEFAULT_PERIOD(MON_PERIOD_RST)) u_mon (
    .clk, .rst_n, .enable(mon_enable), .period_we(mon_period_we), .period(mon_period),
    .tick(mon_tick)
  );

  scaler_bank #(.N_STRIP(N_STRIP_SCALERS), .N_FOLD(N_FOLD_SCALERS), .CNT_W(24)) u_scal (
    .clk, .rst_n, .strip_in(strip_rate), .fold_in, .snapshot(mon_tick),
    .rd_idx(scaler_idx), .rd_word(scaler_word)
  );

  irq_ctrl u_irq (
    .clk, .rst_n, .evt_pulse(evt_irq), .w_int_n, .mon_pulse(mon_tick), .mask(irq_mask),
    .ack(irq_ack), .irq, .pending(irq_pending), .irq_id
  );

  spi_master #(.W(16), .CLK_DIV(SPI_DIV)) u_spi (
    .clk, .rst_n, .start(spi_start), .tx(spi_tx), .rx(spi_rx), .busy(spi_busy),
    .done(), .sclk(spi_sclk), .mosi(spi_mosi), .miso(spi_miso), .cs_n(spi_cs_n)
  );

  jtag_master #(.TCK_DIV(JTAG_DIV)) u_jtag (
    .clk, .rst_n, .start(jtag_start), .nbits_m1(jtag_nbits_m1), .tms_mode(jtag_tms_mode),
    .tms_last(jtag_tms_last), .din(jtag_din), .dout(jtag_dout), .busy(jtag_busy),
    .tck(jtag_tck), .tms(jtag_tms), .tdi(jtag_tdi), .tdo(jtag_tdo)
  );
endmodule
