// logic_bridge: the processor's 32-bit window onto the DAQ hardware logic.
//
// The processor reaches all DAQ logic registers through this memory-mapped slave
// (read/write/waitrequest, word addresses): run control and CTRL_FLAG, the latched event
// (event number, RTC timestamp, 128-bit hit pattern), the event FIFO (a write pushes a
// word through the event write control, a read pops the oldest word), the current RTC
// and its preset, the monitoring period, the interrupt pending/ack/mask bits, the
// FIFO-to-W5300 transfer engine, the HV SPI master, the HPTDC JTAG port, the trigger
// counters, the 128-bit strip mask (a set bit takes a noisy strip out of the latched
// hits; cleared by reset) and the 25 scalers. The register map is in rpc_daq_pkg (reg_addr_t).
// Addresses with bit 10 set form a window onto the W5300 registers: word address a maps
// to W5300 byte address {a[8:0], 0}; the access is passed to the W5300 bus controller and
// waitrequest stays high until that bus cycle has completed. Address bit 9 is unused
// (reserved); bits 8:7 of a register address below the window are ignored.
// Timing: register reads are combinational with no wait state; writes take effect at the
// clock edge; command bits are one-cycle pulses. Reading REG_RTC_LO captures the upper
// RTC half, which REG_RTC_HI then returns, so a 64-bit time is read coherently.
// Data outputs (FIFO push data, monitoring period, transfer length and socket, SPI and
// JTAG fields, W5300 address and write data) are wired straight from writedata and
// address; only their strobes are decoded, and w_addr[0] is 0 (16-bit accesses).
// A 32-bit bridge through which the processor reads the RTC, the hit information and the
// FIFO is what the DAQ description gives; the bus protocol and map are this design's.
module logic_bridge
  import rpc_daq_pkg::*;
#(
  parameter int unsigned FIFO_CW = 11
) (
  input  logic               clk,
  input  logic               rst_n,
  // processor side
  input  logic [10:0]        address,
  input  logic               read,
  input  logic               write,
  input  logic [31:0]        writedata,
  output logic [31:0]        readdata,
  output logic               waitrequest,
  // control outputs
  output logic               run_enable,
  output logic               ctrl_flag,
  output logic               mon_enable,
  output logic               event_done,
  output logic               clear_evno,
  output logic               fifo_clear,
  output logic               rtc_load,
  output logic [RTC_W-1:0]   rtc_preset,
  output logic               clear_counts,
  output logic               clear_ovf,
  output logic               mon_period_we,
  output logic [31:0]        mon_period,
  output logic [2:0]         irq_ack,
  output logic [2:0]         irq_mask,
  output logic               fifo_push,
  output logic [31:0]        fifo_push_data,
  output logic               fifo_pop,
  output logic               xfer_start,
  output logic [15:0]        xfer_n,
  output logic [2:0]         xfer_sock,
  output logic               spi_start,
  output logic [15:0]        spi_tx,
  output logic [4:0]         scaler_idx,
  output logic               jtag_start,
  output logic [4:0]         jtag_nbits_m1,
  output logic               jtag_tms_mode,
  output logic               jtag_tms_last,
  output logic [31:0]        jtag_din,
  output logic [HIT_W-1:0]   strip_mask,
  // W5300 bus controller, processor port
  output logic               w_req,
  output logic               w_we,
  output logic [9:0]         w_addr,
  output logic [15:0]        w_wdata,
  input  logic [15:0]        w_rdata,
  input  logic               w_done,
  // status inputs
  input  logic               evt_busy,
  input  logic               trig_blocked,
  input  logic               wr_overflow,
  input  logic               xfer_busy,
  input  logic               xfer_done,
  input  logic               spi_busy,
  input  logic               jtag_busy,
  input  logic [31:0]        jtag_dout,
  input  logic [FIFO_CW-1:0] fifo_count,
  input  logic               fifo_empty,
  input  logic [31:0]        fifo_rdata,
  input  logic [31:0]        event_no,
  input  logic [RTC_W-1:0]   evt_ts,
  input  logic [HIT_W-1:0]   evt_hits,
  input  logic [15:0]        evt_words,
  input  logic [RTC_W-1:0]   rtc_now,
  input  logic [2:0]         irq_pending,
  input  irq_id_t            irq_id,
  input  logic [15:0]        spi_rx,
  input  logic [31:0]        n_accepted,
  input  logic [31:0]        n_lost,
  input  logic [31:0]        scaler_word
);
  wire        win   = address[10];
  wire [6:0]  ra    = address[6:0];
  wire        wr_ok = write && !waitrequest && !win;
  wire        rd_ok = read  && !waitrequest && !win;

  logic [31:0] rtc_hi_snap;

  assign w_req       = (read || write) && win;
  assign w_we        = write;
  assign w_addr      = {address[8:0], 1'b0};
  assign w_wdata     = writedata[15:0];
  assign waitrequest = w_req && !w_done;

  // one-cycle command pulses
  assign event_done     = wr_ok && ra == REG_CMD && writedata[0];
  assign clear_evno     = wr_ok && ra == REG_CMD && writedata[1];
  assign fifo_clear     = wr_ok && ra == REG_CMD && writedata[2];
  assign rtc_load       = wr_ok && ra == REG_CMD && writedata[3];
  assign clear_counts   = wr_ok && ra == REG_CMD && writedata[4];
  assign clear_ovf      = wr_ok && ra == REG_CMD && writedata[5];
  assign mon_period_we  = wr_ok && ra == REG_MON_PERIOD;
  assign irq_ack        = (wr_ok && ra == REG_IRQ) ? writedata[2:0] : 3'b000;
  assign fifo_push      = wr_ok && ra == REG_FIFO_DATA;
  assign fifo_push_data = writedata;
  assign fifo_pop       = rd_ok && ra == REG_FIFO_DATA && !xfer_busy && !fifo_empty;
  assign xfer_start     = wr_ok && ra == REG_XFER && !xfer_busy;
  assign xfer_n         = writedata[15:0];
  assign xfer_sock      = writedata[18:16];
  assign spi_start      = wr_ok && ra == REG_SPI && !spi_busy;
  assign spi_tx         = writedata[15:0];
  assign mon_period     = writedata;
  assign scaler_idx     = 5'(ra - REG_SCALER0);
  assign jtag_start     = wr_ok && ra == REG_JTAG_CMD && !jtag_busy;
  assign jtag_nbits_m1  = writedata[4:0];
  assign jtag_tms_mode  = writedata[8];
  assign jtag_tms_last  = writedata[9];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run_enable  <= 1'b0;
      ctrl_flag   <= 1'b0;
      mon_enable  <= 1'b0;
      irq_mask    <= 3'b111;
      rtc_preset  <= '0;
      rtc_hi_snap <= '0;
      jtag_din    <= '0;
      strip_mask  <= '0;
    end else begin
      if (wr_ok && ra == REG_CTRL) begin
        run_enable <= writedata[0];
        ctrl_flag  <= writedata[1];
        mon_enable <= writedata[2];
      end
      if (wr_ok && ra == REG_IRQ_MASK) irq_mask <= writedata[2:0];
      if (wr_ok && ra == REG_RTC_LO)   rtc_preset[31:0]  <= writedata;
      if (wr_ok && ra == REG_RTC_HI)   rtc_preset[63:32] <= writedata;
      if (rd_ok && ra == REG_RTC_LO)   rtc_hi_snap <= rtc_now[63:32];
      if (wr_ok && ra == REG_JTAG_DATA && !jtag_busy) jtag_din <= writedata;
      for (int k = 0; k < HIT_W / 32; k++)
        if (wr_ok && ra == 7'(REG_MASK0 + k)) strip_mask[32*k +: 32] <= writedata;
    end
  end

  always_comb begin
    readdata = '0;
    if (win) begin
      readdata = {16'h0, w_rdata};
    end else if (ra >= REG_SCALER0 && ra < 7'(REG_SCALER0 + N_SCALERS)) begin
      readdata = scaler_word;
    end else begin
      case (ra)
        REG_CTRL:       readdata = {29'h0, mon_enable, ctrl_flag, run_enable};
        REG_STATUS:     readdata = {4'h0, 12'(fifo_count), 9'h0, jtag_busy, spi_busy, xfer_done,
                                    xfer_busy, wr_overflow, trig_blocked, evt_busy};
        REG_EVENT_NO:   readdata = event_no;
        REG_EVT_TS_LO:  readdata = evt_ts[31:0];
        REG_EVT_TS_HI:  readdata = evt_ts[63:32];
        7'h06:          readdata = evt_hits[31:0];
        7'h07:          readdata = evt_hits[63:32];
        7'h08:          readdata = evt_hits[95:64];
        7'h09:          readdata = evt_hits[127:96];
        REG_FIFO_DATA:  readdata = fifo_rdata;
        REG_EVT_WORDS:  readdata = {16'h0, evt_words};
        REG_RTC_LO:     readdata = rtc_now[31:0];
        REG_RTC_HI:     readdata = rtc_hi_snap;
        REG_IRQ:        readdata = {26'h0, irq_id, 1'b0, irq_pending};
        REG_IRQ_MASK:   readdata = {29'h0, irq_mask};
        REG_SPI:        readdata = {16'h0, spi_rx};
        REG_N_ACCEPTED: readdata = n_accepted;
        REG_N_LOST:     readdata = n_lost;
        REG_JTAG_DATA:  readdata = jtag_dout;
        7'h17:          readdata = strip_mask[31:0];
        7'h18:          readdata = strip_mask[63:32];
        7'h19:          readdata = strip_mask[95:64];
        7'h1A:          readdata = strip_mask[127:96];
        default:        readdata = '0;
      endcase
    end
  end
endmodule
