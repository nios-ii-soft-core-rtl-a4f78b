// rpc_daq_pkg: constants and types shared by the RPC-DAQ FPGA hardware logic.
//
// The numbers that come from the RPC-DAQ description are the 50 MHz system clock, the
// 100 ns RTC precision, the 128-bit hit latch (64 X + 64 Y strips), the 16 strip and
// 9 fold scalers with an 8-bit channel ID, the 600-byte largest event, the 80 ns W5300
// write cycle and the socket use (socket 1 event data, socket 2 monitoring data).
// The W5300 register addresses are those of the W5300 direct-address mode. The
// logic-bridge register map and the interrupt numbering are this design's own choices.
package rpc_daq_pkg;

  localparam int unsigned CLK_HZ       = 50_000_000;
  localparam int unsigned RTC_TICK_NS  = 100;
  localparam int unsigned RTC_TICK_DIV = CLK_HZ / (1_000_000_000 / RTC_TICK_NS);  // 5

  localparam int unsigned HIT_W           = 128;
  localparam int unsigned RTC_W           = 64;
  localparam int unsigned N_STRIP_SCALERS = 16;
  localparam int unsigned N_FOLD_SCALERS  = 9;
  localparam int unsigned N_SCALERS       = N_STRIP_SCALERS + N_FOLD_SCALERS;

  // Largest event: 600 bytes = 150 words of the 32-bit event FIFO.
  localparam int unsigned MAX_EVENT_BYTES = 600;
  localparam int unsigned MAX_EVENT_WORDS = MAX_EVENT_BYTES / 4;

  // Monitoring period after reset: 10 s at 50 MHz.
  localparam int unsigned MON_PERIOD_DEFAULT = 500_000_000;

  // W5300 write cycle, 80 ns = 4 clocks at 50 MHz.
  localparam int unsigned W5300_WR_CYCLES = 4;

  // W5300 sockets as used by the DAQ.
  localparam logic [2:0] SOCK_CMD_MCAST = 3'd0;  // UDP multicast command interface
  localparam logic [2:0] SOCK_EVENT     = 3'd1;  // TCP client, event data
  localparam logic [2:0] SOCK_MON       = 3'd2;  // TCP client, monitoring data
  localparam logic [2:0] SOCK_RFU       = 3'd3;  // TCP server, remote firmware upgrade
  localparam logic [2:0] SOCK_CMD_UCAST = 3'd4;  // UDP unicast command interface
  localparam logic [2:0] SOCK_RTC       = 3'd5;  // UDP client, RTC data

  // W5300 socket n TX FIFO register (byte address, direct mode): 0x200 + 0x40*n + 0x2E.
  function automatic logic [9:0] w5300_tx_fifo_addr(input logic [2:0] sock);
    return 10'h22E + {1'b0, sock, 6'h00};
  endfunction

  // Interrupt numbers; a lower number is served first.
  typedef enum logic [1:0] {
    IRQ_EVENT = 2'd0,
    IRQ_CMD   = 2'd1,
    IRQ_MON   = 2'd2,
    IRQ_NONE  = 2'd3
  } irq_id_t;

  // Logic-bridge word addresses. address[10] = 1 selects the W5300 window.
  typedef enum logic [6:0] {
    REG_CTRL       = 7'h00,  // [0] run enable, [1] CTRL_FLAG, [2] mon timer enable
    REG_CMD        = 7'h01,  // write 1 pulses: [0] event done, [1] clear event no,
                             // [2] FIFO clear, [3] RTC load, [4] clear lost/accepted counters,
                             // [5] clear write overflow
    REG_STATUS     = 7'h02,  // [0] event busy, [1] trigger blocked, [2] write overflow,
                             // [3] engine busy, [4] engine done, [5] SPI busy, [6] JTAG busy,
                             // [27:16] FIFO count
    REG_EVENT_NO   = 7'h03,
    REG_EVT_TS_LO  = 7'h04,
    REG_EVT_TS_HI  = 7'h05,
    REG_HIT0       = 7'h06,  // hits [31:0]; REG_HIT0+k gives hits [32k+31:32k]
    REG_FIFO_DATA  = 7'h0A,  // write: push through the event write control; read: pop
    REG_EVT_WORDS  = 7'h0B,
    REG_RTC_LO     = 7'h0C,  // read: current RTC; write: preset
    REG_RTC_HI     = 7'h0D,
    REG_MON_PERIOD = 7'h0E,
    REG_IRQ        = 7'h0F,  // read: [2:0] pending, [5:4] highest id; write: ack (1 clears)
    REG_IRQ_MASK   = 7'h10,
    REG_XFER       = 7'h11,  // write: start engine, [15:0] 16-bit words, [18:16] socket
    REG_SPI        = 7'h12,  // write: start frame with [15:0]; read: last received frame
    REG_N_ACCEPTED = 7'h13,
    REG_N_LOST     = 7'h14,
    REG_JTAG_CMD   = 7'h15,  // write: start, [4:0] bits-1, [8] TMS mode, [9] TMS on last bit
    REG_JTAG_DATA  = 7'h16,  // write: bits to shift (LSB first); read: TDO bits of last command
    REG_MASK0      = 7'h17,  // strip mask [31:0]; REG_MASK0+k gives mask [32k+31:32k],
                             // a 1 removes that strip from the latched hits
    REG_SCALER0    = 7'h20   // REG_SCALER0+i, i = 0..24, reads {ID, count}
  } reg_addr_t;

endpackage
