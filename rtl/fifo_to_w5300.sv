// fifo_to_w5300: hardware transfer of event data from the event FIFO to the W5300.
//
// With software doing the copy, each 16-bit write to the W5300 takes about 350 ns of
// processor bus activity; this engine does the same copy at the W5300's own write cycle.
// The processor starts it with the number of 16-bit words to send and the socket number.
// The engine asks the bus controller for the bus (own), waits for grant, then for every
// 32-bit FIFO word writes the upper half and then the lower half to the socket's TX FIFO
// register, popping the FIFO after the second half (or after the first if that was the
// last word of the transfer). It waits if the FIFO runs empty. When all words are written
// it releases the bus, drops busy and sets done, which stays set until the next start.
// The processor then issues the SEND command itself.
// Timing: one write per bus-controller cycle; with the 4-clock cycle 600 bytes take
// 300 x 80 ns = 24 us plus a few clocks. Moving the FIFO copy into hardware under a
// handshake follows the DAQ description; the half-word order is this design's choice.
module fifo_to_w5300
  import rpc_daq_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [15:0] n_half,
  input  logic [2:0]  sock,
  output logic        busy,
  output logic        done,
  // event FIFO (show-ahead)
  input  logic [31:0] fifo_rdata,
  input  logic        fifo_empty,
  output logic        fifo_rd,
  // bus controller, hardware port
  output logic        own,
  input  logic        grant,
  output logic        req,
  output logic [9:0]  addr,
  output logic [15:0] wdata,
  input  logic        wdone
);
  typedef enum logic [1:0] {X_IDLE, X_HI, X_LO} xstate_t;
  xstate_t     state;
  logic [15:0] remain;
  logic [9:0]  addr_q;

  assign busy  = (state != X_IDLE);
  assign own   = busy;
  assign addr  = addr_q;
  assign wdata = (state == X_HI) ? fifo_rdata[31:16] : fifo_rdata[15:0];
  assign req   = busy && grant && !fifo_empty && remain != '0;
  // Pop after the lower half, or after an upper half that ends the transfer.
  assign fifo_rd = wdone && ((state == X_LO) || (state == X_HI && remain == 16'd1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= X_IDLE;
      remain <= '0;
      addr_q <= '0;
      done   <= 1'b0;
    end else begin
      case (state)
        X_IDLE: begin
          if (start) begin
            remain <= n_half;
            addr_q <= w5300_tx_fifo_addr(sock);
            done   <= 1'b0;
            state  <= (n_half == '0) ? X_IDLE : X_HI;
            if (n_half == '0) done <= 1'b1;
          end
        end
        X_HI, X_LO: begin
          if (wdone) begin
            remain <= remain - 1'b1;
            if (remain == 16'd1) begin
              state <= X_IDLE;
              done  <= 1'b1;
            end else begin
              state <= (state == X_HI) ? X_LO : X_HI;
            end
          end
        end
        default: state <= X_IDLE;
      endcase
    end
  end
endmodule
