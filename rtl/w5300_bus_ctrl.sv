// w5300_bus_ctrl: bus controller between the FPGA and the W5300 Ethernet controller.
//
// The W5300 is reached through its 16-bit parallel bus in direct-address mode (10-bit
// byte address, CSn, WRn, RDn). Two masters share it: the processor, through the logic
// bridge, for register access, and the hardware transfer engine that copies event data
// from the event FIFO into a socket TX FIFO. The engine raises hw_own when it needs the
// bus; as soon as no processor cycle is in progress the controller grants it (hw_grant)
// and keeps processor requests waiting until hw_own drops. The bus is thus handed to
// hardware only for the duration of a transfer.
// Each access lasts CYCLES clocks: one setup clock with CSn low and the strobe high,
// CYCLES-3 clocks with the strobe (WRn or RDn) low, one hold clock with CSn still low and
// the strobe high again (the W5300 takes write data on the rising strobe), and one idle
// clock with CSn high before the next access. With CYCLES = 4 at 50 MHz back-to-back
// writes run at the 80 ns write cycle of the W5300.
// Handshake: a master holds req (with we/addr/wdata) until done is high for one cycle,
// the hold clock; for a read, cpu_rdata (sampled in the last strobe-low clock) is valid
// from that cycle until the next processor read.
// The 80 ns figure comes from the DAQ description; the cycle shape and the arbitration
// rule are this design's choices.
module w5300_bus_ctrl #(
  parameter int unsigned CYCLES = 4
) (
  input  logic        clk,
  input  logic        rst_n,
  // processor port
  input  logic        cpu_req,
  input  logic        cpu_we,
  input  logic [9:0]  cpu_addr,
  input  logic [15:0] cpu_wdata,
  output logic [15:0] cpu_rdata,
  output logic        cpu_done,
  // hardware port (writes only)
  input  logic        hw_own,
  output logic        hw_grant,
  input  logic        hw_req,
  input  logic [9:0]  hw_addr,
  input  logic [15:0] hw_wdata,
  output logic        hw_done,
  // W5300 pins
  output logic [9:0]  w_addr,
  output logic [15:0] w_data_o,
  output logic        w_data_oe,
  input  logic [15:0] w_data_i,
  output logic        w_cs_n,
  output logic        w_wr_n,
  output logic        w_rd_n
);
  localparam int unsigned CW   = $clog2(CYCLES);
  localparam logic [CW-1:0] LAST = CW'(CYCLES - 2);  // hold clock

  typedef enum logic [1:0] {S_IDLE, S_CPU, S_HW} state_t;
  state_t        state;
  logic [CW-1:0] cnt;
  logic          we_q;

  wire strobe = (state != S_IDLE) && (cnt != '0) && (cnt != LAST);
  wire last   = (state != S_IDLE) && (cnt == LAST);

  assign cpu_done  = (state == S_CPU) && last;
  assign hw_done   = (state == S_HW)  && last;
  assign w_cs_n    = (state == S_IDLE);
  assign w_wr_n    = !(strobe && we_q);
  assign w_rd_n    = !(strobe && !we_q);
  assign w_data_oe = (state != S_IDLE) && we_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      cnt      <= '0;
      we_q     <= 1'b0;
      hw_grant <= 1'b0;
      w_addr   <= '0;
      w_data_o <= '0;
      cpu_rdata <= '0;
    end else begin
      if (state == S_CPU && !we_q && cnt == LAST - 1'b1) cpu_rdata <= w_data_i;
      case (state)
        S_IDLE: begin
          cnt <= '0;
          if (hw_grant) begin
            if (!hw_own) begin
              hw_grant <= 1'b0;
            end else if (hw_req) begin
              state    <= S_HW;
              we_q     <= 1'b1;
              w_addr   <= hw_addr;
              w_data_o <= hw_wdata;
            end
          end else if (hw_own) begin
            hw_grant <= 1'b1;
          end else if (cpu_req) begin
            state    <= S_CPU;
            we_q     <= cpu_we;
            w_addr   <= cpu_addr;
            w_data_o <= cpu_wdata;
          end
        end
        default: begin
          if (cnt == LAST) state <= S_IDLE;
          else             cnt   <= cnt + 1'b1;
        end
      endcase
    end
  end

  // Only one master drives the bus at a time.
  a_cpu_not_in_grant: assert property (@(posedge clk) disable iff (!rst_n)
    (state == S_CPU) |-> !hw_grant);
  a_one_strobe: assert property (@(posedge clk) disable iff (!rst_n) !(!w_wr_n && !w_rd_n));
endmodule
