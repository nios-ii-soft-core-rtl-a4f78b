// jtag_master: JTAG port through which the processor configures the HPTDC.
//
// The HPTDC time-to-digital converter is set up over its JTAG test access port, with
// the processor holding the configuration data and walking the TAP state machine. This
// block relieves the processor of bit-banging: one command shifts up to 32 bits.
//  - data mode (tms_mode = 0): din is shifted out on TDI least-significant bit first with
//    TMS low, except on the last bit where TMS = tms_last (1 leaves Shift-IR/DR); the TDO
//    bits come back in dout, bit k = TDO seen with TDI bit k;
//  - TMS mode (tms_mode = 1): din is shifted out on TMS, least-significant bit first,
//    with TDI low, to move the TAP between states.
// nbits_m1 + 1 bits are shifted per command; start is taken only while busy is low.
// Timing: TCK idles low. Each bit is TCK_DIV clocks with TCK low followed by TCK_DIV
// clocks with TCK high (5 MHz at 50 MHz with 5). TMS and TDI change together with the
// falling edge of TCK (or at start) and TDO is sampled on the rising edge, as the TAP
// updates TDO on the falling edge. TCK is made from this clock, so TDO needs no
// synchroniser. A command of n bits takes 2*TCK_DIV*n + 1 clocks until busy falls.
// From the DAQ description: the HPTDC is configured by the processor through JTAG.
// This design's own choices: the 32-bit command split, LSB-first order within a command
// (the usual JTAG order), and the TCK rate.
module jtag_master #(
  parameter int unsigned TCK_DIV = 5
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [4:0]  nbits_m1,
  input  logic        tms_mode,
  input  logic        tms_last,
  input  logic [31:0] din,
  output logic [31:0] dout,
  output logic        busy,
  output logic        tck,
  output logic        tms,
  output logic        tdi,
  input  logic        tdo
);
  localparam int unsigned DW = (TCK_DIV > 1) ? $clog2(TCK_DIV) : 1;

  logic [DW-1:0] div;
  logic [4:0]    idx, last_idx;
  logic [31:0]   sh;
  logic          mode_q, tms_last_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy       <= 1'b0;
      div        <= '0;
      idx        <= '0;
      last_idx   <= '0;
      sh         <= '0;
      mode_q     <= 1'b0;
      tms_last_q <= 1'b0;
      tck        <= 1'b0;
      tms        <= 1'b0;
      tdi        <= 1'b0;
      dout       <= '0;
    end else if (!busy) begin
      if (start) begin
        busy       <= 1'b1;
        div        <= '0;
        idx        <= '0;
        last_idx   <= nbits_m1;
        sh         <= din;
        mode_q     <= tms_mode;
        tms_last_q <= tms_last;
        dout       <= '0;
        tdi        <= tms_mode ? 1'b0 : din[0];
        tms        <= tms_mode ? din[0] : (tms_last && nbits_m1 == '0);
      end
    end else if (div != DW'(TCK_DIV - 1)) begin
      div <= div + 1'b1;
    end else begin
      div <= '0;
      if (!tck) begin
        tck       <= 1'b1;
        dout[idx] <= tdo;
      end else begin
        tck <= 1'b0;
        if (idx == last_idx) begin
          busy <= 1'b0;
        end else begin
          idx <= idx + 1'b1;
          sh  <= sh >> 1;
          tdi <= mode_q ? 1'b0 : sh[1];
          tms <= mode_q ? sh[1] : (tms_last_q && idx + 1'b1 == last_idx);
        end
      end
    end
  end

  // TCK only runs during a command and rests low between commands
  a_tck_idle: assert property (@(posedge clk) disable iff (!rst_n) !busy |-> !tck);
endmodule
