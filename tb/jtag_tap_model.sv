// jtag_tap_model: behavioural JTAG test access port standing in for the HPTDC.
//
// An IEEE 1149.1 TAP controller (16 states, advanced by TMS on the rising edge of TCK,
// reset by five TMS ones) with a 5-bit instruction register and three data registers:
// BYPASS (1 bit), IDCODE (32 bits) and a SETUP register of SETUP_LEN bits with an update
// latch (setup_q). Capture-IR loads 5'b00001; TDO changes on the falling edge of TCK and
// is the least-significant bit of the selected shift register. Instruction codes and the
// register lengths are modelled on the HPTDC data sheet as remembered, not on the DAQ
// description; the DAQ logic does not depend on them.
module jtag_tap_model #(
  parameter int unsigned SETUP_LEN = 647,
  parameter logic [31:0] IDCODE    = 32'h8470_DACE
) (
  input  logic tck,
  input  logic tms,
  input  logic tdi,
  output logic tdo
);
  typedef enum logic [3:0] {
    TLR, RTI, SEL_DR, CAP_DR, SH_DR, EX1_DR, PAU_DR, EX2_DR, UPD_DR,
    SEL_IR, CAP_IR, SH_IR, EX1_IR, PAU_IR, EX2_IR, UPD_IR
  } tap_t;
  localparam logic [4:0] I_IDCODE = 5'b10001, I_SETUP = 5'b11000, I_BYPASS = 5'b11111;

  tap_t st = TLR;
  logic [4:0] ir_sh = '0, ir = I_IDCODE;
  logic [31:0] id_sh = '0;
  logic bypass_sh = 1'b0;
  logic [SETUP_LEN-1:0] setup_sh = '0, setup_q = '0;
  int n_update_setup = 0;

  initial tdo = 1'b0;

  always @(posedge tck) begin
    case (st)
      SH_IR: ir_sh <= {tdi, ir_sh[4:1]};
      SH_DR:
        if (ir == I_IDCODE)     id_sh <= {tdi, id_sh[31:1]};
        else if (ir == I_SETUP) setup_sh <= {tdi, setup_sh[SETUP_LEN-1:1]};
        else                    bypass_sh <= tdi;
      CAP_IR: ir_sh <= 5'b00001;
      CAP_DR:
        if (ir == I_IDCODE)     id_sh <= IDCODE;
        else if (ir == I_SETUP) setup_sh <= setup_q;
        else                    bypass_sh <= 1'b0;
      UPD_IR: ir <= ir_sh;
      UPD_DR: if (ir == I_SETUP) begin setup_q <= setup_sh; n_update_setup++; end
      TLR: begin ir <= I_IDCODE; end
      default: ;
    endcase
    case (st)
      TLR:    st <= tms ? TLR    : RTI;
      RTI:    st <= tms ? SEL_DR : RTI;
      SEL_DR: st <= tms ? SEL_IR : CAP_DR;
      CAP_DR: st <= tms ? EX1_DR : SH_DR;
      SH_DR:  st <= tms ? EX1_DR : SH_DR;
      EX1_DR: st <= tms ? UPD_DR : PAU_DR;
      PAU_DR: st <= tms ? EX2_DR : PAU_DR;
      EX2_DR: st <= tms ? UPD_DR : SH_DR;
      UPD_DR: st <= tms ? SEL_DR : RTI;
      SEL_IR: st <= tms ? TLR    : CAP_IR;
      CAP_IR: st <= tms ? EX1_IR : SH_IR;
      SH_IR:  st <= tms ? EX1_IR : SH_IR;
      EX1_IR: st <= tms ? UPD_IR : PAU_IR;
      PAU_IR: st <= tms ? EX2_IR : PAU_IR;
      EX2_IR: st <= tms ? UPD_IR : SH_IR;
      UPD_IR: st <= tms ? SEL_DR : RTI;
      default: st <= TLR;
    endcase
  end

  always @(negedge tck) begin
    case (st)
      SH_IR: tdo <= ir_sh[0];
      SH_DR: tdo <= (ir == I_IDCODE) ? id_sh[0] : (ir == I_SETUP) ? setup_sh[0] : bypass_sh;
      default: tdo <= 1'b0;
    endcase
  end
endmodule
