// jtag_tap: IEEE 1149.1 test access port controller.
//
// The standard 16-state machine is driven by TMS on the rising edge of TCK. It holds a
// 4-bit instruction register (IDCODE after reset), the one-bit BYPASS register and the
// 32-bit ID code register, and tells the configuration registers when to capture, shift
// and update (capture_dr/shift_dr/update_dr, valid during the TCK cycle in that state).
// TDO changes on the falling edge of TCK, as the standard requires. The paper configures
// the chip through JTAG; the instruction codes and ID code are this design's.
module jtag_tap
  import tdc_pkg::*;
(
  input  logic     tck,
  input  logic     trst_n,
  input  logic     tms,
  input  logic     tdi,
  output logic     tdo,
  output jtag_ir_e ir,
  output logic     capture_dr,
  output logic     shift_dr,
  output logic     update_dr,
  input  logic     dr_tdo        // serial out of the selected configuration register
);
  typedef enum logic [3:0] {
    TLR, RTI, SEL_DR, CAP_DR, SH_DR, EX1_DR, PAU_DR, EX2_DR, UPD_DR,
    SEL_IR, CAP_IR, SH_IR, EX1_IR, PAU_IR, EX2_IR, UPD_IR
  } tap_state_e;

  tap_state_e state, nstate;

  always_comb begin
    unique case (state)
      TLR:    nstate = tms ? TLR    : RTI;
      RTI:    nstate = tms ? SEL_DR : RTI;
      SEL_DR: nstate = tms ? SEL_IR : CAP_DR;
      CAP_DR: nstate = tms ? EX1_DR : SH_DR;
      SH_DR:  nstate = tms ? EX1_DR : SH_DR;
      EX1_DR: nstate = tms ? UPD_DR : PAU_DR;
      PAU_DR: nstate = tms ? EX2_DR : PAU_DR;
      EX2_DR: nstate = tms ? UPD_DR : SH_DR;
      UPD_DR: nstate = tms ? SEL_DR : RTI;
      SEL_IR: nstate = tms ? TLR    : CAP_IR;
      CAP_IR: nstate = tms ? EX1_IR : SH_IR;
      SH_IR:  nstate = tms ? EX1_IR : SH_IR;
      EX1_IR: nstate = tms ? UPD_IR : PAU_IR;
      PAU_IR: nstate = tms ? EX2_IR : PAU_IR;
      EX2_IR: nstate = tms ? UPD_IR : SH_IR;
      default: nstate = tms ? SEL_DR : RTI; // UPD_IR
    endcase
  end

  logic [3:0]  ir_sr;
  logic        bypass;
  logic [31:0] id_sr;

  always_ff @(posedge tck or negedge trst_n)
    if (!trst_n) begin
      state  <= TLR;
      ir     <= IR_IDCODE;
      ir_sr  <= '0;
      bypass <= 1'b0;
      id_sr  <= '0;
    end else begin
      state <= nstate;
      if (state == TLR) ir <= IR_IDCODE;
      case (state)
        CAP_IR: ir_sr <= 4'b0001;                    // standard: ...01 captured
        SH_IR:  ir_sr <= {tdi, ir_sr[3:1]};
        UPD_IR: ir    <= jtag_ir_e'(ir_sr);
        default: ;
      endcase
      if (state == CAP_DR) begin
        bypass <= 1'b0;
        id_sr  <= JTAG_IDCODE;
      end else if (state == SH_DR) begin
        bypass <= tdi;
        id_sr  <= {tdi, id_sr[31:1]};
      end
    end

  assign capture_dr = state == CAP_DR;
  assign shift_dr   = state == SH_DR;
  assign update_dr  = state == UPD_DR;

  logic tdo_n;
  always_comb begin
    tdo_n = 1'b0;
    if (state == SH_IR) tdo_n = ir_sr[0];
    else if (state == SH_DR)
      case (ir)
        IR_IDCODE: tdo_n = id_sr[0];
        IR_SETUP, IR_CONTROL, IR_STATUS: tdo_n = dr_tdo;
        default:   tdo_n = bypass;
      endcase
  end

  always_ff @(negedge tck or negedge trst_n)
    if (!trst_n) tdo <= 1'b0;
    else         tdo <= tdo_n;
endmodule
