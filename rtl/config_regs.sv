// config_regs: setup, control and status registers behind the JTAG port.
//
// Each register has a shift stage on TCK: Capture-DR loads it with the register's
// present value, Shift-DR shifts it (TDI in at the top, LSB out first), and Update-DR
// ends the write. The write is then carried into the 160 MHz domain by a toggle and a
// two-flop synchronizer; there the setup and control values are loaded into TMR cells
// with data scrubbing (tmr_scrub_reg), whose voted outputs are fed back every clock so an
// upset lasts at most one cycle. The shift stage is stable from Update-DR until the next
// shift, so it can be read across the clock boundary. A CRC-8 (x^8+x^2+x+1) of the voted
// setup value is reported in the status register so that a reader can check the
// configuration. The control register issues bunch/event count resets as one-cycle
// pulses when written with those bits set; soft_reset is a level.
// TMR with scrubbing for the configuration chains and a CRC in the configuration logic
// follow the paper; the register fields, the CRC polynomial and the clock crossing are
// this design's choices.
module config_regs
  import tdc_pkg::*;
(
  input  logic     tck,
  input  logic     trst_n,
  input  jtag_ir_e ir,
  input  logic     capture_dr,
  input  logic     shift_dr,
  input  logic     update_dr,
  input  logic     tdi,
  output logic     dr_tdo,
  input  logic     clk,         // 160 MHz
  input  logic     rst_n,
  input  status_t  status_in,   // setup_crc field is filled in here
  output setup_t   setup,
  output logic     soft_reset,
  output logic     jtag_bcr,
  output logic     jtag_ecr
);
  // ---------------- TCK domain: shift stages ----------------
  logic [SETUP_W-1:0]  setup_sr;
  logic [CTRL_W-1:0]   ctrl_sr;
  logic [STATUS_W-1:0] stat_sr;
  logic                setup_tog, ctrl_tog;
  control_t            ctrl_q;
  status_t             status;

  always_comb begin
    status           = status_in;
    status.setup_crc = crc8_setup(setup);
  end

  always_ff @(posedge tck or negedge trst_n)
    if (!trst_n) begin
      setup_sr  <= SETUP_DEFAULT;
      ctrl_sr   <= '0;
      stat_sr   <= '0;
      setup_tog <= 1'b0;
      ctrl_tog  <= 1'b0;
    end else begin
      case (ir)
        IR_SETUP: begin
          if (capture_dr)    setup_sr  <= setup;
          else if (shift_dr) setup_sr  <= {tdi, setup_sr[SETUP_W-1:1]};
          if (update_dr)     setup_tog <= ~setup_tog;
        end
        IR_CONTROL: begin
          if (capture_dr)    ctrl_sr  <= ctrl_q;
          else if (shift_dr) ctrl_sr  <= {tdi, ctrl_sr[CTRL_W-1:1]};
          if (update_dr)     ctrl_tog <= ~ctrl_tog;
        end
        IR_STATUS: begin
          if (capture_dr)    stat_sr <= status;
          else if (shift_dr) stat_sr <= {tdi, stat_sr[STATUS_W-1:1]};
        end
        default: ;
      endcase
    end

  always_comb
    case (ir)
      IR_SETUP:   dr_tdo = setup_sr[0];
      IR_CONTROL: dr_tdo = ctrl_sr[0];
      default:    dr_tdo = stat_sr[0];
    endcase

  // ---------------- 160 MHz domain: TMR registers with scrubbing ----------------
  logic [2:0] setup_sync, ctrl_sync;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      setup_sync <= '0;
      ctrl_sync  <= '0;
    end else begin
      setup_sync <= {setup_sync[1:0], setup_tog};
      ctrl_sync  <= {ctrl_sync[1:0], ctrl_tog};
    end
  wire setup_load = setup_sync[2] ^ setup_sync[1];
  wire ctrl_load  = ctrl_sync[2] ^ ctrl_sync[1];

  tmr_scrub_reg #(.WIDTH(SETUP_W), .RESET_VAL(SETUP_DEFAULT)) u_setup (
    .clk, .rst_n, .load(setup_load), .d(setup_sr), .q(setup));
  tmr_scrub_reg #(.WIDTH(CTRL_W)) u_ctrl (
    .clk, .rst_n, .load(ctrl_load), .d(ctrl_sr), .q(ctrl_q));

  assign soft_reset = ctrl_q.soft_reset;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      jtag_bcr <= 1'b0;
      jtag_ecr <= 1'b0;
    end else begin
      jtag_bcr <= ctrl_load && ctrl_sr[1];
      jtag_ecr <= ctrl_load && ctrl_sr[2];
    end
endmodule
