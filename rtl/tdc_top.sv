// tdc_top: digital core of a 24-channel time-to-digital converter for drift-tube readout.
//
// Every channel has two TDC slices (leading and trailing edge) that sample the
// discriminator output on four phases of 320 MHz (0.78 ns least count, 17-bit time).
// Their edge times are formed into data words by a per-channel hit builder (separate
// edges, or leading time + pulse width). In triggerless mode the words go through a
// 4-word channel FIFO and a round-robin channel mux into the 16-word readout FIFO. In
// triggered mode they wait in a 16-word ring buffer per channel; each trigger (from the
// TTC line or the trigger pin) is queued in a 16-entry trigger FIFO, and the event
// builder asks all channels to copy the hits inside the trigger window into their
// channel FIFOs and frames them with a header and a trailer. The serial interface sends
// the readout FIFO on two 8b/10b lines of 320 Mbps. Setup, control and status registers
// are reached through JTAG. Configuration registers, TTC decoding, FIFO control and the
// serial interface are triple-modular-redundant, as in the paper; the word formats,
// the TTC code and the register layout are this design's own.
//
// Clocks: clk0/clk90 are 320 MHz at 0 and 90 degrees, clk160 is 160 MHz with its rising
// edges on rising edges of clk0 (all three come from a PLL outside this core); tck is
// the JTAG clock. rst_n is the chip reset; a TTC master reset or the control register's
// soft reset reset the data path only, not the configuration.
module tdc_top
  import tdc_pkg::*;
(
  input  logic            clk0,
  input  logic            clk90,
  input  logic            clk160,
  input  logic            rst_n,
  input  logic            pll_locked,
  input  logic [NCH-1:0]  din,
  input  logic            ttc,
  input  logic            trig_pin,
  input  logic            tck,
  input  logic            trst_n,
  input  logic            tms,
  input  logic            tdi,
  output logic            tdo,
  output logic [1:0][1:0] sdata     // [line][bit pair], 320 Mbps per line
);
  // ---------------- configuration ----------------
  jtag_ir_e ir;
  logic     capture_dr, shift_dr, update_dr, dr_tdo;
  setup_t   setup;
  logic     soft_reset, jtag_bcr, jtag_ecr;
  status_t  status;

  jtag_tap u_tap (.tck, .trst_n, .tms, .tdi, .tdo, .ir, .capture_dr, .shift_dr,
                  .update_dr, .dr_tdo);
  config_regs u_cfg (.tck, .trst_n, .ir, .capture_dr, .shift_dr, .update_dr, .tdi,
                     .dr_tdo, .clk(clk160), .rst_n, .status_in(status), .setup,
                     .soft_reset, .jtag_bcr, .jtag_ecr);

  // ---------------- TTC and resets ----------------
  logic ttc_trig, ttc_bcr, ttc_ecr, ttc_mrst;
  ttc_decoder u_ttc (.clk(clk160), .rst_n, .ttc, .trigger(ttc_trig), .bcr(ttc_bcr),
                     .ecr(ttc_ecr), .master_rst(ttc_mrst));

  logic dp_rst_n;
  always_ff @(posedge clk160 or negedge rst_n)
    if (!rst_n) dp_rst_n <= 1'b0;
    else        dp_rst_n <= !(soft_reset || ttc_mrst);

  wire bcr = ttc_bcr || jtag_bcr;
  wire ecr = ttc_ecr || jtag_ecr;

  // ---------------- trigger path ----------------
  logic              ti_push;
  logic [EVID_W-1:0] ti_evid;
  tdc_time_t         ti_win;
  trigger_interface u_ti (.clk(clk160), .rst_n(dp_rst_n), .bcr, .ecr,
                          .ttc_trigger(ttc_trig), .trig_pin,
                          .trig_from_pin(setup.trig_from_pin),
                          .match_offset(setup.match_offset),
                          .push(ti_push), .push_evid(ti_evid), .push_win_start(ti_win));

  logic              tf_pop, tf_empty, tf_full, tf_ovf;
  logic [EVID_W-1:0] tf_evid;
  tdc_time_t         tf_win;
  sync_fifo #(.WIDTH(EVID_W + TIME_W), .DEPTH(16)) u_trig_fifo (
    .clk(clk160), .rst_n(dp_rst_n),
    .push(ti_push && setup.triggered), .din({ti_evid, ti_win}),
    .pop(tf_pop), .dout({tf_evid, tf_win}),
    .full(tf_full), .empty(tf_empty), .overflow(tf_ovf), .count());

  // ---------------- channels ----------------
  logic            match_start;
  tdc_time_t       win_start;
  logic [NCH-1:0]  ch_busy, ch_empty, ch_ovf, ch_pop, eb_pop, cm_pop;
  tdc_word_t       ch_dout [NCH];

  for (genvar c = 0; c < NCH; c++) begin : g_ch
    tdc_channel #(.CH(c)) u_ch (
      .clk0, .clk90, .clk(clk160), .rst_n(dp_rst_n), .bcr, .din(din[c]),
      .enable(setup.chan_enable[c]), .triggered(setup.triggered),
      .pair_mode(setup.pair_mode), .match_start, .win_start,
      .win_len(setup.match_window), .busy(ch_busy[c]),
      .fifo_pop(ch_pop[c]), .fifo_dout(ch_dout[c]), .fifo_empty(ch_empty[c]),
      .fifo_overflow(ch_ovf[c]));
  end

  // ---------------- readout ----------------
  logic      rf_full, rf_empty, rf_pop;
  logic      eb_push, cm_push;
  tdc_word_t eb_din, cm_din;

  event_builder #(.NUM_CH(NCH)) u_eb (.clk(clk160), .rst_n(dp_rst_n),
    .enable(setup.triggered), .tf_empty, .tf_evid, .tf_win_start(tf_win), .tf_pop,
    .match_start, .win_start, .ch_busy, .ch_empty, .ch_dout, .ch_pop(eb_pop),
    .rf_full, .rf_push(eb_push), .rf_din(eb_din));

  channel_mux #(.NUM_CH(NCH)) u_cm (.clk(clk160), .rst_n(dp_rst_n),
    .enable(!setup.triggered), .ch_empty, .ch_dout, .ch_pop(cm_pop),
    .rf_full, .rf_push(cm_push), .rf_din(cm_din));

  assign ch_pop = setup.triggered ? eb_pop : cm_pop;

  tdc_word_t rf_dout;
  sync_fifo #(.WIDTH(WORD_W), .DEPTH(16)) u_rdout_fifo (
    .clk(clk160), .rst_n(dp_rst_n),
    .push(setup.triggered ? eb_push : cm_push),
    .din(setup.triggered ? eb_din : cm_din),
    .pop(rf_pop), .dout(rf_dout), .full(rf_full), .empty(rf_empty),
    .overflow(), .count());

  serial_interface u_ser (.clk(clk160), .rst_n(dp_rst_n), .fifo_empty(rf_empty),
                          .fifo_dout(rf_dout), .fifo_pop(rf_pop), .sdata);

  always_comb begin
    status                 = '0;
    status.pll_locked      = pll_locked;
    status.chnl_fifo_ovf   = |ch_ovf;
    status.trig_fifo_ovf   = tf_ovf;
    status.rdout_fifo_full = rf_full;
  end
endmodule
