// tdc_pkg: constants, word format and helper functions shared by the TDC logic.
//
// Time is 17 bits with a least count of 3.125 ns / 4 = 0.78125 ns: a 15-bit coarse
// count of the 320 MHz clock followed by a 2-bit fine code from four sampling phases.
// Both numbers (17 bits, 0.78 ns) follow the paper. The 32-bit output word format, the
// word types and the configuration field layout are this design's own choices.
//
// Data word:    [31:30] type (00 leading edge, 01 trailing edge, 10 pair)
//               [29:25] channel, [24:8] time, [7:0] pulse width (pair only)
// Header word:  [31:30]=11, [29]=0, [28:17] event id, [16:0] window start time
// Trailer word: [31:30]=11, [29]=1, [28:17] event id, [16:12] 0, [11:0] hit count
package tdc_pkg;
  localparam int unsigned NCH      = 24;   // channels per chip
  localparam int unsigned TIME_W   = 17;   // digitization range in bits
  localparam int unsigned FINE_W   = 2;    // fine-time bits (four phases)
  localparam int unsigned COARSE_W = TIME_W - FINE_W;
  localparam int unsigned WORD_W   = 32;
  localparam int unsigned WIDTH_W  = 8;    // pulse-width field in pair mode
  localparam int unsigned EVID_W   = 12;
  localparam int unsigned WIN_W    = 12;   // match window/offset, in coarse (3.125 ns) units
  localparam int unsigned CH_W     = 5;

  typedef logic [TIME_W-1:0] tdc_time_t;
  typedef logic [WORD_W-1:0] tdc_word_t;

  typedef enum logic [1:0] {
    WT_LEAD  = 2'b00,
    WT_TRAIL = 2'b01,
    WT_PAIR  = 2'b10,
    WT_EVENT = 2'b11
  } word_type_e;

  // Setup register, shifted in through JTAG (LSB first = last field below).
  typedef struct packed {
    logic [WIN_W-1:0] match_offset;  // trigger latency, coarse units
    logic [WIN_W-1:0] match_window;  // window width, coarse units
    logic [NCH-1:0]   chan_enable;
    logic             trig_from_pin; // 1: dedicated trigger pin, 0: TTC trigger
    logic             pair_mode;     // 1: leading time + width, 0: separate edges
    logic             triggered;     // 1: triggered mode, 0: triggerless
  } setup_t;
  localparam int unsigned SETUP_W = $bits(setup_t);

  typedef struct packed {
    logic ecr;        // event count reset issued through JTAG
    logic bcr;        // bunch count reset issued through JTAG
    logic soft_reset; // resets the data path
  } control_t;
  localparam int unsigned CTRL_W = $bits(control_t);

  typedef struct packed {
    logic [7:0] setup_crc;     // CRC-8 of the setup register
    logic [3:0] reserved;
    logic       pll_locked;
    logic       chnl_fifo_ovf; // a channel FIFO was written while full
    logic       trig_fifo_ovf;
    logic       rdout_fifo_full;
  } status_t;
  localparam int unsigned STATUS_W = $bits(status_t);

  // Setup register value after reset: triggerless, pair mode, TTC trigger, all channels
  // on, 250 ns window starting 500 ns before the trigger.
  localparam setup_t SETUP_DEFAULT = '{match_offset: 12'd160, match_window: 12'd80,
                                       chan_enable: '1, trig_from_pin: 1'b0,
                                       pair_mode: 1'b1, triggered: 1'b0};

  // JTAG instructions (4-bit instruction register)
  typedef enum logic [3:0] {
    IR_IDCODE  = 4'b0001,
    IR_SETUP   = 4'b0010,
    IR_CONTROL = 4'b0011,
    IR_STATUS  = 4'b0100,
    IR_BYPASS  = 4'b1111
  } jtag_ir_e;
  localparam logic [31:0] JTAG_IDCODE = 32'h1DC0_2001; // version 1, part 0xDC02, LSB 1

  function automatic logic [WORD_W-1:0] data_word(word_type_e t, logic [CH_W-1:0] ch,
                                                  tdc_time_t tm, logic [WIDTH_W-1:0] w);
    return {t, ch, tm, w};
  endfunction

  function automatic logic [WORD_W-1:0] header_word(logic [EVID_W-1:0] ev, tdc_time_t tm);
    return {WT_EVENT, 1'b0, ev, tm};
  endfunction

  function automatic logic [WORD_W-1:0] trailer_word(logic [EVID_W-1:0] ev, logic [11:0] n);
    return {WT_EVENT, 1'b1, ev, 5'd0, n};
  endfunction

  // Bitwise two-out-of-three majority.
  function automatic logic [63:0] maj3(logic [63:0] a, logic [63:0] b, logic [63:0] c);
    return (a & b) | (b & c) | (a & c);
  endfunction

  // CRC-8, polynomial x^8 + x^2 + x + 1, initial value 0, over the setup register MSB first.
  function automatic logic [7:0] crc8_setup(logic [SETUP_W-1:0] d);
    logic [7:0] c;
    c = 8'h00;
    for (int i = SETUP_W - 1; i >= 0; i--) begin
      logic fb;
      fb = c[7] ^ d[i];
      c  = {c[6:0], 1'b0} ^ (fb ? 8'h07 : 8'h00);
    end
    return c;
  endfunction
endpackage
