// tdc_channel: one of the 24 TDC channels.
//
// Two tdc_slice instances (rising and falling edge) digitize the input on the 320 MHz
// clocks. A hit_builder on the 160 MHz clock forms data words. In triggerless mode each
// word goes straight into the 4-word channel FIFO; in triggered mode it goes into the
// 16-word ring_buffer, and only the words that a trigger's matching scan selects reach
// the channel FIFO. Structure and buffer sizes follow the paper's block diagram; a
// disabled channel (enable=0) drops its words, which is this design's choice.
// Interface: the channel FIFO is read with fifo_pop/fifo_dout/fifo_empty (show-ahead);
// match_start/win_start/win_len start a matching scan, busy is high while it runs.
module tdc_channel
  import tdc_pkg::*;
#(
  parameter int unsigned CH            = 0,
  parameter int unsigned CH_FIFO_DEPTH = 4,
  parameter int unsigned RB_DEPTH      = 16
) (
  input  logic             clk0,
  input  logic             clk90,
  input  logic             clk,        // 160 MHz
  input  logic             rst_n,
  input  logic             bcr,
  input  logic             din,
  input  logic             enable,
  input  logic             triggered,
  input  logic             pair_mode,
  input  logic             match_start,
  input  tdc_time_t        win_start,
  input  logic [WIN_W-1:0] win_len,
  output logic             busy,
  input  logic             fifo_pop,
  output tdc_word_t        fifo_dout,
  output logic             fifo_empty,
  output logic             fifo_overflow
);
  logic      lead_tog, trail_tog;
  tdc_time_t lead_time, trail_time;

  tdc_slice #(.RISING(1'b1)) u_rise (.clk0, .clk90, .rst_n, .bcr, .din,
                                     .hit_tog(lead_tog), .hit_time(lead_time));
  tdc_slice #(.RISING(1'b0)) u_fall (.clk0, .clk90, .rst_n, .bcr, .din,
                                     .hit_tog(trail_tog), .hit_time(trail_time));

  logic      hv;
  tdc_word_t hw;
  hit_builder #(.CH(CH)) u_hb (.clk, .rst_n, .pair_mode,
                               .lead_tog, .lead_time, .trail_tog, .trail_time,
                               .hit_valid(hv), .hit_word(hw));

  logic      m_valid, m_ready;
  tdc_word_t m_word;
  ring_buffer #(.DEPTH(RB_DEPTH)) u_rb (.clk, .rst_n,
    .wr_en(hv && enable && triggered), .wr_word(hw),
    .match_start, .win_start, .win_len,
    .out_valid(m_valid), .out_ready(m_ready), .out_word(m_word), .busy);

  logic      f_full;
  logic      f_push;
  tdc_word_t f_din;
  always_comb begin
    if (triggered) begin
      f_push = m_valid && !f_full;
      f_din  = m_word;
    end else begin
      f_push = hv && enable;
      f_din  = hw;
    end
  end
  assign m_ready = !f_full;

  sync_fifo #(.WIDTH(WORD_W), .DEPTH(CH_FIFO_DEPTH)) u_fifo (.clk, .rst_n,
    .push(f_push), .din(f_din), .pop(fifo_pop), .dout(fifo_dout),
    .full(f_full), .empty(fifo_empty), .overflow(fifo_overflow), .count());
endmodule
