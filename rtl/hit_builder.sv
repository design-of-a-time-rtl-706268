// hit_builder: turns the edge times of one channel into data words.
//
// The two slices of a channel (rising and falling edge) each present a held time and a
// toggle. A changed toggle means a new edge. When both change in the same cycle the
// leading edge is taken first and the trailing edge one cycle later (the slice keeps its
// time until its next edge of the same polarity). Two modes, as in the paper:
//   edge mode (pair_mode=0): one word per edge, type WT_LEAD or WT_TRAIL;
//   pair mode (pair_mode=1): one WT_PAIR word per pulse with the leading time and the
//     width = trailing - leading time (modulo 2^17) saturated to 8 bits.
// In pair mode a trailing edge without a pending leading edge is dropped, and a second
// leading edge replaces a pending one. Word layout: see tdc_pkg (this design's choice).
// Timing: hit_valid is a one-cycle pulse, one clk cycle after the toggle is seen.
module hit_builder
  import tdc_pkg::*;
#(
  parameter int unsigned CH = 0
) (
  input  logic      clk,        // 160 MHz
  input  logic      rst_n,
  input  logic      pair_mode,
  input  logic      lead_tog,
  input  tdc_time_t lead_time,
  input  logic      trail_tog,
  input  tdc_time_t trail_time,
  output logic      hit_valid,
  output tdc_word_t hit_word
);
  logic      lead_seen, trail_seen;
  logic      have_lead;
  tdc_time_t lead_hold;

  wire new_lead  = lead_tog != lead_seen;
  wire new_trail = (trail_tog != trail_seen) && !new_lead;

  tdc_time_t         diff;
  logic [WIDTH_W-1:0] width;
  always_comb begin
    diff  = trail_time - lead_hold;
    width = (diff > TIME_W'(2**WIDTH_W - 1)) ? '1 : diff[WIDTH_W-1:0];
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      lead_seen  <= 1'b0;
      trail_seen <= 1'b0;
      have_lead  <= 1'b0;
      lead_hold  <= '0;
      hit_valid  <= 1'b0;
      hit_word   <= '0;
    end else begin
      hit_valid <= 1'b0;
      if (new_lead) begin
        lead_seen <= lead_tog;
        if (pair_mode) begin
          lead_hold <= lead_time;
          have_lead <= 1'b1;
        end else begin
          hit_valid <= 1'b1;
          hit_word  <= data_word(WT_LEAD, CH_W'(CH), lead_time, '0);
        end
      end else if (new_trail) begin
        trail_seen <= trail_tog;
        if (!pair_mode) begin
          hit_valid <= 1'b1;
          hit_word  <= data_word(WT_TRAIL, CH_W'(CH), trail_time, '0);
        end else if (have_lead) begin
          hit_valid <= 1'b1;
          hit_word  <= data_word(WT_PAIR, CH_W'(CH), lead_hold, width);
          have_lead <= 1'b0;
        end
      end
    end
endmodule
