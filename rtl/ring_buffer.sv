// ring_buffer: per-channel hit store for triggered mode, with trigger matching.
//
// Hit words are written in a circular buffer of DEPTH entries; once it is full the
// oldest entry is overwritten, so the buffer always holds the latest DEPTH hits of the
// channel. A pulse on match_start begins a scan of all entries from oldest to newest.
// An entry is sent out (out_valid/out_ready) when it is valid and its time t satisfies
//     (t - win_start) mod 2^17  <  win_len * 4
// i.e. it lies in the trigger window that starts at win_start and lasts win_len periods
// of 3.125 ns. Entries outside the window are skipped at one per cycle; a matched entry
// waits for out_ready, so a full channel FIFO stalls the scan. busy is high from
// match_start until the last entry has been looked at. Entries are not removed by a
// match, so overlapping triggers both see a hit. The 16-word depth is the paper's; the
// matching rule and the scan are this design's own (the paper names trigger matching
// without describing it).
module ring_buffer
  import tdc_pkg::*;
#(
  parameter int unsigned DEPTH = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             wr_en,
  input  tdc_word_t        wr_word,
  input  logic             match_start,
  input  tdc_time_t        win_start,
  input  logic [WIN_W-1:0] win_len,
  output logic             out_valid,
  input  logic             out_ready,
  output tdc_word_t        out_word,
  output logic             busy
);
  localparam int unsigned AW = $clog2(DEPTH);

  tdc_word_t      mem [DEPTH];
  logic [DEPTH-1:0] vld;
  logic [AW-1:0]  wptr;
  logic [AW-1:0]  base;     // oldest entry when the scan began
  logic [AW:0]    idx;      // entries scanned so far
  tdc_time_t      w_start;
  logic [TIME_W-1:0] w_len;

  logic [AW-1:0] rd;
  tdc_time_t     t, dt;
  logic          hit;
  always_comb begin
    rd       = base + idx[AW-1:0];
    out_word = mem[rd];
    t        = out_word[8 +: TIME_W];
    dt       = t - w_start;
    hit      = vld[rd] && (dt < w_len);
    out_valid = busy && hit;
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      vld     <= '0;
      wptr    <= '0;
      base    <= '0;
      idx     <= '0;
      busy    <= 1'b0;
      w_start <= '0;
      w_len   <= '0;
    end else begin
      if (wr_en) begin
        vld[wptr] <= 1'b1;
        wptr      <= wptr + 1'b1;
      end
      if (match_start) begin
        busy    <= 1'b1;
        idx     <= '0;
        base    <= wr_en ? wptr + 1'b1 : wptr;
        w_start <= win_start;
        w_len   <= {{(TIME_W-WIN_W-2){1'b0}}, win_len, 2'b00};
      end else if (busy && (!hit || out_ready)) begin
        idx <= idx + 1'b1;
        if (idx == (AW+1)'(DEPTH - 1)) busy <= 1'b0;
      end
    end

  always_ff @(posedge clk)
    if (wr_en) mem[wptr] <= wr_word;
endmodule
