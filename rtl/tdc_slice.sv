// tdc_slice: one time-to-digital slice (one edge polarity of one channel).
//
// The input is sampled by four flip-flops clocked on the rising and falling edges of the
// 0 and 90 degree 320 MHz clocks, i.e. every 781.25 ps. On each rising edge of clk0 the
// four samples of the previous 3.125 ns period are taken together, in time order, with
// the last sample of the period before. The first sample that shows the wanted edge
// (0->1 for the rising-edge slice, 1->0 for the falling-edge slice) gives the 2-bit fine
// code; the 15-bit coarse counter gives the period. Time = {coarse, fine}, 17 bits.
// The paper gives the 17-bit range, the 0.78 ns least count, the four sampling
// flip-flops, the two 320 MHz phases and one slice per edge; the assignment of clock
// edges to flip-flops and the hand-off below are this design's choices.
//
// Hand-off: hit_time holds the last captured time and hit_tog toggles when it changes,
// so logic on the related 160 MHz clock can pick it up. An edge that arrives before the
// previous one has been read replaces it (the slice has one word of storage).
// The coarse counter is cleared on the rising edge of `bcr` (bunch count reset).
// Timing: hit_time/hit_tog change two clk0 edges after the period containing the edge.
// Note: sampling on both clock edges and phases is intentional; it is the interpolator.
module tdc_slice
  import tdc_pkg::*;
#(
  parameter bit RISING = 1'b1
) (
  input  logic      clk0,     // 320 MHz, 0 deg
  input  logic      clk90,    // 320 MHz, 90 deg
  input  logic      rst_n,
  input  logic      bcr,      // bunch count reset (level from the 160 MHz domain)
  input  logic      din,
  output logic      hit_tog,
  output tdc_time_t hit_time
);
  // phase samples: p0 @ clk0 rise, p1 @ clk90 rise, p2 @ clk0 fall, p3 @ clk90 fall
  logic p0, p1, p2, p3;
  always_ff @(posedge clk0 or negedge rst_n)  if (!rst_n) p0 <= 1'b0; else p0 <= din;
  always_ff @(posedge clk90 or negedge rst_n) if (!rst_n) p1 <= 1'b0; else p1 <= din;
  always_ff @(negedge clk0 or negedge rst_n)  if (!rst_n) p2 <= 1'b0; else p2 <= din;
  always_ff @(negedge clk90 or negedge rst_n) if (!rst_n) p3 <= 1'b0; else p3 <= din;

  logic [3:0]          smp;      // samples of the previous period, smp[0] earliest
  logic                last;     // last sample of the period before
  logic [COARSE_W-1:0] coarse;   // coarse count of the current period
  logic [COARSE_W-1:0] coarse_s; // coarse count of the period held in smp
  logic                bcr_d;

  always_ff @(posedge clk0 or negedge rst_n)
    if (!rst_n) begin
      smp      <= '0;
      last     <= 1'b0;
      coarse   <= '0;
      coarse_s <= '0;
      bcr_d    <= 1'b0;
    end else begin
      smp      <= {p3, p2, p1, p0};
      last     <= smp[3];
      bcr_d    <= bcr;
      coarse   <= (bcr && !bcr_d) ? '0 : coarse + 1'b1;
      coarse_s <= coarse;
    end

  // edge search over {smp, last}
  logic [3:0]        edge_at;
  logic [FINE_W-1:0] fine;
  logic              found;
  always_comb begin
    logic [4:0] s;
    s = {smp, last};
    for (int i = 0; i < 4; i++)
      edge_at[i] = RISING ? (s[i+1] & ~s[i]) : (~s[i+1] & s[i]);
    found = |edge_at;
    fine  = '0;
    for (int i = 3; i >= 0; i--)
      if (edge_at[i]) fine = FINE_W'(i);
  end

  always_ff @(posedge clk0 or negedge rst_n)
    if (!rst_n) begin
      hit_tog  <= 1'b0;
      hit_time <= '0;
    end else if (found) begin
      hit_tog  <= ~hit_tog;
      hit_time <= {coarse_s, fine};
    end
endmodule
