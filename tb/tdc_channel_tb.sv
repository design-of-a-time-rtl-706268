// tdc_channel_tb: one channel with its real clocks (320 MHz at 0 and 90 degrees, 160 MHz).
// Pulses with known edge times are applied and the channel FIFO is read:
//   triggerless pair mode: one word per pulse, leading time and width;
//   triggerless edge mode: a leading and a trailing word per pulse;
//   triggered mode: a burst of pulses (more than the 16-word ring buffer holds), then a
//     matching scan whose window covers some of them, with the FIFO left unread for a
//     while so the scan must stall; only the windowed hits of the last 16 may come out;
//   disabled channel: nothing comes out.
// Expected times are ceil((t - E)/0.78125 ns) with E the clk0 edge where the bunch count
// reset is seen, computed in the testbench from the pulse times.
`timescale 1ns/1fs
module tdc_channel_tb;
  import tdc_pkg::*;
  localparam real T = 3.125, LSB = 0.78125;
  logic clk0 = 0, clk90 = 0, clk = 0, rst_n = 0, bcr = 0, din = 0;
  logic enable = 1, triggered = 0, pair_mode = 1, match_start = 0;
  tdc_time_t win_start = '0;
  logic [WIN_W-1:0] win_len = '0;
  logic busy, fifo_pop = 0, fifo_empty, fifo_overflow;
  tdc_word_t fifo_dout;
  int checks = 0, failures = 0, stalls = 0;

  tdc_channel #(.CH(7)) dut (.clk0, .clk90, .clk, .rst_n, .bcr, .din, .enable, .triggered,
    .pair_mode, .match_start, .win_start, .win_len, .busy, .fifo_pop, .fifo_dout,
    .fifo_empty, .fifo_overflow);

  initial forever #(T/2) clk0 = ~clk0;
  initial begin #(LSB); forever #(T/2) clk90 = ~clk90; end
  initial begin #(T/2); forever #(T) clk = ~clk; end   // rising edges on clk0 rising edges

  initial begin
    #3000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  realtime E;
  tdc_word_t exp_q[$];
  bit reader_on = 1;
  bit edge_expect = 0;   // edge mode: the leading word is expected before the pulse ends

  // FIFO reader: pops whenever allowed and compares in order
  always @(negedge clk) begin
    fifo_pop <= 1'b0;
    if (reader_on && !fifo_empty) begin
      checks++;
      if (exp_q.size() == 0 || fifo_dout !== exp_q[0]) begin
        failures++;
        if (failures < 10) $display("%0t word %h expected %h", $realtime, fifo_dout, exp_q.size() ? exp_q[0] : 0);
      end
      if (exp_q.size()) void'(exp_q.pop_front());
      fifo_pop <= 1'b1;
    end
  end

  // one pulse; returns the codes of its edges
  task automatic pulse(output tdc_time_t lead, output tdc_time_t trail);
    longint m;
    m = longint'(($realtime - E) / LSB) + 3 + $urandom % 30;
    #(E + (m + 0.5) * LSB - $realtime);
    din = 1;
    lead = tdc_time_t'(m + 1);
    if (edge_expect) exp_q.push_back({WT_LEAD, 5'd7, lead, 8'd0});
    m += 3 + $urandom % 200;
    #(E + (m + 0.5) * LSB - $realtime);
    din = 0;
    trail = tdc_time_t'(m + 1);
    if (edge_expect) exp_q.push_back({WT_TRAIL, 5'd7, trail, 8'd0});
    #(4 * T);
  endtask

  function automatic logic [7:0] wsat(tdc_time_t l, tdc_time_t t);
    tdc_time_t d;
    d = t - l;
    return (d > 255) ? 8'hFF : d[7:0];
  endfunction

  initial begin
    tdc_time_t l, t;
    tdc_word_t hist[$];
    #20 rst_n = 1;
    @(posedge clk); #0.1 bcr = 1;
    E = $realtime - 0.1 + T;
    @(posedge clk); #0.1 bcr = 0;
    // triggerless, pair mode
    for (int n = 0; n < 40; n++) begin
      pulse(l, t);
      exp_q.push_back({WT_PAIR, 5'd7, l, wsat(l, t)});
    end
    #(20 * T);
    // triggerless, edge mode
    pair_mode = 0;
    edge_expect = 1;
    for (int n = 0; n < 40; n++) begin
      pulse(l, t);
    end
    edge_expect = 0;
    #(20 * T);
    // triggered, pair mode
    pair_mode = 1; triggered = 1;
    for (int r = 0; r < 10; r++) begin
      tdc_time_t ws;
      int nb;
      nb = 10 + $urandom % 15;
      hist = {};
      for (int n = 0; n < nb; n++) begin
        pulse(l, t);
        hist.push_back({WT_PAIR, 5'd7, l, wsat(l, t)});
        if (hist.size() > 16) void'(hist.pop_front());
        if (n == nb / 3) ws = l - 2;
      end
      #(10 * T);
      @(posedge clk); #0.1;
      match_start = 1; win_start = ws; win_len = 12'(40 + $urandom % 100);
      foreach (hist[i]) begin
        tdc_time_t d;
        d = hist[i][24:8] - ws;
        if (d < 17'(win_len) * 4) exp_q.push_back(hist[i]);
      end
      reader_on = 0;
      @(posedge clk); #0.1 match_start = 0;
      repeat (30) @(posedge clk);
      if (busy) stalls++;
      reader_on = 1;
      repeat (40) @(posedge clk);
      checks++;
      if (busy || exp_q.size() != 0) begin failures++; $display("round %0d: busy=%b left %0d", r, busy, exp_q.size()); end
    end
    // disabled channel
    triggered = 0; enable = 0;
    for (int n = 0; n < 5; n++) pulse(l, t);
    #(20 * T);
    checks++;
    if (exp_q.size() != 0 || stalls == 0 || fifo_overflow) begin
      failures++; $display("left %0d stalls %0d ovf %b", exp_q.size(), stalls, fifo_overflow);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
