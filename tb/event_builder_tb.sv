// event_builder_tb: model channels answer each match_start by staying busy for a random
// time while handing over a random number of words (at most 4 queued, like the channel
// FIFO). Triggers wait in a model trigger FIFO and the readout FIFO is often full. The
// words written to the readout FIFO must be, per event: header (event id, window start),
// the words of channel 0..N-1 in order, trailer (event id, word count). The model also
// checks that no new match starts while a channel is busy.
`timescale 1ns/1ps
module event_builder_tb;
  import tdc_pkg::*;
  localparam int N = 6;
  logic clk = 1'b0, rst_n = 1'b0, enable = 1'b1;
  logic tf_empty, tf_pop, match_start, rf_full = 0, rf_push;
  logic [EVID_W-1:0] tf_evid;
  tdc_time_t tf_win_start, win_start;
  logic [N-1:0] ch_busy, ch_empty, ch_pop;
  tdc_word_t ch_dout [N];
  tdc_word_t rf_din;
  int checks = 0, failures = 0, events = 0, stalls = 0;

  event_builder #(.NUM_CH(N)) dut (.clk, .rst_n, .enable, .tf_empty, .tf_evid, .tf_win_start,
    .tf_pop, .match_start, .win_start, .ch_busy, .ch_empty, .ch_dout, .ch_pop,
    .rf_full, .rf_push, .rf_din);
  always #3.125 clk = ~clk;

  initial begin
    #3000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [EVID_W+TIME_W-1:0] tq[$];   // trigger FIFO model
  tdc_word_t pend [N][$];            // words a channel will still produce
  tdc_word_t q [N][$];               // channel FIFO model
  int        busy_left [N];
  tdc_word_t exp_q[$];

  function automatic void drive();
    tf_empty = tq.size() == 0;
    {tf_evid, tf_win_start} = (tq.size() > 0) ? tq[0] : '0;
    for (int c = 0; c < N; c++) begin
      ch_busy[c]  = busy_left[c] > 0;
      ch_empty[c] = q[c].size() == 0;
      ch_dout[c]  = (q[c].size() > 0) ? q[c][0] : '0;
    end
  endfunction

  initial begin
    for (int c = 0; c < N; c++) busy_left[c] = 0;
    drive();
    #20 rst_n = 1'b1;
    for (int n = 0; n < 6000; n++) begin
      logic [N-1:0] popped;
      logic pushed, started, tpop;
      tdc_word_t din;
      @(negedge clk);
      if (n < 5000 && $urandom % 40 == 0 && tq.size() < 16) tq.push_back({12'($urandom), 17'($urandom)});
      rf_full = ($urandom % 3 == 0);
      drive();
      #1;
      popped = ch_pop; pushed = rf_push; din = rf_din; started = match_start; tpop = tf_pop;
      if (rf_full && rf_push) begin checks++; failures++; $display("push while full"); end
      if (rf_full) stalls++;
      @(posedge clk);
      #0.5;
      if (pushed && !rf_full) begin
        checks++;
        if (exp_q.size() == 0 || din !== exp_q[0]) begin
          failures++;
          if (failures < 10) $display("%0t word %h expected %h", $time, din, exp_q.size() ? exp_q[0] : 0);
        end
        if (exp_q.size()) void'(exp_q.pop_front());
      end
      if (tpop) begin
        logic [EVID_W-1:0] ev;
        tdc_time_t ws;
        int cntw;
        {ev, ws} = tq.pop_front();
        checks++;
        if (ch_busy != 0) begin failures++; $display("match started while busy"); end
        exp_q.push_back(header_word(ev, ws));
        cntw = 0;
        for (int c = 0; c < N; c++) begin
          int k;
          k = $urandom % 7;
          busy_left[c] = 1 + $urandom % 30;
          for (int j = 0; j < k; j++) begin
            tdc_word_t w;
            w = {2'b10, 5'(c), 25'($urandom)};
            pend[c].push_back(w);
            exp_q.push_back(w);
            cntw++;
          end
        end
        exp_q.push_back(trailer_word(ev, 12'(cntw)));
        events++;
      end
      for (int c = 0; c < N; c++) begin
        if (popped[c]) void'(q[c].pop_front());
        if (pend[c].size() > 0 && q[c].size() < 4 && $urandom % 2) q[c].push_back(pend[c].pop_front());
        if (busy_left[c] > 0 && !(busy_left[c] == 1 && pend[c].size() > 0)) busy_left[c]--;
      end
      drive();
    end
    checks++;
    if (exp_q.size() != 0 || events < 20 || stalls == 0) begin
      failures++; $display("left %0d events %0d", exp_q.size(), events);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
