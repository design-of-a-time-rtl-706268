// ring_buffer_tb: writes random hit words (some hit times clustered near the window),
// more than 16 between triggers so that old entries are overwritten, then starts a
// match with a random window. The words sent out must be exactly the model's: of the
// last 16 written, those with (t - start) mod 2^17 < 4*len, oldest first, while
// out_ready is randomly withheld. busy must drop after the scan.
`timescale 1ns/1ps
module ring_buffer_tb;
  import tdc_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  logic wr_en = 0, match_start = 0, out_valid, out_ready = 0, busy;
  tdc_word_t wr_word = '0, out_word;
  tdc_time_t win_start = '0;
  logic [WIN_W-1:0] win_len = '0;
  int checks = 0, failures = 0, matched = 0, overwritten = 0, stalled = 0;

  ring_buffer #(.DEPTH(16)) dut (.clk, .rst_n, .wr_en, .wr_word, .match_start, .win_start,
    .win_len, .out_valid, .out_ready, .out_word, .busy);
  always #3.125 clk = ~clk;

  initial begin
    #3000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  tdc_word_t hist[$];
  tdc_word_t exp_q[$];

  initial begin
    #20 rst_n = 1'b1;
    for (int r = 0; r < 200; r++) begin
      int nw;
      tdc_time_t base;
      base = 17'($urandom);
      nw = (r == 0) ? 5 : 1 + $urandom % 30;
      if (hist.size() + nw > 16) overwritten++;
      for (int i = 0; i < nw; i++) begin
        tdc_time_t t;
        t = ($urandom % 2) ? base + 17'($urandom % 600) - 17'd100 : 17'($urandom);
        @(negedge clk);
        wr_en = 1; wr_word = {2'b10, 5'd3, t, 8'($urandom)};
        hist.push_back(wr_word);
        if (hist.size() > 16) void'(hist.pop_front());
      end
      @(negedge clk);
      wr_en = 0;
      match_start = 1; win_start = base; win_len = 12'($urandom % 120);
      exp_q = {};
      foreach (hist[i]) begin
        tdc_time_t t, dt;
        t = hist[i][24:8];
        dt = t - win_start;
        if (dt < 17'(win_len) * 4) exp_q.push_back(hist[i]);
      end
      @(negedge clk);
      match_start = 0;
      for (int cyc = 0; cyc < 200 && (busy || exp_q.size()); cyc++) begin
        out_ready = ($urandom % 3 != 0);
        #1;
        if (out_valid && !out_ready) stalled++;
        if (out_valid && out_ready) begin
          checks++;
          if (exp_q.size() == 0 || out_word !== exp_q[0]) begin
            failures++;
            if (failures < 10) $display("round %0d: out %h expected %h", r, out_word, exp_q.size() ? exp_q[0] : 0);
          end else matched++;
          if (exp_q.size()) void'(exp_q.pop_front());
        end
        @(negedge clk);
      end
      checks++;
      if (busy || exp_q.size() != 0) begin failures++; $display("round %0d: busy=%b left=%0d", r, busy, exp_q.size()); end
    end
    checks++;
    if (matched < 100 || overwritten == 0 || stalled == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
