// hit_builder_tb: drives the two slice interfaces (toggle + held time) directly with
// random edges, in edge mode and in pair mode, and compares every output word with a
// model: type, channel, time and saturated width. Both toggles changing in one cycle
// is exercised; the trailing edge must then come one cycle after the leading one.
`timescale 1ns/1ps
module hit_builder_tb;
  import tdc_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0, pair_mode = 1'b0;
  logic lead_tog = 1'b0, trail_tog = 1'b0;
  tdc_time_t lead_time = '0, trail_time = '0;
  logic hit_valid;
  tdc_word_t hit_word;
  int checks = 0, failures = 0, both_same_cycle = 0, saturated = 0;

  hit_builder #(.CH(19)) dut (.clk, .rst_n, .pair_mode, .lead_tog, .lead_time,
                              .trail_tog, .trail_time, .hit_valid, .hit_word);
  always #3.125 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  tdc_word_t exp_q[$];

  // output monitor
  always @(negedge clk) if (rst_n && hit_valid) begin
    checks++;
    if (exp_q.size() == 0) begin
      failures++; $display("unexpected word %h", hit_word);
    end else begin
      tdc_word_t e;
      e = exp_q.pop_front();
      if (hit_word !== e) begin
        failures++;
        if (failures < 10) $display("word %h expected %h", hit_word, e);
      end
    end
  end

  initial begin
    tdc_time_t t, w;
    #20 rst_n = 1'b1;
    for (int mode = 0; mode < 2; mode++) begin
      @(negedge clk) pair_mode = mode[0];
      for (int n = 0; n < 200; n++) begin
        t = 17'($urandom);
        w = (n % 10 == 3) ? 17'(300 + $urandom % 1000) : 17'($urandom % 250);
        if (n % 4 == 0) begin
          // leading and trailing edge seen in the same cycle
          @(negedge clk);
          lead_time = t; lead_tog = ~lead_tog;
          trail_time = t + w; trail_tog = ~trail_tog;
          both_same_cycle++;
          if (!pair_mode) begin
            exp_q.push_back({WT_LEAD, 5'd19, t, 8'd0});
            exp_q.push_back({WT_TRAIL, 5'd19, t + w, 8'd0});
          end
        end else begin
          @(negedge clk);
          lead_time = t; lead_tog = ~lead_tog;
          if (!pair_mode) exp_q.push_back({WT_LEAD, 5'd19, t, 8'd0});
          repeat (1 + $urandom % 3) @(negedge clk);
          trail_time = t + w; trail_tog = ~trail_tog;
          if (!pair_mode) exp_q.push_back({WT_TRAIL, 5'd19, t + w, 8'd0});
        end
        if (pair_mode) begin
          if (w > 255) saturated++;
          exp_q.push_back({WT_PAIR, 5'd19, t, (w > 255) ? 8'hFF : w[7:0]});
        end
        repeat (3) @(negedge clk);
      end
      // a trailing edge with no leading edge is dropped in pair mode
      if (pair_mode) begin
        trail_tog = ~trail_tog; trail_time = 17'd77;
        repeat (3) @(negedge clk);
      end
    end
    repeat (5) @(negedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("%0d words missing", exp_q.size()); end
    checks++;
    if (both_same_cycle == 0 || saturated == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
