// trigger_interface_tb: checks the trigger time base and trigger-FIFO entries. A model
// time base (loaded with 4 by the bunch count reset, +8 per cycle) and a model event
// counter are kept in the testbench. Triggers come from the TTC input and, after the
// source is switched, from the trigger pin (held high for several cycles: one entry per
// rising edge only). Each push must come one cycle after the trigger with the right
// event id and window start; the event count reset must restart the ids at 0.
`timescale 1ns/1ps
module trigger_interface_tb;
  import tdc_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  logic bcr = 0, ecr = 0, ttc_trigger = 0, trig_pin = 0, trig_from_pin = 0;
  logic [WIN_W-1:0] match_offset = 12'd100;
  logic push;
  logic [EVID_W-1:0] push_evid;
  tdc_time_t push_win_start;
  int checks = 0, failures = 0, n_pin = 0, n_ttc = 0, n_ecr = 0;

  trigger_interface dut (.clk, .rst_n, .bcr, .ecr, .ttc_trigger, .trig_pin, .trig_from_pin,
                         .match_offset, .push, .push_evid, .push_win_start);
  always #3.125 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // model, updated on each rising edge from the inputs seen there
  tdc_time_t now_m = 0;
  int        ev_m = 0;
  logic      pin_q = 0, pin_qq = 0;
  bit        exp_push = 0;
  int        exp_ev;
  tdc_time_t exp_ws;
  always @(posedge clk) if (rst_n) begin
    bit trig;
    // compare outputs produced by the previous edge
    checks++;
    if (push !== exp_push) begin failures++; $display("%0t push %b expected %b", $time, push, exp_push); end
    else if (push) begin
      checks++;
      if (push_evid !== EVID_W'(exp_ev) || push_win_start !== exp_ws) begin
        failures++;
        $display("%0t entry ev=%0d ws=%0d expected ev=%0d ws=%0d", $time, push_evid, push_win_start, exp_ev, exp_ws);
      end
    end
    trig = trig_from_pin ? (pin_q && !pin_qq) : ttc_trigger;
    exp_push = trig;
    if (trig) begin
      exp_ev = ecr ? 0 : ev_m;
      exp_ws = now_m - tdc_time_t'(match_offset) * 4;
    end
    if (ecr) ev_m = trig ? 1 : 0; else if (trig) ev_m++;
    now_m = bcr ? 17'd4 : now_m + 17'd8;
    pin_qq = pin_q; pin_q = trig_pin;
  end

  initial begin
    #20 rst_n = 1'b1;
    @(negedge clk) bcr = 1; @(negedge clk) bcr = 0;
    for (int n = 0; n < 600; n++) begin
      @(negedge clk);
      if (n == 300) trig_from_pin = 1;
      ttc_trigger = !trig_from_pin && ($urandom % 5 == 0);
      if (ttc_trigger) n_ttc++;
      if (trig_from_pin && n % 8 == 0) begin trig_pin = 1; n_pin++; end
      if (trig_from_pin && n % 8 == 4) trig_pin = 0;
      ecr = (n % 97 == 13);
      if (ecr) n_ecr++;
      bcr = (n % 211 == 5);
      match_offset = (n % 50 == 0) ? 12'($urandom) : match_offset;
    end
    checks++;
    if (n_pin == 0 || n_ttc == 0 || n_ecr == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
