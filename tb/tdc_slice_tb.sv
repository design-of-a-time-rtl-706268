// tdc_slice_tb: drives a channel input with pulses whose edges fall at known times,
// away from the sampling instants, and checks the rising-edge and falling-edge slices.
// With E the clk0 edge at which the bunch count reset is seen (coarse = 0 from there),
// an edge at time t must read ceil((t - E) / 0.78125 ns) mod 2^17, and must be
// reported within three 320 MHz periods. Pulses are as short as two least counts.
`timescale 1ns/1fs
module tdc_slice_tb;
  import tdc_pkg::*;
  localparam real T = 3.125, LSB = 0.78125;
  logic clk0 = 1'b0, clk90 = 1'b0, rst_n = 1'b0, bcr = 1'b0, din = 1'b0;
  logic rtog, ftog;
  tdc_time_t rtime, ftime;
  int checks = 0, failures = 0;

  tdc_slice #(.RISING(1'b1)) dut_r (.clk0, .clk90, .rst_n, .bcr, .din, .hit_tog(rtog), .hit_time(rtime));
  tdc_slice #(.RISING(1'b0)) dut_f (.clk0, .clk90, .rst_n, .bcr, .din, .hit_tog(ftog), .hit_time(ftime));

  initial forever #(T/2) clk0 = ~clk0;
  initial begin #(LSB); forever #(T/2) clk90 = ~clk90; end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  realtime E;

  task automatic expect_edge(bit rising, longint m);
    logic      tog0;
    tdc_time_t got;
    bit        seen;
    tog0 = rising ? rtog : ftog;
    seen = 0;
    for (int i = 0; i < 64 && !seen; i++) begin   // up to 4 periods
      #(LSB / 4);
      if ((rising ? rtog : ftog) != tog0) seen = 1;
    end
    got = rising ? rtime : ftime;
    checks++;
    if (!seen || got !== tdc_time_t'(m + 1)) begin
      failures++;
      if (failures < 10) $display("%s edge: seen=%0b time %0d expected %0d", rising ? "rising" : "falling",
                                  seen, got, tdc_time_t'(m + 1));
    end
  endtask

  initial begin
    longint m;
    #10 rst_n = 1'b1;
    @(posedge clk0); #0.1 bcr = 1'b1;
    @(posedge clk0); E = $realtime; #0.1;
    @(posedge clk0); #0.1 bcr = 1'b0;
    for (int n = 0; n < 300; n++) begin
      real frac;
      m = longint'(($realtime - E) / LSB) + 2 + $urandom % 60;
      frac = 0.15 + 0.7 * ($urandom % 100) / 100.0;
      #(E + (m + frac) * LSB - $realtime);
      din = 1'b1;
      begin
        automatic longint mr = m;
        fork expect_edge(1, mr); join_none
      end
      m += 2 + $urandom % 40;
      frac = 0.15 + 0.7 * ($urandom % 100) / 100.0;
      #(E + (m + frac) * LSB - $realtime);
      din = 1'b0;
      expect_edge(0, m);
      #(T);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
