// sync_fifo_tb: random pushes and pops against a queue model, for a 4-word and a
// 16-word FIFO. Checks the head word, the full/empty flags, the count and the sticky
// overflow flag; also upsets one copy of the triplicated pointers and checks that the
// FIFO keeps its place.
`timescale 1ns/1ps
module sync_fifo_tb;
  logic clk = 1'b0, rst_n = 1'b0;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  logic        push4, pop4, full4, empty4, ovf4;
  logic [31:0] din4, dout4;
  logic [2:0]  cnt4;
  sync_fifo #(.WIDTH(32), .DEPTH(4)) dut4 (.clk, .rst_n, .push(push4), .din(din4), .pop(pop4),
    .dout(dout4), .full(full4), .empty(empty4), .overflow(ovf4), .count(cnt4));

  logic        push16, pop16, full16, empty16, ovf16;
  logic [31:0] din16, dout16;
  logic [4:0]  cnt16;
  sync_fifo #(.WIDTH(32), .DEPTH(16)) dut16 (.clk, .rst_n, .push(push16), .din(din16), .pop(pop16),
    .dout(dout16), .full(full16), .empty(empty16), .overflow(ovf16), .count(cnt16));

  initial begin
    #500000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("%0t %s: got %0d expected %0d", $time, what, got, exp);
    end
  endtask

  logic [31:0] q4[$], q16[$];
  bit exp_ovf4 = 0, exp_ovf16 = 0;

  initial begin
    push4 = 0; pop4 = 0; din4 = 0; push16 = 0; pop16 = 0; din16 = 0;
    #22 rst_n = 1'b1;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      // compare state
      chk("empty4", empty4, q4.size() == 0);
      chk("full4", full4, q4.size() == 4);
      chk("count4", cnt4, q4.size());
      chk("ovf4", ovf4, exp_ovf4);
      if (q4.size() > 0) chk("dout4", dout4, q4[0]);
      chk("empty16", empty16, q16.size() == 0);
      chk("full16", full16, q16.size() == 16);
      chk("count16", cnt16, q16.size());
      chk("ovf16", ovf16, exp_ovf16);
      if (q16.size() > 0) chk("dout16", dout16, q16[0]);
      // upset one pointer copy now and then
      if (n % 97 == 50) dut16.u_ctrl.r[n % 3][0] = ~dut16.u_ctrl.r[n % 3][0];
      // stimulus, phases with push-heavy and pop-heavy traffic
      push4 = ($urandom % 100) < ((n / 300) % 2 ? 70 : 30);
      pop4  = ($urandom % 100) < ((n / 300) % 2 ? 30 : 70);
      din4  = $urandom;
      push16 = ($urandom % 100) < ((n / 500) % 2 ? 75 : 35);
      pop16  = ($urandom % 100) < ((n / 500) % 2 ? 30 : 70);
      din16  = $urandom;
      @(posedge clk);
      begin
        bit f4, f16;
        f4  = q4.size() == 4;
        f16 = q16.size() == 16;
        if (pop4 && q4.size() > 0) void'(q4.pop_front());
        if (push4) begin if (!f4) q4.push_back(din4); else exp_ovf4 = 1; end
        if (pop16 && q16.size() > 0) void'(q16.pop_front());
        if (push16) begin if (!f16) q16.push_back(din16); else exp_ovf16 = 1; end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
