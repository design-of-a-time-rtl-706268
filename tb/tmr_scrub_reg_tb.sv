// tmr_scrub_reg_tb: checks the configuration TMR cell with scrubbing. After a value is
// loaded, single registers are upset one after another, a few cycles apart. The voted
// output must never change, the upset register must be repaired on the next clock, and
// upsets of two different registers at different times must not add up.
`timescale 1ns/1ps
module tmr_scrub_reg_tb;
  logic        clk = 1'b0, rst_n = 1'b0, load = 1'b0;
  logic [15:0] d = '0, q;
  int checks = 0, failures = 0;

  tmr_scrub_reg #(.WIDTH(16)) dut (.clk, .rst_n, .load, .d, .q);

  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what, logic [15:0] got, logic [15:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 10) $display("%s: got %h expected %h", what, got, exp);
    end
  endtask

  initial begin
    logic [15:0] val;
    #12 check("reset", q, 16'h0);
    #20 rst_n = 1'b1;
    for (int n = 0; n < 40; n++) begin
      val = 16'($urandom);
      @(negedge clk); d = val; load = 1'b1;
      @(negedge clk); load = 1'b0; d = 16'($urandom);
      check("load", q, val);
      for (int u = 0; u < 6; u++) begin
        int k;
        k = (n + u) % 3;
        @(negedge clk);
        dut.r[k] = dut.r[k] ^ 16'(1 << ($urandom % 16));   // single-event upset
        #1 check("voted output during upset", q, val);
        @(posedge clk); #1;
        check("scrubbed register", dut.r[k], val);
        check("voted output", q, val);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
