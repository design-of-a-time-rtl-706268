// tmr_reg_tb: checks the flow-control TMR cell. The three next-value inputs are driven
// with the same counter value, and in turn one of them is corrupted (as an upset in one
// logic copy or register would do). Every voted output must still equal the correct
// value one clock later.
`timescale 1ns/1ps
module tmr_reg_tb;
  logic       clk = 1'b0, rst_n = 1'b0;
  logic [7:0] d [3];
  logic [7:0] q [3];
  int checks = 0, failures = 0;

  tmr_reg #(.WIDTH(8), .RESET_VAL(8'h5A)) dut (.clk, .rst_n, .d, .q);

  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [7:0] good;
    d = '{8'h00, 8'h00, 8'h00};
    #12;
    for (int i = 0; i < 3; i++) begin
      checks++;
      if (q[i] !== 8'h5A) begin failures++; $display("reset value wrong q[%0d]=%h", i, q[i]); end
    end
    #20 rst_n = 1'b1;
    for (int n = 0; n < 300; n++) begin
      @(negedge clk);
      good = 8'($urandom);
      d = '{good, good, good};
      if (n % 3 != 0)      d[n % 3] = good ^ 8'(1 << ($urandom % 8));
      else if (n % 2 == 0) d[0] = ~good;
      @(posedge clk); #1;
      for (int i = 0; i < 3; i++) begin
        checks++;
        if (q[i] !== good) begin
          failures++;
          if (failures < 10) $display("n=%0d q[%0d]=%h expected %h", n, i, q[i], good);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
