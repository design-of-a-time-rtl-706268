// ttc_decoder_tb: sends random TTC commands (start bit + 3 command bits, idle gaps of
// random length) and checks that exactly the matching output pulses, for one cycle, the
// cycle after the last command bit, and that unknown codes give no pulse. One register
// copy of the TMR state is upset during the run.
`timescale 1ns/1ps
module ttc_decoder_tb;
  logic clk = 1'b0, rst_n = 1'b0, ttc = 1'b0;
  logic trigger, bcr, ecr, master_rst;
  int checks = 0, failures = 0;
  int cnt [4] = '{0, 0, 0, 0};

  ttc_decoder dut (.clk, .rst_n, .ttc, .trigger, .bcr, .ecr, .master_rst);
  always #3.125 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [3:0] expect_out = '0;
  always @(posedge clk) if (rst_n) begin
    #0.1;
    checks++;
    if ({master_rst, ecr, bcr, trigger} !== expect_out) begin
      failures++;
      if (failures < 10) $display("%0t outputs %b expected %b", $time, {master_rst, ecr, bcr, trigger}, expect_out);
    end
  end

  initial begin
    logic [2:0] cmd;
    #20 rst_n = 1'b1;
    for (int n = 0; n < 400; n++) begin
      cmd = 3'($urandom % 6);
      repeat ($urandom % 4) @(negedge clk);
      @(negedge clk) ttc = 1'b1;
      for (int b = 2; b >= 0; b--) begin
        @(negedge clk) ttc = cmd[b];
        if (b == 1 && n % 50 == 7) dut.u_tmr.r[n % 3] = ~dut.u_tmr.r[n % 3];
      end
      // the last bit is taken at the next rising edge; the pulse follows that edge
      case (cmd)
        3'd1: expect_out = 4'b0001;
        3'd2: expect_out = 4'b0010;
        3'd3: expect_out = 4'b0100;
        3'd4: expect_out = 4'b1000;
        default: expect_out = 4'b0000;
      endcase
      if (cmd >= 1 && cmd <= 4) cnt[cmd - 1]++;
      @(negedge clk) ttc = 1'b0; expect_out = 4'b0000;
    end
    repeat (4) @(negedge clk);
    for (int i = 0; i < 4; i++) begin checks++; if (cnt[i] == 0) failures++; end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
