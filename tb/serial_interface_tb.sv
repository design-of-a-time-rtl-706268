// serial_interface_tb: feeds random 32-bit words through a model show-ahead FIFO, with
// gaps so that idle commas are sent too, and rebuilds the 10-bit symbols from the two
// line outputs (two bits per cycle, earlier bit first). Every symbol is compared with an
// independent encoder instance driven by the testbench with its own running disparity
// per line: K28.5 when idle, else bytes 3,2 on line 0 and 1,0 on line 1. It also checks
// that a word takes ten cycles and that the words come out in order.
`timescale 1ns/1ps
module serial_interface_tb;
  import tdc_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  logic fifo_empty, fifo_pop;
  tdc_word_t fifo_dout;
  logic [1:0][1:0] sdata;
  int checks = 0, failures = 0, words = 0, idles = 0;

  serial_interface dut (.clk, .rst_n, .fifo_empty, .fifo_dout, .fifo_pop, .sdata);
  always #3.125 clk = ~clk;

  // reference encoder
  logic [7:0] r_data;
  logic       r_k, r_rd, r_rdo;
  logic [9:0] r_code;
  encoder_8b10b ref_enc (.data(r_data), .k(r_k), .rd_in(r_rd), .code(r_code), .rd_out(r_rdo));

  initial begin
    #3000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  tdc_word_t src[$];
  // per-line expected byte stream: {k, byte}
  logic [8:0] exp_sym [2][$];
  logic       rd_m [2] = '{0, 0};

  function automatic void drive();
    fifo_empty = src.size() == 0;
    fifo_dout  = src.size() ? src[0] : '0;
  endfunction

  initial begin
    logic [9:0] sh [2];
    int last_pop;
    drive();
    #20 rst_n = 1'b1;
    last_pop = -100;
    for (int cyc = 0; cyc < 3000; cyc++) begin
      bit popped;
      @(negedge clk);
      if (cyc < 2600 && (cyc / 200) % 2 == 0 && src.size() < 3) src.push_back($urandom);
      drive();
      #1;
      popped = fifo_pop;
      if (popped) begin
        tdc_word_t w;
        w = src[0];
        exp_sym[0].push_back({1'b0, w[31:24]}); exp_sym[0].push_back({1'b0, w[23:16]});
        exp_sym[1].push_back({1'b0, w[15:8]});  exp_sym[1].push_back({1'b0, w[7:0]});
        if (last_pop >= 0) begin
          checks++;
          if (cyc - last_pop < 10) begin failures++; $display("word after %0d cycles", cyc - last_pop); end
        end
        last_pop = cyc;
        words++;
      end
      // symbols start every 5 cycles, the first one in the cycle after reset
      for (int l = 0; l < 2; l++) sh[l] = {sh[l][7:0], sdata[l]};
      if (cyc % 5 == 4) begin
        for (int l = 0; l < 2; l++) begin
          logic [8:0] s;
          if (exp_sym[l].size() > 0 && !(popped && exp_sym[l].size() == 2)) s = exp_sym[l].pop_front();
          else begin s = {1'b1, 8'hBC}; if (l == 0) idles++; end
          r_data = s[7:0]; r_k = s[8]; r_rd = rd_m[l]; #0.1;
          checks++;
          if (sh[l] !== r_code) begin
            failures++;
            if (failures < 10) $display("cyc %0d line %0d: symbol %b expected %b (%s%h)", cyc, l, sh[l], r_code, s[8] ? "K" : "D", s[7:0]);
          end
          rd_m[l] = r_rdo;
        end
      end
      @(posedge clk); #0.5;
      if (popped) void'(src.pop_front());
      drive();
    end
    checks++;
    if (words < 50 || idles < 10) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
