// channel_mux_tb: 24 model FIFOs (queues) are filled at random; the readout FIFO is
// sometimes full. Every word pushed out must be the head of a non-empty channel, the one
// first at or after the round-robin pointer (model), no word may be lost or repeated,
// and nothing moves while the readout FIFO is full or the block is disabled.
`timescale 1ns/1ps
module channel_mux_tb;
  import tdc_pkg::*;
  localparam int N = 24;
  logic clk = 1'b0, rst_n = 1'b0, enable = 1'b1, rf_full = 1'b0;
  logic [N-1:0] ch_empty, ch_pop;
  tdc_word_t ch_dout [N];
  logic rf_push;
  tdc_word_t rf_din;
  int checks = 0, failures = 0, total_in = 0, total_out = 0, stalls = 0;

  channel_mux #(.NUM_CH(N)) dut (.clk, .rst_n, .enable, .ch_empty, .ch_dout, .ch_pop,
                                 .rf_full, .rf_push, .rf_din);
  always #3.125 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  tdc_word_t q [N][$];
  int ptr_m = 0;
  logic [N-1:0] popped;

  function automatic void drive();
    for (int c = 0; c < N; c++) begin
      ch_empty[c] = q[c].size() == 0;
      ch_dout[c]  = (q[c].size() > 0) ? q[c][0] : 32'hDEAD_BEEF;
    end
  endfunction

  initial begin
    drive();
    #20 rst_n = 1'b1;
    for (int n = 0; n < 6000; n++) begin
      @(negedge clk);
      // add words
      for (int k = 0; k < 3; k++) if ($urandom % 3 == 0) begin
        int c;
        c = $urandom % N;
        if (n < 3500) begin q[c].push_back({$urandom} | 32'(c)); total_in++; end
      end
      drive();
      rf_full = ($urandom % 4 == 0);
      enable  = !(n % 400 > 390);
      #1;
      // check decision
      begin
        int sel;
        sel = -1;
        for (int k = 0; k < N; k++) if (sel < 0 && q[(ptr_m + k) % N].size() > 0) sel = (ptr_m + k) % N;
        checks++;
        if (!enable || rf_full || sel < 0) begin
          if (rf_full && sel >= 0) stalls++;
          if (rf_push || ch_pop != 0) begin failures++; $display("%0t moved while it should not", $time); end
        end else begin
          if (!rf_push || ch_pop != (N'(1) << sel) || rf_din !== q[sel][0]) begin
            failures++;
            if (failures < 10) $display("%0t sel=%0d pop=%h push=%b", $time, sel, ch_pop, rf_push);
          end
        end
      end
      popped = ch_pop;
      @(posedge clk);
      #0.5;
      for (int c = 0; c < N; c++) if (popped[c]) begin
        void'(q[c].pop_front()); total_out++;
        ptr_m = (c + 1) % N;
      end
      drive();
    end
    checks++;
    if (total_out != total_in || stalls == 0) begin failures++; $display("in %0d out %0d", total_in, total_out); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
