// channel_mux: round-robin readout of the channel FIFOs in triggerless mode.
//
// Each cycle, when enabled and the readout FIFO is not full, the first non-empty channel
// FIFO at or after the round-robin pointer is popped and its word is pushed into the
// readout FIFO; the pointer then moves past that channel, so every busy channel gets a
// turn. The paper names the block; the round-robin policy is this design's choice.
// Timing: one word per cycle, combinational from FIFO flags to push/pop.
module channel_mux
  import tdc_pkg::*;
#(
  parameter int unsigned NUM_CH = 24
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           enable,
  input  logic [NUM_CH-1:0] ch_empty,
  input  tdc_word_t      ch_dout [NUM_CH],
  output logic [NUM_CH-1:0] ch_pop,
  input  logic           rf_full,
  output logic           rf_push,
  output tdc_word_t      rf_din
);
  localparam int unsigned CHW = $clog2(NUM_CH);

  logic [CHW-1:0] ptr, ptr_next;
  logic [CHW-1:0] sel;
  logic           found;

  always_comb begin
    logic [CHW:0] c;
    found = 1'b0;
    sel   = '0;
    for (int k = 0; k < NUM_CH; k++) begin
      c = {1'b0, ptr} + (CHW+1)'(k);
      if (c >= (CHW+1)'(NUM_CH)) c = c - (CHW+1)'(NUM_CH);
      if (!found && !ch_empty[c[CHW-1:0]]) begin
        found = 1'b1;
        sel   = c[CHW-1:0];
      end
    end
    rf_push  = enable && found && !rf_full;
    rf_din   = ch_dout[sel];
    ch_pop   = '0;
    if (rf_push) ch_pop[sel] = 1'b1;
    ptr_next = ptr;
    if (rf_push) ptr_next = (sel == CHW'(NUM_CH - 1)) ? '0 : sel + 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) ptr <= '0;
    else        ptr <= ptr_next;
endmodule
