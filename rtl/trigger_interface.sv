// trigger_interface: turns trigger pulses into trigger-FIFO entries.
//
// The trigger comes either from the TTC decoder or from the dedicated trigger pin (the
// pin is edge-detected); setup bit trig_from_pin selects, as the mux of the paper's block
// diagram does. The block keeps a 17-bit time base on the 160 MHz clock that advances by
// 8 least counts (6.25 ns) per cycle and is aligned with the slices' coarse counters:
// the bunch count reset loads it with 4, the time the slices have reached when the
// reset is seen here. For every trigger it pushes one entry
//     {event id, window start = time - match_offset*4}
// and then increments the 12-bit event id, which the event count reset clears.
// The paper names the block and the trigger mux; time base, window arithmetic and event
// numbering are this design's choices.
// Timing: push is a one-cycle pulse the cycle after the trigger is seen.
module trigger_interface
  import tdc_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              bcr,
  input  logic              ecr,
  input  logic              ttc_trigger,
  input  logic              trig_pin,
  input  logic              trig_from_pin,
  input  logic [WIN_W-1:0]  match_offset,
  output logic              push,
  output logic [EVID_W-1:0] push_evid,
  output tdc_time_t         push_win_start
);
  localparam tdc_time_t BCR_LOAD = TIME_W'(4);

  tdc_time_t         now;
  logic [EVID_W-1:0] evid;
  logic              pin_q, pin_qq;
  logic              trig;

  assign trig = trig_from_pin ? (pin_q && !pin_qq) : ttc_trigger;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      now            <= '0;
      evid           <= '0;
      pin_q          <= 1'b0;
      pin_qq         <= 1'b0;
      push           <= 1'b0;
      push_evid      <= '0;
      push_win_start <= '0;
    end else begin
      pin_q  <= trig_pin;
      pin_qq <= pin_q;
      now    <= bcr ? BCR_LOAD : now + TIME_W'(8);
      push   <= trig;
      if (trig) begin
        push_evid      <= ecr ? '0 : evid;
        push_win_start <= now - {{(TIME_W-WIN_W-2){1'b0}}, match_offset, 2'b00};
      end
      if (ecr)       evid <= trig ? EVID_W'(1) : '0;
      else if (trig) evid <= evid + 1'b1;
    end
endmodule
