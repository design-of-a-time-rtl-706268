// event_builder: assembles events in triggered mode.
//
// When enabled, the trigger FIFO holds an entry, and no channel is still scanning, the
// builder pops the entry and pulses match_start (with the window start) to all channels.
// It then writes to the readout FIFO: a header word (event id, window start), the
// matched words of channel 0, 1, ... NUM_CH-1 in turn, and a trailer word (event id,
// number of hit words). A channel is finished when its scan is done (busy=0) and its
// FIFO is empty. Every write waits while the readout FIFO is full, which in turn stalls
// the channel scans behind their full channel FIFOs. The paper names the block; the
// event format and the channel order are this design's.
// Timing: at most one word per cycle; an empty channel costs one cycle.
module event_builder
  import tdc_pkg::*;
#(
  parameter int unsigned NUM_CH = 24
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              enable,
  // trigger FIFO
  input  logic              tf_empty,
  input  logic [EVID_W-1:0] tf_evid,
  input  tdc_time_t         tf_win_start,
  output logic              tf_pop,
  // channels
  output logic              match_start,
  output tdc_time_t         win_start,
  input  logic [NUM_CH-1:0]    ch_busy,
  input  logic [NUM_CH-1:0]    ch_empty,
  input  tdc_word_t         ch_dout [NUM_CH],
  output logic [NUM_CH-1:0]    ch_pop,
  // readout FIFO
  input  logic              rf_full,
  output logic              rf_push,
  output tdc_word_t         rf_din
);
  typedef enum logic [1:0] {S_IDLE, S_HEADER, S_DRAIN, S_TRAILER} state_e;
  localparam int unsigned CHW = $clog2(NUM_CH);

  state_e            state;
  logic [CHW-1:0]    ch;
  logic [EVID_W-1:0] evid;
  logic [11:0]       nhit;

  wire start = (state == S_IDLE) && enable && !tf_empty && !(|ch_busy);
  assign tf_pop = start;

  always_comb begin
    rf_push = 1'b0;
    rf_din  = '0;
    ch_pop  = '0;
    case (state)
      S_HEADER: begin
        rf_push = !rf_full;
        rf_din  = header_word(evid, win_start);
      end
      S_DRAIN: if (!ch_empty[ch] && !rf_full) begin
        rf_push    = 1'b1;
        rf_din     = ch_dout[ch];
        ch_pop[ch] = 1'b1;
      end
      S_TRAILER: begin
        rf_push = !rf_full;
        rf_din  = trailer_word(evid, nhit);
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      state       <= S_IDLE;
      ch          <= '0;
      evid        <= '0;
      nhit        <= '0;
      match_start <= 1'b0;
      win_start   <= '0;
    end else begin
      match_start <= start;
      case (state)
        S_IDLE: if (start) begin
          evid      <= tf_evid;
          win_start <= tf_win_start;
          state     <= S_HEADER;
        end
        S_HEADER: if (!rf_full) begin
          ch    <= '0;
          nhit  <= '0;
          state <= S_DRAIN;
        end
        S_DRAIN: begin
          if (rf_push) nhit <= nhit + 1'b1;
          else if (ch_empty[ch] && !ch_busy[ch]) begin
            if (ch == CHW'(NUM_CH - 1)) state <= S_TRAILER;
            else                     ch    <= ch + 1'b1;
          end
        end
        S_TRAILER: if (!rf_full) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
endmodule
