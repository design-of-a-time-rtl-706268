// serial_interface: 8b/10b-encoded output on two serial lines, TMR protected.
//
// Each 32-bit word from the readout FIFO is sent as four bytes, two per line: line 0
// carries bytes 3 then 2, line 1 bytes 1 then 0. Each byte becomes one 10-bit symbol;
// with no word to send both lines carry the K28.5 comma. A line runs at 320 Mbps, i.e.
// two bits per 160 MHz cycle: sdata[l][1] is the earlier bit and sdata[l][0] the later
// one, for a double-data-rate output pad. A symbol lasts five cycles, so a word takes
// ten cycles (16 Mwords/s). Each line keeps its own running disparity.
// The two lines, 320 Mbps, 8b/10b and TMR protection are the paper's; the byte split,
// idle symbol and bit order are this design's choices. All state (shift registers,
// disparity, symbol phase, second-half bytes) is held in tmr_reg with three copies of
// the next-state logic, each with its own encoders.
// Interface: show-ahead FIFO read (fifo_empty/fifo_dout/fifo_pop); fifo_pop is high for
// one cycle when a word is taken. The first symbol starts the cycle after reset.
module serial_interface
  import tdc_pkg::*;
(
  input  logic            clk,        // 160 MHz
  input  logic            rst_n,
  input  logic            fifo_empty,
  input  tdc_word_t       fifo_dout,
  output logic            fifo_pop,
  output logic [1:0][1:0] sdata       // [line][bit pair]
);
  typedef struct packed {
    logic [1:0][9:0] shift;   // symbol being sent on each line
    logic [1:0]      rd;      // running disparity per line
    logic [2:0]      phase;   // bit pair within the symbol, 0..4
    logic            pending; // second half of a word waits in `low`
    logic [15:0]     low;     // {byte 2, byte 0}
  } ser_state_t;
  localparam int unsigned SW = $bits(ser_state_t);
  localparam ser_state_t RESET_STATE = '{shift: '0, rd: '0, phase: 3'd4, pending: 1'b0, low: '0};

  ser_state_t st_d [3];
  ser_state_t st_q [3];
  logic       pop_c [3];

  tmr_reg #(.WIDTH(SW), .RESET_VAL(RESET_STATE)) u_tmr (.clk, .rst_n, .d(st_d), .q(st_q));

  for (genvar i = 0; i < 3; i++) begin : g_logic
    logic [1:0][7:0] byte_in;
    logic            k_in;
    logic [1:0][9:0] code;
    logic [1:0]      rd_n;

    for (genvar l = 0; l < 2; l++) begin : g_enc
      encoder_8b10b u_enc (.data(byte_in[l]), .k(k_in), .rd_in(st_q[i].rd[l]),
                           .code(code[l]), .rd_out(rd_n[l]));
    end

    // symbol selection: depends on the state only
    always_comb begin
      pop_c[i] = 1'b0;
      byte_in  = '0;
      k_in     = 1'b1;
      if (st_q[i].phase == 3'd4) begin
        if (st_q[i].pending) begin
          byte_in = {st_q[i].low[7:0], st_q[i].low[15:8]};   // [1]=line 1, [0]=line 0
          k_in    = 1'b0;
        end else if (!fifo_empty) begin
          byte_in  = {fifo_dout[15:8], fifo_dout[31:24]};
          k_in     = 1'b0;
          pop_c[i] = 1'b1;
        end
      end
    end

    // next state
    always_comb begin
      ser_state_t s;
      s = st_q[i];
      if (s.phase == 3'd4) begin
        if (s.pending) s.pending = 1'b0;
        else if (pop_c[i]) begin
          s.low     = {fifo_dout[23:16], fifo_dout[7:0]};
          s.pending = 1'b1;
        end
        s.shift = code;
        s.rd    = rd_n;
        s.phase = 3'd0;
      end else begin
        s.shift[0] = {s.shift[0][7:0], 2'b00};
        s.shift[1] = {s.shift[1][7:0], 2'b00};
        s.phase    = s.phase + 3'd1;
      end
      st_d[i] = s;
    end
  end

  assign fifo_pop = pop_c[0];
  assign sdata[0] = st_q[0].shift[0][9:8];
  assign sdata[1] = st_q[0].shift[1][9:8];
endmodule
