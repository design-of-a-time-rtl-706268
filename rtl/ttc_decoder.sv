// ttc_decoder: decodes the serial TTC (timing, trigger and control) line.
//
// The line is sampled once per 160 MHz cycle and idles low. A command is a start bit '1'
// followed by three command bits, most significant first:
//   3'd1 trigger, 3'd2 bunch count reset, 3'd3 event count reset, 3'd4 master reset;
// other codes are ignored. The matching output pulses for one cycle, the cycle after the
// last command bit. The four outputs are those of the paper's block diagram; the line
// encoding is this design's own, as the paper does not give it. As the paper requires
// for the TTC block, all state (bit counter, shift register, output pulses) is held in
// TMR cells, each copy with its own next-state logic (tmr_reg).
module ttc_decoder (
  input  logic clk,         // 160 MHz
  input  logic rst_n,
  input  logic ttc,
  output logic trigger,
  output logic bcr,
  output logic ecr,
  output logic master_rst
);
  typedef struct packed {
    logic [1:0] cnt;   // 0: idle, 1..3: command bits received so far + 1
    logic [1:0] sr;    // first two command bits
    logic [3:0] out;   // {master_rst, ecr, bcr, trigger}
  } ttc_state_t;

  ttc_state_t st_d [3];
  ttc_state_t st_q [3];

  tmr_reg #(.WIDTH($bits(ttc_state_t))) u_tmr (.clk, .rst_n, .d(st_d), .q(st_q));

  for (genvar i = 0; i < 3; i++) begin : g_logic
    always_comb begin
      ttc_state_t s;
      logic [2:0] cmd;
      s     = st_q[i];
      s.out = '0;
      cmd   = {s.sr, ttc};
      if (s.cnt == 2'd0) begin
        if (ttc) s.cnt = 2'd1;
      end else if (s.cnt == 2'd3) begin
        s.cnt = 2'd0;
        case (cmd)
          3'd1:    s.out = 4'b0001;
          3'd2:    s.out = 4'b0010;
          3'd3:    s.out = 4'b0100;
          3'd4:    s.out = 4'b1000;
          default: s.out = 4'b0000;
        endcase
      end else begin
        s.sr  = {s.sr[0], ttc};
        s.cnt = s.cnt + 2'd1;
      end
      st_d[i] = s;
    end
  end

  assign {master_rst, ecr, bcr, trigger} = st_q[0].out;
endmodule
