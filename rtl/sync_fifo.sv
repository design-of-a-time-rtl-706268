// sync_fifo: first-word-fall-through FIFO with TMR-protected control.
//
// The storage array is a plain memory: an upset there spoils one word, which the readout
// can tolerate. The read pointer, write pointer and occupancy count are held in tmr_reg
// cells, each copy with its own next-state logic, so an upset in the control cannot
// lose the FIFO's place. This split (control triplicated, memory not) follows the paper.
// dout shows the oldest word while empty=0; pop removes it. A push while full is dropped
// and sets the sticky overflow flag (cleared by reset). Push and pop may share a cycle.
// Depth must be a power of two. Used with depth 4 (channel FIFO) and 16 (trigger and
// readout FIFOs).
module sync_fifo #(
  parameter int unsigned WIDTH = 32,
  parameter int unsigned DEPTH = 4
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             push,
  input  logic [WIDTH-1:0] din,
  input  logic             pop,
  output logic [WIDTH-1:0] dout,
  output logic             full,
  output logic             empty,
  output logic             overflow,
  output logic [$clog2(DEPTH):0] count
);
  localparam int unsigned AW = $clog2(DEPTH);
  localparam int unsigned CW = AW + 1;
  // control state: {overflow, count, wptr, rptr}
  localparam int unsigned SW = 1 + CW + AW + AW;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [SW-1:0]    st_d [3];
  logic [SW-1:0]    st_q [3];

  tmr_reg #(.WIDTH(SW)) u_ctrl (.clk, .rst_n, .d(st_d), .q(st_q));

  for (genvar i = 0; i < 3; i++) begin : g_logic
    always_comb begin
      logic          ovf;
      logic [CW-1:0] cnt;
      logic [AW-1:0] wp, rp;
      logic          do_push, do_pop;
      {ovf, cnt, wp, rp} = st_q[i];
      do_push = push && (cnt != CW'(DEPTH));
      do_pop  = pop && (cnt != '0);
      if (push && !do_push) ovf = 1'b1;
      if (do_push) wp = wp + 1'b1;
      if (do_pop)  rp = rp + 1'b1;
      cnt = cnt + CW'(do_push) - CW'(do_pop);
      st_d[i] = {ovf, cnt, wp, rp};
    end
  end

  logic [AW-1:0] wptr, rptr;
  assign {overflow, count, wptr, rptr} = st_q[0];
  assign full  = count == CW'(DEPTH);
  assign empty = count == '0;
  assign dout  = mem[rptr];

  always_ff @(posedge clk)
    if (push && !full) mem[wptr] <= din;
endmodule
