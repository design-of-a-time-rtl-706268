// tmr_reg: triple-modular-redundant register for flow-control logic.
//
// Three registers each take the next value computed by their own copy of the
// combinational logic (d[0..2]); three majority voters produce q[0..2], and q[i] is
// what copy i of the logic reads back. An upset in one register, one voter or one logic
// copy is therefore outvoted and washed out on the next clock. This is the cell of the
// paper's TMR figure (a). The three clock trees of that figure are one clock net here;
// triplicating the tree is left to physical design. Reset value is a parameter.
// Timing: q follows d one clock later.
module tmr_reg #(
  parameter int unsigned      WIDTH     = 1,
  parameter logic [WIDTH-1:0] RESET_VAL = '0
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [WIDTH-1:0] d [3],
  output logic [WIDTH-1:0] q [3]
);
  logic [WIDTH-1:0] r [3];

  for (genvar i = 0; i < 3; i++) begin : g_copy
    always_ff @(posedge clk or negedge rst_n)
      if (!rst_n) r[i] <= RESET_VAL;
      else        r[i] <= d[i];
    // voter i
    assign q[i] = (r[0] & r[1]) | (r[1] & r[2]) | (r[0] & r[2]);
  end
endmodule
