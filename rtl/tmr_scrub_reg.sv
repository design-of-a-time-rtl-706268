// tmr_scrub_reg: triple-modular-redundant register with data scrubbing, for
// configuration logic.
//
// Each of three registers has a mux in front of it: while `load` is high it takes the
// user value `d`; otherwise it takes back the voted value. An upset of one register is
// thus corrected on the next clock edge and cannot pile up with later upsets, which a
// register that is written only once would allow. This follows the paper's TMR figure
// (b). `q` is the voted value. The three clock trees are one net here.
// Timing: q shows d one clock after load.
module tmr_scrub_reg #(
  parameter int unsigned      WIDTH     = 1,
  parameter logic [WIDTH-1:0] RESET_VAL = '0
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             load,
  input  logic [WIDTH-1:0] d,
  output logic [WIDTH-1:0] q
);
  logic [WIDTH-1:0] r [3];
  logic [WIDTH-1:0] v [3];

  for (genvar i = 0; i < 3; i++) begin : g_copy
    assign v[i] = (r[0] & r[1]) | (r[1] & r[2]) | (r[0] & r[2]);
    always_ff @(posedge clk or negedge rst_n)
      if (!rst_n)    r[i] <= RESET_VAL;
      else if (load) r[i] <= d;
      else           r[i] <= v[i];
  end

  assign q = v[0];
endmodule
