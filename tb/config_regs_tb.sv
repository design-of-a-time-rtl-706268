// config_regs_tb: the configuration registers behind a jtag_tap, driven like a JTAG
// host. Checks: reset values; a setup value written by a DR scan appears on `setup`
// after the clock crossing and reads back unchanged; the status register reports the
// CRC-8 of the setup value (computed here by polynomial long division, x^8+x^2+x+1) and
// the status inputs; writing the control register gives one-cycle BCR/ECR pulses and a
// soft-reset level. Upsets are then injected into one copy of the setup register at a
// time, many bits at once and in a different copy each time: the output must never
// change, and the hit copy must be repaired by the next clock (scrubbing), so upsets
// in successive copies never add up to a wrong vote.
`timescale 1ns/1ps
module config_regs_tb;
  import tdc_pkg::*;
  logic tck = 1'b0, trst_n = 1'b0, tms = 1'b1, tdi = 1'b0, tdo;
  logic clk = 1'b0, rst_n = 1'b0;
  jtag_ir_e ir;
  logic capture_dr, shift_dr, update_dr, dr_tdo;
  status_t status_in;
  setup_t setup;
  logic soft_reset, jtag_bcr, jtag_ecr;
  int checks = 0, failures = 0, n_bcr = 0, n_ecr = 0;

  jtag_tap u_tap (.tck, .trst_n, .tms, .tdi, .tdo, .ir, .capture_dr, .shift_dr, .update_dr, .dr_tdo);
  config_regs dut (.tck, .trst_n, .ir, .capture_dr, .shift_dr, .update_dr, .tdi, .dr_tdo,
                   .clk, .rst_n, .status_in, .setup, .soft_reset, .jtag_bcr, .jtag_ecr);

  always #3.125 clk = ~clk;
  always @(negedge clk) begin n_bcr += jtag_bcr; n_ecr += jtag_ecr; end

  initial begin
    #20000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic tick(logic m, logic d, output logic o);
    tms = m; tdi = d;
    #45 o = tdo;
    #5 tck = 1'b1;
    #50 tck = 1'b0;
  endtask
  task automatic goto_rti();
    logic o;
    repeat (5) tick(1, 0, o);
    tick(0, 0, o);
  endtask
  task automatic scan(bit is_ir, int n, logic [63:0] din, output logic [63:0] dout);
    logic o;
    dout = '0;
    tick(1, 0, o);
    if (is_ir) tick(1, 0, o);
    tick(0, 0, o);
    tick(0, 0, o);
    for (int i = 0; i < n; i++) begin
      tick(i == n - 1, din[i], o);
      dout[i] = o;
    end
    tick(1, 0, o);
    tick(0, 0, o);
  endtask
  task automatic chk(string what, logic [63:0] got, logic [63:0] exp);
    checks++;
    if (got !== exp) begin failures++; $display("%s: %h expected %h", what, got, exp); end
  endtask

  function automatic logic [7:0] crc_div(logic [SETUP_W-1:0] m);
    logic [SETUP_W+7:0] r;
    r = {m, 8'h00};
    for (int i = SETUP_W + 7; i >= 8; i--)
      if (r[i]) r[i -: 9] = r[i -: 9] ^ 9'h107;
    return r[7:0];
  endfunction

  initial begin
    logic [63:0] r;
    setup_t s;
    status_in = '0;
    status_in.pll_locked = 1'b1;
    status_in.trig_fifo_ovf = 1'b1;
    #50 trst_n = 1'b1; rst_n = 1'b1;
    goto_rti();
    chk("setup reset", setup, SETUP_DEFAULT);
    for (int n = 0; n < 6; n++) begin
      setup_t prev;
      prev = (n == 0) ? SETUP_DEFAULT : s;
      s = setup_t'({$urandom, $urandom});
      scan(1, 4, 64'(IR_SETUP), r);
      scan(0, SETUP_W, 64'(s), r);
      chk("previous setup read back", r[SETUP_W-1:0], prev);
      repeat (10) @(posedge clk);
      chk("setup applied", setup, s);
      scan(1, 4, 64'(IR_STATUS), r);
      scan(0, STATUS_W, '0, r);
      chk("status crc", r[15:8], crc_div(s));
      chk("status flags", r[3:0], 4'b1010);
    end
    for (int n = 0; n < 60; n++) begin
      int k;
      logic [SETUP_W-1:0] mask;
      k = n % 3;
      mask = {$urandom, $urandom} | 1;
      @(negedge clk);
      dut.u_setup.r[k] = dut.u_setup.r[k] ^ mask;
      #1 chk("setup during upset", setup, s);
      @(negedge clk);
      chk("copy scrubbed", dut.u_setup.r[k], s);
      chk("setup after upset", setup, s);
    end
    scan(1, 4, 64'(IR_STATUS), r);
    scan(0, STATUS_W, '0, r);
    chk("status crc after upsets", r[15:8], crc_div(s));
    scan(1, 4, 64'(IR_CONTROL), r);
    scan(0, CTRL_W, 64'b110, r);       // ecr, bcr
    repeat (10) @(posedge clk);
    chk("bcr pulses", n_bcr, 1);
    chk("ecr pulses", n_ecr, 1);
    chk("no soft reset", soft_reset, 0);
    scan(0, CTRL_W, 64'b001, r);
    repeat (10) @(posedge clk);
    chk("control read back", r[2:0], 3'b110);
    chk("soft reset", soft_reset, 1);
    chk("bcr pulses", n_bcr, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
