// jtag_tap_tb: drives TCK/TMS/TDI like a JTAG host. Checks: after reset the ID code
// instruction is selected and the 32-bit ID code shifts out LSB first; the IR capture
// pattern ...0001 comes out during an IR scan; BYPASS delays TDI by one bit; a scan of
// a configuration instruction routes dr_tdo to TDO and pulses capture/update once; TMS
// held high for five clocks returns to Test-Logic-Reset from any state. Then a random
// walk of 4000 TCK cycles (random TMS/TDI, occasional TRST) is compared, cycle by cycle,
// with a reference model of the 16-state controller written here: capture/shift/update
// strobes, the instruction register, and every TDO bit (IR capture, ID code, BYPASS,
// configuration register, 0 outside shift states).
`timescale 1ns/1ps
module jtag_tap_tb;
  import tdc_pkg::*;
  logic tck = 1'b0, trst_n = 1'b0, tms = 1'b1, tdi = 1'b0, tdo;
  jtag_ir_e ir;
  logic capture_dr, shift_dr, update_dr, dr_tdo;
  int checks = 0, failures = 0, n_cap = 0, n_upd = 0;

  jtag_tap dut (.tck, .trst_n, .tms, .tdi, .tdo, .ir, .capture_dr, .shift_dr, .update_dr, .dr_tdo);

  // a model data register behind dr_tdo: 8-bit shifter
  logic [7:0] dr_model = 8'hA5;
  assign dr_tdo = dr_model[0];
  always @(posedge tck) begin
    if (capture_dr) begin dr_model <= 8'hA5; n_cap++; end
    else if (shift_dr && (ir == IR_SETUP)) dr_model <= {tdi, dr_model[7:1]};
    if (update_dr) n_upd++;
  end

  initial begin
    #100000000;
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
    tick(1, 0, o);                      // Select-DR
    if (is_ir) tick(1, 0, o);           // Select-IR
    tick(0, 0, o);                      // Capture
    tick(0, 0, o);                      // Shift
    for (int i = 0; i < n; i++) begin
      tick(i == n - 1, din[i], o);      // last bit moves to Exit1
      dout[i] = o;
    end
    tick(1, 0, o);                      // Update
    tick(0, 0, o);                      // Run-Test/Idle
  endtask

  task automatic chk(string what, logic [63:0] got, logic [63:0] exp);
    checks++;
    if (got !== exp) begin failures++; $display("%s: %h expected %h", what, got, exp); end
  endtask


  // ---------------- reference model for the random walk ----------------
  typedef enum int {M_TLR, M_RTI, M_SDR, M_CDR, M_SHDR, M_E1DR, M_PDR, M_E2DR, M_UDR,
                    M_SIR, M_CIR, M_SHIR, M_E1IR, M_PIR, M_E2IR, M_UIR} mstate_e;
  mstate_e ms;
  logic [3:0]  m_ir, m_irsr;
  logic [31:0] m_id;
  logic        m_byp;

  function automatic mstate_e mnext(mstate_e s, logic t);
    case (s)
      M_TLR:  return t ? M_TLR  : M_RTI;
      M_RTI:  return t ? M_SDR  : M_RTI;
      M_SDR:  return t ? M_SIR  : M_CDR;
      M_CDR:  return t ? M_E1DR : M_SHDR;
      M_SHDR: return t ? M_E1DR : M_SHDR;
      M_E1DR: return t ? M_UDR  : M_PDR;
      M_PDR:  return t ? M_E2DR : M_PDR;
      M_E2DR: return t ? M_UDR  : M_SHDR;
      M_UDR:  return t ? M_SDR  : M_RTI;
      M_SIR:  return t ? M_TLR  : M_CIR;
      M_CIR:  return t ? M_E1IR : M_SHIR;
      M_SHIR: return t ? M_E1IR : M_SHIR;
      M_E1IR: return t ? M_UIR  : M_PIR;
      M_PIR:  return t ? M_E2IR : M_PIR;
      M_E2IR: return t ? M_UIR  : M_SHIR;
      default: return t ? M_SDR : M_RTI;
    endcase
  endfunction

  // one TCK cycle of the walk: predict TDO for the present state, then advance the model
  task automatic mtick(logic m, logic d);
    logic o, exp_o;
    exp_o = 1'b0;
    if (ms == M_SHIR) exp_o = m_irsr[0];
    else if (ms == M_SHDR)
      case (m_ir)
        4'b0001: exp_o = m_id[0];
        4'b0010, 4'b0011, 4'b0100: exp_o = dr_model[0];
        default: exp_o = m_byp;
      endcase
    tick(m, d, o);
    chk("walk tdo", o, exp_o);
    case (ms)
      M_TLR:  m_ir = 4'b0001;
      M_CIR:  m_irsr = 4'b0001;
      M_SHIR: m_irsr = {d, m_irsr[3:1]};
      M_UIR:  m_ir = m_irsr;
      M_CDR:  begin m_id = JTAG_IDCODE; m_byp = 1'b0; end
      M_SHDR: begin m_id = {d, m_id[31:1]}; m_byp = d; end
      default: ;
    endcase
    ms = mnext(ms, m);
    chk("walk ir", ir, m_ir);
    chk("walk strobes", {capture_dr, shift_dr, update_dr},
        {ms == M_CDR, ms == M_SHDR, ms == M_UDR});
  endtask

  initial begin
    logic [63:0] r;
    #200 trst_n = 1'b1;
    goto_rti();
    chk("ir after reset", ir, IR_IDCODE);
    scan(0, 32, '0, r);
    chk("idcode", r[31:0], JTAG_IDCODE);
    scan(1, 4, 64'(IR_BYPASS), r);
    chk("ir capture", r[3:0], 4'b0001);
    chk("ir bypass", ir, IR_BYPASS);
    scan(0, 16, 64'h0000_0000_0000_B3C5, r);
    chk("bypass delay", r[15:0], 16'(16'hB3C5 << 1));   // one-bit delay, first bit 0
    scan(1, 4, 64'(IR_SETUP), r);
    chk("ir setup", ir, IR_SETUP);
    n_cap = 0; n_upd = 0;
    scan(0, 8, 64'h3C, r);
    chk("dr_tdo routed", r[7:0], 8'hA5);
    chk("model reg after shift", dr_model, 8'h3C);
    chk("one capture", n_cap, 1);
    chk("one update", n_upd, 1);
    // reset from the middle of an IR scan
    begin
      logic o;
      tick(1, 0, o); tick(1, 0, o); tick(0, 0, o); tick(0, 0, o);
      repeat (5) tick(1, 0, o);
      tick(0, 0, o);
    end
    chk("ir after TMS reset", ir, IR_IDCODE);
    // random walk against the model; starts in Run-Test/Idle with IDCODE selected
    ms = M_RTI; m_ir = 4'b0001; m_irsr = '0; m_id = '0; m_byp = 1'b0;
    for (int k = 0; k < 4000; k++) begin
      if ($urandom_range(0, 499) == 0) begin
        trst_n = 1'b0; #10 trst_n = 1'b1; #10;
        ms = M_TLR; m_ir = 4'b0001;
      end
      mtick($urandom_range(0, 99) < 35, 1'($urandom));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
