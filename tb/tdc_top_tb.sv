// tdc_top_tb: end-to-end test of the TDC core at its full size (24 channels), driven
// only through its pins: JTAG for configuration, the TTC line for resets and triggers,
// the trigger pin, the 24 channel inputs, and the two serial lines, which are decoded
// here (comma alignment, 8b/10b decoding, word assembly).
//
// Phases: (1) JTAG: ID code, setup write, status read with CRC; (2) TTC bunch count
// reset; (3) triggerless pair mode; (4) triggerless edge mode with a burst that fills
// the readout FIFO; (5) a disabled channel; (6) triggered mode with TTC triggers, more
// hits than the ring buffer holds, and windows that fill channel FIFOs; (7) triggers from
// the trigger pin, event count reset; (8) TTC master reset and recovery.
// Expected words are computed from the pulse times: an edge at t reads
// ceil((t - E)/0.78125 ns) with E the 320 MHz edge where the bunch count reset is seen.
// Each mechanism is counted and one that never happened counts as a failure.
`timescale 1ns/1fs
module tdc_top_tb;
  import tdc_pkg::*;
  localparam real T = 3.125, LSB = 0.78125;

  logic clk0 = 0, clk90 = 0, clk160 = 0, rst_n = 0, pll_locked = 1;
  logic [NCH-1:0] din = '0;
  logic ttc = 0, trig_pin = 0, tck = 0, trst_n = 0, tms = 1, tdi = 0, tdo;
  logic [1:0][1:0] sdata;

  tdc_top dut (.clk0, .clk90, .clk160, .rst_n, .pll_locked, .din, .ttc, .trig_pin,
               .tck, .trst_n, .tms, .tdi, .tdo, .sdata);

  initial forever #(T/2) clk0 = ~clk0;
  initial begin #(LSB); forever #(T/2) clk90 = ~clk90; end
  initial begin #(T/2); forever #(T) clk160 = ~clk160; end

  int checks = 0, failures = 0;
  // mechanism counters
  int m_pair = 0, m_edge = 0, m_rf_full = 0, m_events = 0, m_pin_trig = 0, m_ttc_trig = 0;
  int m_cf_stall = 0, m_overwrite = 0, m_ecr = 0, m_mrst = 0, m_disabled = 0, m_crc = 0;

  initial begin
    #2000000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic fail(string msg);
    failures++;
    if (failures < 15) $display("%0t FAIL %s", $realtime, msg);
  endtask

  // ---------------- 8b/10b decoding table, built with an encoder instance ----------------
  logic [7:0] e_data = 0;
  logic       e_k = 0, e_rd = 0, e_rdo;
  logic [9:0] e_code;
  encoder_8b10b tb_enc (.data(e_data), .k(e_k), .rd_in(e_rd), .code(e_code), .rd_out(e_rdo));
  int dec [int];
  initial begin
    for (int r = 0; r < 2; r++)
      for (int d = 0; d < 256; d++) begin
        e_data = 8'(d); e_rd = r[0]; #0.001;
        dec[int'(e_code)] = d;
      end
  end

  // ---------------- serial receiver ----------------
  tdc_word_t rx_q[$];
  logic [9:0] win [2];
  int  bitpos = -1;          // phase of symbol boundary, -1 = not locked
  int  nbits = 0;
  logic [15:0] hi_bytes;
  bit  have_hi = 0;
  always @(negedge clk160) begin
    for (int b = 1; b >= 0; b--) begin
      for (int l = 0; l < 2; l++) win[l] = {win[l][8:0], sdata[l][b]};
      nbits++;
      if (win[0] == 10'b0011111010 || win[0] == 10'b1100000101) begin
        if (bitpos != nbits % 10) bitpos = nbits % 10;
        have_hi = 0;
      end else if (bitpos >= 0 && nbits % 10 == bitpos) begin
        if (!dec.exists(int'(win[0])) || !dec.exists(int'(win[1]))) begin
          fail($sformatf("undecodable symbol %b %b", win[0], win[1]));
        end else if (!have_hi) begin
          hi_bytes = {8'(dec[int'(win[0])]), 8'(dec[int'(win[1])])};
          have_hi = 1;
        end else begin
          rx_q.push_back({hi_bytes[15:8], 8'(dec[int'(win[0])]), hi_bytes[7:0], 8'(dec[int'(win[1])])});
          have_hi = 0;
        end
      end
    end
    if (dut.rf_full) m_rf_full++;
    if (!dut.dp_rst_n) begin bitpos = -1; have_hi = 0; end   // data-path reset: relock
  end

  // ---------------- JTAG host ----------------
  task automatic tick(logic m, logic d, output logic o);
    tms = m; tdi = d;
    #45 o = tdo;
    #5 tck = 1'b1;
    #50 tck = 1'b0;
  endtask
  task automatic scan(bit is_ir, int n, logic [63:0] dn, output logic [63:0] dout);
    logic o;
    dout = '0;
    tick(1, 0, o);
    if (is_ir) tick(1, 0, o);
    tick(0, 0, o);
    tick(0, 0, o);
    for (int i = 0; i < n; i++) begin
      tick(i == n - 1, dn[i], o);
      dout[i] = o;
    end
    tick(1, 0, o);
    tick(0, 0, o);
  endtask
  setup_t cfg;
  task automatic write_setup(setup_t s);
    logic [63:0] r;
    scan(1, 4, 64'(IR_SETUP), r);
    scan(0, SETUP_W, 64'(s), r);
    cfg = s;
    #100;
  endtask

  // ---------------- TTC host ----------------
  task automatic ttc_cmd(logic [2:0] c);
    @(negedge clk160) ttc = 1;
    for (int b = 2; b >= 0; b--) @(negedge clk160) ttc = c[b];
    @(negedge clk160) ttc = 0;
  endtask

  // ---------------- time reference ----------------
  realtime E;
  bit bcr_seen = 0;
  // dut.bcr rises at a clk160 edge P; the slices see it at the next clk0 edge, P + T,
  // which is the falling edge of clk160 where it is first seen here
  always @(negedge clk160) if (dut.bcr && !bcr_seen) begin E = $realtime; bcr_seen = 1; end
  always @(negedge clk160) if (!dut.bcr) bcr_seen = 0;

  // ---------------- hits ----------------
  typedef struct { tdc_time_t lead, trail; } hit_t;
  hit_t hist [NCH][$];          // pulses since the last check (triggered mode)
  tdc_word_t expq [NCH][$];     // triggerless expected words

  function automatic logic [7:0] wsat(tdc_time_t l, tdc_time_t t);
    tdc_time_t d;
    d = t - l;
    return (d > 255) ? 8'hFF : d[7:0];
  endfunction

  // n pulses on channel c, gap in least counts
  task automatic pulses(int c, int n, int gap_max, int width_max);
    for (int i = 0; i < n; i++) begin
      longint m;
      hit_t h;
      m = longint'(($realtime - E) / LSB) + 2 + $urandom % gap_max;
      #(E + (m + 0.5) * LSB - $realtime);
      din[c] = 1;
      h.lead = tdc_time_t'(m + 1);
      if (cfg.chan_enable[c] && !cfg.triggered && !cfg.pair_mode) expq[c].push_back({WT_LEAD, 5'(c), h.lead, 8'd0});
      m += 3 + $urandom % width_max;
      #(E + (m + 0.5) * LSB - $realtime);
      din[c] = 0;
      h.trail = tdc_time_t'(m + 1);
      if (cfg.chan_enable[c] && !cfg.triggered) begin
        if (cfg.pair_mode) expq[c].push_back({WT_PAIR, 5'(c), h.lead, wsat(h.lead, h.trail)});
        else               expq[c].push_back({WT_TRAIL, 5'(c), h.trail, 8'd0});
      end
      if (cfg.chan_enable[c] && cfg.triggered) begin
        hist[c].push_back(h);
        if (hist[c].size() > 16) begin void'(hist[c].pop_front()); m_overwrite++; end
      end
      #(6 * T);
    end
  endtask

  int active = 0;
  task automatic all_channels(int n, int gap_max, int width_max);
    for (int c = 0; c < NCH; c++) begin
      automatic int cc = c;
      active++;
      fork begin pulses(cc, n, gap_max, width_max); active--; end join_none
    end
    wait (active == 0);
  endtask

  // triggerless: compare received words with the per-channel queues
  task automatic drain_triggerless();
    #(3000 * T);
    while (rx_q.size() > 0) begin
      tdc_word_t w;
      int c;
      w = rx_q.pop_front();
      c = w[29:25];
      checks++;
      if (w[31:30] == WT_EVENT || c >= NCH || expq[c].size() == 0) fail($sformatf("unexpected word %h", w));
      else begin
        if (w !== expq[c][0]) fail($sformatf("ch %0d word %h expected %h", c, w, expq[c][0]));
        else if (w[31:30] == WT_PAIR) m_pair++;
        else m_edge++;
        void'(expq[c].pop_front());
      end
    end
    for (int c = 0; c < NCH; c++) begin
      checks++;
      if (expq[c].size() != 0) fail($sformatf("ch %0d: %0d words missing", c, expq[c].size()));
      expq[c] = {};
    end
  endtask

  // triggered: one event must come out for the window starting at ws_est (+- 8 LSB)
  task automatic check_event(int exp_ev, tdc_time_t ws_est);
    tdc_word_t w;
    tdc_time_t ws;
    int nh, k;
    #(6000 * T);
    checks++;
    if (rx_q.size() < 2) begin fail("no event"); return; end
    w = rx_q.pop_front();
    if (w[31:29] != 3'b110) begin fail($sformatf("header expected, got %h", w)); rx_q = {}; return; end
    ws = w[16:0];
    checks++;
    if (int'(w[28:17]) != exp_ev) fail($sformatf("event id %0d expected %0d", w[28:17], exp_ev));
    checks++;
    if (tdc_time_t'(ws - ws_est + 8) > 16) fail($sformatf("window start %0d expected about %0d", ws, ws_est));
    nh = 0;
    for (int c = 0; c < NCH; c++)
      foreach (hist[c][i]) begin
        tdc_time_t d;
        d = hist[c][i].lead - ws;
        if (d < 17'(cfg.match_window) * 4) begin
          tdc_word_t e;
          e = {WT_PAIR, 5'(c), hist[c][i].lead, wsat(hist[c][i].lead, hist[c][i].trail)};
          checks++;
          if (rx_q.size() == 0) begin fail("event too short"); return; end
          w = rx_q.pop_front();
          if (w !== e) fail($sformatf("event word %h expected %h", w, e));
          nh++;
        end
      end
    checks++;
    if (rx_q.size() == 0) begin fail("no trailer"); return; end
    w = rx_q.pop_front();
    if (w !== trailer_word(12'(exp_ev), 12'(nh))) fail($sformatf("trailer %h expected %h", w, trailer_word(12'(exp_ev), 12'(nh))));
    else m_events++;
    checks++;
    if (rx_q.size() != 0) begin fail($sformatf("%0d extra words", rx_q.size())); rx_q = {}; end
  endtask

  // channel FIFO full while its scan runs
  always @(negedge clk160)
    if ((dut.ch_busy[23] && dut.g_ch[23].u_ch.f_full) || (dut.ch_busy[12] && dut.g_ch[12].u_ch.f_full))
      m_cf_stall++;

  function automatic tdc_time_t now_code();
    return tdc_time_t'(longint'(($realtime - E) / LSB));
  endfunction

  // ---------------- the test ----------------
  initial begin
    logic [63:0] r;
    setup_t s;
    int ev;
    cfg = SETUP_DEFAULT;
    E = 0;
    #50 rst_n = 1; trst_n = 1;
    begin logic o; repeat (5) tick(1, 0, o); tick(0, 0, o); end
    // (1) JTAG
    scan(0, 32, '0, r);
    checks++;
    if (r[31:0] !== JTAG_IDCODE) fail($sformatf("idcode %h", r[31:0]));
    s = SETUP_DEFAULT;
    s.match_window = 12'd120;
    s.match_offset = 12'd300;
    write_setup(s);
    scan(1, 4, 64'(IR_STATUS), r);
    scan(0, STATUS_W, '0, r);
    checks++;
    if (r[15:8] !== crc8_setup(s) || r[3] !== 1'b1) fail($sformatf("status %h", r[15:0]));
    else m_crc++;
    // (2) bunch count reset
    ttc_cmd(3'd2);
    #(20 * T);
    // (3) triggerless, pair mode
    all_channels(3, 40, 60);
    drain_triggerless();
    // (4) edge mode, bursts that fill the readout FIFO
    s.pair_mode = 0;
    write_setup(s);
    all_channels(2, 8, 20);
    drain_triggerless();
    // (5) channel 5 disabled
    s.chan_enable[5] = 0;
    write_setup(s);
    all_channels(1, 40, 20);
    drain_triggerless();
    m_disabled = (expq[5].size() == 0) ? 1 : 0;
    // (6) triggered mode, TTC triggers
    s.chan_enable = '1; s.pair_mode = 1; s.triggered = 1;
    write_setup(s);
    ttc_cmd(3'd3);                       // event count reset
    m_ecr++;
    ev = 0;
    for (int k = 0; k < 4; k++) begin
      tdc_time_t ws_est;
      for (int c = 0; c < NCH; c++) hist[c] = {};
      all_channels(k == 0 ? 20 : 6, 30, 40);   // first round overwrites the ring buffers
      // window of 120 periods starting 300 periods (0.94 us) before the trigger
      ws_est = now_code() - 17'd300 * 4 + 17'd8;
      ttc_cmd(3'd1);
      ws_est = now_code() - 17'd300 * 4;
      m_ttc_trig++;
      check_event(ev, ws_est);
      ev++;
    end
    // (7) trigger pin, event count reset
    s.trig_from_pin = 1;
    s.match_offset = 12'd100;
    write_setup(s);
    ttc_cmd(3'd3);
    m_ecr++;
    ev = 0;
    for (int k = 0; k < 3; k++) begin
      tdc_time_t ws_est;
      for (int c = 0; c < NCH; c++) hist[c] = {};
      all_channels(3, 20, 30);
      @(negedge clk160) trig_pin = 1;
      ws_est = now_code() - 17'd100 * 4 + 17'd12;
      repeat (4) @(negedge clk160);
      trig_pin = 0;
      m_pin_trig++;
      check_event(ev, ws_est);
      ev++;
    end
    // (8) master reset, then bunch count reset and triggerless readout again
    ttc_cmd(3'd4);
    m_mrst++;
    #(50 * T);
    s.triggered = 0;
    write_setup(s);
    ttc_cmd(3'd2);
    #(20 * T);
    all_channels(2, 40, 60);
    drain_triggerless();

    // mechanisms
    begin
      int mech [string];
      mech["pair words"] = m_pair; mech["edge words"] = m_edge;
      mech["readout FIFO full"] = m_rf_full; mech["events"] = m_events;
      mech["TTC triggers"] = m_ttc_trig; mech["pin triggers"] = m_pin_trig;
      mech["channel FIFO stall"] = m_cf_stall; mech["ring buffer overwrite"] = m_overwrite;
      mech["event count reset"] = m_ecr; mech["master reset"] = m_mrst;
      mech["disabled channel"] = m_disabled; mech["CRC readback"] = m_crc;
      foreach (mech[k]) begin
        $display("  %-22s %0d", k, mech[k]);
        checks++;
        if (mech[k] == 0) fail({"never happened: ", k});
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
