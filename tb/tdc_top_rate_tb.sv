// tdc_top_rate_tb: the full 24-channel core under the hit rate expected at the
// high-luminosity upgrade, 400 kHz per tube, in triggerless mode.
//
// Every channel gets pulses with exponentially distributed gaps (mean 2.5 us) and widths
// of 10 to 150 ns. A dead time of 100 ns after each trailing edge stands in for the
// front-end discriminator (this dead time is the testbench's assumption). Each phase
// starts with a bunch count reset and lasts 85 us, inside one 17-bit time range.
//
// - Pair mode, one word per hit (9.6 M words/s offered): every word must arrive,
//   correct and in order per channel, and the status register must show no channel FIFO
//   overflow.
// - Edge mode, two words per hit (19.2 M words/s offered, above the 16 M words/s of the
//   two 8b/10b lines): words may be lost, but those received must be a correct
//   subsequence of the expected ones, the overflow flag must be set, and the link must
//   carry at least 95% of its capacity while saturated.
// - Triggered mode at the first-level trigger rate and latency of the upgrade: a TTC
//   trigger every 1 us, match offset 3200 x 3.125 ns = 10 us, window 250 ns. Every
//   trigger must give one event, with consecutive event ids and a window start 10 us
//   before the trigger. Each event must hold exactly the hits whose leading time falls
//   in its window, in channel order. The only exception is a hit followed by 12 or more
//   newer hits on its channel before the trigger: the 16-word ring buffer may have
//   overwritten it. No trigger FIFO overflow may be reported.
//
// The serial lines are decoded here as in the end-to-end testbench.
`timescale 1ns/1fs
module tdc_top_rate_tb;
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

  initial begin
    #400000000;
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

  // ---------------- Poisson hits ----------------
  localparam real RUN_NS = 85000.0, MEAN_GAP_NS = 2500.0, DEAD_NS = 100.0;
  tdc_word_t expq [NCH][$];
  int offered = 0;
  typedef struct { tdc_time_t lead, trail; } hit_t;
  hit_t hits [NCH][$];          // every pulse of the triggered phase

  function automatic logic [7:0] wsat(tdc_time_t l, tdc_time_t t);
    tdc_time_t d;
    d = t - l;
    return (d > 255) ? 8'hFF : d[7:0];
  endfunction

  function automatic tdc_time_t now_code();
    return tdc_time_t'(longint'(($realtime - E) / LSB));
  endfunction

  function automatic real exp_gap();
    real u;
    u = (real'($urandom % 1000000) + 1.0) / 1000001.0;
    return -MEAN_GAP_NS * $ln(u);
  endfunction

  task automatic channel_load(int c, realtime t_end);
    realtime t_free;
    t_free = $realtime;
    forever begin
      longint m;
      tdc_time_t lead, trail;
      realtime t;
      t = t_free + exp_gap();
      if (t > t_end) break;
      m = longint'((t - E) / LSB);
      #(E + (m + 0.5) * LSB - $realtime);
      din[c] = 1;
      lead = tdc_time_t'(m + 1);
      m += 13 + $urandom % 180;                 // 10 .. 150 ns
      #(E + (m + 0.5) * LSB - $realtime);
      din[c] = 0;
      trail = tdc_time_t'(m + 1);
      if (cfg.triggered) hits[c].push_back('{lead, trail});
      else if (cfg.pair_mode) begin
        expq[c].push_back({WT_PAIR, 5'(c), lead, wsat(lead, trail)});
        offered++;
      end else begin
        expq[c].push_back({WT_LEAD, 5'(c), lead, 8'd0});
        expq[c].push_back({WT_TRAIL, 5'(c), trail, 8'd0});
        offered += 2;
      end
      t_free = $realtime + DEAD_NS;
    end
  endtask

  int active = 0;
  task automatic run_load();
    realtime t_end;
    t_end = $realtime + RUN_NS;
    for (int c = 0; c < NCH; c++) begin
      automatic int cc = c;
      active++;
      fork begin channel_load(cc, t_end); active--; end join_none
    end
    wait (active == 0);
  endtask


  // compare received words; exact = no word may be missing
  task automatic check_words(bit exact, output int lost);
    int got [NCH];
    lost = 0;
    foreach (got[c]) got[c] = 0;
    while (rx_q.size() > 0) begin
      tdc_word_t w;
      int c;
      bit found;
      w = rx_q.pop_front();
      c = w[29:25];
      checks++;
      if (w[31:30] == WT_EVENT || c >= NCH) begin fail($sformatf("unexpected word %h", w)); continue; end
      found = 0;
      while (expq[c].size() > 0 && !found) begin
        if (expq[c][0] === w) found = 1;
        else begin
          if (exact) fail($sformatf("ch %0d word %h expected %h", c, w, expq[c][0]));
          lost++;
        end
        void'(expq[c].pop_front());
      end
      if (!found) fail($sformatf("ch %0d word %h not expected", c, w));
    end
    for (int c = 0; c < NCH; c++) begin
      lost += expq[c].size();
      checks++;
      if (exact && expq[c].size() != 0) fail($sformatf("ch %0d: %0d words missing", c, expq[c].size()));
      expq[c] = {};
    end
  endtask

  task automatic read_status(output status_t st);
    logic [63:0] r;
    scan(1, 4, 64'(IR_STATUS), r);
    scan(0, STATUS_W, '0, r);
    st = status_t'(r[STATUS_W-1:0]);
  endtask

  // ---------------- the test ----------------
  initial begin
    logic [63:0] r;
    setup_t s;
    status_t st;
    int lost, n0, n1;
    realtime t0, t1;
    cfg = SETUP_DEFAULT;
    E = 0;
    #50 rst_n = 1; trst_n = 1;
    begin logic o; repeat (5) tick(1, 0, o); tick(0, 0, o); end

    // pair mode (the reset setup: triggerless, pair mode, all channels)
    ttc_cmd(3'd2);
    #(20 * T);
    offered = 0;
    run_load();
    #(2000 * T);
    $display("pair mode: %0d words offered in %0.1f us", offered, RUN_NS / 1000.0);
    check_words(1, lost);
    read_status(st);
    checks++;
    if (st.chnl_fifo_ovf) fail("channel FIFO overflow at 400 kHz in pair mode");
    checks++;
    if (offered < int'(0.8 * 24 * RUN_NS / MEAN_GAP_NS)) fail($sformatf("only %0d hits offered", offered));

    // edge mode: the load exceeds the link
    s = SETUP_DEFAULT;
    s.pair_mode = 0;
    write_setup(s);
    ttc_cmd(3'd4);                      // master reset clears the sticky flags
    #(50 * T);
    ttc_cmd(3'd2);
    #(20 * T);
    rx_q = {};
    offered = 0;
    fork
      run_load();
      begin
        #(20000.0);
        t0 = $realtime; n0 = rx_q.size();
        #(50000.0);
        t1 = $realtime; n1 = rx_q.size();
      end
    join
    #(2000 * T);
    begin
      real rate;
      rate = real'(n1 - n0) / ((t1 - t0) * 1.0e-9);
      $display("edge mode: %0d words offered, link carried %0.2f M words/s while saturated", offered, rate / 1.0e6);
      checks++;
      if (rate < 0.95 * 16.0e6) fail($sformatf("link rate %0.2f M words/s", rate / 1.0e6));
    end
    check_words(0, lost);
    $display("edge mode: %0d words lost", lost);
    checks++;
    if (lost == 0) fail("no words lost although the load exceeds the link");
    read_status(st);
    checks++;
    if (!st.chnl_fifo_ovf) fail("channel FIFO overflow not reported");

    // triggered mode, 1 MHz triggers, 10 us latency
    s = SETUP_DEFAULT;
    s.triggered = 1;
    s.match_offset = 12'd3200;
    write_setup(s);
    ttc_cmd(3'd4);
    #(50 * T);
    ttc_cmd(3'd2);
    #(20 * T);
    rx_q = {};
    begin
      int snap [$][NCH];
      tdc_time_t ws_est [$];
      int ntrig, nev, tot;
      tot = 0;
      ntrig = 0;
      fork
        run_load();
        begin
          #(10500.0);
          while ($realtime < E + RUN_NS - 1000.0) begin
            int sn [NCH];
            realtime t_next;
            t_next = $realtime + 1000.0;
            ttc_cmd(3'd1);
            foreach (sn[c]) sn[c] = hits[c].size();
            snap.push_back(sn);
            ws_est.push_back(now_code() - 17'd3200 * 4);
            ntrig++;
            #(t_next - $realtime);
          end
        end
      join
      #(3000 * T);
      nev = 0;
      while (rx_q.size() > 0) begin
        tdc_word_t w;
        tdc_time_t ws;
        int n_hit, sn [NCH];
        w = rx_q.pop_front();
        checks++;
        if (w[31:29] != 3'b110) begin fail($sformatf("header expected, got %h", w)); break; end
        if (nev >= ntrig) begin fail("more events than triggers"); break; end
        ws = w[16:0];
        sn = snap[nev];
        checks++;
        if (int'(w[28:17]) != nev) fail($sformatf("event id %0d expected %0d", w[28:17], nev));
        checks++;
        if (tdc_time_t'(ws - ws_est[nev] + 16) > 32)
          fail($sformatf("window start %0d expected about %0d", ws, ws_est[nev]));
        n_hit = 0;
        for (int c = 0; c < NCH; c++)
          for (int i = 0; i < sn[c]; i++) begin
            tdc_time_t d;
            tdc_word_t e;
            d = hits[c][i].lead - ws;
            if (d >= 17'(s.match_window) * 4) continue;
            e = {WT_PAIR, 5'(c), hits[c][i].lead, wsat(hits[c][i].lead, hits[c][i].trail)};
            checks++;
            if (rx_q.size() > 0 && rx_q[0] === e) begin void'(rx_q.pop_front()); n_hit++; end
            else if (sn[c] - i < 12) fail($sformatf("event %0d: hit %h missing", nev, e));
          end
        checks++;
        if (rx_q.size() == 0) begin fail("no trailer"); break; end
        w = rx_q.pop_front();
        if (w !== trailer_word(12'(nev), 12'(n_hit)))
          fail($sformatf("trailer %h expected %h", w, trailer_word(12'(nev), 12'(n_hit))));
        tot += n_hit;
        nev++;
      end
      $display("triggered mode: %0d triggers at 1 MHz, %0d events, %0d hits", ntrig, nev, tot);
      checks++;
      if (tot < nev) fail("events hold almost no hits");
      checks++;
      if (nev != ntrig || ntrig < 70) fail($sformatf("%0d events for %0d triggers", nev, ntrig));
    end
    read_status(st);
    checks++;
    if (st.trig_fifo_ovf) fail("trigger FIFO overflow at 1 MHz");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
