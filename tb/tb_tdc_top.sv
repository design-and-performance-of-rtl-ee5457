// End-to-end testbench for tdc_top at its default parameters (24 channels).
//
// The testbench makes the three clocks (160 MHz, 320 MHz at 0 and 90
// degrees), configures the chip over JTAG and drives hit pulses at times away
// from the 0.78125 ns bin edges. For every pulse it works out the expected
// measurement itself: the time code of an edge is floor((t - t_ref) /
// 781.25 ps) mod 2^17, where t_ref is the moment the coarse counter last
// restarted from 0. A receiver rebuilds the serial stream (8b/10b on two lines
// at 320 or 160 Mbps, start/stop frames at 80 Mbps), splits it into words and
// checks them against the expectation:
//   triggerless pair and edge modes: per channel, every hit in order, with
//     exact time, width and channel number; a disabled channel stays silent;
//   triggered mode: every event is header, hits, trailer; the trailer count
//     and event ID agree; every hit lies inside the matching window of the
//     header BCID and every pulse well inside the window is present.
// The JTAG status counters must account for every hit and trigger that was
// lost. Mechanisms that must each happen at least once (a failure is counted for any
// that never does): readout-FIFO back-pressure, comma-limit commas, the 160
// and 80 Mbps modes, edge and pair modes, a disabled channel, lost hits (with
// the JTAG status counter), bunch-counter reset, global reset, event-counter
// reset, triggers from the TTC line and from the trigger pin, a hit matched by
// two triggers, trigger-FIFO overflow (error flag and status counter), old
// hits flushed by fake hits, the ASD JTAG chain, and IDCODE and configuration
// read-back. The latency of isolated hits at 320 Mbps is also checked against
// 350 ns.
`timescale 1ps/10fs
`include "tb_check.svh"
module tb_tdc_top;
  import tdc_pkg::*;
  import tb_codec_pkg::*;
  int checks = 0, failures = 0;

  // ---------------- clocks and DUT ----------------
  logic clk160 = 1'b1, clk320_0 = 1'b1, clk320_90 = 1'b0, rst_n = 1'b0;
  logic [NCH-1:0] hit = '0;
  logic ttc = 1'b0, trigger = 1'b0;
  logic tck = 1'b0, tms = 1'b1, tdi = 1'b0, trst_n = 1'b1, tdo;
  logic asd_tdi, asd_tdo, asd_shift, asd_capture, asd_update;
  logic [1:0] dout0, dout1;

  tdc_top dut (.clk160, .clk320_0, .clk320_90, .rst_n, .hit, .ttc, .trigger,
    .tck, .tms, .tdi, .trst_n, .tdo, .asd_tdi, .asd_tdo, .asd_shift, .asd_capture,
    .asd_update, .dout0, .dout1);

  always #1562.5 clk320_0 = ~clk320_0;
  always #3125 clk160 = ~clk160;
  initial begin
    #781.25 clk320_90 = 1'b1;
    forever #1562.5 clk320_90 = ~clk320_90;
  end

  // ASD chain model: an 8-bit shift register clocked by TCK while shifting
  logic [7:0] asd_sr = '0;
  assign asd_tdo = asd_sr[0];
  always @(posedge tck) if (asd_shift) asd_sr <= {asd_tdi, asd_sr[7:1]};

  `include "tb_jtag_task.svh"

  initial begin
    #3_000_000_000;
    failures++;
    $display("watchdog");
    `TB_FINISH
  end

  // ---------------- mechanism counters ----------------
  typedef enum int {
    M_STALL, M_COMMA_LIMIT, M_RATE160, M_RATE80, M_PAIR, M_EDGE, M_DISABLED,
    M_LOST, M_BCR, M_GRST, M_EVRST, M_TRIG_TTC, M_TRIG_PIN, M_DOUBLE_MATCH,
    M_TRIG_OVF, M_FLUSH, M_ASD, M_IDCODE, M_LATENCY, M_NMECH
  } mech_e;
  int mech [M_NMECH];
  initial foreach (mech[i]) mech[i] = 0;
  always @(posedge clk160) if (dut.ro_in_vld && !dut.ro_in_rdy) mech[M_STALL]++;

  // ---------------- expected measurements ----------------
  realtime t_ref;
  cfg_t    tcfg;
  function automatic logic [16:0] tcode(input realtime t);
    return 17'(longint'($floor((t - t_ref) / 781.25)));
  endfunction

  typedef struct {
    logic [31:0] v;        // word as sent (24-bit words in bits 23:0)
    int          nbytes;
    realtime     t_done;   // time the hit was complete in the chip
  } exp_t;
  exp_t exp_q [NCH][$];
  int   skipped = 0;
  realtime lat_max = 0;

  typedef struct {
    int          ch;
    logic [16:0] tl;
    logic [7:0]  w;
  } pulse_t;
  pulse_t pulses [$];      // triggered mode: every pulse sent

  function automatic logic [7:0] pair_width(logic [16:0] tl, logic [16:0] tt);
    logic [16:0] d;
    d = (tt - tl) >> tcfg.width_sel;
    return (d > 17'd255) ? 8'd255 : d[7:0];
  endfunction

  // wait until the edge is at least 80 ps away from a bin edge
  task automatic bin_safe();
    realtime ph;
    ph = $realtime - t_ref - $floor(($realtime - t_ref) / 781.25) * 781.25;
    if (ph < 80.0) #(100.0);
    else if (ph > 700.0) #(200.0);
  endtask

  task automatic fire(input int ch, input realtime dly, input realtime width);
    fork begin
      realtime tl, tt;
      exp_t e;
      pulse_t p;
      #(dly);
      bin_safe();
      tl = $realtime; hit[ch] = 1'b1;
      if (tcfg.chan_en[ch] && !tcfg.triggered && !tcfg.pair_mode) begin
        e.v = {8'h00, 5'(ch), MODE_LEAD, tcode(tl)}; e.nbytes = 3; e.t_done = tl;
        exp_q[ch].push_back(e);
      end
      #(width);
      bin_safe();
      tt = $realtime; hit[ch] = 1'b0;
      if (tcfg.chan_en[ch] && !tcfg.triggered && !tcfg.pair_mode) begin
        e.v = {8'h00, 5'(ch), MODE_TRAIL, tcode(tt)}; e.nbytes = 3; e.t_done = tt;
        exp_q[ch].push_back(e);
      end
      if (tcfg.chan_en[ch] && !tcfg.triggered && tcfg.pair_mode) begin
        e.v = {5'(ch), MODE_PAIR, tcode(tl), pair_width(tcode(tl), tcode(tt))};
        e.nbytes = 4; e.t_done = tt;
        exp_q[ch].push_back(e);
      end
      if (tcfg.chan_en[ch] && tcfg.triggered) begin
        p.ch = ch; p.tl = tcode(tl); p.w = pair_width(tcode(tl), tcode(tt));
        pulses.push_back(p);
      end
    end join_none
  endtask

  // ---------------- word checker ----------------
  logic        lossy = 0;       // hits may be lost in this phase
  logic        calib = 0;       // next hit re-measures t_ref (after BCR)
  realtime     t_bcr;
  int          nwords = 0;
  // triggered mode
  typedef struct {
    logic [7:0]  evid;
    logic [11:0] bcid;
    logic [3:0]  err;
    int          nhits;
    realtime     t_end;
  } event_t;
  event_t      events [$];
  logic        ev_open = 0;
  event_t      cur;
  logic [31:0] ev_hits [$];
  int          pulse_uses [$];  // how many events each pulse appeared in

  task automatic check_event();
    // every hit is a pulse inside the window; every pulse well inside is there
    int found;
    logic [11:0] d;
    foreach (ev_hits[i]) begin
      found = 0;
      d = ev_hits[i][24:13] - cur.bcid;
      `CHECK(d < tcfg.match_window, "matched hit inside the window")
      foreach (pulses[j])
        if (pulses[j].ch == int'(ev_hits[i][31:27]) && pulses[j].tl == ev_hits[i][24:8]
            && pulses[j].w == ev_hits[i][7:0]) begin
          found = 1;
          pulse_uses[j]++;
          if (pulse_uses[j] == 2) mech[M_DOUBLE_MATCH]++;
        end
      `CHECK(found == 1, "matched hit is a pulse that was sent")
    end
    foreach (pulses[j]) begin
      d = pulses[j].tl[16:5] - cur.bcid;
      if (d >= 12'd1 && int'(d) + 2 <= int'(tcfg.match_window)) begin
        found = 0;
        foreach (ev_hits[i])
          if (pulses[j].ch == int'(ev_hits[i][31:27]) && pulses[j].tl == ev_hits[i][24:8]) found = 1;
        `CHECK(found == 1 || lossy, "pulse inside the window is in the event")
        if (found == 0 && !lossy) $display("  ch %0d t %h bcid %h event bcid %h", pulses[j].ch, pulses[j].tl, pulses[j].tl[16:5], cur.bcid);
      end
    end
  endtask

  task automatic got_word(input logic [31:0] v, input int nbytes);
    int ch;
    exp_t e;
    nwords++;
    if (tcfg.triggered) begin
      if (nbytes == 3 && v[23:20] == 4'hE) begin
        `CHECK(!ev_open, "header only outside an event")
        ev_open = 1; cur.evid = v[19:12]; cur.bcid = v[11:0]; ev_hits.delete();
      end else if (nbytes == 3 && v[23:20] == 4'hF) begin
        `CHECK(ev_open, "trailer closes an event")
        ev_open = 0;
        cur.err = v[19:16]; cur.nhits = int'(v[9:0]); cur.t_end = $realtime;
        `CHECK_EQ(v[15:10], cur.evid[5:0], "trailer event ID")
        `CHECK_EQ(int'(v[9:0]), ev_hits.size(), "trailer hit count")
        check_event();
        events.push_back(cur);
      end else begin
        `CHECK(ev_open, "matched hit inside an event")
        `CHECK_EQ(nbytes, 4, "pair mode hit in event")
        ev_hits.push_back(v);
      end
      return;
    end
    ch = (nbytes == 4) ? int'(v[31:27]) : int'(v[23:19]);
    `CHECK(ch < NCH, "channel number")
    if (ch >= NCH) return;
    if (calib && exp_q[ch].size() > 0) begin
      // first hit after BCR: the counter restarted at t_ref + (old - new) bins
      logic [16:0] told, tnew;
      realtime tr;
      told = (nbytes == 4) ? exp_q[ch][0].v[24:8] : exp_q[ch][0].v[16:0];
      tnew = (nbytes == 4) ? v[24:8] : v[16:0];
      tr = t_ref + 781.25 * real'(told - tnew);
      `CHECK(tr > t_bcr && tr < t_bcr + 80_000.0, "coarse counter restarted by BCR")
      t_ref = tr;
      calib = 0;
      mech[M_BCR]++;
      void'(exp_q[ch].pop_front());
      return;
    end
    while (exp_q[ch].size() > 0 && !(exp_q[ch][0].v == v && exp_q[ch][0].nbytes == nbytes)) begin
      void'(exp_q[ch].pop_front());
      skipped++;
    end
    `CHECK(exp_q[ch].size() > 0, "received hit was expected")
    if (exp_q[ch].size() == 0) begin
      $display("  unexpected word %h (%0d bytes) ch %0d at %0t", v, nbytes, ch, $time);
      return;
    end
    e = exp_q[ch].pop_front();
    if (nbytes == 4) mech[M_PAIR]++; else mech[M_EDGE]++;
    if ($realtime - e.t_done > lat_max) lat_max = $realtime - e.t_done;
  endtask

  // ---------------- receiver ----------------
  logic       rx_on = 0;
  logic [9:0] sh = '0;
  int         nb = 0;
  logic       aligned = 0, rd = 0;
  logic [7:0] bytes [$];
  int         since_comma = 0, max_run = 0, commas = 0;

  function automatic int word_len(logic [7:0] b0);
    if (b0[7:4] >= 4'hE) return 3;       // header or trailer
    return (b0[2:1] == 2'b11) ? 4 : 3;   // pair or edge hit
  endfunction

  task automatic rx_bit(input logic b);
    logic [7:0] d; logic k, ok;
    logic [31:0] v;
    sh = {b, sh[9:1]};
    if (sh == to_bits("0011111010") || sh == to_bits("1100000101")) begin
      // comma: (re)align to it
      `CHECK(bytes.size() == 0 || !aligned, "comma only between words")
      rd = (sh == to_bits("0011111010"));
      aligned = 1; nb = 0; bytes.delete();
      commas++;
      if (since_comma == tcfg.comma_limit && tcfg.comma_limit != 0) mech[M_COMMA_LIMIT]++;
      since_comma = 0;
      return;
    end
    if (!aligned) return;
    nb++;
    if (nb < 10) return;
    nb = 0;
    dec(sh, rd, d, k, ok);
    `CHECK(ok && !k, "valid data symbol")
    if (!ok) begin aligned = 0; return; end
    bytes.push_back(d);
    if (bytes.size() == word_len(bytes[0])) begin
      v = '0;
      foreach (bytes[i]) v = {v[23:0], bytes[i]};
      since_comma++;
      if (since_comma > max_run) max_run = since_comma;
      got_word(v, bytes.size());
      bytes.delete();
    end
  endtask

  // 80 Mbps: start bit 1, data MSB first, stop bit 0; each bit two cycles
  int          lg_cyc = -1, lg_n = 0;
  logic [31:0] lg_v;

  always @(posedge clk160) if (rx_on) begin
    #1;
    if (tcfg.rate == RATE_320) begin
      rx_bit(dout0[0]); rx_bit(dout1[0]); rx_bit(dout0[1]); rx_bit(dout1[1]);
    end else if (tcfg.rate == RATE_160) begin
      `CHECK(dout0[0] == dout0[1] && dout1[0] == dout1[1], "160 Mbps bit fills both slots")
      rx_bit(dout0[0]); rx_bit(dout1[0]);
    end else begin
      `CHECK(dout1 == 2'b00, "80 Mbps uses line 0 only")
      if (lg_cyc < 0) begin
        if (dout0[0]) begin lg_cyc = 0; lg_v = '0; lg_n = 32; end
      end else begin
        lg_cyc++;
        if (lg_cyc >= 2 && lg_cyc < 2 + 2 * lg_n && lg_cyc % 2 == 0) begin
          lg_v = {lg_v[30:0], dout0[0]};
          if (lg_cyc == 16) lg_n = word_len(lg_v[7:0]) * 8;
        end
        if (lg_cyc == 2 + 2 * lg_n) begin
          `CHECK_EQ(dout0[0], 1'b0, "80 Mbps stop bit")
          got_word(lg_v, lg_n / 8);
          mech[M_RATE80]++;
        end
        if (lg_cyc == 3 + 2 * lg_n) lg_cyc = -1;
      end
    end
  end
  always @(posedge clk160) if (rx_on && tcfg.rate == RATE_160 && dut.sym_data) mech[M_RATE160]++;

  // ---------------- TTC, trigger pin and JTAG helpers ----------------
  task automatic at_bc();
    @(negedge clk160);
    while (!dut.bc_en) @(negedge clk160);
  endtask
  task automatic ttc_cmd(input logic b1, input logic b0);
    at_bc(); ttc = 1'b1;
    at_bc(); ttc = b1;
    at_bc(); ttc = b0;
    at_bc(); ttc = 1'b0;
  endtask
  task automatic pin_trig();
    at_bc(); trigger = 1'b1;
    at_bc(); trigger = 1'b0;
  endtask

  task automatic write_cfg(input cfg_t c);
    logic [127:0] dout;
    jtag_ir(4'b0010);
    jtag_dr(CFG_BITS, 128'(c), dout);
    jtag_ir(4'b0010);
    jtag_dr(CFG_BITS, 128'(c), dout);
    `CHECK_EQ(dout[CFG_BITS-1:0], c, "configuration read back")
    tcfg = c;
  endtask
  task automatic read_status(output logic [31:0] s);
    logic [127:0] dout;
    jtag_ir(4'b0011);
    jtag_dr(32, '0, dout);
    s = dout[31:0];
  endtask

  // configure, then a TTC global reset starts the logic afresh
  task automatic reconfigure(input cfg_t c);
    rx_on = 0;
    write_cfg(c);
    ttc_cmd(1'b1, 1'b1);
    mech[M_GRST]++;
    aligned = 0; bytes.delete(); since_comma = 0; max_run = 0; lg_cyc = -1;
    repeat (20) @(negedge clk160);
    rx_on = 1;
    repeat (40) @(negedge clk160);
  endtask

  task automatic wait_empty(input realtime limit);
    realtime t0;
    int n;
    t0 = $realtime;
    forever begin
      n = 0;
      foreach (exp_q[c]) n += exp_q[c].size();
      if (n == 0 || $realtime - t0 > limit) break;
      #10_000;
    end
    #200_000;
    n = 0;
    foreach (exp_q[c]) n += exp_q[c].size();
    `CHECK(n == 0 || lossy, "all expected hits received")
    if (n != 0 && !lossy) $display("  %0d hits missing at %0t", n, $time);
  endtask

  // ---------------- test sequence ----------------
  initial begin
    cfg_t c;
    logic [127:0] dout;
    logic [31:0] st;
    int nev;
    logic [7:0] ev0;

    tcfg = CFG_DEFAULT;
    #5000 trst_n = 1'b0;
    #20000 trst_n = 1'b1;
    // release the chip reset between clock edges: the coarse counter reads 1
    // after the first rising clk320_0 edge that follows
    #(3125.0 * 9 + 1000 - 25000) rst_n = 1'b1;
    t_ref = 3125.0 * 10 - 3125.0;
    jtag_reset();

    // ---- JTAG: IDCODE, default configuration, ASD chain ----
    jtag_dr(32, '0, dout);
    `CHECK_EQ(dout[31:0], 32'h1DC0_0001, "IDCODE after reset")
    mech[M_IDCODE]++;
    jtag_ir(4'b0010);
    jtag_dr(CFG_BITS, 128'(CFG_DEFAULT), dout);
    `CHECK_EQ(dout[CFG_BITS-1:0], CFG_DEFAULT, "default configuration")
    jtag_ir(4'b0100);
    jtag_dr(8, 128'hA5, dout);
    jtag_dr(16, 128'h3C00, dout);
    `CHECK_EQ(dout[7:0], 8'hA5, "ASD chain returns the data shifted in")
    `CHECK_EQ(asd_sr, 8'h3C, "ASD chain holds the last byte")
    if (dout[7:0] == 8'hA5 && asd_sr == 8'h3C) mech[M_ASD]++;
    rx_on = 1;
    repeat (40) @(negedge clk160);

    // ---- triggerless, pair mode, 320 Mbps (default) ----
    for (int i = 0; i < 40; i++) begin
      fire($urandom_range(0, NCH - 1), 0, $urandom_range(5000, 200000));
      #($urandom_range(400_000, 700_000));
    end
    wait_empty(20_000_000);
    `CHECK(lat_max < 350_000.0, "isolated hit latency below 350 ns")
    $display("  isolated-hit latency at 320 Mbps: max %0.1f ns", lat_max / 1000.0);
    if (lat_max < 350_000.0) mech[M_LATENCY]++;

    // bunch-counter reset: the coarse counter restarts, measured on next hit
    ttc_cmd(1'b1, 1'b0);
    t_bcr = $realtime - 3 * 25_000.0;
    calib = 1;
    #1_000_000;
    fire(3, 0, 40_000);
    #2_000_000;
    `CHECK(!calib, "hit after BCR received")
    // bursts on all channels: the readout FIFO fills up and stalls the mux
    for (int b = 0; b < 4; b++) begin
      for (int ch = 0; ch < NCH; ch++) fire(ch, $urandom_range(0, 20000), $urandom_range(20000, 100000));
      #3_000_000;
    end
    wait_empty(20_000_000);

    // ---- comma limit 3 ----
    c = CFG_DEFAULT; c.comma_limit = 8'd3;
    reconfigure(c);
    for (int b = 0; b < 3; b++) begin
      for (int ch = 0; ch < NCH; ch++) fire(ch, $urandom_range(0, 20000), $urandom_range(20000, 100000));
      #3_000_000;
    end
    wait_empty(20_000_000);
    `CHECK(max_run <= 3, "no more than comma_limit packets without a comma")

    // ---- edge mode, 160 Mbps, channel 5 disabled ----
    c = CFG_DEFAULT; c.pair_mode = 1'b0; c.rate = RATE_160; c.chan_en[5] = 1'b0;
    reconfigure(c);
    for (int i = 0; i < 48; i++) begin
      fire(i % NCH, $urandom_range(0, 50000), $urandom_range(20000, 150000));
      #($urandom_range(300_000, 600_000));
    end
    wait_empty(20_000_000);
    begin
      int nw0;
      nw0 = nwords;
      fire(5, 0, 50_000);
      #2_000_000;
      `CHECK_EQ(nwords, nw0, "disabled channel sends nothing")
      if (nwords == nw0) mech[M_DISABLED]++;
    end

    // ---- overload in edge mode at 160 Mbps: hits are lost ----
    c.chan_en = '1;
    reconfigure(c);
    lossy = 1;
    for (int r = 0; r < 10; r++) begin
      for (int ch = 0; ch < NCH; ch++) fire(ch, $urandom_range(0, 5000), 20_000);
      #50_000;
    end
    wait_empty(60_000_000);
    lossy = 0;
    foreach (exp_q[ch]) begin
      skipped += exp_q[ch].size();
      exp_q[ch].delete();
    end
    read_status(st);
    $display("  overload: %0d hits not received, status lost counter %0d", skipped, st[15:0]);
    `CHECK(skipped > 0, "overload loses hits")
    `CHECK_EQ(int'(st[15:0]), skipped, "every lost hit counted in the status register")
    if (skipped > 0 && st[15:0] > 0) mech[M_LOST]++;

    // ---- legacy 80 Mbps, pair mode ----
    c = CFG_DEFAULT; c.rate = RATE_80;
    reconfigure(c);
    for (int i = 0; i < 12; i++) begin
      fire($urandom_range(0, NCH - 1), 0, $urandom_range(20000, 100000));
      #1_500_000;
    end
    wait_empty(20_000_000);

    // ---- triggered mode, pair, 320 Mbps, window 16, offset 400 ----
    // a global reset clears the bunch counter but not the coarse counter: a
    // BCR (measured on a hit in triggerless mode) aligns the two, then the
    // mode is switched while the chip is quiet
    reconfigure(CFG_DEFAULT);
    ttc_cmd(1'b1, 1'b0);
    t_bcr = $realtime - 3 * 25_000.0;
    calib = 1;
    #1_000_000;
    fire(7, 0, 40_000);
    #2_000_000;
    `CHECK(!calib, "hit after second BCR received")
    c = CFG_DEFAULT; c.triggered = 1'b1;
    write_cfg(c);
    repeat (10) @(negedge clk160);
    // the event counter restarts at 0 after the global reset
    for (int g = 0; g < 6; g++) begin
      // a group of hits, then two triggers 400 bunch crossings later
      pulses.delete(); pulse_uses.delete();
      for (int ch = 0; ch < NCH; ch++)
        if ($urandom_range(0, 1)) fire(ch, $urandom_range(0, 300_000), $urandom_range(20000, 80000));
      #400_000;
      foreach (pulses[j]) pulse_uses.push_back(0);
      #(400 * 25_000.0 - 400_000 - 100_000);
      if (g % 2 == 0) begin ttc_cmd(1'b0, 1'b0); mech[M_TRIG_TTC]++; end
      else begin pin_trig(); mech[M_TRIG_PIN]++; end
      repeat (3) at_bc();
      pin_trig(); mech[M_TRIG_PIN]++;
      #3_000_000;
    end
    nev = events.size();
    `CHECK_EQ(nev, 12, "one event per trigger")
    foreach (events[i]) begin
      `CHECK_EQ(events[i].evid, 8'(i), "event IDs count up from 0")
      `CHECK_EQ(events[i].err, 4'h0, "no error flags")
    end
    // event-counter reset
    ttc_cmd(1'b0, 1'b1);
    repeat (4) at_bc();
    pin_trig();
    #3_000_000;
    `CHECK_EQ(events.size(), nev + 1, "event after event-counter reset")
    if (events.size() == nev + 1) begin
      `CHECK_EQ(events[nev].evid, 8'd0, "event ID restarts at 0")
      if (events[nev].evid == 8'd0) mech[M_EVRST]++;
    end
    // a burst of triggers overflows the trigger FIFO
    nev = events.size();
    for (int i = 0; i < 40; i++) pin_trig();
    #30_000_000;
    read_status(st);
    $display("  trigger burst: %0d events, status triggers lost %0d", events.size() - nev, st[23:16]);
    `CHECK(events.size() - nev < 40 && events.size() - nev >= 16, "trigger FIFO holds 16 triggers")
    `CHECK_EQ(int'(st[23:16]) + events.size() - nev, 40, "every trigger built or counted lost")
    begin
      logic flagged;
      flagged = 0;
      for (int i = nev; i < events.size(); i++) if (events[i].err[1]) flagged = 1;
      `CHECK(flagged, "lost trigger flagged in a trailer")
      if (flagged && st[23:16] > 0) mech[M_TRIG_OVF]++;
    end

    // ---- old hits are flushed by fake hits: offset 1000 BC > 16 x 32 BC ----
    c.trig_offset = 12'd1000;
    write_cfg(c);
    pulses.delete(); pulse_uses.delete();
    for (int ch = 0; ch < NCH; ch++) fire(ch, $urandom_range(0, 200_000), 30_000);
    #400_000;
    lossy = 1;
    nev = events.size();
    #(1000 * 25_000.0 - 400_000 - 100_000);
    pin_trig();
    #3_000_000;
    lossy = 0;
    `CHECK_EQ(events.size(), nev + 1, "event after long trigger latency")
    if (events.size() == nev + 1) begin
      `CHECK_EQ(events[nev].nhits, 0, "hits older than the ring buffer are flushed")
      if (events[nev].nhits == 0) mech[M_FLUSH]++;
    end

    // ---- mechanism summary ----
    foreach (mech[i]) begin
      mech_e m;
      m = mech_e'(i);
      $display("  mechanism %-16s %0d", m.name(), mech[i]);
      `CHECK(mech[i] > 0, "mechanism happened")
    end
    $display("  words received %0d, commas %0d", nwords, commas);
    `TB_FINISH
  end
endmodule
