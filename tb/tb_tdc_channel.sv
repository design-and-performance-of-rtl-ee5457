// Testbench for tdc_channel with real clock phases: 160 MHz logic clock,
// 320 MHz at 0 and 90 degrees, and a testbench model of the coarse counters.
// Hit pulses at random times are expected back as hits whose time is
// floor((t - t_ref) / 781.25 ps) mod 2^17 (the testbench's own clock model):
//  - triggerless pair mode: leading time and width;
//  - triggerless edge mode: separate leading and trailing hits;
//  - triggered mode: only hits inside the trigger window come out, a hit can
//    be matched by two triggers, and 16 fake hits flush the ring buffer.
`timescale 1ps/10fs
`include "tb_check.svh"
module tb_tdc_channel;
  import tdc_pkg::*;
  int checks = 0, failures = 0;
  logic clk320_0 = 1'b1, clk320_90 = 1'b0, clk = 1'b1, rst_n = 1'b0, hit = 1'b0;
  logic [14:0] cnt_r = '0, cnt_f = '0;
  logic enable = 1, triggered = 0, pair_mode = 1, fake = 0, trig_req = 0;
  logic [3:0] width_sel = '0;
  logic [11:0] trig_bcid = '0, window = '0;
  logic rd_vld, rd_rdy = 1, busy, ovf, lost;
  hit_t rd_hit;
  hit_t got [$];
  realtime t_ref;

  tdc_channel dut (.hit, .clk320_0, .clk320_90, .cnt_r, .cnt_f, .clk, .rst_n, .enable, .triggered,
    .pair_mode, .width_sel, .fake, .trig_req, .trig_bcid, .window, .rd_vld, .rd_hit, .rd_rdy,
    .busy, .ovf, .lost);

  always #1562.5 clk320_0 = ~clk320_0;
  always #3125 clk = ~clk;
  initial begin
    #781.25 clk320_90 = 1'b1;
    forever #1562.5 clk320_90 = ~clk320_90;
  end
  logic cnt_on = 0;
  always @(posedge clk320_0) if (cnt_on) cnt_r <= cnt_r + 1'b1;
  always @(negedge clk320_0) cnt_f <= cnt_r;

  always @(posedge clk) if (rst_n && rd_vld && rd_rdy) got.push_back(rd_hit);

  function automatic logic [16:0] tcode(input realtime t);
    return 17'(longint'($floor((t - t_ref) / 781.25)));
  endfunction

  initial begin
    #2_000_000_000;
    failures++;
    $display("watchdog");
    `TB_FINISH
  end

  // one pulse at a time away from bin edges; returns both edge times
  task automatic pulse(input realtime width_ps, output realtime tl, output realtime tt);
    realtime ph;
    #($urandom_range(2000, 20000));
    ph = $realtime - $floor($realtime / 781.25) * 781.25;
    if (ph < 80 || ph > 700) #(300);
    tl = $realtime; hit = 1'b1;
    #(width_ps);
    ph = $realtime - $floor($realtime / 781.25) * 781.25;
    if (ph < 80 || ph > 700) #(300);
    tt = $realtime; hit = 1'b0;
  endtask

  initial begin
    realtime tl, tt;
    hit_t h;
    // counter starts at the rising edge at 3125*8: value 1 during the first period
    #(3125.0 * 8 - 500) cnt_on = 1;
    t_ref = 3125.0 * 7;
    rst_n = 1;
    #20000;
    // ---- triggerless, pair mode ----
    for (int i = 0; i < 200; i++) begin
      pulse($urandom_range(1000, 150000), tl, tt);
      #40000;
      `CHECK_EQ(got.size(), 1, "one pair hit")
      if (got.size() > 0) begin
        h = got.pop_front();
        `CHECK_EQ(h.mode, MODE_PAIR, "pair mode code")
        `CHECK_EQ(h.t, tcode(tl), "leading time")
        `CHECK_EQ(h.width, 8'(((tcode(tt) - tcode(tl)) & 17'h1FFFF) > 255 ? 255 : (tcode(tt) - tcode(tl))), "width")
      end
      got.delete();
    end
    // ---- triggerless, edge mode ----
    pair_mode = 0;
    for (int i = 0; i < 100; i++) begin
      pulse($urandom_range(30000, 100000), tl, tt);
      #40000;
      `CHECK_EQ(got.size(), 2, "two edge hits")
      if (got.size() == 2) begin
        `CHECK_EQ(got[0].mode, MODE_LEAD, "leading code")
        `CHECK_EQ(got[0].t, tcode(tl), "leading edge time")
        `CHECK_EQ(got[1].mode, MODE_TRAIL, "trailing code")
        `CHECK_EQ(got[1].t, tcode(tt), "trailing edge time")
      end
      got.delete();
    end
    // ---- disabled channel ----
    enable = 0;
    pulse(50000, tl, tt); #40000;
    `CHECK_EQ(got.size(), 0, "disabled channel records nothing")
    enable = 1;
    // ---- triggered, pair mode ----
    triggered = 1; pair_mode = 1;
    begin
      realtime tls [$];
      logic [16:0] codes [$];
      for (int i = 0; i < 12; i++) begin
        pulse($urandom_range(20000, 60000), tl, tt);
        codes.push_back(tcode(tl));
      end
      #40000;
      `CHECK_EQ(got.size(), 0, "triggered mode waits for a trigger")
      for (int trial = 0; trial < 20; trial++) begin
        int nexp;
        logic [16:0] exp_t [$];
        exp_t.delete();
        trig_bcid = codes[$urandom_range(0, 11)][16:5] - 12'($urandom_range(0, 2));
        window    = 12'($urandom_range(1, 6));
        foreach (codes[k]) if (12'(codes[k][16:5] - trig_bcid) < window) exp_t.push_back(codes[k]);
        got.delete();
        @(negedge clk); trig_req = 1; @(negedge clk); trig_req = 0;
        #100000;
        `CHECK_EQ(got.size(), exp_t.size(), "matched hits")
        foreach (exp_t[k]) if (k < got.size()) `CHECK_EQ(got[k].t, exp_t[k], "matched hit time")
        `CHECK(!busy, "matching done")
      end
      // 16 fake hits push all real hits out of the ring buffer
      repeat (16) begin @(negedge clk); fake = 1; @(negedge clk); fake = 0; end
      trig_bcid = codes[0][16:5]; window = 12'd4000;
      got.delete();
      @(negedge clk); trig_req = 1; @(negedge clk); trig_req = 0;
      #100000;
      `CHECK_EQ(got.size(), 0, "fake hits flush the ring buffer")
    end
    `CHECK_EQ(lost, 1'b0, "no hit lost")
    `TB_FINISH
  end
endmodule
