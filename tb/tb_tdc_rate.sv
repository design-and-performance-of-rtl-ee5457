// Rate and latency testbench for tdc_top in triggerless pair mode at 320 Mbps,
// the configuration used for the chip's latency measurements.
//
// All 24 channels receive random hits with exponentially distributed
// intervals at an average rate of 200, 400 and then 660 kHz per channel (one
// run each, default configuration otherwise: comma limit 255). Each pulse is
// 20 to 200 ns wide (110 ns on average) and a channel's next pulse starts 50
// ns plus an exponentially distributed gap after its previous one ends; the
// gap's mean is shortened by the 160 ns so that the average rate is exact. The testbench decodes the two serial lines (8b/10b, even
// bits on line 0, odd bits on line 1), checks every received pair word
// against the pulse it expects next on that channel (time code floor((t -
// t_ref) / 781.25 ps), width in the same units) and measures the latency from
// the trailing edge of the pulse to the last bit of its word.
// Checks: at 200 and 400 kHz no hit is lost or corrupted and more than 99% of
// the hits arrive within 350 ns. At 660 kHz the line is loaded to 99% of its
// capacity (15.84 of 15.94 million words per second); with these random
// (Poisson) arrivals the queues then grow to microseconds and the 4-deep
// channel FIFOs occasionally overflow, so the check there is that every word
// received is a correct hit and fewer than 1% of hits are lost (about 0.1%
// is typical). Loss and the
// latency percentile are printed for each rate.
`timescale 1ps/10fs
`include "tb_check.svh"
module tb_tdc_rate;
  import tdc_pkg::*;
  import tb_codec_pkg::*;
  int checks = 0, failures = 0;

  logic clk160 = 1'b1, clk320_0 = 1'b1, clk320_90 = 1'b0, rst_n = 1'b0;
  logic [NCH-1:0] hit = '0;
  logic tck = 1'b0, tms = 1'b1, tdi = 1'b0, trst_n = 1'b1, tdo;
  logic asd_tdi, asd_shift, asd_capture, asd_update;
  logic [1:0] dout0, dout1;

  tdc_top dut (.clk160, .clk320_0, .clk320_90, .rst_n, .hit, .ttc(1'b0), .trigger(1'b0),
    .tck, .tms, .tdi, .trst_n, .tdo, .asd_tdi, .asd_tdo(1'b0), .asd_shift, .asd_capture,
    .asd_update, .dout0, .dout1);

  always #1562.5 clk320_0 = ~clk320_0;
  always #3125 clk160 = ~clk160;
  initial begin
    #781.25 clk320_90 = 1'b1;
    forever #1562.5 clk320_90 = ~clk320_90;
  end

  localparam realtime RUN = 400_000_000.0;   // 400 us of hits per rate

  initial begin
    #4_000_000_000;
    failures++;
    $display("watchdog");
    `TB_FINISH
  end

  realtime t_ref;
  function automatic logic [16:0] tcode(input realtime t);
    return 17'(longint'($floor((t - t_ref) / 781.25)));
  endfunction

  typedef struct {
    logic [31:0] v;
    realtime     t_done;
  } exp_t;
  exp_t    exp_q [NCH][$];
  realtime lat [$];
  int      nrx = 0, nsent = 0, nlost = 0;

  task automatic bin_safe();
    realtime ph;
    ph = $realtime - t_ref - $floor(($realtime - t_ref) / 781.25) * 781.25;
    if (ph < 80.0) #(100.0);
    else if (ph > 700.0) #(200.0);
  endtask

  // exponential interval with the given mean, in ps
  function automatic realtime expo(input realtime mean);
    real u;
    u = (real'($urandom_range(1, 1_000_000))) / 1_000_001.0;
    return -mean * $ln(u);
  endfunction

  task automatic channel_source(input int ch, input realtime mean, input realtime t_end);
    realtime tl, tt, gap;
    logic [16:0] d;
    exp_t e;
    while ($realtime < t_end) begin
      gap = expo(mean);
      #(gap);
      bin_safe();
      tl = $realtime; hit[ch] = 1'b1;
      #(real'($urandom_range(20_000, 200_000)));
      bin_safe();
      tt = $realtime; hit[ch] = 1'b0;
      d = tcode(tt) - tcode(tl);
      e.v = {5'(ch), MODE_PAIR, tcode(tl), (d > 17'd255) ? 8'd255 : d[7:0]};
      e.t_done = tt;
      exp_q[ch].push_back(e);
      nsent++;
      #50_000;
    end
  endtask

  // ---- receiver ----
  logic       rx_on = 0, aligned = 0, rd = 0;
  logic [9:0] sh = '0;
  int         nb = 0;
  logic [7:0] bytes [$];

  task automatic got_word(input logic [31:0] v);
    int ch;
    exp_t e;
    ch = int'(v[31:27]);
    `CHECK(ch < NCH && exp_q[ch].size() > 0, "received word was expected")
    if (ch >= NCH || exp_q[ch].size() == 0) return;
    // a word that is not the next one expected means hits were lost before it
    while (exp_q[ch].size() > 1 && exp_q[ch][0].v != v) begin
      void'(exp_q[ch].pop_front());
      nlost++;
    end
    e = exp_q[ch].pop_front();
    `CHECK_EQ(v, e.v, "pair word is a hit sent on its channel")
    lat.push_back($realtime - e.t_done);
    nrx++;
  endtask

  task automatic rx_bit(input logic b);
    logic [7:0] d; logic k, ok;
    logic [31:0] v;
    sh = {b, sh[9:1]};
    if (sh == to_bits("0011111010") || sh == to_bits("1100000101")) begin
      `CHECK(bytes.size() == 0 || !aligned, "comma only between words")
      rd = (sh == to_bits("0011111010"));
      aligned = 1; nb = 0; bytes.delete();
      return;
    end
    if (!aligned) return;
    nb++;
    if (nb < 10) return;
    nb = 0;
    dec(sh, rd, d, k, ok);
    `CHECK(ok && !k, "valid data symbol")
    bytes.push_back(d);
    if (bytes.size() == 4) begin
      v = {bytes[0], bytes[1], bytes[2], bytes[3]};
      got_word(v);
      bytes.delete();
    end
  endtask

  always @(posedge clk160) if (rx_on) begin
    #1;
    rx_bit(dout0[0]); rx_bit(dout1[0]); rx_bit(dout0[1]); rx_bit(dout1[1]);
  end

  task automatic run_rate(input int khz);
    realtime t_end;
    int n350, n0, nt;
    realtime worst;
    lat.delete();
    n0 = nsent;
    nlost = 0;
    t_end = $realtime + RUN;
    for (int ch = 0; ch < NCH; ch++) begin
      automatic int c = ch;
      fork channel_source(c, 1.0e9 / real'(khz) - 160_000.0, t_end); join_none
    end
    #(RUN + 20_000_000.0);
    nt = 0;
    foreach (exp_q[c]) begin
      nt += exp_q[c].size();
      exp_q[c].delete();
    end
    nlost += nt;
    if (khz <= 400) `CHECK_EQ(nlost, 0, "every hit received")
    else            `CHECK(100 * nlost < nsent - n0, "fewer than 1% of hits lost")
    n350 = 0; worst = 0;
    foreach (lat[i]) begin
      if (lat[i] <= 350_000.0) n350++;
      if (lat[i] > worst) worst = lat[i];
    end
    $display("  %0d kHz/channel: %0d hits (%0.2f MHz total), lost %0d, within 350 ns: %0.2f%%, max latency %0.1f ns",
             khz, nsent - n0, real'(nsent - n0) / (RUN / 1.0e6), nlost, 100.0 * n350 / lat.size(), worst / 1000.0);
    `CHECK_EQ(lat.size() + nlost, nsent - n0, "every hit received or counted lost")
    if (khz <= 400) `CHECK(100 * n350 > 99 * lat.size(), "more than 99% within 350 ns")
  endtask

  initial begin
    #2000 trst_n = 1'b0;
    #3000 trst_n = 1'b1;
    #(3125.0 * 9 + 1000 - 5000) rst_n = 1'b1;
    t_ref = 3125.0 * 9;
    rx_on = 1;
    #1_000_000;
    run_rate(200);
    run_rate(400);
    run_rate(660);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
