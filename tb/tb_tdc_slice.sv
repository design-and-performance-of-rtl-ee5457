// Testbench for tdc_slice. The testbench models the 320 MHz clocks and the
// coarse counters (period scaled to 3200 ps, so one fine bin is 800 ps) and
// places hit edges at random times away from the bin boundaries. The expected
// time is floor(t / 800 ps) mod 2^17, counted from the first counted clock
// edge, which tests the fine code and the coarse-copy selection in all four
// quarters and across counter wrap-around.
`timescale 1ps/1ps
`include "tb_check.svh"
module tb_tdc_slice;
  int checks = 0, failures = 0;
  logic clk0 = 1'b1, clk90 = 1'b0, rst_n = 1'b0, hit = 1'b0;
  logic [14:0] cnt_r = '0, cnt_f = '0;
  logic [16:0] t;
  logic tgl, tgl_prev;
  longint t0;
  int qcount [4];

  tdc_slice #(.CW(15)) dut (.hit_edge(hit), .rst_n, .clk320_0(clk0), .clk320_90(clk90),
                            .cnt_r, .cnt_f, .time_o(t), .cap_tgl(tgl));

  // clk0 rises at k*3200, clk90 at k*3200+800
  initial forever begin
    #1600 clk0 = ~clk0;
  end
  initial begin
    #800 clk90 = 1'b1;
    forever #1600 clk90 = ~clk90;
  end
  always @(posedge clk0) if (rst_n) cnt_r <= cnt_r + 1'b1;
  always @(negedge clk0) cnt_f <= cnt_r;

  initial begin
    #1_500_000_000;
    failures++;
    $display("watchdog");
    `TB_FINISH
  end

  initial begin
    longint now, rel, expv, ph;
    #(3200*4 - 100) rst_n = 1'b1;      // first counted edge at 3200*4
    t0 = 3200*3;   // counter value 1 during the first counted period
    for (int i = 0; i < 3000; i++) begin
      // random gap; sometimes a long one to cross the counter wrap
      if (i % 500 == 499) #(longint'(3200) * 30000);
      #(100 + $urandom_range(0, 20000));
      now = $time;
      ph = now % 800;
      if (ph < 60 || ph > 740) #(200);
      tgl_prev = tgl;
      hit = 1'b1;
      now = $time;
      #1;
      rel  = now - t0;
      expv = (rel / 800) % 131072;
      qcount[expv % 4]++;
      `CHECK_EQ(t, 17'(expv), "captured time")
      `CHECK(tgl != tgl_prev, "capture toggle")
      #(300 + $urandom_range(0, 3000)) hit = 1'b0;
    end
    for (int q = 0; q < 4; q++) `CHECK(qcount[q] > 100, "every fine bin hit")
    `TB_FINISH
  end
endmodule
