// Testbench for channel_mux: 24 queues of random hits offered with random
// readiness downstream; every hit must come out once, in per-channel order,
// with its channel ID, and each of six channels that always have data must be
// served at least once every 24 transfers (round robin).
`include "tb_check.svh"
module tb_channel_mux;
  import tdc_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [23:0] in_vld, in_rdy;
  hit_t in_hit [24];
  logic out_vld, out_rdy;
  rdo_word_t out_word;
  hit_t q [24][$];
  int since_served [24];
  int transfers = 0;

  channel_mux #(.N(24)) dut (.clk, .rst_n, .in_vld, .in_hit, .in_rdy, .out_vld, .out_word, .out_rdy);

  task automatic drive();
    for (int c = 0; c < 24; c++) begin
      in_vld[c] = q[c].size() > 0;
      in_hit[c] = (q[c].size() > 0) ? q[c][0] : '0;
    end
  endtask

  initial begin
    #2_000_000;
    failures++;
    $display("watchdog");
    `TB_FINISH
  end

  initial begin
    out_rdy = 0;
    drive();
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 20000; cyc++) begin
      // channels 0-5 always busy, others random
      for (int c = 0; c < 24; c++)
        if ((c <= 5 && q[c].size() < 2) || ($urandom_range(0, 99) < 3)) begin
          hit_t h;
          h.mode = ($urandom_range(0, 1) != 0) ? MODE_PAIR : MODE_LEAD;
          h.t = 17'($urandom); h.width = 8'($urandom);
          q[c].push_back(h);
        end
      out_rdy = ($urandom_range(0, 9) != 0);
      drive();
      #1;
      if (out_vld && out_rdy) begin
        int c;
        hit_t h;
        c = out_word.four ? int'(out_word.data[31:27]) : int'(out_word.data[23:19]);
        `CHECK(c < 24 && q[c].size() > 0 && in_rdy[c], "channel id / ready")
        if (c < 24 && q[c].size() > 0) begin
          h = q[c].pop_front();
          `CHECK_EQ(out_word, make_hit_word(5'(c), h), "word content")
          for (int k = 0; k < 24; k++) since_served[k]++;
          since_served[c] = 0;
          transfers++;
        end
        for (int k = 0; k <= 5; k++) `CHECK(since_served[k] <= 24, "round robin serves a busy channel")
      end else begin
        `CHECK_EQ(in_rdy, 24'h0, "no ready without transfer")
      end
      @(negedge clk);
    end
    `CHECK(transfers > 5000, "traffic")
    `TB_FINISH
  end
endmodule
