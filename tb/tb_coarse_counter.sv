// Testbench for coarse_counter: the rising copy counts every 320 MHz period,
// the falling copy equals it in the second half period and lags by one in the
// first, and a bunch-counter reset pulse restarts the count at 0 once.
`timescale 1ps/1ps
`include "tb_check.svh"
module tb_coarse_counter;
  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0, bcr = 1'b0;
  logic [14:0] cnt_r, cnt_f;
  int exp_r;

  coarse_counter #(.CW(15)) dut (.clk320_0(clk), .rst_n, .bcr, .cnt_r, .cnt_f);

  always #1600 clk = ~clk;

  initial begin
    #400_000_000;
    failures++;
    $display("watchdog");
    `TB_FINISH
  end

  initial begin
    #5000 rst_n = 1'b1;
    @(posedge clk); #1;
    exp_r = cnt_r;
    for (int i = 0; i < 40000; i++) begin
      @(posedge clk); #1;
      exp_r = (exp_r + 1) % 32768;
      `CHECK_EQ(cnt_r, 15'(exp_r), "cnt_r increments")
      `CHECK_EQ(cnt_f, 15'(exp_r - 1), "cnt_f lags in first half")
      @(negedge clk); #1;
      `CHECK_EQ(cnt_f, cnt_r, "cnt_f equals cnt_r in second half")
    end
    // bcr: two rising edges long, as from the 160 MHz domain
    @(negedge clk); bcr = 1'b1;
    @(posedge clk); #1;
    `CHECK_EQ(cnt_r, 15'd0, "bcr clears counter")
    @(negedge clk); #1;
    `CHECK_EQ(cnt_f, 15'd0, "falling copy follows")
    @(posedge clk); #1;
    `CHECK_EQ(cnt_r, 15'd1, "bcr acts once per pulse")
    bcr = 1'b0;
    @(posedge clk); #1;
    `CHECK_EQ(cnt_r, 15'd2, "counting resumes")
    `TB_FINISH
  end
endmodule
