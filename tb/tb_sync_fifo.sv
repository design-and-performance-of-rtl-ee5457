// Testbench for sync_fifo at the channel-FIFO depth (4) and the readout/trigger
// depth (16): random writes and reads against a queue model, with full,
// empty, count and the overflow flag checked every cycle.
`include "tb_check.svh"
module tb_sync_fifo;
  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic        wv4, wr4, rv4, rr4, ov4, wv16, wr16, rv16, rr16, ov16;
  logic [26:0] wd4, rd4;
  logic [33:0] wd16, rd16;
  logic [2:0]  c4;
  logic [4:0]  c16;
  logic [26:0] q4 [$];
  logic [33:0] q16 [$];
  int pushes4, pops4;

  sync_fifo #(.W(27), .DEPTH(4)) d4 (.clk, .rst_n, .wr_vld(wv4), .wr_data(wd4), .wr_rdy(wr4),
    .rd_vld(rv4), .rd_data(rd4), .rd_rdy(rr4), .count(c4), .overflow(ov4));
  sync_fifo #(.W(34), .DEPTH(16)) d16 (.clk, .rst_n, .wr_vld(wv16), .wr_data(wd16), .wr_rdy(wr16),
    .rd_vld(rv16), .rd_data(rd16), .rd_rdy(rr16), .count(c16), .overflow(ov16));

  initial begin
    #1_000_000;
    failures++;
    $display("watchdog");
    `TB_FINISH
  end

  initial begin
    logic exp_ov4, exp_ov16;
    wv4 = 0; rr4 = 0; wv16 = 0; rr16 = 0; wd4 = '0; wd16 = '0;
    exp_ov4 = 0; exp_ov16 = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 20000; i++) begin
      @(negedge clk);
      `CHECK_EQ(c4, 3'(q4.size()), "count 4")
      `CHECK_EQ(wr4, q4.size() < 4, "wr_rdy 4")
      `CHECK_EQ(rv4, q4.size() > 0, "rd_vld 4")
      `CHECK_EQ(ov4, exp_ov4, "overflow 4")
      if (q4.size() > 0) `CHECK_EQ(rd4, q4[0], "data 4")
      `CHECK_EQ(c16, 5'(q16.size()), "count 16")
      `CHECK_EQ(wr16, q16.size() < 16, "wr_rdy 16")
      if (q16.size() > 0) `CHECK_EQ(rd16, q16[0], "data 16")
      `CHECK_EQ(ov16, exp_ov16, "overflow 16")
      // phases of mostly-writing and mostly-reading
      wv4  = ($urandom_range(0, 99) < ((i / 500) % 2 ? 70 : 30));
      rr4  = ($urandom_range(0, 99) < ((i / 500) % 2 ? 30 : 70));
      wv16 = ($urandom_range(0, 99) < ((i / 700) % 2 ? 75 : 25));
      rr16 = ($urandom_range(0, 99) < ((i / 700) % 2 ? 25 : 75));
      wd4  = 27'($urandom);
      wd16 = {2'($urandom), 32'($urandom)};
      @(posedge clk);
      exp_ov4  = wv4 && q4.size() == 4;
      exp_ov16 = wv16 && q16.size() == 16;
      begin
        logic do_rd4, do_wr4, do_rd16, do_wr16;
        do_rd4 = rr4 && q4.size() > 0;   do_wr4 = wv4 && q4.size() < 4;
        do_rd16 = rr16 && q16.size() > 0; do_wr16 = wv16 && q16.size() < 16;
        if (do_rd4) begin void'(q4.pop_front()); pops4++; end
        if (do_wr4) begin q4.push_back(wd4); pushes4++; end
        if (do_rd16) void'(q16.pop_front());
        if (do_wr16) q16.push_back(wd16);
      end
    end
    `CHECK(pushes4 > 1000 && pops4 > 1000, "traffic")
    `TB_FINISH
  end
endmodule
