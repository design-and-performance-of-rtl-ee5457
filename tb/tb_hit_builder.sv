// Testbench for hit_builder: edge mode (separate leading/trailing hits, same-
// cycle edges, back-pressure and loss), pair mode (width, width_sel
// truncation, saturation, modulo-2^17 wrap, unpaired edges). Expected hits
// are computed by the testbench from the edge times it drives.
`include "tb_check.svh"
module tb_hit_builder;
  import tdc_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic pair_mode = 1'b0;
  logic [3:0] width_sel = '0;
  logic lead_vld = 0, trail_vld = 0, out_vld, out_rdy = 1, lost;
  logic [16:0] lead_t = '0, trail_t = '0;
  hit_t out_hit;
  hit_t got [$];
  int lost_cnt = 0;

  hit_builder dut (.clk, .rst_n, .pair_mode, .width_sel, .lead_vld, .lead_t, .trail_vld, .trail_t,
                   .out_vld, .out_hit, .out_rdy, .lost);

  always @(posedge clk) begin
    if (rst_n && out_vld && out_rdy) got.push_back(out_hit);
    if (rst_n && lost) lost_cnt++;
  end

  initial begin
    #200_000;
    failures++;
    $display("watchdog");
    `TB_FINISH
  end

  task automatic edge_in(input logic l, input logic [16:0] lt_, input logic tr, input logic [16:0] tt_);
    @(negedge clk);
    lead_vld = l; lead_t = lt_; trail_vld = tr; trail_t = tt_;
    @(negedge clk);
    lead_vld = 0; trail_vld = 0;
  endtask

  task automatic expect_hit(input hit_mode_e m, input logic [16:0] t, input logic [7:0] w, input string msg);
    repeat (3) @(negedge clk);
    `CHECK(got.size() > 0, msg)
    if (got.size() > 0) begin
      hit_t h = got.pop_front();
      `CHECK_EQ(h.mode, m, {msg, " mode"})
      `CHECK_EQ(h.t, t, {msg, " time"})
      `CHECK_EQ(h.width, w, {msg, " width"})
    end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    // ---- edge mode ----
    edge_in(1, 17'd1000, 0, '0);  expect_hit(MODE_LEAD, 17'd1000, 8'd0, "edge lead");
    edge_in(0, '0, 1, 17'd1040);  expect_hit(MODE_TRAIL, 17'd1040, 8'd0, "edge trail");
    edge_in(1, 17'd2000, 1, 17'd2003);
    expect_hit(MODE_LEAD, 17'd2000, 8'd0, "same-cycle lead first");
    expect_hit(MODE_TRAIL, 17'd2003, 8'd0, "same-cycle trail second");
    // back-pressure: two leading edges while blocked -> one lost
    out_rdy = 0;
    edge_in(1, 17'd3000, 0, '0);
    edge_in(1, 17'd3100, 0, '0);
    @(negedge clk);
    `CHECK_EQ(lost_cnt, 1, "lost while blocked")
    out_rdy = 1;
    expect_hit(MODE_LEAD, 17'd3100, 8'd0, "newest kept");
    `CHECK_EQ(got.size(), 0, "no extra hits")
    // ---- pair mode ----
    pair_mode = 1;
    edge_in(1, 17'd5000, 0, '0);
    edge_in(0, '0, 1, 17'd5064);  expect_hit(MODE_PAIR, 17'd5000, 8'd64, "pair width");
    width_sel = 4'd2;
    edge_in(1, 17'd6000, 0, '0);
    edge_in(0, '0, 1, 17'd6401);  expect_hit(MODE_PAIR, 17'd6000, 8'd100, "pair width >>2");
    width_sel = 4'd0;
    edge_in(1, 17'd7000, 0, '0);
    edge_in(0, '0, 1, 17'd7300);  expect_hit(MODE_PAIR, 17'd7000, 8'd255, "pair saturates");
    edge_in(1, 17'h1FFF0, 0, '0);
    edge_in(0, '0, 1, 17'h00010); expect_hit(MODE_PAIR, 17'h1FFF0, 8'd32, "pair wraps");
    // trailing edge without a leading edge is dropped
    edge_in(0, '0, 1, 17'd8000);
    repeat (3) @(negedge clk);
    `CHECK_EQ(got.size(), 0, "lone trailing dropped")
    // trailing of one pulse and leading of the next in the same cycle
    edge_in(1, 17'd9000, 0, '0);
    edge_in(1, 17'd9050, 1, 17'd9040); expect_hit(MODE_PAIR, 17'd9000, 8'd40, "pair then next lead");
    edge_in(0, '0, 1, 17'd9060); expect_hit(MODE_PAIR, 17'd9050, 8'd10, "second pair");
    // narrow pulse: both edges in one cycle
    edge_in(1, 17'd9500, 1, 17'd9502); expect_hit(MODE_PAIR, 17'd9500, 8'd2, "narrow pulse");
    `CHECK_EQ(got.size(), 0, "no extra pair hits")
    `TB_FINISH
  end
endmodule
