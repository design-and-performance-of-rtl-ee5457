// Testbench for trigger_match_ctrl: triggers waiting in a FIFO model are
// served one at a time; the trigger request must come exactly when the
// bunch counter first reaches trigger BCID + window + 2, carry the trigger's
// BCID and event ID, and the next trigger must not start before eb_done.
`include "tb_check.svh"
module tb_trigger_match_ctrl;
  import tdc_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic tf_vld, tf_rdy, trig_req, eb_start, eb_done = 0;
  trig_t tf_data;
  logic [11:0] bunch_cnt = '0, window = 12'd5, trig_bcid;
  logic [7:0] trig_evid;
  trig_t q [$];
  int served = 0;
  logic busy_eb = 0;

  trigger_match_ctrl dut (.clk, .rst_n, .tf_vld, .tf_data, .tf_rdy, .bunch_cnt, .window,
    .trig_req, .trig_bcid, .trig_evid, .eb_start, .eb_done);

  assign tf_vld  = q.size() > 0;
  assign tf_data = (q.size() > 0) ? q[0] : '0;

  initial begin
    #5_000_000;
    failures++;
    $display("watchdog");
    `TB_FINISH
  end

  logic pending = 0;
  logic [11:0] pend_bcid;
  always @(posedge clk) if (rst_n && tf_vld && tf_rdy) begin
    `CHECK(!pending && !busy_eb, "FIFO read only when idle")
    pending <= 1;
    pend_bcid <= q[0].bcid;
    void'(q.pop_front());
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 60; i++) begin
      trig_t t;
      t.bcid = bunch_cnt - 12'($urandom_range(0, 3)) + 12'(i * 3);
      t.evid = 8'(i);
      q.push_back(t);
    end
    while (served < 60) begin
      @(negedge clk);
      // bunch counter advances by one every few cycles
      if ($urandom_range(0, 2) == 0) bunch_cnt = bunch_cnt + 1'b1;
      if (served == 30) window = 12'd0;
      #1;
      if (pending) begin
        logic [11:0] age;
        age = bunch_cnt - pend_bcid;
        `CHECK_EQ(trig_req, {1'b0, age} >= {1'b0, window} + 13'd2, "request exactly when window has passed")
      end else begin
        `CHECK(!trig_req, "no request without a trigger")
      end
      if (trig_req) begin
        `CHECK_EQ(trig_evid, 8'(served), "event order")
        `CHECK_EQ(trig_bcid, pend_bcid, "trigger BCID passed on")
        `CHECK(!busy_eb, "one event at a time")
        `CHECK(eb_start, "event builder started with the request")
        served++;
        busy_eb = 1;
        pending = 0;
        fork begin
          repeat ($urandom_range(1, 30)) @(negedge clk);
          eb_done = 1; @(negedge clk); eb_done = 0; busy_eb = 0;
        end join_none
      end
    end
    `TB_FINISH
  end
endmodule
