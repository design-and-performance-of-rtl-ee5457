// Testbench for trigger_match. The testbench keeps its own ring-buffer model
// (16 slots, write pointer), fills it with random real and fake hits, issues
// trigger requests with random BCID and window, and compares the hits sent
// out with the list it computes: in window, not fake, oldest first. It also
// applies back-pressure, writes during matching (overwriting a matched hit
// must raise ovf and drop the hit), and checks that busy falls when done.
`include "tb_check.svh"
module tb_trigger_match;
  import tdc_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  hit_t entry [16];
  logic [15:0] valid = '0;
  logic [3:0] wr_ptr = '0;
  logic wr_en = 0, trig_req = 0, out_vld, out_rdy = 1, busy, ovf;
  logic [11:0] trig_bcid = '0, window = '0;
  hit_t out_hit;
  hit_t got [$];
  int ovf_cnt = 0;

  trigger_match #(.DEPTH(16)) dut (.clk, .rst_n, .entry, .valid, .wr_ptr, .wr_en, .trig_req,
    .trig_bcid, .window, .out_vld, .out_hit, .out_rdy, .busy, .ovf);

  always @(posedge clk) begin
    if (rst_n && out_vld && out_rdy) got.push_back(out_hit);
    if (rst_n && ovf) ovf_cnt++;
  end

  initial begin
    #5_000_000;
    failures++;
    $display("watchdog");
    `TB_FINISH
  end

  function automatic hit_t rand_hit(input logic [11:0] bc_base);
    hit_t h;
    h.mode  = ($urandom_range(0, 5) == 0) ? MODE_FAKE : hit_mode_e'($urandom_range(0, 1) ? 2'b11 : 2'b00);
    h.t     = {12'(bc_base + 12'($urandom_range(0, 40))), 5'($urandom)};
    h.width = 8'($urandom);
    return h;
  endfunction

  initial begin
    int n_matched_total = 0;
    for (int i = 0; i < 16; i++) entry[i] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int trial = 0; trial < 300; trial++) begin
      hit_t exp_q [$];
      logic [11:0] base;
      int nfill;
      exp_q.delete();
      base = (trial % 7 == 0) ? 12'hFF0 : 12'($urandom);   // some trials wrap at 4096
      nfill = $urandom_range(0, 20);
      for (int n = 0; n < nfill; n++) begin
        entry[wr_ptr] = rand_hit(base);
        valid[wr_ptr] = 1'b1;
        wr_ptr = wr_ptr + 1'b1;
      end
      @(negedge clk);
      trig_bcid = base + 12'($urandom_range(0, 20));
      window    = 12'($urandom_range(1, 24));
      // expected list, oldest first
      for (int k = 0; k < 16; k++) begin
        int idx;
        logic [11:0] d;
        idx = (int'(wr_ptr) + k) % 16;
        d = entry[idx].t[16:5] - trig_bcid;
        if (valid[idx] && entry[idx].mode != MODE_FAKE && d < window) exp_q.push_back(entry[idx]);
      end
      n_matched_total += exp_q.size();
      got.delete();
      trig_req = 1;
      @(negedge clk);
      trig_req = 0;
      if (trial % 10 == 3 && exp_q.size() > 0) begin
        // overwrite the oldest slot while it is still matched and blocked
        out_rdy = 0;
        @(negedge clk);
        `CHECK(busy, "busy while matched hits wait")
        if (entry[wr_ptr] == exp_q[0]) begin
          void'(exp_q.pop_front());
          wr_en = 1;
          @(negedge clk);
          entry[wr_ptr] = rand_hit(base);
          wr_ptr = wr_ptr + 1'b1;
          wr_en = 0;
          @(negedge clk);
          `CHECK_EQ(ovf_cnt, 1, "overwrite of matched hit flagged")
          ovf_cnt = 0;
        end
        out_rdy = 1;
      end
      while (busy) begin
        out_rdy = ($urandom_range(0, 3) != 0);
        @(negedge clk);
      end
      out_rdy = 1;
      @(negedge clk);
      `CHECK_EQ(got.size(), exp_q.size(), "number of matched hits")
      for (int k = 0; k < exp_q.size() && k < got.size(); k++)
        `CHECK_EQ(got[k], exp_q[k], "matched hit, oldest first")
    end
    `CHECK(n_matched_total > 300, "enough matches")
    `TB_FINISH
  end
endmodule
