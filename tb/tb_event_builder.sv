// Testbench for event_builder. Each of the 24 channel models holds a number of
// matched hits that trickle into its FIFO over time while its busy flag is
// high, as trigger matching would do. For every event the output must be the
// header (event ID, BCID), then the hits of channel 0, 1, ... 23 in order with
// their channel IDs, then a trailer with the hit count, the error flags seen
// during the event (or between the previous event and this one) and the
// comma request; the readout FIFO side applies random back-pressure.
`include "tb_check.svh"
module tb_event_builder;
  import tdc_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic start = 0, out_vld, out_rdy = 1, idle, done;
  logic err_ovf = 0, err_trig = 0, err_lost = 0;
  logic [11:0] bcid = '0;
  logic [7:0] evid = '0;
  logic [23:0] ch_vld, ch_rdy, ch_busy;
  hit_t ch_hit [24];
  rdo_word_t out_word;
  hit_t fifo [24][$];
  hit_t pend [24][$];
  rdo_word_t got [$];

  event_builder #(.N(24)) dut (.clk, .rst_n, .start, .bcid, .evid, .ch_vld, .ch_hit, .ch_rdy,
    .ch_busy, .err_ovf, .err_trig, .err_lost, .out_vld, .out_word, .out_rdy, .idle, .done);

  task automatic drive();
    for (int c = 0; c < 24; c++) begin
      ch_vld[c]  = fifo[c].size() > 0;
      ch_hit[c]  = (fifo[c].size() > 0) ? fifo[c][0] : '0;
      ch_busy[c] = pend[c].size() > 0;
    end
  endtask

  // channel models: pops on ch_rdy, moves pending matches into the FIFO
  always @(posedge clk) if (rst_n) begin
    if (out_vld && out_rdy) got.push_back(out_word);
    for (int c = 0; c < 24; c++) begin
      if (ch_vld[c] && ch_rdy[c]) void'(fifo[c].pop_front());
      if (pend[c].size() > 0 && fifo[c].size() < 4 && $urandom_range(0, 2) == 0)
        fifo[c].push_back(pend[c].pop_front());
    end
  end

  initial begin
    #20_000_000;
    failures++;
    $display("watchdog");
    `TB_FINISH
  end

  initial begin
    drive();
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int ev = 0; ev < 40; ev++) begin
      rdo_word_t exp [$];
      int total;
      logic inj_err;
      exp.delete();
      total = 0;
      bcid = 12'($urandom); evid = 8'(ev);
      exp.push_back(make_header(evid, bcid));
      for (int c = 0; c < 24; c++) begin
        int n;
        n = ($urandom_range(0, 3) == 0) ? $urandom_range(1, 6) : 0;
        for (int k = 0; k < n; k++) begin
          hit_t h;
          h.mode = (ev % 2) ? MODE_PAIR : MODE_TRAIL;
          h.t = 17'($urandom); h.width = 8'($urandom);
          pend[c].push_back(h);
          exp.push_back(make_hit_word(5'(c), h));
          total++;
        end
      end
      inj_err = (ev % 5 == 2);
      exp.push_back(make_trailer({2'b00, ev % 7 == 4, inj_err}, evid, 10'(total)));
      got.delete();
      // a lost trigger between events is reported in the next trailer
      if (ev % 7 == 4) begin err_trig = 1; @(negedge clk); drive(); err_trig = 0; end
      @(negedge clk); drive(); start = 1;
      @(negedge clk); drive(); start = 0;
      `CHECK(!idle, "busy after start")
      if (inj_err) err_ovf = 1;
      @(negedge clk); drive(); err_ovf = 0;
      while (!idle) begin
        out_rdy = ($urandom_range(0, 3) != 0);
        @(negedge clk); drive();
      end
      out_rdy = 1;
      `CHECK_EQ(got.size(), exp.size(), "words per event")
      for (int k = 0; k < exp.size() && k < got.size(); k++) `CHECK_EQ(got[k], exp[k], "event word")
      repeat ($urandom_range(0, 5)) begin @(negedge clk); drive(); end
    end
    `TB_FINISH
  end
endmodule
