// Testbench for trigger_interface: bc_en every fourth cycle, the bunch counter
// counting bunch crossings and cleared by BCR, triggers from the TTC pulse and
// from the trigger pin (one per rising edge), each stamped with
// (bunch count - offset) mod 4096 and an event ID that counts up and is cleared
// by the event reset, and trig_ovf when the FIFO refuses a trigger.
`include "tb_check.svh"
module tb_trigger_interface;
  import tdc_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic bcr = 0, evrst = 0, ttc_trig = 0, trig_pin = 0, bc_en, tf_vld, tf_rdy = 1, trig_ovf;
  logic [11:0] trig_offset = 12'd100, bunch_cnt;
  trig_t tf_data;
  int model_bc = 0, model_ev = 0, cyc = 0, ntrig = 0, novf = 0;

  trigger_interface dut (.clk, .rst_n, .bcr, .evrst, .ttc_trig, .trig_pin, .trig_offset,
    .bc_en, .bunch_cnt, .tf_vld, .tf_data, .tf_rdy, .trig_ovf);

  initial begin
    #5_000_000;
    failures++;
    $display("watchdog");
    `TB_FINISH
  end

  // reference model, evaluated before each rising edge
  always @(negedge clk) if (rst_n) begin
    `CHECK_EQ(bunch_cnt, 12'(model_bc), "bunch counter")
    `CHECK_EQ(bc_en, (cyc % 4) == 3, "bc_en every fourth cycle")
    if (tf_vld) begin
      `CHECK_EQ(tf_data.bcid, 12'(model_bc - int'(trig_offset)), "trigger BCID")
      `CHECK_EQ(tf_data.evid, 8'(model_ev), "event ID")
    end
  end
  always @(posedge clk) if (rst_n) begin
    if (tf_vld) begin ntrig++; model_ev++; end
    if (evrst) model_ev = 0;
    if (bcr) model_bc = 0; else if (bc_en) model_bc++;
    cyc++;
  end
  always @(posedge clk) if (rst_n && trig_ovf) novf++;

  initial begin
    int pin_edges = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 20000; i++) begin
      @(negedge clk);
      ttc_trig = ($urandom_range(0, 40) == 0);
      bcr = ($urandom_range(0, 3000) == 0);
      evrst = ($urandom_range(0, 2000) == 0);
      if ((cyc % 4) == 0 && $urandom_range(0, 20) == 0) begin
        trig_pin = ~trig_pin;
        if (trig_pin) pin_edges++;
      end
      if (i == 10000) trig_offset = 12'd7;
    end
    ttc_trig = 0;
    // FIFO full: a trigger must be flagged as lost
    @(negedge clk); tf_rdy = 0; ttc_trig = 1;
    @(negedge clk); ttc_trig = 0; tf_rdy = 1;
    @(negedge clk);
    `CHECK_EQ(novf, 1, "trigger lost when FIFO full")
    `CHECK(ntrig > 500 && pin_edges > 50, "triggers from TTC and pin")
    `TB_FINISH
  end
endmodule
