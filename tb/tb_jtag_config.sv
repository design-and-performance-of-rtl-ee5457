// Testbench for jtag_config: TAP reset selects IDCODE, the IDCODE reads back,
// the configuration register comes out of reset with its defaults, a written
// configuration appears on cfg after Update-DR and reads back, the status
// register shows the monitoring counts, BYPASS is one bit long, and the ASD
// instruction routes TDI/TDO to the ASD chain with its strobes.
`timescale 1ns/1ps
`include "tb_check.svh"
module tb_jtag_config;
  import tdc_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  always #3.125 clk = ~clk;
  logic tck = 0, tms = 1, tdi = 0, trst_n = 1, tdo;
  logic [4:0] mon_lost = 0;
  logic mon_trig_lost = 0, mon_event = 0;
  logic asd_tdi, asd_tdo, asd_shift, asd_capture, asd_update;
  cfg_t cfg;
  logic [7:0] asd_chain = 8'hA5;   // testbench model of an 8-bit ASD chain
  int asd_shifts = 0, asd_updates = 0;

  jtag_config dut (.clk, .rst_n, .tck, .tms, .tdi, .trst_n, .tdo, .cfg, .mon_lost, .mon_trig_lost,
    .mon_event, .asd_tdi, .asd_tdo, .asd_shift, .asd_capture, .asd_update);

  assign asd_tdo = asd_chain[0];
  always @(posedge tck) begin
    if (asd_shift) begin asd_chain <= {asd_tdi, asd_chain[7:1]}; asd_shifts++; end
    if (asd_update) asd_updates++;
  end

  `include "tb_jtag_task.svh"

  initial begin
    #2_000_000;
    failures++;
    $display("watchdog");
    `TB_FINISH
  end

  initial begin
    logic [127:0] o;
    cfg_t c;
    #5 trst_n = 0;
    #20 trst_n = 1; rst_n = 1;
    `CHECK_EQ(cfg, CFG_DEFAULT, "configuration defaults")
    jtag_reset();
    jtag_dr(32, '0, o);
    `CHECK_EQ(o[31:0], 32'h1DC0_0001, "IDCODE after reset")
    // read default configuration
    jtag_ir(4'b0010);
    jtag_dr(CFG_BITS, '0, o);
    `CHECK_EQ(o[CFG_BITS-1:0], CFG_DEFAULT, "default configuration read")
    // that read shifted zeros in: configuration now all zero
    `CHECK_EQ(cfg, cfg_t'('0), "configuration written by Update-DR")
    c = cfg_t'({$urandom, $urandom, $urandom});
    jtag_dr(CFG_BITS, 128'(c), o);
    `CHECK_EQ(cfg, c, "configuration written")
    jtag_dr(CFG_BITS, 128'(c), o);
    `CHECK_EQ(o[CFG_BITS-1:0], c, "configuration read back")
    // status counters
    repeat (7) begin @(negedge clk); mon_lost = 5'd3; @(negedge clk); mon_lost = 0; end
    repeat (3) begin @(negedge clk); mon_trig_lost = 1; @(negedge clk); mon_trig_lost = 0; end
    repeat (5) begin @(negedge clk); mon_event = 1; @(negedge clk); mon_event = 0; end
    jtag_ir(4'b0011);
    jtag_dr(32, '0, o);
    `CHECK_EQ(o[31:0], {8'd5, 8'd3, 16'd21}, "status counters")
    `CHECK_EQ(cfg, c, "status read leaves configuration alone")
    // bypass: one-bit delay
    jtag_ir(4'b1111);
    jtag_dr(9, 128'h1B3, o);
    `CHECK_EQ(o[8:1], 8'hB3, "bypass delays by one bit")
    `CHECK_EQ(o[0], 1'b0, "bypass captures 0")
    // ASD chain
    jtag_ir(4'b0100);
    jtag_dr(8, 128'h3C, o);
    `CHECK_EQ(o[7:0], 8'hA5, "ASD chain read through TDO")
    `CHECK_EQ(asd_chain, 8'h3C, "ASD chain written from TDI")
    `CHECK_EQ(asd_shifts, 8, "ASD shift strobes")
    `CHECK_EQ(asd_updates, 1, "ASD update strobe")
    // TAP reset returns to IDCODE
    jtag_reset();
    jtag_dr(32, '0, o);
    `CHECK_EQ(o[31:0], 32'h1DC0_0001, "IDCODE after TAP reset")
    `TB_FINISH
  end
endmodule
