// Testbench for hit_buffer: writes go to successive slots, wrap after 16, the
// write pointer marks the oldest entry, and valid bits start cleared.
`include "tb_check.svh"
module tb_hit_buffer;
  import tdc_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0, wr_en = 1'b0;
  hit_t wr_hit = '0;
  hit_t entry [16];
  logic [15:0] valid;
  logic [3:0] wr_ptr;
  hit_t model [16];
  logic [15:0] mvalid = '0;
  int wp = 0;
  always #5 clk = ~clk;

  hit_buffer #(.DEPTH(16)) dut (.clk, .rst_n, .wr_en, .wr_hit, .entry, .valid, .wr_ptr);

  initial begin
    #500_000;
    failures++;
    $display("watchdog");
    `TB_FINISH
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    `CHECK_EQ(valid, 16'h0, "empty after reset")
    for (int i = 0; i < 200; i++) begin
      wr_en  = ($urandom_range(0, 2) != 0);
      wr_hit = hit_t'(27'($urandom));
      @(negedge clk);
      if (wr_en) begin
        model[wp] = wr_hit; mvalid[wp] = 1'b1; wp = (wp + 1) % 16;
      end
      `CHECK_EQ(wr_ptr, 4'(wp), "write pointer")
      `CHECK_EQ(valid, mvalid, "valid bits")
      for (int k = 0; k < 16; k++) if (mvalid[k]) `CHECK_EQ(entry[k], model[k], "entry")
    end
    `TB_FINISH
  end
endmodule
