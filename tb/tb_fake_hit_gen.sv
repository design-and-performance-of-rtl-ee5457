// Testbench for fake_hit_gen: with a bunch-crossing strobe every 4 cycles the
// fake strobe must come every 4 x period cycles, be one cycle wide, and stop
// when disabled or when the period is 0.
`include "tb_check.svh"
module tb_fake_hit_gen;
  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0, enable = 1'b1, bc_en, fake;
  logic [11:0] period = 12'd5;
  logic [1:0] ph = '0;
  always #5 clk = ~clk;
  always @(posedge clk) ph <= ph + 1'b1;
  assign bc_en = (ph == 2'd3);

  fake_hit_gen dut (.clk, .rst_n, .enable, .bc_en, .period, .fake);

  initial begin
    #500_000;
    failures++;
    $display("watchdog");
    `TB_FINISH
  end

  task automatic measure(input int p);
    int last, n, cyc;
    period = 12'(p);
    last = -1; n = 0; cyc = 0;
    // let the counter settle
    repeat (4 * p + 8) @(posedge clk);
    while (n < 6) begin
      @(posedge clk); #1; cyc++;
      if (fake) begin
        if (last >= 0) `CHECK_EQ(cyc - last, 4 * p, "fake period")
        last = cyc; n++;
        @(posedge clk); #1; cyc++;
        `CHECK(!fake, "one-cycle strobe")
      end
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    measure(5);
    measure(1);
    measure(37);
    enable = 0;
    begin
      int seen = 0;
      repeat (400) begin @(posedge clk); #1; if (fake) seen++; end
      `CHECK_EQ(seen, 0, "disabled")
      enable = 1; period = 0;
      repeat (400) begin @(posedge clk); #1; if (fake) seen++; end
      `CHECK_EQ(seen, 0, "period 0 is off")
    end
    `TB_FINISH
  end
endmodule
