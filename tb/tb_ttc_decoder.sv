// Testbench for ttc_decoder: sends random commands (start bit 1 + 2 bits, one
// bit per bunch crossing) with random idle gaps and checks that exactly the
// matching one-cycle pulse appears, once, for each.
`include "tb_check.svh"
module tb_ttc_decoder;
  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0, ttc = 1'b0, bc_en;
  logic trig, bcr, evrst, grst;
  logic [1:0] ph = '0;
  int cnt [4];
  always #5 clk = ~clk;
  always @(posedge clk) ph <= ph + 1'b1;
  assign bc_en = (ph == 2'd3);

  ttc_decoder dut (.clk, .rst_n, .bc_en, .ttc, .trig, .bcr, .evrst, .grst);

  always @(posedge clk) if (rst_n) begin
    if (trig)  cnt[0]++;
    if (bcr)   cnt[1]++;
    if (evrst) cnt[2]++;
    if (grst)  cnt[3]++;
    `CHECK(32'(trig) + 32'(bcr) + 32'(evrst) + 32'(grst) <= 1, "at most one pulse")
  end

  initial begin
    #2_000_000;
    failures++;
    $display("watchdog");
    `TB_FINISH
  end

  task automatic send_bit(input logic b);
    // change the line right after a sampling edge
    do @(negedge clk); while (!bc_en);
    @(posedge clk);
    #1 ttc = b;
  endtask

  initial begin
    int exp [4];
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 500; i++) begin
      int cmd;
      logic [1:0] code;
      cmd = $urandom_range(0, 3);
      // 0 trigger 00, 1 bcr 10, 2 evrst 01, 3 grst 11
      code = (cmd == 0) ? 2'b00 : (cmd == 1) ? 2'b10 : (cmd == 2) ? 2'b01 : 2'b11;
      for (int c = 0; c < 4; c++) exp[c] = cnt[c];
      exp[cmd]++;
      send_bit(1'b1); send_bit(code[1]); send_bit(code[0]);
      send_bit(1'b0);
      repeat ($urandom_range(0, 3)) send_bit(1'b0);
      repeat (2) @(posedge clk);
      #1;
      for (int c = 0; c < 4; c++) `CHECK_EQ(cnt[c], exp[c], "command decoded")
    end
    `TB_FINISH
  end
endmodule
