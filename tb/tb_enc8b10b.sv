// Testbench for enc8b10b: compares all 256 data bytes and K28.5, in both
// running disparities, with the reference encoder of tb_codec_pkg (explicit
// RD-/RD+ tables), checks a few published code words directly, and checks
// the code properties: disparity 0 or +-2 matching the change of running
// disparity, at most five equal bits in a row, and no comma in data.
`include "tb_check.svh"
module tb_enc8b10b;
  import tb_codec_pkg::*;
  int checks = 0, failures = 0;
  logic [7:0] d;
  logic k, rd_in, rd_out;
  logic [9:0] code;

  enc8b10b dut (.d, .k, .rd_in, .code, .rd_out);

  initial begin
    #1_000_000;
    failures++;
    $display("watchdog");
    `TB_FINISH
  end

  function automatic logic [9:0] lit(input logic [9:0] msb_a);   // "abcdeifghj" literal
    logic [9:0] b;
    for (int i = 0; i < 10; i++) b[i] = msb_a[9-i];
    return b;
  endfunction

  task automatic apply(input logic [7:0] dd, input logic kk, input logic rr);
    d = dd; k = kk; rd_in = rr; #1;
  endtask

  initial begin
    // published code words
    apply(8'hBC, 1, 0); `CHECK_EQ(code, lit(10'b0011111010), "K28.5 RD-")
    apply(8'hBC, 1, 1); `CHECK_EQ(code, lit(10'b1100000101), "K28.5 RD+")
    apply(8'h00, 0, 0); `CHECK_EQ(code, lit(10'b1001110100), "D0.0 RD-")
    apply(8'h00, 0, 1); `CHECK_EQ(code, lit(10'b0110001011), "D0.0 RD+")
    apply(8'hB5, 0, 0); `CHECK_EQ(code, lit(10'b1010101010), "D21.5")
    apply(8'hF1, 0, 0); `CHECK_EQ(code, lit(10'b1000110111), "D17.7 A7 RD-")
    apply(8'h7C, 0, 0); `CHECK_EQ(code, lit(10'b0011101100), "D28.3 RD-")
    for (int rr = 0; rr < 2; rr++) begin
      for (int v = 0; v < 257; v++) begin
        logic r;
        int n1;
        string s;
        r = 1'(rr);
        s = enc(8'(v == 256 ? 8'hBC : v), v == 256, r);
        apply(v == 256 ? 8'hBC : 8'(v), v == 256, 1'(rr));
        `CHECK_EQ(code, to_bits(s), "code vs reference")
        `CHECK_EQ(rd_out, r, "running disparity vs reference")
        n1 = $countones(code);
        `CHECK(n1 == 5 || (n1 == 6 && rr == 0 && rd_out) || (n1 == 4 && rr == 1 && !rd_out) ||
               (n1 == 5 && rd_out == 1'(rr)), "disparity rule")
        if (n1 == 5) `CHECK_EQ(rd_out, 1'(rr), "balanced keeps disparity")
        begin
          int run, maxrun;
          run = 1; maxrun = 1;
          for (int i = 1; i < 10; i++) begin
            run = (code[i] == code[i-1]) ? run + 1 : 1;
            if (run > maxrun) maxrun = run;
          end
          `CHECK(maxrun <= 5, "run length")
        end
        if (v != 256) `CHECK(code[6:0] != 7'b1111100 && code[6:0] != 7'b0000011, "no comma in data")
      end
    end
    `TB_FINISH
  end
endmodule
