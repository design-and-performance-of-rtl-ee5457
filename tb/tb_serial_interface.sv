// Testbench for serial_interface. A stream of random 24- and 32-bit words
// (some with the end-of-event flag) is offered with random gaps. The
// testbench rebuilds the bit stream from the two lines (even bits on line 0,
// odd bits on line 1), cuts it into 10-bit symbols, decodes them with the
// reference 8b/10b code and checks: words arrive intact and in order, a comma
// follows every end-of-event word, no more than comma_limit packets pass
// without a comma, commas fill the idle time, and at 320 Mbps a 4-byte packet
// takes 10 cycles (two lines x 2 bits x 10 cycles = 40 bits). The 160 Mbps
// mode is checked the same way, and the 80 Mbps legacy mode by its start/stop
// framing on line 0.
`include "tb_check.svh"
module tb_serial_interface;
  import tdc_pkg::*;
  import tb_codec_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  rate_e rate = RATE_320;
  logic [7:0] comma_limit = 8'd5;
  logic in_vld, in_rdy, sym_comma, sym_data;
  rdo_word_t in_word;
  logic [1:0] dout0, dout1;
  rdo_word_t src [$];
  rdo_word_t sent [$];

  serial_interface dut (.clk, .rst_n, .rate, .comma_limit, .in_vld, .in_word, .in_rdy,
                        .dout0, .dout1, .sym_comma, .sym_data);

  // the source queue drives the inputs procedurally after every change
  task automatic upd();
    in_vld  = src.size() > 0;
    in_word = (src.size() > 0) ? src[0] : '0;
  endtask
  initial upd();

  always @(posedge clk) if (rst_n && in_vld && in_rdy) begin
    #1 sent.push_back(src.pop_front());
    upd();
  end

  initial begin
    #50_000_000;
    failures++;
    $display("watchdog");
    `TB_FINISH
  end

  // ---- receiver for the 8b/10b modes ----
  logic        rx_on = 0;
  logic [9:0]  sh;
  int          nb = 0;
  logic        aligned = 0;
  logic        rd = 0;
  rdo_word_t   rx [$];
  int          commas = 0, since_comma = 0, max_run = 0;
  logic [7:0]  bytes [$];
  logic        expect_comma = 0;
  int          pkt_start_cyc = -1, cyc = 0;

  task automatic rx_bit(input logic b);
    logic [7:0] d; logic k, ok;
    sh = {b, sh[9:1]};           // first bit ends up in sh[0]
    if (!aligned) begin
      if (sh == to_bits("0011111010") || sh == to_bits("1100000101")) begin
        aligned = 1; nb = 0; rd = (sh == to_bits("0011111010"));
        commas++;
      end
      return;
    end
    nb++;
    if (nb < 10) return;
    nb = 0;
    dec(sh, rd, d, k, ok);
    `CHECK(ok, "valid 8b/10b symbol")
    if (k) begin
      `CHECK_EQ(bytes.size(), 0, "comma only between packets")
      bytes.delete();
      commas++; since_comma = 0; expect_comma = 0;
    end else begin
      `CHECK(!expect_comma, "comma after end of event")
      bytes.push_back(d);
      if (bytes.size() == 1) begin
        since_comma++;
        if (since_comma > max_run) max_run = since_comma;
      end
      if (sent.size() > rx.size()) begin
        rdo_word_t w = sent[rx.size()];
        int n = w.four ? 4 : 3;
        if (bytes.size() == n) begin
          logic [31:0] v = '0;
          foreach (bytes[i]) v = {v[23:0], bytes[i]};
          `CHECK_EQ(v, w.four ? w.data : {8'h00, w.data[23:0]}, "word received")
          rx.push_back(w);
          bytes.delete();
          if (w.sep) expect_comma = 1;
        end
      end else begin
        `CHECK(0, "data without a word sent")
      end
    end
  endtask

  always @(posedge clk) if (rx_on) begin
    cyc++;
    if (rate == RATE_320) begin
      rx_bit(dout0[0]); rx_bit(dout1[0]); rx_bit(dout0[1]); rx_bit(dout1[1]);
    end else if (rate == RATE_160) begin
      `CHECK(dout0[0] == dout0[1] && dout1[0] == dout1[1], "160 Mbps: bit fills both slots")
      rx_bit(dout0[0]); rx_bit(dout1[0]);
    end
  end

  // packet rate at 320 Mbps: 4-byte packets back to back start every 10 cycles
  int last_data = -1, gap_ok = 0, gap_bad = 0;
  always @(posedge clk) if (rst_n && rate == RATE_320 && sym_data) begin
    if (last_data >= 0 && in_word.four && sent.size() > 0 && sent[$].four) begin
      if (cyc - last_data == 10) gap_ok++;
      else if (cyc - last_data < 10) gap_bad++;
    end
    last_data = cyc;
  end

  task automatic gen(input int n, input int gap_pct, input logic only_four);
    for (int i = 0; i < n; i++) begin
      rdo_word_t w;
      w.four = only_four ? 1'b1 : 1'($urandom_range(0, 1));
      w.sep  = ($urandom_range(0, 7) == 0);
      w.data = w.four ? $urandom : {8'h00, 24'($urandom)};
      src.push_back(w);
    end
    upd();
    while (src.size() > 0) begin
      @(negedge clk);
    end
    repeat (60) @(negedge clk);
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1; rx_on = 1;
    repeat (40) @(negedge clk);   // idle commas let the receiver align
    // 320 Mbps, comma limit 5
    gen(300, 0, 0);
    `CHECK_EQ(rx.size(), sent.size(), "all words received at 320")
    `CHECK(max_run <= 5, "comma limit respected")
    `CHECK(max_run == 5, "comma limit reached")
    `CHECK(commas > 60, "commas inserted")
    // back-to-back 4-byte packets, no limit: 10 cycles each
    comma_limit = 0;
    gen(100, 0, 1);
    `CHECK(gap_ok > 50 && gap_bad == 0, "4-byte packet every 10 cycles at 320 Mbps")
    `CHECK_EQ(rx.size(), sent.size(), "all words received, no limit")
    // 160 Mbps
    rst_n = 0; rx_on = 0; rate = RATE_160; comma_limit = 8'd3;
    @(negedge clk); rst_n = 1; aligned = 0; bytes.delete(); rx.delete(); sent.delete();
    max_run = 0; since_comma = 0; rd = 0; rx_on = 1;
    repeat (40) @(negedge clk);
    gen(200, 0, 0);
    `CHECK_EQ(rx.size(), sent.size(), "all words received at 160")
    `CHECK(max_run <= 3, "comma limit at 160")
    // 80 Mbps legacy
    rx_on = 0; rst_n = 0; rate = RATE_80;
    @(negedge clk); rst_n = 1; sent.delete();
    begin
      int nframes = 0;
      fork
        gen(40, 0, 0);
        begin
          // receiver: idle 0, start bit 1, data, stop bit 0; each bit 2 cycles
          forever begin
            logic [31:0] v;
            int n;
            @(posedge clk); #1;
            if (dout0[0] !== 1'b1) continue;
            `CHECK(dout0[1] == 1'b1, "legacy bit fills both slots")
            `CHECK(dout1 == 2'b00, "legacy uses line 0 only")
            @(posedge clk); #1;   // second cycle of the start bit
            `CHECK(nframes < sent.size(), "frame without word")
            n = sent[nframes].four ? 32 : 24;
            v = '0;
            for (int i = 0; i < n; i++) begin
              @(posedge clk); #1; v = {v[30:0], dout0[0]};
              @(posedge clk); #1;
            end
            @(posedge clk); #1;
            `CHECK_EQ(dout0[0], 1'b0, "stop bit")
            `CHECK_EQ(v, sent[nframes].four ? sent[nframes].data : {8'h00, sent[nframes].data[23:0]}, "legacy word")
            nframes++;
            @(posedge clk); #1;
          end
        end
      join_any
      disable fork;
      `CHECK_EQ(nframes, 40, "legacy frames")
    end
    `TB_FINISH
  end
endmodule

