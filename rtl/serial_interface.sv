// serial_interface: turns readout-FIFO words into the serial output stream
// towards the CSM, in one of three rates.
//
// 320 and 160 Mbps (two lines): a 24-bit word becomes three and a 32-bit
// word four consecutive 8b/10b symbols, most significant byte first. When the
// readout FIFO is empty a K28.5 comma is sent instead. A comma is also forced
// after a word flagged 'sep' (end of a triggered event) and after
// comma_limit consecutive packets (0 = no limit). The 10-bit symbols form one
// bit stream whose even bits go to line 0 and odd bits to line 1. Symbol
// framing, commas, the packet limit and the even/odd split follow the paper.
//
// 80 Mbps legacy mode (line 0 only): a word is sent only when one is waiting,
// framed as start bit 1, 24 or 32 data bits MSB first, stop bit 0; the idle
// line is 0. Bit polarities and order are choices of this design.
//
// Output timing: the logic runs at 160 MHz and each line is delivered as two
// bits per cycle, dout[0] first, for a double-data-rate output cell. At 320
// Mbps both bits are new; at 160 Mbps each bit fills both slots; at 80 Mbps
// each bit lasts two cycles. A 16-bit gearbox holds the symbol bits: when it
// has fewer bits than one cycle consumes (4 at 320, 2 at 160) the next symbol
// is appended. Outputs are registered. A 32-bit word therefore takes 10
// cycles (62.5 ns) at 320 Mbps.
module serial_interface
  import tdc_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  rate_e      rate,
  input  logic [7:0] comma_limit,
  input  logic       in_vld,
  input  rdo_word_t  in_word,
  output logic       in_rdy,
  output logic [1:0] dout0,
  output logic [1:0] dout1,
  output logic       sym_comma,   // a comma symbol was started this cycle
  output logic       sym_data     // a data packet was started this cycle
);
  // ---------------- 8b/10b path ----------------
  logic [23:0] pkt;        // remaining bytes of the packet, MSB first
  logic [1:0]  pkt_left;   // bytes left after the current one
  logic        pkt_act;
  logic        pkt_sep;
  logic        comma_pend;
  logic [7:0]  pkt_cnt;
  logic        rd;
  logic [15:0] gbuf;
  logic [4:0]  fill;

  logic [4:0]  need;
  logic        take;
  logic [7:0]  sym_d;
  logic        sym_k;
  logic [9:0]  sym_code;
  logic        rd_next;
  logic        pop8b;
  logic        want_comma;
  logic [15:0] gext;
  logic [4:0]  fext;

  enc8b10b u_enc (.d(sym_d), .k(sym_k), .rd_in(rd), .code(sym_code), .rd_out(rd_next));

  assign need = (rate == RATE_320) ? 5'd4 : 5'd2;
  assign take = (rate != RATE_80) && (fill < need);
  assign want_comma = comma_pend || !in_vld ||
                      (comma_limit != '0 && pkt_cnt >= comma_limit);

  always_comb begin
    sym_d = K28_5;
    sym_k = 1'b1;
    pop8b = 1'b0;
    if (pkt_act) begin
      sym_d = pkt[23:16];
      sym_k = 1'b0;
    end else if (!want_comma) begin
      sym_d = in_word.four ? in_word.data[31:24] : in_word.data[23:16];
      sym_k = 1'b0;
      pop8b = take;
    end
    gext = gbuf;
    fext = fill;
    if (take) begin
      gext = gbuf | (16'(sym_code) << fill);
      fext = fill + 5'd10;
    end
  end

  assign sym_comma = take && sym_k;
  assign sym_data  = pop8b;

  // ---------------- legacy path ----------------
  logic [33:0] lg_sh;
  logic [5:0]  lg_left;
  logic        lg_div;
  logic        pop80;

  assign pop80  = (rate == RATE_80) && lg_left == '0 && !lg_div && in_vld;
  assign in_rdy = pop8b || pop80;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pkt        <= '0;
      pkt_left   <= '0;
      pkt_act    <= 1'b0;
      pkt_sep    <= 1'b0;
      comma_pend <= 1'b0;
      pkt_cnt    <= '0;
      rd         <= 1'b0;
      gbuf       <= '0;
      fill       <= '0;
      lg_sh      <= '0;
      lg_left    <= '0;
      lg_div     <= 1'b0;
      dout0      <= '0;
      dout1      <= '0;
    end else begin
      if (rate != RATE_80) begin
        lg_left <= '0;
        lg_div  <= 1'b0;
        if (take) begin
          rd <= rd_next;
          if (pkt_act) begin
            pkt      <= {pkt[15:0], 8'h00};
            pkt_left <= pkt_left - 1'b1;
            if (pkt_left == 2'd1) begin
              pkt_act <= 1'b0;
              if (pkt_sep) comma_pend <= 1'b1;
            end
          end else if (!want_comma) begin
            pkt      <= in_word.four ? in_word.data[23:0] : {in_word.data[15:0], 8'h00};
            pkt_left <= in_word.four ? 2'd3 : 2'd2;
            pkt_act  <= 1'b1;
            pkt_sep  <= in_word.sep;
            pkt_cnt  <= pkt_cnt + 1'b1;
          end else begin
            comma_pend <= 1'b0;
            pkt_cnt    <= '0;
          end
        end
        gbuf <= gext >> need;
        fill <= fext - need;
        if (rate == RATE_320) begin
          dout0 <= {gext[2], gext[0]};
          dout1 <= {gext[3], gext[1]};
        end else begin
          dout0 <= {2{gext[0]}};
          dout1 <= {2{gext[1]}};
        end
      end else begin
        // legacy 80 Mbps: one bit every second cycle on line 0
        gbuf    <= '0;
        fill    <= '0;
        pkt_act <= 1'b0;
        dout1   <= '0;
        lg_div  <= ~lg_div;
        if (pop80) begin
          lg_sh   <= in_word.four ? {1'b1, in_word.data, 1'b0}
                                  : {1'b1, in_word.data[23:0], 1'b0, 8'h00};
          lg_left <= in_word.four ? 6'd34 : 6'd26;
          lg_div  <= 1'b0;
          dout0   <= '0;
        end else if (!lg_div) begin
          if (lg_left != '0) begin
            dout0   <= {2{lg_sh[33]}};
            lg_sh   <= {lg_sh[32:0], 1'b0};
            lg_left <= lg_left - 1'b1;
          end else begin
            dout0 <= '0;
          end
        end
      end
    end
  end
endmodule
