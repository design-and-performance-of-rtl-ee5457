// hit_builder: per-channel logic that turns leading and trailing edge times
// into hits, in the 160 MHz logic clock domain.
//
// Edge mode: every edge becomes its own hit (mode 00 leading, 01 trailing).
// A leading and a trailing edge that arrive in the same cycle are both kept
// and sent leading first. Pair mode: a leading edge is held until the next
// trailing edge; the hit (mode 11) carries the leading time and the pulse
// width (t_trail - t_lead) mod 2^17, shifted right by width_sel and saturated
// to 8 bits. The modes, the 8-bit width and the adjustable width resolution
// follow the paper; saturation, dropping a trailing edge without a leading
// one, and letting a new leading edge replace an unpaired one are choices of
// this design.
//
// Interface: lead_vld/trail_vld are one-cycle pulses with the edge time.
// The output is a valid/ready pair; a hit still waiting when a new one of the
// same kind is built is overwritten and 'lost' pulses for one cycle.
module hit_builder
  import tdc_pkg::*;
(
  input  logic          clk,
  input  logic          rst_n,
  input  logic          pair_mode,
  input  logic [3:0]    width_sel,
  input  logic          lead_vld,
  input  logic [TW-1:0] lead_t,
  input  logic          trail_vld,
  input  logic [TW-1:0] trail_t,
  output logic          out_vld,
  output hit_t          out_hit,
  input  logic          out_rdy,
  output logic          lost
);
  // pending edges (edge mode) / pending leading edge (pair mode)
  logic          lv, tv, pv;
  logic [TW-1:0] lt, tt;
  hit_t          ph;           // built pair, pair mode
  logic [TW-1:0] diff;
  logic [TW-1:0] lead_for_pair;
  logic          have_lead;
  logic [WW-1:0] width_q;

  always_comb begin
    // leading edge that a trailing edge in this cycle closes
    have_lead     = lv;
    lead_for_pair = lt;
    if (!lv && lead_vld) begin
      have_lead     = 1'b1;
      lead_for_pair = lead_t;
    end
    diff = (trail_t - lead_for_pair) >> width_sel;
    width_q = (diff > TW'(2**WW - 1)) ? WW'(2**WW - 1) : diff[WW-1:0];
  end

  always_comb begin
    out_vld = 1'b0;
    out_hit = '{mode: MODE_LEAD, t: lt, width: '0};
    if (pair_mode) begin
      out_vld = pv;
      out_hit = ph;
    end else if (lv) begin
      out_vld = 1'b1;
    end else if (tv) begin
      out_vld = 1'b1;
      out_hit = '{mode: MODE_TRAIL, t: tt, width: '0};
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lv   <= 1'b0;
      tv   <= 1'b0;
      pv   <= 1'b0;
      lt   <= '0;
      tt   <= '0;
      ph   <= '0;
      lost <= 1'b0;
    end else begin
      lost <= 1'b0;
      if (!pair_mode) begin
        pv <= 1'b0;
        // retire the hit being sent
        if (out_vld && out_rdy) begin
          if (lv) lv <= 1'b0;
          else    tv <= 1'b0;
        end
        if (lead_vld) begin
          if (lv && !out_rdy) lost <= 1'b1;
          lv <= 1'b1;
          lt <= lead_t;
        end
        if (trail_vld) begin
          if (tv && !(out_rdy && !lv)) lost <= 1'b1;
          tv <= 1'b1;
          tt <= trail_t;
        end
      end else begin
        tv <= 1'b0;
        if (out_vld && out_rdy) pv <= 1'b0;
        if (trail_vld && have_lead) begin
          if (pv && !out_rdy) lost <= 1'b1;
          pv <= 1'b1;
          ph <= '{mode: MODE_PAIR, t: lead_for_pair, width: width_q};
          // a leading edge in the same cycle as the trailing edge of an
          // earlier pulse starts the next pair
          lv <= lv && lead_vld;
          if (lv && lead_vld) lt <= lead_t;
        end else if (lead_vld) begin
          lv <= 1'b1;
          lt <= lead_t;
        end
      end
    end
  end
endmodule
