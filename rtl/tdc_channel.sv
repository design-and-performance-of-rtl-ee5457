// tdc_channel: one of the 24 identical TDC channels, from the hit input to
// the channel FIFO.
//
// Two TDC slices digitize the leading (rising) and trailing (falling) edge of
// the hit. Each slice's capture toggle is synchronised into the 160 MHz
// logic clock by three flip-flops; a change marks a new edge time, read from
// the slice (stable, since it only changes on the next edge of that kind).
// The hit builder forms edge or pair hits. Then:
//   triggerless: hits go straight into the 4-deep channel FIFO;
//   triggered:   hits and fake hits go into the 16-entry ring buffer; on a
//                trigger request the trigger matching unit copies the hits
//                inside the matching window into the channel FIFO.
// The read side of the channel FIFO goes to the channel mux (triggerless) or
// the event builder (triggered). The structure follows the paper's channel
// logic; the synchroniser and the rule that a fake hit takes the ring buffer
// write slot while a real hit waits one cycle are choices of this design.
// Two edges of the same kind must be at least about 4 logic cycles (25 ns)
// apart to be both recorded.
module tdc_channel
  import tdc_pkg::*;
(
  input  logic           hit,
  input  logic           clk320_0,
  input  logic           clk320_90,
  input  logic [CW-1:0]  cnt_r,
  input  logic [CW-1:0]  cnt_f,
  input  logic           clk,
  input  logic           rst_n,
  input  logic           enable,
  input  logic           triggered,
  input  logic           pair_mode,
  input  logic [3:0]     width_sel,
  input  logic           fake,
  input  logic           trig_req,
  input  logic [BCW-1:0] trig_bcid,
  input  logic [BCW-1:0] window,
  output logic           rd_vld,
  output hit_t           rd_hit,
  input  logic           rd_rdy,
  output logic           busy,
  output logic           ovf,
  output logic           lost
);
  localparam int unsigned RB = 16;

  logic [TW-1:0] lead_t, trail_t;
  logic          lead_tgl, trail_tgl;
  logic [2:0]    lead_s, trail_s;
  logic          lead_vld, trail_vld;

  tdc_slice #(.CW(CW)) u_lead (
    .hit_edge(hit), .rst_n, .clk320_0, .clk320_90, .cnt_r, .cnt_f,
    .time_o(lead_t), .cap_tgl(lead_tgl));

  tdc_slice #(.CW(CW)) u_trail (
    .hit_edge(~hit), .rst_n, .clk320_0, .clk320_90, .cnt_r, .cnt_f,
    .time_o(trail_t), .cap_tgl(trail_tgl));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lead_s  <= '0;
      trail_s <= '0;
    end else begin
      lead_s  <= {lead_s[1:0], lead_tgl};
      trail_s <= {trail_s[1:0], trail_tgl};
    end
  end
  assign lead_vld  = enable && (lead_s[2] ^ lead_s[1]);
  assign trail_vld = enable && (trail_s[2] ^ trail_s[1]);

  // hit builder
  logic hb_vld, hb_rdy;
  hit_t hb_hit;

  hit_builder u_hb (
    .clk, .rst_n, .pair_mode, .width_sel,
    .lead_vld, .lead_t, .trail_vld, .trail_t,
    .out_vld(hb_vld), .out_hit(hb_hit), .out_rdy(hb_rdy), .lost);

  // ring buffer with the fake-hit mux in front
  hit_t                  rb_entry [RB];
  logic [RB-1:0]         rb_valid;
  logic [$clog2(RB)-1:0] rb_wp;
  logic                  rb_wr;
  hit_t                  rb_hit;

  assign rb_wr  = triggered && (fake || hb_vld);
  assign rb_hit = fake ? hit_t'{mode: MODE_FAKE, t: '0, width: '0} : hb_hit;

  hit_buffer #(.DEPTH(RB)) u_buf (
    .clk, .rst_n, .wr_en(rb_wr), .wr_hit(rb_hit),
    .entry(rb_entry), .valid(rb_valid), .wr_ptr(rb_wp));

  // trigger matching
  logic tm_vld, tm_rdy;
  hit_t tm_hit;

  trigger_match #(.DEPTH(RB)) u_tm (
    .clk, .rst_n, .entry(rb_entry), .valid(rb_valid), .wr_ptr(rb_wp), .wr_en(rb_wr),
    .trig_req(trig_req && triggered), .trig_bcid, .window,
    .out_vld(tm_vld), .out_hit(tm_hit), .out_rdy(tm_rdy), .busy, .ovf);

  // channel FIFO with the mode mux in front
  logic            cf_wr_vld, cf_wr_rdy;
  hit_t            cf_wr_hit;
  logic [2:0]      cf_count;
  logic            cf_ovf;
  logic [$bits(hit_t)-1:0] cf_rd_raw;

  assign cf_wr_vld = triggered ? tm_vld : hb_vld;
  assign cf_wr_hit = triggered ? tm_hit : hb_hit;
  assign tm_rdy    = cf_wr_rdy;
  assign hb_rdy    = triggered ? !fake : cf_wr_rdy;

  sync_fifo #(.W($bits(hit_t)), .DEPTH(4)) u_cfifo (
    .clk, .rst_n, .wr_vld(cf_wr_vld), .wr_data(cf_wr_hit), .wr_rdy(cf_wr_rdy),
    .rd_vld, .rd_data(cf_rd_raw), .rd_rdy, .count(cf_count), .overflow(cf_ovf));

  assign rd_hit = hit_t'(cf_rd_raw);
endmodule
