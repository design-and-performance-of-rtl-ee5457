// tdc_top: the TDC ASIC for the MDT detector: 24 hit inputs, each digitized
// on both edges with 0.78 ns LSB over a 17-bit (102.4 us) range, and a logic
// unit that sends the hits to the chamber service module over two serial
// lines, either all of them (triggerless mode) or only those that match a
// trigger (triggered mode).
//
// Blocks: coarse_counter (shared 15-bit 320 MHz counter), 24 x tdc_channel
// (two TDC slices, hit builder, ring buffer, trigger matching, channel FIFO),
// channel_mux, ttc_decoder, trigger_interface, trigger FIFO (16),
// trigger_match_ctrl, fake_hit_gen, event_builder, readout FIFO (16),
// serial_interface and jtag_config.
//
// Clocks come from the on-chip PLL, which is outside this RTL: clk160 (logic),
// clk320_0 (0/180 degree) and clk320_90 (90/270 degree), in fixed phase, with
// clk320_0 rising together with clk160. The serial lines are given as two bits
// per clk160 cycle (dout0/dout1, bit 0 first) for double-data-rate output
// pads, also outside this RTL. rst_n is the chip reset; a global reset
// command from the TTC line also resets the 160 MHz logic (not the
// configuration). Configuration (cfg_t in tdc_pkg) is written over JTAG and
// must only be changed while no data is in flight.
//
// Some block outputs are deliberately left unused here: the fill counts and
// overflow flags of the trigger and readout FIFOs (a full trigger FIFO is
// already reported by the trigger interface, and the readout FIFO is only
// written when it has room), the event builder's idle flag and the serial
// interface's symbol strobes, which exist for observation in simulation.
module tdc_top
  import tdc_pkg::*;
(
  input  logic           clk160,
  input  logic           clk320_0,
  input  logic           clk320_90,
  input  logic           rst_n,
  input  logic [NCH-1:0] hit,
  input  logic           ttc,
  input  logic           trigger,
  input  logic           tck,
  input  logic           tms,
  input  logic           tdi,
  input  logic           trst_n,
  output logic           tdo,
  output logic           asd_tdi,
  input  logic           asd_tdo,
  output logic           asd_shift,
  output logic           asd_capture,
  output logic           asd_update,
  output logic [1:0]     dout0,
  output logic [1:0]     dout1
);
  cfg_t cfg;

  // ---------------- reset of the logic clock domain ----------------
  logic grst, lrst_n;
  always_ff @(posedge clk160 or negedge rst_n) begin
    if (!rst_n) lrst_n <= 1'b0;
    else        lrst_n <= !grst;
  end

  // ---------------- TTC and trigger interface ----------------
  logic           bc_en, ttc_trig, bcr, evrst;
  logic [BCW-1:0] bunch_cnt;
  logic           ti_vld, ti_rdy, trig_ovf;
  trig_t          ti_data;

  ttc_decoder u_ttc (
    .clk(clk160), .rst_n, .bc_en, .ttc,
    .trig(ttc_trig), .bcr, .evrst, .grst);

  trigger_interface u_ti (
    .clk(clk160), .rst_n(lrst_n), .bcr, .evrst, .ttc_trig, .trig_pin(trigger),
    .trig_offset(cfg.trig_offset), .bc_en, .bunch_cnt,
    .tf_vld(ti_vld), .tf_data(ti_data), .tf_rdy(ti_rdy), .trig_ovf);

  logic                    tf_vld, tf_rdy, tf_ovf;
  logic [$bits(trig_t)-1:0] tf_raw;
  logic [4:0]              tf_count;

  sync_fifo #(.W($bits(trig_t)), .DEPTH(16)) u_trig_fifo (
    .clk(clk160), .rst_n(lrst_n), .wr_vld(ti_vld && cfg.triggered), .wr_data(ti_data),
    .wr_rdy(ti_rdy), .rd_vld(tf_vld), .rd_data(tf_raw), .rd_rdy(tf_rdy),
    .count(tf_count), .overflow(tf_ovf));

  logic           trig_req, eb_start, eb_done, eb_idle;
  logic [BCW-1:0] trig_bcid;
  logic [EVW-1:0] trig_evid;

  trigger_match_ctrl u_tmc (
    .clk(clk160), .rst_n(lrst_n), .tf_vld, .tf_data(trig_t'(tf_raw)), .tf_rdy,
    .bunch_cnt, .window(cfg.match_window), .trig_req, .trig_bcid, .trig_evid,
    .eb_start, .eb_done);

  logic fake;
  fake_hit_gen u_fake (
    .clk(clk160), .rst_n(lrst_n), .enable(cfg.triggered), .bc_en,
    .period(cfg.fake_period), .fake);

  // ---------------- time digitization and channels ----------------
  logic [CW-1:0] cnt_r, cnt_f;
  coarse_counter #(.CW(CW)) u_cc (.clk320_0, .rst_n, .bcr, .cnt_r, .cnt_f);

  logic [NCH-1:0] ch_vld, ch_rdy, ch_busy, ch_ovf, ch_lost, mux_rdy, eb_rdy;
  hit_t           ch_hit [NCH];

  for (genvar i = 0; i < NCH; i++) begin : g_ch
    tdc_channel u_ch (
      .hit(hit[i]), .clk320_0, .clk320_90, .cnt_r, .cnt_f,
      .clk(clk160), .rst_n(lrst_n), .enable(cfg.chan_en[i]),
      .triggered(cfg.triggered), .pair_mode(cfg.pair_mode), .width_sel(cfg.width_sel),
      .fake, .trig_req, .trig_bcid, .window(cfg.match_window),
      .rd_vld(ch_vld[i]), .rd_hit(ch_hit[i]), .rd_rdy(ch_rdy[i]),
      .busy(ch_busy[i]), .ovf(ch_ovf[i]), .lost(ch_lost[i]));
  end

  assign ch_rdy = cfg.triggered ? eb_rdy : mux_rdy;

  // ---------------- readout ----------------
  logic      mux_vld, eb_vld, ro_in_vld, ro_in_rdy;
  rdo_word_t mux_word, eb_word, ro_in_word;

  channel_mux #(.N(NCH)) u_mux (
    .clk(clk160), .rst_n(lrst_n),
    .in_vld(cfg.triggered ? '0 : ch_vld), .in_hit(ch_hit), .in_rdy(mux_rdy),
    .out_vld(mux_vld), .out_word(mux_word), .out_rdy(ro_in_rdy && !cfg.triggered));

  event_builder #(.N(NCH)) u_eb (
    .clk(clk160), .rst_n(lrst_n), .start(eb_start), .bcid(trig_bcid), .evid(trig_evid),
    .ch_vld, .ch_hit, .ch_rdy(eb_rdy), .ch_busy,
    .err_ovf(|ch_ovf), .err_trig(trig_ovf), .err_lost(|ch_lost),
    .out_vld(eb_vld), .out_word(eb_word), .out_rdy(ro_in_rdy && cfg.triggered),
    .idle(eb_idle), .done(eb_done));

  assign ro_in_vld  = cfg.triggered ? eb_vld  : mux_vld;
  assign ro_in_word = cfg.triggered ? eb_word : mux_word;

  logic                         ro_vld, ro_rdy, ro_ovf;
  logic [$bits(rdo_word_t)-1:0] ro_raw;
  logic [4:0]                   ro_count;

  sync_fifo #(.W($bits(rdo_word_t)), .DEPTH(16)) u_ro_fifo (
    .clk(clk160), .rst_n(lrst_n), .wr_vld(ro_in_vld), .wr_data(ro_in_word),
    .wr_rdy(ro_in_rdy), .rd_vld(ro_vld), .rd_data(ro_raw), .rd_rdy(ro_rdy),
    .count(ro_count), .overflow(ro_ovf));

  logic sym_comma, sym_data;
  serial_interface u_ser (
    .clk(clk160), .rst_n(lrst_n), .rate(cfg.rate), .comma_limit(cfg.comma_limit),
    .in_vld(ro_vld), .in_word(rdo_word_t'(ro_raw)), .in_rdy(ro_rdy),
    .dout0, .dout1, .sym_comma, .sym_data);

  // ---------------- configuration and monitoring ----------------
  jtag_config u_jtag (
    .clk(clk160), .rst_n, .tck, .tms, .tdi, .trst_n, .tdo, .cfg,
    .mon_lost(5'($countones(ch_lost))), .mon_trig_lost(trig_ovf), .mon_event(eb_done),
    .asd_tdi, .asd_tdo, .asd_shift, .asd_capture, .asd_update);
endmodule
