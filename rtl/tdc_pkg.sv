// tdc_pkg: types and constants shared by the MDT TDC logic.
//
// A hit time is 17 bits in units of 0.78125 ns: a 15-bit coarse count of the
// 320 MHz clock (3.125 ns) and a 2-bit fine code from the four 320 MHz phases.
// 2^17 x 0.78125 ns = 102.4 us, one span of the 12-bit bunch counter
// (25 ns per bunch crossing = 32 time LSBs, so the BCID of a hit is t[16:5]).
//
// Data words (Table 1 layout, most significant field first):
//   edge mode  24 bit  {chid[4:0], mode[1:0], time[16:0]}           mode 00/01
//   pair mode  32 bit  {chid[4:0], 2'b11, time[16:0], width[7:0]}
// The mode code 10 is unused by the data format and tags fake hits in the
// ring buffers. Header and trailer words of triggered events use the top
// nibbles 0xE and 0xF, which would be channel IDs 28-31 and so never occur in
// a hit word (this layout is a choice of this design):
//   header   {4'hE, event_id[7:0], trigger_bcid[11:0]}
//   trailer  {4'hF, error[3:0], event_id[5:0], hit_count[9:0]}
package tdc_pkg;

  localparam int unsigned NCH = 24;  // input channels
  localparam int unsigned CW  = 15;  // coarse time bits
  localparam int unsigned TW  = 17;  // coarse + 2 fine bits
  localparam int unsigned WW  = 8;   // pair-mode pulse width bits
  localparam int unsigned BCW = 12;  // bunch counter bits
  localparam int unsigned EVW = 8;   // event ID bits

  typedef enum logic [1:0] {
    MODE_LEAD  = 2'b00,
    MODE_TRAIL = 2'b01,
    MODE_FAKE  = 2'b10,
    MODE_PAIR  = 2'b11
  } hit_mode_e;

  // One built hit, as held in ring buffers and channel FIFOs (27 bits).
  typedef struct packed {
    hit_mode_e       mode;
    logic [TW-1:0]   t;
    logic [WW-1:0]   width;
  } hit_t;

  // One word of the readout FIFO (34 bits). 'four' selects 4 bytes
  // (pair hit) instead of 3 (data[23:0]); 'sep' asks the serial interface
  // for a comma after the word (end of a triggered event).
  typedef struct packed {
    logic        sep;
    logic        four;
    logic [31:0] data;
  } rdo_word_t;

  typedef enum logic [1:0] {
    RATE_320 = 2'd0,
    RATE_160 = 2'd1,
    RATE_80  = 2'd2
  } rate_e;

  // Trigger FIFO entry.
  typedef struct packed {
    logic [BCW-1:0] bcid;
    logic [EVW-1:0] evid;
  } trig_t;

  // Configuration register (76 bits), written through JTAG.
  typedef struct packed {
    logic [NCH-1:0] chan_en;       // per-channel enable
    logic [11:0]    fake_period;   // fake-hit period in bunch crossings, 0 = off
    logic [11:0]    match_window;  // matching window in bunch crossings
    logic [11:0]    trig_offset;   // trigger latency compensation in bunch crossings
    logic [7:0]     comma_limit;   // max packets between commas, 0 = no limit
    logic [3:0]     width_sel;     // pair width = (t_trail - t_lead) >> width_sel
    rate_e          rate;          // output line rate
    logic           pair_mode;     // 1 = pair mode, 0 = edge mode
    logic           triggered;     // 1 = triggered, 0 = triggerless
  } cfg_t;

  localparam int unsigned CFG_BITS = $bits(cfg_t);

  localparam cfg_t CFG_DEFAULT = '{
    chan_en:      {NCH{1'b1}},
    fake_period:  12'd32,
    match_window: 12'd16,
    trig_offset:  12'd400,
    comma_limit:  8'd255,
    width_sel:    4'd0,
    rate:         RATE_320,
    pair_mode:    1'b1,
    triggered:    1'b0
  };

  localparam logic [7:0] K28_5 = 8'hBC;

  function automatic rdo_word_t make_hit_word(logic [4:0] chid, hit_t h);
    rdo_word_t w;
    w.sep  = 1'b0;
    w.four = (h.mode == MODE_PAIR);
    if (h.mode == MODE_PAIR) w.data = {chid, h.mode, h.t, h.width};
    else                     w.data = {8'h00, chid, h.mode, h.t};
    return w;
  endfunction

  function automatic rdo_word_t make_header(logic [EVW-1:0] evid, logic [BCW-1:0] bcid);
    rdo_word_t w;
    w.sep  = 1'b0;
    w.four = 1'b0;
    w.data = {8'h00, 4'hE, evid, bcid};
    return w;
  endfunction

  function automatic rdo_word_t make_trailer(logic [3:0] err, logic [EVW-1:0] evid, logic [9:0] cnt);
    rdo_word_t w;
    w.sep  = 1'b1;
    w.four = 1'b0;
    w.data = {8'h00, 4'hF, err, evid[5:0], cnt};
    return w;
  endfunction

endpackage
