// jtag_config: configuration and monitoring unit, an IEEE 1149.1 test access
// port (TAP) giving access to the configuration register of the TDC, a
// read-only status register and the configuration chain of the ASD chips.
//
// The paper only calls this a conventional JTAG implementation towards the
// ASD chips and the CSM; instruction codes, register map and IDCODE value are
// choices of this design. Instruction register 4 bits (captures 0001):
//   0001 IDCODE  (selected after reset)   32-bit IDCODE
//   0010 CONFIG  76-bit cfg_t (tdc_pkg), written on Update-DR
//   0011 STATUS  32-bit monitoring word, captured on Capture-DR
//   0100 ASD     TDI/TDO routed to the ASD chain (asd_tdi, asd_tdo, with
//                asd_shift / asd_capture / asd_update strobes in TCK domain)
//   others BYPASS
// Shifting is LSB first; TDO changes on the falling edge of TCK.
// Monitoring counters run in the 160 MHz domain: hits lost (16 bits,
// saturating; mon_lost gives the number of channels that lost a hit in the
// cycle), triggers lost (8 bits, saturating), events built (8 bits), status = {events, trig,
// lost}. They and the configuration cross between TCK and the logic clock as
// quasi-static values: configuration is written while the logic is idle, and
// a status read may see a counter mid-update.
module jtag_config
  import tdc_pkg::*;
#(
  parameter logic [31:0] IDCODE = 32'h1DC0_0001
) (
  input  logic clk,
  input  logic rst_n,
  input  logic tck,
  input  logic tms,
  input  logic tdi,
  input  logic trst_n,
  output logic tdo,
  output cfg_t cfg,
  input  logic [4:0] mon_lost,   // number of hits lost this cycle
  input  logic mon_trig_lost,
  input  logic mon_event,
  output logic asd_tdi,
  input  logic asd_tdo,
  output logic asd_shift,
  output logic asd_capture,
  output logic asd_update
);
  typedef enum logic [3:0] {
    TLR, RTI, SEL_DR, CAP_DR, SH_DR, EX1_DR, PA_DR, EX2_DR, UP_DR,
    SEL_IR, CAP_IR, SH_IR, EX1_IR, PA_IR, EX2_IR, UP_IR
  } tap_e;

  localparam logic [3:0] I_IDCODE = 4'b0001;
  localparam logic [3:0] I_CONFIG = 4'b0010;
  localparam logic [3:0] I_STATUS = 4'b0011;
  localparam logic [3:0] I_ASD    = 4'b0100;

  tap_e                state, nstate;
  logic [3:0]          ir, ir_sh;
  logic [CFG_BITS-1:0] dr;
  logic                byp;
  logic [31:0]         status;
  logic [15:0]         cnt_lost;
  logic [7:0]          cnt_trig, cnt_evt;

  // monitoring counters, logic clock
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt_lost <= '0;
      cnt_trig <= '0;
      cnt_evt  <= '0;
    end else begin
      if (mon_lost != '0) cnt_lost <= ({1'b0, cnt_lost} + 17'(mon_lost) > 17'hFFFF) ? '1 : cnt_lost + 16'(mon_lost);
      if (mon_trig_lost && cnt_trig != '1) cnt_trig <= cnt_trig + 1'b1;
      if (mon_event) cnt_evt <= cnt_evt + 1'b1;
    end
  end
  assign status = {cnt_evt, cnt_trig, cnt_lost};

  always_comb begin
    unique case (state)
      TLR:    nstate = tms ? TLR    : RTI;
      RTI:    nstate = tms ? SEL_DR : RTI;
      SEL_DR: nstate = tms ? SEL_IR : CAP_DR;
      CAP_DR: nstate = tms ? EX1_DR : SH_DR;
      SH_DR:  nstate = tms ? EX1_DR : SH_DR;
      EX1_DR: nstate = tms ? UP_DR  : PA_DR;
      PA_DR:  nstate = tms ? EX2_DR : PA_DR;
      EX2_DR: nstate = tms ? UP_DR  : SH_DR;
      UP_DR:  nstate = tms ? SEL_DR : RTI;
      SEL_IR: nstate = tms ? TLR    : CAP_IR;
      CAP_IR: nstate = tms ? EX1_IR : SH_IR;
      SH_IR:  nstate = tms ? EX1_IR : SH_IR;
      EX1_IR: nstate = tms ? UP_IR  : PA_IR;
      PA_IR:  nstate = tms ? EX2_IR : PA_IR;
      EX2_IR: nstate = tms ? UP_IR  : SH_IR;
      UP_IR:  nstate = tms ? SEL_DR : RTI;
      default: nstate = TLR;
    endcase
  end

  always_ff @(posedge tck or negedge trst_n) begin
    if (!trst_n) begin
      state <= TLR;
      ir    <= I_IDCODE;
      ir_sh <= '0;
      dr    <= '0;
      byp   <= 1'b0;
      cfg   <= CFG_DEFAULT;
    end else begin
      state <= nstate;
      unique case (state)
        TLR:    ir <= I_IDCODE;
        CAP_IR: ir_sh <= 4'b0001;
        SH_IR:  ir_sh <= {tdi, ir_sh[3:1]};
        UP_IR:  ir <= ir_sh;
        CAP_DR: begin
          byp <= 1'b0;
          unique case (ir)
            I_IDCODE: dr <= CFG_BITS'(IDCODE);
            I_CONFIG: dr <= cfg;
            I_STATUS: dr <= CFG_BITS'(status);
            default:  dr <= '0;
          endcase
        end
        SH_DR: begin
          byp <= tdi;
          unique case (ir)
            I_IDCODE, I_STATUS: dr <= CFG_BITS'({tdi, dr[31:1]});
            I_CONFIG:           dr <= {tdi, dr[CFG_BITS-1:1]};
            default: ;
          endcase
        end
        UP_DR: if (ir == I_CONFIG) cfg <= dr;
        default: ;
      endcase
    end
  end

  always_ff @(negedge tck or negedge trst_n) begin
    if (!trst_n) tdo <= 1'b0;
    else if (state == SH_IR) tdo <= ir_sh[0];
    else if (state == SH_DR) begin
      unique case (ir)
        I_IDCODE, I_STATUS, I_CONFIG: tdo <= dr[0];
        I_ASD:                        tdo <= asd_tdo;
        default:                      tdo <= byp;
      endcase
    end
  end

  assign asd_tdi     = tdi;
  assign asd_shift   = (ir == I_ASD) && (state == SH_DR);
  assign asd_capture = (ir == I_ASD) && (state == CAP_DR);
  assign asd_update  = (ir == I_ASD) && (state == UP_DR);
endmodule
