// trigger_interface: the Trigger Interface of the triggered mode, holding the
// bunch counter and the event counter.
//
// bc_en marks every fourth 160 MHz cycle, i.e. one 40 MHz bunch crossing.
// The 12-bit bunch counter advances on bc_en and is cleared by BCR. A trigger
// comes either from the TTC decoder (ttc_trig pulse) or from the dedicated
// trigger pin, which is sampled once per bunch crossing and counts on its
// rising edge. Each trigger is time-stamped with (bunch counter - trig_offset)
// mod 4096, so that it points back to the bunch crossing that caused it, given
// an event ID from the event counter (cleared by evrst, +1 per trigger), and
// written to the trigger FIFO. A trigger that finds the FIFO full is lost and
// trig_ovf pulses. Time-stamping, offset and event counter follow the paper;
// the widths and the pin sampling are choices of this design.
module trigger_interface
  import tdc_pkg::*;
(
  input  logic           clk,
  input  logic           rst_n,
  input  logic           bcr,
  input  logic           evrst,
  input  logic           ttc_trig,
  input  logic           trig_pin,
  input  logic [11:0]    trig_offset,
  output logic           bc_en,
  output logic [BCW-1:0] bunch_cnt,
  output logic           tf_vld,
  output trig_t          tf_data,
  input  logic           tf_rdy,
  output logic           trig_ovf
);
  logic [1:0]     phase;
  logic [EVW-1:0] event_cnt;
  logic           pin_q, pin_qq;
  logic           trig;

  assign bc_en   = (phase == 2'd3);
  assign trig    = ttc_trig || (bc_en && pin_q && !pin_qq);
  assign tf_vld  = trig;
  assign tf_data = '{bcid: bunch_cnt - BCW'(trig_offset), evid: event_cnt};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase     <= '0;
      bunch_cnt <= '0;
      event_cnt <= '0;
      pin_q     <= 1'b0;
      pin_qq    <= 1'b0;
      trig_ovf  <= 1'b0;
    end else begin
      phase    <= phase + 1'b1;
      trig_ovf <= trig && !tf_rdy;
      if (bc_en) begin
        pin_q  <= trig_pin;
        pin_qq <= pin_q;
      end
      if (bcr)        bunch_cnt <= '0;
      else if (bc_en) bunch_cnt <= bunch_cnt + 1'b1;
      if (evrst)     event_cnt <= '0;
      else if (trig) event_cnt <= event_cnt + 1'b1;
    end
  end
endmodule
