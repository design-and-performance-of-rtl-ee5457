// trigger_match_ctrl: the Trigger Matching Controller. It takes the buffered
// triggers out of the trigger FIFO one at a time, as long as the FIFO is not
// empty, and for each one broadcasts the trigger request with the trigger
// bunch ID and the matching window to all channels while starting the event
// builder.
//
// Sequence: IDLE -> (FIFO not empty and event builder idle: pop) -> WAIT until
// the bunch counter is at least window + 2 bunch crossings past the trigger
// BCID, so that every hit of the window has reached the ring buffers -> one
// cycle with trig_req and eb_start -> BUSY until eb_done -> IDLE.
// Sequential service is the paper's; the waiting rule is a choice of this
// design.
module trigger_match_ctrl
  import tdc_pkg::*;
(
  input  logic           clk,
  input  logic           rst_n,
  input  logic           tf_vld,
  input  trig_t          tf_data,
  output logic           tf_rdy,
  input  logic [BCW-1:0] bunch_cnt,
  input  logic [BCW-1:0] window,
  output logic           trig_req,
  output logic [BCW-1:0] trig_bcid,
  output logic [EVW-1:0] trig_evid,
  output logic           eb_start,
  input  logic           eb_done
);
  typedef enum logic [1:0] {S_IDLE, S_WAIT, S_BUSY} state_e;
  state_e         state;
  logic [BCW-1:0] age;

  assign tf_rdy   = (state == S_IDLE);
  assign age      = bunch_cnt - trig_bcid;
  assign trig_req = (state == S_WAIT) && ({1'b0, age} >= {1'b0, window} + 13'd2);
  assign eb_start = trig_req;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      trig_bcid <= '0;
      trig_evid <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (tf_vld) begin
          trig_bcid <= tf_data.bcid;
          trig_evid <= tf_data.evid;
          state     <= S_WAIT;
        end
        S_WAIT: if (trig_req) state <= S_BUSY;
        S_BUSY: if (eb_done)  state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
