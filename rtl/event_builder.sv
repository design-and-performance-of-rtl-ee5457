// event_builder: the Event Building Block of the triggered mode.
//
// Started by the trigger matching controller, it writes to the readout FIFO
// a header (event ID, trigger BCID), then reads the channel FIFOs one after
// the other, channel 0 first, taking every matched hit of a channel until that
// channel's trigger matching is no longer busy and its FIFO is empty, and ends
// with a trailer holding the number of hits and error flags. The trailer asks
// the serial interface for a comma, which separates consecutive events.
// Error flags: [0] a matched hit was overwritten in a ring buffer before it
// was sent, [1] a trigger was lost because the trigger FIFO was full, [2] a
// hit was lost in a hit builder, [3] the hit count exceeded 1023. The event
// structure follows the paper; the word layout (tdc_pkg) and the flags are
// choices of this design. One word per cycle at most.
module event_builder
  import tdc_pkg::*;
#(
  parameter int unsigned N = 24
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  logic [BCW-1:0] bcid,
  input  logic [EVW-1:0] evid,
  input  logic [N-1:0]   ch_vld,
  input  hit_t           ch_hit [N],
  output logic [N-1:0]   ch_rdy,
  input  logic [N-1:0]   ch_busy,
  input  logic           err_ovf,
  input  logic           err_trig,
  input  logic           err_lost,
  output logic           out_vld,
  output rdo_word_t      out_word,
  input  logic           out_rdy,
  output logic           idle,
  output logic           done
);
  localparam int unsigned CHW = $clog2(N);

  typedef enum logic [1:0] {S_IDLE, S_HDR, S_CH, S_TRL} state_e;
  state_e         state;
  logic [CHW-1:0] ch;
  logic [BCW-1:0] bcid_q;
  logic [EVW-1:0] evid_q;
  logic [10:0]    cnt;
  logic [3:0]     err, err_pend;

  assign idle = (state == S_IDLE);

  always_comb begin
    out_vld  = 1'b0;
    out_word = make_header(evid_q, bcid_q);
    ch_rdy   = '0;
    unique case (state)
      S_HDR: out_vld = 1'b1;
      S_CH: begin
        out_vld    = ch_vld[ch];
        out_word   = make_hit_word(5'(ch), ch_hit[ch]);
        ch_rdy[ch] = out_rdy;
      end
      S_TRL: begin
        out_vld  = 1'b1;
        out_word = make_trailer({cnt[10], err[2:0]}, evid_q, cnt[10] ? 10'h3FF : cnt[9:0]);
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      ch       <= '0;
      bcid_q   <= '0;
      evid_q   <= '0;
      cnt      <= '0;
      err      <= '0;
      err_pend <= '0;
      done     <= 1'b0;
    end else begin
      done <= 1'b0;
      // errors seen between events are reported with the next event
      if (state == S_IDLE) err_pend <= err_pend | {1'b0, err_lost, err_trig, err_ovf};
      else                 err      <= err | {1'b0, err_lost, err_trig, err_ovf};
      unique case (state)
        S_IDLE: if (start) begin
          bcid_q   <= bcid;
          evid_q   <= evid;
          cnt      <= '0;
          err      <= err_pend | {1'b0, err_lost, err_trig, err_ovf};
          err_pend <= '0;
          ch       <= '0;
          state    <= S_HDR;
        end
        S_HDR: if (out_rdy) state <= S_CH;
        S_CH: begin
          if (ch_vld[ch]) begin
            if (out_rdy && !cnt[10]) cnt <= cnt + 1'b1;
          end else if (!ch_busy[ch]) begin
            if (ch == CHW'(N - 1)) state <= S_TRL;
            else                   ch    <= ch + 1'b1;
          end
        end
        S_TRL: if (out_rdy) begin
          state <= S_IDLE;
          done  <= 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
