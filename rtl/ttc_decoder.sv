// ttc_decoder: decodes the TTC command line into the Trigger, BCR (bunch
// counter reset), event-counter reset and global Reset pulses.
//
// The paper names the decoder and its outputs only. This design uses a simple
// serial code, one bit per bunch crossing (sampled when bc_en is high): an
// idle line is 0; a command is a start bit 1 followed by two bits b1 b0:
//   00 trigger, 10 bunch counter reset, 01 event counter reset, 11 global reset.
// The decoded pulse is one 160 MHz cycle long, in the cycle after the second
// command bit is sampled.
module ttc_decoder (
  input  logic clk,
  input  logic rst_n,
  input  logic bc_en,
  input  logic ttc,
  output logic trig,
  output logic bcr,
  output logic evrst,
  output logic grst
);
  typedef enum logic [1:0] {S_IDLE, S_B1, S_B0} state_e;
  state_e state;
  logic   b1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      b1    <= 1'b0;
      trig  <= 1'b0;
      bcr   <= 1'b0;
      evrst <= 1'b0;
      grst  <= 1'b0;
    end else begin
      trig  <= 1'b0;
      bcr   <= 1'b0;
      evrst <= 1'b0;
      grst  <= 1'b0;
      if (bc_en) begin
        unique case (state)
          S_IDLE: if (ttc) state <= S_B1;
          S_B1: begin
            b1    <= ttc;
            state <= S_B0;
          end
          S_B0: begin
            unique case ({b1, ttc})
              2'b00: trig  <= 1'b1;
              2'b10: bcr   <= 1'b1;
              2'b01: evrst <= 1'b1;
              2'b11: grst  <= 1'b1;
            endcase
            state <= S_IDLE;
          end
          default: state <= S_IDLE;
        endcase
      end
    end
  end
endmodule
