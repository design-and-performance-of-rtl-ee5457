// tdc_slice: one TDC slice, digitizing one edge (leading or trailing) of a
// discriminated hit signal into a 17-bit time with 0.78125 ns LSB.
//
// As in the paper, the hit edge samples the clocks instead of clocks sampling
// the hit: on the rising edge of 'hit_edge' the slice stores the levels of the
// 0/180 and 90/270 degree 320 MHz clocks and both coarse counter copies. The
// two clock levels give the quarter of the 3.125 ns period (fine code):
//   {clk320_0, clk320_90} = 10 -> 0, 11 -> 1, 01 -> 2, 00 -> 3.
// The coarse value comes from the counter copy that is far from its switching
// edge: in quarter 0 the rising copy has just switched, so cnt_f + 1 is used;
// in quarters 1 and 2 cnt_r; in quarter 3 cnt_r is about to switch, so cnt_f.
// This particular ambiguity rule is a choice of this design (the paper only
// says strategies for ambiguous bins exist). The trailing slice of a channel
// is the same module driven by the inverted hit.
//
// Interface: 'time_o' holds the last captured time; 'cap_tgl' toggles at every
// capture and is synchronised into the 160 MHz logic by the channel, which then
// reads time_o (stable until the next edge of the same kind).
module tdc_slice #(
  parameter int unsigned CW = 15
) (
  input  logic          hit_edge,
  input  logic          rst_n,
  input  logic          clk320_0,
  input  logic          clk320_90,
  input  logic [CW-1:0] cnt_r,
  input  logic [CW-1:0] cnt_f,
  output logic [CW+1:0] time_o,
  output logic          cap_tgl
);
  logic          s0, s90;
  logic [CW-1:0] sr, sf;
  logic [1:0]    fine;
  logic [CW-1:0] coarse;

  always_ff @(posedge hit_edge or negedge rst_n) begin
    if (!rst_n) begin
      s0      <= 1'b0;
      s90     <= 1'b0;
      sr      <= '0;
      sf      <= '0;
      cap_tgl <= 1'b0;
    end else begin
      s0      <= clk320_0;
      s90     <= clk320_90;
      sr      <= cnt_r;
      sf      <= cnt_f;
      cap_tgl <= ~cap_tgl;
    end
  end

  always_comb begin
    unique case ({s0, s90})
      2'b10:   fine = 2'd0;
      2'b11:   fine = 2'd1;
      2'b01:   fine = 2'd2;
      default: fine = 2'd3;
    endcase
    unique case (fine)
      2'd0:    coarse = sf + 1'b1;
      2'd3:    coarse = sf;
      default: coarse = sr;
    endcase
  end

  assign time_o = {coarse, fine};
endmodule
