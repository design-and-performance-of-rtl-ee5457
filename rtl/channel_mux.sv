// channel_mux: triggerless-mode readout of the channel FIFOs into the shared
// readout FIFO. A round-robin arbiter picks, starting after the channel served
// last, the first channel FIFO that holds a hit, and forwards one hit per cycle
// as a readout word with the channel ID added (see tdc_pkg::make_hit_word).
// The multiplexing is the paper's; round-robin order is a choice of this
// design. Combinational path from rd_vld to out_vld; the readout FIFO
// registers the word.
module channel_mux
  import tdc_pkg::*;
#(
  parameter int unsigned N = 24
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [N-1:0] in_vld,
  input  hit_t         in_hit [N],
  output logic [N-1:0] in_rdy,
  output logic         out_vld,
  output rdo_word_t    out_word,
  input  logic         out_rdy
);
  localparam int unsigned CHW = $clog2(N);

  logic [CHW-1:0] rr, sel;
  logic           found;

  always_comb begin
    found = 1'b0;
    sel   = '0;
    for (int k = 0; k < N; k++) begin
      logic [CHW-1:0] idx;
      idx = CHW'((int'(rr) + k) % N);
      if (!found && in_vld[idx]) begin
        found = 1'b1;
        sel   = idx;
      end
    end
    out_vld  = found;
    out_word = make_hit_word(5'(sel), in_hit[sel]);
    in_rdy   = '0;
    in_rdy[sel] = found && out_rdy;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rr <= '0;
    else if (found && out_rdy) rr <= CHW'((int'(sel) + 1) % N);
  end
endmodule
