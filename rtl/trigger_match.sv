// trigger_match: per-channel trigger matching of the triggered mode.
//
// On a trigger request (trig_req, one cycle) every ring-buffer entry is
// compared with the trigger at the same time: a valid, non-fake hit matches
// when its bunch crossing t[16:5] lies in [trig_bcid, trig_bcid + window)
// modulo 4096. The result is latched as a match mask together with the
// position of the oldest entry. Afterwards one matched hit per cycle, oldest
// first, is sent to the channel FIFO while it has room. Hits stay in the ring
// buffer, so later triggers can select them again. The parallel comparison of
// all entries is the paper's scheme; the exact window test and the handling
// of a matched hit that the ring buffer overwrites before it was sent (it is
// dropped and 'ovf' pulses, reported in the event trailer) are choices of
// this design.
//
// busy is high while matched hits remain to be sent.
module trigger_match
  import tdc_pkg::*;
#(
  parameter int unsigned DEPTH = 16
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  hit_t                     entry [DEPTH],
  input  logic [DEPTH-1:0]         valid,
  input  logic [$clog2(DEPTH)-1:0] wr_ptr,
  input  logic                     wr_en,
  input  logic                     trig_req,
  input  logic [BCW-1:0]           trig_bcid,
  input  logic [BCW-1:0]           window,
  output logic                     out_vld,
  output hit_t                     out_hit,
  input  logic                     out_rdy,
  output logic                     busy,
  output logic                     ovf
);
  localparam int unsigned PW = $clog2(DEPTH);

  logic [DEPTH-1:0] mask, hit_mask;
  logic [PW-1:0]    start, sel;
  logic             found;

  // parallel comparison of all entries
  always_comb begin
    for (int i = 0; i < DEPTH; i++) begin
      logic [BCW-1:0] dbc;
      dbc = entry[i].t[TW-1:TW-BCW] - trig_bcid;
      hit_mask[i] = valid[i] && (entry[i].mode != MODE_FAKE) && (dbc < window);
    end
    // the slot written in this cycle loses its old hit
    if (wr_en) hit_mask[wr_ptr] = 1'b0;
  end

  // oldest matched entry, scanning from the oldest slot
  always_comb begin
    found = 1'b0;
    sel   = start;
    for (int k = 0; k < DEPTH; k++) begin
      logic [PW-1:0] idx;
      idx = PW'((int'(start) + k) % DEPTH);
      if (!found && mask[idx]) begin
        found = 1'b1;
        sel   = idx;
      end
    end
  end

  assign out_vld = found;
  assign out_hit = entry[sel];
  assign busy    = |mask;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mask  <= '0;
      start <= '0;
      ovf   <= 1'b0;
    end else begin
      ovf <= 1'b0;
      if (trig_req) begin
        mask  <= hit_mask;
        start <= wr_en ? PW'((int'(wr_ptr) + 1) % DEPTH) : wr_ptr;
      end else begin
        logic [DEPTH-1:0] m;
        m = mask;
        if (out_vld && out_rdy) m[sel] = 1'b0;
        if (wr_en && m[wr_ptr]) begin
          m[wr_ptr] = 1'b0;
          ovf       <= 1'b1;
        end
        mask <= m;
      end
    end
  end
endmodule
