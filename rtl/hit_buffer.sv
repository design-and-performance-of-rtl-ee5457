// hit_buffer: the per-channel ring buffer of the triggered mode, 16 hit
// registers ("Hit reg 0" .. "Hit reg 15") written in arrival order.
//
// Each write goes to the slot at wr_ptr, overwriting the oldest hit, and
// advances wr_ptr; the slot at wr_ptr is therefore always the oldest. All
// entries and their valid bits are outputs so that trigger matching can
// compare them all in the same cycle. Old hits are pushed out by fake hits
// written at a programmable rate (see fake_hit_gen). Depth and ring structure
// follow the paper; valid bits cleared at reset are a choice of this design.
module hit_buffer
  import tdc_pkg::*;
#(
  parameter int unsigned DEPTH = 16
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     wr_en,
  input  hit_t                     wr_hit,
  output hit_t                     entry [DEPTH],
  output logic [DEPTH-1:0]         valid,
  output logic [$clog2(DEPTH)-1:0] wr_ptr
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid  <= '0;
      wr_ptr <= '0;
      for (int i = 0; i < DEPTH; i++) entry[i] <= '0;
    end else if (wr_en) begin
      entry[wr_ptr] <= wr_hit;
      valid[wr_ptr] <= 1'b1;
      wr_ptr        <= (wr_ptr == $clog2(DEPTH)'(DEPTH - 1)) ? '0 : wr_ptr + 1'b1;
    end
  end
endmodule
