// sync_fifo: single-clock FIFO with valid/ready on both sides. It serves as
// the 4-deep channel FIFO, the 16-deep readout FIFO and the 16-deep trigger
// FIFO of the TDC logic (depths from the paper; the register implementation,
// the handshake and the overflow flag are choices of this design).
//
// Timing: a word written in one cycle can be read in the next. wr_rdy is
// low when full; a write while full is dropped and 'overflow' pulses for one
// cycle. rd_vld is high while not empty; rd_data is the oldest word.
module sync_fifo #(
  parameter int unsigned W     = 8,
  parameter int unsigned DEPTH = 4
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       wr_vld,
  input  logic [W-1:0]               wr_data,
  output logic                       wr_rdy,
  output logic                       rd_vld,
  output logic [W-1:0]               rd_data,
  input  logic                       rd_rdy,
  output logic [$clog2(DEPTH+1)-1:0] count,
  output logic                       overflow
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] wp, rp;
  logic          do_wr, do_rd;

  assign wr_rdy  = (count != DEPTH[$clog2(DEPTH+1)-1:0]);
  assign rd_vld  = (count != '0);
  assign rd_data = mem[rp];
  assign do_wr   = wr_vld && wr_rdy;
  assign do_rd   = rd_vld && rd_rdy;

  function automatic logic [AW-1:0] inc(logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp       <= '0;
      rp       <= '0;
      count    <= '0;
      overflow <= 1'b0;
    end else begin
      overflow <= wr_vld && !wr_rdy;
      if (do_wr) wp <= inc(wp);
      if (do_rd) rp <= inc(rp);
      if (do_wr && !do_rd)      count <= count + 1'b1;
      else if (do_rd && !do_wr) count <= count - 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (do_wr) mem[wp] <= wr_data;
  end
endmodule
