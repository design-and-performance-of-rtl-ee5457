// fake_hit_gen: makes the fake-hit strobe of the triggered mode. Every
// 'period' bunch crossings (bc_en pulses) it asserts 'fake' for one cycle;
// each channel then writes a hit tagged MODE_FAKE into its ring buffer, so a
// real hit survives at most about 16 x period bunch crossings. The paper gives
// the purpose and the programmable rate; counting in bunch crossings, the
// 12-bit period and period 0 meaning off are choices of this design.
module fake_hit_gen (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        enable,
  input  logic        bc_en,
  input  logic [11:0] period,
  output logic        fake
);
  logic [11:0] cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt  <= '0;
      fake <= 1'b0;
    end else begin
      fake <= 1'b0;
      if (!enable || period == '0) begin
        cnt <= '0;
      end else if (bc_en) begin
        if (cnt >= period - 1'b1) begin
          cnt  <= '0;
          fake <= 1'b1;
        end else begin
          cnt <= cnt + 1'b1;
        end
      end
    end
  end
endmodule
