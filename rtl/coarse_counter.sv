// coarse_counter: the shared 15-bit coarse time counter of the time
// digitization unit (LSB 3.125 ns, one 320 MHz period).
//
// Two copies run on opposite phases of the 0/180 degree 320 MHz clock:
// cnt_r advances on the rising edge, cnt_f takes the value of cnt_r on the
// falling edge. So between a rising and the next falling edge cnt_f equals
// cnt_r - 1, and in the second half period both are equal. Each TDC slice
// samples both copies and reads the one that is not switching near its hit.
// The paper names two coarse counters on inverting 320 MHz phases; building
// the falling copy as a re-timed copy of the rising one keeps the two in step
// by construction and is a choice of this design, as is the reset to 0 on the
// bunch-counter reset (bcr, a 160 MHz-domain pulse, edge-detected here).
module coarse_counter #(
  parameter int unsigned CW = 15
) (
  input  logic          clk320_0,
  input  logic          rst_n,
  input  logic          bcr,
  output logic [CW-1:0] cnt_r,
  output logic [CW-1:0] cnt_f
);
  logic bcr_q;

  always_ff @(posedge clk320_0 or negedge rst_n) begin
    if (!rst_n) begin
      cnt_r <= '0;
      bcr_q <= 1'b0;
    end else begin
      bcr_q <= bcr;
      if (bcr && !bcr_q) cnt_r <= '0;
      else               cnt_r <= cnt_r + 1'b1;
    end
  end

  always_ff @(negedge clk320_0 or negedge rst_n) begin
    if (!rst_n) cnt_f <= '0;
    else        cnt_f <= cnt_r;
  end
endmodule
