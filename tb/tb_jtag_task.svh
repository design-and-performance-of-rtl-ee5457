// JTAG driver tasks shared by testbenches. Needs signals tck, tms, tdi, tdo
// in the including module. TCK period 100 ns; TMS/TDI change on the falling
// edge, TDO is sampled on the rising edge.
`ifndef TB_JTAG_TASK_SVH
`define TB_JTAG_TASK_SVH
task automatic jtag_clk(input logic tms_v, input logic tdi_v, output logic tdo_v);
  tms = tms_v; tdi = tdi_v;
  #50 tck = 1'b1;
  tdo_v = tdo;
  #50 tck = 1'b0;
endtask

task automatic jtag_reset();
  logic d;
  repeat (6) jtag_clk(1'b1, 1'b0, d);
  jtag_clk(1'b0, 1'b0, d);              // Run-Test/Idle
endtask

// from Run-Test/Idle: shift an n-bit instruction, back to Run-Test/Idle
task automatic jtag_ir(input logic [3:0] ir);
  logic d;
  jtag_clk(1, 0, d); jtag_clk(1, 0, d);  // Select-DR, Select-IR
  jtag_clk(0, 0, d); jtag_clk(0, 0, d);  // Capture-IR, Shift-IR
  for (int i = 0; i < 4; i++) jtag_clk(i == 3, ir[i], d);
  jtag_clk(1, 0, d); jtag_clk(0, 0, d);  // Update-IR, Run-Test/Idle
endtask

// from Run-Test/Idle: shift n bits (LSB first), return what came out
task automatic jtag_dr(input int n, input logic [127:0] din, output logic [127:0] dout);
  logic d;
  dout = '0;
  jtag_clk(1, 0, d);                     // Select-DR
  jtag_clk(0, 0, d); jtag_clk(0, 0, d);  // Capture-DR, Shift-DR
  for (int i = 0; i < n; i++) begin
    jtag_clk(i == n - 1, din[i], d);
    dout[i] = d;
  end
  jtag_clk(1, 0, d); jtag_clk(0, 0, d);  // Update-DR, Run-Test/Idle
endtask
`endif
