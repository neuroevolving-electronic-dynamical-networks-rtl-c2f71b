// tb_ctrnn_accel_full: the engine at its default size (314 PEs of 2 neurons,
// 628 neurons) run through the sweep of evaluation periods 100, 200, ...,
// 1000 Euler steps with a fresh population each time, then ten continued
// evaluations, a halt and a zero-step start; see ctrnn_accel_tb_body.svh.
module tb_ctrnn_accel_full;
  localparam int NPE = 314;
  localparam int NN  = 2;
  localparam int PERIODS [10] = '{100, 200, 300, 400, 500, 600, 700, 800, 900, 1000};
  `include "ctrnn_accel_tb_body.svh"
  ctrnn_accel dut (.*);
endmodule
