// tb_ctrnn_accel: end-to-end test of the engine at a reduced size (5 PEs of
// 3 neurons) over evaluation periods of 37, 1 and 200 Euler steps; see
// ctrnn_accel_tb_body.svh for what is checked.
module tb_ctrnn_accel;
  localparam int NPE = 5;
  localparam int NN  = 3;
  localparam int PERIODS [3] = '{37, 1, 200};
  `include "ctrnn_accel_tb_body.svh"
  ctrnn_accel #(.NUM_PE(NPE), .N(NN)) dut (.*);
endmodule
