// ctrnn_pkg: types and constants shared by the CTRNN evaluation engine.
//
// Number formats (all two's complement unless marked unsigned):
//   state y, external input I ... signed Q16.16, 32 bit
//   weight w, bias theta ........ signed Q8.8,   16 bit
//   step factor h = dt/tau ...... unsigned Q0.16, 16 bit
//   sigmoid output sigma ........ unsigned Q0.16, 16 bit (65535 ~ 1.0)
// The 16-bit sigmoid table follows the design description; the other
// widths are choices of this implementation.
//
// Each Euler step is sequenced by eval_ctrl as ACT (one cycle: every neuron
// looks up sigma(y+theta)), N MAC cycles (column j = 0..N-1: every neuron
// adds w_ij*sigma_j), then UPD (one cycle: forward-Euler state update).
package ctrnn_pkg;

  localparam int STATE_W = 32;  // y and I
  localparam int FRAC_W  = 16;  // fraction bits of y and I
  localparam int PARAM_W = 16;  // w and theta (Q8.8)
  localparam int SIG_W   = 16;  // sigma, Q0.16
  localparam int H_W     = 16;  // dt/tau, Q0.16
  localparam int ACC_W   = 48;  // sum of w*sigma in Q24.24
  localparam int COL_W   = 16;  // width of the column index carried in seq_t

  typedef logic signed [STATE_W-1:0] state_t;
  typedef logic signed [PARAM_W-1:0] param_t;
  typedef logic        [SIG_W-1:0]   sig_t;
  typedef logic        [H_W-1:0]     hfac_t;

  typedef enum logic [1:0] {
    PH_IDLE = 2'd0,
    PH_ACT  = 2'd1,
    PH_MAC  = 2'd2,
    PH_UPD  = 2'd3
  } phase_t;

  // Sequencer command broadcast from eval_ctrl to every PE.
  typedef struct packed {
    phase_t             phase;
    logic [COL_W-1:0]   col;   // presynaptic neuron j during PH_MAC
  } seq_t;

  // Word slots of one neuron in the host address space.
  localparam int SLOT_Y     = 0;  // state y_i      (Q16.16)
  localparam int SLOT_THETA = 1;  // bias theta_i   (Q8.8, low 16 bits)
  localparam int SLOT_H     = 2;  // dt/tau_i       (Q0.16, low 16 bits)
  localparam int SLOT_I     = 3;  // input I_i      (Q16.16)
  localparam int SLOT_W0    = 4;  // w_i0 .. w_i(N-1) (Q8.8, low 16 bits)

endpackage
