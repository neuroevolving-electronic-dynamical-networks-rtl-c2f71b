// ctrnn_neuron: one neuron of a continuous-time recurrent neural network,
// advanced in time by forward-Euler integration of
//     tau_i dy_i/dt = -y_i + sum_j w_ij * sigma(y_j + theta_j) + I_i .
// One Euler step is   y_i <= y_i + h_i * (-y_i + sum_j w_ij*sigma_j + I_i)
// with h_i = dt/tau_i stored directly, so the hardware needs no divider.
//
// The neuron keeps its state y_i, bias theta_i, step factor h_i and external
// input I_i in registers and its incoming weight row w_i0..w_i(N-1) in a small
// block memory. It follows the sequencer command of eval_ctrl:
//   PH_ACT  look up sigma(y_i + theta_i) in its sigmoid table (ready next
//           cycle on sig_out), clear the accumulator, pre-read w_i0;
//   PH_MAC  column j: acc += w_ij * sig_in, where sig_in is sigma_j that the
//           PE broadcasts; the weight of column j+1 is read meanwhile;
//   PH_UPD  apply the Euler update; y saturates at the 32-bit limits.
// All sigma_j of a step come from the previous step's states, so all neurons
// of a network update together. Formats are listed in ctrnn_pkg.
//
// Host port: host_slot selects a word (see ctrnn_pkg SLOT_*); host_we writes
// it, host_rdata returns it one cycle after host_slot is presented. Weights
// are read through the memory's single read port, so host reads of weights
// are only meaningful while the sequencer is idle.
// Following the description: Euler integration, the sigmoid table and
// parameters in block memory. Widths, the stored dt/tau and saturation are
// this implementation's choices.
module ctrnn_neuron
  import ctrnn_pkg::*;
#(
  parameter int N      = 2,
  parameter int SLOT_W = $clog2(SLOT_W0 + N)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  seq_t              seq,
  input  sig_t              sig_in,
  output sig_t              sig_out,
  input  logic              host_we,
  input  logic [SLOT_W-1:0] host_slot,
  input  logic [31:0]       host_wdata,
  output logic [31:0]       host_rdata
);
  localparam int COLA_W = (N > 1) ? $clog2(N) : 1;

  state_t y_q, i_q;
  param_t theta_q;
  hfac_t  h_q;

  // Incoming weight row, one word per presynaptic neuron.
  param_t w_mem [N];
  param_t w_rd;
  logic [COLA_W-1:0] w_raddr;

  logic signed [ACC_W-1:0] acc_q;

  // ---------------------------------------------------------------- sigmoid
  state_t act_x;
  assign act_x = y_q + (state_t'(theta_q) <<< (FRAC_W - 8));

  sigmoid_lut u_lut (
    .clk (clk),
    .en  (seq.phase == PH_ACT),
    .x   (act_x),
    .sig (sig_out)
  );

  // ------------------------------------------------------------ weight RAM
  always_comb begin
    unique case (seq.phase)
      PH_ACT:  w_raddr = '0;
      PH_MAC:  w_raddr = COLA_W'(seq.col + 1'b1);
      default: w_raddr = COLA_W'(host_slot - SLOT_W0);
    endcase
  end

  always_ff @(posedge clk) begin
    if (host_we && host_slot >= SLOT_W'(SLOT_W0))
      w_mem[COLA_W'(host_slot - SLOT_W0)] <= param_t'(host_wdata[PARAM_W-1:0]);
    w_rd <= w_mem[w_raddr];
  end

  // -------------------------------------------------------------- datapath
  logic signed [SIG_W+PARAM_W:0]   prod;    // Q8.24
  logic signed [ACC_W-1:0]         drive;   // Q.16
  logic signed [ACC_W+H_W:0]       dy_full; // Q.32
  logic signed [ACC_W-1:0]         y_next;

  assign prod    = w_rd * $signed({1'b0, sig_in});
  assign drive   = (acc_q >>> 8) + ACC_W'(i_q) - ACC_W'(y_q);
  assign dy_full = drive * $signed({1'b0, h_q});
  assign y_next  = ACC_W'(y_q) + ACC_W'(dy_full >>> H_W);

  function automatic state_t sat32(logic signed [ACC_W-1:0] v);
    if (v > ACC_W'(state_t'({1'b0, {(STATE_W-1){1'b1}}})))
      return {1'b0, {(STATE_W-1){1'b1}}};
    else if (v < ACC_W'(state_t'({1'b1, {(STATE_W-1){1'b0}}})))
      return {1'b1, {(STATE_W-1){1'b0}}};
    else
      return v[STATE_W-1:0];
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      y_q     <= '0;
      i_q     <= '0;
      theta_q <= '0;
      h_q     <= '0;
      acc_q   <= '0;
    end else begin
      unique case (seq.phase)
        PH_ACT: acc_q <= '0;
        PH_MAC: acc_q <= acc_q + ACC_W'(prod);
        PH_UPD: y_q   <= sat32(y_next);
        default: ;
      endcase
      if (host_we) begin
        unique case (host_slot)
          SLOT_W'(SLOT_Y):     y_q     <= state_t'(host_wdata);
          SLOT_W'(SLOT_THETA): theta_q <= param_t'(host_wdata[PARAM_W-1:0]);
          SLOT_W'(SLOT_H):     h_q     <= hfac_t'(host_wdata[H_W-1:0]);
          SLOT_W'(SLOT_I):     i_q     <= state_t'(host_wdata);
          default: ;
        endcase
      end
    end
  end

  // ------------------------------------------------------------- read back
  logic [SLOT_W-1:0] rslot_q;
  logic [31:0]       rscalar_q;

  always_ff @(posedge clk) begin
    rslot_q <= host_slot;
    unique case (host_slot)
      SLOT_W'(SLOT_Y):     rscalar_q <= y_q;
      SLOT_W'(SLOT_THETA): rscalar_q <= 32'(theta_q);
      SLOT_W'(SLOT_H):     rscalar_q <= {16'b0, h_q};
      SLOT_W'(SLOT_I):     rscalar_q <= i_q;
      default:             rscalar_q <= '0;
    endcase
  end

  assign host_rdata = (rslot_q >= SLOT_W'(SLOT_W0)) ? 32'(w_rd) : rscalar_q;

endmodule
