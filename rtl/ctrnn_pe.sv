// ctrnn_pe: processing element evaluating one complete N-neuron CTRNN, i.e.
// one individual of the population. Many PEs run side by side, in lock-step
// under one eval_ctrl, each on its own parameters.
//
// The N neurons work in parallel. The weight-matrix product is done one
// column per cycle: in PH_MAC with column j the PE broadcasts sigma_j (the
// registered sigmoid output of neuron j) to every neuron, which multiplies
// it by its own w_ij. An Euler step therefore takes N + 2 cycles
// (PH_ACT, N x PH_MAC, PH_UPD).
//
// Host port: host_nrn/host_slot address one word of one neuron; host_we
// writes it; host_rdata returns it one cycle later (host_nrn is registered
// to steer the return multiplexer). The description gives the PE's parts
// (state update, activation, weight-matrix product); this neuron-parallel,
// synapse-serial arrangement is this implementation's choice.
module ctrnn_pe
  import ctrnn_pkg::*;
#(
  parameter int N      = 2,
  parameter int NRN_W  = (N > 1) ? $clog2(N) : 1,
  parameter int SLOT_W = $clog2(SLOT_W0 + N)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  seq_t              seq,
  input  logic              host_we,
  input  logic [NRN_W-1:0]  host_nrn,
  input  logic [SLOT_W-1:0] host_slot,
  input  logic [31:0]       host_wdata,
  output logic [31:0]       host_rdata
);
  sig_t        sig [N];
  sig_t        sig_bus;
  logic [31:0] rdata [N];
  logic [NRN_W-1:0] nrn_q;

  assign sig_bus = sig[NRN_W'(seq.col)];

  for (genvar i = 0; i < N; i++) begin : g_nrn
    ctrnn_neuron #(.N(N), .SLOT_W(SLOT_W)) u_nrn (
      .clk        (clk),
      .rst_n      (rst_n),
      .seq        (seq),
      .sig_in     (sig_bus),
      .sig_out    (sig[i]),
      .host_we    (host_we && host_nrn == NRN_W'(i)),
      .host_slot  (host_slot),
      .host_wdata (host_wdata),
      .host_rdata (rdata[i])
    );
  end

  always_ff @(posedge clk) nrn_q <= host_nrn;

  assign host_rdata = (32'(nrn_q) < N) ? rdata[nrn_q] : '0;

endmodule
