// ctrnn_accel: CTRNN fitness-evaluation engine. NUM_PE processing elements
// each hold one N-neuron continuous-time recurrent network (one individual
// of an evolving population) and integrate it with forward Euler, all in
// lock-step under one evaluation controller. A host processor loads the
// parameters of a batch of individuals over AXI4-Lite, starts the run, polls
// (or waits on done_irq) and reads the final neuron states back; fitness and
// the evolutionary algorithm stay on the host.
//
// Default size: N = 2 neurons per network (the two-neuron coupled
// oscillator) and NUM_PE = 314, i.e. 628 neurons in total, the neuron count
// the description reports for its device. Its split into 314 networks of 2
// is this implementation's reading.
//
// Neuron-space word offset (see axil_host_if) = {pe, neuron, slot} with
// SLOT_W = clog2(4 + N) slot bits (ctrnn_pkg SLOT_*), NRN_W = clog2(N)
// neuron bits and PE_W = clog2(NUM_PE) PE bits; ADDR_W follows from these.
// Timing: one Euler step takes N + 2 clock cycles for every PE at once, so
// an evaluation of S steps takes S*(N+2) cycles whatever NUM_PE is.
module ctrnn_accel
  import ctrnn_pkg::*;
#(
  parameter int NUM_PE = 314,
  parameter int N      = 2,
  parameter int SLOT_W = $clog2(SLOT_W0 + N),
  parameter int NRN_W  = (N > 1) ? $clog2(N) : 1,
  parameter int PE_W   = (NUM_PE > 1) ? $clog2(NUM_PE) : 1,
  parameter int ADDR_W = 3 + PE_W + NRN_W + SLOT_W
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [ADDR_W-1:0] s_axil_awaddr,
  input  logic              s_axil_awvalid,
  output logic              s_axil_awready,
  input  logic [31:0]       s_axil_wdata,
  input  logic [3:0]        s_axil_wstrb,
  input  logic              s_axil_wvalid,
  output logic              s_axil_wready,
  output logic [1:0]        s_axil_bresp,
  output logic              s_axil_bvalid,
  input  logic              s_axil_bready,
  input  logic [ADDR_W-1:0] s_axil_araddr,
  input  logic              s_axil_arvalid,
  output logic              s_axil_arready,
  output logic [31:0]       s_axil_rdata,
  output logic [1:0]        s_axil_rresp,
  output logic              s_axil_rvalid,
  input  logic              s_axil_rready,
  output logic              busy,
  output logic              done_irq
);
  localparam int NB_W = ADDR_W - 3;

  seq_t        seq;
  logic        start, halt, done;
  logic [31:0] steps, step_cnt, cycle_cnt;

  logic            nb_we;
  logic [NB_W-1:0] nb_addr;
  logic [31:0]     nb_wdata, nb_rdata;

  logic [PE_W-1:0]   nb_pe;
  logic [NRN_W-1:0]  nb_nrn;
  logic [SLOT_W-1:0] nb_slot;
  assign {nb_pe, nb_nrn, nb_slot} = nb_addr;

  eval_ctrl #(.N(N)) u_ctrl (
    .clk, .rst_n, .start, .halt, .steps, .seq, .busy, .done, .step_cnt, .cycle_cnt
  );

  axil_host_if #(.ADDR_W(ADDR_W), .NUM_PE(NUM_PE), .N(N), .NB_W(NB_W)) u_host (
    .clk, .rst_n,
    .s_axil_awaddr, .s_axil_awvalid, .s_axil_awready,
    .s_axil_wdata, .s_axil_wstrb, .s_axil_wvalid, .s_axil_wready,
    .s_axil_bresp, .s_axil_bvalid, .s_axil_bready,
    .s_axil_araddr, .s_axil_arvalid, .s_axil_arready,
    .s_axil_rdata, .s_axil_rresp, .s_axil_rvalid, .s_axil_rready,
    .start, .halt, .steps, .busy, .done, .step_cnt, .cycle_cnt,
    .done_flag (done_irq),
    .nb_we, .nb_addr, .nb_wdata, .nb_rdata
  );

  logic [31:0]     pe_rdata [NUM_PE];
  logic [PE_W-1:0] pe_q;

  for (genvar p = 0; p < NUM_PE; p++) begin : g_pe
    ctrnn_pe #(.N(N), .NRN_W(NRN_W), .SLOT_W(SLOT_W)) u_pe (
      .clk, .rst_n, .seq,
      .host_we    (nb_we && nb_pe == PE_W'(p)),
      .host_nrn   (nb_nrn),
      .host_slot  (nb_slot),
      .host_wdata (nb_wdata),
      .host_rdata (pe_rdata[p])
    );
  end

  always_ff @(posedge clk) pe_q <= nb_pe;
  assign nb_rdata = (32'(pe_q) < NUM_PE) ? pe_rdata[pe_q] : '0;

endmodule
