// ctrnn_accel_tb_body.svh: end-to-end test of ctrnn_accel through its
// AXI4-Lite port, shared by the reduced and the full-size testbench. The
// including module defines NPE, NN, PERIODS (evaluation periods in Euler
// steps), the DUT instance and the AXI signals.
//
// For every evaluation period a fresh population is loaded: PE 0 gets a
// two-neuron coupled oscillator (centre-crossing weights), the rest random
// mutants of it plus random extra neurons. The engine runs, the host polls
// STATUS, then every state is read back and compared with ctrnn_ref_pkg.
// Mechanisms counted (each must occur at least once): start, done seen by
// polling, done_irq, halt (abort), SLVERR on a write while busy, start
// ignored while busy, sigmoid clamping, state saturation, steps = 0,
// continuation of an evaluation from the states left by the previous one.
import ctrnn_pkg::*;
import ctrnn_ref_pkg::*;

localparam int SW = $clog2(SLOT_W0 + NN);
localparam int NW = (NN > 1) ? $clog2(NN) : 1;
localparam int PW = (NPE > 1) ? $clog2(NPE) : 1;
localparam int AW = 3 + PW + NW + SW;

logic clk = 0, rst_n = 0;
logic [AW-1:0] s_axil_awaddr, s_axil_araddr;
logic s_axil_awvalid, s_axil_awready, s_axil_wvalid, s_axil_wready;
logic [31:0] s_axil_wdata, s_axil_rdata;
logic [3:0] s_axil_wstrb;
logic [1:0] s_axil_bresp, s_axil_rresp;
logic s_axil_bvalid, s_axil_bready, s_axil_arvalid, s_axil_arready;
logic s_axil_rvalid, s_axil_rready;
logic busy, done_irq;
int checks = 0, failures = 0;

always #5 clk = ~clk;

`include "axil_bfm.svh"

typedef enum int {M_START, M_POLL_DONE, M_IRQ, M_HALT, M_BUSY_SLVERR,
                  M_START_IGNORED, M_SIG_CLAMP, M_SATURATE, M_ZERO_STEPS,
                  M_CONTINUE, M_COUNT} mech_t;
int mech [M_COUNT];

task automatic chk(string what, longint got, longint exp);
  checks++;
  if (got != exp) begin
    failures++;
    if (failures < 20) $display("FAIL %s got=%0d exp=%0d", what, got, exp);
  end
endtask

function automatic logic [AW-1:0] naddr(int pe, int nrn, int slot);
  return {1'b1, PW'(pe), NW'(nrn), SW'(slot), 2'b00};
endfunction
function automatic logic [AW-1:0] caddr(int idx);
  return AW'(idx * 4);
endfunction

// population state held by the test
longint y   [NPE][];
longint iin [NPE][];
int     th  [NPE][];
int     hh  [NPE][];
int     ww  [NPE][];

function automatic int rnd(int lo, int hi);
  return lo + int'($urandom_range(0, hi - lo));
endfunction

task automatic load_population(int gen);
  logic [1:0] r;
  for (int p = 0; p < NPE; p++) begin
    y[p] = new[NN]; iin[p] = new[NN]; th[p] = new[NN]; hh[p] = new[NN]; ww[p] = new[NN*NN];
    for (int i = 0; i < NN; i++) begin
      // default: a two-neuron oscillator, w = [4.5 1; -1 4.5],
      // theta = (-2.75, -1.75), dt/tau = 0.05, y(0) = (2, 1); Q8.8 / Q0.16
      y[p][i]   = (i == 0) ? 64'sd131072 : (i == 1) ? 64'sd65536 : 0;
      iin[p][i] = 0;
      th[p][i]  = (i == 0) ? -704 : (i == 1) ? -448 : 0;
      hh[p][i]  = 3277;
      for (int j = 0; j < NN; j++)
        ww[p][i*NN+j] = (i == j) ? 1152 : (i == 0 && j == 1) ? 256 : (i == 1 && j == 0) ? -256 : 0;
      if (p != 0) begin
        // mutated individuals
        y[p][i]  += longint'(rnd(-65536, 65536));
        iin[p][i] = longint'(rnd(-32768, 32768));
        th[p][i] += rnd(-256, 256);
        hh[p][i]  = rnd(200, 6000);
        for (int j = 0; j < NN; j++) ww[p][i*NN+j] += rnd(-512, 512);
      end
    end
    if (p == NPE - 1 && gen == 0) begin
      // drive neuron 0 of the last PE far outside the table and into the
      // saturation of the 32-bit state
      y[p][0] = 64'sd2147000000; iin[p][0] = 64'sd2147483647; hh[p][0] = 65535;
      for (int j = 0; j < NN; j++) ww[p][j] = 32767;
    end
    for (int i = 0; i < NN; i++) begin
      axil_write(naddr(p, i, SLOT_Y), 32'(y[p][i]), 4'hF, r);     chk("wr", r, 0);
      axil_write(naddr(p, i, SLOT_THETA), 32'(th[p][i]), 4'hF, r); chk("wr", r, 0);
      axil_write(naddr(p, i, SLOT_H), 32'(hh[p][i]), 4'hF, r);     chk("wr", r, 0);
      axil_write(naddr(p, i, SLOT_I), 32'(iin[p][i]), 4'hF, r);    chk("wr", r, 0);
      for (int j = 0; j < NN; j++) begin
        axil_write(naddr(p, i, SLOT_W0 + j), 32'(ww[p][i*NN+j]), 4'hF, r);
        chk("wr", r, 0);
      end
    end
  end
endtask

// Reference: advance all networks by n steps, noting clamping/saturation.
task automatic ref_run(int n);
  for (int s = 0; s < n; s++)
    for (int p = 0; p < NPE; p++) begin
      for (int i = 0; i < NN; i++) begin
        longint x = y[p][i] + longint'(th[p][i]) * 256;
        if (x >= 64'sd8 * 65536 || x < -64'sd8 * 65536) mech[M_SIG_CLAMP]++;
      end
      net_step(NN, y[p], th[p], hh[p], iin[p], ww[p]);
      for (int i = 0; i < NN; i++)
        if (y[p][i] == 64'sd2147483647 || y[p][i] == -64'sd2147483648) mech[M_SATURATE]++;
    end
endtask

task automatic compare_all(string tag);
  logic [31:0] d;
  for (int p = 0; p < NPE; p++)
    for (int i = 0; i < NN; i++) begin
      axil_read(naddr(p, i, SLOT_Y), d);
      chk({tag, " y"}, longint'($signed(d)), y[p][i]);
    end
endtask

// Start, poll STATUS until done, return busy cycles read from CYCLES.
task automatic run_eval(int nsteps, bit try_busy_ops, output int cycles, output int stepcnt);
  logic [1:0] r; logic [31:0] d;
  int polls = 0;
  axil_write(caddr(2), 32'(nsteps), 4'hF, r);
  axil_write(caddr(0), 32'h1, 4'hF, r);
  mech[M_START]++;
  if (try_busy_ops && busy) begin
    axil_write(naddr(0, 0, SLOT_Y), 32'h1234, 4'hF, r);
    chk("busy write refused", r, 2);
    if (r == 2) mech[M_BUSY_SLVERR]++;
    axil_write(caddr(2), 32'(nsteps + 5), 4'hF, r);   // changes STEPS only
    axil_write(caddr(0), 32'h1, 4'hF, r);               // ignored
    axil_read(caddr(4), d);
    if (busy && d < 32'(nsteps)) mech[M_START_IGNORED]++;
  end
  do begin
    axil_read(caddr(1), d); polls++;
  end while (!d[1] && polls < 100000);
  chk("done by polling", d[1], 1);
  if (d[1]) mech[M_POLL_DONE]++;
  if (done_irq) mech[M_IRQ]++;
  axil_read(caddr(3), d); cycles = int'(d);
  axil_read(caddr(4), d); stepcnt = int'(d);
endtask

initial begin
  #(64'd20_000_000_000); failures++;
  $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
  $finish;
end

initial begin
  logic [1:0] r; logic [31:0] d;
  int cyc, sc, osc_cross, prev_sign;
  axil_idle();
  repeat (3) @(posedge clk);
  rst_n = 1; #1;
  axil_read(caddr(5), d);
  chk("info", d, {16'(NPE), 16'(NN)});
  foreach (PERIODS[k]) begin
    load_population(k);
    run_eval(PERIODS[k], k == 0, cyc, sc);
    chk("cycles = steps*(N+2)", cyc, PERIODS[k] * (NN + 2));
    chk("step count", sc, PERIODS[k]);
    ref_run(PERIODS[k]);
    compare_all("period");
  end
  // continuation: the oscillator of PE 0 keeps running from where it was;
  // its neuron 0 must cross 2.75 (its centre) both ways over 10 evaluations
  osc_cross = 0; prev_sign = (y[0][0] > 64'sd180224);
  for (int k = 0; k < 10; k++) begin
    run_eval(100, 0, cyc, sc);
    ref_run(100);
    compare_all("continue");
    mech[M_CONTINUE]++;
    if ((y[0][0] > 64'sd180224) != prev_sign) osc_cross++;
    prev_sign = (y[0][0] > 64'sd180224);
  end
  checks++;
  if (osc_cross < 2) begin failures++; $display("FAIL oscillator did not oscillate"); end
  // halt (abort) part-way
  axil_write(caddr(2), 32'd100000, 4'hF, r);
  axil_write(caddr(0), 32'h1, 4'hF, r);
  repeat (50) @(posedge clk);
  axil_write(caddr(0), 32'h2, 4'hF, r);
  do axil_read(caddr(1), d); while (!d[1]);
  axil_read(caddr(4), d); sc = int'(d);
  checks++;
  if (sc > 0 && sc < 100000) mech[M_HALT]++; else failures++;
  axil_read(caddr(3), d);
  chk("halt cycles", d, sc * (NN + 2));
  ref_run(sc);
  compare_all("halt");
  // zero steps
  axil_write(caddr(2), 32'd0, 4'hF, r);
  axil_write(caddr(0), 32'h1, 4'hF, r);
  for (int k = 0; k < 4; k++) axil_read(caddr(1), d);
  chk("zero steps done", d, 2);
  if (d == 2) mech[M_ZERO_STEPS]++;
  compare_all("zero");
  for (int m = 0; m < M_COUNT; m++) begin
    checks++;
    $display("mechanism %s: %0d", mech_t'(m), mech[m]);
    if (mech[m] == 0) failures++;
  end
  $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
  $finish;
end
