// tb_ctrnn_pe: one PE with N = 3 neurons, random parameters loaded through
// its host port, stepped by hand-made sequencer commands; after every step
// all three states must equal the reference network step of ctrnn_ref_pkg.
// The Euler step must take N + 2 command cycles.
module tb_ctrnn_pe;
  import ctrnn_pkg::*;
  import ctrnn_ref_pkg::*;
  localparam int N  = 3;
  localparam int SW = $clog2(SLOT_W0 + N);
  localparam int NW = $clog2(N);

  logic clk = 0, rst_n = 0;
  seq_t seq;
  logic host_we;
  logic [NW-1:0] host_nrn;
  logic [SW-1:0] host_slot;
  logic [31:0] host_wdata, host_rdata;
  int checks = 0, failures = 0;

  ctrnn_pe #(.N(N)) dut (.*);
  always #5 clk = ~clk;

  longint y [], iin [];
  int th [], h [], w [];

  task automatic chk(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s got=%0d exp=%0d", what, got, exp);
    end
  endtask

  task automatic wr(int n, int slot, logic [31:0] d);
    host_we = 1; host_nrn = NW'(n); host_slot = SW'(slot); host_wdata = d;
    @(posedge clk); #1; host_we = 0;
  endtask

  task automatic rd(int n, int slot, output logic [31:0] d);
    host_nrn = NW'(n); host_slot = SW'(slot);
    @(posedge clk); #1; d = host_rdata;
  endtask

  task automatic step_hw(output int cycles);
    cycles = 0;
    seq = '{phase: PH_ACT, col: '0}; @(posedge clk); #1; cycles++;
    for (int j = 0; j < N; j++) begin
      seq = '{phase: PH_MAC, col: COL_W'(j)}; @(posedge clk); #1; cycles++;
    end
    seq = '{phase: PH_UPD, col: '0}; @(posedge clk); #1; cycles++;
    seq = '{phase: PH_IDLE, col: '0};
  endtask

  initial begin
    #2_000_000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] d;
    int cyc;
    y = new[N]; iin = new[N]; th = new[N]; h = new[N]; w = new[N*N];
    seq = '{phase: PH_IDLE, col: '0};
    host_we = 0; host_nrn = 0; host_slot = 0; host_wdata = 0;
    repeat (2) @(posedge clk);
    rst_n = 1; #1;
    for (int t = 0; t < 20; t++) begin
      for (int i = 0; i < N; i++) begin
        y[i]   = longint'($urandom_range(0, 8*65536)) - 4*65536;
        iin[i] = longint'($urandom_range(0, 2*65536)) - 65536;
        th[i]  = int'($urandom_range(0, 6*256)) - 3*256;
        h[i]   = int'($urandom_range(1000, 20000));
        wr(i, SLOT_Y, 32'(y[i])); wr(i, SLOT_THETA, 32'(th[i]));
        wr(i, SLOT_H, 32'(h[i])); wr(i, SLOT_I, 32'(iin[i]));
        for (int j = 0; j < N; j++) begin
          w[i*N+j] = int'($urandom_range(0, 24*256)) - 12*256;
          wr(i, SLOT_W0 + j, 32'(w[i*N+j]));
        end
      end
      for (int i = 0; i < N; i++)
        for (int j = 0; j < N; j++) begin
          rd(i, SLOT_W0 + j, d); chk("rd w", longint'($signed(d)), longint'(w[i*N+j]));
        end
      for (int s = 0; s < 10; s++) begin
        step_hw(cyc);
        chk("cycles/step", cyc, N + 2);
        net_step(N, y, th, h, iin, w);
        for (int i = 0; i < N; i++) begin
          rd(i, SLOT_Y, d); chk("y", longint'($signed(d)), y[i]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
