// tb_ctrnn_neuron: drives one neuron (N = 3) with hand-made sequencer
// commands and chosen broadcast sigma values, and checks its sigmoid output,
// its Euler update (against ctrnn_ref_pkg), host read-back of every field
// and saturation of the state.
module tb_ctrnn_neuron;
  import ctrnn_pkg::*;
  import ctrnn_ref_pkg::*;
  localparam int N = 3;
  localparam int SW = $clog2(SLOT_W0 + N);

  logic clk = 0, rst_n = 0;
  seq_t seq;
  sig_t sig_in, sig_out;
  logic host_we;
  logic [SW-1:0] host_slot;
  logic [31:0] host_wdata, host_rdata;
  int checks = 0, failures = 0;

  ctrnn_neuron #(.N(N)) dut (.*);
  always #5 clk = ~clk;

  longint y, iin; int th, h; int w [N];

  task automatic chk(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s got=%0d exp=%0d", what, got, exp);
    end
  endtask

  task automatic wr(int slot, logic [31:0] d);
    host_we = 1; host_slot = SW'(slot); host_wdata = d;
    @(posedge clk); #1; host_we = 0;
  endtask

  task automatic rd(int slot, output logic [31:0] d);
    host_slot = SW'(slot);
    @(posedge clk); #1; d = host_rdata;
  endtask

  // One Euler step with sigma_j of the other neurons supplied by the test.
  task automatic step(int sigs[N], output longint y_exp);
    longint acc = 0;
    int my_sig;
    seq = '{phase: PH_ACT, col: '0};
    @(posedge clk); #1;
    my_sig = ref_sigmoid(y + longint'(th) * 256);
    chk("sig_out", longint'(sig_out), longint'(my_sig));
    for (int j = 0; j < N; j++) begin
      seq = '{phase: PH_MAC, col: COL_W'(j)};
      sig_in = sig_t'(sigs[j]);
      acc += longint'(w[j]) * longint'(sigs[j]);
      @(posedge clk); #1;
    end
    seq = '{phase: PH_UPD, col: '0};
    @(posedge clk); #1;
    seq = '{phase: PH_IDLE, col: '0};
    y_exp = neuron_step(y, iin, h, acc);
  endtask

  initial begin
    #1_000_000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] d;
    longint ye;
    int sigs [N];
    seq = '{phase: PH_IDLE, col: '0};
    host_we = 0; host_slot = 0; host_wdata = 0; sig_in = 0;
    repeat (2) @(posedge clk);
    rst_n = 1; #1;
    for (int t = 0; t < 60; t++) begin
      y   = longint'($signed($urandom_range(0, 20*65536))) - 10*65536;
      iin = longint'($signed($urandom_range(0, 4*65536))) - 2*65536;
      th  = int'($urandom_range(0, 8*256)) - 4*256;
      h   = int'($urandom_range(0, 65535));
      for (int j = 0; j < N; j++) w[j] = int'($urandom_range(0, 32*256)) - 16*256;
      wr(SLOT_Y, 32'(y)); wr(SLOT_THETA, 32'(th)); wr(SLOT_H, 32'(h)); wr(SLOT_I, 32'(iin));
      for (int j = 0; j < N; j++) wr(SLOT_W0 + j, 32'(w[j]));
      // read back
      rd(SLOT_Y, d);     chk("rd y", longint'($signed(d)), y);
      rd(SLOT_THETA, d); chk("rd theta", longint'($signed(d)), longint'(th));
      rd(SLOT_H, d);     chk("rd h", longint'(d), longint'(h));
      rd(SLOT_I, d);     chk("rd I", longint'($signed(d)), iin);
      for (int j = 0; j < N; j++) begin
        rd(SLOT_W0 + j, d); chk("rd w", longint'($signed(d)), longint'(w[j]));
      end
      // two steps
      for (int s = 0; s < 2; s++) begin
        for (int j = 0; j < N; j++) sigs[j] = int'($urandom_range(0, 65535));
        step(sigs, ye);
        rd(SLOT_Y, d); chk("euler y", longint'($signed(d)), ye);
        y = ye;
      end
    end
    // saturation: large positive drive with h = 1.0-
    y = 64'sd2147000000; iin = 64'sd2147000000; th = 0; h = 65535;
    wr(SLOT_Y, 32'(y)); wr(SLOT_I, 32'(iin)); wr(SLOT_THETA, 0); wr(SLOT_H, 32'(h));
    for (int j = 0; j < N; j++) begin w[j] = 32767; wr(SLOT_W0 + j, 32'(w[j])); sigs[j] = 65535; end
    step(sigs, ye);
    rd(SLOT_Y, d); chk("sat y", longint'($signed(d)), ye);
    chk("sat y is max", longint'($signed(d)), 64'sd2147483647);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
